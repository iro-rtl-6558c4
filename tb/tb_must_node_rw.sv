// tb_must_node_rw: checks reading and updating the VBits+ReadCtr sets on
// the internal path of leaf and non-leaf MUST nodes.
module tb_must_node_rw;
  import iro_pkg::*;
  logic [BLOCK_W-1:0] nin, nout, exp_n;
  logic is_leaf, wr_en;
  logic [4:0] ileaf;
  logic [4:0][VR_W-1:0] wr_vr, rd_vr;
  logic [4:0][4:0] sidx;
  logic [2:0] pn;
  int checks = 0, failures = 0;

  must_node_rw dut (.node_in(nin), .is_leaf, .ileaf, .wr_en, .wr_vr, .rd_vr,
                    .set_idx(sidx), .path_n(pn), .node_out(nout));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fixed case: leaf node, internal leaf 20 -> path 0 1 4 9 20
    for (int i = 0; i < BLOCK_W; i += 32) nin[i +: 32] = $urandom;
    is_leaf = 1; ileaf = 20; wr_en = 0; wr_vr = '0;
    #1;
    check(pn == 5 && sidx[0] == 0 && sidx[1] == 1 && sidx[2] == 4 && sidx[3] == 9 && sidx[4] == 20,
          "leaf path 0-1-4-9-20");
    check(rd_vr[4] == nin[20*15 +: 15], "leaf set 20 read");
    check(nout == nin, "no write leaves node unchanged");
    for (int t = 0; t < 1000; t++) begin
      int h, path[5], x;
      for (int i = 0; i < BLOCK_W; i += 32) nin[i +: 32] = $urandom;
      is_leaf = 1'($urandom);
      h = is_leaf ? 5 : 3;
      x = (1 << (h-1)) - 1 + $urandom_range((1 << (h-1)) - 1);
      ileaf = 5'(x);
      wr_en = 1'($urandom);
      for (int q = 0; q < 5; q++) wr_vr[q] = VR_W'($urandom);
      for (int q = h-1; q >= 0; q--) begin path[q] = x; x = (x - 1) / 2; end
      exp_n = nin;
      if (wr_en) for (int q = 0; q < h; q++) exp_n[path[q]*15 +: 15] = wr_vr[q];
      #1;
      check(int'(pn) == h, "path length");
      for (int q = 0; q < h; q++) check(rd_vr[q] == nin[path[q]*15 +: 15], "set read");
      check(nout == exp_n, "node image after update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
