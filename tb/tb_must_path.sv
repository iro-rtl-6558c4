// tb_must_path: checks MUST path location. A small instance (one tree, two
// MUST levels, 3-level leaf nodes) reproduces the worked example of the
// paper's MUST figure: PMetaTree node 36 (6th leaf) lies in the 2nd leaf
// MUST node (MUS_2), internal path 1st-2nd-5th node, and the root node's
// IPOffset is 3. The default instance is checked against a reference walk of
// the binary tree for random labels.
module tb_must_path;
  import iro_pkg::*;
  // small instance of the figure
  logic [4:0] s_label;
  logic [1:0][3:0] s_idx, s_gidx;
  logic [1:0][4:0] s_ileaf;
  logic [1:0] s_cached;
  logic [0:0][2:0] s_child;
  logic [2:0] s_ipoff;
  must_path #(.L(2), .ROOTS_W(0), .CACHED(1), .LFH(3)) u_small (
    .label(s_label), .node_idx(s_idx), .node_gidx(s_gidx), .ileaf(s_ileaf),
    .cached(s_cached), .child_sel(s_child), .ipoff_field(s_ipoff));

  localparam int L = 5, LW = 22, NW = 19;
  logic [LW-1:0] label;
  logic [L-1:0][NW-1:0] idx, gidx;
  logic [L-1:0][4:0] ileaf;
  logic [L-1:0] cached;
  logic [L-2:0][2:0] child;
  logic [11:0] ipoff;
  must_path dut (.label, .node_idx(idx), .node_gidx(gidx), .ileaf, .cached,
                 .child_sel(child), .ipoff_field(ipoff));

  int checks = 0, failures = 0;
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
    s_label = 5'd5; // node 36 = leaf 31 + 5
    #1;
    check(s_idx[0] == 0 && s_ileaf[0] == 3, "figure: MUS0 IPOffset 3");
    check(s_ipoff == 3, "figure: IPOffset field");
    check(s_gidx[1] == 2, "figure: leaf MUST node is MUS_2");
    check(s_ileaf[1] == 4, "figure: internal leaf is 5th node");
    check(s_child[0] == 1, "figure: MUS_2 is child 1 of MUS0");
    check(s_cached == 2'b01, "figure: cached levels");
    for (int t = 0; t < 2000; t++) begin
      longint node; int lvl_start;
      label = LW'({$urandom, $urandom});
      #1;
      // reference: walk the 17-level binary tree of the tree chosen by the
      // top 6 bits; MUST level j starts at binary level 3j
      for (int j = 0; j < L; j++) begin
        longint n_at, n_leaf; longint off;
        int h;
        h = (j < L-1) ? 3 : 5;
        n_at   = longint'(label) >> (LW - 6 - 3*j);          // node at binary level 3j (forest-wide)
        n_leaf = longint'(label) >> (LW - 6 - 3*j - (h-1));  // node at the internal leaf level
        off = 0;
        for (int i = 0; i < j; i++) off += longint'(64) << (3*i);
        check(idx[j] == NW'(n_at), "node index");
        check(gidx[j] == NW'(off + n_at), "global index");
        check(ileaf[j] == 5'((1 << (h-1)) - 1 + (n_leaf - (n_at << (h-1)))), $sformatf("internal leaf j=%0d got %0d", j, ileaf[j]));
        check(cached[j] == (j < 2), "cached");
        if (j < L-1) begin
          check(child[j] == 3'((longint'(label) >> (LW - 6 - 3*j - 3)) & 7), "child select");
          check(ipoff[3*j +: 3] == ileaf[j][2:0], "IPOffset field");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
