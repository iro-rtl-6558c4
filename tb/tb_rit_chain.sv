// tb_rit_chain: checks the RIT path check on a small tree (8 levels, top 2
// cached, 6 in DRAM). For random paths the metadata blocks are presented top
// down with child MACs that link the path; correct MACs must pass, a
// tampered MAC must fail at its level, and after an update from leaf to
// root a replay of the old root-side MAC must fail while the new one passes.
module tb_rit_chain;
  import iro_pkg::*;
  localparam int LEVELS = 8, CL = 2, LV = 6, LW = 7, LVW = 3;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic anchor_we, start, mb_valid, mac_valid, upd_valid, chk_pass, chk_fail;
  logic [CL-1:0] anchor_idx;
  logic [MAC_W-1:0] anchor_mac, mac_value, upd_mac;
  logic [LW-1:0] label;
  logic [LVW-1:0] mb_level, mac_level, upd_level, rd_level, err_level;
  logic [1:0][MAC_W-1:0] mb_child_mac, rd_child_mac;
  logic [31:0] n_checked, n_failed;
  int checks = 0, failures = 0;

  rit_chain #(.LEVELS(LEVELS), .CL(CL)) dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [MAC_W-1:0] rmac();
    return {$urandom, $urandom};
  endfunction

  function automatic int sidebit(int i); return label[LW - CL - i]; endfunction

  logic [MAC_W-1:0] m [LV];

  task automatic idle();
    anchor_we = 0; start = 0; mb_valid = 0; mac_valid = 0; upd_valid = 0;
  endtask

  // present the path top-down and check the MAC of level chk_lvl with value v
  task automatic run_path(input int bad_lvl);
    start = 1; @(negedge clk); idle();
    for (int i = 0; i < LV; i++) begin
      mb_level = LVW'(i);
      mb_child_mac[0] = rmac(); mb_child_mac[1] = rmac();
      if (i < LV-1) mb_child_mac[sidebit(i+1)] = m[i+1];
      mb_valid = 1; @(negedge clk); idle();
    end
    for (int i = 0; i < LV; i++) begin
      mac_level = LVW'(i);
      mac_value = (i == bad_lvl) ? m[i] ^ 54'h4 : m[i];
      mac_valid = 1; @(posedge clk); #1; idle();
      if (i == bad_lvl) check(chk_fail && !chk_pass && err_level == LVW'(i), "tampered MAC detected");
      else              check(chk_pass && !chk_fail, "correct MAC passes");
      @(negedge clk);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); rst = 1; label = 0; anchor_idx = 0; anchor_mac = 0; mac_value = 0; upd_mac = 0;
    mb_level = 0; mac_level = 0; upd_level = 0; rd_level = 0; mb_child_mac = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 40; t++) begin
      logic [MAC_W-1:0] old0;
      label = LW'($urandom);
      for (int i = 0; i < LV; i++) m[i] = rmac();
      anchor_idx = label[LW-1 -: CL]; anchor_mac = m[0]; anchor_we = 1; @(negedge clk); idle();
      run_path(-1);
      run_path($urandom_range(LV-1));
      // update leaf to root with new MACs
      old0 = m[0];
      for (int i = LV-1; i >= 0; i--) begin
        m[i] = rmac();
        upd_level = LVW'(i); upd_mac = m[i]; upd_valid = 1; @(negedge clk); idle();
        if (i > 0) begin
          rd_level = LVW'(i-1); #1;
          check(rd_child_mac[sidebit(i)] == m[i], "new MAC written into parent");
        end
      end
      // replay of the old top MAC must fail, new passes
      start = 1; @(negedge clk); idle();
      mac_level = 0; mac_value = old0; mac_valid = 1; @(posedge clk); #1; idle();
      check(chk_fail, "replayed old MAC rejected");
      @(negedge clk);
      mac_level = 0; mac_value = m[0]; mac_valid = 1; @(posedge clk); #1; idle();
      check(chk_pass, "updated anchor accepted");
      @(negedge clk);
    end
    check(n_failed == 80, "failure count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
