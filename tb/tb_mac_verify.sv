// tb_mac_verify: parks expected MACs under random free tags, returns results
// in random order (some matching, some not, some for untracked tags) and
// checks each pass/fail pulse, its tag and the counters against a reference
// table kept in the testbench.
module tb_mac_verify;
  import iro_pkg::*;
  localparam int TAG_W = 8, IDX_W = 4, N = 16;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic req_fire, req_verify, resp_fire, v_pass, v_fail;
  logic [TAG_W-1:0] req_tag, resp_tag, v_tag;
  logic [MAC_W-1:0] req_expect, resp_mac;
  logic [31:0] n_pass, n_fail;
  int checks = 0, failures = 0, exp_pass = 0, exp_fail = 0;
  bit pending [N];
  logic [MAC_W-1:0] want [N];

  mac_verify #(.TAG_W(TAG_W), .IDX_W(IDX_W)) dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [MAC_W-1:0] rmac();
    return MAC_W'({$urandom, $urandom});
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; req_fire = 0; req_verify = 0; resp_fire = 0; req_tag = 0; resp_tag = 0;
    req_expect = 0; resp_mac = 0;
    foreach (pending[i]) pending[i] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      int r, s;
      bit good, tracked;
      req_fire = 0; resp_fire = 0; req_verify = 0;
      // maybe park a new expected MAC under a free tag
      r = $urandom_range(N - 1);
      if (!pending[r] && $urandom_range(1)) begin
        req_fire = 1; req_verify = 1;
        req_tag = TAG_W'({$urandom_range(15), 4'(r)});
        req_expect = rmac();
      end else if ($urandom_range(3) == 0) begin
        req_fire = 1; req_verify = 0; req_tag = TAG_W'($urandom); req_expect = rmac();
      end
      // maybe return a result for a pending (or untracked) tag
      s = $urandom_range(N - 1);
      tracked = pending[s];
      good = $urandom_range(2) != 0;
      if ((tracked || $urandom_range(3) == 0) && !(req_fire && req_verify && 4'(r) == 4'(s))) begin
        resp_fire = 1;
        resp_tag  = TAG_W'({4'($urandom), 4'(s)});
        resp_mac  = (tracked && good) ? want[s] : rmac();
      end
      @(posedge clk);
      if (req_fire && req_verify) begin pending[r] = 1; want[r] = req_expect; end
      #1;
      if (resp_fire && tracked) begin
        pending[s] = 0;
        if (good) exp_pass++; else exp_fail++;
        check(v_pass == good && v_fail == !good, "pass/fail pulse");
        check(v_tag == resp_tag, "result tag");
      end else begin
        check(!v_pass && !v_fail, "no pulse for untracked result");
      end
      check(n_pass == 32'(exp_pass) && n_fail == 32'(exp_fail), "counters");
      @(negedge clk);
    end
    check(exp_pass > 100 && exp_fail > 50, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
