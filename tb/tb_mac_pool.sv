// tb_mac_pool: four AES-GCM unit models (80-cycle latency) behind the pool.
// Sixteen requests are pushed back to back: every response must carry the
// right MAC for its tag, the first must arrive about 80 cycles after the
// first request, and the whole batch must take four rounds of 80 cycles,
// since only four units work at a time. The congestion counter must count.
module tb_mac_pool;
  import iro_pkg::*;
  import tb_gcm_pkg::*;
  localparam int NU = 4, MSG_W = 640, TAG_W = 8, LAT = 80, NREQ = 16;
  localparam logic [63:0] KEY = 64'h0123_4567_89AB_CDEF;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic req_valid, req_ready, resp_valid, resp_ready;
  logic [MSG_W-1:0] req_msg, u_msg;
  logic [TAG_W-1:0] req_tag, resp_tag, u_tag;
  logic [MAC_W-1:0] resp_mac;
  logic [NU-1:0] u_start, u_done;
  logic [NU-1:0][MAC_W-1:0] u_mac;
  logic [NU-1:0][TAG_W-1:0] u_tag_o;
  logic [31:0] n_stall, n_issued;
  logic [3:0] q_count;
  int checks = 0, failures = 0;

  mac_pool dut (.*);
  for (genvar i = 0; i < NU; i++) begin : g_u
    gcm_unit_model #(.MSG_W(MSG_W), .TAG_W(TAG_W), .LAT(LAT), .KEY(KEY)) u (
      .clk, .rst, .start(u_start[i]), .msg(u_msg), .tag(u_tag),
      .done(u_done[i]), .mac(u_mac[i]), .tag_o(u_tag_o[i]));
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [MSG_W-1:0] msgs [NREQ];
  bit got [NREQ];
  int cyc = 0, first_resp = -1, last_resp = -1, nresp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst && resp_valid && resp_ready) begin
    nresp <= nresp + 1;
    if (first_resp < 0) first_resp <= cyc;
    last_resp <= cyc;
    checks++;
    if (resp_tag >= NREQ || got[resp_tag] || resp_mac != toy_mac(1024'(msgs[resp_tag]), MSG_W, KEY)) begin
      failures++; $display("FAIL: response tag %0d", resp_tag);
    end else got[resp_tag] = 1;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    rst = 1; req_valid = 0; req_msg = 0; req_tag = 0; resp_ready = 1;
    foreach (got[i]) got[i] = 0;
    for (int i = 0; i < NREQ; i++) for (int b = 0; b < MSG_W; b += 32) msgs[i][b +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst = 0;
    t0 = cyc;
    for (int i = 0; i < NREQ; i++) begin
      req_valid = 1; req_msg = msgs[i]; req_tag = TAG_W'(i);
      @(posedge clk); while (!req_ready) @(posedge clk);
      @(negedge clk);
    end
    req_valid = 0;
    wait (nresp == NREQ);
    @(negedge clk);
    check(first_resp - t0 >= LAT && first_resp - t0 <= LAT + 4, $sformatf("first MAC after %0d cycles", first_resp - t0));
    check(last_resp - t0 >= 4*LAT && last_resp - t0 <= 4*(LAT + 4), $sformatf("16 MACs in %0d cycles", last_resp - t0));
    check(n_stall > 0, "congestion counted");
    begin
      logic [31:0] s0;
      s0 = n_stall;
      // four requests on an idle pool keep every unit busy with an empty
      // queue: that is not congestion and must not be counted
      for (int i = 0; i < NU; i++) got[i] = 0;
      for (int i = 0; i < NU; i++) begin
        req_valid = 1; req_msg = msgs[i]; req_tag = TAG_W'(i);
        @(negedge clk);
      end
      req_valid = 0;
      wait (nresp == NREQ + NU);
      @(negedge clk);
      check(n_stall == s0, "no stall counted while the queue is empty");
    end
    check(n_issued == NREQ + NU, "all issued");
    $display("first %0d last %0d stalls %0d", first_resp - t0, last_resp - t0, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
