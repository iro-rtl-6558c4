// tb_must_top_cache: writes every node of the cached MUST levels with a
// pattern derived from its index, reads them back in random order and checks
// the one-cycle read latency, that read data holds while the memory is
// disabled or written, and that a rewritten node reads back its new value.
module tb_must_top_cache;
  logic clk = 0, en, we;
  logic [9:0] addr;
  logic [575:0] wdata, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  must_top_cache dut (.clk, .en, .we, .addr, .wdata, .rdata);

  function automatic logic [575:0] pat(int a);
    logic [575:0] v;
    for (int i = 0; i < 18; i++) v[i*32 +: 32] = 32'(a * 32'h9E3779B1 + i * 7919);
    return v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < 576; a++) begin
      en = 1; we = 1; addr = 10'(a); wdata = pat(a);
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 600; t++) begin
      int a;
      a = $urandom_range(575);
      en = 1; addr = 10'(a);
      @(negedge clk);
      en = 0; addr = 10'($urandom_range(575));
      checks++; if (rdata != pat(a)) begin failures++; $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++; if (rdata != pat(a)) begin failures++; $display("FAIL hold %0d", a); end
      // a write to another node leaves the read data alone
      en = 1; we = 1; addr = 10'((a + 1 + $urandom_range(574)) % 576);
      wdata = pat(int'(addr) + 1000 * (t + 1));
      @(negedge clk);
      en = 0; we = 0;
      checks++; if (rdata != pat(a)) begin failures++; $display("FAIL hold over write %0d", a); end
      en = 1; @(negedge clk); en = 0;
      checks++; if (rdata != wdata) begin failures++; $display("FAIL rewritten node %0d", addr); end
      wdata = pat(int'(addr)); en = 1; we = 1; @(negedge clk); en = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
