// tb_partial_encctr: checks that the EncCtr parts land in the right slots
// and that the counter is rebuilt from either channel when the other one
// returns garbage.
module tb_partial_encctr;
  import iro_pkg::*;
  logic [ENCCTR_W-1:0] encctr, rec;
  logic [SLOTS-1:0][PENC_W-1:0] pout, pin;
  logic use_ch, differ;
  int checks = 0, failures = 0;

  partial_encctr dut (.encctr, .penc_out(pout), .penc_in(pin), .use_ch,
                      .encctr_rec(rec), .copies_differ(differ));

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
    for (int t = 0; t < 200; t++) begin
      int bad;
      encctr = {$urandom, $urandom};
      #1;
      for (int d = 0; d < SLOTS; d++)
        check(pout[d] == encctr[10*(d/2) +: 10], "part k in slot 2k+ch");
      bad    = $urandom_range(1);
      pin    = pout;
      for (int d = 0; d < SLOTS; d++) if (d % 2 == bad) pin[d] = PENC_W'($urandom);
      use_ch = ~bad[0];
      #1;
      check(rec == encctr, "rebuilt from surviving channel");
      pin    = pout;
      #1;
      check(!differ, "copies agree");
      pin[2*$urandom_range(5) + bad] ^= 10'h001;
      #1;
      check(differ, "copies differ detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
