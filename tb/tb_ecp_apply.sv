// tb_ecp_apply: checks that only the ECPs pointing into the addressed block
// change it, that they force the stored value, and the changed-bit count.
module tb_ecp_apply;
  localparam int N = 5, EAW = 13, W = 576;
  logic [N-1:0][EAW-1:0] addr;
  logic [N-1:0] val, used;
  logic [EAW-1:0] base;
  logic [W-1:0] bin, bout, exp_b;
  logic [2:0] hits;
  int checks = 0, failures = 0, eh;

  ecp_apply #(.NECP(N), .EAW(EAW), .BLK_W(W)) dut (.ecp_addr(addr), .ecp_val(val),
    .ecp_used(used), .block_base(base), .blk_in(bin), .blk_out(bout), .hits);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int pos;
      pos = $urandom_range(12);
      base = EAW'(pos * W);
      for (int i = 0; i < W; i += 32) bin[i +: 32] = $urandom;
      for (int k = 0; k < N; k++) begin
        int blk;
        blk = ($urandom_range(1)) ? pos : $urandom_range(12);
        addr[k] = EAW'(blk * W + $urandom_range(W-1));
        val[k]  = 1'($urandom);
        used[k] = 1'($urandom_range(3) != 0);
      end
      exp_b = bin; eh = 0;
      for (int k = 0; k < N; k++)
        if (used[k] && addr[k] >= base && addr[k] < base + W) begin
          if (exp_b[addr[k] - base] != val[k]) eh++;
          exp_b[addr[k] - base] = val[k];
        end
      #1;
      checks++; if (bout != exp_b) begin failures++; $display("FAIL block t=%0d", t); end
      checks++; if (int'(hits) != eh) begin failures++; $display("FAIL hits t=%0d %0d %0d", t, hits, eh); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
