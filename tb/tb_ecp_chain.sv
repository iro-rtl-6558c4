// tb_ecp_chain: checks ECP recovery on the bucket layout (5 ECPs of 14 bits
// from cell 4). Random ECP sets are generated so that every ECP repairs a
// data cell or a cell of a later ECP, rotated by a random ROffset; the
// faulty cells in the ECP region are then flipped and the unit must return
// the intended logical ECP list. Includes the cases of the paper's bucket
// repair figure (ECP-3 repaired by ECP-1; rotation by 4 with four faulty
// ECPs in a chain).
module tb_ecp_chain;
  localparam int N = 5, EAW = 13, EW = 14, BASE = 4, CELLS = 7488;
  logic              fbit;
  logic [2:0]        roffset;
  logic [N*EW-1:0]   raw, fixed;
  logic [N-1:0][EAW-1:0] addr;
  logic [N-1:0]      val, used, selff;
  int checks = 0, failures = 0;

  ecp_chain #(.NECP(N), .EAW(EAW), .ROFF_W(3), .BASE(BASE), .CELLS(CELLS)) dut (
    .fbit, .roffset, .region_raw(raw), .ecp_addr(addr), .ecp_val(val), .ecp_used(used),
    .region_fixed(fixed), .ecp_fixed_self(selff));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // target[k]: -1 = unused, -2 = data cell, j>k = a cell inside logical ECP j
  task automatic build_and_check(input int r, input int target[N], input int tbit[N], input string nm);
    logic [EW-1:0] lecp[N];
    logic [N*EW-1:0] intended;
    int p;
    for (int k = N-1; k >= 0; k--) begin
      if (target[k] == -1) lecp[k] = {1'b0, {EAW{1'b1}}};
      else if (target[k] == -2) begin
        lecp[k][EAW-1:0] = EAW'($urandom_range(CELLS-1, 100));
        lecp[k][EAW]     = 1'($urandom);
      end else begin
        p = (target[k] - r + N) % N;
        lecp[k][EAW-1:0] = EAW'(BASE + p*EW + tbit[k]);
        lecp[k][EAW]     = lecp[target[k]][tbit[k]];
      end
    end
    for (int k = 0; k < N; k++) intended[((k - r + N) % N)*EW +: EW] = lecp[k];
    raw = intended;
    for (int k = 0; k < N; k++)
      if (target[k] >= 0) raw[((target[k] - r + N) % N)*EW + tbit[k]] ^= 1'b1;
    fbit = 1; roffset = 3'(r);
    #1;
    check(fixed == intended, {nm, ": region repaired"});
    for (int k = 0; k < N; k++) begin
      check({val[k], addr[k]} == lecp[k], {nm, ": logical ECP"});
      check(used[k] == (target[k] != -1), {nm, ": used flag"});
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tg[N], tb[N];
    // (b): ROffset 0, ECP-1 repairs ECP-3, others repair data
    tg = '{2, -2, -2, -2, -1}; tb = '{5, 0, 0, 0, 0};
    build_and_check(0, tg, tb, "fig b");
    check(selff == 5'b00100, "fig b: ECP-3 patched");
    // (d): ROffset 4, chain 1->2->3->4->5
    tg = '{1, 2, 3, 4, -2}; tb = '{3, 13, 0, 7, 0};
    build_and_check(4, tg, tb, "fig d");
    check(selff == 5'b11110, "fig d: ECP-2..5 patched");
    // FBit clear: nothing used
    fbit = 0; #1;
    check(used == '0, "fbit clear disables ECPs");
    // random
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < N; k++) begin
        int c;
        c = $urandom_range(3);
        tb[k] = $urandom_range(EW-1);
        if (c == 0) tg[k] = -1;
        else if (c == 1 || k == N-1) tg[k] = -2;
        else tg[k] = $urandom_range(N-1, k+1);
      end
      build_and_check($urandom_range(N-1), tg, tb, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
