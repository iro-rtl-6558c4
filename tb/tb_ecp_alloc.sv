// tb_ecp_alloc: checks ECP allocation on the bucket layout. For every fault
// set the region produced is written to a model of the faulty cells (each
// faulty cell stores the inverse of what is written), read back through a
// reference recovery model, and every faulty cell must then read its correct
// value. Also checks the ROffsets of the paper's bucket-repair figure
// (cases c and d) and that an unrepairable set is reported.
module tb_ecp_alloc;
  localparam int N = 5, EAW = 13, EW = 14, BASE = 4, CELLS = 7488, RW = N*EW;
  logic [N-1:0] f_valid, f_val;
  logic [N-1:0][EAW-1:0] f_addr;
  logic fbit, ok;
  logic [2:0] roffset;
  logic [RW-1:0] region;
  int checks = 0, failures = 0;

  ecp_alloc #(.NECP(N), .EAW(EAW), .ROFF_W(3), .BASE(BASE), .CELLS(CELLS)) dut (
    .f_valid, .f_addr, .f_val, .fbit, .roffset, .region, .ok);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int cell_in(int phys, int b); return BASE + phys*EW + b; endfunction

  // write region with stuck cells, recover with a reference chain, verify cells
  task automatic verify(input string nm);
    logic [RW-1:0] st;
    logic [EW-1:0] e;
    logic [N-1:0][EAW-1:0] la; logic [N-1:0] lv;
    int r, p, rel;
    st = region;
    for (int f = 0; f < N; f++)
      if (f_valid[f] && f_addr[f] >= BASE && f_addr[f] < BASE + RW) st[f_addr[f]-BASE] ^= 1'b1;
    r = int'(roffset) % N;
    for (int k = 0; k < N; k++) begin
      p = (k - r + N) % N;
      e = st[p*EW +: EW];
      la[k] = e[EAW-1:0]; lv[k] = e[EAW];
      if (fbit && la[k] >= BASE && la[k] < BASE + RW) st[la[k]-BASE] = lv[k];
    end
    check(st == region, {nm, ": ECP region reads back as written"});
    for (int f = 0; f < N; f++) if (f_valid[f] && !(f_addr[f] >= BASE && f_addr[f] < BASE + RW)) begin
      bit found;
      found = 0;
      for (int k = 0; k < N; k++) if (la[k] == f_addr[f] && lv[k] == f_val[f]) found = 1;
      check(found, {nm, ": data fault repaired"});
    end
    check(fbit == (f_valid != 0), {nm, ": fbit"});
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfail_ok = 0;
    // figure (c): faults in physical ECP slots 0 and 2 plus a data fault
    f_valid = 5'b00111;
    f_addr  = '0;
    f_addr[0] = EAW'(cell_in(0, 3)); f_addr[1] = EAW'(cell_in(2, 9)); f_addr[2] = 13'd1000;
    f_val = 5'b00100;
    #1;
    check(ok && roffset == 1, "fig c: ROffset 1");
    verify("fig c");
    // figure (d): faults in physical slots 0, 2, 3, 4
    f_valid = 5'b01111;
    f_addr[0] = EAW'(cell_in(0, 1)); f_addr[1] = EAW'(cell_in(2, 13));
    f_addr[2] = EAW'(cell_in(3, 0)); f_addr[3] = EAW'(cell_in(4, 6));
    #1;
    check(ok && roffset == 4, "fig d: ROffset 4");
    verify("fig d");
    // every ECP faulty: cannot be repaired
    f_valid = 5'b11111;
    for (int k = 0; k < N; k++) f_addr[k] = EAW'(cell_in(k, 2));
    #1;
    check(!ok, "five faulty ECPs reported");
    // no fault
    f_valid = '0; #1;
    check(ok && !fbit && roffset == 0, "no fault");
    verify("none");
    // random
    for (int t = 0; t < 1000; t++) begin
      for (int f = 0; f < N; f++) begin
        f_valid[f] = 1'($urandom_range(2) != 0);
        f_val[f]   = 1'($urandom);
        if ($urandom_range(1)) f_addr[f] = EAW'(cell_in($urandom_range(N-1), $urandom_range(EW-1)));
        else f_addr[f] = EAW'($urandom_range(CELLS-1, 80));
      end
      // keep addresses distinct
      for (int f = 0; f < N; f++) for (int g = 0; g < f; g++)
        if (f_valid[f] && f_valid[g] && f_addr[f] == f_addr[g]) f_valid[f] = 0;
      #1;
      if (ok) verify("random"); else nfail_ok++;
    end
    check(nfail_ok < 600, "most random sets repairable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
