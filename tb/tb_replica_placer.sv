// tb_replica_placer: checks replica placement against the worked example of
// the paper's replication figure and against a reference model on random
// buckets (channel rule, leftmost-free rule, no collisions, faulty-slot
// avoidance for the metadata replica).
module tb_replica_placer;
  import iro_pkg::*;
  logic [Z-1:0][SLOT_W-1:0] real_off;
  logic [Z-1:0]             real_valid;
  logic [SLOTS-1:0]         meta_bad;
  logic [SLOT_W-1:0]        meta_rep_off;
  logic [Z-1:0][SLOT_W-1:0] rep_off;
  logic [Z-1:0]             rep_valid;
  logic [SLOTS-1:0]         is_real, is_rep, ch;
  logic                     ok;
  int checks = 0, failures = 0;

  replica_placer dut (.real_off, .real_valid, .meta_bad, .meta_rep_off, .rep_off,
    .rep_valid, .slot_is_real(is_real), .slot_is_replica(is_rep), .slot_channel_o(ch), .ok);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: leftmost free slot of the other channel
  task automatic reference(output int mr, output int rr[Z], output bit rok);
    bit used[SLOTS];
    rok = 1;
    foreach (used[d]) used[d] = 0;
    for (int i = 0; i < Z; i++) if (real_valid[i]) used[real_off[i]] = 1;
    mr = -1;
    for (int d = 0; d < SLOTS; d++)
      if (mr < 0 && !used[d] && !meta_bad[d] && (d % 2) == 0) mr = d;
    if (mr < 0) rok = 0; else used[mr] = 1;
    for (int i = 0; i < Z; i++) begin
      rr[i] = -1;
      if (real_valid[i]) begin
        for (int d = 0; d < SLOTS; d++)
          if (rr[i] < 0 && !used[d] && (d % 2) != (real_off[i] % 2)) rr[i] = d;
        if (rr[i] < 0) rok = 0; else used[rr[i]] = 1;
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mr, rr[Z];
    bit rok, perm_used[SLOTS];
    // Figure example: bucket positions M D B E C m . . . . . A . map to data
    // slots D=0 B=1 E=2 C=3 A=10; address order A B C D E.
    real_off   = {4'd2, 4'd0, 4'd3, 4'd1, 4'd10}; // E D C B A  (index 0 = A)
    real_valid = '1;
    meta_bad   = '0;
    #1;
    check(meta_rep_off == 4, "figure: metadata replica in data slot 4");
    check(rep_off[0] == 5, "figure: replica a in slot 5");
    check(rep_off[1] == 6, "figure: replica b in slot 6");
    check(rep_off[2] == 8, "figure: replica c in slot 8");
    check(rep_off[3] == 7, "figure: replica d in slot 7");
    check(rep_off[4] == 9, "figure: replica e in slot 9");
    check(ok && rep_valid == '1, "figure: all placed");
    check(is_rep == 12'b0011_1111_0000, "figure: replica map");
    check(ch == 12'b1010_1010_1010, "channel map alternates");
    // faulty slot 4 pushes the metadata replica to slot 6
    meta_bad = 12'h010;
    #1;
    check(meta_rep_off == 6, "metadata replica avoids faulty slot");
    // random buckets
    for (int t = 0; t < 400; t++) begin
      foreach (perm_used[d]) perm_used[d] = 0;
      for (int i = 0; i < Z; i++) begin
        int d;
        do d = $urandom_range(SLOTS-1); while (perm_used[d]);
        perm_used[d] = 1;
        real_off[i] = SLOT_W'(d);
      end
      real_valid = Z'($urandom);
      meta_bad   = SLOTS'($urandom) & SLOTS'($urandom);
      #1;
      reference(mr, rr, rok);
      check(ok == rok, "random: ok flag");
      if (rok) begin
        check(int'(meta_rep_off) == mr, "random: metadata replica slot");
        for (int i = 0; i < Z; i++) if (real_valid[i]) begin
          check(int'(rep_off[i]) == rr[i], "random: replica slot");
          check(rep_off[i][0] != real_off[i][0], "random: replica in other channel");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
