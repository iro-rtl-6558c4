// tb_bucket_remap: fills the remap table to its 1084 entries with random
// distinct buckets, checks that every one maps to the entry it was given (in
// fill order), that unmapped buckets miss, that duplicates are ignored and
// that a full table takes no more.
module tb_bucket_remap;
  localparam int N = 1084, BW = 23, EW = 11;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic [BW-1:0] lookup_bkt, insert_bkt;
  logic hit, insert, full;
  logic [EW-1:0] red_idx;
  logic [EW:0] used;
  int checks = 0, failures = 0;
  logic [BW-1:0] keys [N];

  bucket_remap dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; insert = 0; insert_bkt = 0; lookup_bkt = 0;
    // distinct keys spread over the index space: 7717*i + 3
    for (int i = 0; i < N; i++) keys[i] = BW'(i * 7717 + 3);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin
      lookup_bkt = keys[i]; #1;
      check(!hit, "miss before insert");
      insert = 1; insert_bkt = keys[i]; @(negedge clk);
      insert = 0; #1;
      check(hit && red_idx == EW'(i), "hit after insert");
      if (i == 10) begin
        insert = 1; insert_bkt = keys[3]; @(negedge clk); insert = 0;
        check(used == 11, "duplicate ignored");
      end
    end
    check(full && used == N, "table full");
    insert = 1; insert_bkt = 23'h7FFFFF; @(negedge clk); insert = 0;
    lookup_bkt = 23'h7FFFFF; #1;
    check(!hit && used == N, "full table takes no more");
    for (int t = 0; t < 300; t++) begin
      int k;
      k = $urandom_range(N-1);
      lookup_bkt = keys[k]; #1;
      check(hit && red_idx == EW'(k), "random lookup");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
