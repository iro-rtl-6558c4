// bucket_remap: on-chip table of buckets moved to a redundant area.
//
// When a bucket has more faulty cells than its five ECPs can repair, the
// whole bucket is remapped to a redundant memory area. For a 6 GB tree at a
// cell fault rate of 1e-4 at most about 1084 buckets need this, so the table
// is small enough (about 8 KB) to keep on chip and consult on every bucket
// access. This design holds it as a fully associative table: entry k maps
// bucket index tag[k] to redundant bucket k, entries are filled in order
// and never freed. Every bucket address is looked up combinationally
// (hit / red_idx); insert adds a bucket in the next free entry (ignored when
// the bucket is already present or the table is full). The associative
// organisation and the fill-in-order policy are this design's choices.
// Synchronous active-high reset empties the table.
module bucket_remap #(
  parameter int unsigned ENTRIES = 1084,
  parameter int unsigned BIDX_W  = 23,    // bucket index in a 23-level tree
  parameter int unsigned EW      = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [BIDX_W-1:0] lookup_bkt,
  output logic              hit,
  output logic [EW-1:0]     red_idx,
  input  logic              insert,
  input  logic [BIDX_W-1:0] insert_bkt,
  output logic              full,
  output logic [EW:0]       used
);

  logic [BIDX_W-1:0] tag [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic               ins_hit;

  always_comb begin
    hit     = 1'b0;
    red_idx = '0;
    ins_hit = 1'b0;
    for (int unsigned k = 0; k < ENTRIES; k++) begin
      if (valid[k] && tag[k] == lookup_bkt) begin
        hit     = 1'b1;
        red_idx = EW'(k);
      end
      if (valid[k] && tag[k] == insert_bkt) ins_hit = 1'b1;
    end
  end

  assign full = (used == (EW+1)'(ENTRIES));

  always_ff @(posedge clk) begin
    if (rst) begin
      valid <= '0;
      used  <= '0;
    end else if (insert && !ins_hit && !full) begin
      tag[used[EW-1:0]]   <= insert_bkt;
      valid[used[EW-1:0]] <= 1'b1;
      used                <= used + 1'b1;
    end
  end

endmodule
