// must_top_cache: on-chip store of the MUST nodes of the cached top MUST
// levels.
//
// With the default forest of 64 MUST trees, the top two MUST levels hold
// 64 + 512 = 576 nodes of 576 bits, the 40.5 KB the design keeps on chip so
// that a MUST path needs only the three lower levels from DRAM. Nodes are
// addressed by their breadth-first global index from must_path. The store is
// a plain single-port memory: one read or write per cycle, read data valid
// the cycle after the request, write-first on a collision is not needed as
// there is one port. Contents are not reset (a MUST is initialised by writing
// it); the organisation of the store is this design's choice.
module must_top_cache
  import iro_pkg::*;
#(
  parameter int unsigned DEPTH = 576,
  parameter int unsigned W     = BLOCK_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
