// ecp_apply: corrects one block with a list of error correction pointers.
//
// Every used ECP whose cell address falls inside this block, i.e. in
// [block_base, block_base + BLK_W), forces that bit to the value the ECP
// stores. block_base is the cell address of bit 0 of the block: position *
// 576 in a bucket (metadata block at position 0, data slot d at d + 1), or 0
// for a MUST node and for its mirror, which share one ECP list. hits counts
// the bits that were actually changed, so a caller can tell a repaired read
// from a clean one.
//
// Interface: combinational.
module ecp_apply #(
  parameter int unsigned NECP  = 5,
  parameter int unsigned EAW   = 13,
  parameter int unsigned BLK_W = 576
) (
  input  logic [NECP-1:0][EAW-1:0]  ecp_addr,
  input  logic [NECP-1:0]           ecp_val,
  input  logic [NECP-1:0]           ecp_used,
  input  logic [EAW-1:0]            block_base,
  input  logic [BLK_W-1:0]          blk_in,
  output logic [BLK_W-1:0]          blk_out,
  output logic [$clog2(NECP+1)-1:0] hits
);

  // Each ECP's offset into the block is one subtraction; the write is a
  // decoder over the block bits so that every write has a constant index.
  always_comb begin
    logic [EAW-1:0] rel;
    logic           inb;
    blk_out = blk_in;
    hits    = '0;
    for (int unsigned k = 0; k < NECP; k++) begin
      rel = ecp_addr[k] - block_base;
      inb = ecp_used[k] && (ecp_addr[k] >= block_base) && (int'(rel) < BLK_W);
      if (inb && (blk_out[rel[$clog2(BLK_W)-1:0]] != ecp_val[k])) hits = hits + 1'b1;
      for (int unsigned b = 0; b < BLK_W; b++)
        if (inb && (int'(rel) == b)) blk_out[b] = ecp_val[k];
    end
  end

endmodule
