// ecp_chain: recovers the error correction pointers (ECPs) of a bucket or
// MUST node from their raw, possibly faulty, storage.
//
// Each ECP holds a cell address and the correct value of that cell. ECPs
// may themselves sit on faulty cells, so the design keeps the rule that a
// faulty ECP is only ever repaired by ECPs in front of it. The ECPs are
// stored rotated left by ROffset ECP widths (logical ECP k sits in physical
// slot (k - ROffset) mod NECP) so that the first logical ECP can always be
// put on fault-free cells. This unit undoes the rotation and walks the ECPs
// in logical order: each one is read after all earlier ones have patched the
// region, and, if it points into the ECP region, patches the bit it points
// to. The result is the corrected logical ECP list. An ECP whose address is
// CELLS or more is unused; with FBit clear no ECP is used.
//
// The bucket instance has 5 ECPs of 13+1 bits starting at cell 4 of the
// bucket; MUST nodes have 3 (non-leaf) or 7 (leaf) ECPs of 11+1 bits. The
// encoding of "unused" and the 11-bit MUST address split are this design's
// choices; rotation and the in-front rule follow the paper.
//
// Interface: combinational.
module ecp_chain #(
  parameter int unsigned NECP   = 5,
  parameter int unsigned EAW    = 13,
  parameter int unsigned ROFF_W = 3,
  parameter int unsigned BASE   = 4,     // cell address of physical slot 0, bit 0
  parameter int unsigned CELLS  = 7488   // addresses below this are in use
) (
  input  logic                      fbit,
  input  logic [ROFF_W-1:0]         roffset,
  input  logic [NECP*(EAW+1)-1:0]   region_raw,
  output logic [NECP-1:0][EAW-1:0]  ecp_addr,   // logical order
  output logic [NECP-1:0]           ecp_val,
  output logic [NECP-1:0]           ecp_used,
  output logic [NECP*(EAW+1)-1:0]   region_fixed,
  output logic [NECP-1:0]           ecp_fixed_self // ECP k was patched by an earlier one
);

  localparam int unsigned EW  = EAW + 1;
  localparam int unsigned RW  = NECP * EW;

  logic [RW-1:0]  w;
  logic [EW-1:0]  e;

  // The patch of the region is written as a decoder (each region bit checks
  // whether the current ECP points at it) so every write has a constant index.
  always_comb begin
    int unsigned r, p;
    w              = region_raw;
    e              = '0;
    ecp_addr       = '0;
    ecp_val        = '0;
    ecp_used       = '0;
    ecp_fixed_self = '0;
    r              = int'(roffset) % NECP;
    for (int unsigned k = 0; k < NECP; k++) begin
      p = (k + NECP - r) % NECP;
      e = w[p*EW +: EW];
      ecp_fixed_self[k] = (e != region_raw[p*EW +: EW]);
      ecp_addr[k] = e[EAW-1:0];
      ecp_val[k]  = e[EAW];
      ecp_used[k] = fbit && (int'(e[EAW-1:0]) < CELLS);
      for (int unsigned b = 0; b < RW; b++)
        if (ecp_used[k] && (int'(e[EAW-1:0]) == BASE + b)) w[b] = e[EAW];
    end
    region_fixed = w;
  end

endmodule
