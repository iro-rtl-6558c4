// must_path: locates the VBits+ReadCtr sets of one Ring ORAM path inside the
// Minimum Update Subtree Tree (MUST).
//
// The VBits+ReadCtr sets of the buckets form a binary tree (PMetaTree). It is
// cut into subtrees of one memory block each: non-leaf MUST nodes hold a
// 3-level subtree (7 sets) and have 8 children, leaf MUST nodes hold a
// 5-level subtree (31 sets). The MUST is a forest of 2^ROOTS_W such trees
// of L MUST levels, covering 2^ROOTS_W * 2^(3(L-1)+4) ORAM leaves; with the
// defaults (6, 5) the label is the 22-bit leaf label of a 23-level ORAM tree.
//
// For a leaf label the path crosses one MUST node per MUST level. Reading
// the label from its most significant bit, ROOTS_W bits pick the tree, then
// every non-leaf node uses 2 bits to pick its internal leaf and its 3rd
// bit (together with those 2) to pick one of its 8 children; the leaf node
// uses its last LFH-1 (4) bits for its internal leaf. The internal leaf is given as
// its heap index inside the node (root 0, children 2i+1, 2i+2), so a
// non-leaf node's value 3..6 is exactly the IPOffset the paper stores in
// the leaf MUST node; ipoff_field packs those L-1 values for that field.
// Node numbering is breadth-first over the forest: level j starts at
// 2^ROOTS_W * (8^j - 1) / 7. Levels below CACHED are held on chip.
//
// Interface: combinational.
module must_path
  import iro_pkg::*;
#(
  parameter int unsigned L       = MUST_LEVELS,
  parameter int unsigned ROOTS_W = 6,
  parameter int unsigned CACHED  = MUST_CACHED,
  parameter int unsigned LFH     = MUST_LF_H,   // binary levels in a leaf node
  parameter int unsigned LW      = ROOTS_W + 3*(L-1) + LFH - 1,
  parameter int unsigned NIDX_W  = ROOTS_W + 3*(L-1) + 1
) (
  input  logic [LW-1:0]                 label,
  output logic [L-1:0][NIDX_W-1:0]      node_idx,    // index within its MUST level
  output logic [L-1:0][NIDX_W-1:0]      node_gidx,   // breadth-first global index
  output logic [L-1:0][4:0]             ileaf,       // internal leaf heap index
  output logic [L-1:0]                  cached,
  output logic [L-2:0][2:0]             child_sel,   // which of 8 children is next
  output logic [(L-1)*IPOFF_W-1:0]      ipoff_field
);

  logic [NIDX_W-1:0] base;

  always_comb begin
    base        = '0;
    ipoff_field = '0;
    child_sel   = '0;
    for (int unsigned j = 0; j < L; j++) begin
      node_idx[j]  = NIDX_W'(label >> (LW - ROOTS_W - 3*j));
      node_gidx[j] = base + node_idx[j];
      cached[j]    = (j < CACHED);
      if (j < L - 1) begin
        ileaf[j]     = 5'(3 + ((int'(label) >> (LW - ROOTS_W - 3*j - 2)) & 3));
        child_sel[j] = 3'((int'(label) >> (LW - ROOTS_W - 3*j - 3)) & 7);
        ipoff_field[j*IPOFF_W +: IPOFF_W] = IPOFF_W'(ileaf[j]);
      end else begin
        ileaf[j] = 5'((2**(LFH-1) - 1) + (int'(label) & (2**(LFH-1) - 1)));
      end
      base = base + (NIDX_W'(1) << (ROOTS_W + 3*j));
    end
  end

endmodule
