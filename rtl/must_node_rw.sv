// must_node_rw: reads and updates the VBits+ReadCtr sets on the internal
// path of one MUST node.
//
// A non-leaf node holds a 3-level binary subtree of 7 sets, a leaf node a
// 5-level subtree of 31 sets, both stored as heap arrays (set 0 is the
// subtree root, set i has children 2i+1 and 2i+2) in the low bits of the
// node. Given the heap index of the internal leaf on the accessed path
// (from must_path), the unit returns the sets from the subtree root down to
// that leaf and, when wr_en is set, writes the updated sets back into the
// node image, leaving every other field (MACs, ECPs, IPOffsets) untouched.
// Each set is {ReadCtr[2:0], VBits[11:0]} (the order within a set is this
// design's choice).
//
// Interface: combinational. path_n is 3 for a non-leaf node, 5 for a leaf;
// rd_vr/wr_vr entries beyond path_n are zero/ignored.
module must_node_rw
  import iro_pkg::*;
(
  input  logic [BLOCK_W-1:0]              node_in,
  input  logic                            is_leaf,
  input  logic [4:0]                      ileaf,
  input  logic                            wr_en,
  input  logic [MUST_LF_H-1:0][VR_W-1:0]  wr_vr,
  output logic [MUST_LF_H-1:0][VR_W-1:0]  rd_vr,
  output logic [MUST_LF_H-1:0][4:0]       set_idx,
  output logic [2:0]                      path_n,
  output logic [BLOCK_W-1:0]              node_out
);

  logic [4:0] idx;

  always_comb begin
    path_n   = is_leaf ? 3'(MUST_LF_H) : 3'(MUST_NL_H);
    rd_vr    = '0;
    set_idx  = '0;
    node_out = node_in;
    // walk up from the internal leaf to the subtree root
    idx = ileaf;
    for (int q = MUST_LF_H - 1; q >= 0; q--) begin
      if (q < int'(path_n)) begin
        set_idx[q] = idx;
        idx        = (idx == 0) ? 5'd0 : 5'((idx - 5'd1) >> 1);
      end
    end
    for (int unsigned q = 0; q < MUST_LF_H; q++) begin
      if (q < path_n) begin
        rd_vr[q] = node_in[set_idx[q]*VR_W +: VR_W];
        if (wr_en) node_out[set_idx[q]*VR_W +: VR_W] = wr_vr[q];
      end
    end
  end

endmodule
