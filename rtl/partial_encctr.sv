// partial_encctr: spreads the bucket's encryption counter over the ECC
// words of its data slots and rebuilds it after a failure.
//
// The 60-bit EncCtr is cut into six 10-bit parts. Each channel holds six data
// slots (slot d is in channel d mod 2), and the k-th slot of a channel, i.e.
// slot 2k + channel, carries part k (bits 10k+9 .. 10k) in plaintext next
// to its 54-bit MAC. Each channel therefore holds one full copy, and the
// counter survives the loss of either channel. Which part goes to which slot
// of a channel is this design's choice; the paper fixes only the split.
//
// Interface: combinational. encctr -> penc_out gives the parts to write.
// penc_in are the parts read back; use_ch picks the channel to rebuild from.
// copies_differ flags that the two channel copies disagree.
// The write side (penc_out) is pure wiring: each part is a slice of the
// counter, so those outputs come straight from the encctr input.
module partial_encctr
  import iro_pkg::*;
(
  input  logic [ENCCTR_W-1:0]            encctr,
  output logic [SLOTS-1:0][PENC_W-1:0]   penc_out,
  input  logic [SLOTS-1:0][PENC_W-1:0]   penc_in,
  input  logic                           use_ch,
  output logic [ENCCTR_W-1:0]            encctr_rec,
  output logic                           copies_differ
);

  logic [ENCCTR_W-1:0] copy0, copy1;

  always_comb begin
    for (int unsigned k = 0; k < SLOTS_PER_CH; k++) begin
      penc_out[2*k]     = encctr[PENC_W*k +: PENC_W];
      penc_out[2*k + 1] = encctr[PENC_W*k +: PENC_W];
      copy0[PENC_W*k +: PENC_W] = penc_in[2*k];
      copy1[PENC_W*k +: PENC_W] = penc_in[2*k + 1];
    end
    encctr_rec    = use_ch ? copy1 : copy0;
    copies_differ = (copy0 != copy1);
  end

endmodule
