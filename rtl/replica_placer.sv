// replica_placer: reliability-aware replica placement for one bucket.
//
// The twelve data slots of a bucket alternate between the two memory
// channels (slot d lives in channel d mod 2; the metadata block lives in
// channel 1). Once the real blocks have their slots, every replica goes to a
// dummy slot of the *other* channel than its original, so that a whole
// channel can be lost. The metadata replica is placed first, then the
// replicas of the real blocks in the order of their addresses in the
// metadata; each takes the leftmost still-free slot of the required channel.
// Because the order is fixed, the same logic both places replicas when a
// bucket is written and finds them again when a block must be corrected, so
// no replica offsets need to be stored (except the metadata replica, whose
// slot is recorded in the metadata).
//
// Following the permanent-fault rule, the metadata replica is also kept off
// slots flagged in meta_bad (slots whose cells under the ECP region are
// faulty).
//
// Interface: purely combinational. real_off/real_valid give the slot of each
// of the Z real entries (entry order = metadata address order). Outputs give
// the replica slot of each entry, the metadata replica slot, a per-slot kind
// map and ok = every replica found a slot.
module replica_placer
  import iro_pkg::*;
#(
  parameter int unsigned NSLOT = SLOTS,
  parameter int unsigned NREAL = Z,
  parameter logic        MCH   = META_CH
) (
  input  logic [NREAL-1:0][SLOT_W-1:0] real_off,
  input  logic [NREAL-1:0]             real_valid,
  input  logic [NSLOT-1:0]             meta_bad,
  output logic [SLOT_W-1:0]            meta_rep_off,
  output logic [NREAL-1:0][SLOT_W-1:0] rep_off,
  output logic [NREAL-1:0]             rep_valid,
  output logic [NSLOT-1:0]             slot_is_real,
  output logic [NSLOT-1:0]             slot_is_replica,
  output logic [NSLOT-1:0]             slot_channel_o,
  output logic                         ok
);

  logic [NSLOT-1:0] used;
  logic             found;

  always_comb begin
    used         = '0;
    rep_off      = '0;
    rep_valid    = '0;
    meta_rep_off = '0;
    ok           = 1'b1;
    for (int unsigned d = 0; d < NSLOT; d++) slot_channel_o[d] = d[0];
    for (int unsigned i = 0; i < NREAL; i++)
      if (real_valid[i]) used[real_off[i]] = 1'b1;
    slot_is_real = used;

    // 1. metadata replica: first free slot of the other channel, not faulty
    found = 1'b0;
    for (int unsigned d = 0; d < NSLOT; d++) begin
      if (!found && !used[d] && !meta_bad[d] && (d[0] != MCH)) begin
        found        = 1'b1;
        meta_rep_off = SLOT_W'(d);
      end
    end
    if (found) used[meta_rep_off] = 1'b1;
    else ok = 1'b0;

    // 2. real-block replicas in address order
    for (int unsigned i = 0; i < NREAL; i++) begin
      if (real_valid[i]) begin
        found = 1'b0;
        for (int unsigned d = 0; d < NSLOT; d++) begin
          if (!found && !used[d] && (d[0] != real_off[i][0])) begin
            found      = 1'b1;
            rep_off[i] = SLOT_W'(d);
          end
        end
        if (found) begin
          used[rep_off[i]] = 1'b1;
          rep_valid[i]     = 1'b1;
        end else begin
          ok = 1'b0;
        end
      end
    end
    slot_is_replica = used & ~slot_is_real;
  end

endmodule
