// iro_top: the IRO integrity and reliability datapath of a Ring ORAM
// controller.
//
// It sits between the Ring ORAM protocol logic (position map, stash,
// eviction scheduling, not part of this RTL) and the two memory channels,
// and does the per-block work that IRO adds to every Ring ORAM access:
//
//  * Bucket ECP repair: the raw metadata block read from memory goes through
//    ecp_chain (the ECPs repair each other in logical order) and ecp_apply,
//    giving the corrected metadata; the same ECP list corrects any data
//    slot of the bucket (data_raw at data_slot).
//  * Replication: from the corrected metadata, replica_placer recomputes
//    where the metadata replica and the replicas of the real blocks live
//    (other channel, leftmost free dummy slot, address order), which is what
//    a secure correction needs; meta_rep_mismatch flags a recorded
//    metadata-replica offset that disagrees with the rule.
//  * Partial EncCtr: the counter is spread over the data slots' ECC words
//    and rebuilt from the surviving channel.
//  * RIT: rit_chain checks each MB MAC against its parent (or the on-chip
//    anchors) and receives the MACs computed by the AES-GCM units through
//    mac_pool. A MAC response whose tag has bit TAG_W-1 set is an MB MAC of
//    DRAM level tag[LVW-1:0] and goes to the RIT check.
//  * MUST: must_path turns the leaf label into MUST nodes and internal paths;
//    nodes of the cached levels come from must_top_cache, others from
//    must_node_raw; they are ECP-repaired (leaf or non-leaf layout) and
//    must_node_rw reads/updates the VBits+ReadCtr sets on the path.
//  * Block MACs: a MAC request with mreq_verify set carries the MAC stored
//    with the block (data block, replica, or metadata-replica candidate);
//    mac_verify compares it with the computed MAC when the result returns.
//  * Permanent faults: ecp_alloc builds a new bucket ECP region (and one for
//    a non-leaf MUST node and its mirror); when the bucket allocation fails
//    on alloc_commit, the bucket is entered into bucket_remap.
//
// Everything is combinational from the block inputs except the RIT state,
// the MAC queue, the MUST cache (read data one cycle after must_cache_en)
// and the remap table. Synchronous active-high reset. The AES-GCM units are
// external: their start/done ports are top-level ports.
module iro_top
  import iro_pkg::*;
#(
  parameter int unsigned LEVELS   = 23,
  parameter int unsigned CL       = 7,
  parameter int unsigned NU       = GCM_UNITS,
  parameter int unsigned MSG_W    = 640,
  parameter int unsigned TAG_W    = 8,
  parameter int unsigned QD       = 8,
  parameter int unsigned REMAP_N  = 1084,
  parameter int unsigned ROOTS_W  = 6,
  parameter int unsigned MUST_L   = MUST_LEVELS,
  parameter int unsigned MCACHE_N = 576,
  parameter int unsigned LW       = LEVELS - 1,
  parameter int unsigned LVW      = $clog2(LEVELS - CL),
  parameter int unsigned MLW      = ROOTS_W + 3*(MUST_L-1) + MUST_LF_H - 1,
  parameter int unsigned NIDX_W   = ROOTS_W + 3*(MUST_L-1) + 1
) (
  input  logic                          clk,
  input  logic                          rst,
  // ---- bucket blocks ---------------------------------------------------
  input  logic [BLOCK_W-1:0]            meta_raw,
  output meta_t                         meta_fixed,
  output logic [2:0]                    meta_hits,
  output logic [BKT_NECP-1:0]           ecp_used,
  output logic [BKT_NECP-1:0]           ecp_self_fixed,
  input  logic [SLOT_W-1:0]             data_slot,
  input  logic [BLOCK_W-1:0]            data_raw,
  output logic [BLOCK_W-1:0]            data_fixed,
  output logic [2:0]                    data_hits,
  // ---- replication -----------------------------------------------------
  input  logic [SLOTS-1:0]              meta_bad,
  output logic [SLOT_W-1:0]             meta_rep_off,
  output logic [Z-1:0][SLOT_W-1:0]      rep_off,
  output logic [Z-1:0]                  rep_valid,
  output logic [SLOTS-1:0]              slot_is_real,
  output logic [SLOTS-1:0]              slot_is_replica,
  output logic                          rep_ok,
  output logic                          meta_rep_mismatch,
  // ---- partial EncCtr --------------------------------------------------
  output logic [SLOTS-1:0][PENC_W-1:0]  penc_out,
  input  logic [SLOTS-1:0][PENC_W-1:0]  penc_in,
  input  logic                          penc_use_ch,
  output logic [ENCCTR_W-1:0]           encctr_rec,
  output logic                          penc_differ,
  // ---- bucket ECP allocation and remapping -----------------------------
  input  logic [BKT_NECP-1:0]           f_valid,
  input  logic [BKT_NECP-1:0][BKT_EAW-1:0] f_addr,
  input  logic [BKT_NECP-1:0]           f_val,
  output logic                          alloc_fbit,
  output logic [BKT_ROFF_W-1:0]         alloc_roffset,
  output logic [BKT_NECP*(BKT_EAW+1)-1:0] alloc_region,
  output logic                          alloc_ok,
  input  logic                          alloc_commit,
  input  logic [LEVELS-1:0]             bkt_idx,
  output logic                          remap_hit,
  output logic [$clog2(REMAP_N)-1:0]    remap_idx,
  output logic                          remap_full,
  // ---- MUST -----------------------------------------------------------
  input  logic [MLW-1:0]                must_label,
  input  logic [$clog2(MUST_L)-1:0]     must_level,
  output logic [MUST_L-1:0][NIDX_W-1:0] must_gidx,
  output logic [(MUST_L-1)*IPOFF_W-1:0] must_ipoff_field,
  output logic                          must_cached,
  input  logic [BLOCK_W-1:0]            must_node_raw,
  input  logic                          must_cache_en,
  input  logic                          must_cache_we,
  input  logic [BLOCK_W-1:0]            must_cache_wdata,
  input  logic                          must_wr_en,
  input  logic [MUST_LF_H-1:0][VR_W-1:0] must_wr_vr,
  output logic [MUST_LF_H-1:0][VR_W-1:0] must_rd_vr,
  output logic [BLOCK_W-1:0]            must_node_out,
  output logic [2:0]                    must_hits,
  input  logic [MUST_NECP_NL-1:0]       mf_valid,
  input  logic [MUST_NECP_NL-1:0][MUST_EAW-1:0] mf_addr,
  input  logic [MUST_NECP_NL-1:0]       mf_val,
  output logic [1:0]                    malloc_roffset,
  output logic [MUST_NECP_NL*(MUST_EAW+1)-1:0] malloc_region,
  output logic                          malloc_ok,
  // ---- MAC requests and AES-GCM units ---------------------------------
  input  logic                          mreq_valid,
  output logic                          mreq_ready,
  input  logic [MSG_W-1:0]              mreq_msg,
  input  logic [TAG_W-1:0]              mreq_tag,
  input  logic                          mreq_verify,
  input  logic [MAC_W-1:0]              mreq_expect,
  output logic                          dv_pass,
  output logic                          dv_fail,
  output logic [TAG_W-1:0]              dv_tag,
  output logic [31:0]                   dv_n_pass,
  output logic [31:0]                   dv_n_fail,
  output logic                          mresp_valid,
  input  logic                          mresp_ready,
  output logic [MAC_W-1:0]              mresp_mac,
  output logic [TAG_W-1:0]              mresp_tag,
  output logic [NU-1:0]                 u_start,
  output logic [MSG_W-1:0]              u_msg,
  output logic [TAG_W-1:0]              u_tag,
  input  logic [NU-1:0]                 u_done,
  input  logic [NU-1:0][MAC_W-1:0]      u_mac,
  input  logic [NU-1:0][TAG_W-1:0]      u_tag_o,
  output logic [31:0]                   mac_stalls,
  // ---- RIT ------------------------------------------------------------
  input  logic                          rit_anchor_we,
  input  logic [CL-1:0]                 rit_anchor_idx,
  input  logic [MAC_W-1:0]              rit_anchor_mac,
  input  logic                          rit_start,
  input  logic [LW-1:0]                 rit_label,
  input  logic                          rit_mb_valid,
  input  logic [LVW-1:0]                rit_mb_level,
  output logic                          rit_pass,
  output logic                          rit_fail,
  output logic [LVW-1:0]                rit_err_level,
  input  logic                          rit_upd_valid,
  input  logic [LVW-1:0]                rit_upd_level,
  input  logic [MAC_W-1:0]              rit_upd_mac,
  input  logic [LVW-1:0]                rit_rd_level,
  output logic [1:0][MAC_W-1:0]         rit_rd_child_mac,
  output logic [31:0]                   rit_checked,
  output logic [31:0]                   rit_failed
);

  // ================= bucket ECP repair =================
  meta_t                            meta_raw_s;
  logic [BKT_NECP-1:0][BKT_EAW-1:0] ecp_addr;
  logic [BKT_NECP-1:0]              ecp_val;
  logic [BKT_NECP*(BKT_EAW+1)-1:0]  region_fixed;
  logic [BLOCK_W-1:0]               meta_fixed_bits;

  assign meta_raw_s = meta_t'(meta_raw);

  ecp_chain #(.NECP(BKT_NECP), .EAW(BKT_EAW), .ROFF_W(BKT_ROFF_W),
              .BASE(BKT_ECP_BASE), .CELLS(BKT_CELLS)) u_bkt_chain (
    .fbit(meta_raw_s.fbit), .roffset(meta_raw_s.roffset), .region_raw(meta_raw_s.ecp),
    .ecp_addr(ecp_addr), .ecp_val(ecp_val), .ecp_used(ecp_used),
    .region_fixed(region_fixed), .ecp_fixed_self(ecp_self_fixed));

  ecp_apply #(.NECP(BKT_NECP), .EAW(BKT_EAW), .BLK_W(BLOCK_W)) u_meta_apply (
    .ecp_addr(ecp_addr), .ecp_val(ecp_val), .ecp_used(ecp_used),
    .block_base('0), .blk_in(meta_raw), .blk_out(meta_fixed_bits), .hits(meta_hits));

  assign meta_fixed = meta_t'(meta_fixed_bits);

  ecp_apply #(.NECP(BKT_NECP), .EAW(BKT_EAW), .BLK_W(BLOCK_W)) u_data_apply (
    .ecp_addr(ecp_addr), .ecp_val(ecp_val), .ecp_used(ecp_used),
    .block_base(BKT_EAW'((int'(data_slot) + 1) * BLOCK_W)),
    .blk_in(data_raw), .blk_out(data_fixed), .hits(data_hits));

  // ================= replication =================
  logic [Z-1:0][SLOT_W-1:0] real_off;
  logic [Z-1:0]             real_valid;

  always_comb begin
    for (int unsigned i = 0; i < Z; i++) begin
      real_off[i]   = SLOT_W'(meta_fixed.offset[i]);
      real_valid[i] = (meta_fixed.addr[i] != EMPTY_ADDR);
    end
  end

  replica_placer u_rep (
    .real_off(real_off), .real_valid(real_valid), .meta_bad(meta_bad),
    .meta_rep_off(meta_rep_off), .rep_off(rep_off), .rep_valid(rep_valid),
    .slot_is_real(slot_is_real), .slot_is_replica(slot_is_replica),
    .slot_channel_o(), .ok(rep_ok));

  assign meta_rep_mismatch = (OFF_W'(meta_rep_off) != meta_fixed.offset[Z]);

  // ================= partial EncCtr =================
  partial_encctr u_penc (
    .encctr(meta_fixed.encctr), .penc_out(penc_out), .penc_in(penc_in),
    .use_ch(penc_use_ch), .encctr_rec(encctr_rec), .copies_differ(penc_differ));

  // ================= ECP allocation, remapping =================
  ecp_alloc #(.NECP(BKT_NECP), .EAW(BKT_EAW), .ROFF_W(BKT_ROFF_W),
              .BASE(BKT_ECP_BASE), .CELLS(BKT_CELLS)) u_bkt_alloc (
    .f_valid(f_valid), .f_addr(f_addr), .f_val(f_val), .fbit(alloc_fbit),
    .roffset(alloc_roffset), .region(alloc_region), .ok(alloc_ok));

  bucket_remap #(.ENTRIES(REMAP_N), .BIDX_W(LEVELS)) u_remap (
    .clk(clk), .rst(rst), .lookup_bkt(bkt_idx), .hit(remap_hit), .red_idx(remap_idx),
    .insert(alloc_commit && !alloc_ok), .insert_bkt(bkt_idx), .full(remap_full), .used());

  logic malloc_fbit;
  ecp_alloc #(.NECP(MUST_NECP_NL), .EAW(MUST_EAW), .ROFF_W(2),
              .BASE(MUST_NL_ECP_BASE), .CELLS(BLOCK_W)) u_must_alloc (
    .f_valid(mf_valid), .f_addr(mf_addr), .f_val(mf_val), .fbit(malloc_fbit),
    .roffset(malloc_roffset), .region(malloc_region), .ok(malloc_ok));

  // ================= MUST =================
  logic [MUST_L-1:0][NIDX_W-1:0] m_idx;
  logic [MUST_L-1:0][4:0]        m_ileaf;
  logic [MUST_L-1:0]             m_cached;
  logic [MUST_L-2:0][2:0]        m_child;
  logic [BLOCK_W-1:0]            cache_rdata, m_node, m_fixed_nl, m_fixed_lf, m_fixed;
  logic                          m_leaf;
  logic [2:0]                    hits_nl, hits_lf;

  must_path #(.L(MUST_L), .ROOTS_W(ROOTS_W), .CACHED(MUST_CACHED)) u_mpath (
    .label(must_label), .node_idx(m_idx), .node_gidx(must_gidx), .ileaf(m_ileaf),
    .cached(m_cached), .child_sel(m_child), .ipoff_field(must_ipoff_field));

  assign must_cached = m_cached[must_level];
  assign m_leaf      = (int'(must_level) == MUST_L - 1);

  must_top_cache #(.DEPTH(MCACHE_N)) u_mcache (
    .clk(clk), .en(must_cache_en), .we(must_cache_we),
    .addr($clog2(MCACHE_N)'(must_gidx[must_level])),
    .wdata(must_cache_wdata), .rdata(cache_rdata));

  assign m_node = must_cached ? cache_rdata : must_node_raw;

  // non-leaf node layout
  must_nl_t               nl_s;
  must_lf_t               lf_s;
  logic [MUST_NECP_NL-1:0][MUST_EAW-1:0] nl_addr;
  logic [MUST_NECP_NL-1:0] nl_val, nl_used;
  logic [MUST_NECP_LF-1:0][MUST_EAW-1:0] lf_addr;
  logic [MUST_NECP_LF-1:0] lf_val, lf_used;
  assign nl_s = must_nl_t'(m_node);
  assign lf_s = must_lf_t'(m_node);

  ecp_chain #(.NECP(MUST_NECP_NL), .EAW(MUST_EAW), .ROFF_W(2),
              .BASE(MUST_NL_ECP_BASE), .CELLS(BLOCK_W)) u_nl_chain (
    .fbit(nl_s.fbit), .roffset(nl_s.roffset), .region_raw(nl_s.ecp),
    .ecp_addr(nl_addr), .ecp_val(nl_val), .ecp_used(nl_used),
    .region_fixed(), .ecp_fixed_self());
  ecp_apply #(.NECP(MUST_NECP_NL), .EAW(MUST_EAW), .BLK_W(BLOCK_W)) u_nl_apply (
    .ecp_addr(nl_addr), .ecp_val(nl_val), .ecp_used(nl_used), .block_base('0),
    .blk_in(m_node), .blk_out(m_fixed_nl), .hits(hits_nl[1:0]));
  assign hits_nl[2] = 1'b0;

  ecp_chain #(.NECP(MUST_NECP_LF), .EAW(MUST_EAW), .ROFF_W(3),
              .BASE(MUST_LF_ECP_BASE), .CELLS(BLOCK_W)) u_lf_chain (
    .fbit(lf_s.fbit), .roffset(lf_s.roffset), .region_raw(lf_s.ecp),
    .ecp_addr(lf_addr), .ecp_val(lf_val), .ecp_used(lf_used),
    .region_fixed(), .ecp_fixed_self());
  ecp_apply #(.NECP(MUST_NECP_LF), .EAW(MUST_EAW), .BLK_W(BLOCK_W)) u_lf_apply (
    .ecp_addr(lf_addr), .ecp_val(lf_val), .ecp_used(lf_used), .block_base('0),
    .blk_in(m_node), .blk_out(m_fixed_lf), .hits(hits_lf));

  assign m_fixed   = m_leaf ? m_fixed_lf : m_fixed_nl;
  assign must_hits = m_leaf ? hits_lf : hits_nl;

  must_node_rw u_mrw (
    .node_in(m_fixed), .is_leaf(m_leaf), .ileaf(m_ileaf[must_level]),
    .wr_en(must_wr_en), .wr_vr(must_wr_vr), .rd_vr(must_rd_vr), .set_idx(),
    .path_n(), .node_out(must_node_out));

  // ================= MAC pool and RIT =================
  mac_pool #(.NU(NU), .MSG_W(MSG_W), .TAG_W(TAG_W), .QD(QD)) u_pool (
    .clk(clk), .rst(rst), .req_valid(mreq_valid), .req_ready(mreq_ready),
    .req_msg(mreq_msg), .req_tag(mreq_tag), .resp_valid(mresp_valid),
    .resp_ready(mresp_ready), .resp_mac(mresp_mac), .resp_tag(mresp_tag),
    .u_start(u_start), .u_msg(u_msg), .u_tag(u_tag), .u_done(u_done),
    .u_mac(u_mac), .u_tag_o(u_tag_o), .n_stall(mac_stalls), .n_issued(), .q_count());

  mac_verify #(.TAG_W(TAG_W)) u_ver (
    .clk(clk), .rst(rst), .req_fire(mreq_valid && mreq_ready), .req_verify(mreq_verify),
    .req_tag(mreq_tag), .req_expect(mreq_expect), .resp_fire(mresp_valid && mresp_ready),
    .resp_tag(mresp_tag), .resp_mac(mresp_mac), .v_pass(dv_pass), .v_fail(dv_fail),
    .v_tag(dv_tag), .n_pass(dv_n_pass), .n_fail(dv_n_fail));

  rit_chain #(.LEVELS(LEVELS), .CL(CL)) u_rit (
    .clk(clk), .rst(rst), .anchor_we(rit_anchor_we), .anchor_idx(rit_anchor_idx),
    .anchor_mac(rit_anchor_mac), .start(rit_start), .label(rit_label),
    .mb_valid(rit_mb_valid), .mb_level(rit_mb_level), .mb_child_mac(meta_fixed.mac_child),
    .mac_valid(mresp_valid && mresp_ready && mresp_tag[TAG_W-1]),
    .mac_level(LVW'(mresp_tag)), .mac_value(mresp_mac),
    .chk_pass(rit_pass), .chk_fail(rit_fail), .err_level(rit_err_level),
    .upd_valid(rit_upd_valid), .upd_level(rit_upd_level), .upd_mac(rit_upd_mac),
    .rd_level(rit_rd_level), .rd_child_mac(rit_rd_child_mac),
    .n_checked(rit_checked), .n_failed(rit_failed));

endmodule
