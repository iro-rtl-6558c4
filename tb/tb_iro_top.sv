// tb_iro_top: end-to-end test of the IRO datapath at its default sizes
// (23-level ORAM tree with 7 cached levels, 5-level MUST forest of 64 trees,
// four AES-GCM units of 80 cycles, 1084-entry remap table).
//
// The test plays the part of the Ring ORAM controller and the memory:
//  * Permanent faults: random sets of faulty cells in a bucket (in the ECP
//    region, elsewhere in the metadata block and in one data slot) go to the
//    ECP allocator; the bucket is written with the ECP region it returns,
//    the faulty cells are flipped, and the corrected metadata and data must
//    equal what was written, with the exact number of repaired bits. Sets
//    the ECPs cannot repair are committed and must land in the remap table.
//  * Replication: the figure example bucket and a faulty-slot variant, plus
//    the recorded metadata-replica offset check.
//  * Partial EncCtr: each channel in turn is lost and the counter rebuilt.
//  * MUST: nodes of the two cached levels are written into the on-chip
//    cache and read back, non-leaf nodes of the DRAM levels get ECPs from the
//    MUST allocator and faults, the leaf node gets a hand-placed ECP; the
//    sets on the path are read and updated against a reference walk.
//  * Block MACs: data blocks are sent with the MAC stored in their ECC word;
//    intact blocks must pass, a tampered block must fail.
//  * RIT: whole 16-level DRAM paths are read, their MB MACs computed by the
//    four unit models through the MAC pool and checked against the anchors
//    and parent MBs; a tampered MB must fail at its level, an update from
//    leaf to root must make a replay of the old path fail.
// Each mechanism is counted and a mechanism that never happened counts as a
// failure. Combinational results are checked 1 time unit after the inputs
// change, registered ones between clock edges.
module tb_iro_top;
  import iro_pkg::*;
  import tb_gcm_pkg::*;

  localparam int unsigned LEVELS = 23, CL = 7, LV = LEVELS - CL, LW = LEVELS - 1;
  localparam int unsigned LVW = $clog2(LV), NU = GCM_UNITS, MSG_W = 640, TAG_W = 8;
  localparam int unsigned REMAP_N = 1084, ROOTS_W = 6, MUST_L = MUST_LEVELS;
  localparam int unsigned MLW = ROOTS_W + 3*(MUST_L-1) + MUST_LF_H - 1;
  localparam int unsigned NIDX_W = ROOTS_W + 3*(MUST_L-1) + 1;
  localparam logic [63:0] KEY = 64'h0123_4567_89AB_CDEF;
  localparam int unsigned RW = BKT_NECP * (BKT_EAW + 1);

  logic clk = 1'b0, rst;
  always #5 clk = ~clk;

  // ---- DUT signals ----
  logic [BLOCK_W-1:0]            meta_raw, data_raw, data_fixed;
  meta_t                         meta_fixed;
  logic [2:0]                    meta_hits, data_hits;
  logic [BKT_NECP-1:0]           ecp_used, ecp_self_fixed;
  logic [SLOT_W-1:0]             data_slot;
  logic [SLOTS-1:0]              meta_bad, slot_is_real, slot_is_replica;
  logic [SLOT_W-1:0]             meta_rep_off;
  logic [Z-1:0][SLOT_W-1:0]      rep_off;
  logic [Z-1:0]                  rep_valid;
  logic                          rep_ok, meta_rep_mismatch;
  logic [SLOTS-1:0][PENC_W-1:0]  penc_out, penc_in;
  logic                          penc_use_ch, penc_differ;
  logic [ENCCTR_W-1:0]           encctr_rec;
  logic [BKT_NECP-1:0]           f_valid, f_val;
  logic [BKT_NECP-1:0][BKT_EAW-1:0] f_addr;
  logic                          alloc_fbit, alloc_ok, alloc_commit;
  logic [BKT_ROFF_W-1:0]         alloc_roffset;
  logic [RW-1:0]                 alloc_region;
  logic [LEVELS-1:0]             bkt_idx;
  logic                          remap_hit, remap_full;
  logic [$clog2(REMAP_N)-1:0]    remap_idx;
  logic [MLW-1:0]                must_label;
  logic [$clog2(MUST_L)-1:0]     must_level;
  logic [MUST_L-1:0][NIDX_W-1:0] must_gidx;
  logic [(MUST_L-1)*IPOFF_W-1:0] must_ipoff_field;
  logic                          must_cached, must_cache_en, must_cache_we, must_wr_en;
  logic [BLOCK_W-1:0]            must_node_raw, must_cache_wdata, must_node_out;
  logic [MUST_LF_H-1:0][VR_W-1:0] must_wr_vr, must_rd_vr;
  logic [2:0]                    must_hits;
  logic [MUST_NECP_NL-1:0]       mf_valid, mf_val;
  logic [MUST_NECP_NL-1:0][MUST_EAW-1:0] mf_addr;
  logic [1:0]                    malloc_roffset;
  logic [MUST_NECP_NL*(MUST_EAW+1)-1:0] malloc_region;
  logic                          malloc_ok;
  logic                          mreq_valid, mreq_ready, mresp_valid, mresp_ready;
  logic [MSG_W-1:0]              mreq_msg, u_msg;
  logic [TAG_W-1:0]              mreq_tag, mresp_tag, u_tag, dv_tag;
  logic                          mreq_verify, dv_pass, dv_fail;
  logic [MAC_W-1:0]              mreq_expect;
  logic [31:0]                   dv_n_pass, dv_n_fail;
  logic [MAC_W-1:0]              mresp_mac;
  logic [NU-1:0]                 u_start, u_done;
  logic [NU-1:0][MAC_W-1:0]      u_mac;
  logic [NU-1:0][TAG_W-1:0]      u_tag_o;
  logic [31:0]                   mac_stalls, rit_checked, rit_failed;
  logic                          rit_anchor_we, rit_start, rit_mb_valid, rit_pass, rit_fail;
  logic                          rit_upd_valid;
  logic [CL-1:0]                 rit_anchor_idx;
  logic [MAC_W-1:0]              rit_anchor_mac, rit_upd_mac;
  logic [LW-1:0]                 rit_label;
  logic [LVW-1:0]                rit_mb_level, rit_err_level, rit_upd_level, rit_rd_level;
  logic [1:0][MAC_W-1:0]         rit_rd_child_mac;

  iro_top dut (.*);

  for (genvar u = 0; u < NU; u++) begin : g_unit
    gcm_unit_model #(.MSG_W(MSG_W), .TAG_W(TAG_W), .LAT(GCM_LATENCY), .KEY(KEY)) unit (
      .clk(clk), .rst(rst), .start(u_start[u]), .msg(u_msg), .tag(u_tag),
      .done(u_done[u]), .mac(u_mac[u]), .tag_o(u_tag_o[u]));
  end

  // ---- bookkeeping ----
  int checks = 0, failures = 0;
  int n_meta_fix = 0, n_data_fix = 0, n_self_fix = 0, n_rotate = 0, n_remap_ins = 0;
  int n_remap_hit = 0, n_rep = 0, n_rep_mismatch = 0, n_penc = 0, n_must_cached = 0;
  int n_must_dram = 0, n_must_fix = 0, n_must_upd = 0, n_rit_pass = 0, n_rit_tamper = 0;
  int n_rit_replay = 0, n_rit_upd = 0, n_backpressure = 0, n_dv_pass = 0, n_dv_fail = 0;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", what);
    end else $display("mechanism %-28s %0d", what, n);
  endtask

  function automatic logic [BLOCK_W-1:0] rblock();
    logic [BLOCK_W-1:0] b;
    for (int i = 0; i < BLOCK_W; i += 32) b[i +: 32] = $urandom;
    return b;
  endfunction

  // MAC responses
  int               resp_cnt = 0;
  logic [MAC_W-1:0] resp_mac_q [256];
  logic [TAG_W-1:0] resp_tag_q [256];
  always @(posedge clk) begin
    if (!rst && mresp_valid && mresp_ready) begin
      resp_mac_q[resp_cnt % 256] <= mresp_mac;
      resp_tag_q[resp_cnt % 256] <= mresp_tag;
      resp_cnt <= resp_cnt + 1;
    end
  end

  task automatic idle();
    alloc_commit = 0; must_cache_en = 0; must_cache_we = 0; must_wr_en = 0;
    mreq_valid = 0; mreq_verify = 0; rit_anchor_we = 0; rit_start = 0; rit_mb_valid = 0; rit_upd_valid = 0;
  endtask

  // issue one MAC request, waiting while the pool is full
  task automatic mac_request(input logic [MSG_W-1:0] msg, input logic [TAG_W-1:0] tag);
    bit done;
    done = 0;
    while (!done) begin
      mreq_valid = 1; mreq_msg = msg; mreq_tag = tag;
      #1;
      if (mreq_ready) done = 1;
      else n_backpressure++;
      @(negedge clk);
    end
    mreq_valid = 0;
  endtask

  // ================= bucket faults: allocation, repair, remap =============
  logic [LEVELS-1:0] remapped [$];

  task automatic bucket_trial();
    logic [BLOCK_W-1:0] gmeta, gdata, rmeta, rdata;
    meta_t              gm;
    int                 n, nreg, nmeta, ndata, ds, a;
    bit                 dup;
    gmeta = rblock(); gdata = rblock();
    ds = $urandom_range(SLOTS - 1);
    n = $urandom_range(BKT_NECP, 1);
    f_valid = '0; f_addr = '0; f_val = '0;
    for (int f = 0; f < n; f++) begin
      do begin
        case ($urandom_range(3))
          0: a = BKT_ECP_BASE + $urandom_range(BKT_EAW);               // physical ECP 0
          1: a = BKT_ECP_BASE + $urandom_range(RW - 1);                // ECP region
          2: a = BKT_ECP_BASE + RW + $urandom_range(BLOCK_W - BKT_ECP_BASE - RW - 1);
          default: a = (ds + 1) * BLOCK_W + $urandom_range(BLOCK_W - 1); // data slot
        endcase
        dup = 0;
        for (int g = 0; g < f; g++) if (int'(f_addr[g]) == a) dup = 1;
      end while (dup);
      f_valid[f] = 1;
      f_addr[f]  = BKT_EAW'(a);
      f_val[f]   = (a < BLOCK_W) ? gmeta[a] : gdata[a - (ds + 1) * BLOCK_W];
    end
    #1;
    if (!alloc_ok) begin
      // unrepairable: commit, the bucket must be remapped
      bkt_idx = LEVELS'($urandom);
      @(negedge clk);
      alloc_commit = 1;
      @(negedge clk);
      alloc_commit = 0;
      remapped.push_back(bkt_idx);
      n_remap_ins++;
      #1;
      check(remap_hit && int'(remap_idx) == remapped.size() - 1, "failed bucket entered in remap table");
      return;
    end
    check(alloc_fbit == 1'b1, "FBit set when faults exist");
    gm = meta_t'(gmeta);
    gm.fbit = alloc_fbit; gm.roffset = alloc_roffset; gm.ecp = alloc_region;
    gmeta = BLOCK_W'(gm);
    rmeta = gmeta; rdata = gdata; nreg = 0; nmeta = 0; ndata = 0;
    for (int f = 0; f < n; f++) begin
      a = int'(f_addr[f]);
      if (a < BLOCK_W) begin
        rmeta[a] = ~rmeta[a];
        if (a < BKT_ECP_BASE + RW) nreg++; else nmeta++;
      end else begin
        rdata[a - (ds + 1) * BLOCK_W] = ~rdata[a - (ds + 1) * BLOCK_W];
        ndata++;
      end
    end
    meta_raw = rmeta; data_raw = rdata; data_slot = SLOT_W'(ds);
    #1;
    check(BLOCK_W'(meta_fixed) == gmeta, "metadata block repaired by ECPs");
    check(data_fixed == gdata, "data slot repaired by ECPs");
    check(int'(meta_hits) == nreg + nmeta, "metadata repaired-bit count");
    check(int'(data_hits) == ndata, "data repaired-bit count");
    check((|ecp_self_fixed) == (nreg > 0), "faulty ECPs repaired by earlier ECPs");
    check($countones(ecp_used) == n, "one ECP used per fault");
    if (nreg + nmeta > 0) n_meta_fix++;
    if (ndata > 0) n_data_fix++;
    if (|ecp_self_fixed) n_self_fix++;
    if (alloc_roffset != 0) n_rotate++;
    // partial EncCtr: lose each channel in turn
    for (int ch = 0; ch < 2; ch++) begin
      for (int k = 0; k < SLOTS_PER_CH; k++) begin
        check(penc_out[2*k] == gm.encctr[PENC_W*k +: PENC_W] &&
              penc_out[2*k+1] == gm.encctr[PENC_W*k +: PENC_W], "partial EncCtr placement");
        penc_in[2*k + ch]     = PENC_W'($urandom) | PENC_W'(1); // lost channel: garbage
        penc_in[2*k + 1 - ch] = penc_out[2*k + 1 - ch];
        if (penc_in[2*k + ch] == penc_out[2*k + ch]) penc_in[2*k + ch] = ~penc_in[2*k + ch];
      end
      penc_use_ch = logic'(1 - ch);
      #1;
      check(encctr_rec == gm.encctr, "EncCtr rebuilt from surviving channel");
      check(penc_differ, "channel copies flagged different");
      n_penc++;
    end
  endtask

  // ================= replication =================
  task automatic replication_test();
    meta_t gm;
    gm = meta_t'(rblock());
    gm.fbit = 0;
    // figure example: data slots D=0 B=1 E=2 C=3 A=10, addresses in order A..E
    gm.offset[0] = 4'd10; gm.offset[1] = 4'd1; gm.offset[2] = 4'd3;
    gm.offset[3] = 4'd0;  gm.offset[4] = 4'd2; gm.offset[Z] = 4'd4;
    for (int i = 0; i < Z; i++) gm.addr[i] = ADDR_W'(100 + i);
    meta_raw = BLOCK_W'(gm); meta_bad = '0;
    #1;
    check(meta_rep_off == 4 && rep_off[0] == 5 && rep_off[1] == 6 && rep_off[2] == 8 &&
          rep_off[3] == 7 && rep_off[4] == 9 && rep_ok && rep_valid == '1,
          "figure replica placement");
    check(slot_is_real == 12'b0100_0000_1111 && slot_is_replica == 12'b0011_1111_0000,
          "slot kind maps");
    check(!meta_rep_mismatch, "recorded metadata replica offset agrees");
    n_rep++;
    meta_bad = 12'h010;
    #1;
    check(meta_rep_off == 6 && meta_rep_mismatch, "replica moved off faulty slot, mismatch flagged");
    n_rep_mismatch += int'(meta_rep_mismatch);
    // an empty real entry gets no replica
    gm.addr[2] = EMPTY_ADDR; meta_bad = '0;
    meta_raw = BLOCK_W'(gm);
    #1;
    check(rep_valid == 5'b11011 && slot_is_real[3] == 1'b0, "empty entry has no replica");
    n_rep++;
  endtask

  // ================= MUST =================
  function automatic int ref_ileaf(input logic [MLW-1:0] l, input int j);
    if (j < MUST_L - 1) return 3 + ((int'(32'(l) >> (MLW - ROOTS_W - 3*j - 2))) & 3);
    return 15 + (int'(l) & 15);
  endfunction

  function automatic int ref_gidx(input logic [MLW-1:0] l, input int j);
    return 64 * ((8 ** j) - 1) / 7 + int'(32'(l) >> (MLW - ROOTS_W - 3*j));
  endfunction

  // expected sets on the internal path and the node after writing wv
  task automatic must_expect(input logic [BLOCK_W-1:0] node, input int j,
                             input logic [MUST_LF_H-1:0][VR_W-1:0] wv,
                             output logic [MUST_LF_H-1:0][VR_W-1:0] rv,
                             output logic [BLOCK_W-1:0] wnode);
    int h, idx;
    h = (j == MUST_L - 1) ? MUST_LF_H : MUST_NL_H;
    idx = ref_ileaf(must_label, j);
    rv = '0; wnode = node;
    for (int q = h - 1; q >= 0; q--) begin
      rv[q] = node[idx*VR_W +: VR_W];
      wnode[idx*VR_W +: VR_W] = wv[q];
      idx = (idx - 1) / 2;
    end
  endtask

  task automatic must_check_node(input logic [BLOCK_W-1:0] golden, input int j, input int nfault);
    logic [MUST_LF_H-1:0][VR_W-1:0] rv, wv;
    logic [BLOCK_W-1:0]             wnode;
    for (int q = 0; q < MUST_LF_H; q++) wv[q] = VR_W'($urandom);
    must_expect(golden, j, wv, rv, wnode);
    must_wr_en = 0;
    #1;
    check(must_node_out == golden, $sformatf("MUST node read back intact (level %0d)", j));
    check(must_rd_vr == rv, "VBits+ReadCtr sets on the path");
    check(int'(must_hits) == nfault, "MUST repaired-bit count");
    must_wr_vr = wv; must_wr_en = 1;
    #1;
    check(must_node_out == wnode, "MUST node update");
    n_must_upd++;
    must_wr_en = 0;
  endtask

  task automatic must_trial();
    logic [BLOCK_W-1:0] img, raw;
    must_nl_t nl;
    must_lf_t lf;
    int n, a, c;
    bit dup;
    must_label = MLW'({$urandom, $urandom});
    for (int j = 0; j < MUST_L; j++) begin
      must_level = 3'(j);
      #1;
      check(int'(must_gidx[j]) == ref_gidx(must_label, j), "MUST node index");
      check(must_cached == (j < MUST_CACHED), "cached MUST levels");
    end
    for (int j = 0; j < MUST_L - 1; j++)
      check(int'(must_ipoff_field[j*IPOFF_W +: IPOFF_W]) == ref_ileaf(must_label, j), "IPOffset field");
    // cached levels: write the node into the on-chip cache, read it back
    for (int j = 0; j < MUST_CACHED; j++) begin
      @(negedge clk);
      nl = must_nl_t'(rblock()); nl.fbit = 0;
      img = BLOCK_W'(nl);
      must_level = 3'(j); must_cache_wdata = img; must_cache_en = 1; must_cache_we = 1;
      must_node_raw = rblock();    // must be ignored for cached levels
      @(negedge clk);
      must_cache_we = 0;
      @(negedge clk);
      must_cache_en = 0;
      must_check_node(img, j, 0);
      n_must_cached++;
    end
    // DRAM non-leaf levels: ECPs from the MUST allocator
    for (int j = MUST_CACHED; j < MUST_L - 1; j++) begin
      img = rblock();
      n = $urandom_range(MUST_NECP_NL, 1);
      mf_valid = '0; mf_addr = '0; mf_val = '0;
      for (int f = 0; f < n; f++) begin
        do begin
          a = $urandom_range(BLOCK_W - 1);
          dup = (a >= MUST_NL_SETS*VR_W) && (a < MUST_NL_ECP_BASE);  // FBit/ROffset cells
          for (int g = 0; g < f; g++) if (int'(mf_addr[g]) == a) dup = 1;
        end while (dup);
        mf_valid[f] = 1; mf_addr[f] = MUST_EAW'(a); mf_val[f] = img[a];
      end
      #1;
      if (!malloc_ok) continue;
      nl = must_nl_t'(img);
      nl.fbit = 1; nl.roffset = malloc_roffset; nl.ecp = malloc_region;
      img = BLOCK_W'(nl); raw = img;
      for (int f = 0; f < n; f++) raw[int'(mf_addr[f])] = ~raw[int'(mf_addr[f])];
      must_level = 3'(j); must_node_raw = raw;
      must_check_node(img, j, n);
      n_must_dram++;
      n_must_fix++;
    end
    // leaf level: one hand-placed ECP (logical 0, no rotation)
    lf = must_lf_t'(rblock());
    lf.fbit = 1; lf.roffset = 0;
    c = $urandom_range(MUST_LF_SETS*VR_W - 1);
    for (int k = 0; k < MUST_NECP_LF; k++) lf.ecp[k] = {1'b0, {MUST_EAW{1'b1}}};
    lf.ipoff = must_ipoff_field;
    img = BLOCK_W'(lf);
    lf.ecp[0] = {img[c], MUST_EAW'(c)};
    img = BLOCK_W'(lf); raw = img; raw[c] = ~raw[c];
    must_level = 3'(MUST_L - 1); must_node_raw = raw;
    must_check_node(img, MUST_L - 1, 1);
    n_must_dram++;
  endtask

  // ================= RIT over one DRAM path =================
  logic [LW-1:0]      plabel;
  logic [BLOCK_W-1:0] mb_old [LV], mb_new [LV];

  function automatic int side(input int i);   // side of the child at DRAM level i >= 1
    return int'(plabel[LW - CL - i]);
  endfunction

  function automatic logic [MSG_W-1:0] mb_msg(input logic [BLOCK_W-1:0] mb, input int i);
    return {64'(i), mb};
  endfunction

  // build a path of linked MBs from leaf to root; returns the top MB's MAC
  task automatic build_path(output logic [BLOCK_W-1:0] mb [LV], output logic [MAC_W-1:0] top);
    logic [MAC_W-1:0] below;
    meta_t m;
    below = '0;
    for (int i = LV - 1; i >= 0; i--) begin
      m = meta_t'(rblock());
      m.fbit = 0;
      if (i < LV - 1) m.mac_child[side(i + 1)] = below;
      mb[i] = BLOCK_W'(m);
      below = toy_mac(1024'(mb_msg(mb[i], i)), MSG_W, KEY);
    end
    top = below;
  endtask

  // read the path MBs, have their MACs computed and checked
  task automatic run_path(input logic [BLOCK_W-1:0] mb [LV], input int bad, input int exp_fail);
    logic [BLOCK_W-1:0] rd [LV];
    int c0, f0, r0;
    for (int i = 0; i < LV; i++) begin
      rd[i] = mb[i];
      if (i == bad) rd[i][200] = ~rd[i][200];     // tampered address field
    end
    @(negedge clk);
    c0 = int'(rit_checked); f0 = int'(rit_failed);
    rit_label = plabel; rit_start = 1;
    @(negedge clk);
    rit_start = 0;
    for (int i = 0; i < LV; i++) begin
      meta_raw = rd[i]; rit_mb_level = LVW'(i); rit_mb_valid = 1;
      @(negedge clk);
    end
    rit_mb_valid = 0;
    r0 = resp_cnt;
    for (int i = 0; i < LV; i++) mac_request(mb_msg(rd[i], i), {1'b1, 3'b0, 4'(i)});
    while (resp_cnt < r0 + LV) @(negedge clk);
    @(negedge clk);
    check(int'(rit_checked) == c0 + LV, "every path MB MAC checked");
    check(int'(rit_failed) == f0 + exp_fail, "RIT failures as expected");
    if (exp_fail > 0) check(int'(rit_err_level) == ((bad >= 0) ? bad : 0), "RIT error level");
    n_rit_pass += LV - (int'(rit_failed) - f0);
  endtask

  task automatic rit_trial();
    logic [MAC_W-1:0] top_old, top_new, m;
    meta_t mm;
    int r0;
    plabel = LW'($urandom);
    build_path(mb_old, top_old);
    @(negedge clk);
    rit_anchor_idx = plabel[LW-1 -: CL]; rit_anchor_mac = top_old; rit_anchor_we = 1;
    @(negedge clk);
    rit_anchor_we = 0;
    run_path(mb_old, -1, 0);
    run_path(mb_old, $urandom_range(LV - 1), 1);
    n_rit_tamper++;
    // write-back: new MBs leaf to root, MACs from the pool, RIT updated
    m = '0;
    for (int i = LV - 1; i >= 0; i--) begin
      mm = meta_t'(rblock());
      mm.fbit = 0;
      if (i < LV - 1) mm.mac_child[side(i + 1)] = m;
      mb_new[i] = BLOCK_W'(mm);
      r0 = resp_cnt;
      mac_request(mb_msg(mb_new[i], i), {1'b0, 3'b0, 4'(i)});
      while (resp_cnt == r0) @(negedge clk);
      m = resp_mac_q[r0 % 256];
      check(m == toy_mac(1024'(mb_msg(mb_new[i], i)), MSG_W, KEY) &&
            resp_tag_q[r0 % 256] == {1'b0, 3'b0, 4'(i)}, "pool returns the unit MAC and tag");
      rit_upd_level = LVW'(i); rit_upd_mac = m; rit_upd_valid = 1;
      @(negedge clk);
      rit_upd_valid = 0;
      if (i > 0) begin
        rit_rd_level = LVW'(i - 1);
        #1;
        check(rit_rd_child_mac[side(i)] == m, "new MAC written into parent");
        @(negedge clk);
      end
      n_rit_upd++;
    end
    top_new = m;
    // replay of the old path fails at the top, the new path passes
    run_path(mb_old, -1, 1);
    check(rit_err_level == 0, "replay caught at first DRAM level");
    n_rit_replay++;
    run_path(mb_new, -1, 0);
    check(top_new != top_old, "top MAC changed");
  endtask

  // ================= data block MAC verification =================
  task automatic data_verify_trial();
    logic [MSG_W-1:0] msg [8];
    int p0, f0, r0, bad;
    p0 = int'(dv_n_pass); f0 = int'(dv_n_fail); r0 = resp_cnt;
    bad = $urandom_range(7);
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      msg[i] = {64'($urandom), rblock()};          // {address, EncCtr+data image}
      mreq_verify = 1;
      mreq_expect = toy_mac(1024'(msg[i]), MSG_W, KEY);
      if (i == bad) msg[i][7] = ~msg[i][7];        // block tampered in memory
      mac_request(msg[i], {2'b01, 2'b0, 4'(i)});
    end
    mreq_verify = 0;
    while (resp_cnt < r0 + 8) @(negedge clk);
    @(negedge clk);
    check(int'(dv_n_pass) == p0 + 7, "intact data blocks accepted");
    check(int'(dv_n_fail) == f0 + 1, "tampered data block rejected");
    n_dv_pass += int'(dv_n_pass) - p0;
    n_dv_fail += int'(dv_n_fail) - f0;
  endtask

  // ================= main =================
  initial begin
    #40_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; idle();
    meta_raw = '0; data_raw = '0; data_slot = '0; meta_bad = '0; penc_in = '0; penc_use_ch = 0;
    f_valid = '0; f_addr = '0; f_val = '0; bkt_idx = '0; must_label = '0; must_level = '0;
    must_node_raw = '0; must_cache_wdata = '0; must_wr_vr = '0; mf_valid = '0; mf_addr = '0;
    mf_val = '0; mreq_msg = '0; mreq_tag = '0; mreq_expect = '0; mresp_ready = 1; rit_anchor_idx = '0;
    rit_anchor_mac = '0; rit_label = '0; rit_mb_level = '0; rit_upd_level = '0;
    rit_upd_mac = '0; rit_rd_level = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);

    // unrepairable set (one fault in every physical ECP) goes to the remap table
    for (int f = 0; f < BKT_NECP; f++) begin
      f_valid[f] = 1; f_addr[f] = BKT_EAW'(BKT_ECP_BASE + f * (BKT_EAW + 1) + 3); f_val[f] = 0;
    end
    #1;
    check(!alloc_ok, "one fault in every ECP cannot be repaired");
    bkt_idx = 23'h1234; alloc_commit = 1;
    @(negedge clk);
    alloc_commit = 0; remapped.push_back(bkt_idx); n_remap_ins++;

    for (int t = 0; t < 300; t++) bucket_trial();
    // every remapped bucket is found again; another bucket is not
    foreach (remapped[i]) begin
      bkt_idx = remapped[i];
      #1;
      check(remap_hit && int'(remap_idx) == i, "remapped bucket found");
      n_remap_hit += int'(remap_hit);
    end
    bkt_idx = 23'h7FFFFF;
    foreach (remapped[i]) if (remapped[i] == bkt_idx) bkt_idx = 23'h7FFFFE;
    #1;
    check(!remap_hit, "unmapped bucket misses");
    check(!remap_full, "remap table not full");

    replication_test();
    for (int t = 0; t < 40; t++) must_trial();
    for (int t = 0; t < 3; t++) rit_trial();
    for (int t = 0; t < 4; t++) data_verify_trial();

    check(mac_stalls > 0, "MAC pool stall counter");
    need(n_meta_fix,     "ECP repair of metadata");
    need(n_data_fix,     "ECP repair of a data slot");
    need(n_self_fix,     "faulty ECP repaired by ECP");
    need(n_rotate,       "ECP rotation (ROffset>0)");
    need(n_remap_ins,    "bucket remapped");
    need(n_remap_hit,    "remap table hit");
    need(n_rep,          "replica placement");
    need(n_rep_mismatch, "metadata replica mismatch");
    need(n_penc,         "EncCtr rebuilt after channel loss");
    need(n_must_cached,  "MUST node from on-chip cache");
    need(n_must_dram,    "MUST node from memory");
    need(n_must_fix,     "MUST node ECP repair");
    need(n_must_upd,     "MUST path update");
    need(n_rit_pass,     "RIT MAC check passed");
    need(n_rit_tamper,   "RIT tamper detected");
    need(n_rit_replay,   "RIT replay detected");
    need(n_rit_upd,      "RIT update");
    need(n_dv_pass,      "data block MAC accepted");
    need(n_dv_fail,      "data block tamper detected");
    need(n_backpressure, "MAC queue full (backpressure)");
    need(int'(mac_stalls), "MAC units all busy (stall)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
