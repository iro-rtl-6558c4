// rit_chain: the Ring ORAM Integrity Tree (RIT) check along one path.
//
// Each metadata block (MB) keeps the MACs of its two child MBs, so the MBs
// form a MAC tree over the ORAM tree; the MACs at the top of the tree are
// held on chip and cannot be tampered with. The top CL levels of the ORAM
// tree are cached on chip, so the trusted anchors are the 2^CL child MACs of
// the lowest cached level (with CL = 0 this is the two MACs of the root
// bucket). The data blocks of a bucket are covered by their own MACs, which
// include the EncCtr held in the MB, so protecting the MBs protects them too.
//
// Use per path access:
//  * start with the leaf label: clears the per-path state.
//  * mb_*  : an MB of DRAM level i (0 = first uncached level) has been read;
//            its two child MACs are kept for checking level i+1.
//  * mac_* : the freshly computed MAC of the MB of level i is compared with
//            the anchor (i = 0) or with level i-1's stored child MAC on the
//            path side. chk_fail pulses and err_level records the level on a
//            mismatch.
//  * upd_* : after the MB of level i is modified, its new MAC is written
//            into its parent's child-MAC field (or the anchor for i = 0);
//            rd_level/rd_child_mac then give the child MACs to write back
//            into the MB of that level. Updates go from leaf to root.
// Path side: going from ORAM level t to t+1 the label bit LW-1-t selects the
// right child when 1 (this bit order is this design's choice). All ports are
// registered state updated on the rising clock edge; reset is synchronous
// and clears the anchors (a real system loads them at initialisation).
module rit_chain
  import iro_pkg::*;
#(
  parameter int unsigned LEVELS = 23,            // ORAM tree levels
  parameter int unsigned CL     = 7,             // cached top levels
  parameter int unsigned LV     = LEVELS - CL,   // levels in DRAM
  parameter int unsigned LW     = LEVELS - 1,    // leaf label width
  parameter int unsigned LVW    = $clog2(LV)
) (
  input  logic                    clk,
  input  logic                    rst,
  // anchor initialisation (child MAC of the cached bucket above DRAM node i)
  input  logic                    anchor_we,
  input  logic [CL-1:0]           anchor_idx,
  input  logic [MAC_W-1:0]        anchor_mac,
  // per path
  input  logic                    start,
  input  logic [LW-1:0]           label,
  input  logic                    mb_valid,
  input  logic [LVW-1:0]          mb_level,
  input  logic [1:0][MAC_W-1:0]   mb_child_mac,
  input  logic                    mac_valid,
  input  logic [LVW-1:0]          mac_level,
  input  logic [MAC_W-1:0]        mac_value,
  output logic                    chk_pass,
  output logic                    chk_fail,
  output logic [LVW-1:0]          err_level,
  input  logic                    upd_valid,
  input  logic [LVW-1:0]          upd_level,
  input  logic [MAC_W-1:0]        upd_mac,
  input  logic [LVW-1:0]          rd_level,
  output logic [1:0][MAC_W-1:0]   rd_child_mac,
  output logic [31:0]             n_checked,
  output logic [31:0]             n_failed
);

  logic [MAC_W-1:0]            anchor [2**CL];
  logic [LV-1:0][1:0][MAC_W-1:0] child;
  logic [LV-1:0]               have;
  logic [LW-1:0]               lbl;
  logic [CL-1:0]               top_idx;
  logic [MAC_W-1:0]            expected;

  // index of the first DRAM-level node on the path = anchor index
  assign top_idx = lbl[LW-1 -: CL];

  // side of the path below ORAM level CL+i-1, i >= 1
  function automatic logic side(input logic [LW-1:0] l, input int unsigned i);
    return l[LW - CL - i];
  endfunction

  always_comb begin
    if (mac_level == '0) expected = anchor[top_idx];
    else                 expected = child[mac_level - 1'b1][side(lbl, int'(mac_level))];
  end

  assign rd_child_mac = child[rd_level];

  always_ff @(posedge clk) begin
    chk_pass <= 1'b0;
    chk_fail <= 1'b0;
    if (rst) begin
      for (int unsigned a = 0; a < 2**CL; a++) anchor[a] <= '0;
      child     <= '0;
      have      <= '0;
      lbl       <= '0;
      err_level <= '0;
      n_checked <= '0;
      n_failed  <= '0;
    end else begin
      if (anchor_we) anchor[anchor_idx] <= anchor_mac;
      if (start) begin
        lbl  <= label;
        have <= '0;
      end else begin
        if (mb_valid) begin
          child[mb_level] <= mb_child_mac;
          have[mb_level]  <= 1'b1;
        end
        if (mac_valid) begin
          n_checked <= n_checked + 1;
          if (mac_value == expected) begin
            chk_pass <= 1'b1;
          end else begin
            chk_fail  <= 1'b1;
            err_level <= mac_level;
            n_failed  <= n_failed + 1;
          end
        end
        if (upd_valid) begin
          if (upd_level == '0) anchor[top_idx] <= upd_mac;
          else child[upd_level - 1'b1][side(lbl, int'(upd_level))] <= upd_mac;
        end
      end
    end
  end

  // A level's MAC may only be checked once its parent MB has been read.
  a_parent_read: assert property (@(posedge clk) disable iff (rst)
    (mac_valid && !start && mac_level != '0) |-> have[mac_level - 1'b1]);

endmodule
