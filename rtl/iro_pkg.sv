// iro_pkg: sizes and block layouts shared by the IRO datapath.
//
// A bucket of the Ring ORAM tree is one metadata block followed by twelve
// data slots (Z = 5 real, S = 7 dummy), every block 576 bits wide: 512 data
// bits plus the 64 bits of the ECC chip of an ECC-DIMM. The metadata block,
// its replica and the two kinds of MUST node are each one 576-bit block; the
// field widths below are the ones the paper prints in its compact-metadata
// figures. The order of the fields inside a block is this design's choice:
// the field listed first in the paper's figure sits at the least significant
// bits (a packed struct lists its most significant field first, so the
// structs below are written last-field-first).
//
// Cell addresses used by the error correction pointers (ECPs) count bits of
// a bucket as block_position * 576 + bit, with the metadata block at
// position 0 and data slot d at position d + 1.
package iro_pkg;

  // ---- Ring ORAM bucket -------------------------------------------------
  localparam int unsigned Z          = 5;    // real slots per bucket
  localparam int unsigned S          = 7;    // dummy slots per bucket
  localparam int unsigned SLOTS      = Z + S; // data slots per bucket
  localparam int unsigned BLOCK_W    = 576;  // 72-byte ECC block
  localparam int unsigned DATA_W     = 512;
  localparam int unsigned MAC_W      = 54;
  localparam int unsigned PENC_W     = 10;   // partial EncCtr
  localparam int unsigned ENCCTR_W   = 60;
  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned LABEL_W    = 30;
  localparam int unsigned OFF_W      = 4;
  localparam int unsigned BKT_NECP   = 5;
  localparam int unsigned BKT_EAW    = 13;   // ECP cell address width
  localparam int unsigned BKT_ROFF_W = 3;
  localparam int unsigned BKT_BLOCKS = SLOTS + 1;
  localparam int unsigned BKT_CELLS  = BKT_BLOCKS * BLOCK_W; // 7488
  localparam int unsigned CHANNELS   = 2;
  localparam int unsigned SLOTS_PER_CH = SLOTS / CHANNELS;   // 6
  localparam int unsigned SLOT_W     = $clog2(SLOTS);
  // Address value marking a real-slot entry as empty (design choice).
  localparam logic [ADDR_W-1:0] EMPTY_ADDR = '1;

  // ---- MUST -------------------------------------------------------------
  localparam int unsigned VR_W        = 15;  // 12 VBits + 3-bit ReadCtr
  localparam int unsigned VBITS_W     = SLOTS;
  localparam int unsigned RCTR_W      = VR_W - VBITS_W;
  localparam int unsigned MUST_NECP_NL = 3;  // non-leaf node ECPs
  localparam int unsigned MUST_NECP_LF = 7;  // leaf node ECPs
  localparam int unsigned MUST_EAW     = 11; // 12-bit ECP = 11 address + 1 value
  localparam int unsigned MUST_NL_SETS = 7;  // 3-level binary subtree
  localparam int unsigned MUST_LF_SETS = 31; // 5-level binary subtree
  localparam int unsigned MUST_NL_H    = 3;
  localparam int unsigned MUST_LF_H    = 5;
  localparam int unsigned MUST_ARITY   = 8;
  localparam int unsigned MUST_LEVELS  = 5;  // 2 cached + 3 in DRAM
  localparam int unsigned MUST_CACHED  = 2;
  localparam int unsigned IPOFF_W      = 3;

  // ---- MAC units --------------------------------------------------------
  localparam int unsigned GCM_UNITS   = 4;
  localparam int unsigned GCM_LATENCY = 80;

  // ---- Error correction pointers ----------------------------------------
  typedef struct packed {
    logic                val;   // correct value of the cell
    logic [BKT_EAW-1:0]  addr;  // cell address in the bucket
  } bkt_ecp_t;                  // 14 bits

  typedef struct packed {
    logic                val;
    logic [MUST_EAW-1:0] addr;  // cell address in the node
  } must_ecp_t;                 // 12 bits

  typedef logic [VR_W-1:0] vr_set_t; // {ReadCtr, VBits}

  // ---- Metadata block (Fig. "compact metadata", b), 576 bits -------------
  typedef struct packed {
    logic [1:0][MAC_W-1:0]          mac_child;  // [0] left, [1] right child
    logic [ENCCTR_W-1:0]            encctr;
    logic [Z:0][OFF_W-1:0]          offset;     // [0..Z-1] real, [Z] metadata replica
    logic [Z-1:0][LABEL_W-1:0]      label;
    logic [Z-1:0][ADDR_W-1:0]       addr;
    logic [BKT_NECP-1:0][$bits(bkt_ecp_t)-1:0] ecp; // physical ECP slots
    logic [BKT_ROFF_W-1:0]          roffset;
    logic                           fbit;
  } meta_t;

  // ---- Replica of the metadata block (Fig. "compact metadata", c) --------
  typedef struct packed {
    logic [MAC_W-1:0]               mac_block;
    logic [PENC_W-1:0]              penc;
    logic [1:0][MAC_W-1:0]          mac_child;
    logic [Z-1:0][OFF_W-1:0]        offset;
    logic [Z-1:0][LABEL_W-1:0]      label;
    logic [Z-1:0][ADDR_W-1:0]       addr;
    logic [BKT_NECP-1:0][$bits(bkt_ecp_t)-1:0] ecp;
    logic [BKT_ROFF_W-1:0]          roffset;
    logic                           fbit;
  } meta_rep_t;

  // ---- Data slot: 512 data bits and the ECC-chip word ---------------------
  typedef struct packed {
    logic [MAC_W-1:0]  mac;
    logic [PENC_W-1:0] penc;
    logic [DATA_W-1:0] data;
  } slot_blk_t;

  // ---- Non-leaf MUST node (Fig. "compact metadata in the MUST", a) -------
  typedef struct packed {
    logic [MUST_ARITY-1:0][MAC_W-1:0]                 mac;
    logic [MUST_NECP_NL-1:0][$bits(must_ecp_t)-1:0]   ecp;
    logic [1:0]                                       roffset;
    logic                                             fbit;
    logic [MUST_NL_SETS-1:0][VR_W-1:0]                vr;
  } must_nl_t;

  // ---- Leaf MUST node (b); IPOffsets for the L-1 non-leaf levels, padded ----
  localparam int unsigned MUST_LF_USED = MUST_LF_SETS*VR_W + 4 + MUST_NECP_LF*12
                                         + (MUST_LEVELS-1)*IPOFF_W;
  typedef struct packed {
    logic [BLOCK_W-MUST_LF_USED-1:0]                  pad;
    logic [MUST_LEVELS-2:0][IPOFF_W-1:0]              ipoff;
    logic [MUST_NECP_LF-1:0][$bits(must_ecp_t)-1:0]   ecp;
    logic [2:0]                                       roffset;
    logic                                             fbit;
    logic [MUST_LF_SETS-1:0][VR_W-1:0]                vr;
  } must_lf_t;

  // Bit position of the first ECP of each layout (cell address space of the block).
  localparam int unsigned BKT_ECP_BASE    = 1 + BKT_ROFF_W;          // 4
  localparam int unsigned MUST_NL_ECP_BASE = MUST_NL_SETS*VR_W + 3;   // 108
  localparam int unsigned MUST_LF_ECP_BASE = MUST_LF_SETS*VR_W + 4;   // 469

  // Channel of the metadata block (Fig. replication: data slots alternate
  // channels starting with channel 0; the metadata block is in channel 1).
  localparam logic META_CH = 1'b1;

endpackage
