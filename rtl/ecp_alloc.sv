// ecp_alloc: assigns error correction pointers to the known faulty cells of
// a bucket (or of a MUST node and its mirror) and builds the ECP region to
// be written back, e.g. during an Early Reshuffle.
//
// Rule kept (from the paper): a faulty ECP may only be repaired by ECPs in
// front of it, so no two ECPs can point at each other. The ECPs are stored
// rotated by ROffset so that logical ECP 1 can be moved off faulty cells.
// How the assignment is searched is this design's choice: for ROffset =
// 0, 1, ... the first value that works is taken. For a given ROffset each
// fault inside the ECP region gets a deadline, the logical index of the ECP
// it sits in; faults elsewhere have none. Faults are given logical ECPs
// 0, 1, 2, ... in order of deadline (earliest deadline first, ties by input
// order), which succeeds whenever any assignment does. The value stored for
// a fault inside the ECP region is the bit the faulty ECP should hold; it is
// worked out from the last ECP backwards, since a fault's repairer always
// comes before the ECP it repairs. For the MUST, the faulty cells of a node
// and of its mirror are given together as one list, which yields the
// identical ECP/RECP pair and shared ROffset the mirrored scheme needs.
//
// Unused ECPs get the all-ones address (outside the block) and value 0.
// Interface: combinational. f_val is the correct value of a faulty cell
// outside the ECP region (the bit being written there); it is ignored for
// cells inside the region. ok = 0 when the faults exceed what the ECPs can
// repair (the bucket must then be remapped).
module ecp_alloc #(
  parameter int unsigned NECP   = 5,
  parameter int unsigned EAW    = 13,
  parameter int unsigned ROFF_W = 3,
  parameter int unsigned BASE   = 4,
  parameter int unsigned CELLS  = 7488
) (
  input  logic [NECP-1:0]           f_valid,
  input  logic [NECP-1:0][EAW-1:0]  f_addr,
  input  logic [NECP-1:0]           f_val,
  output logic                      fbit,
  output logic [ROFF_W-1:0]         roffset,
  output logic [NECP*(EAW+1)-1:0]   region,
  output logic                      ok
);

  localparam int unsigned EW = EAW + 1;
  localparam int unsigned RW = NECP * EW;
  localparam int unsigned IW = $clog2(NECP + 1);

  logic [NECP-1:0][IW-1:0] host, rank, hsel, rsel_rank;
  logic [NECP-1:0][EW-1:0] lecp;      // logical ECP contents
  logic [NECP-1:0]         assigned;
  logic [NECP-1:0][IW-1:0] owner;     // fault index served by logical ECP
  logic                    feas, found;
  int unsigned             rsel;

  // Every write below uses a constant index (each target selects its source),
  // so the block maps to plain multiplexers with no inferred storage.
  always_comb begin
    int unsigned rel;
    rel       = 0;
    found     = 1'b0;
    rsel      = 0;
    hsel      = '0;
    rsel_rank = '0;
    host      = '0;
    rank      = '0;
    for (int unsigned r = 0; r < NECP; r++) begin
      // deadlines for this rotation
      for (int unsigned f = 0; f < NECP; f++) begin
        host[f] = IW'(NECP);
        if (f_valid[f] && (int'(f_addr[f]) >= BASE) && (int'(f_addr[f]) < BASE + RW))
          host[f] = IW'(((int'(f_addr[f]) - BASE) / EW + r) % NECP);
      end
      // earliest-deadline-first ranks
      feas = 1'b1;
      for (int unsigned f = 0; f < NECP; f++) begin
        rank[f] = '0;
        for (int unsigned g = 0; g < NECP; g++)
          if (f_valid[g] && f_valid[f] &&
              ((host[g] < host[f]) || ((host[g] == host[f]) && (g < f))))
            rank[f] = rank[f] + 1'b1;
        if (f_valid[f] && (rank[f] >= host[f])) feas = 1'b0;
      end
      if (!found && feas) begin
        found     = 1'b1;
        rsel      = r;
        hsel      = host;
        rsel_rank = rank;
      end
    end

    // logical ECP addresses
    assigned = '0;
    owner    = '0;
    for (int unsigned k = 0; k < NECP; k++) lecp[k] = {1'b0, {EAW{1'b1}}};
    for (int unsigned k = 0; k < NECP; k++) begin
      for (int unsigned f = 0; f < NECP; f++) begin
        if (f_valid[f] && found && (rsel_rank[f] == IW'(k))) begin
          lecp[k][EAW-1:0] = f_addr[f];
          assigned[k]      = 1'b1;
          owner[k]         = IW'(f);
        end
      end
    end
    // values, last logical ECP first
    for (int k = NECP - 1; k >= 0; k--) begin
      if (assigned[k]) begin
        if (hsel[owner[k]] < IW'(NECP)) begin
          rel = (int'(f_addr[owner[k]]) - BASE) % EW;
          lecp[k][EAW] = lecp[hsel[owner[k]]][rel];
        end else begin
          lecp[k][EAW] = f_val[owner[k]];
        end
      end
    end
    // rotate into physical slots
    region = '0;
    for (int unsigned p = 0; p < NECP; p++)
      for (int unsigned k = 0; k < NECP; k++)
        if (((k + NECP - rsel) % NECP) == p) region[p*EW +: EW] = lecp[k];

    ok      = found;
    for (int unsigned f = 0; f < NECP; f++)
      if (f_valid[f] && (int'(f_addr[f]) >= CELLS)) ok = 1'b0;
    fbit    = |f_valid;
    roffset = ROFF_W'(rsel);
  end

endmodule
