// mac_pool: shares a small number of AES-GCM units among the MAC
// computations of an ORAM access.
//
// Every block fetched from memory must have its MAC recomputed before it is
// trusted, and every block written needs a new MAC; one AES-GCM unit takes
// 80 cycles per block and the default system has four. Requests wait in a
// FIFO of QD entries; each cycle the FIFO head is issued to the lowest-numbered
// free unit. A unit stays busy until its result has been handed out, and
// finished results leave through one response port, lowest unit first. When
// the FIFO holds work and no unit is free the pool counts a stall cycle: this
// is the MAC-computing congestion that dominates the design's slowdown.
//
// The AES-GCM units themselves are outside this module: u_start pulses for
// one cycle with u_msg/u_tag, and a unit answers, any number of cycles later,
// with a one-cycle u_done pulse carrying its MAC and the tag. The queue,
// issue and arbitration policy is this design's choice; the unit count and
// latency are the paper's.
//
// Handshakes are valid/ready; a request is taken when req_valid && req_ready,
// a response when resp_valid && resp_ready. Synchronous active-high reset.
module mac_pool
  import iro_pkg::*;
#(
  parameter int unsigned NU    = GCM_UNITS,
  parameter int unsigned MSG_W = 640,
  parameter int unsigned TAG_W = 8,
  parameter int unsigned QD    = 8
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      req_valid,
  output logic                      req_ready,
  input  logic [MSG_W-1:0]          req_msg,
  input  logic [TAG_W-1:0]          req_tag,
  output logic                      resp_valid,
  input  logic                      resp_ready,
  output logic [MAC_W-1:0]          resp_mac,
  output logic [TAG_W-1:0]          resp_tag,
  // AES-GCM units
  output logic [NU-1:0]             u_start,
  output logic [MSG_W-1:0]          u_msg,
  output logic [TAG_W-1:0]          u_tag,
  input  logic [NU-1:0]             u_done,
  input  logic [NU-1:0][MAC_W-1:0]  u_mac,
  input  logic [NU-1:0][TAG_W-1:0]  u_tag_o,
  // statistics
  output logic [31:0]               n_stall,
  output logic [31:0]               n_issued,
  output logic [$clog2(QD+1)-1:0]   q_count
);

  localparam int unsigned PW = $clog2(QD);

  logic [MSG_W-1:0] q_msg [QD];
  logic [TAG_W-1:0] q_tag [QD];
  logic [PW-1:0]    q_rd, q_wr;
  logic [NU-1:0]    busy, res_v;
  logic [NU-1:0][MAC_W-1:0] res_mac;
  logic [NU-1:0][TAG_W-1:0] res_tag;
  logic             any_free, issue, push, pop_resp;
  logic [$clog2(NU)-1:0] free_u, out_u;

  always_comb begin
    any_free = 1'b0;
    free_u   = '0;
    for (int i = NU - 1; i >= 0; i--)
      if (!busy[i]) begin
        any_free = 1'b1;
        free_u   = $clog2(NU)'(i);
      end
    resp_valid = 1'b0;
    out_u      = '0;
    for (int i = NU - 1; i >= 0; i--)
      if (res_v[i]) begin
        resp_valid = 1'b1;
        out_u      = $clog2(NU)'(i);
      end
  end

  assign req_ready = (q_count < ($clog2(QD+1))'(QD));
  assign push      = req_valid && req_ready;
  assign issue     = (q_count != '0) && any_free;
  assign pop_resp  = resp_valid && resp_ready;
  assign resp_mac  = res_mac[out_u];
  assign resp_tag  = res_tag[out_u];

  always_ff @(posedge clk) begin
    if (rst) begin
      q_rd     <= '0;
      q_wr     <= '0;
      q_count  <= '0;
      busy     <= '0;
      res_v    <= '0;
      res_mac  <= '0;
      res_tag  <= '0;
      u_start  <= '0;
      u_msg    <= '0;
      u_tag    <= '0;
      n_stall  <= '0;
      n_issued <= '0;
    end else begin
      u_start <= '0;
      if (push) begin
        q_msg[q_wr] <= req_msg;
        q_tag[q_wr] <= req_tag;
        q_wr        <= (q_wr == PW'(QD - 1)) ? '0 : q_wr + 1'b1;
      end
      if (issue) begin
        u_start[free_u] <= 1'b1;
        u_msg           <= q_msg[q_rd];
        u_tag           <= q_tag[q_rd];
        busy[free_u]    <= 1'b1;
        q_rd            <= (q_rd == PW'(QD - 1)) ? '0 : q_rd + 1'b1;
        n_issued        <= n_issued + 1;
      end
      q_count <= q_count + ($clog2(QD+1))'(push) - ($clog2(QD+1))'(issue);
      if ((q_count != '0) && !any_free) n_stall <= n_stall + 1;
      for (int i = 0; i < NU; i++) begin
        if (u_done[i]) begin
          res_v[i]   <= 1'b1;
          res_mac[i] <= u_mac[i];
          res_tag[i] <= u_tag_o[i];
        end
      end
      if (pop_resp) begin
        res_v[out_u] <= 1'b0;
        busy[out_u]  <= 1'b0;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) q_count <= ($clog2(QD+1))'(QD));
  a_done_only_busy: assert property (@(posedge clk) disable iff (rst) (u_done & ~busy) == '0);

endmodule
