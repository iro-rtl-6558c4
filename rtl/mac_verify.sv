// mac_verify: checks freshly computed MACs against the MACs stored with the
// blocks, for the blocks that are not covered by the metadata tree.
//
// A data block (or a replica, or a block tried as a possible metadata
// replica during a correction) is accepted when the MAC computed over its
// address, EncCtr and contents equals the 54-bit MAC read from its ECC word
// (or, for a metadata-replica candidate, the child MAC held by its parent).
// The computation takes many cycles in an AES-GCM unit, so the expected MAC
// is parked here, indexed by the request tag, when the request enters the
// MAC queue, and compared when the result with that tag comes back.
//
// Interface: req_fire/req_tag/req_expect when a verify request is accepted
// by the MAC queue (only requests with req_verify set are tracked);
// resp_fire/resp_tag/resp_mac when a result leaves the queue. v_pass or
// v_fail pulses one cycle after a tracked result, with v_tag naming it;
// n_pass/n_fail count results. Tags index the table by their low IDX_W bits;
// a tag must not be reused before its result has returned (checked by an
// assertion). Synchronous active-high reset. The table organisation is this
// design's choice; the rule that a block is accepted only when its MAC
// matches follows the IRO read procedure.
module mac_verify
  import iro_pkg::*;
#(
  parameter int unsigned TAG_W = 8,
  parameter int unsigned IDX_W = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             req_fire,
  input  logic             req_verify,
  input  logic [TAG_W-1:0] req_tag,
  input  logic [MAC_W-1:0] req_expect,
  input  logic             resp_fire,
  input  logic [TAG_W-1:0] resp_tag,
  input  logic [MAC_W-1:0] resp_mac,
  output logic             v_pass,
  output logic             v_fail,
  output logic [TAG_W-1:0] v_tag,
  output logic [31:0]      n_pass,
  output logic [31:0]      n_fail
);

  logic [MAC_W-1:0]     expect_q [2**IDX_W];
  logic [2**IDX_W-1:0]  pend;
  logic [IDX_W-1:0]     ri, si;

  assign ri = req_tag[IDX_W-1:0];
  assign si = resp_tag[IDX_W-1:0];

  always_ff @(posedge clk) begin
    v_pass <= 1'b0;
    v_fail <= 1'b0;
    if (rst) begin
      pend   <= '0;
      v_tag  <= '0;
      n_pass <= '0;
      n_fail <= '0;
    end else begin
      if (resp_fire && pend[si]) begin
        pend[si] <= 1'b0;
        v_tag    <= resp_tag;
        if (resp_mac == expect_q[si]) begin
          v_pass <= 1'b1;
          n_pass <= n_pass + 1;
        end else begin
          v_fail <= 1'b1;
          n_fail <= n_fail + 1;
        end
      end
      if (req_fire && req_verify) begin
        pend[ri]     <= 1'b1;
        expect_q[ri] <= req_expect;
      end
    end
  end

  a_tag_free: assert property (@(posedge clk) disable iff (rst)
    (req_fire && req_verify) |-> (!pend[ri] || (resp_fire && si == ri)));

endmodule
