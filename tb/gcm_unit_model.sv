// gcm_unit_model: behavioural model of one AES-GCM MAC unit.
//
// Not synthesizable logic and not the real cipher: it accepts a message on a
// one-cycle start pulse, waits LAT clock cycles (80 processor cycles per
// block in the evaluated system) and then pulses done for one cycle with the
// stand-in MAC of tb_gcm_pkg and the request tag. It takes no new request
// while busy.
module gcm_unit_model
  import tb_gcm_pkg::*;
#(
  parameter int unsigned MSG_W = 640,
  parameter int unsigned TAG_W = 8,
  parameter int unsigned LAT   = 80,
  parameter logic [63:0] KEY   = 64'h0123_4567_89AB_CDEF
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [MSG_W-1:0]     msg,
  input  logic [TAG_W-1:0]     tag,
  output logic                 done,
  output logic [TB_MAC_W-1:0]  mac,
  output logic [TAG_W-1:0]     tag_o
);
  int unsigned cnt;
  logic        busy;
  logic [MSG_W-1:0] m;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      busy  <= 1'b0;
      cnt   <= 0;
      mac   <= '0;
      tag_o <= '0;
    end else if (!busy && start) begin
      busy  <= 1'b1;
      cnt   <= LAT - 1;
      m     <= msg;
      tag_o <= tag;
    end else if (busy) begin
      if (cnt == 1) begin
        busy <= 1'b0;
        done <= 1'b1;
        mac  <= toy_mac(1024'(m), MSG_W, KEY);
      end
      cnt <= cnt - 1;
    end
  end
endmodule
