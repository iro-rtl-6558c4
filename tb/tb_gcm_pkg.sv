// tb_gcm_pkg: stand-in keyed hash for simulation.
//
// The real design computes MACs with AES-GCM. For simulation only, this
// package provides a cheap keyed mixing function with a 54-bit result; it has
// no cryptographic strength and only has to make different inputs give
// different MACs so that tampering and mix-ups are visible in the tests.
package tb_gcm_pkg;
  localparam int unsigned TB_MAC_W = 54;

  function automatic logic [TB_MAC_W-1:0] toy_mac(input logic [1023:0] msg,
                                                  input int unsigned nbits,
                                                  input logic [63:0] key);
    logic [63:0] h;
    h = key ^ 64'h9E37_79B9_7F4A_7C15;
    for (int unsigned i = 0; i < nbits; i += 32) begin
      h = h ^ 64'(msg[i +: 32]);
      h = h * 64'hBF58_476D_1CE4_E5B9;
      h = h ^ (h >> 29);
    end
    return h[TB_MAC_W-1:0];
  endfunction
endpackage
