// gh_masked_sub: the masked non-linear layer S_m of the masked Grasshopper datapath.
//
// For a 128-bit mask m, S_m is defined by S_m(x + m) = S(x) + m, applied byte by byte, so
// byte i of the output is S'(y_i ^ m_i) ^ m_i where y = x + m is the masked state. With m = 0
// the layer is the plain S of the standard, which is how the key schedule uses it.
// The defining equation is the one of the masking scheme; how S_m is built is this design's
// choice: sixteen copies of the S' table with the mask folded in before and after each look-up,
// recomputed every cycle, so the mask can change from round to round at no cost. This is the
// functional equivalent of a re-tabulated masked S-box, not a glitch-hardened one.
// Combinational, no clock.
module gh_masked_sub
  import gh_pkg::*;
(
  input  block_t din,   // masked state x + m
  input  block_t mask,  // mask m
  output block_t dout   // S(x) + m
);
  for (genvar i = 0; i < 16; i++) begin : g_byte
    byte_t s_out;
    gh_sbox u_sbox (.din(din[8*i +: 8] ^ mask[8*i +: 8]), .dout(s_out));
    assign dout[8*i +: 8] = s_out ^ mask[8*i +: 8];
  end
endmodule
