// gh_lin_steps: STEPS applications of the Grasshopper shift-register step R.
//
// R(x) = l(x15, ..., x0) || x15 || ... || x1, where l is a fixed linear combination of the 16
// bytes over GF(2^8) with p(x) = x^8 + x^7 + x^6 + x + 1. The linear transformation is
// L = R^16. This design computes L over 16 / STEPS clock cycles by feeding the output of this
// block back into its input; STEPS = 4 (four cycles per L) is this design's choice, picked so
// that an encryption takes close to the delay measured for the original implementation.
// STEPS = 16 gives the whole L in one cycle. Combinational, no clock. For STEPS < 16 the low
// 128 - 8*STEPS output bits are the input shifted down and so are plain wires.
module gh_lin_steps
  import gh_pkg::*;
#(
  parameter int unsigned STEPS = 4
) (
  input  block_t din,
  output block_t dout
);
  always_comb begin
    dout = din;
    for (int s = 0; s < int'(STEPS); s++) dout = r_step(dout);
  end
endmodule
