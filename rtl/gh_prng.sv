// gh_prng: pseudo-random generator of the 128-bit encryption mask.
//
// The masking scheme needs a fresh random mask m for each encryption, drawn while the key
// schedule runs so it costs no encryption time. The generator type is this design's choice: a
// 128-bit Fibonacci LFSR with feedback polynomial x^128 + x^126 + x^101 + x^99 + 1 (maximal
// length), shifted by one bit in every cycle where en is high. mask is the register itself.
// Reset loads SEED, which must be non-zero. An LFSR is predictable from 128 output bits and is
// only a stand-in for a proper random source.
module gh_prng
  import gh_pkg::*;
#(
  parameter block_t SEED = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210
) (
  input  logic   clk,
  input  logic   rst_n,   // active-low synchronous reset
  input  logic   en,      // advance one step
  output block_t mask
);
  block_t lfsr;
  logic   fb;

  assign fb   = lfsr[127] ^ lfsr[125] ^ lfsr[100] ^ lfsr[98];
  assign mask = lfsr;

  always_ff @(posedge clk) begin
    if (!rst_n)  lfsr <= SEED;
    else if (en) lfsr <= {lfsr[126:0], fb};
  end

  initial assert (SEED != '0) else $error("gh_prng: SEED must be non-zero");
endmodule
