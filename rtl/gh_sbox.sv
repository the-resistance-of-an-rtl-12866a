// gh_sbox: the Grasshopper byte substitution S'.
//
// A purely combinational 256-entry look-up of the S' permutation held in gh_pkg::SBOX; the
// table is the one printed in the standard. On an FPGA it maps to LUTs (or a ROM). No clock,
// no latency: dout = S'(din) in the same cycle.
module gh_sbox
  import gh_pkg::*;
(
  input  byte_t din,
  output byte_t dout
);
  assign dout = SBOX[din];
endmodule
