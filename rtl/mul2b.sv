// mul2b: one 2-bit multiplier of the DPE MAC tree.
//
// Multiplies two 2-bit mantissa slices, adds the two operands' micro-exponent bits and
// shifts the product right by that sum, as the 2-bit multiplier of the DPE figure shows
// (a "+" on the micro-exponents steering a ">>" after the "x"). To keep the shift exact the
// product first gets 2 guard bits, so the output carries 2 fraction bits. The sign
// (XOR of the operand signs) is applied here; the paper does not show where signs are
// handled, so this placement is this design's choice. Purely combinational.
module mul2b
  import dacapo_pkg::*;
(
  input  lane_t             a,
  input  lane_t             b,
  output logic signed [7:0] p   // (-1)^s * (a.m*b.m) * 2^(2 - a.mu - b.mu)
);
  logic [1:0] sh;
  logic [5:0] mag;
  always_comb begin
    sh  = {1'b0, a.mu} + {1'b0, b.mu};
    mag = ({2'b00, a.m} * {2'b00, b.m}) << 2;
    mag = mag >> sh;
    p   = (a.sgn ^ b.sgn) ? -$signed({2'b00, mag}) : $signed({2'b00, mag});
  end
endmodule
