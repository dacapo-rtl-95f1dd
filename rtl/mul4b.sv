// mul4b: 4-bit multiplier built from four 2-bit multiplier results.
//
// Follows the 4-bit multiplier of the DPE figure: the first pair of partial products is
// combined as "shift, mux, add", and that sum is again "shift, mux, added" to the second
// pair. The figure prints the shifters and muxes but not the shift amounts; here each
// shifter aligns slices of 2 bits (x4 per level), written as a left shift of the more
// significant partial product in integer arithmetic. With fuse=1 the four inputs are
// (a_hi*b_hi, a_hi*b_lo, a_lo*b_hi, a_lo*b_lo) and the output is the 4x4-bit product; with
// fuse=0 the muxes bypass the shifters and the output is the plain sum of four
// independent products (the forwarding path used in MX4 mode). Combinational.
module mul4b (
  input  logic signed [7:0]  p [4],
  input  logic               fuse,
  output logic signed [11:0] y
);
  logic signed [11:0] s01, s23, hi;
  always_comb begin
    s01 = (fuse ? (12'(p[0]) <<< 2) : 12'(p[0])) + 12'(p[1]);
    s23 = (fuse ? (12'(p[2]) <<< 2) : 12'(p[2])) + 12'(p[3]);
    hi  = fuse ? (s01 <<< 2) : s01;
    y   = hi + s23;
  end
endmodule
