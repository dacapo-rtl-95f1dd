// mx_quantizer: FP32 -> MX conversion of one block of 16 values (the datapath of a
// precision-conversion unit), after the MX conversion figure of the paper:
//   * a max tree over the 8-bit exponents; its leaf stage gives the sub-group (pair)
//     maxima, its root the 8-bit shared exponent E;
//   * each sub-group's micro-exponent bit is 1 when its exponent is smaller than E;
//   * each mantissa (24 bits with the hidden one) is shifted right by
//     E - mu - own exponent, then truncated to 2, 4 or 7 bits (MX4/MX6/MX9).
// The result follows the element encoding of dacapo_pkg. Zero or subnormal inputs become
// zero; infinities and NaNs are not treated specially (the paper does not mention them).
// Truncation is the figure's "truncate" (rounding toward zero). Combinational.
module mx_quantizer
  import dacapo_pkg::*;
(
  input  mx_mode_t  mode,
  input  fp32_t     x [BLK],
  output mx_block_t y
);
  logic [7:0] sub_max [NSUB];
  logic [7:0] e_sh;
  int         m;

  always_comb begin
    m    = mant_bits(mode);
    e_sh = '0;
    for (int j = 0; j < NSUB; j++) begin
      sub_max[j] = (x[2*j][30:23] > x[2*j+1][30:23]) ? x[2*j][30:23] : x[2*j+1][30:23];
      if (sub_max[j] > e_sh) e_sh = sub_max[j];
    end
    y.exp = e_sh;
    for (int j = 0; j < NSUB; j++) y.mu[j] = (sub_max[j] < e_sh);
    for (int i = 0; i < BLK; i++) begin
      logic [23:0] sig;
      int          sh;
      sig = (x[i][30:23] == 0) ? 24'd0 : {1'b1, x[i][22:0]};
      sh  = int'(e_sh) - int'(y.mu[i / SUBBLK]) - int'(x[i][30:23]) + 24 - m;
      y.man[i] = (sh >= 24) ? 7'd0 : 7'(sig >> sh);
      y.sgn[i] = x[i][31] && (y.man[i] != 0);
    end
  end
endmodule
