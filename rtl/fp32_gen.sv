// fp32_gen: FP32 generator of a Dot-Product Engine.
//
// Sums the MAC-tree partial sums that belong to one MX block (1 cycle in MX4, 4 in MX6,
// 16 in MX9; `last` marks the final one), adds the two shared exponents (the exponent
// "+" of the DPE figure) and converts the integer block dot product into an IEEE-754
// single. The paper gives only the function; the conversion here is a leading-one
// detector plus shift. Because a block sum needs at most 21 magnitude bits it always fits
// the 24-bit significand, so the conversion is exact. Results below the normal range flush
// to zero and results above it saturate to infinity (this design's choice; the paper does
// not mention special values).
// Timing: `out_valid`/`out` appear one clock after the `in_valid && last` cycle.
module fp32_gen
  import dacapo_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  mx_mode_t                 mode,
  input  logic                     in_valid,
  input  logic                     last,
  input  logic signed [PSUM_W-1:0] psum,
  input  logic [7:0]               exp_a,
  input  logic [7:0]               exp_b,
  output logic                     out_valid,
  output fp32_t                    out
);
  logic signed [SACC_W-1:0] acc, total;
  logic [SACC_W-1:0]        mag;
  logic                     sgn;
  int                       msb;
  int                       e;
  fp32_t                    conv;

  always_comb begin
    total = acc + SACC_W'(psum);
    sgn   = total < 0;
    mag   = sgn ? SACC_W'(-total) : SACC_W'(total);
    msb   = 0;
    for (int i = 0; i < SACC_W; i++)
      if (mag[i]) msb = i;
    e = msb + int'(exp_a) + int'(exp_b) - 127 - frac_bits(mode);
    if (mag == '0 || e <= 0)
      conv = {sgn & (mag != '0), 31'd0};
    else if (e >= 255)
      conv = {sgn, 8'hff, 23'd0};
    else
      conv = {sgn, 8'(e), 23'((mag << (23 - msb)))};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= last ? '0 : total;
        if (last) out <= conv;
      end
    end
  end
endmodule
