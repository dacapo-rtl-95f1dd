// fp32_add: single-precision adder used by the DPE accumulator.
//
// The DPE figure shows a "+" between the FP32 generator and the accumulator; the paper
// does not say how it rounds. This adder is this design's choice: normal numbers only
// (zero exponent is read as zero, results below the normal range flush to zero, overflow
// gives infinity, no NaN handling), operands aligned with 3 extra bits (guard, round,
// sticky) and the result rounded to nearest, ties to even. Combinational.
module fp32_add
  import dacapo_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb, ey;
  logic [26:0] ma, mb, mx, mn, sticky_mask;
  logic [27:0] sum;
  logic [7:0]  d;
  int          lz;
  int          ee;
  logic [26:0] norm;
  logic [24:0] rnd;
  logic        a_big;

  always_comb begin
    sticky_mask = '0;
    rnd = '0;
    y   = '0;
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = (ea == 0) ? '0 : {1'b1, a[22:0], 3'b000};
    mb = (eb == 0) ? '0 : {1'b1, b[22:0], 3'b000};
    a_big = (ea > eb) || (ea == eb && ma >= mb);
    ey = a_big ? ea : eb;
    sy = a_big ? sa : sb;
    mx = a_big ? ma : mb;
    mn = a_big ? mb : ma;
    d  = a_big ? (ea - eb) : (eb - ea);
    // align smaller operand, folding shifted-out bits into the sticky bit
    if (d >= 27) begin
      mn = {26'd0, |mn};
    end else begin
      sticky_mask = (27'd1 << d) - 27'd1;
      mn = (mn >> d) | {26'd0, |(mn & sticky_mask)};
    end
    sum = (sa == sb) ? ({1'b0, mx} + {1'b0, mn}) : ({1'b0, mx} - {1'b0, mn});
    norm = '0;
    ee   = 0;
    lz   = 0;
    if (sum != 0) begin
      if (sum[27]) begin
        norm = sum[27:1] | {26'd0, sum[0]};
        ee   = int'(ey) + 1;
      end else begin
        for (int i = 26; i >= 0; i--)
          if (sum[i] && lz == 0) lz = 27 - i;   // lz = 1 means bit 26 set
        norm = 27'(sum << (lz - 1));
        ee   = int'(ey) - (lz - 1);
      end
      // round to nearest even on guard/round/sticky
      rnd = {1'b0, norm[26:3]};
      if (norm[2] && (norm[1] || norm[0] || norm[3])) rnd = rnd + 25'd1;
      if (rnd[24]) begin
        rnd = rnd >> 1;
        ee  = ee + 1;
      end
      if (ey == 0 || ee <= 0)
        y = '0;
      else if (ee >= 255)
        y = {sy, 8'hff, 23'd0};
      else
        y = {sy, 8'(ee), rnd[22:0]};
    end
  end
endmodule
