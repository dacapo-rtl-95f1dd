// tb_fp32_gen: self-checking test of the FP32 generator.
// Feeds random partial-sum sequences of 1, 4 or 16 cycles (MX4/MX6/MX9) with random shared
// exponents and compares the produced single with sum * 2^(ea+eb-254-F) computed in
// double precision (exact for these magnitudes), checking the one-cycle output latency.
module tb_fp32_gen;
  import dacapo_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  mx_mode_t mode;
  logic in_valid = 0, last = 0;
  logic signed [PSUM_W-1:0] psum;
  logic [7:0] exp_a, exp_b;
  logic out_valid;
  fp32_t out;
  int checks = 0, failures = 0;

  fp32_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expect_v, got;
    longint s;
    int n, lim, v, ex;
    mode = MX4; psum = 0; exp_a = 0; exp_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      mode = mx_mode_t'(t % 3);
      n = steps_of(mode);
      lim = (mode == MX4) ? 36 * 16 : (mode == MX6) ? 900 * 4 : 64516;
      exp_a = 8'($urandom_range(60, 190));
      exp_b = 8'($urandom_range(60, 190));
      s = 0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        v = int'($urandom_range(0, 2 * lim)) - lim;
        psum = PSUM_W'(v);
        if (t % 17 == 0) psum = 0;
        s += longint'(psum);
        in_valid = 1;
        last = (k == n - 1);
      end
      @(negedge clk);
      in_valid = 0; last = 0;
      // output registered on the edge after the last input
      ex = int'(exp_a) + int'(exp_b) - 254 - frac_bits(mode);
      expect_v = real'(s);
      while (ex > 0) begin expect_v = expect_v * 2.0; ex--; end
      while (ex < 0) begin expect_v = expect_v / 2.0; ex++; end
      got = f2r(out);
      expect_v = clampv(expect_v);
      checks++;
      if (!out_valid || got != expect_v) begin
        failures++;
        if (failures < 10) $display("t=%0d mode=%0d got %g (v=%0b) expected %g", t, mode, got, out_valid, expect_v);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;   // one-cycle pulse
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
