// tb_dpe: self-checking test of one Dot-Product Engine.
// For each MX mode and both weight directions it streams K random block pairs, the first
// one tagged "first", and compares the accumulator with the sum of the exact block dot
// products (relative tolerance for FP32 rounding). It checks the accumulator updates two
// cycles after a block's last cycle, the one-cycle activation and weight pass-through
// registers, and the drain muxes (south neighbour for T-SA, north for B-SA, 0 at the far edge).
module tb_dpe;
  import dacapo_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  mx_mode_t mode;
  logic bsa = 0, far_edge = 0, drain = 0;
  act_t act_in, act_out;
  lane_word_t w_from_n, w_to_s, w_from_s, w_to_n;
  fp32_t acc_from_n, acc_from_s, acc_out;
  int checks = 0, failures = 0;

  dpe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", msg);
    end
  endtask

  function automatic mx_block_t rand_block(mx_mode_t md, int e0);
    mx_block_t x;
    x.exp = 8'(e0 + $urandom_range(0, 3));
    x.mu  = 8'($urandom);
    x.sgn = 16'($urandom);
    for (int i = 0; i < BLK; i++) x.man[i] = 7'($urandom_range(0, (1 << mant_bits(md)) - 1));
    return x;
  endfunction

  initial begin
    mx_block_t xa, xb;
    real expect_v, mag, got;
    fp32_t acc_prev;
    int K;
    act_in = '0; w_from_n = '0; w_from_s = '0; acc_from_n = '0; acc_from_s = '0;
    mode = MX4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 90; t++) begin
      mode = mx_mode_t'(t % 3);
      bsa  = (t / 3) % 2;
      K    = 1 + (t % 5);
      expect_v = 0.0; mag = 0.0;
      for (int k = 0; k < K; k++) begin
        xa = rand_block(mode, 120);
        xb = rand_block(mode, 120);
        expect_v += mx_dot(xa, xb, mode);
        for (int s = 0; s < steps_of(mode); s++) begin
          @(negedge clk);
          acc_prev = acc_out;
          act_in.valid = 1;
          act_in.first = (k == 0);
          act_in.last  = (s == steps_of(mode) - 1);
          act_in.w     = lane_pack(xa, mode, s, 1'b0);
          if (bsa) begin
            w_from_s = lane_pack(xb, mode, s, 1'b1);
            w_from_n = lane_pack(rand_block(mode, 120), mode, s, 1'b1);  // must be ignored
          end else begin
            w_from_n = lane_pack(xb, mode, s, 1'b1);
            w_from_s = lane_pack(rand_block(mode, 120), mode, s, 1'b1);
          end
          @(posedge clk); #1;
          check(act_out == act_in, "activation pass-through");
          check(w_to_s == w_from_n && w_to_n == w_from_s, "weight pass-through");
        end
        mag += (mx_dot(xa, xb, mode) < 0) ? -mx_dot(xa, xb, mode) : mx_dot(xa, xb, mode);
      end
      @(negedge clk);
      act_in = '0;
      if (K == 1 || mode != MX4)
        check(acc_out == acc_prev, "accumulator must not change one cycle after last");
      @(negedge clk);
      got = f2r(acc_out);
      check((got - expect_v) <= 1.0e-6 * mag + 1.0e-30 && (expect_v - got) <= 1.0e-6 * mag + 1.0e-30,
            $sformatf("t=%0d mode=%0d K=%0d acc %g expected %g", t, mode, K, got, expect_v));
    end
    // drain behaviour
    @(negedge clk);
    acc_from_n = 32'h3f800000; acc_from_s = 32'h40000000;
    bsa = 0; drain = 1; far_edge = 0;
    @(negedge clk);
    check(acc_out == 32'h40000000, "T-SA drain loads south neighbour");
    bsa = 1;
    @(negedge clk);
    check(acc_out == 32'h3f800000, "B-SA drain loads north neighbour");
    far_edge = 1;
    @(negedge clk);
    check(acc_out == 32'h0, "far edge drains zero");
    drain = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
