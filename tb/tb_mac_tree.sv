// tb_mac_tree: self-checking test of the hierarchical MAC tree.
// Random MX blocks in each mode are split into lane words by the bitwise concatenator
// (dacapo_pkg::lane_pack); every cycle's partial sum is compared with the sum of the
// element products covered by that cycle, computed directly from signs, mantissas and
// micro-exponents. It also checks the number of cycles per block (1/4/16).
module tb_mac_tree;
  import dacapo_pkg::*;
  mx_mode_t mode;
  lane_word_t a, b;
  logic signed [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  mac_tree dut (.mode(mode), .a(a), .b(b), .psum(psum));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mx_block_t rand_block(mx_mode_t md, bit extreme);
    mx_block_t x;
    int mb = mant_bits(md);
    x.exp = 8'($urandom_range(100, 150));
    x.mu  = 8'($urandom);
    x.sgn = 16'($urandom);
    for (int i = 0; i < BLK; i++)
      x.man[i] = extreme ? 7'((1 << mb) - 1) : 7'($urandom_range(0, (1 << mb) - 1));
    return x;
  endfunction

  initial begin
    mx_block_t xa, xb;
    longint ref_sum;
    int nsteps;
    for (int md = 0; md < 3; md++) begin
      mode = mx_mode_t'(md);
      for (int t = 0; t < 200; t++) begin
        xa = rand_block(mode, t == 0);
        xb = rand_block(mode, t == 0);
        if (t == 0) begin xa.sgn = '0; xb.sgn = '0; xa.mu = '0; xb.mu = '0; end
        nsteps = 0;
        for (int s = 0; s < steps_of(mode); s++) begin
          a = lane_pack(xa, mode, s, 1'b0);
          b = lane_pack(xb, mode, s, 1'b1);
          #1;
          ref_sum = 0;
          for (int e = 0; e < BLK; e++) begin
            bit covered;
            longint pr;
            covered = (mode == MX4) || (mode == MX6 && e / 4 == s) || (mode == MX9 && e == s);
            if (covered) begin
              pr = longint'(xa.man[e]) * longint'(xb.man[e]) * 4;
              pr = pr >> (int'(xa.mu[e/2]) + int'(xb.mu[e/2]));
              ref_sum += (xa.sgn[e] ^ xb.sgn[e]) ? -pr : pr;
            end
          end
          checks++;
          if (longint'(psum) != ref_sum) begin
            failures++;
            if (failures < 10) $display("mode %0d step %0d: psum %0d expected %0d", md, s, psum, ref_sum);
          end
          nsteps++;
        end
        checks++;
        if (nsteps != (md == 0 ? 1 : md == 1 ? 4 : 16)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
