// tb_dpe_array: self-checking test of the partitionable DPE array (6 x 4 here).
// Two phases with different split points and MX modes. In each, the T-SA and the B-SA
// compute independent matrix products at the same time: (R x K blocks) x (K blocks x COLS)
// with skewed injection, then both drain. Every drained result is compared with the sum of
// exact MX block dot products, and the results of both SAs must come out of their own
// edge (top for T-SA, bottom for B-SA) in row order.
module tb_dpe_array;
  import dacapo_pkg::*;
  import tb_fp_pkg::*;
  localparam int ROWS = 6, COLS = 4, KMAX = 3;
  localparam int RW = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  logic [RW-1:0] r_tsa;
  mx_mode_t mode_t, mode_b;
  logic t_drain = 0, b_drain = 0;
  act_t act_in [ROWS];
  lane_word_t w_top [COLS], w_bot [COLS];
  fp32_t o_top [COLS], o_bot [COLS];
  int checks = 0, failures = 0;

  dpe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mx_block_t A [2][ROWS][KMAX];   // [sa][logical row][k]
  mx_block_t W [2][KMAX][COLS];   // [sa][k][col]

  function automatic mx_block_t rand_block(mx_mode_t md);
    mx_block_t x;
    x.exp = 8'($urandom_range(124, 128));
    x.mu  = 8'($urandom);
    x.sgn = 16'($urandom);
    for (int i = 0; i < BLK; i++) x.man[i] = 7'($urandom_range(0, (1 << mant_bits(md)) - 1));
    return x;
  endfunction

  task automatic run_phase(int rt, mx_mode_t mt, mx_mode_t mb, int kt, int kb);
    int nrow [2];
    int kk [2];
    mx_mode_t md [2];
    int total;
    real expv, mag, got;
    nrow[0] = rt; nrow[1] = ROWS - rt;
    kk[0] = kt; kk[1] = kb;
    md[0] = mt; md[1] = mb;
    for (int sa = 0; sa < 2; sa++) begin
      for (int i = 0; i < ROWS; i++) for (int k = 0; k < KMAX; k++) A[sa][i][k] = rand_block(md[sa]);
      for (int k = 0; k < KMAX; k++) for (int c = 0; c < COLS; c++) W[sa][k][c] = rand_block(md[sa]);
    end
    @(negedge clk);
    r_tsa = RW'(rt); mode_t = mt; mode_b = mb;
    total = 16 * KMAX + ROWS + COLS + 4;
    for (int t = 0; t < total; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        int sa, i, j, S;
        sa = (r >= rt) ? 1 : 0;
        i  = sa ? ROWS - 1 - r : r;
        S  = steps_of(md[sa]);
        j  = t - i;
        act_in[r] = '0;
        if (j >= 0 && j < kk[sa] * S) begin
          act_in[r].valid = 1;
          act_in[r].first = (j / S == 0);
          act_in[r].last  = (j % S == S - 1);
          act_in[r].w     = lane_pack(A[sa][i][j / S], md[sa], j % S, 1'b0);
        end
      end
      for (int c = 0; c < COLS; c++) begin
        int j;
        j = t - c;
        w_top[c] = '0; w_bot[c] = '0;
        if (j >= 0 && j < kt * steps_of(mt)) w_top[c] = lane_pack(W[0][j / steps_of(mt)][c], mt, j % steps_of(mt), 1'b1);
        if (j >= 0 && j < kb * steps_of(mb)) w_bot[c] = lane_pack(W[1][j / steps_of(mb)][c], mb, j % steps_of(mb), 1'b1);
      end
      @(negedge clk);
    end
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    // drain both SAs; row i of each SA appears at its edge on drain cycle i
    for (int d = 0; d < ROWS; d++) begin
      t_drain = (d < nrow[0]);
      b_drain = (d < nrow[1]);
      for (int sa = 0; sa < 2; sa++) begin
        if (d < nrow[sa]) begin
          for (int c = 0; c < COLS; c++) begin
            expv = 0.0; mag = 0.0;
            for (int k = 0; k < kk[sa]; k++) begin
              real v;
              v = mx_dot(A[sa][d][k], W[sa][k][c], md[sa]);
              expv += v; mag += (v < 0) ? -v : v;
            end
            got = f2r(sa ? o_bot[c] : o_top[c]);
            checks++;
            if ((got - expv) > 1.0e-6 * mag + 1.0e-30 || (expv - got) > 1.0e-6 * mag + 1.0e-30) begin
              failures++;
              if (failures < 10) $display("rt=%0d sa=%0d row=%0d col=%0d got %g expected %g", rt, sa, d, c, got, expv);
            end
          end
        end
      end
      @(negedge clk);
    end
    t_drain = 0; b_drain = 0;
    // after a full drain the accumulators at the edges hold zero
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if ((rt > 0 && o_top[c] != 0) || (rt < ROWS && o_bot[c] != 0)) failures++;
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    for (int c = 0; c < COLS; c++) begin w_top[c] = '0; w_bot[c] = '0; end
    r_tsa = '0; mode_t = MX9; mode_b = MX6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_phase(4, MX9, MX6, 3, 2);
    run_phase(2, MX4, MX9, 2, 3);
    run_phase(1, MX6, MX4, 3, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
