// tb_dacapo_top: end-to-end test of the accelerator at its default size (16 x 16 DPEs).
// Two phases, each with a different split of the rows and different MX modes:
//   phase 1: T-SA 12 rows in MX9 with column-major output (a retraining-like tile),
//            B-SA 4 rows in MX6 (an inference-like tile), both running at the same time;
//   phase 2: re-partitioned to T-SA 6 rows in MX6 (labeling-like) and B-SA 10 rows in MX4;
//   phase 3: T-SA 14 rows in MX9 with a 4-block reduction split over two runs (the first
//            without drain, the second accumulating), B-SA 2 rows in MX6.
// Blocks are loaded through the memory-interface port, both SAs are started, and then
//   * every FP32 result in the O buffers (read through the vout port) is compared with the
//     exact sum of MX block dot products (relative tolerance for FP32 rounding);
//   * every row-major and column-major MX output block is decoded and compared with the
//     expected results, allowing one quantisation step of truncation;
//   * the done pulse must come nblk*S + 2R + COLS + 2 cycles after the start cycle.
// It counts the mechanisms exercised (concurrent SAs, each MX mode, re-partitioning,
// drains, column-major conversion, memory-interface back-pressure) and fails on any
// that never happened.
module tb_dacapo_top;
  import dacapo_pkg::*;
  import tb_fp_pkg::*;
  localparam int ROWS = 16, COLS = 16, KMAX = 3;
  localparam int RW = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  logic [RW-1:0] cfg_r_tsa;
  mx_mode_t cfg_mode_t, cfg_mode_b, cmd_mode;
  logic cfg_col_major_t, cfg_col_major_b;
  logic cmd_valid = 0, cmd_ready, cmd_sa, cmd_kind;
  logic [7:0] cmd_idx, cmd_addr;
  logic [MXBITS-1:0] cmd_data;
  logic t_start = 0, b_start = 0, t_busy, b_busy, t_done, b_done;
  logic [7:0] t_nblk, t_i_base, t_w_base, b_nblk, b_i_base, b_w_base;
  logic [6:0] t_o_base, b_o_base, vout_addr;
  logic t_accumulate = 0, t_drain_en = 1, b_accumulate = 0, b_drain_en = 1;
  logic t_row_valid, t_col_valid, b_row_valid, b_col_valid;
  logic [MXBITS-1:0] t_row_blk, t_col_blk, b_row_blk, b_col_blk;
  logic [3:0] t_col_idx, b_col_idx;
  logic vout_re = 0, vout_bottom = 0;
  fp32_t vout_data [COLS];
  int checks = 0, failures = 0;

  dacapo_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_concurrent = 0, n_repartition = 0, n_drain = 0, n_colmajor = 0, n_backpressure = 0;
  int n_split = 0;
  int n_mode [3] = '{0, 0, 0};
  always @(posedge clk) begin
    if (t_busy && b_busy) n_concurrent++;
    if (dut.t_drain || dut.b_drain) n_drain++;
    if (t_col_valid || b_col_valid) n_colmajor++;
    if (cmd_valid && !cmd_ready) n_backpressure++;
  end

  mx_block_t A [2][ROWS][KMAX];
  mx_block_t W [2][KMAX][COLS];
  real       expect_o [2][ROWS][COLS];
  real       mag_o    [2][ROWS][COLS];
  int        nrow [2], kk [2];
  mx_mode_t  md [2];
  // captured PCU outputs
  logic [MXBITS-1:0] rows_got [2][ROWS];
  int                nrows_got [2];
  logic [MXBITS-1:0] cols_got [2][COLS];
  int                ncols_got [2];

  always @(posedge clk) begin
    if (t_row_valid) begin rows_got[0][nrows_got[0]] <= t_row_blk; nrows_got[0] <= nrows_got[0] + 1; end
    if (b_row_valid) begin rows_got[1][nrows_got[1]] <= b_row_blk; nrows_got[1] <= nrows_got[1] + 1; end
    if (t_col_valid) begin cols_got[0][t_col_idx] <= t_col_blk; ncols_got[0] <= ncols_got[0] + 1; end
    if (b_col_valid) begin cols_got[1][b_col_idx] <= b_col_blk; ncols_got[1] <= ncols_got[1] + 1; end
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  function automatic mx_block_t rand_block(mx_mode_t m);
    mx_block_t x;
    x.exp = 8'($urandom_range(124, 128));
    x.mu  = 8'($urandom);
    x.sgn = 16'($urandom);
    for (int i = 0; i < BLK; i++) x.man[i] = 7'($urandom_range(0, (1 << mant_bits(m)) - 1));
    return x;
  endfunction

  task automatic send_cmd(bit sa, bit kind, int idx, int addr, mx_mode_t m, mx_block_t b);
    @(negedge clk);
    cmd_valid = 1; cmd_sa = sa; cmd_kind = kind; cmd_idx = 8'(idx); cmd_addr = 8'(addr);
    cmd_mode = m; cmd_data = mx_pack(b, m);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // compare a decoded MX block with expected reals; allow one truncation step
  task automatic chk_mx(logic [MXBITS-1:0] bits, mx_mode_t m, real ev [BLK], real mg [BLK], string what);
    mx_block_t b;
    real step, v;
    b = mx_unpack(bits, m);
    for (int i = 0; i < BLK; i++) begin
      v = mx_val(b, m, i);
      step = pow2(int'(b.exp) - 127 - int'(b.mu[i / 2]) - (mant_bits(m) - 1));
      chk((v - ev[i]) <= step + 1.0e-6 * mg[i] && (ev[i] - v) <= step + 1.0e-6 * mg[i] &&
          ((ev[i] >= 0) ? v <= ev[i] + 1.0e-6 * mg[i] : v >= ev[i] - 1.0e-6 * mg[i]),
          $sformatf("%s element %0d: %g expected %g", what, i, v, ev[i]));
    end
  endtask

  task automatic run_phase(int rt, mx_mode_t mt, mx_mode_t mb, bit cmt, int kt, int kb, bit split);
    int lat [2], t0, S;
    bit seen [2];
    nrow[0] = rt; nrow[1] = ROWS - rt;
    kk[0] = kt; kk[1] = kb;
    md[0] = mt; md[1] = mb;
    @(negedge clk);
    if (int'(cfg_r_tsa) != rt) n_repartition++;
    cfg_r_tsa = RW'(rt); cfg_mode_t = mt; cfg_mode_b = mb;
    cfg_col_major_t = cmt; cfg_col_major_b = 0;
    n_mode[mt]++; n_mode[mb]++;
    for (int sa = 0; sa < 2; sa++) begin
      S = steps_of(md[sa]);
      for (int i = 0; i < nrow[sa]; i++)
        for (int k = 0; k < kk[sa]; k++) begin
          A[sa][i][k] = rand_block(md[sa]);
          send_cmd(sa[0], 1'b0, i, k * S, md[sa], A[sa][i][k]);
        end
      for (int k = 0; k < kk[sa]; k++)
        for (int c = 0; c < COLS; c++) begin
          W[sa][k][c] = rand_block(md[sa]);
          send_cmd(sa[0], 1'b1, c, k * S, md[sa], W[sa][k][c]);
        end
      for (int i = 0; i < nrow[sa]; i++)
        for (int c = 0; c < COLS; c++) begin
          expect_o[sa][i][c] = 0.0; mag_o[sa][i][c] = 0.0;
          for (int k = 0; k < kk[sa]; k++) begin
            real v;
            v = mx_dot(A[sa][i][k], W[sa][k][c], md[sa]);
            expect_o[sa][i][c] += v;
            mag_o[sa][i][c] += (v < 0) ? -v : v;
          end
        end
    end
    nrows_got[0] = 0; nrows_got[1] = 0; ncols_got[0] = 0; ncols_got[1] = 0;
    if (split) begin
      // first half of the T-SA reduction, results kept in the array
      @(negedge clk);
      t_nblk = 8'(kt / 2); t_i_base = 0; t_w_base = 0; t_o_base = 0;
      t_accumulate = 0; t_drain_en = 0; t_start = 1;
      @(negedge clk);
      t_start = 0;
      while (!t_done) @(negedge clk);
      n_split++;
      chk(nrows_got[0] == 0, "no output from an undrained run");
    end
    @(negedge clk);
    t_nblk = 8'(split ? kt - kt / 2 : kt); b_nblk = 8'(kb);
    t_accumulate = split; t_drain_en = 1;
    t_i_base = split ? 8'((kt / 2) * steps_of(mt)) : 8'd0;
    t_w_base = t_i_base; t_o_base = 7'(3); b_i_base = 0; b_w_base = 0; b_o_base = 7'(5);
    t_start = 1; b_start = 1;
    t0 = 0;
    seen[0] = 0; seen[1] = 0;
    @(negedge clk);
    t_start = 0; b_start = 0;
    while (!(seen[0] && seen[1]) && t0 < 2000) begin
      t0++;
      if (t_done && !seen[0]) begin seen[0] = 1; lat[0] = t0; end
      if (b_done && !seen[1]) begin seen[1] = 1; lat[1] = t0; end
      @(negedge clk);
    end
    repeat (20) @(negedge clk);   // let the column-major blocks out
    for (int sa = 0; sa < 2; sa++) begin
      int fe;
      fe = (sa == 0 && split ? kk[sa] - kk[sa] / 2 : kk[sa]) * steps_of(md[sa]) + nrow[sa] + COLS;
      chk(seen[sa] && lat[sa] == fe + nrow[sa] + 2,
          $sformatf("sa %0d latency %0d expected %0d", sa, lat[sa], fe + nrow[sa] + 2));
    end
    // FP32 results in the O buffers
    for (int sa = 0; sa < 2; sa++)
      for (int i = 0; i < nrow[sa]; i++) begin
        @(negedge clk);
        vout_re = 1; vout_bottom = sa[0]; vout_addr = 7'((sa ? 5 : 3) + i);
        @(negedge clk);
        vout_re = 0;
        for (int c = 0; c < COLS; c++) begin
          real got, ev, mg;
          got = f2r(vout_data[c]); ev = expect_o[sa][i][c]; mg = mag_o[sa][i][c];
          chk((got - ev) <= 1.0e-6 * mg + 1.0e-30 && (ev - got) <= 1.0e-6 * mg + 1.0e-30,
              $sformatf("O sa=%0d row=%0d col=%0d got %g expected %g", sa, i, c, got, ev));
        end
      end
    // MX outputs
    for (int sa = 0; sa < 2; sa++) begin
      chk(nrows_got[sa] == nrow[sa], "row-major block count");
      for (int i = 0; i < nrow[sa]; i++) begin
        real ev [BLK], mg [BLK];
        for (int c = 0; c < COLS; c++) begin ev[c] = expect_o[sa][i][c]; mg[c] = mag_o[sa][i][c]; end
        chk_mx(rows_got[sa][i], md[sa], ev, mg, $sformatf("row sa=%0d i=%0d", sa, i));
      end
    end
    if (cmt) begin
      chk(ncols_got[0] == COLS, "column-major block count");
      for (int c = 0; c < COLS; c++) begin
        real ev [BLK], mg [BLK];
        for (int i = 0; i < BLK; i++) begin
          ev[i] = (i < nrow[0]) ? expect_o[0][i][c] : 0.0;
          mg[i] = (i < nrow[0]) ? mag_o[0][i][c] : 0.0;
        end
        chk_mx(cols_got[0][c], md[0], ev, mg, $sformatf("col c=%0d", c));
      end
    end else chk(ncols_got[0] == 0, "no column-major output when disabled");
    chk(ncols_got[1] == 0, "B-SA column-major disabled");
  endtask

  initial begin
    cfg_r_tsa = 0; cfg_mode_t = MX9; cfg_mode_b = MX6; cfg_col_major_t = 0; cfg_col_major_b = 0;
    cmd_sa = 0; cmd_kind = 0; cmd_idx = 0; cmd_addr = 0; cmd_mode = MX4; cmd_data = '0;
    t_nblk = 0; t_i_base = 0; t_w_base = 0; t_o_base = 0;
    b_nblk = 0; b_i_base = 0; b_w_base = 0; b_o_base = 0; vout_addr = 0;
    nrows_got[0] = 0; nrows_got[1] = 0; ncols_got[0] = 0; ncols_got[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_phase(12, MX9, MX6, 1, 2, 3, 0);
    run_phase(6, MX6, MX4, 0, 3, 2, 0);
    run_phase(14, MX9, MX6, 0, 4, 2, 1);
    $display("mechanisms: concurrent=%0d repartition=%0d drain=%0d colmajor=%0d backpressure=%0d split=%0d MX4=%0d MX6=%0d MX9=%0d",
             n_concurrent, n_repartition, n_drain, n_colmajor, n_backpressure, n_split, n_mode[0], n_mode[1], n_mode[2]);
    chk(n_split > 0, "no split reduction");
    chk(n_concurrent > 0, "T-SA and B-SA never ran at the same time");
    chk(n_repartition > 1, "no re-partitioning");
    chk(n_drain > 0, "no drain");
    chk(n_colmajor > 0, "no column-major conversion");
    chk(n_backpressure > 0, "no memory-interface back-pressure");
    chk(n_mode[0] > 0 && n_mode[1] > 0 && n_mode[2] > 0, "an MX mode was never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
