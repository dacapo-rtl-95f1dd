// tb_pcu: self-checking test of a precision-conversion unit.
// Random FP32 rows are converted in every MX mode. The expected block is computed in real
// arithmetic: shared exponent = largest exponent; micro-exponent of a pair = 1 when both
// its exponents are below the shared one; mantissa = floor(|x| / 2^(E-127-mu-(M-1))).
// Row-major blocks are checked for every row, column-major blocks for a full 16-row tile
// and for a partial tile closed by flush (missing rows read as zero).
module tb_pcu;
  import dacapo_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  mx_mode_t mode;
  logic col_major = 0, in_valid = 0, flush = 0;
  fp32_t in_row [BLK];
  logic row_valid, col_valid, busy;
  logic [MXBITS-1:0] row_blk, col_blk;
  logic [3:0] col_idx;
  int checks = 0, failures = 0;
  int nrow_out = 0, ncol_out = 0;

  pcu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp32_t tile [BLK][BLK];

  function automatic mx_block_t ref_q(fp32_t v [BLK], mx_mode_t md);
    mx_block_t b;
    int E, M;
    int se [NSUB];
    M = mant_bits(md);
    E = 0;
    for (int j = 0; j < NSUB; j++) begin
      se[j] = int'(v[2*j][30:23]) > int'(v[2*j+1][30:23]) ? int'(v[2*j][30:23]) : int'(v[2*j+1][30:23]);
      if (se[j] > E) E = se[j];
    end
    b.exp = 8'(E);
    for (int j = 0; j < NSUB; j++) b.mu[j] = (se[j] < E);
    for (int i = 0; i < BLK; i++) begin
      real ax, q;
      longint n;
      ax = f2r(v[i]); if (ax < 0) ax = -ax;
      q = ax / pow2(E - 127 - int'(b.mu[i/2]) - (M - 1));
      n = longint'($floor(q));
      b.man[i] = 7'(n);
      b.sgn[i] = v[i][31] && n != 0;
    end
    return b;
  endfunction

  task automatic check_blk(logic [MXBITS-1:0] got, mx_block_t expect_b, mx_mode_t md, string what);
    checks++;
    if (got !== mx_pack(expect_b, md)) begin
      failures++;
      if (failures < 10) $display("%s mismatch: got %h expected %h", what, got, mx_pack(expect_b, md));
    end
  endtask

  task automatic send_tile(int nrows, mx_mode_t md, bit cm);
    fp32_t colv [BLK];
    mode = md; col_major = cm;
    for (int r = 0; r < nrows; r++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < BLK; c++) begin
        in_row[c] = {1'($urandom), 8'($urandom_range(118, 136)), 23'($urandom)};
        if ($urandom_range(0, 15) == 0) in_row[c] = '0;
        tile[r][c] = in_row[c];
      end
      @(posedge clk); #1;
      checks++;
      if (!row_valid) failures++;
      check_blk(row_blk, ref_q(in_row, md), md, "row");
      nrow_out++;
    end
    @(negedge clk);
    in_valid = 0;
    flush = 1;
    @(negedge clk);
    flush = 0;
    if (cm) begin
      for (int c = 0; c < BLK; c++) begin
        int guard;
        guard = 0;
        while (!col_valid && guard < 40) begin @(posedge clk); #1; guard++; end
        for (int r = 0; r < BLK; r++) colv[r] = (r < nrows) ? tile[r][c] : '0;
        checks++;
        if (col_idx != 4'(c)) failures++;
        check_blk(col_blk, ref_q(colv, md), md, "col");
        ncol_out++;
        @(posedge clk); #1;
      end
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    mode = MX4;
    for (int c = 0; c < BLK; c++) in_row[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      send_tile(5, mx_mode_t'(m), 0);
      send_tile(16, mx_mode_t'(m), 1);
      send_tile(7, mx_mode_t'(m), 1);
    end
    checks++;
    if (nrow_out != 84 || ncol_out != 6 * 16) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
