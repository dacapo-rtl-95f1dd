// pcu: precision-conversion unit of one sub-accelerator.
//
// Receives the FP32 result rows the array drains (one row of 16 values per cycle) and
// re-packs them into MX blocks of 16 in the packed memory format of dacapo_pkg, in the
// SA's MX mode:
//   * row-major (always): each incoming row is one block, out one cycle later on row_*;
//   * column-major (col_major=1, used for retraining, where the transposed matrix is
//     needed for gradients and weight updates): rows are also kept in a 16 x 16 tile
//     buffer; on `flush` (end of a drain) or when 16 rows have arrived, the 16 columns
//     are converted one per cycle and sent on col_* with their column index. Missing
//     rows of a partial tile read as zero. `busy` is high while columns are being sent;
//     new rows must not arrive then.
// The conversion itself is mx_quantizer. The row/column behaviour follows the paper; the
// tile buffer, the flush protocol and the timing are this design's choices.
module pcu
  import dacapo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  mx_mode_t          mode,
  input  logic              col_major,
  input  logic              in_valid,
  input  fp32_t             in_row [BLK],
  input  logic              flush,
  output logic              row_valid,
  output logic [MXBITS-1:0] row_blk,
  output logic              col_valid,
  output logic [3:0]        col_idx,
  output logic [MXBITS-1:0] col_blk,
  output logic              busy
);
  fp32_t      tile [BLK][BLK];   // [row][col]
  logic [4:0] nrows;
  logic       emitting;
  logic [3:0] ccnt;
  fp32_t      col_vec [BLK];
  mx_block_t  rq, cq;

  mx_quantizer u_row (.mode(mode), .x(in_row), .y(rq));

  always_comb
    for (int r = 0; r < BLK; r++) col_vec[r] = (5'(r) < nrows) ? tile[r][ccnt] : '0;

  mx_quantizer u_col (.mode(mode), .x(col_vec), .y(cq));

  assign busy = emitting;

  always_ff @(posedge clk) begin
    if (in_valid && col_major && nrows < 5'(BLK))
      for (int c = 0; c < BLK; c++) tile[nrows[3:0]][c] <= in_row[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= 1'b0;
      row_blk   <= '0;
      col_valid <= 1'b0;
      col_idx   <= '0;
      col_blk   <= '0;
      nrows     <= '0;
      emitting  <= 1'b0;
      ccnt      <= '0;
    end else begin
      row_valid <= in_valid;
      if (in_valid) row_blk <= mx_pack(rq, mode);
      col_valid <= 1'b0;
      if (emitting) begin
        col_valid <= 1'b1;
        col_idx   <= ccnt;
        col_blk   <= mx_pack(cq, mode);
        ccnt      <= ccnt + 4'd1;
        if (ccnt == 4'(BLK - 1)) begin
          emitting <= 1'b0;
          nrows    <= '0;
        end
      end else if (col_major) begin
        if (in_valid) nrows <= nrows + 5'd1;
        if ((flush && (nrows != 0 || in_valid)) || (in_valid && nrows == 5'(BLK - 1))) begin
          emitting <= 1'b1;
          ccnt     <= '0;
        end
      end
    end
  end
endmodule
