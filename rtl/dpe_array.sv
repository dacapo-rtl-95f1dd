// dpe_array: the spatially partitionable systolic array of Dot-Product Engines.
//
// ROWS x COLS DPEs (16 x 16 in the paper's prototype), output stationary. Activations
// enter each row from the west and move east. Weights and outputs move vertically in both
// directions, so the rows can be split into two independent sub-accelerators:
//   rows 0 .. r_tsa-1     form the Top Sub-Accelerator (T-SA): weights enter at the top
//                         (w_top) and move south, results drain north to o_top;
//   rows r_tsa .. ROWS-1  form the Bottom Sub-Accelerator (B-SA): weights enter at the
//                         bottom (w_bot) and move north, results drain south to o_bot.
// Each SA has its own MX mode and drain strobe. The row of each SA farthest from its
// output buffers (r_tsa-1 for T-SA, r_tsa for B-SA) shifts in zeros while draining.
// Driving data: a DPE at distance d from its SA's weight edge and in column c sees a
// weight injected at cycle t at cycle t+d, and an activation injected in its row at cycle
// t at cycle t+c; the sequencer skews its streams accordingly. While draining, each drain
// cycle presents on o_top/o_bot the next result row, nearest row first.
// The split point r_tsa is a configuration input set by the offline spatial allocation;
// changing it while an SA is busy is not supported.
module dpe_array
  import dacapo_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int COLS = 16,
  localparam int RW  = $clog2(ROWS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [RW-1:0] r_tsa,
  input  mx_mode_t    mode_t,
  input  mx_mode_t    mode_b,
  input  logic        t_drain,
  input  logic        b_drain,
  input  act_t        act_in [ROWS],
  input  lane_word_t  w_top  [COLS],
  input  lane_word_t  w_bot  [COLS],
  output fp32_t       o_top  [COLS],
  output fp32_t       o_bot  [COLS]
);
  act_t       act_h  [ROWS][COLS+1];
  lane_word_t w_dn   [ROWS][COLS];   // output of row r towards row r+1
  lane_word_t w_upo  [ROWS][COLS];   // output of row r towards row r-1
  fp32_t      acc    [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic     bsa, far_edge, drain;
    mx_mode_t mode;
    assign bsa      = (RW'(r) >= r_tsa);
    assign far_edge = bsa ? (RW'(r) == r_tsa) : (RW'(r + 1) == r_tsa);
    assign drain    = bsa ? b_drain : t_drain;
    assign mode     = bsa ? mode_b : mode_t;
    assign act_h[r][0] = act_in[r];

    for (genvar c = 0; c < COLS; c++) begin : g_col
      lane_word_t w_from_n, w_from_s;
      fp32_t      acc_from_n, acc_from_s;
      if (r == 0) begin : g_top
        assign w_from_n   = w_top[c];
        assign acc_from_n = '0;
      end else begin : g_mid_n
        assign w_from_n   = w_dn[r-1][c];
        assign acc_from_n = acc[r-1][c];
      end
      if (r == ROWS - 1) begin : g_bot
        assign w_from_s   = w_bot[c];
        assign acc_from_s = '0;
      end else begin : g_mid_s
        assign w_from_s   = w_upo[r+1][c];
        assign acc_from_s = acc[r+1][c];
      end
      dpe u_dpe (
        .clk(clk), .rst_n(rst_n), .mode(mode), .bsa(bsa), .far_edge(far_edge), .drain(drain),
        .act_in(act_h[r][c]), .act_out(act_h[r][c+1]),
        .w_from_n(w_from_n), .w_to_s(w_dn[r][c]),
        .w_from_s(w_from_s), .w_to_n(w_upo[r][c]),
        .acc_from_n(acc_from_n), .acc_from_s(acc_from_s), .acc_out(acc[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign o_top[c] = acc[0][c];
    assign o_bot[c] = acc[ROWS-1][c];
  end
endmodule
