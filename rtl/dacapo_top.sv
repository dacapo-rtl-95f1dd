// dacapo_top: the DaCapo accelerator, a spatially partitionable, precision-flexible
// systolic array for running inference, labeling and retraining side by side.
//
// Contents: the programmable memory interface (mem_if), one I buffer per row, a W and an O
// buffer per column at the top and at the bottom (sram_buf), the ROWS x COLS DPE array,
// one sequencer (sa_ctrl) and one precision-conversion unit (pcu) per sub-accelerator.
// cfg_r_tsa splits the rows: 0..r_tsa-1 form the T-SA (top buffers), the rest the B-SA
// (bottom buffers). Each SA has its own MX mode and runs its own tiles independently.
// Use:
//   1. set cfg_* (the offline spatial allocation and the per-SA MX modes; col_major
//      enables the PCU's extra column-major output, meant for retraining);
//   2. load activation and weight blocks through the cmd_* port (one packed MX block per
//      command, valid/ready handshake);
//   3. pulse t_start / b_start with the tile's block count and buffer base addresses; the
//      SA reports done with a one-cycle *_done pulse. A reduction longer than one run is
//      split: runs with *_drain_en=0 leave the sums in the array, and the following run
//      with *_accumulate=1 adds to them;
//   4. MX blocks of the results come out on *_row_* (row-major) and, if enabled, *_col_*
//      (column-major); the FP32 results also stay in the O buffers, readable through the
//      vout_* port.
// The vector processing units of the paper's block diagram are not described there; the
// vout_* port is where they would read the O buffers. Off-chip memory and its controller
// sit outside this module, behind cmd_*. Buffer depths are this design's choice (total
// 97 KB with the defaults, near the 96 KB the paper gives); 16 x 16 DPEs follows the paper.
module dacapo_top
  import dacapo_pkg::*;
#(
  parameter int ROWS    = 16,
  parameter int COLS    = 16,
  parameter int I_DEPTH = 192,
  parameter int W_DEPTH = 192,
  parameter int O_DEPTH = 128,
  localparam int RW     = $clog2(ROWS + 1),
  localparam int IAW    = $clog2(I_DEPTH),
  localparam int WAW    = $clog2(W_DEPTH),
  localparam int OAW    = $clog2(O_DEPTH),
  localparam int MAW    = (IAW > WAW) ? IAW : WAW
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [RW-1:0]     cfg_r_tsa,
  input  mx_mode_t          cfg_mode_t,
  input  mx_mode_t          cfg_mode_b,
  input  logic              cfg_col_major_t,
  input  logic              cfg_col_major_b,
  // memory-interface commands
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_sa,
  input  logic              cmd_kind,
  input  logic [7:0]        cmd_idx,
  input  logic [MAW-1:0]    cmd_addr,
  input  mx_mode_t          cmd_mode,
  input  logic [MXBITS-1:0] cmd_data,
  // T-SA control
  input  logic              t_start,
  input  logic [IAW-1:0]    t_nblk,
  input  logic [IAW-1:0]    t_i_base,
  input  logic [WAW-1:0]    t_w_base,
  input  logic [OAW-1:0]    t_o_base,
  input  logic              t_accumulate,
  input  logic              t_drain_en,
  output logic              t_busy,
  output logic              t_done,
  // B-SA control
  input  logic              b_start,
  input  logic [IAW-1:0]    b_nblk,
  input  logic [IAW-1:0]    b_i_base,
  input  logic [WAW-1:0]    b_w_base,
  input  logic [OAW-1:0]    b_o_base,
  input  logic              b_accumulate,
  input  logic              b_drain_en,
  output logic              b_busy,
  output logic              b_done,
  // converted results
  output logic              t_row_valid,
  output logic [MXBITS-1:0] t_row_blk,
  output logic              t_col_valid,
  output logic [3:0]        t_col_idx,
  output logic [MXBITS-1:0] t_col_blk,
  output logic              b_row_valid,
  output logic [MXBITS-1:0] b_row_blk,
  output logic              b_col_valid,
  output logic [3:0]        b_col_idx,
  output logic [MXBITS-1:0] b_col_blk,
  // O-buffer read port (towards the vector processing units)
  input  logic              vout_re,
  input  logic              vout_bottom,
  input  logic [OAW-1:0]    vout_addr,
  output fp32_t             vout_data [COLS]
);
  localparam int LW = $bits(lane_word_t);

  // ---------------- memory interface ----------------
  logic [ROWS-1:0] i_we;
  logic [COLS-1:0] wt_we, wb_we;
  logic [MAW-1:0]  m_waddr;
  lane_word_t      m_wdata;

  mem_if #(.ROWS(ROWS), .COLS(COLS), .AW(MAW)) u_mif (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_sa(cmd_sa), .cmd_kind(cmd_kind),
    .cmd_idx(cmd_idx), .cmd_addr(cmd_addr), .cmd_mode(cmd_mode), .cmd_data(cmd_data),
    .i_we(i_we), .wt_we(wt_we), .wb_we(wb_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  // ---------------- sequencers ----------------
  logic [ROWS-1:0] t_own, b_own, t_i_re, b_i_re;
  logic [IAW-1:0]  t_i_raddr [ROWS], b_i_raddr [ROWS];
  logic [COLS-1:0] t_w_re, b_w_re;
  logic [WAW-1:0]  t_w_raddr [COLS], b_w_raddr [COLS];
  logic [ROWS-1:0] t_tv, t_tf, t_tl, b_tv, b_tf, b_tl;
  logic            t_drain, b_drain, t_o_we, b_o_we, t_pv, b_pv, t_flush, b_flush;
  logic [OAW-1:0]  t_o_waddr, b_o_waddr;

  sa_ctrl #(.BOTTOM(1'b0), .ROWS(ROWS), .COLS(COLS), .IAW(IAW), .WAW(WAW), .OAW(OAW)) u_tctl (
    .clk(clk), .rst_n(rst_n), .r_tsa(cfg_r_tsa), .mode(cfg_mode_t),
    .start(t_start), .nblk(t_nblk), .i_base(t_i_base), .w_base(t_w_base), .o_base(t_o_base),
    .accumulate(t_accumulate), .drain_en(t_drain_en),
    .busy(t_busy), .done(t_done), .own(t_own), .i_re(t_i_re), .i_raddr(t_i_raddr),
    .w_re(t_w_re), .w_raddr(t_w_raddr), .tag_valid(t_tv), .tag_first(t_tf), .tag_last(t_tl),
    .drain(t_drain), .o_we(t_o_we), .o_waddr(t_o_waddr), .pcu_valid(t_pv), .pcu_flush(t_flush)
  );

  sa_ctrl #(.BOTTOM(1'b1), .ROWS(ROWS), .COLS(COLS), .IAW(IAW), .WAW(WAW), .OAW(OAW)) u_bctl (
    .clk(clk), .rst_n(rst_n), .r_tsa(cfg_r_tsa), .mode(cfg_mode_b),
    .start(b_start), .nblk(b_nblk), .i_base(b_i_base), .w_base(b_w_base), .o_base(b_o_base),
    .accumulate(b_accumulate), .drain_en(b_drain_en),
    .busy(b_busy), .done(b_done), .own(b_own), .i_re(b_i_re), .i_raddr(b_i_raddr),
    .w_re(b_w_re), .w_raddr(b_w_raddr), .tag_valid(b_tv), .tag_first(b_tf), .tag_last(b_tl),
    .drain(b_drain), .o_we(b_o_we), .o_waddr(b_o_waddr), .pcu_valid(b_pv), .pcu_flush(b_flush)
  );

  // ---------------- input buffers, one per row ----------------
  act_t act_in [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_ibuf
    logic [LW-1:0]  rd;
    logic           re;
    logic [IAW-1:0] ra;
    assign re = t_own[r] ? t_i_re[r]    : b_i_re[r];
    assign ra = t_own[r] ? t_i_raddr[r] : b_i_raddr[r];
    sram_buf #(.DEPTH(I_DEPTH), .WIDTH(LW)) u_ibuf (
      .clk(clk), .we(i_we[r]), .waddr(IAW'(m_waddr)), .wdata(m_wdata),
      .re(re), .raddr(ra), .rdata(rd)
    );
    assign act_in[r].valid = t_own[r] ? t_tv[r] : b_tv[r];
    assign act_in[r].first = t_own[r] ? t_tf[r] : b_tf[r];
    assign act_in[r].last  = t_own[r] ? t_tl[r] : b_tl[r];
    assign act_in[r].w     = rd;
  end

  // ---------------- weight and output buffers, per column, top and bottom ----------------
  lane_word_t w_top [COLS], w_bot [COLS];
  fp32_t      o_top [COLS], o_bot [COLS];
  fp32_t      vt [COLS], vb [COLS];
  logic       vout_bottom_q;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    sram_buf #(.DEPTH(W_DEPTH), .WIDTH(LW)) u_wtop (
      .clk(clk), .we(wt_we[c]), .waddr(WAW'(m_waddr)), .wdata(m_wdata),
      .re(t_w_re[c]), .raddr(t_w_raddr[c]), .rdata(w_top[c])
    );
    sram_buf #(.DEPTH(W_DEPTH), .WIDTH(LW)) u_wbot (
      .clk(clk), .we(wb_we[c]), .waddr(WAW'(m_waddr)), .wdata(m_wdata),
      .re(b_w_re[c]), .raddr(b_w_raddr[c]), .rdata(w_bot[c])
    );
    sram_buf #(.DEPTH(O_DEPTH), .WIDTH(32)) u_otop (
      .clk(clk), .we(t_o_we), .waddr(t_o_waddr), .wdata(o_top[c]),
      .re(vout_re && !vout_bottom), .raddr(vout_addr), .rdata(vt[c])
    );
    sram_buf #(.DEPTH(O_DEPTH), .WIDTH(32)) u_obot (
      .clk(clk), .we(b_o_we), .waddr(b_o_waddr), .wdata(o_bot[c]),
      .re(vout_re && vout_bottom), .raddr(vout_addr), .rdata(vb[c])
    );
    assign vout_data[c] = vout_bottom_q ? vb[c] : vt[c];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vout_bottom_q <= 1'b0;
    else if (vout_re) vout_bottom_q <= vout_bottom;

  // ---------------- the array ----------------
  dpe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk(clk), .rst_n(rst_n), .r_tsa(cfg_r_tsa), .mode_t(cfg_mode_t), .mode_b(cfg_mode_b),
    .t_drain(t_drain), .b_drain(b_drain), .act_in(act_in),
    .w_top(w_top), .w_bot(w_bot), .o_top(o_top), .o_bot(o_bot)
  );

  // ---------------- precision-conversion units ----------------
  logic t_pbusy, b_pbusy;
  pcu u_tpcu (
    .clk(clk), .rst_n(rst_n), .mode(cfg_mode_t), .col_major(cfg_col_major_t),
    .in_valid(t_pv), .in_row(o_top), .flush(t_flush),
    .row_valid(t_row_valid), .row_blk(t_row_blk),
    .col_valid(t_col_valid), .col_idx(t_col_idx), .col_blk(t_col_blk), .busy(t_pbusy)
  );
  pcu u_bpcu (
    .clk(clk), .rst_n(rst_n), .mode(cfg_mode_b), .col_major(cfg_col_major_b),
    .in_valid(b_pv), .in_row(o_bot), .flush(b_flush),
    .row_valid(b_row_valid), .row_blk(b_row_blk),
    .col_valid(b_col_valid), .col_idx(b_col_idx), .col_blk(b_col_blk), .busy(b_pbusy)
  );

  // the PCU's tile must be sent before the next drain of the same SA begins
  a_tpcu: assert property (@(posedge clk) disable iff (!rst_n) t_pv |-> !t_pbusy);
  a_bpcu: assert property (@(posedge clk) disable iff (!rst_n) b_pv |-> !b_pbusy);
endmodule
