// sa_ctrl: sequencer of one sub-accelerator (T-SA when BOTTOM=0, B-SA when BOTTOM=1).
//
// On `start` it runs one output tile: (R rows) x (COLS columns) results, each the sum over
// nblk MX blocks of block dot products, where R is the SA's row count (r_tsa for the
// T-SA, ROWS-r_tsa for the B-SA). It proceeds in three phases:
//   FEED/WAIT: at cycle t, logical row i reads its I buffer at i_base + (t-i) and column
//     c reads its W buffer at w_base + (t-c), while 0 <= t-i (or t-c) < nblk*S, S being
//     1/4/16 for MX4/MX6/MX9. This skew makes activations and weights meet in every DPE.
//     The tags (valid, first block, last cycle of a block) go out one cycle later, aligned
//     with the buffers' registered read data. The phase lasts nblk*S + R + COLS cycles,
//     after which the last DPE has updated its accumulator.
//   DRAIN: R cycles with `drain` high; in cycle d the array edge shows result row d,
//     which is written to the O buffers at o_base + d and handed to the PCU (pcu_valid).
//   DONE: pulses `pcu_flush` (so the PCU can emit column-major blocks) and `done`.
// Two options split a long reduction over several runs: with accumulate=1 the first
// block does not clear the accumulators (they keep the previous run's sums), and with
// drain_en=0 the DRAIN phase is skipped (results stay in the array for the next run).
// Logical row i is physical row i (T-SA) or ROWS-1-i (B-SA); `own` marks the physical
// rows this SA drives. The paper states that the two SAs run independent matrix
// multiplications; this sequencing, its timing and the interface are this design's own.
module sa_ctrl
  import dacapo_pkg::*;
#(
  parameter bit  BOTTOM = 1'b0,
  parameter int  ROWS   = 16,
  parameter int  COLS   = 16,
  parameter int  IAW    = 8,
  parameter int  WAW    = 8,
  parameter int  OAW    = 7,
  localparam int RW     = $clog2(ROWS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RW-1:0]     r_tsa,
  input  mx_mode_t          mode,
  input  logic              start,
  input  logic [IAW-1:0]    nblk,
  input  logic [IAW-1:0]    i_base,
  input  logic [WAW-1:0]    w_base,
  input  logic [OAW-1:0]    o_base,
  input  logic              accumulate,
  input  logic              drain_en,
  output logic              busy,
  output logic              done,
  output logic [ROWS-1:0]   own,
  output logic [ROWS-1:0]   i_re,
  output logic [IAW-1:0]    i_raddr [ROWS],
  output logic [COLS-1:0]   w_re,
  output logic [WAW-1:0]    w_raddr [COLS],
  output logic [ROWS-1:0]   tag_valid,
  output logic [ROWS-1:0]   tag_first,
  output logic [ROWS-1:0]   tag_last,
  output logic              drain,
  output logic              o_we,
  output logic [OAW-1:0]    o_waddr,
  output logic              pcu_valid,
  output logic              pcu_flush
);
  typedef enum logic [1:0] {IDLE, FEED, DRAIN, FIN} state_t;
  state_t     st;
  int         t;
  int         nrows;
  int         S;
  int         len;
  logic [IAW-1:0] kb;
  mx_mode_t   md;
  logic [IAW-1:0] ib;
  logic [WAW-1:0] wb;
  logic [OAW-1:0] ob;
  logic       acc_keep, do_drain;

  assign nrows = BOTTOM ? ROWS - int'(r_tsa) : int'(r_tsa);
  assign S     = steps_of(md);
  assign len   = int'(kb) * S;

  function automatic int phys(int i);
    return BOTTOM ? ROWS - 1 - i : i;
  endfunction

  always_comb begin
    for (int r = 0; r < ROWS; r++) own[r] = BOTTOM ? (r >= int'(r_tsa)) : (r < int'(r_tsa));
    i_re = '0;
    w_re = '0;
    for (int r = 0; r < ROWS; r++) i_raddr[r] = '0;
    for (int c = 0; c < COLS; c++) w_raddr[c] = '0;
    if (st == FEED) begin
      for (int i = 0; i < ROWS; i++) begin
        if (i < nrows && t - i >= 0 && t - i < len) begin
          i_re[phys(i)]    = 1'b1;
          i_raddr[phys(i)] = ib + IAW'(t - i);
        end
      end
      for (int c = 0; c < COLS; c++) begin
        if (t - c >= 0 && t - c < len) begin
          w_re[c]    = 1'b1;
          w_raddr[c] = wb + WAW'(t - c);
        end
      end
    end
    drain     = (st == DRAIN);
    o_we      = (st == DRAIN);
    pcu_valid = (st == DRAIN);
    o_waddr   = ob + OAW'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      t         <= 0;
      kb        <= '0;
      md        <= MX4;
      ib        <= '0;
      wb        <= '0;
      ob        <= '0;
      done      <= 1'b0;
      pcu_flush <= 1'b0;
      tag_valid <= '0;
      tag_first <= '0;
      tag_last  <= '0;
      acc_keep  <= 1'b0;
      do_drain  <= 1'b1;
    end else begin
      done      <= 1'b0;
      pcu_flush <= 1'b0;
      // tags, one cycle behind the buffer reads
      for (int i = 0; i < ROWS; i++) begin
        int j;
        j = t - i;
        tag_valid[phys(i)] <= (st == FEED) && i < nrows && j >= 0 && j < len;
        tag_first[phys(i)] <= (j < S) && !acc_keep;
        tag_last[phys(i)]  <= (S == 0) ? 1'b0 : (j % S == S - 1);
      end
      case (st)
        IDLE: if (start) begin
          kb <= nblk; md <= mode; ib <= i_base; wb <= w_base; ob <= o_base;
          acc_keep <= accumulate; do_drain <= drain_en;
          t  <= 0;
          st <= FEED;
        end
        FEED: begin
          if (nrows == 0) st <= FIN;
          else if (t == len + nrows + COLS - 1) begin
            t  <= 0;
            st <= do_drain ? DRAIN : FIN;
          end else t <= t + 1;
        end
        DRAIN: begin
          if (t == nrows - 1) st <= FIN;
          else t <= t + 1;
        end
        FIN: begin
          done      <= 1'b1;
          pcu_flush <= 1'b1;
          t         <= 0;
          st        <= IDLE;
        end
      endcase
    end
  end

  assign busy = (st != IDLE);
endmodule
