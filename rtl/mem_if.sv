// mem_if: programmable memory interface between off-chip memory and the on-chip I/W buffers.
//
// Accepts one command per packed MX block read from memory, with a valid/ready handshake.
// For each block it
//   1. decodes the MX metadata (shared exponent, micro-exponents, signs, mantissas) from
//      the packed format of the command's MX mode (dacapo_pkg::mx_unpack),
//   2. splits the mantissas into 2-bit slices and concatenates them into DPE lane words
//      (dacapo_pkg::lane_pack): 1, 4 or 16 words for MX4, MX6 or MX9, arranged
//      differently for activations (cmd_kind=0) and weights (cmd_kind=1),
//   3. writes those words, one per cycle, to consecutive addresses starting at cmd_addr
//      of the buffer that the current partition assigns to the target:
//        activations of logical row i of the T-SA -> I buffer of physical row i,
//        activations of logical row i of the B-SA -> I buffer of physical row ROWS-1-i,
//        weights of column c -> W buffer c at the top (T-SA) or at the bottom (B-SA).
// Logical row 0 of either SA is the row next to its weight and output buffers, which is
// why B-SA rows are numbered from the bottom. This is the "programmable" layout step the
// paper assigns to the memory interface; the command format, the handshake and the
// mapping above are this design's choices. The DRAM side is not part of this block.
// Timing: cmd_ready is high when idle; a block's words are written in the cycles after it
// is accepted, and cmd_ready returns in the cycle after the last one.
module mem_if
  import dacapo_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int COLS = 16,
  parameter int AW   = 8,
  localparam int RW  = $clog2(ROWS),
  localparam int CW  = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_sa,     // 0: T-SA, 1: B-SA
  input  logic              cmd_kind,   // 0: activation (I buffer), 1: weight (W buffer)
  input  logic [7:0]        cmd_idx,    // logical row (activations) or column (weights)
  input  logic [AW-1:0]     cmd_addr,
  input  mx_mode_t          cmd_mode,
  input  logic [MXBITS-1:0] cmd_data,
  output logic [ROWS-1:0]   i_we,
  output logic [COLS-1:0]   wt_we,
  output logic [COLS-1:0]   wb_we,
  output logic [AW-1:0]     waddr,
  output lane_word_t        wdata
);
  mx_block_t  blk;
  mx_mode_t   mode;
  logic       sa, kind;
  logic [7:0] idx;
  logic [AW-1:0] base;
  logic [4:0] step;
  logic       active;
  logic [RW-1:0] prow;

  assign cmd_ready = !active;
  assign prow = sa ? RW'(ROWS - 1 - int'(idx)) : RW'(idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      step   <= '0;
      blk    <= '0;
      mode   <= MX4;
      sa     <= 1'b0;
      kind   <= 1'b0;
      idx    <= '0;
      base   <= '0;
    end else if (!active) begin
      if (cmd_valid) begin
        active <= 1'b1;
        step   <= '0;
        blk    <= mx_unpack(cmd_data, cmd_mode);
        mode   <= cmd_mode;
        sa     <= cmd_sa;
        kind   <= cmd_kind;
        idx    <= cmd_idx;
        base   <= cmd_addr;
      end
    end else begin
      step <= step + 5'd1;
      if (int'(step) == steps_of(mode) - 1) active <= 1'b0;
    end
  end

  always_comb begin
    i_we  = '0;
    wt_we = '0;
    wb_we = '0;
    waddr = base + AW'(step);
    wdata = lane_pack(blk, mode, int'(step), kind);
    if (active) begin
      if (!kind)    i_we[prow] = 1'b1;
      else if (!sa) wt_we[CW'(idx)] = 1'b1;
      else          wb_we[CW'(idx)] = 1'b1;
    end
  end

  // a command must address an existing row or column
  a_idx: assert property (@(posedge clk) disable iff (!rst_n)
                          cmd_valid && cmd_ready |-> int'(cmd_idx) < (cmd_kind ? COLS : ROWS));
endmodule
