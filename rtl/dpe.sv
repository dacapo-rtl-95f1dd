// dpe: Dot-Product Engine, the processing element of the DaCapo array.
//
// Each cycle the DPE multiplies the activation lane word arriving from the west with the
// weight lane word arriving from the north or the south (mac_tree), sums the partial sums
// of one MX block and turns them into FP32 (fp32_gen), and adds the result into its FP32
// accumulator (output stationary). Following the paper:
//   * activations are pipelined west to east through one register (act_out);
//   * there are two vertical weight channels, one moving south and one moving north, each
//     through one register; a mux picks the channel of the DPE's sub-accelerator
//     (bsa=0: T-SA, weights from the north; bsa=1: B-SA, weights from the south);
//   * the accumulator output goes to both neighbours, and muxes select what the
//     accumulator loads: its own sum, or a neighbour's value while draining.
// Draining moves results towards the output buffers of the DPE's sub-accelerator: a
// T-SA DPE loads its south neighbour's value (results move north), a B-SA DPE its
// north neighbour's. far_edge marks the row farthest from those buffers, which loads 0.
// The act.first tag makes the first block of an output overwrite the accumulator
// instead of adding to it. Tag encoding, reset values and the drain protocol are this
// design's choices. Latency: accumulator updated 2 cycles after the last cycle of a block.
module dpe
  import dacapo_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  mx_mode_t   mode,
  input  logic       bsa,
  input  logic       far_edge,
  input  logic       drain,
  input  act_t       act_in,
  output act_t       act_out,
  input  lane_word_t w_from_n,   // south-moving channel, input side
  output lane_word_t w_to_s,
  input  lane_word_t w_from_s,   // north-moving channel, input side
  output lane_word_t w_to_n,
  input  fp32_t      acc_from_n,
  input  fp32_t      acc_from_s,
  output fp32_t      acc_out
);
  lane_word_t                w_sel;
  logic signed [PSUM_W-1:0]  psum;
  logic                      gen_valid;
  fp32_t                     gen_out, sum;
  logic                      first_pend, first_now;
  fp32_t                     acc;

  assign w_sel = bsa ? w_from_s : w_from_n;

  mac_tree u_tree (.mode(mode), .a(act_in.w), .b(w_sel), .psum(psum));

  fp32_gen u_gen (
    .clk(clk), .rst_n(rst_n), .mode(mode),
    .in_valid(act_in.valid), .last(act_in.last), .psum(psum),
    .exp_a(act_in.w.exp), .exp_b(w_sel.exp),
    .out_valid(gen_valid), .out(gen_out)
  );

  fp32_add u_add (.a(acc), .b(gen_out), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_out    <= '0;
      w_to_s     <= '0;
      w_to_n     <= '0;
      acc        <= '0;
      first_pend <= 1'b0;
      first_now  <= 1'b0;
    end else begin
      act_out <= act_in;
      w_to_s  <= w_from_n;
      w_to_n  <= w_from_s;
      // first_now is the "first" flag of the block whose result gen_out holds
      if (act_in.valid && act_in.last) begin
        first_now  <= first_pend | act_in.first;
        first_pend <= 1'b0;
      end else if (act_in.valid && act_in.first) begin
        first_pend <= 1'b1;
      end
      if (drain)
        acc <= far_edge ? '0 : (bsa ? acc_from_n : acc_from_s);
      else if (gen_valid)
        acc <= first_now ? gen_out : sum;
    end
  end

  assign acc_out = acc;
endmodule
