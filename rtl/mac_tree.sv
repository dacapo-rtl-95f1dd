// mac_tree: the hierarchical, precision-flexible MAC tree of one Dot-Product Engine.
//
// Sixteen 2-bit multipliers (mul2b) feed four 4-bit multipliers (mul4b), which feed one
// 8-bit level built the same way. Depending on the MX mode the tree computes, in one cycle:
//   MX4: the sum of 16 independent 2-bit products (one whole 16-element block),
//   MX6: the sum of 4 independent 4-bit products (a quarter block),
//   MX9: one 8-bit product (one element; 7-bit mantissas zero-extended).
// So a block dot product takes 1, 4 or 16 cycles, as the paper states. The mode only
// switches the shift-or-bypass muxes at each level (the "hierarchical result forwarding"
// datapath). Lane placement is defined by dacapo_pkg::lane_pack. The 8-bit level aligns
// 4-bit products by 4 bits, the same shift/mux/add arrangement as mul4b.
// Output psum has 2 + 2(M-1) fraction bits relative to the block scale 2^(Ea+Eb-254).
// Purely combinational; the caller registers around it.
module mac_tree
  import dacapo_pkg::*;
(
  input  mx_mode_t                  mode,
  input  lane_word_t                a,
  input  lane_word_t                b,
  output logic signed [PSUM_W-1:0]  psum
);
  logic signed [7:0]  p2 [LANES];
  logic signed [11:0] p4 [4];
  logic fuse4, fuse8;

  assign fuse4 = (mode != MX4);
  assign fuse8 = (mode == MX9);

  for (genvar l = 0; l < LANES; l++) begin : g_m2
    mul2b u_m2 (.a(a.lane[l]), .b(b.lane[l]), .p(p2[l]));
  end

  for (genvar q = 0; q < 4; q++) begin : g_m4
    logic signed [7:0] pq [4];
    for (genvar r = 0; r < 4; r++) begin : g_r
      assign pq[r] = p2[4*q + r];
    end
    mul4b u_m4 (.p(pq), .fuse(fuse4), .y(p4[q]));
  end

  // 8-bit level
  logic signed [PSUM_W-1:0] s01, s23, hi;
  always_comb begin
    s01  = (fuse8 ? (PSUM_W'(p4[0]) <<< 4) : PSUM_W'(p4[0])) + PSUM_W'(p4[1]);
    s23  = (fuse8 ? (PSUM_W'(p4[2]) <<< 4) : PSUM_W'(p4[2])) + PSUM_W'(p4[3]);
    hi   = fuse8 ? (s01 <<< 4) : s01;
    psum = hi + s23;
  end
endmodule
