// dacapo_pkg: types, constants and helper functions shared by the whole accelerator.
//
// MX (micro-exponent) block format. A block holds 16 values that share one 8-bit
// exponent E (FP32 bias, 127). Each sub-block of 2 values shares one micro-exponent
// bit mu. Each value keeps a sign and an M-bit magnitude mantissa m, with M = 2 (MX4),
// 4 (MX6) or 7 (MX9). The value of element i is
//     (-1)^s * m * 2^(E - 127 - mu - (M-1)),
// i.e. the top mantissa bit weighs 2^(E-127-mu). Block size 16, sub-block size 2 and the
// mantissa widths follow the paper; the exact encoding below is this design's choice.
//
// DPE lane word. The memory interface splits mantissas into 2-bit slices and hands the
// DPE an array of 16 lanes per operand, each lane a {sign, mu, 2-bit slice}, plus the
// shared exponent. How slices are placed on lanes per mode is given by lane_pack().
//
// Packed memory format of one MX block (used by the memory interface and the
// precision-conversion units): bits [7:0] shared exponent, [15:8] micro-exponents
// (bit j for sub-block j), then element i at [16 + i*(M+1) +: M+1] as {sign, mantissa}.
// An MX9 block fills 144 bits, MX6 96 and MX4 64; unused upper bits are zero.
package dacapo_pkg;

  localparam int BLK      = 16;  // MX block size (values per block)
  localparam int SUBBLK   = 2;   // values sharing one micro-exponent
  localparam int NSUB     = BLK / SUBBLK;
  localparam int LANES    = 16;  // 2-bit multipliers per DPE
  localparam int MXBITS   = 144; // packed MX block width (MX9 size)
  localparam int PSUM_W   = 20;  // signed partial sum of one MAC-tree cycle
  localparam int SACC_W   = 24;  // signed sum of one block dot product

  typedef enum logic [1:0] {
    MX4 = 2'd0,
    MX6 = 2'd1,
    MX9 = 2'd2
  } mx_mode_t;

  typedef struct packed {
    logic       sgn;
    logic       mu;
    logic [1:0] m;
  } lane_t;

  typedef struct packed {
    logic [7:0]            exp;
    lane_t [LANES-1:0]     lane;
  } lane_word_t;

  // Activation travelling west to east: a lane word plus the sequencing tags.
  typedef struct packed {
    logic       valid;  // this cycle carries data
    logic       first;  // belongs to the first MX block of a new output (clears the accumulator)
    logic       last;   // last cycle of one MX block
    lane_word_t w;
  } act_t;

  typedef struct packed {
    logic [7:0]             exp;
    logic [NSUB-1:0]        mu;
    logic [BLK-1:0]         sgn;
    logic [BLK-1:0][6:0]    man;   // low M bits used
  } mx_block_t;

  typedef logic [31:0] fp32_t;

  function automatic int mant_bits(mx_mode_t mode);
    case (mode)
      MX4:     return 2;
      MX6:     return 4;
      default: return 7;
    endcase
  endfunction

  // Cycles a DPE needs for one 16-element block dot product.
  function automatic int steps_of(mx_mode_t mode);
    case (mode)
      MX4:     return 1;
      MX6:     return 4;
      default: return 16;
    endcase
  endfunction

  // Fraction bits of the MAC-tree sum: 2(M-1) from the two mantissas, 2 guard bits
  // that keep the micro-exponent right shift exact.
  function automatic int frac_bits(mx_mode_t mode);
    return 2 * (mant_bits(mode) - 1) + 2;
  endfunction

  // Bitwise concatenator: lane word for one operand of one DPE cycle.
  // is_w = 0 for the activation operand, 1 for the weight operand.
  // MX4: lane l carries element l.
  // MX6: step s carries elements 4s..4s+3; element 4s+q goes to 4-bit multiplier q,
  //      whose 2-bit multipliers r=0..3 see (a_hi,b_hi),(a_hi,b_lo),(a_lo,b_hi),(a_lo,b_lo).
  // MX9: step s carries element s as an 8-bit mantissa {0,m}; 4-bit multiplier q sees
  //      nibbles (A_hi,B_hi),(A_hi,B_lo),(A_lo,B_hi),(A_lo,B_lo), split as in MX6.
  function automatic lane_word_t lane_pack(mx_block_t b, mx_mode_t mode, int step, logic is_w);
    lane_word_t lw;
    int e;
    logic [7:0] m8;
    logic [3:0] nib;
    bit sel_hi;
    lw.exp = b.exp;
    for (int l = 0; l < LANES; l++) begin
      int q, r;
      q = l / 4;
      r = l % 4;
      case (mode)
        MX4: begin
          e = l;
          lw.lane[l].m = b.man[e][1:0];
        end
        MX6: begin
          e = 4 * step + q;
          sel_hi = is_w ? (r % 2 == 0) : (r < 2);
          lw.lane[l].m = sel_hi ? b.man[e][3:2] : b.man[e][1:0];
        end
        default: begin
          e = step;
          m8 = {1'b0, b.man[e]};
          sel_hi = is_w ? (q % 2 == 0) : (q < 2);
          nib = sel_hi ? m8[7:4] : m8[3:0];
          sel_hi = is_w ? (r % 2 == 0) : (r < 2);
          lw.lane[l].m = sel_hi ? nib[3:2] : nib[1:0];
        end
      endcase
      lw.lane[l].sgn = b.sgn[e];
      lw.lane[l].mu  = b.mu[e / SUBBLK];
    end
    return lw;
  endfunction

  // MX metadata decoder: packed memory format -> block struct.
  function automatic mx_block_t mx_unpack(logic [MXBITS-1:0] bits, mx_mode_t mode);
    mx_block_t b;
    int m;
    m = mant_bits(mode);
    b.exp = bits[7:0];
    b.mu  = bits[15:8];
    for (int i = 0; i < BLK; i++) begin
      b.man[i] = '0;
      for (int k = 0; k < 7; k++)
        if (k < m) b.man[i][k] = bits[16 + i * (m + 1) + k];
      b.sgn[i] = bits[16 + i * (m + 1) + m];
    end
    return b;
  endfunction

  // Inverse of mx_unpack.
  function automatic logic [MXBITS-1:0] mx_pack(mx_block_t b, mx_mode_t mode);
    logic [MXBITS-1:0] bits;
    int m;
    m = mant_bits(mode);
    bits = '0;
    bits[7:0]  = b.exp;
    bits[15:8] = b.mu;
    for (int i = 0; i < BLK; i++) begin
      for (int k = 0; k < 7; k++)
        if (k < m) bits[16 + i * (m + 1) + k] = b.man[i][k];
      bits[16 + i * (m + 1) + m] = b.sgn[i];
    end
    return bits;
  endfunction

endpackage
