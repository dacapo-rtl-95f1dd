// tb_fp_pkg: reference helpers shared by the testbenches. They model numbers as
// SystemVerilog reals, independently of the RTL datapath.
package tb_fp_pkg;
  import dacapo_pkg::*;

  function automatic real pow2(int e);
    real v;
    v = 1.0;
    while (e > 0) begin v = v * 2.0; e--; end
    while (e < 0) begin v = v / 2.0; e++; end
    return v;
  endfunction

  // FP32 bit pattern -> real (normals and zero; infinity returned as +-1e300)
  function automatic real f2r(fp32_t f);
    real v;
    if (f[30:23] == 8'hff) return f[31] ? -1.0e300 : 1.0e300;
    if (f[30:23] == 0) return 0.0;
    v = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(int'(f[30:23]) - 127);
    return f[31] ? -v : v;
  endfunction

  // real -> FP32 for exactly representable normal values (test-data generator)
  function automatic fp32_t r2f(real x);
    int e;
    real ax;
    logic s;
    if (x == 0.0) return '0;
    s  = x < 0;
    ax = s ? -x : x;
    e  = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0) begin ax = ax * 2.0; e--; end
    return {s, 8'(e + 127), 23'(longint'((ax - 1.0) * 8388608.0))};
  endfunction

  // expected value after flush-to-zero / saturation to infinity
  function automatic real clampv(real x);
    real ax;
    ax = (x < 0) ? -x : x;
    if (ax >= pow2(128)) return (x < 0) ? -1.0e300 : 1.0e300;
    if (ax < pow2(-126)) return 0.0;
    return x;
  endfunction

  // value of element i of an MX block
  function automatic real mx_val(mx_block_t b, mx_mode_t mode, int i);
    real v;
    v = real'(b.man[i]) * pow2(int'(b.exp) - 127 - int'(b.mu[i / SUBBLK]) - (mant_bits(mode) - 1));
    return b.sgn[i] ? -v : v;
  endfunction

  // exact dot product of two MX blocks
  function automatic real mx_dot(mx_block_t a, mx_block_t b, mx_mode_t mode);
    real s;
    s = 0.0;
    for (int i = 0; i < BLK; i++) s += mx_val(a, mode, i) * mx_val(b, mode, i);
    return s;
  endfunction
endpackage
