// tb_util_pkg - reference functions for the DAISM testbenches, written
// independently of the RTL.
//  approx_mul_hi: the PC3_tr approximate mantissa product of two 8-bit
//    mantissas (hidden one included): the exact product of the multiplicand
//    with the three top multiplier bits, OR-ed with the multiplicand shifted
//    by i for every set multiplier bit i in 4..1; the top 8 of 16 bits kept.
//  bf16_val / bf16_trunc: bfloat16 <-> real, the latter truncating the
//    fraction toward zero (exponent range assumed to fit).
package tb_util_pkg;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic logic [7:0] approx_mul_hi(logic [7:0] mw, logic [7:0] mx);
    logic [15:0] r;
    r = 16'(mw * mx[7:5]) << 5;
    for (int i = 1; i <= 4; i++) if (mx[i]) r = r | (16'(mw) << i);
    return r[15:8];
  endfunction

  function automatic logic [7:0] exact_mul_hi(logic [7:0] mw, logic [7:0] mx);
    logic [15:0] r;
    r = mw * mx;
    return r[15:8];
  endfunction

  function automatic real bf16_val(logic [15:0] v);
    real m;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + real'(v[6:0])) / 128.0;
    m = m * pow2(int'(v[14:7]) - 127);
    return v[15] ? -m : m;
  endfunction

  function automatic logic [15:0] bf16_trunc(real x);
    logic [63:0] b;
    int e;
    if (x == 0.0) return 16'h0;
    b = $realtobits(x);
    e = int'(b[62:52]) - 1023 + 127;
    if (e <= 0) return 16'h0;
    return {b[63], 8'(e), b[51:45]};
  endfunction

  // value of one approximate product in real arithmetic
  function automatic real approx_prod(logic [15:0] w, logic [15:0] x);
    real p;
    if (w[14:7] == 0 || x[14:7] == 0) return 0.0;
    p = real'(approx_mul_hi({1'b1, w[6:0]}, {1'b1, x[6:0]})) * 256.0;
    p = p * pow2(int'(w[14:7]) + int'(x[14:7]) - 268);
    return (w[15] ^ x[15]) ? -p : p;
  endfunction

endpackage
