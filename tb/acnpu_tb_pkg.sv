// acnpu_tb_pkg: helpers for the ACNPU testbenches.
//
// Conversions between real numbers and the FP13 (S1E5M7) feature and FP10
// (S1E5M4) weight formats, written directly from the format definition
// (bias 15, zero exponent = zero, truncation toward zero), independently of
// the arithmetic in the design, plus random value generators.
package acnpu_tb_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp13_to_real(logic [12:0] a);
    real m;
    if (a[11:7] == 0) return 0.0;
    m = (1.0 + real'(a[6:0]) / 128.0) * pow2(int'(a[11:7]) - 15);
    return a[12] ? -m : m;
  endfunction

  function automatic real fp10_to_real(logic [9:0] w);
    real m;
    if (w[8:4] == 0) return 0.0;
    m = (1.0 + real'(w[3:0]) / 16.0) * pow2(int'(w[8:4]) - 15);
    return w[9] ? -m : m;
  endfunction

  // real -> float with MB mantissa bits, truncated
  function automatic logic [15:0] real_to_fp(real r, int mb);
    logic s;
    int   e;
    real  a;
    int   m;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < pow2(-14)) return '0;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e + 15 > 31) return 16'((int'(s) << (5 + mb)) | (31 << mb) | ((1 << mb) - 1));
    m = int'($floor((a - 1.0) * pow2(mb)));
    return 16'((int'(s) << (5 + mb)) | ((e + 15) << mb) | m);
  endfunction

  function automatic logic [12:0] real_to_fp13(real r);
    return 13'(real_to_fp(r, 7));
  endfunction

  function automatic logic [9:0] real_to_fp10(real r);
    return 10'(real_to_fp(r, 4));
  endfunction

  // small random integer in [-m, m]
  function automatic int rnd_int(int m);
    return int'($urandom_range(2 * m, 0)) - m;
  endfunction

  // random real in (-a, a) with 6 significant bits, so it is exact in FP10
  function automatic real rnd_w(real a);
    return real'(rnd_int(31)) / 31.0 * a;
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
