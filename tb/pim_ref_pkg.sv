// pim_ref_pkg: integer reference arithmetic for the testbenches.
//
// Each function restates, in plain procedural code, the arithmetic that the
// RTL headers document (layernorm, quantiser, softmax table), so testbenches
// can predict results without reusing RTL code.
package pim_ref_pkg;

  function automatic int sat8i(input longint v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // round(a / s), halves away from zero
  function automatic longint rdiv_ref(input longint a, input longint s);
    longint m;
    m = (a < 0) ? -a : a;
    m = (m + s / 2) / s;
    return (a < 0) ? -m : m;
  endfunction

  function automatic longint isqrt_ref(input longint v);
    longint r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // Faster integer square root for large arguments (Newton iteration).
  function automatic longint isqrt_fast(input longint v);
    longint x, y;
    if (v < 2) return v;
    x = v;
    y = (x + 1) / 2;
    while (y < x) begin
      x = y;
      y = (x + v / x) / 2;
    end
    return x;
  endfunction

  // Asymmetric min/max quantiser with integer step: scale, zero, quantise.
  function automatic int q_scale(input int lo, input int hi, input int qb);
    int nlv, s;
    nlv = (1 << qb) - 1;
    s = (hi - lo + nlv - 1) / nlv;
    return (s < 1) ? 1 : s;
  endfunction

  function automatic int q_zero(input int lo, input int s, input int qb);
    return -(1 << (qb - 1)) - int'(rdiv_ref(lo, s));
  endfunction

  function automatic int q_val(input int x, input int s, input int z, input int qb);
    int q;
    q = int'(rdiv_ref(x, s)) + z;
    if (q < -(1 << (qb - 1)))    q = -(1 << (qb - 1));
    if (q > (1 << (qb - 1)) - 1) q = (1 << (qb - 1)) - 1;
    return q;
  endfunction

  // 2^16 * 2^(-k/16) for the softmax table, computed with reals.
  function automatic longint exp_tab(input int k);
    return longint'($floor(65536.0 * (2.0 ** (-real'(k) / 16.0)) + 0.5));
  endfunction

  // Softmax numerator for score s against maximum m.
  function automatic longint sm_e(input longint s, input longint m);
    longint t;
    t = ((m - s) * 739) >>> 8;
    if ((t >> 4) >= 17) return 0;
    return exp_tab(int'(t % 16)) >> (t / 16);
  endfunction

endpackage
