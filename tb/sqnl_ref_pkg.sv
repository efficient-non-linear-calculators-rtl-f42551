// sqnl_ref_pkg: reference arithmetic for the testbenches, written straight
// from the defining equations of the square-law activations with plain
// integers (no shared code with the RTL).
//
//   ref_sat      f_sat(x, Y) with the upper level Y-1 when Y = 2^(R-1)
//   ref_offset   the k-th of N offsets spread over a span of 2^(R-1)
//   ref_act      f(n) = 1/N sum_k f_sat(f_sat(n + U(k), C) - U(k), M),
//                floor division, for the four generator modes
//   ref_*_eq     the closed-form mappings (symmetric, asymmetric, gated),
//                in real arithmetic, used with a tolerance
package sqnl_ref_pkg;

  function automatic int ref_clamp(int x, int lo, int hi);
    if (x < lo) return lo;
    if (x > hi) return hi;
    return x;
  endfunction

  function automatic int floor_div(int a, int b);
    int q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  // mode: 0 SQNL, 1 LogSQNL, 2 gated, 3 asymmetric
  function automatic int ref_offset(int R, int N, int k, bit asym, int alpha);
    int umax, step, u;
    umax = 1 << (R - 2);
    step = (1 << (R - 1)) / N;
    u = -umax + k * step + step / 2;
    if (asym) u = u - umax + alpha;
    return u;
  endfunction

  function automatic int ref_act(int R, int N, int mode, int n, int c, int alpha);
    int umax, m, sum, u, a, s, cl;
    umax = 1 << (R - 2);
    m    = 1 << (R - 1);
    cl   = (mode == 2) ? c : umax;
    sum  = 0;
    for (int k = 0; k < N; k++) begin
      u = ref_offset(R, N, k, mode == 3, alpha);
      if (mode == 3) a = (n + u < -umax) ? -umax : n + u;
      else           a = ref_clamp(n + u, -cl, cl);
      s = ref_clamp(a - u, -m, m - 1);
      sum += s;
    end
    if (mode == 1) return floor_div(sum, 2 * N) + (1 << (R - 3));
    return floor_div(sum, N);
  endfunction

  // Closed forms (Eq. 5, 6 and 7 of the method), real valued.
  function automatic real ref_sym_eq(int R, real n);
    real m;
    m = real'(1 << (R - 1));
    if (n < -m) return -m / 2.0;
    if (n < 0)  return n + n * n / (2.0 * m);
    if (n <= m) return n - n * n / (2.0 * m);
    return m / 2.0;
  endfunction

  function automatic real ref_asym_eq(int R, real n, real alpha);
    real m, t;
    m = real'(1 << (R - 1));
    if (n < -m / 2.0 - alpha) return -alpha;
    if (n <= m / 2.0 - alpha) begin
      t = m / 2.0 + n + alpha;
      return t * t / (2.0 * m) - alpha;
    end
    return n;
  endfunction

endpackage
