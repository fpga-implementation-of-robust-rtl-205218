// tb_rrg_ref_pkg: reference arithmetic for the residual generator testbenches.
//
// Recomputes every fixed-point quantity of the datapath with 64-bit integer
// arithmetic on the codes (value * 2^6): products are formed exactly and
// floored, divisions floor, and every result is clamped to the range of its
// word length.  Used by the testbenches only.
package tb_rrg_ref_pkg;

  function automatic longint clamp(longint v, longint lo, longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic longint floordiv(longint a, longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  // signed / unsigned ranges of a w-bit word
  function automatic longint smax(int w); return (longint'(1) << (w-1)) - 1; endfunction
  function automatic longint smin(int w); return -(longint'(1) << (w-1));    endfunction
  function automatic longint umax(int w); return (longint'(1) << w) - 1;     endfunction

  function automatic longint ref_residual(longint ym, longint u, longint dhat);
    return clamp(ym - dhat * u, smin(12), smax(12));
  endfunction

  typedef struct {
    longint r_sum, r_avg, r_sq_sum, dsq_sum, r_var;
  } ref_stats_t;

  function automatic ref_stats_t ref_stats(longint r [], int n);
    ref_stats_t s;
    longint sum, sq, dsq, dev;
    sum = 0; sq = 0; dsq = 0;
    for (int k = 0; k < n; k++) begin
      sum += r[k];
      sq  += clamp(floordiv(r[k] * r[k], 64), 0, umax(17));
    end
    s.r_sum    = clamp(sum, smin(14), smax(14));
    s.r_sq_sum = clamp(sq, 0, umax(17));
    s.r_avg    = clamp(floordiv(s.r_sum, n), smin(11), smax(11));
    for (int k = 0; k < n; k++) begin
      dev  = clamp(r[k] - s.r_avg, smin(11), smax(11));
      dsq += clamp(floordiv(dev * dev, 64), 0, umax(14));
    end
    s.dsq_sum = clamp(dsq, 0, umax(15));
    s.r_var   = clamp(floordiv(s.dsq_sum, n), 0, umax(12));
    return s;
  endfunction

  // tau = num / den with both at 6 fractional bits; clipped to u17.6
  function automatic longint ref_chi(longint num, longint den);
    if (den == 0) return umax(17);
    return clamp((num * 64) / den, 0, umax(17));
  endfunction

  // approximately standard normal sample (sum of 12 uniforms minus 6)
  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom % 65536) / 65536.0;
    return acc - 6.0;
  endfunction

endpackage
