// tb_ref_pkg - reference arithmetic for the decoder testbenches.
//
// bp_ref() is the two-input tanh rule in the 6-bit, 2-fractional-bit domain,
// written independently of the RTL: the correction term is computed here
// from ln(1 + exp(-x)) with real arithmetic instead of a table. bp_exact()
// is the unquantised rule, used to bound the quantisation error.
package tb_ref_pkg;
  function automatic int clamp(input int v, input int lim);
    return (v > lim) ? lim : ((v < -lim) ? -lim : v);
  endfunction

  function automatic int corr_ref(input int x);
    return int'($floor(4.0 * $ln(1.0 + $exp(-real'(x) / 4.0)) + 0.5));
  endfunction

  function automatic int bp_ref(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    if (ma >= 31) return (a < 0) ? clamp(-b, 31) : b;
    if (mb >= 31) return (b < 0) ? clamp(-a, 31) : a;
    m = ((ma < mb) ? ma : mb) + corr_ref(ma + mb) - corr_ref((ma > mb) ? ma - mb : mb - ma);
    if (m < 0) m = 0;
    return (((a < 0) != (b < 0)) ? -m : m);
  endfunction

  function automatic real bp_exact(input real a, input real b);
    return 2.0 * $atanh($tanh(a / 2.0) * $tanh(b / 2.0));
  endfunction
endpackage
