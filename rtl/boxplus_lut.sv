// boxplus_lut - two-input tanh rule on 6-bit LLRs.
//
// Computes y = 2 atanh(tanh(a/2) tanh(b/2)), the operation the check-node and
// SC2CC processors chain together. The published decoder uses a two-input
// fixed-point look-up table for it; its contents are not given, so this block
// computes the table entry directly from the exact identity
//   y = sign(a) sign(b) [ min(|a|,|b|) + f(|a|+|b|) - f(||a|-|b||) ],
//   f(x) = ln(1 + e^-x),
// with f tabulated in LSB units (jscc_pkg::tanh_corr). Synthesis maps the
// 12-input function to LUTs, which is the two-input LUT of the paper.
// A magnitude-31 input counts as certain (tanh = +-1): the result is then the
// other input with the sign applied, which also makes +31 the identity used to
// pad unused inputs. Purely combinational.
module boxplus_lut
  import jscc_pkg::*;
(
  input  msg_t a,
  input  msg_t b,
  output msg_t y
);
  int ma, mb, mn, m;
  logic neg;

  always_comb begin
    ma  = (a < 0) ? -int'(a) : int'(a);
    mb  = (b < 0) ? -int'(b) : int'(b);
    neg = a[Q-1] ^ b[Q-1];
    mn  = (ma < mb) ? ma : mb;
    m   = mn + tanh_corr(ma + mb) - tanh_corr((ma > mb) ? ma - mb : mb - ma);
    if (m < 0) m = 0;
    if (ma >= QMAX)      y = a[Q-1] ? sat_msg(-int'(b)) : b;
    else if (mb >= QMAX) y = b[Q-1] ? sat_msg(-int'(a)) : a;
    else                 y = neg ? sat_msg(-m) : sat_msg(m);
  end
endmodule
