// vn_processor - variable-node processor of one lane, layered form.
//
// The decoder keeps, for every variable node, the running a-posteriori sum
// APP = L + sum(C2V) (channel value plus all check messages). When a layer is
// processed the old C2V message of that layer is removed, which yields the
// variable-to-check message of the published VNP equations:
//   diff = APP - alpha_old                     (QA+1 bits, exact)
//   beta = sat6(diff + side)                   (V2C message to the CNP)
// side is I^{sc_cc}, the message from the source decoder, for the channel
// variable nodes that carry the compressed source, and 0 elsewhere; it is not
// stored in the APP so that the APP equals I^{cc_sc} of the paper.
// After the check nodes have run, the write port forms
//   app_new = sat8(diff_in + alpha_new).
// The saturations are the "overflow check & truncation" stage of the VNP.
// The two halves are independent combinational paths; the layer controller
// uses the first in its read phase and the second in its write phase.
module vn_processor
  import jscc_pkg::*;
(
  input  app_t  app,
  input  msg_t  alpha_old,
  input  msg_t  side,
  output diff_t diff,
  output msg_t  beta,
  input  diff_t diff_in,
  input  msg_t  alpha_new,
  output app_t  app_new
);
  always_comb begin
    diff    = diff_t'(int'(app) - int'(alpha_old));
    beta    = sat_msg(int'(diff) + int'(side));
    app_new = sat_app(int'(diff_in) + int'(alpha_new));
  end
endmodule
