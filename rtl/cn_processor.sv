// cn_processor - check-node processor of one lane (tanh rule, two-input LUTs).
//
// Produces the check-to-variable messages of one check node:
//   alpha_k = side [+] (boxplus over all valid beta_j, j != k)
// where [+] is the two-input tanh rule (boxplus_lut). For source checks, side
// is I^{cc_sc}, the message from the channel decoder (published source CNP
// equation); channel checks tie side to +31, the identity. The extrinsic
// products are formed with a forward chain (starting from side) and a
// backward chain of LUTs, 3D LUTs in all; the published figure draws a serial
// LUT chain but not how the D outputs share it, so the prefix/suffix
// arrangement is this design's choice. Inputs with valid = 0 are replaced by
// +31. Combinational; outputs of unused positions are don't-care.
module cn_processor
  import jscc_pkg::*;
#(
  parameter int D = 7
) (
  input  msg_t           beta  [D],
  input  logic [D-1:0]   valid,
  input  msg_t           side,
  output msg_t           alpha [D]
);
  msg_t b   [D];
  msg_t fwd [D+1];
  msg_t bwd [D+1];

  always_comb begin
    for (int j = 0; j < D; j++) b[j] = valid[j] ? beta[j] : msg_t'(QMAX);
  end

  assign fwd[0] = side;
  assign bwd[D] = msg_t'(QMAX);

  for (genvar j = 0; j < D; j++) begin : g_chain
    boxplus_lut u_fwd (.a(fwd[j]),   .b(b[j]),       .y(fwd[j+1]));
    boxplus_lut u_bwd (.a(bwd[j+1]), .b(b[j]),       .y(bwd[j]));
    boxplus_lut u_out (.a(fwd[j]),   .b(bwd[j+1]),   .y(alpha[j]));
  end
endmodule
