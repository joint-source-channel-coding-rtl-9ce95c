// sc2cc_processor - source-to-channel message of one source check node.
//
// Computes I^{sc_cc} = boxplus of all V2C messages of the check (the published
// SC2CC equation: tanh(I/2) = product of tanh(beta/2) over all neighbours),
// with a serial chain of two-input tanh LUTs as drawn in the decoder figure.
// The message from the channel side is not included, so the result is
// extrinsic to the channel variable node it is sent to. Inputs with valid = 0
// are skipped (replaced by the identity +31). Combinational.
module sc2cc_processor
  import jscc_pkg::*;
#(
  parameter int D = 7
) (
  input  msg_t         beta [D],
  input  logic [D-1:0] valid,
  output msg_t         msg
);
  msg_t acc [D+1];
  msg_t b   [D];

  always_comb begin
    for (int j = 0; j < D; j++) b[j] = valid[j] ? beta[j] : msg_t'(QMAX);
  end

  assign acc[0] = msg_t'(QMAX);
  for (genvar j = 0; j < D; j++) begin : g_chain
    boxplus_lut u_lut (.a(acc[j]), .b(b[j]), .y(acc[j+1]));
  end
  assign msg = acc[D];
endmodule
