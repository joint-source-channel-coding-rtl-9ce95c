// bpsk_demodulator - soft BPSK demapper producing 6-bit channel LLRs.
//
// For BPSK over AWGN the channel LLR of a received sample y is 2y/sigma^2.
// The gain 2/sigma^2 is a run-time input (scale, unsigned with 4 fractional
// bits, set by software from the noise estimate); samples have 4 fractional
// bits and LLRs 2, so
//   llr = sat6( (y * scale + 32) >>> 6 )      (round to nearest).
// These LLRs are the initial V2C values of the channel decoder. One word of Z
// samples per beat; output registered, one cycle latency, with the column
// index passed along. The formats and rounding are this design's choice.
module bpsk_demodulator
  import jscc_pkg::*;
#(
  parameter int Z = Z_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [7:0]           in_idx,
  input  logic signed [SW-1:0] y [Z],
  input  logic [7:0]           scale,
  output logic                 out_valid,
  output logic [7:0]           out_idx,
  output msg_t                 llr [Z]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_idx <= in_idx;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int i = 0; i < Z; i++)
        llr[i] <= sat_msg((int'(y[i]) * int'({1'b0, scale}) + 32) >>> 6);
  end
endmodule
