// uep_deinterleaver - inverse of the UEP interleaver.
//
// Restores the source order of the decoded vector:
//   s_out[2i] = d[i],  s_out[2i + 1] = d[N/2 + i],  0 <= i < N/2.
// Timing: start captures d; valid pulses one cycle later with s_out, which
// holds until the next start.
module uep_deinterleaver #(
  parameter int N = 6400
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] d,
  output logic         valid,
  output logic [N-1:0] s_out
);
  logic [N-1:0] perm;

  always_comb begin
    for (int i = 0; i < N / 2; i++) begin
      perm[2*i]     = d[i];
      perm[2*i + 1] = d[N/2 + i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= start;
  end

  always_ff @(posedge clk) begin
    if (start) s_out <= perm;
  end
endmodule
