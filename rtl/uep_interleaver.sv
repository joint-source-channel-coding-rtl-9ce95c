// uep_interleaver - regular interleaver for unequal error protection.
//
// Splits the N-bit source vector by position: the bits at 0-based even
// indices (1-based odd positions) fill the first half of the output, the bits
// at 0-based odd indices (1-based even positions, where the semantic encoder
// is assumed to put the important bits) fill the second half:
//   itrl_s[i] = s[2i],  itrl_s[N/2 + i] = s[2i + 1],  0 <= i < N/2.
// The second half lands on the source columns of higher variable degree
// (stronger protection) in this design's base matrix. The mapping is read
// from the published interleaver figure; the figure does not say which end
// is position 1, so the even/odd reading is this design's.
// Timing: start captures s; the result is registered and valid flags it one
// cycle later, held until the next start.
module uep_interleaver #(
  parameter int N = 6400
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] s,
  output logic         valid,
  output logic [N-1:0] itrl_s
);
  logic [N-1:0] perm;

  always_comb begin
    for (int i = 0; i < N / 2; i++) begin
      perm[i]         = s[2*i];
      perm[N/2 + i]   = s[2*i + 1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= start;
  end

  always_ff @(posedge clk) begin
    if (start) itrl_s <= perm;
  end
endmodule
