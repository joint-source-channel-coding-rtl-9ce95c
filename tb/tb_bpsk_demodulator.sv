// tb_bpsk_demodulator - random samples and gains; the LLR is recomputed in
// real arithmetic (y/16 * scale/16 * 4, rounded, clipped to +-31) and compared,
// together with the one-cycle latency and the index pass-through.
module tb_bpsk_demodulator;
  import jscc_pkg::*;
  localparam int Z = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0] in_idx = 0, out_idx, scale = 0;
  logic signed [SW-1:0] y [Z];
  msg_t llr [Z];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bpsk_demodulator #(.Z(Z)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int yv [Z];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = 1; in_idx = 8'(t);
      scale = (t < 5) ? 8'(t * 60) : 8'($urandom_range(0, 255));
      for (int i = 0; i < Z; i++) begin
        yv[i] = $urandom_range(0, 255) - 128;
        y[i] = SW'(yv[i]);
      end
      @(negedge clk);
      in_valid = 0;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      if (out_idx != 8'(t)) begin failures++; $display("FAIL idx"); end
      for (int i = 0; i < Z; i++) begin
        real v;
        int r;
        v = real'(yv[i]) / 16.0 * real'(scale) / 16.0 * 4.0;
        r = int'($floor(v + 0.5));
        if (r > 31) r = 31;
        if (r < -31) r = -31;
        checks++;
        if (int'(llr[i]) != r) begin
          failures++; $display("FAIL y=%0d scale=%0d llr=%0d ref=%0d", yv[i], scale, llr[i], r);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
