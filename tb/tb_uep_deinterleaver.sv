// tb_uep_deinterleaver - random frames through the UEP deinterleaver; every output bit is
// checked against the position rule (odd/even split), and the one-cycle
// valid timing and hold behaviour are checked.
module tb_uep_deinterleaver;
  localparam int N = 6400;
  logic clk = 0, rst_n = 0, start = 0, valid;
  logic [N-1:0] d, s_out, ref_v, prev;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  uep_deinterleaver #(.N(N)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) d[k] = (t == 0) ? (k % 2) : $urandom_range(0, 1);
      for (int i = 0; i < N / 2; i++) begin
        ref_v[2*i]       = d[i];
        ref_v[2*i + 1]   = d[N/2 + i];
      end
      start = 1;
      @(negedge clk);
      start = 0;
      checks += 2;
      if (!valid) begin failures++; $display("FAIL valid missing"); end
      if (s_out !== ref_v) begin failures++; $display("FAIL mapping frame %0d", t); end
      prev = ref_v;
      d = ~d;
      @(negedge clk);
      checks += 2;
      if (valid) begin failures++; $display("FAIL valid not a pulse"); end
      if (s_out !== prev) begin failures++; $display("FAIL output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
