// tb_bpsk_modulator - random codewords streamed with random back-pressure.
// Checks every symbol (+16 for 0, -16 for 1), the beat order, that a
// stalled beat is held, the last flag, and the beat count per frame.
module tb_bpsk_modulator;
  import jscc_pkg::*;
  localparam int Z = 16, NW = 50;
  logic clk = 0, rst_n = 0, start = 0, busy, sym_valid, sym_ready = 0, sym_last;
  logic [NW*Z-1:0] c, cref;
  logic [7:0] sym_idx;
  logic signed [SW-1:0] sym [Z];
  int checks = 0, failures = 0, stalls = 0;
  always #5 clk = ~clk;
  bpsk_modulator #(.Z(Z), .NW(NW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 4; t++) begin
      int beats;
      @(negedge clk);
      for (int k = 0; k < NW * Z; k++) c[k] = $urandom_range(0, 1);
      cref = c;
      start = 1;
      @(negedge clk);
      start = 0;
      c = ~c;
      beats = 0;
      while (beats < NW) begin
        sym_ready = (t == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        #1;
        checks++;
        if (!sym_valid || int'(sym_idx) != beats) begin
          failures++; $display("FAIL beat %0d idx %0d valid %0d", beats, sym_idx, sym_valid);
        end
        for (int i = 0; i < Z; i++) begin
          checks++;
          if (int'(sym[i]) != (cref[beats*Z + i] ? -16 : 16)) begin
            failures++; $display("FAIL symbol %0d/%0d", beats, i);
          end
        end
        checks++;
        if (sym_last != (beats == NW - 1)) begin failures++; $display("FAIL last flag"); end
        if (sym_ready) beats++; else stalls++;
        @(negedge clk);
      end
      checks++;
      if (sym_valid) begin failures++; $display("FAIL valid after last beat"); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
