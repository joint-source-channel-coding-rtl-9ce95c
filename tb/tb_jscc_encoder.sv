// tb_jscc_encoder - JSCC encoder at its default size (Z = 160).
// For random sparse and dense source vectors the testbench computes
// b = H_s s itself (XOR of rotated blocks, from the code tables), checks
// that the codeword carries that b in its last 20 column blocks, that every
// channel parity check H_c c = 0 holds, and that encoding takes exactly one
// cycle per non-zero block of the base matrix (278 cycles).
module tb_jscc_encoder;
  import jscc_code_pkg::*;
  localparam int Z = 160;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [SRC_COLS*Z-1:0] s;
  logic [CH_COLS*Z-1:0]  c;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  jscc_encoder #(.Z(Z)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [Z-1:0] rot(input logic [Z-1:0] x, input int sh);
    logic [Z-1:0] r;
    for (int i = 0; i < Z; i++) r[i] = x[(i + sh) % Z];
    return r;
  endfunction

  initial begin
    int nnz;
    nnz = 0;
    for (int r = 0; r < H_ROWS; r++) nnz += H_DEG[r];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 6; t++) begin
      int cyc, bad_b, bad_p;
      logic [Z-1:0] acc;
      @(negedge clk);
      for (int k = 0; k < SRC_COLS * Z; k++)
        s[k] = (t == 0) ? 1'b0 : ((t % 2) ? ($urandom_range(0, 99) < 4) : $urandom_range(0, 1));
      if (t == 1) begin s = '0; s[5] = 1'b1; end
      start = 1;
      @(negedge clk);
      start = 0;
      s = ~s;   // must have been captured
      s = ~s;
      cyc = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
        if (cyc == 3) begin
          checks++;
          if (!busy) begin failures++; $display("FAIL busy low"); end
        end
      end
      checks++;
      if (cyc != nnz) begin failures++; $display("FAIL latency %0d expected %0d", cyc, nnz); end
      bad_b = 0; bad_p = 0;
      for (int r = 0; r < SRC_ROWS; r++) begin
        acc = '0;
        for (int e = 0; e < H_DEG[r]; e++) acc ^= rot(s[H_COL[r][e]*Z +: Z], H_SHIFT[r][e] % Z);
        if (acc != c[(LINK_COL0 + r)*Z +: Z]) bad_b++;
      end
      for (int r = 0; r < CH_ROWS; r++) begin
        acc = '0;
        for (int e = 0; e < H_DEG[CH_ROW0 + r]; e++)
          acc ^= rot(c[H_COL[CH_ROW0 + r][e]*Z +: Z], H_SHIFT[CH_ROW0 + r][e] % Z);
        if (acc != '0) bad_p++;
      end
      checks += 2;
      if (bad_b != 0) begin failures++; $display("FAIL frame %0d: b wrong in %0d blocks", t, bad_b); end
      if (bad_p != 0) begin failures++; $display("FAIL frame %0d: parity fails in %0d blocks", t, bad_p); end
      if (t == 1) begin
        checks++;
        if (c == '0) begin failures++; $display("FAIL codeword of a weight-1 source is zero"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
