// tb_jscc_decoder - joint decoder at Z = 40 (circulant shifts taken mod 40).
// Frames are encoded here (b = H_s s, then parity by back-substitution over
// the lower-triangular H_1, all from the code tables) and turned into LLRs.
// Checks:
//   * max_iter = 0: s_hat is all zero (the source prior is positive) and
//     c_hat equals the signs of the loaded LLRs;
//   * noiseless LLRs: s and c decoded exactly after 5 iterations;
//   * noisy LLRs (AWGN, Eb/N0 = 1 dB at rate 0.8): fewer wrong code bits
//     than the raw hard decisions, and exact source recovery;
//   * iter_count, the busy/done handshake and the latency
//     40 + iterations * (max side time + 22) + 50 cycles.
module tb_jscc_decoder;
  import jscc_pkg::*;
  import jscc_code_pkg::*;
  localparam int Z  = 40;
  localparam int N  = SRC_COLS * Z;
  localparam int NC = CH_COLS * Z;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic llr_valid = 0, start = 0, busy, done;
  logic [7:0] llr_col = 0, max_iter = 0, iter_count;
  msg_t llr [Z];
  logic [N-1:0]  s_hat;
  logic [NC-1:0] c_hat;
  jscc_decoder #(.Z(Z)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [Z-1:0] rot(input logic [Z-1:0] x, input int sh);
    logic [Z-1:0] r;
    for (int i = 0; i < Z; i++) r[i] = x[(i + sh) % Z];
    return r;
  endfunction

  function automatic real gauss();
    real acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom_range(0, 1000000)) / 1000000.0;
    return acc - 6.0;
  endfunction

  logic [N-1:0]  s;
  logic [NC-1:0] c;
  int            lv [NC];

  task automatic encode();
    logic [Z-1:0] acc;
    for (int k = 0; k < N; k++) s[k] = ($urandom_range(0, 99) < 4);
    c = '0;
    for (int r = 0; r < SRC_ROWS; r++) begin
      acc = '0;
      for (int e = 0; e < H_DEG[r]; e++) acc ^= rot(s[H_COL[r][e]*Z +: Z], H_SHIFT[r][e] % Z);
      c[(LINK_COL0 + r)*Z +: Z] = acc;
    end
    for (int r = 0; r < CH_ROWS; r++) begin
      acc = '0;
      for (int e = 0; e < H_DEG[CH_ROW0 + r]; e++)
        if (H_COL[CH_ROW0 + r][e] != r)
          acc ^= rot(c[H_COL[CH_ROW0 + r][e]*Z +: Z], H_SHIFT[CH_ROW0 + r][e] % Z);
      c[r*Z +: Z] = acc;
    end
  endtask

  task automatic decode(input int iters, output int cyc);
    for (int col = 0; col < CH_COLS; col++) begin
      @(negedge clk);
      llr_valid = 1; llr_col = 8'(col);
      for (int i = 0; i < Z; i++) llr[i] = msg_t'(lv[col*Z + i]);
    end
    @(negedge clk);
    llr_valid = 0;
    max_iter = 8'(iters);
    start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(!busy, "busy with done");
    check(int'(iter_count) == iters, $sformatf("iter_count %0d expected %0d", iter_count, iters));
  endtask

  initial begin
    int cyc, tmax, ts, tc, raw, cerr, serr;
    real sigma;
    ts = 0; tc = 0;
    for (int r = 0; r < SRC_ROWS; r++) ts += 2 * H_DEG[r] + 1;
    for (int r = 0; r < CH_ROWS; r++)  tc += 2 * H_DEG[CH_ROW0 + r] + 1;
    tmax = (ts > tc) ? ts : tc;
    repeat (2) @(posedge clk);
    rst_n <= 1;

    // 1. zero iterations: hard decision of the inputs
    encode();
    for (int k = 0; k < NC; k++) lv[k] = $urandom_range(0, 40) - 20;
    decode(0, cyc);
    check(cyc == 40 + 50 + 1, $sformatf("latency(0 it) %0d", cyc));
    check(s_hat == '0, "s_hat not zero with no iterations");
    cerr = 0;
    for (int k = 0; k < NC; k++) cerr += (c_hat[k] != (lv[k] < 0));
    check(cerr == 0, $sformatf("c_hat differs from LLR signs in %0d bits", cerr));

    // 2. noiseless frame
    encode();
    for (int k = 0; k < NC; k++) lv[k] = c[k] ? -8 : 8;
    decode(5, cyc);
    check(cyc == 40 + 5 * (tmax + 22) + 50 + 1, $sformatf("latency(5 it) %0d", cyc));
    check(c_hat == c, "noiseless codeword");
    check(s_hat == s, "noiseless source");

    // 3. noisy frames
    sigma = $sqrt(1.0 / (2.0 * 0.8 * $pow(10.0, 0.1)));
    for (int f = 0; f < 2; f++) begin
      encode();
      raw = 0;
      for (int k = 0; k < NC; k++) begin
        real y;
        y = (c[k] ? -1.0 : 1.0) + sigma * gauss();
        lv[k] = int'($floor(2.0 * y / (sigma * sigma) * 4.0 + 0.5));
        if (lv[k] > 31) lv[k] = 31;
        if (lv[k] < -31) lv[k] = -31;
        raw += ((lv[k] < 0) != c[k]);
      end
      decode(10, cyc);
      cerr = 0; serr = 0;
      for (int k = 0; k < NC; k++) cerr += (c_hat[k] != c[k]);
      for (int k = 0; k < N; k++)  serr += (s_hat[k] != s[k]);
      $display("noisy frame %0d: raw %0d, decoded code errors %0d, source errors %0d", f, raw, cerr, serr);
      check(raw > 0 && cerr < raw, "no error correction");
      check(serr == 0, "source not recovered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
