// tb_jscc_top - end-to-end test of the JSCC codec at its default size.
//
// Sends random sparse source frames (P(1) = 0.04, the source statistics the
// code is designed for) through interleaver, encoder and BPSK modulator,
// adds Gaussian noise in the testbench (the channel), and decodes them with
// demodulator, joint decoder and de-interleaver. Checks, each computed here
// from the code tables and the source frame:
//   * the transmitted codeword satisfies every channel parity check and its
//     b part equals H_s * itrl(s);
//   * encoder and decoder latencies match their cycle formulas;
//   * a noise-free frame and a high-SNR frame are decoded exactly;
//   * at the low-SNR end of the published test range the decoder reduces the
//     number of wrong code bits compared with the raw hard decisions.
// Mechanisms counted (each must occur): stalls of the symbol stream
// (tx_sym_ready low), source->channel and channel->source message exchange
// (a non-zero exchange message used by the other side), frames in which the
// decoder corrected channel errors, and stopping at the iteration limit.
module tb_jscc_top;
  import jscc_pkg::*;
  import jscc_code_pkg::*;

  localparam int Z  = Z_DEF;
  localparam int N  = SRC_COLS * Z;
  localparam int NC = CH_COLS * Z;
  localparam int ITERS = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 tx_start = 0;
  logic [N-1:0]         tx_s;
  logic                 tx_busy, tx_sym_valid, tx_sym_ready, tx_sym_last;
  logic [7:0]           tx_sym_idx;
  logic signed [SW-1:0] tx_sym [Z];
  logic                 rx_valid = 0, rx_start = 0;
  logic [7:0]           rx_idx = 0, rx_scale = 0, max_iter = ITERS;
  logic signed [SW-1:0] rx_y [Z];
  logic                 rx_busy, rx_done;
  logic [7:0]           rx_iter_count;
  logic [N-1:0]         rx_s;
  logic [NC-1:0]        rx_c;

  jscc_top dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_xchg_sc = 0, n_xchg_cc = 0, n_iterlimit = 0, n_fixed = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  always @(posedge clk) begin
    if (tx_sym_valid && !tx_sym_ready) n_stall++;
    // I^{sc_cc} added to a channel V2C message
    if (dut.u_dec.u_ch.busy && dut.u_dec.u_ch.side_on && dut.u_dec.u_ch.vside[0] != 0) n_xchg_sc++;
    // I^{cc_sc} fed to a source check node
    if (dut.u_dec.u_src.busy && dut.u_dec.u_src.cside[0] != 0) n_xchg_cc++;
  end

  logic [NC-1:0] code_rx;
  int            stall_mode = 0;

  // Gaussian sample with unit variance (sum of 12 uniforms)
  function automatic real gauss();
    real acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom_range(0, 1000000)) / 1000000.0;
    return acc - 6.0;
  endfunction

  function automatic logic [Z-1:0] rot(input logic [Z-1:0] x, input int sh);
    logic [Z-1:0] r;
    for (int i = 0; i < Z; i++) r[i] = x[(i + sh) % Z];
    return r;
  endfunction

  // collect the transmitted symbols
  initial begin
    forever begin
      @(posedge clk);
      tx_sym_ready <= (stall_mode == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
    end
  end
  always @(posedge clk) begin
    if (tx_sym_valid && tx_sym_ready)
      for (int i = 0; i < Z; i++) code_rx[int'(tx_sym_idx)*Z + i] <= (tx_sym[i] < 0);
  end

  task automatic run_frame(input real ebn0_db, input bit noiseless, input bit expect_exact,
                           input bit expect_gain);
    logic [N-1:0]  s, itl;
    logic [Z-1:0]  acc;
    int            t0, t_enc, t_dec, raw_err, code_err, src_err, ones;
    real           sigma, y;
    int            exp_enc, exp_dec, tsrc, tch;

    // source frame
    ones = 0;
    for (int k = 0; k < N; k++) begin
      s[k] = ($urandom_range(0, 9999) < 400);
      ones += s[k];
    end
    for (int i = 0; i < N / 2; i++) begin
      itl[i] = s[2*i];
      itl[N/2 + i] = s[2*i + 1];
    end

    // transmit
    @(posedge clk);
    tx_s <= s; tx_start <= 1;
    @(posedge clk);
    tx_start <= 0;
    t0 = $time / 10;
    wait (dut.enc_done);
    t_enc = $time / 10 - t0;
    @(posedge clk);
    wait (tx_sym_last && tx_sym_ready);
    @(posedge clk);
    @(posedge clk);

    // codeword checks: b = H_s itrl(s), channel syndrome zero
    begin
      int bad_b = 0, bad_p = 0;
      for (int r = 0; r < SRC_ROWS; r++) begin
        acc = '0;
        for (int e = 0; e < H_DEG[r]; e++) acc ^= rot(itl[H_COL[r][e]*Z +: Z], H_SHIFT[r][e] % Z);
        if (acc != code_rx[(LINK_COL0 + r)*Z +: Z]) bad_b++;
      end
      for (int r = 0; r < CH_ROWS; r++) begin
        acc = '0;
        for (int e = 0; e < H_DEG[CH_ROW0 + r]; e++)
          acc ^= rot(code_rx[H_COL[CH_ROW0 + r][e]*Z +: Z], H_SHIFT[CH_ROW0 + r][e] % Z);
        if (acc != '0) bad_p++;
      end
      check(bad_b == 0, $sformatf("compressed source b wrong in %0d row blocks", bad_b));
      check(bad_p == 0, $sformatf("channel parity fails in %0d row blocks", bad_p));
    end
    exp_enc = 1;   // interleaver register
    for (int r = 0; r < H_ROWS; r++) exp_enc += H_DEG[r];
    check(t_enc == exp_enc, $sformatf("encoder latency %0d, expected %0d", t_enc, exp_enc));

    // channel: rate 0.8 overall, Es/N0 = 0.8 Eb/N0
    sigma = $sqrt(1.0 / (2.0 * 0.8 * $pow(10.0, ebn0_db / 10.0)));
    rx_scale <= 8'(int'($floor(32.0 / (sigma * sigma) + 0.5)) > 255 ? 255
                   : int'($floor(32.0 / (sigma * sigma) + 0.5)));
    raw_err = 0;
    for (int col = 0; col < CH_COLS; col++) begin
      @(posedge clk);
      rx_valid <= 1; rx_idx <= 8'(col);
      for (int i = 0; i < Z; i++) begin
        int q;
        y = (code_rx[col*Z + i] ? -1.0 : 1.0) + (noiseless ? 0.0 : sigma * gauss());
        q = int'($floor(y * 16.0 + 0.5));
        if (q > 127) q = 127;
        if (q < -127) q = -127;
        rx_y[i] <= SW'(q);
        if ((q < 0) != code_rx[col*Z + i]) raw_err++;
      end
    end
    @(posedge clk);
    rx_valid <= 0;
    @(posedge clk);
    @(posedge clk);
    rx_start <= 1;
    @(posedge clk);
    rx_start <= 0;
    t0 = $time / 10;
    wait (dut.dec_done);
    t_dec = $time / 10 - t0;
    @(posedge clk);
    wait (rx_done);
    @(negedge clk);

    tsrc = 0; tch = 0;
    for (int r = 0; r < SRC_ROWS; r++) tsrc += 2 * H_DEG[r] + 1;
    for (int r = 0; r < CH_ROWS; r++)  tch  += 2 * H_DEG[CH_ROW0 + r] + 1;
    exp_dec = SRC_COLS + ITERS * ((tsrc > tch ? tsrc : tch) + 2 + SRC_ROWS) + CH_COLS;
    check(t_dec == exp_dec, $sformatf("decoder latency %0d, expected %0d", t_dec, exp_dec));
    check(rx_iter_count == ITERS, "iteration count");
    if (rx_iter_count == max_iter) n_iterlimit++;

    code_err = 0; src_err = 0;
    for (int k = 0; k < NC; k++) code_err += (rx_c[k] != code_rx[k]);
    for (int k = 0; k < N; k++)  src_err  += (rx_s[k] != s[k]);
    if (code_err < raw_err) n_fixed++;
    $display("frame Eb/N0=%0.1f dB noiseless=%0d ones=%0d raw code errors=%0d decoded code errors=%0d source errors=%0d enc=%0d dec=%0d cycles",
             ebn0_db, noiseless, ones, raw_err, code_err, src_err, t_enc, t_dec);
    if (expect_exact) begin
      check(code_err == 0, "decoded codeword not exact");
      check(src_err == 0, "decoded source not exact");
    end
    if (expect_gain) check(code_err < raw_err, "decoder did not reduce code-bit errors");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    stall_mode = 0;
    run_frame(0.0, 1'b1, 1'b1, 1'b0);
    stall_mode = 1;
    run_frame(4.0, 1'b0, 1'b1, 1'b0);
    run_frame(0.0, 1'b0, 1'b0, 1'b1);
    run_frame(-1.0, 1'b0, 1'b0, 1'b1);
    run_frame(-2.0, 1'b0, 1'b0, 1'b1);

    check(n_stall > 0,     "symbol stream never stalled");
    check(n_xchg_sc > 0,   "no source->channel exchange");
    check(n_xchg_cc > 0,   "no channel->source exchange update");
    check(n_iterlimit > 0, "iteration limit never reached");
    check(n_fixed > 0,     "decoder never corrected a channel error");
    $display("mechanisms: stalls=%0d sc2cc_used=%0d cc2sc_used=%0d iter_limit=%0d corrected_frames=%0d",
             n_stall, n_xchg_sc, n_xchg_cc, n_iterlimit, n_fixed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
