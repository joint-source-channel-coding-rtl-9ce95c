// jscc_top - QC-LDPC joint source-channel codec: transmit and receive chains.
//
// Transmit: a 6400-bit binary semantic-feature frame (tx_s) is reordered by
// the UEP interleaver, compressed and channel-encoded by the JSCC encoder
// into an 8000-bit codeword (overall rate 0.8), and BPSK-mapped; the symbols
// leave on tx_sym_* one column block (Z symbols) per beat.
// Receive: noisy samples enter on rx_* one column block per beat (any
// order, rx_idx gives the block), are turned into 6-bit LLRs with the gain
// rx_scale (about 2/sigma^2 in Q4.4) and stored in the decoder; rx_start then
// runs max_iter joint iterations, the decoded source is de-interleaved and
// rx_done pulses with rx_s (and the decoded codeword rx_c) valid.
// The semantic encoder/decoder and the channel itself are outside this
// block; tx_sym_* and rx_* are where the channel connects. The two chains are
// independent and may run at the same time.
module jscc_top
  import jscc_pkg::*;
  import jscc_code_pkg::*;
#(
  parameter int Z = Z_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // transmit chain
  input  logic                  tx_start,
  input  logic [SRC_COLS*Z-1:0] tx_s,
  output logic                  tx_busy,
  output logic                  tx_sym_valid,
  input  logic                  tx_sym_ready,
  output logic [7:0]            tx_sym_idx,
  output logic                  tx_sym_last,
  output logic signed [SW-1:0]  tx_sym [Z],
  // receive chain
  input  logic                  rx_valid,
  input  logic [7:0]            rx_idx,
  input  logic signed [SW-1:0]  rx_y [Z],
  input  logic [7:0]            rx_scale,
  input  logic                  rx_start,
  input  logic [7:0]            max_iter,
  output logic                  rx_busy,
  output logic [7:0]            rx_iter_count,
  output logic                  rx_done,
  output logic [SRC_COLS*Z-1:0] rx_s,
  output logic [CH_COLS*Z-1:0]  rx_c
);
  localparam int N = SRC_COLS * Z;

  // ---------------------------------------------------------------- transmit
  logic         itl_valid, enc_done, enc_busy, mod_busy;
  logic [N-1:0] itl_s;
  logic [CH_COLS*Z-1:0] code;

  uep_interleaver #(.N(N)) u_itl (
    .clk, .rst_n, .start(tx_start), .s(tx_s), .valid(itl_valid), .itrl_s(itl_s));

  jscc_encoder #(.Z(Z)) u_enc (
    .clk, .rst_n, .start(itl_valid), .s(itl_s), .busy(enc_busy), .done(enc_done), .c(code));

  bpsk_modulator #(.Z(Z), .NW(CH_COLS)) u_mod (
    .clk, .rst_n, .start(enc_done), .c(code), .busy(mod_busy),
    .sym_valid(tx_sym_valid), .sym_ready(tx_sym_ready), .sym_idx(tx_sym_idx),
    .sym_last(tx_sym_last), .sym(tx_sym));

  logic tx_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_pend <= 1'b0;
    else        tx_pend <= tx_start;
  end
  assign tx_busy = tx_pend || itl_valid || enc_busy || enc_done || mod_busy;

  // ---------------------------------------------------------------- receive
  logic       llr_valid, dec_done;
  logic [7:0] llr_col;
  msg_t       llr [Z];
  logic [N-1:0] s_hat;

  bpsk_demodulator #(.Z(Z)) u_dem (
    .clk, .rst_n, .in_valid(rx_valid), .in_idx(rx_idx), .y(rx_y), .scale(rx_scale),
    .out_valid(llr_valid), .out_idx(llr_col), .llr(llr));

  jscc_decoder #(.Z(Z)) u_dec (
    .clk, .rst_n, .llr_valid, .llr_col, .llr, .start(rx_start), .max_iter,
    .busy(rx_busy), .done(dec_done), .iter_count(rx_iter_count), .s_hat, .c_hat(rx_c));

  uep_deinterleaver #(.N(N)) u_dil (
    .clk, .rst_n, .start(dec_done), .d(s_hat), .valid(rx_done), .s_out(rx_s));
endmodule
