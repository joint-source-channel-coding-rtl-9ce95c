// jscc_decoder - joint source-channel QC-LDPC decoder (main controller).
//
// Holds the two layered decoders, source (20 layers, 40 x Z source bits) and
// channel (30 layers, 50 x Z code bits), and runs them side by side, one
// iteration at a time. The two graphs meet at the 20 x Z source checks, each
// of which is tied to one channel variable node carrying the compressed
// source bit b. Every iteration:
//   * the source side uses I^{cc_sc} (channel -> source) of the previous
//     iteration as an extra input of its check nodes, and produces I^{sc_cc}
//     (source -> channel) layer by layer;
//   * the channel side adds I^{sc_cc} of the previous iteration to the V2C
//     messages of the linked variable nodes;
//   * afterwards, I^{cc_sc} is refreshed from the channel APP memory
//     (I^{cc_sc} = L + sum C2V, which is what that memory holds) and the new
//     I^{sc_cc} words become the "last iteration" words.
// Decoding stops after max_iter iterations (no syndrome test, as published).
// Hard decisions: bit = 1 when the LLR is negative; for a linked channel node
// the LLR is APP + I^{sc_cc}.
//
// Sequence: write the 50 channel LLR words (llr_valid/llr_col/llr, lane i =
// bit i of the column block) while idle, then pulse start. The controller
// spends 40 cycles initialising (source APP := prior ln((1-p)/p), C2V cleared,
// I^{cc_sc} := channel LLRs of the linked columns, I^{sc_cc} := 0), runs
// max_iter iterations of max(source, channel) layer time + 21 cycles, and
// 50 cycles of hard decision, then pulses done with s_hat and c_hat valid
// until the next start. Source order in s_hat is that of the code (after the
// interleaver), s_hat[c*Z + i] = bit i of column block c.
// Running both sides concurrently with a one-iteration delay on the exchange
// messages follows the published description ("executed in parallel both on
// the source and channel sides", "last iteration" messages); the cycle-level
// sequence is this design's own.
module jscc_decoder
  import jscc_pkg::*;
  import jscc_code_pkg::*;
#(
  parameter int Z = Z_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  llr_valid,
  input  logic [7:0]            llr_col,
  input  msg_t                  llr [Z],
  input  logic                  start,
  input  logic [7:0]            max_iter,
  output logic                  busy,
  output logic                  done,
  output logic [7:0]            iter_count,
  output logic [SRC_COLS*Z-1:0] s_hat,
  output logic [CH_COLS*Z-1:0]  c_hat
);
  localparam int NLINK = SRC_ROWS;
  localparam int LW    = $clog2(NLINK);

  typedef enum logic [2:0] {D_IDLE, D_INIT, D_ITER, D_XCHG, D_HD, D_DONE} dstate_e;
  dstate_e st;

  logic [7:0] cnt;
  logic       src_start, ch_start, src_done, ch_done, src_busy, ch_busy;
  logic       src_fin, ch_fin;

  // exchange buffers
  msg_t cc2sc    [NLINK][Z];   // I^{cc_sc}, read by the source side
  msg_t sc2cc_nx [NLINK][Z];   // I^{sc_cc} being produced this iteration
  msg_t sc2cc    [NLINK][Z];   // I^{sc_cc} of the last iteration

  // source side ports
  logic       s_load_we;
  logic [7:0] s_load_col, s_rd_col, s_side_idx, s_xo_idx;
  app_t       s_load_data [Z];
  app_t       s_rd_data   [Z];
  msg_t       s_side_data [Z];
  logic       s_xo_valid;
  msg_t       s_xo_data   [Z];
  // channel side ports
  logic       c_load_we;
  logic [7:0] c_load_col, c_rd_col, c_side_idx, c_xo_idx;
  app_t       c_load_data [Z];
  app_t       c_rd_data   [Z];
  msg_t       c_side_data [Z];
  logic       c_xo_valid;
  msg_t       c_xo_data   [Z];

  always_comb begin
    s_load_we  = (st == D_INIT);
    s_load_col = cnt;
    s_rd_col   = cnt;
    c_load_we  = llr_valid && (st == D_IDLE || st == D_DONE);
    c_load_col = llr_col;
    c_rd_col   = (st == D_HD) ? cnt : 8'(LINK_COL0 + int'(cnt));
    for (int i = 0; i < Z; i++) begin
      s_load_data[i] = app_t'(SRC_PRIOR);
      c_load_data[i] = app_t'(llr[i]);
      s_side_data[i] = cc2sc[LW'(s_side_idx)][i];
      c_side_data[i] = sc2cc[LW'(c_side_idx)][i];
    end
  end

  assign src_start = ch_start;

  layer_decoder #(.SIDE(SIDE_SRC), .Z(Z)) u_src (
    .clk, .rst_n, .init(st == D_INIT), .start(src_start), .busy(src_busy), .done(src_done),
    .load_we(s_load_we), .load_col(s_load_col), .load_data(s_load_data),
    .rd_col(s_rd_col), .rd_data(s_rd_data),
    .side_idx(s_side_idx), .side_data(s_side_data),
    .xo_valid(s_xo_valid), .xo_idx(s_xo_idx), .xo_data(s_xo_data));

  layer_decoder #(.SIDE(SIDE_CH), .Z(Z)) u_ch (
    .clk, .rst_n, .init(st == D_INIT), .start(ch_start), .busy(ch_busy), .done(ch_done),
    .load_we(c_load_we), .load_col(c_load_col), .load_data(c_load_data),
    .rd_col(c_rd_col), .rd_data(c_rd_data),
    .side_idx(c_side_idx), .side_data(c_side_data),
    .xo_valid(c_xo_valid), .xo_idx(c_xo_idx), .xo_data(c_xo_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_IDLE;
      cnt        <= '0;
      ch_start   <= 1'b0;
      src_fin    <= 1'b0;
      ch_fin     <= 1'b0;
      done       <= 1'b0;
      iter_count <= '0;
    end else begin
      ch_start <= 1'b0;
      done     <= 1'b0;
      unique case (st)
        D_IDLE, D_DONE: begin
          if (start) begin
            st         <= D_INIT;
            cnt        <= '0;
            iter_count <= '0;
          end
        end
        D_INIT: begin
          if (int'(cnt) == SRC_COLS - 1) begin
            cnt <= '0;
            if (max_iter == 0) begin
              st <= D_HD;
            end else begin
              st       <= D_ITER;
              ch_start <= 1'b1;
              src_fin  <= 1'b0;
              ch_fin   <= 1'b0;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        D_ITER: begin
          if (src_done) src_fin <= 1'b1;
          if (ch_done)  ch_fin  <= 1'b1;
          if ((src_fin || src_done) && (ch_fin || ch_done) && !ch_start) begin
            st         <= D_XCHG;
            cnt        <= '0;
            iter_count <= iter_count + 1'b1;
          end
        end
        D_XCHG: begin
          if (int'(cnt) == NLINK - 1) begin
            cnt <= '0;
            if (iter_count == max_iter) begin
              st <= D_HD;
            end else begin
              st       <= D_ITER;
              ch_start <= 1'b1;
              src_fin  <= 1'b0;
              ch_fin   <= 1'b0;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        D_HD: begin
          if (int'(cnt) == CH_COLS - 1) begin
            st   <= D_DONE;
            done <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // exchange buffers and hard decisions (no reset: initialised in D_INIT)
  always_ff @(posedge clk) begin
    if (s_xo_valid)
      for (int i = 0; i < Z; i++) sc2cc_nx[LW'(s_xo_idx)][i] <= s_xo_data[i];
    if (st == D_INIT) begin
      if (int'(cnt) < NLINK)
        for (int i = 0; i < Z; i++) begin
          cc2sc[LW'(cnt)][i] <= sat_msg(int'(c_rd_data[i]));
          sc2cc[LW'(cnt)][i] <= msg_t'(0);
        end
    end
    if (st == D_XCHG) begin
      for (int i = 0; i < Z; i++) cc2sc[LW'(cnt)][i] <= sat_msg(int'(c_rd_data[i]));
      if (cnt == 0)
        for (int r = 0; r < NLINK; r++)
          for (int i = 0; i < Z; i++) sc2cc[r][i] <= sc2cc_nx[r][i];
    end
    if (st == D_HD) begin
      for (int i = 0; i < Z; i++) begin
        int l;
        l = int'(c_rd_data[i]);
        if (int'(cnt) >= LINK_COL0) l = l + int'(sc2cc[int'(cnt) - LINK_COL0][i]);
        c_hat[int'(cnt)*Z + i] <= (l < 0);
        if (int'(cnt) < SRC_COLS) s_hat[int'(cnt)*Z + i] <= s_rd_data[i][QA-1];
      end
    end
  end

  assign busy = (st != D_IDLE) && (st != D_DONE);

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
    llr_valid |-> !busy);
endmodule
