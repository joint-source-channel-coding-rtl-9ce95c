// jscc_encoder - QC-LDPC joint source-channel encoder (rate 6400 -> 8000).
//
// Two steps, as published:
//   1. source compression  b = H_s * s           (40 x Z bits -> 20 x Z bits)
//   2. parity generation   H_1 p = H_2 b         (20 x Z bits -> 30 x Z bits)
// and the codeword is c = [p b] (50 x Z bits), column block k of c at
// c[k*Z +: Z]. All arithmetic is XOR of rotated Z-bit words: a circulant with
// shift sh contributes x[(i + sh) mod Z] to check i of its row block.
// Step 2 relies on the property of this design's base matrix that H_1 (the
// first 30 channel columns) is lower triangular with identity circulants on
// its diagonal: parity block r is the XOR of the other circulants of channel
// row r, whose parity columns are all < r and therefore already known. This
// replaces the dense H_1^-1 of the published equation by back-substitution.
// One circulant is processed per clock: 140 cycles for step 1 and
// 138 - 30 + 30 = 138 cycles for step 2 (one per non-zero block of H_c).
// start (idle) captures s; done pulses when c is valid, c holds until the
// next start.
module jscc_encoder
  import jscc_code_pkg::*;
#(
  parameter int Z = 160
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [SRC_COLS*Z-1:0] s,
  output logic                  busy,
  output logic                  done,
  output logic [CH_COLS*Z-1:0]  c
);
  typedef enum logic [1:0] {E_IDLE, E_SRC, E_PAR} estate_e;
  estate_e st;

  logic [SRC_COLS*Z-1:0] s_r;
  logic [7:0]            row;
  logic [2:0]            e;
  logic [Z-1:0]          acc;

  int cur_row, cur_deg, cur_col, cur_sh;
  logic [Z-1:0] x, x_rot, acc_nx;
  logic         skip;

  always_comb begin
    cur_row = (st == E_PAR) ? CH_ROW0 + int'(row) : int'(row);
    cur_deg = H_DEG[cur_row];
    cur_col = H_COL[cur_row][int'(e)];
    cur_sh  = H_SHIFT[cur_row][int'(e)] % Z;
    if (st == E_PAR) x = c[cur_col*Z +: Z];
    else             x = s_r[cur_col*Z +: Z];
    // the diagonal block of H_1 holds the unknown itself
    skip = (st == E_PAR) && (cur_col == int'(row));
    for (int i = 0; i < Z; i++) begin
      int k;
      k = i + cur_sh;
      if (k >= Z) k = k - Z;
      x_rot[i] = x[k];
    end
    acc_nx = skip ? acc : (acc ^ x_rot);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= E_IDLE;
      row  <= '0;
      e    <= '0;
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        E_IDLE: begin
          if (start) begin
            st  <= E_SRC;
            row <= '0;
            e   <= '0;
            acc <= '0;
          end
        end
        E_SRC, E_PAR: begin
          if (int'(e) == cur_deg - 1) begin
            e   <= '0;
            acc <= '0;
            if (st == E_SRC && int'(row) == SRC_ROWS - 1) begin
              st  <= E_PAR;
              row <= '0;
            end else if (st == E_PAR && int'(row) == CH_ROWS - 1) begin
              st   <= E_IDLE;
              done <= 1'b1;
            end else begin
              row <= row + 1'b1;
            end
          end else begin
            e   <= e + 1'b1;
            acc <= acc_nx;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // data registers
  always_ff @(posedge clk) begin
    if (st == E_IDLE && start) s_r <= s;
    if (int'(e) == cur_deg - 1) begin
      // b occupies channel columns LINK_COL0.., p columns 0..CH_ROWS-1
      if (st == E_SRC) c[(LINK_COL0 + int'(row))*Z +: Z] <= acc_nx;
      if (st == E_PAR) c[int'(row)*Z +: Z]               <= acc_nx;
    end
  end

  assign busy = (st != E_IDLE);

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);
endmodule
