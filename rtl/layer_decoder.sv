// layer_decoder - layered QC-LDPC decoder of one side (source or channel).
//
// One instance decodes the source graph (SIDE = SIDE_SRC, 20 layers over 40
// column blocks) and one the channel graph (SIDE = SIDE_CH, 30 layers over 50
// column blocks); the base matrix comes from jscc_code_pkg. A layer is one
// base-matrix row, i.e. Z check nodes, and all Z are processed in parallel
// (one decoding group per layer, G = 1, as published). Per layer:
//   read phase  (deg cycles): for circulant e, read the APP word of its column
//               and the C2V word of the circulant, rotate both to check order
//               by the shift, and run Z VNPs -> beta[e], diff[e] registers;
//   check phase (1 cycle):    Z CNPs turn the betas into new C2V messages; on
//               the source side Z SC2CC processors also emit I^{sc_cc} of the
//               layer on xo_* ;
//   write phase (deg cycles): APP = diff + alpha_new, rotated back and written,
//               and the C2V word stored.
// A layer of degree deg takes 2*deg+1 cycles; start runs one full iteration
// over all layers, and the one-cycle done pulse comes 1 + sum(2*deg+1) cycles
// after the start cycle (301 cycles for the source side, 307 for the channel
// side at the default code).
//
// Exchange messages: on the source side the check processors receive
// side_data = I^{cc_sc} of the current layer (side_idx = layer, lane i of the
// word belongs to check i). On the channel side, a circulant whose column is
// one of the linked columns (>= LINK_COL0) adds side_data = I^{sc_cc} of
// that column (side_idx = column - LINK_COL0) to the V2C messages; the word
// is rotated with the circulant like the APP word.
//
// C2V memory entries carry a valid bit cleared by init, so the first
// iteration reads zero C2V messages without clearing the memory. The APP
// memory is written through load_* and read through rd_* while the decoder
// is idle.
module layer_decoder
  import jscc_pkg::*;
  import jscc_code_pkg::*;
#(
  parameter side_e SIDE = SIDE_SRC,
  parameter int    Z    = Z_DEF,
  parameter int    NL   = (SIDE == SIDE_SRC) ? SRC_ROWS : CH_ROWS,
  parameter int    NC   = (SIDE == SIDE_SRC) ? SRC_COLS : CH_COLS,
  parameter int    ROW0 = (SIDE == SIDE_SRC) ? 0 : CH_ROW0,
  parameter int    D    = (SIDE == SIDE_SRC) ? SRC_DMAX : CH_DMAX
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init,
  input  logic       start,
  output logic       busy,
  output logic       done,
  // APP load / read port (idle only)
  input  logic       load_we,
  input  logic [7:0] load_col,
  input  app_t       load_data [Z],
  input  logic [7:0] rd_col,
  output app_t       rd_data   [Z],
  // exchange message in (I^{cc_sc} per layer, or I^{sc_cc} per linked column)
  output logic [7:0] side_idx,
  input  msg_t       side_data [Z],
  // exchange message out (source side: I^{sc_cc} of the layer just processed)
  output logic       xo_valid,
  output logic [7:0] xo_idx,
  output msg_t       xo_data   [Z]
);
  localparam int AW_APP = (NC > 1) ? $clog2(NC) : 1;
  localparam int NSLOT  = NL * D;
  localparam int AW_C2V = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int EW     = (D > 1) ? $clog2(D) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RD, S_CN, S_WR} state_e;
  state_e state;

  logic [7:0]     layer;
  logic [EW-1:0]  e;
  logic [NSLOT-1:0] c2v_vld;

  // message registers of the layer in flight
  msg_t  beta_r  [D][Z];
  diff_t diff_r  [D][Z];
  msg_t  alpha_r [D][Z];

  // ---------------------------------------------------------------- tables
  int cur_deg, cur_col, cur_sh;
  always_comb begin
    cur_deg = H_DEG[ROW0 + int'(layer)];
    cur_col = H_COL[ROW0 + int'(layer)][int'(e)];
    cur_sh  = H_SHIFT[ROW0 + int'(layer)][int'(e)] % Z;
  end

  logic last_e;
  assign last_e = (int'(e) == cur_deg - 1);
  logic [AW_C2V-1:0] slot;
  assign slot = AW_C2V'(int'(layer) * D + int'(e));

  // ---------------------------------------------------------------- memories
  logic [Z*QA-1:0] app_rdata, app_wdata;
  logic [Z*Q-1:0]  c2v_rdata, c2v_wdata;
  logic            app_we;
  logic [AW_APP-1:0] app_waddr, app_raddr;

  always_comb begin
    app_raddr = (state == S_IDLE) ? AW_APP'(rd_col) : AW_APP'(cur_col);
    if (state == S_WR) begin
      app_we    = 1'b1;
      app_waddr = AW_APP'(cur_col);
    end else begin
      app_we    = load_we && (state == S_IDLE);
      app_waddr = AW_APP'(load_col);
    end
  end

  word_ram #(.W(Z*QA), .DEPTH(NC)) u_app (
    .clk, .we(app_we), .waddr(app_waddr),
    .wdata(app_wdata), .raddr(app_raddr), .rdata(app_rdata));

  word_ram #(.W(Z*Q), .DEPTH(NSLOT)) u_c2v (
    .clk, .we(state == S_WR), .waddr(slot),
    .wdata(c2v_wdata), .raddr(slot), .rdata(c2v_rdata));

  // ---------------------------------------------------------------- lanes
  app_t  app_lane [Z];
  app_t  app_rot  [Z];
  msg_t  c2v_old  [Z];
  msg_t  vside    [Z];
  msg_t  cside    [Z];
  diff_t vdiff    [Z];
  msg_t  vbeta    [Z];
  app_t  vapp_new [Z];
  msg_t  cn_alpha [D][Z];
  msg_t  x_msg    [Z];
  logic [D-1:0] vmask;
  logic  side_on;

  assign side_idx = (SIDE == SIDE_SRC) ? layer
                  : ((cur_col >= LINK_COL0) ? 8'(cur_col - LINK_COL0) : 8'd0);
  assign side_on  = (SIDE == SIDE_CH) && (cur_col >= LINK_COL0);

  always_comb begin
    for (int j = 0; j < D; j++) vmask[j] = (j < cur_deg);
    for (int i = 0; i < Z; i++) begin
      int k;
      k = i + cur_sh;
      if (k >= Z) k = k - Z;
      app_lane[i] = app_t'(app_rdata[i*QA +: QA]);
      app_rot[i]  = app_t'(app_rdata[k*QA +: QA]);
      c2v_old[i]  = c2v_vld[slot] ? msg_t'(c2v_rdata[i*Q +: Q]) : msg_t'(0);
      vside[i]    = side_on ? side_data[k] : msg_t'(0);
      cside[i]    = (SIDE == SIDE_SRC) ? side_data[i] : msg_t'(QMAX);
      rd_data[i]  = app_lane[i];
    end
    // write data: rotate the updated APP word back to column order
    app_wdata = '0;
    c2v_wdata = '0;
    for (int i = 0; i < Z; i++) begin
      int k;
      k = i + cur_sh;
      if (k >= Z) k = k - Z;
      if (state == S_WR) app_wdata[k*QA +: QA] = vapp_new[i];
      else               app_wdata[i*QA +: QA] = load_data[i];
      c2v_wdata[i*Q +: Q] = alpha_r[e][i];
    end
  end

  for (genvar i = 0; i < Z; i++) begin : g_lane
    msg_t lb [D];
    msg_t la [D];
    for (genvar j = 0; j < D; j++) begin : g_in
      assign lb[j]          = beta_r[j][i];
      assign cn_alpha[j][i] = la[j];
    end

    vn_processor u_vnp (
      .app(app_rot[i]), .alpha_old(c2v_old[i]), .side(vside[i]),
      .diff(vdiff[i]), .beta(vbeta[i]),
      .diff_in(diff_r[e][i]), .alpha_new(alpha_r[e][i]), .app_new(vapp_new[i]));

    cn_processor #(.D(D)) u_cnp (
      .beta(lb), .valid(vmask), .side(cside[i]), .alpha(la));

    if (SIDE == SIDE_SRC) begin : g_x
      sc2cc_processor #(.D(D)) u_sc2cc (.beta(lb), .valid(vmask), .msg(x_msg[i]));
    end else begin : g_nox
      assign x_msg[i] = msg_t'(0);
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      layer    <= '0;
      e        <= '0;
      done     <= 1'b0;
      xo_valid <= 1'b0;
      xo_idx   <= '0;
      c2v_vld  <= '0;
    end else begin
      done     <= 1'b0;
      xo_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (init) c2v_vld <= '0;
          if (start) begin
            layer <= '0;
            e     <= '0;
            state <= S_RD;
          end
        end
        S_RD: begin
          if (last_e) begin
            e     <= '0;
            state <= S_CN;
          end else begin
            e <= e + 1'b1;
          end
        end
        S_CN: begin
          xo_valid <= (SIDE == SIDE_SRC);
          xo_idx   <= layer;
          state    <= S_WR;
        end
        S_WR: begin
          c2v_vld[slot] <= 1'b1;
          if (last_e) begin
            e <= '0;
            if (int'(layer) == NL - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              layer <= layer + 1'b1;
              state <= S_RD;
            end
          end else begin
            e <= e + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // datapath registers (no reset: written before they are read)
  always_ff @(posedge clk) begin
    if (state == S_RD) begin
      for (int i = 0; i < Z; i++) begin
        beta_r[e][i] <= vbeta[i];
        diff_r[e][i] <= vdiff[i];
      end
    end
    if (state == S_CN) begin
      for (int j = 0; j < D; j++)
        for (int i = 0; i < Z; i++)
          alpha_r[j][i] <= cn_alpha[j][i];
      for (int i = 0; i < Z; i++) xo_data[i] <= x_msg[i];
    end
  end

  assign busy = (state != S_IDLE);

  // a new iteration may only be started when the previous one has finished
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);
endmodule
