// tb_layer_decoder - one source-side and one channel-side layered decoder
// (Z = 16) against a reference model of the layered schedule written in the
// testbench. Random APP words and exchange messages are loaded, three
// iterations are run, and after each one every APP word and every SC2CC
// message must match the model bit for bit. The iteration time must be
// 1 + sum over layers of (2*deg + 1) cycles from start to done.
module tb_layer_decoder;
  import jscc_pkg::*;
  import jscc_code_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       init [2], start [2], busy [2], done [2], load_we [2], xo_valid [2];
  logic [7:0] load_col [2], rd_col [2], side_idx [2], xo_idx [2];
  app_t       load_data [2][Z], rd_data [2][Z];
  msg_t       side_data [2][Z], xo_data [2][Z];

  // exchange tables seen by the decoders (indexed by side_idx)
  int side_tbl [2][30][Z];
  always_comb
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < Z; i++) side_data[s][i] = msg_t'(side_tbl[s][side_idx[s] % 30][i]);

  layer_decoder #(.SIDE(SIDE_SRC), .Z(Z)) u_src (
    .clk, .rst_n, .init(init[0]), .start(start[0]), .busy(busy[0]), .done(done[0]),
    .load_we(load_we[0]), .load_col(load_col[0]), .load_data(load_data[0]),
    .rd_col(rd_col[0]), .rd_data(rd_data[0]), .side_idx(side_idx[0]), .side_data(side_data[0]),
    .xo_valid(xo_valid[0]), .xo_idx(xo_idx[0]), .xo_data(xo_data[0]));
  layer_decoder #(.SIDE(SIDE_CH), .Z(Z)) u_ch (
    .clk, .rst_n, .init(init[1]), .start(start[1]), .busy(busy[1]), .done(done[1]),
    .load_we(load_we[1]), .load_col(load_col[1]), .load_data(load_data[1]),
    .rd_col(rd_col[1]), .rd_data(rd_data[1]), .side_idx(side_idx[1]), .side_data(side_data[1]),
    .xo_valid(xo_valid[1]), .xo_idx(xo_idx[1]), .xo_data(xo_data[1]));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int app [2][50][Z];
  int c2v [2][30][7][Z];
  int xo_ref [30][Z];
  int xo_got [30][Z];
  int xo_cnt;

  always @(posedge clk)
    if (xo_valid[0]) begin
      for (int i = 0; i < Z; i++) xo_got[xo_idx[0]][i] = int'(xo_data[0][i]);
      xo_cnt++;
    end

  task automatic ref_iteration(input int s);
    int nl, row0;
    nl   = (s == 0) ? SRC_ROWS : CH_ROWS;
    row0 = (s == 0) ? 0 : CH_ROW0;
    for (int r = 0; r < nl; r++) begin
      int deg, diff [7][Z], beta [7][Z], f [8], b [8];
      deg = H_DEG[row0 + r];
      for (int e = 0; e < deg; e++) begin
        int col, sh;
        col = H_COL[row0 + r][e];
        sh  = H_SHIFT[row0 + r][e] % Z;
        for (int i = 0; i < Z; i++) begin
          int k, sv;
          k  = (i + sh) % Z;
          sv = (s == 1 && col >= LINK_COL0) ? side_tbl[1][col - LINK_COL0][k] : 0;
          diff[e][i] = app[s][col][k] - c2v[s][r][e][i];
          beta[e][i] = clamp(diff[e][i] + sv, 31);
        end
      end
      for (int i = 0; i < Z; i++) begin
        int x;
        f[0] = (s == 0) ? side_tbl[0][r][i] : 31;
        b[deg] = 31;
        for (int e = 0; e < deg; e++) f[e+1] = bp_ref(f[e], beta[e][i]);
        for (int e = deg - 1; e >= 0; e--) b[e] = bp_ref(b[e+1], beta[e][i]);
        for (int e = 0; e < deg; e++) c2v[s][r][e][i] = bp_ref(f[e], b[e+1]);
        x = 31;
        for (int e = 0; e < deg; e++) x = bp_ref(x, beta[e][i]);
        if (s == 0) xo_ref[r][i] = x;
      end
      for (int e = 0; e < deg; e++) begin
        int col, sh;
        col = H_COL[row0 + r][e];
        sh  = H_SHIFT[row0 + r][e] % Z;
        for (int i = 0; i < Z; i++) app[s][col][(i + sh) % Z] = clamp(diff[e][i] + c2v[s][r][e][i], 127);
      end
    end
  endtask

  initial begin
    for (int s = 0; s < 2; s++) begin
      init[s] = 0; start[s] = 0; load_we[s] = 0; load_col[s] = 0; rd_col[s] = 0;
    end
    xo_cnt = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // random initial APP and exchange messages
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < ((s == 0) ? SRC_COLS : CH_COLS); c++) begin
        @(negedge clk);
        load_we[s] = 1; load_col[s] = 8'(c);
        for (int i = 0; i < Z; i++) begin
          app[s][c][i] = $urandom_range(0, 62) - 31;
          load_data[s][i] = app_t'(app[s][c][i]);
        end
      end
      @(negedge clk);
      load_we[s] = 0;
      for (int r = 0; r < 30; r++)
        for (int i = 0; i < Z; i++) side_tbl[s][r][i] = $urandom_range(0, 40) - 20;
      for (int r = 0; r < 30; r++)
        for (int e = 0; e < 7; e++)
          for (int i = 0; i < Z; i++) c2v[s][r][e][i] = 0;
    end
    @(negedge clk);
    init[0] = 1; init[1] = 1;
    @(negedge clk);
    init[0] = 0; init[1] = 0;

    for (int it = 0; it < 3; it++) begin
      for (int s = 0; s < 2; s++) begin
        int cyc, expc, nl, row0, ncol;
        nl   = (s == 0) ? SRC_ROWS : CH_ROWS;
        row0 = (s == 0) ? 0 : CH_ROW0;
        ncol = (s == 0) ? SRC_COLS : CH_COLS;
        expc = 0;
        expc = 1;   // done is registered after the last write
        for (int r = 0; r < nl; r++) expc += 2 * H_DEG[row0 + r] + 1;
        ref_iteration(s);
        @(negedge clk);
        start[s] = 1;
        @(negedge clk);
        start[s] = 0;
        cyc = 1;
        while (!done[s]) begin
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (cyc != expc) begin failures++; $display("FAIL side %0d iteration time %0d expected %0d", s, cyc, expc); end
        for (int c = 0; c < ncol; c++) begin
          rd_col[s] = 8'(c);
          #1;
          for (int i = 0; i < Z; i++) begin
            checks++;
            if (int'(rd_data[s][i]) != app[s][c][i]) begin
              failures++;
              if (failures < 10) $display("FAIL side %0d it %0d APP[%0d][%0d] = %0d ref %0d", s, it, c, i, rd_data[s][i], app[s][c][i]);
            end
          end
        end
        if (s == 0)
          for (int r = 0; r < SRC_ROWS; r++)
            for (int i = 0; i < Z; i++) begin
              checks++;
              if (xo_got[r][i] != xo_ref[r][i]) begin
                failures++;
                if (failures < 10) $display("FAIL it %0d SC2CC[%0d][%0d] = %0d ref %0d", it, r, i, xo_got[r][i], xo_ref[r][i]);
              end
            end
      end
    end
    checks++;
    if (xo_cnt != 3 * SRC_ROWS) begin failures++; $display("FAIL %0d SC2CC words, expected %0d", xo_cnt, 3 * SRC_ROWS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
