// tb_sc2cc_processor - SC2CC message (tanh rule over all V2C inputs) against
// the reference chain, plus the sign of the product of all input signs.
module tb_sc2cc_processor;
  import jscc_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 7;
  msg_t beta [D], msg;
  logic [D-1:0] valid;
  int checks = 0, failures = 0;
  sc2cc_processor #(.D(D)) dut (.beta, .valid, .msg);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int deg, acc, v [D], sgn;
      deg = $urandom_range(1, D);
      for (int j = 0; j < D; j++) begin
        v[j] = (t % 4 == 0) ? $urandom_range(0, 62) - 31 : $urandom_range(0, 30) - 15;
        if (v[j] == 0) v[j] = -1;
        beta[j]  = msg_t'(v[j]);
        valid[j] = (j < deg);
      end
      #1;
      acc = 31; sgn = 0;
      for (int j = 0; j < deg; j++) begin
        acc = bp_ref(acc, v[j]);
        sgn ^= (v[j] < 0);
      end
      checks++;
      if (int'(msg) != acc) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d msg=%0d ref=%0d", t, msg, acc);
      end
      if (msg != 0) begin
        checks++;
        if ((msg < 0) != sgn) begin failures++; $display("FAIL sign t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
