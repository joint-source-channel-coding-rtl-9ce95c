// tb_cn_processor - check-node processor against a reference forward/backward
// tanh-rule computation, with random degrees, side inputs and saturation.
// Also checks the sign rule (product of the other signs) independently.
module tb_cn_processor;
  import jscc_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 7;
  msg_t beta [D], alpha [D], side;
  logic [D-1:0] valid;
  int checks = 0, failures = 0;
  cn_processor #(.D(D)) dut (.beta, .valid, .side, .alpha);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int deg, f [D+1], bw [D+1], v [D], sd;
      deg = $urandom_range(2, D);
      sd  = (t % 3 == 0) ? 31 : $urandom_range(0, 62) - 31;
      for (int j = 0; j < D; j++) begin
        v[j] = (t % 5 == 0) ? $urandom_range(0, 62) - 31 : $urandom_range(0, 24) - 12;
        if (v[j] == 0) v[j] = 1;
        beta[j]  = msg_t'(v[j]);
        valid[j] = (j < deg);
      end
      side = msg_t'(sd);
      #1;
      f[0] = sd; bw[D] = 31;
      for (int j = 0; j < D; j++) f[j+1] = bp_ref(f[j], valid[j] ? v[j] : 31);
      for (int j = D - 1; j >= 0; j--) bw[j] = bp_ref(bw[j+1], valid[j] ? v[j] : 31);
      for (int j = 0; j < deg; j++) begin
        int r, sgn;
        r = bp_ref(f[j], bw[j+1]);
        checks++;
        if (int'(alpha[j]) != r) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d j=%0d alpha=%0d ref=%0d", t, j, alpha[j], r);
        end
        sgn = (sd < 0);
        for (int k = 0; k < deg; k++) if (k != j) sgn ^= (v[k] < 0);
        if (alpha[j] != 0) begin
          checks++;
          if ((alpha[j] < 0) != sgn) begin failures++; $display("FAIL sign t=%0d j=%0d", t, j); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
