// tb_boxplus_lut - exhaustive test of the two-input tanh LUT.
// All 63 x 63 input pairs: bit-exact against the reference rule, and within
// one LSB of the exact real-valued 2 atanh(tanh(a/2) tanh(b/2)) when neither
// input is saturated.
module tb_boxplus_lut;
  import jscc_pkg::*;
  import tb_ref_pkg::*;
  msg_t a, b, y;
  int checks = 0, failures = 0;
  boxplus_lut dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -31; ia <= 31; ia++)
      for (int ib = -31; ib <= 31; ib++) begin
        a = msg_t'(ia); b = msg_t'(ib);
        #1;
        checks++;
        if (int'(y) != bp_ref(ia, ib)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d y=%0d ref=%0d", ia, ib, y, bp_ref(ia, ib));
        end
        if (ia > -31 && ia < 31 && ib > -31 && ib < 31) begin
          real ex;
          ex = 4.0 * bp_exact(real'(ia) / 4.0, real'(ib) / 4.0);
          checks++;
          if (real'(y) - ex > 1.01 || ex - real'(y) > 1.01) begin
            failures++;
            if (failures < 10) $display("FAIL exact a=%0d b=%0d y=%0d exact=%f", ia, ib, y, ex);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
