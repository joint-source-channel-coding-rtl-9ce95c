// tb_vn_processor - random and corner tests of the layered VNP arithmetic.
module tb_vn_processor;
  import jscc_pkg::*;
  import tb_ref_pkg::*;
  app_t a; msg_t ao, sd, an, bt; diff_t df, di; app_t anew;
  int checks = 0, failures = 0;
  vn_processor dut (.app(a), .alpha_old(ao), .side(sd), .diff(df), .beta(bt),
                    .diff_in(di), .alpha_new(an), .app_new(anew));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int va, vo, vs, vd, vn);
    a = app_t'(va); ao = msg_t'(vo); sd = msg_t'(vs); di = diff_t'(vd); an = msg_t'(vn);
    #1;
    checks += 3;
    if (int'(df) != va - vo) begin failures++; $display("FAIL diff %0d %0d -> %0d", va, vo, df); end
    if (int'(bt) != clamp(va - vo + vs, 31)) begin failures++; $display("FAIL beta %0d %0d %0d -> %0d", va, vo, vs, bt); end
    if (int'(anew) != clamp(vd + vn, 127)) begin failures++; $display("FAIL app %0d %0d -> %0d", vd, vn, anew); end
  endtask

  initial begin
    one(127, -31, 31, 158, 31);
    one(-127, 31, -31, -158, -31);
    one(0, 0, 0, 0, 0);
    for (int k = 0; k < 5000; k++)
      one($urandom_range(0, 254) - 127, $urandom_range(0, 62) - 31, $urandom_range(0, 62) - 31,
          $urandom_range(0, 316) - 158, $urandom_range(0, 62) - 31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
