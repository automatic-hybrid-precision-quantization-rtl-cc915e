// tb_hpa_abs: exhaustive check of PE 4 over the three {F4,F5} codes, all
// 256 values of chi and all positive 1/tau: rho(m1), rho(m2) must equal the
// clipped linear approximation of 1/(1+exp(Delta~)) computed in reals.
module tb_hpa_abs;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  aw_flag_e f45; chi_t chi; rt_t rtau; rho_t rho1, rho2;
  int checks = 0, failures = 0, clipped = 0;

  hpa_abs dut (.f45, .chi, .rtau, .rho1, .rho2);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e1, e2;
    aw_flag_e codes[3] = '{AW_NEG, AW_ZERO, AW_POS};
    foreach (codes[k])
      for (int c = -128; c < 128; c++)
        for (int r = 1; r < 32; r++) begin
          f45 = codes[k]; chi = chi_t'(c); rtau = rt_t'(r);
          #1;
          ref_rho(f45, fx(c, CHI_F), fx(r, RT_F), e1, e2);
          if (e1 == 1.0) clipped++;
          checks++;
          if (fx(rho1, RHO_F) != e1 || fx(rho2, RHO_F) != e2) begin
            failures++;
            if (failures < 10) $display("FAIL f45=%b chi=%0d rt=%0d rho=%0d,%0d exp=%f,%f",
                                         f45, c, r, rho1, rho2, e1, e2);
          end
        end
    checks++;
    if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
