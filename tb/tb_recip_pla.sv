// tb_recip_pla: exhaustive check of the 1/tau approximation over all 32
// codes of sigma_n^2 (including the clipped ones <= 0) against
// 8.5 - 4.25*clip(tau, 1/8, 15/8) quantized to 1-4-1; the result must also
// fall as tau grows.
module tb_recip_pla;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  s2_t sigma2; rt_t rtau;
  int checks = 0, failures = 0;

  recip_pla dut (.sigma2, .rtau);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e, prev;
    prev = 100.0;
    for (int s = -16; s < 16; s++) begin
      sigma2 = s2_t'(s);
      #1;
      e = ref_rtau(fx(s, S2_F));
      checks++;
      if (fx(rtau, RT_F) != e) begin
        failures++;
        $display("FAIL sigma2=%0d rtau=%0d exp=%f", s, rtau, e);
      end
      if (s >= 1) begin
        checks++;
        if (fx(rtau, RT_F) >= prev) begin
          failures++;
          $display("FAIL not decreasing at sigma2=%0d", s);
        end
        prev = fx(rtau, RT_F);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
