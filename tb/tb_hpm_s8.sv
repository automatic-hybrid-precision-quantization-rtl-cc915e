// tb_hpm_s8: exhaustive check of PE 2 (chi = z * 1/tau) over all 512 x 64
// operand pairs against the real product quantized to 1-6-1.
module tb_hpm_s8;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  z_t z; rt_t rtau; chi_t chi;
  int checks = 0, failures = 0;

  hpm_s8 dut (.z, .rtau, .chi);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e;
    for (int a = -256; a < 256; a++)
      for (int r = -32; r < 32; r++) begin
        z = z_t'(a); rtau = rt_t'(r);
        #1;
        e = ref_chi(fx(a, Z_F), fx(r, RT_F));
        checks++;
        if (fx(chi, CHI_F) != e) begin
          failures++;
          if (failures < 10) $display("FAIL z=%0d rt=%0d chi=%0d exp=%f", a, r, chi, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
