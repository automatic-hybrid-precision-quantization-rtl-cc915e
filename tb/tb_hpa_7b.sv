// tb_hpa_7b: exhaustive check of PE 1 (z = xhat + d) over all 32 x 256
// input pairs against real-valued addition; z must equal the exact sum.
module tb_hpa_7b;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  x_t xhat; d_t d; z_t z;
  int checks = 0, failures = 0;

  hpa_7b dut (.xhat, .d, .z);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exp_z;
    for (int a = -16; a < 16; a++)
      for (int b = -128; b < 128; b++) begin
        xhat = x_t'(a); d = d_t'(b);
        #1;
        exp_z = fx(a, X_F) + fx(b, D_F);
        checks++;
        if (fx(z, Z_F) != exp_z) begin
          failures++;
          if (failures < 10) $display("FAIL xhat=%0d d=%0d z=%0d exp=%f", a, b, z, exp_z);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
