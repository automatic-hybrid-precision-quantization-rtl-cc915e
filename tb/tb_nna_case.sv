// tb_nna_case: exhaustive check of PE 3 over all 512 values of z: the
// flags must name the nearest and second-nearest constellation points and
// the sign of a_omega, as derived from real-valued interval comparisons.
module tb_nna_case;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  z_t z; nna_flags_t flags;
  int checks = 0, failures = 0;

  nna_case dut (.z, .flags);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] e;
    for (int a = -256; a < 256; a++) begin
      z = z_t'(a);
      #1;
      e = ref_flags(fx(a, Z_F));
      checks++;
      if (5'(flags) != e) begin
        failures++;
        if (failures < 10) $display("FAIL z=%f flags=%b exp=%b", fx(a, Z_F), 5'(flags), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
