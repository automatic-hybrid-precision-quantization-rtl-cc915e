// tb_ap_mem: auxiliary-parameter bank. After reset sigma_n^2 = 1.0 and
// 1/tau the PLA value for 1.0; every written sigma_n^2 must be held and
// give the PLA value of 1/tau after the clock edge, and we = 0 must hold.
module tb_ap_mem;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  s2_t sigma2_in, sigma2; rt_t rtau;
  int checks = 0, failures = 0;

  ap_mem dut (.clk, .rst_n, .we, .sigma2_in, .sigma2, .rtau);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_val(real s);
    checks++;
    if (fx(sigma2, S2_F) != s || fx(rtau, RT_F) != ref_rtau(s)) begin
      failures++;
      $display("FAIL sigma2=%f rtau=%f exp %f %f", fx(sigma2, S2_F), fx(rtau, RT_F), s, ref_rtau(s));
    end
  endtask

  initial begin
    real last;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_val(1.0);
    for (int s = 1; s < 16; s++) begin
      sigma2_in = s2_t'(s); we = 1;
      @(negedge clk);
      we = 0;
      expect_val(fx(s, S2_F));
      last = fx(s, S2_F);
      sigma2_in = s2_t'(3);
      @(negedge clk);
      expect_val(last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
