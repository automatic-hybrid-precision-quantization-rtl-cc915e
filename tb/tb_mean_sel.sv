// tb_mean_sel: Mean-Sel lane. For every flag pattern of a valid interval
// and every probability pair rho(m1) + rho(m2) = 1 on the 1/8 grid, the
// registered output must equal omega_m1*rho(m1) + omega_m2*rho(m2)
// quantized to 1-2-2, one clock after the inputs; inputs change every cycle.
module tb_mean_sel;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  logic clk = 0;
  rho_t rho1, rho2; logic [2:0] f123; x_t xhat;
  int checks = 0, failures = 0;

  mean_sel dut (.clk, .rho1, .rho2, .f123, .xhat);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] codes[6] = '{3'b111, 3'b110, 3'b010, 3'b000, 3'b100, 3'b101};
    real e, e_prev;
    int m1, m2;
    bit have_prev = 0;
    foreach (codes[k])
      for (int r = 0; r <= 8; r++) begin
        @(negedge clk);
        if (have_prev) begin
          checks++;
          if (fx(xhat, X_F) != e_prev) begin
            failures++;
            $display("FAIL out=%f exp=%f", fx(xhat, X_F), e_prev);
          end
        end
        f123 = codes[k]; rho1 = rho_t'(r); rho2 = rho_t'(8 - r);
        ref_pair_of_flags(codes[k], m1, m2);
        e_prev = ref_mean(m1, m2, fx(r, RHO_F), fx(8 - r, RHO_F));
        have_prev = 1;
      end
    @(negedge clk);
    checks++;
    if (fx(xhat, X_F) != e_prev) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
