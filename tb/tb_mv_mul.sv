// tb_mv_mul: one MV-Mul row with random Gram rows, estimate vectors and b,
// a new vector every cycle. d = b - sum_j g_ij xhat_j (with the detector's
// formats) must appear three clock edges after xhat/g, with b supplied two
// edges after them (when the vector is in Pipe-Reg-3).
module tb_mv_mul;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  localparam int NV = 300;
  logic clk = 0;
  x_t xhat [16]; g_t g_row [16]; b_t b; d_t d;
  int checks = 0, failures = 0;

  mv_mul dut (.clk, .xhat, .g_row, .b, .d);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  b_t  bv  [NV];
  real exp_d [NV];

  initial begin
    real gr[16], xv[16];
    for (int n = 0; n < NV; n++) bv[n] = b_t'($urandom_range(1023));
    for (int t = 0; t < NV + 3; t++) begin
      @(negedge clk);
      // output of vector t-3
      if (t >= 3) begin
        checks++;
        if (fx(d, D_F) != exp_d[t-3]) begin
          failures++;
          if (failures < 10) $display("FAIL vec %0d d=%f exp=%f", t - 3, fx(d, D_F), exp_d[t-3]);
        end
      end
      if (t < NV) begin
        for (int j = 0; j < 16; j++) begin
          // mostly realistic values, sometimes full-range to hit saturation
          if (t % 4 == 0) g_row[j] = g_t'($urandom_range(1023));
          else            g_row[j] = g_t'($signed($urandom_range(40)) - 20);
          xhat[j] = x_t'($signed($urandom_range(24)) - 12);
          gr[j] = fx(g_row[j], G_F); xv[j] = fx(xhat[j], X_F);
        end
        exp_d[t] = ref_resid(fx(bv[t], B_F), gr, xv);
      end
      if (t >= 2 && t - 2 < NV) b = bv[t-2];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
