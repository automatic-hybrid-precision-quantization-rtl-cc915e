// tb_pic: PIC of one iteration (16 Mean-Sel lanes, 16 MV-Mul rows). Random
// valid probability pairs and flags arrive every cycle with a fixed random
// Gram matrix; b of each frame is applied three cycles after its CPE
// outputs. xhat^(l+1) and d^(l+1) must match the reference after 4 edges.
module tb_pic;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  localparam int NV = 200;
  logic clk = 0;
  rho_t rho1 [16]; rho_t rho2 [16]; logic [2:0] f123 [16];
  g_t g [16][16]; b_t b [16]; x_t xhat [16]; d_t d [16];
  int checks = 0, failures = 0;

  pic dut (.clk, .rho1, .rho2, .f123, .g, .b, .xhat, .d);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ex [NV][16];
  real ed [NV][16];
  b_t  bv [NV][16];

  initial begin
    logic [2:0] codes[6] = '{3'b111, 3'b110, 3'b010, 3'b000, 3'b100, 3'b101};
    real gr [16][16];
    real xv [16];
    int m1, m2, r;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        g[i][j]  = (i == j) ? g_t'(128) : g_t'($signed($urandom_range(30)) - 15);
        gr[i][j] = fx(g[i][j], G_F);
      end
    for (int t = 0; t < NV + 4; t++) begin
      @(negedge clk);
      if (t >= 4)
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (fx(xhat[i], X_F) != ex[t-4][i] || fx(d[i], D_F) != ed[t-4][i]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d row %0d x=%f d=%f exp %f %f", t - 4, i,
                fx(xhat[i], X_F), fx(d[i], D_F), ex[t-4][i], ed[t-4][i]);
          end
        end
      if (t < NV) begin
        for (int i = 0; i < 16; i++) begin
          f123[i] = codes[$urandom_range(5)];
          r = $urandom_range(4, 8);
          rho1[i] = rho_t'(r); rho2[i] = rho_t'(8 - r);
          ref_pair_of_flags(f123[i], m1, m2);
          xv[i] = ref_mean(m1, m2, fx(r, RHO_F), fx(8 - r, RHO_F));
          ex[t][i] = xv[i];
          bv[t][i] = b_t'($urandom_range(1023));
        end
        for (int i = 0; i < 16; i++) ed[t][i] = ref_resid(fx(bv[t][i], B_F), gr[i], xv);
      end
      if (t >= 3 && t - 3 < NV) b = bv[t-3];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
