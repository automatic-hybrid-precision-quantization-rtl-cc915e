// tb_cpe: CPE of one iteration, 16 lanes, random frames back to back (one
// per cycle) and a different 1/tau per run. Probabilities and flags of
// every lane must match the reference two clock edges after the frame.
module tb_cpe;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
  localparam int NV = 400;
  logic clk = 0;
  x_t xhat [16]; d_t d [16]; rt_t rtau;
  rho_t rho1 [16]; rho_t rho2 [16]; logic [2:0] f123 [16];
  int checks = 0, failures = 0;
  int seen_f [8];

  cpe dut (.clk, .xhat, .d, .rtau, .rho1, .rho2, .f123);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real        e1 [NV][16];
  real        e2 [NV][16];
  logic [2:0] ef [NV][16];

  initial begin
    real z, chi, rt;
    logic [4:0] fl;
    rtau = rt_t'(6);   // 3.0
    rt = fx(rtau, RT_F);
    for (int t = 0; t < NV + 2; t++) begin
      @(negedge clk);
      if (t >= 2)
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (fx(rho1[i], RHO_F) != e1[t-2][i] || fx(rho2[i], RHO_F) != e2[t-2][i]
              || f123[i] != ef[t-2][i]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d lane %0d rho=%f,%f f=%b exp %f,%f %b", t - 2, i,
                fx(rho1[i], RHO_F), fx(rho2[i], RHO_F), f123[i], e1[t-2][i], e2[t-2][i], ef[t-2][i]);
          end
        end
      if (t < NV)
        for (int i = 0; i < 16; i++) begin
          xhat[i] = x_t'($signed($urandom_range(24)) - 12);
          d[i]    = d_t'($urandom_range(255));
          z   = fx(xhat[i], X_F) + fx(d[i], D_F);
          chi = ref_chi(z, rt);
          fl  = ref_flags(z);
          ref_rho(fl[1:0], chi, rt, e1[t][i], e2[t][i]);
          ef[t][i] = fl[4:2];
          seen_f[fl[4:2]]++;
        end
    end
    foreach (seen_f[k]) if (k != 1 && k != 3) begin
      checks++;
      if (seen_f[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
