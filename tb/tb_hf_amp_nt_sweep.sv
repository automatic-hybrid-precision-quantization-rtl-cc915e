// tb_hf_amp_nt_sweep: the detector with more users on the same array.
//
// Node compression (tau = sigma_n^2, residual d = b - G xhat) is meant to
// hold as the number of users N_t grows at N_r = 128. This test builds the
// detector for N_t = 16 (32 real lanes) and N_t = 32 (64 real lanes), with
// the per-variable formats left as chosen for N_t = 8, and runs a block of
// frames through each at the same noise level (nt_sweep_run does the
// driving and checking). Each run must be bit-exact against the reference
// model, keep the 25-cycle latency and one frame per clock, and beat
// slicing b directly; the symbol error rates of both sizes are printed.
// Only the detector with node compression exists in hardware, so the
// comparison without it is not part of this test.
module tb_hf_amp_nt_sweep;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done16, done32;
  int   c16, f16, e16, m16, t16;
  int   c32, f32, e32, m32, t32;

  nt_sweep_run #(.N(32), .NF(150), .S2(0.25)) u_nt16 (
    .clk, .rst_n, .done(done16), .checks(c16), .failures(f16),
    .sym_err(e16), .mf_err(m16), .sym_tot(t16));

  nt_sweep_run #(.N(64), .NF(150), .S2(0.25)) u_nt32 (
    .clk, .rst_n, .done(done32), .checks(c32), .failures(f32),
    .sym_err(e32), .mf_err(m32), .sym_tot(t32));

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, f16 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done16 && done32);
    $display("N_t=16: symbol errors %0d / %0d (slicing b directly: %0d)", e16, t16, m16);
    $display("N_t=32: symbol errors %0d / %0d (slicing b directly: %0d)", e32, t32, m32);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, f16 + f32);
    $finish;
  end
endmodule
