// hpm_s8: PE 2 of the CPE ("chi mul", HPM-S8), chi_i = z_i * (1/tau).
//
// Operands z (1-4-4, 9 bits) and 1/tau (1-4-1, 6 bits); the exact 15-bit
// product has 5 fractional bits and is rounded (ties up) and clipped to the
// 8-bit 1-6-1 format of chi. Formats follow the paper; the rounding rule is
// this design's choice. Purely combinational.
module hpm_s8
  import hfamp_pkg::*;
(
  input  z_t   z,      // 1-4-4
  input  rt_t  rtau,   // 1/tau, 1-4-1
  output chi_t chi     // 1-6-1
);
  logic signed [Z_W+RT_W-1:0] prod;
  logic signed [31:0]         q;

  assign prod = z * rtau;
  assign q    = rnd_sat(32'(prod), Z_F + RT_F - CHI_F, CHI_W);
  assign chi  = chi_t'(q);
endmodule
