// cpe: constellation processing element of one AMP iteration (CPE-l).
//
// For each of the N real symbols of a frame it computes, from the previous
// estimate xhat_i and residual d_i, the probabilities of the two
// constellation points nearest to z_i = xhat_i + d_i, and the flags that
// name those points. Per lane:
//   PE 1 hpa_7b   z = xhat + d
//   PE 2 hpm_s8   chi = z / tau  (times the precomputed 1/tau)
//   PE 3 nna_case flags {F1..F5} from the integral part of z
//   Pipe-Reg-1    (CPE-l:R-1) flags, chi
//   PE 4 hpa_abs  rho(m1), rho(m2)
//   Pipe-Reg-2    (CPE-l:R-2) rho(m1), rho(m2), {F1,F2,F3}
// Timing: a frame presented on xhat/d in cycle t appears on the outputs
// after two rising edges; a new frame may enter every cycle. rtau is a
// per-block constant and is not pipelined. The structure and the two
// register groups follow the paper; carrying {F1,F2,F3} in Pipe-Reg-2 is
// this design's addition (the following Mean-Sel needs them). Registers
// have no reset: validity is tracked outside by the control unit.
module cpe
  import hfamp_pkg::*;
#(
  parameter int N = N2
) (
  input  logic          clk,
  input  x_t            xhat [N],
  input  d_t            d    [N],
  input  rt_t           rtau,
  output rho_t          rho1 [N],
  output rho_t          rho2 [N],
  output logic [2:0]    f123 [N]
);
  for (genvar i = 0; i < N; i++) begin : g_lane
    z_t         z;
    chi_t       chi, chi_r1;
    nna_flags_t fl, fl_r1;
    rho_t       r1, r2;

    hpa_7b   u_pe1 (.xhat(xhat[i]), .d(d[i]), .z(z));
    hpm_s8   u_pe2 (.z(z), .rtau(rtau), .chi(chi));
    nna_case u_pe3 (.z(z), .flags(fl));

    always_ff @(posedge clk) begin : pipe_reg_1
      fl_r1  <= fl;
      chi_r1 <= chi;
    end

    hpa_abs u_pe4 (.f45(fl_r1.f45), .chi(chi_r1), .rtau(rtau), .rho1(r1), .rho2(r2));

    always_ff @(posedge clk) begin : pipe_reg_2
      rho1[i] <= r1;
      rho2[i] <= r2;
      f123[i] <= {fl_r1.f1, fl_r1.f2, fl_r1.f3};
    end
  end
endmodule
