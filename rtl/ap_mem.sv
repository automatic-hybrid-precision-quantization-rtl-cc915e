// ap_mem: auxiliary-parameter register bank (AP-Mem, register bank 4).
//
// Holds the noise variance sigma_n^2 (1-1-3) of the current block of
// frames. With node compression the AMP threshold tau equals sigma_n^2, so
// the bank also presents 1/tau through the piecewise-linear reciprocal
// (recip_pla) to all CPEs. Written through we/sigma2_in; the new 1/tau is
// seen after the clock edge. Reset value 1.0. The bank is named by the
// paper; its contents and reset value are this design's choice.
module ap_mem
  import hfamp_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic we,
  input  s2_t  sigma2_in,
  output s2_t  sigma2,
  output rt_t  rtau
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  sigma2 <= s2_t'(1 << S2_F);
    else if (we) sigma2 <= sigma2_in;

  recip_pla u_pla (.sigma2(sigma2), .rtau(rtau));
endmodule
