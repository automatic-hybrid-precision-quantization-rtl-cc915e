// recip_pla: one-segment piecewise-linear approximation of 1/tau.
//
// After node compression tau = sigma_n^2, format 1-1-3, so tau lies in
// [1/8, 15/8]. The input is clipped to that interval and
//   1/tau ~= ICPT + SLOPE * tau = 8.5 - 4.25 * tau
// is evaluated with one constant multiplier and one adder, rounded (ties
// up) to the 1-4-1 format of 1/tau. Interval, slope and intercept are the
// paper's; rounding is this design's choice. Purely combinational.
module recip_pla
  import hfamp_pkg::*;
#(
  parameter int SLOPE_Q2 = -17,   // slope in units of 1/4   (-4.25)
  parameter int ICPT_Q1  = 17     // intercept in units of 1/2 (8.5)
) (
  input  s2_t sigma2,   // tau, 1-1-3
  output rt_t rtau      // 1/tau, 1-4-1
);
  logic signed [S2_W-1:0] tc;     // tau clipped to [1/8, 15/8]
  logic signed [31:0]     acc, q; // 5 fractional bits

  always_comb begin
    if (sigma2 < 5'sd1) tc = 5'sd1;
    else                tc = sigma2;                 // 15/8 is the format maximum
    acc = 32'(SLOPE_Q2) * 32'(tc) + (32'(ICPT_Q1) <<< 4);
    q   = rnd_sat(acc, 2 + S2_F - RT_F, RT_W);
  end

  assign rtau = rt_t'(q);
endmodule
