// hpa_abs: PE 4 of the CPE ("rho add": MUX-rho, HPA and ABS+).
//
// MUX-rho picks +2/tau, 0 or -2/tau by {F4,F5} and the HPA adds it to chi:
//   Delta_tmp = chi + 2/tau (01), chi - 2/tau (10), chi (11).
// The log-ratio of the two neighbour probabilities is Delta~ = -2|Delta_tmp|
// (format 1-3-1), clipped to [ETA_A1, 0] = [-4, 0]. ABS+ then evaluates the
// one-segment linear approximation of 1/(1+exp(Delta~)) on that range,
//   rho(m1) = 1/2 - Delta~/8 = 1/2 + |Delta_tmp|/4   in [1/2, 1]
//   rho(m2) = 1 - rho(m1)
// with only a shift and an add (1-1-3 outputs, exact, no rounding).
// The interval, the clip and the 1-3-1 format follow the paper. The slope
// -1/8 and intercept 1/2 are this design's reading of the paper's
// approximation: the printed pair (slope 0.5, intercept -0.125) gives
// negative probabilities, while -1/8 and 1/2 are the chord of 1/(1+e^x)
// over [-4,0] and keep rho(m1)+rho(m2)=1. Purely combinational.
module hpa_abs
  import hfamp_pkg::*;
#(
  parameter int ETA_A1 = -4     // lower clip bound of Delta~ (integer)
) (
  input  aw_flag_e f45,
  input  chi_t     chi,    // 1-6-1
  input  rt_t      rtau,   // 1/tau, 1-4-1
  output rho_t     rho1,   // rho(omega_m1), 1-1-3
  output rho_t     rho2    // rho(omega_m2), 1-1-3
);
  localparam int DT_W = CHI_W + 2;
  localparam int CLIP = -ETA_A1;            // bound of |Delta_tmp| (-ETA_A1/2) in 1/2 LSBs

  logic signed [DT_W-1:0] mux_rho, dtmp, mag;
  dl_t                    delta;            // Delta~, 1-3-1

  always_comb begin
    unique case (f45)
      AW_NEG:  mux_rho =  (DT_W'(rtau) <<< 1);
      AW_POS:  mux_rho = -(DT_W'(rtau) <<< 1);
      default: mux_rho = '0;
    endcase
  end

  assign dtmp = DT_W'(chi) + mux_rho;       // both 1/2 LSB
  assign mag  = dtmp[DT_W-1] ? -dtmp : dtmp;

  // Delta~ = -2|Delta_tmp| clipped at ETA_A1 (1/2 LSB units)
  always_comb begin
    if (mag > DT_W'(CLIP))     delta = dl_t'(-CLIP * 2);
    else                       delta = dl_t'(-(mag <<< 1));
  end

  // rho(m1) = 1/2 - Delta~/8 : in 1/8 units, 4 - delta/2
  assign rho1 = rho_t'(5'sd4 - (delta >>> 1));
  assign rho2 = rho_t'(5'sd8 - rho1);
endmodule
