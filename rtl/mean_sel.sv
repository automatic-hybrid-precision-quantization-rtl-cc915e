// mean_sel: Mean-Sel (shift-and-add branch) of the PIC, one lane.
//
// The posterior mean xhat = omega_m1*rho(m1) + omega_m2*rho(m2) over the
// integer constellation {-3,-1,1,3} needs no multiplier: by {F1,F2,F3}
//   F1=0          xhat = +-(rho(m1) - rho(m2))          (pair -1,+1)
//   F1=1, F3=0    xhat = +-(rho(m1) + rho(m2) + 2 rho(m2))
//   F1=1, F3=1    xhat = +-(rho(m1) + rho(m2) + 2 rho(m1))
// with the sign given by F2 (1: negative). Left MUX (F3) picks which rho is
// doubled, right MUX (F1) sum or difference, one adder, MUX +/- (F2), then
// Pipe-Reg-1 (PIC-l:R-1). The intermediate is 1-2-3 (6 bits); the output is
// rounded (ties up) to the 1-2-2 format of xhat. Branch structure and
// formats follow the paper; the rounding rule is this design's choice.
// Latency one clock edge, one value per cycle.
module mean_sel
  import hfamp_pkg::*;
(
  input  logic       clk,
  input  rho_t       rho1,
  input  rho_t       rho2,
  input  logic [2:0] f123,    // {F1,F2,F3}
  output x_t         xhat     // registered
);
  wr_t  dbl, sd, sum, pm;
  logic f1, f2, f3;
  logic signed [31:0] q;

  assign {f1, f2, f3} = f123;

  always_comb begin
    dbl = f3 ? (wr_t'(rho1) <<< 1) : (wr_t'(rho2) <<< 1);       // left MUX
    sd  = f1 ? (wr_t'(rho1) + wr_t'(rho2))                       // right MUX
             : (wr_t'(rho1) - wr_t'(rho2));
    sum = dbl + sd;                                              // "+"
    pm  = f1 ? sum : sd;                                         // MUX +/-
    if (f2) pm = -pm;
    q   = rnd_sat(32'(pm), WR_F - X_F, X_W);
  end

  always_ff @(posedge clk) xhat <= x_t'(q);                      // Pipe-Reg-1
endmodule
