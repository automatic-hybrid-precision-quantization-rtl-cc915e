// pic: parallel interference cancellation element of one AMP iteration (PIC-l).
//
// From the neighbour probabilities and flags of the CPE it forms the new
// estimate vector xhat^(l+1) (N Mean-Sel lanes, register group R-1) and
// the new residual d^(l+1) = b - G xhat^(l+1) (N MV-Mul rows, register
// groups R-2, R-3, R-4). Because the next CPE adds xhat and d of the same
// frame, xhat is delayed alongside MV-Mul (R-2..R-4); these delay registers
// are this design's addition, the rest follows the paper.
// Timing: inputs sampled at edge 1; b must carry the frame that is in R-3,
// i.e. the frame whose CPE outputs were presented three cycles before; xhat
// and d are valid after edge 4. One frame per cycle.
module pic
  import hfamp_pkg::*;
#(
  parameter int N = N2
) (
  input  logic       clk,
  input  rho_t       rho1 [N],
  input  rho_t       rho2 [N],
  input  logic [2:0] f123 [N],
  input  g_t         g    [N][N],
  input  b_t         b    [N],
  output x_t         xhat [N],
  output d_t         d    [N]
);
  x_t xhat_r1 [N];
  x_t xhat_r2 [N];
  x_t xhat_r3 [N];

  for (genvar i = 0; i < N; i++) begin : g_row
    mean_sel u_ms (.clk, .rho1(rho1[i]), .rho2(rho2[i]), .f123(f123[i]), .xhat(xhat_r1[i]));
    mv_mul #(.N(N)) u_mv (.clk, .xhat(xhat_r1), .g_row(g[i]), .b(b[i]), .d(d[i]));
  end

  always_ff @(posedge clk) begin : xhat_align
    xhat_r2 <= xhat_r1;
    xhat_r3 <= xhat_r2;
    xhat    <= xhat_r3;
  end
endmodule
