// mv_mul: MV-Mul (HMAT-16) of the PIC, one row i of the Gram matrix.
//
// Computes the residual d_i = b_i - sum_j g_ij * xhat_j for the new
// estimate vector xhat. N hybrid-precision multipliers form g_ij*xhat_j
// (1-2-7 x 1-2-2, rounded to 1-3-6) into Pipe-Reg-2 (PIC-l:R-2); a
// log2(N)-stage adder tree sums them at full precision and rounds the sum
// to 1-3-4 into Pipe-Reg-3 (R-3); one adder forms b_i - sum in 1-3-6
// precision, rounded to the 1-3-4 format of d, into Pipe-Reg-4 (R-4).
// The register placement and all printed widths follow the paper; keeping
// full precision inside the tree and round-ties-up are this design's
// choices. Timing: xhat and g_row are sampled at edge 1, b at edge 3 (it
// must belong to the frame then in R-3), d is valid after edge 3.
module mv_mul
  import hfamp_pkg::*;
#(
  parameter int N = N2
) (
  input  logic clk,
  input  x_t   xhat  [N],
  input  g_t   g_row [N],
  input  b_t   b,
  output d_t   d
);
  localparam int SUM_W = GX_W + $clog2(N);

  gx_t prod_r2 [N];
  sg_t sum_r3;

  // multipliers -> Pipe-Reg-2
  for (genvar j = 0; j < N; j++) begin : g_mul
    logic signed [G_W+X_W-1:0] p;
    logic signed [31:0]        q;
    assign p = g_row[j] * xhat[j];
    assign q = rnd_sat(32'(p), G_F + X_F - GX_F, GX_W);
    always_ff @(posedge clk) prod_r2[j] <= gx_t'(q);
  end

  // adder tree (log2(N) = 4 stages of pairwise adders) -> Pipe-Reg-3
  localparam int LVLS = $clog2(N);
  logic signed [SUM_W-1:0] lvl [LVLS+1][N];
  logic signed [31:0]      tree_q;
  always_comb begin
    for (int l = 0; l <= LVLS; l++)
      for (int j = 0; j < N; j++) lvl[l][j] = '0;
    for (int j = 0; j < N; j++) lvl[0][j] = SUM_W'(prod_r2[j]);
    for (int l = 1; l <= LVLS; l++)
      for (int j = 0; j < (N >> l); j++)
        lvl[l][j] = lvl[l-1][2*j] + lvl[l-1][2*j+1];
    tree_q = rnd_sat(32'(lvl[LVLS][0]), GX_F - SG_F, SG_W);
  end
  always_ff @(posedge clk) sum_r3 <= sg_t'(tree_q);

  // b - sum -> Pipe-Reg-4
  logic signed [B_W+2:0] diff;
  logic signed [31:0]    d_q;
  assign diff = (B_W+3)'(b) - ((B_W+3)'(sum_r3) <<< (B_F - SG_F));
  assign d_q  = rnd_sat(32'(diff), B_F - D_F, D_W);
  always_ff @(posedge clk) d <= d_t'(d_q);
endmodule
