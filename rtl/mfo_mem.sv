// mfo_mem: matched-filter-output register bank (MFO-Mem, register bank 2).
//
// Every frame enters as b = H^T y (N values, 1-3-6). The bank gives CPE-1
// its initial residual d^(0) = b, rounded (ties up) to the 1-3-4 format of
// d, in the same cycle, and carries b down a delay line so that the
// b-subtract of PIC-l (between its registers R-3 and R-4) sees the b of
// the frame it is working on: tap l is b delayed by 6(l-1)+5 cycles
// (5, 11, 17, 23). The bank is named by the paper; the delay line is this
// design's way of keeping b with its frame in the 24-stage pipeline.
module mfo_mem
  import hfamp_pkg::*;
#(
  parameter int N     = N2,
  parameter int NIT   = NITER
) (
  input  logic clk,
  input  b_t   b_in  [N],
  output d_t   d0    [N],
  output b_t   b_tap [NIT][N]
);
  localparam int DEPTH = STAGES_PER_ITER * (NIT - 1) + 5;

  b_t sr [DEPTH][N];

  for (genvar i = 0; i < N; i++) begin : g_d0
    logic signed [31:0] q;
    assign q     = rnd_sat(32'(b_in[i]), B_F - D_F, D_W);
    assign d0[i] = d_t'(q);
  end

  always_ff @(posedge clk) begin
    sr[0] <= b_in;
    for (int k = 1; k < DEPTH; k++) sr[k] <= sr[k-1];
  end

  for (genvar l = 0; l < NIT; l++) begin : g_tap
    assign b_tap[l] = sr[STAGES_PER_ITER * l + 4];
  end
endmodule
