// gm_mem: Gram-matrix register bank (GM-Mem, register bank 1).
//
// Holds G = H^T H, N x N entries of format 1-2-7, for the block of frames
// that share one channel. Rows are written one per clock through a write
// port (we, waddr, wrow); the whole matrix is read in parallel by the four
// PICs. A write appears on the output after the clock edge. No reset: G
// must be loaded before the first frame. The bank is named by the paper;
// its organisation is this design's choice.
module gm_mem
  import hfamp_pkg::*;
#(
  parameter int N = N2
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  g_t                   wrow [N],
  output g_t                   g    [N][N]
);
  always_ff @(posedge clk)
    if (we) g[waddr] <= wrow;
endmodule
