// do_mem: detector-output register bank (DO-Mem, register bank 3).
//
// Captures the final estimate xhat^(L) and residual d^(L) of a frame when
// it leaves the last PIC (cap = 1), together with its frame number, and
// holds them until the next frame leaves. valid is high for the one cycle
// after each capture. The bank is named by the paper; holding the last
// frame and the one-cycle valid pulse are this design's choice.
module do_mem
  import hfamp_pkg::*;
#(
  parameter int N = N2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cap,
  input  x_t          xhat_in [N],
  input  d_t          d_in    [N],
  input  logic [15:0] frame_in,
  output logic        valid,
  output x_t          xhat    [N],
  output d_t          d       [N],
  output logic [15:0] frame
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid <= 1'b0;
    else        valid <= cap;

  always_ff @(posedge clk)
    if (cap) begin
      xhat  <= xhat_in;
      d     <= d_in;
      frame <= frame_in;
    end
endmodule
