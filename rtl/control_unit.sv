// control_unit: control unit (CU) of the HF-AMP pipeline.
//
// The datapath registers run every cycle; the CU only records which of the
// DEPTH = 24 pipeline register groups hold a real frame. A frame is
// accepted (accept) when in_valid && in_ready, and leaves the last PIC
// (done) exactly DEPTH cycles later; frames are numbered in order of
// arrival. G and sigma_n^2 are shared by all frames in flight, so a
// configuration write must not overtake them: while cfg_valid is high no
// new frame is accepted (in_ready = 0) and the write is granted
// (cfg_ready = 1) only once the pipeline is empty. Active-low asynchronous
// reset. The paper names the CU and its role (clock and I/O control); this
// handshake and the drain rule are this design's.
// The assertions below are disabled during reset through rst_n, which is
// also the flops' asynchronous reset; lint notes the double use.
module control_unit
  import hfamp_pkg::*;
#(
  parameter int DEPTH = PIPE_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  output logic        accept,
  output logic        done,
  output logic        busy,
  output logic [15:0] frame_out
);
  logic [DEPTH-1:0] vld;

  assign in_ready  = !cfg_valid;
  assign accept    = in_valid && in_ready;
  assign busy      = |vld;
  assign cfg_ready = cfg_valid && !busy;
  assign done      = vld[DEPTH-1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      vld       <= '0;
      frame_out <= '0;
    end else begin
      vld <= {vld[DEPTH-2:0], accept};
      if (done) frame_out <= frame_out + 16'd1;
    end

  // a configuration write and a frame never enter together
  a_cfg_excl: assert property (@(posedge clk) disable iff (!rst_n) !(cfg_ready && accept));
  // a configuration write only into an empty pipeline
  a_cfg_empty: assert property (@(posedge clk) disable iff (!rst_n) cfg_ready |-> vld == '0);
endmodule
