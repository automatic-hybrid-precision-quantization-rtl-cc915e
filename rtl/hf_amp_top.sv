// hf_amp_top: hardware-friendly nearest-neighbour AMP (HF-AMP) MIMO detector.
//
// Detects one frame, the 2*N_t = 16 real-valued symbols of an 8 x 128
// 16-QAM MIMO vector, per clock. The inputs are the matched-filter output b
// of each frame and, per block of frames, the Gram matrix G and the noise
// variance sigma_n^2. Four AMP iterations are unrolled, each a CPE (nearest
// neighbour probabilities, 2 register groups) followed by a PIC (new
// estimate and interference-cancelled residual, 4 register groups):
//   xhat^(0) = 0, d^(0) = b
//   CPE-1 -> PIC-1 -> CPE-2 -> PIC-2 -> CPE-3 -> PIC-3 -> CPE-4 -> PIC-4
// giving a 24-stage pipeline. The register banks hold G (gm_mem), sigma_n^2
// and 1/tau (ap_mem), b for every frame in flight (mfo_mem) and the last
// result (do_mem); the control unit tracks valid frames and drains the
// pipeline before G or sigma_n^2 is rewritten.
// Interface: in_valid/in_ready with in_b; cfg_valid/cfg_ready with
// cfg_sel (0: write row cfg_row of G from cfg_g_row, 1: write cfg_sigma2);
// out_valid pulses for one cycle with out_xhat = xhat^(4), out_d = d^(4)
// and the frame number. Timing: a frame accepted in cycle t is on the
// outputs in cycle t+25 (24 pipeline stages plus the output bank).
// The iteration structure, stage count and formats follow the paper;
// xhat^(0) = 0, the handshakes and the output bank are this design's.
// The CU status outputs accept/busy and the stored sigma_n^2 of the AP bank
// are observation points for the block tests and are not used here; lint
// reports them as unused. The assertions of the CU are clocked and disabled
// with rst_n, which lint reports as rst_n being used both synchronously and
// asynchronously; no circuit depends on that.
module hf_amp_top
  import hfamp_pkg::*;
#(
  parameter int N    = N2,
  parameter int NIT  = NITER
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // frames
  input  logic                 in_valid,
  output logic                 in_ready,
  input  b_t                   in_b       [N],
  // configuration
  input  logic                 cfg_valid,
  output logic                 cfg_ready,
  input  logic                 cfg_sel,
  input  logic [$clog2(N)-1:0] cfg_row,
  input  g_t                   cfg_g_row  [N],
  input  s2_t                  cfg_sigma2,
  // results
  output logic                 out_valid,
  output x_t                   out_xhat   [N],
  output d_t                   out_d      [N],
  output logic [15:0]          out_frame
);
  logic        accept, done, busy;
  logic [15:0] frame_num;
  g_t          g     [N][N];
  s2_t         sigma2;
  rt_t         rtau;
  d_t          d0    [N];
  b_t          b_tap [NIT][N];

  // iteration interfaces: xhat^(l), d^(l) for l = 0..NIT
  x_t          xh    [NIT+1][N];
  d_t          dd    [NIT+1][N];

  control_unit #(.DEPTH(STAGES_PER_ITER * NIT)) u_cu (
    .clk, .rst_n, .in_valid, .in_ready, .cfg_valid, .cfg_ready,
    .accept, .done, .busy, .frame_out(frame_num));

  gm_mem #(.N(N)) u_gm (
    .clk, .we(cfg_ready && !cfg_sel), .waddr(cfg_row), .wrow(cfg_g_row), .g);

  ap_mem u_ap (
    .clk, .rst_n, .we(cfg_ready && cfg_sel), .sigma2_in(cfg_sigma2), .sigma2, .rtau);

  mfo_mem #(.N(N), .NIT(NIT)) u_mfo (.clk, .b_in(in_b), .d0, .b_tap);

  for (genvar i = 0; i < N; i++) begin : g_init
    assign xh[0][i] = '0;
    assign dd[0][i] = d0[i];
  end

  for (genvar l = 0; l < NIT; l++) begin : g_iter
    rho_t       rho1 [N];
    rho_t       rho2 [N];
    logic [2:0] f123 [N];

    cpe #(.N(N)) u_cpe (
      .clk, .xhat(xh[l]), .d(dd[l]), .rtau, .rho1, .rho2, .f123);

    pic #(.N(N)) u_pic (
      .clk, .rho1, .rho2, .f123, .g, .b(b_tap[l]), .xhat(xh[l+1]), .d(dd[l+1]));
  end

  do_mem #(.N(N)) u_do (
    .clk, .rst_n, .cap(done), .xhat_in(xh[NIT]), .d_in(dd[NIT]), .frame_in(frame_num),
    .valid(out_valid), .xhat(out_xhat), .d(out_d), .frame(out_frame));
endmodule
