// hfamp_pkg: formats, flag encodings and the requantizer shared by the HF-AMP detector.
//
// HF-AMP is an approximate-message-passing MIMO detector in which every
// variable has its own fixed-point format, written 1-p-q: one sign bit, p
// integral bits, q fractional bits, two's complement. The formats below are
// the per-variable bitwidths the detector was quantized to (variable numbers
// k in the comments). The detector works on the real-valued model of an
// 8 x 128 (N_t x N_r) 16-QAM system, so a frame carries 2*N_t = 16 real
// symbols from the integer constellation {-3,-1,+1,+3}.
//
// rnd_sat() is the requantizer used wherever a result is narrowed:
// round to the target LSB (ties rounded up) and clip to the target range,
// which gives the same result as clipping first and rounding after. The
// tie rule is this design's choice.
package hfamp_pkg;

  localparam int NT    = 8;        // transmit antennas
  localparam int N2    = 2 * NT;   // real-valued symbols per frame
  localparam int NITER = 4;        // unfolded AMP iterations
  localparam int STAGES_PER_ITER = 6;  // CPE R-1, R-2, PIC R-1..R-4
  localparam int PIPE_DEPTH = NITER * STAGES_PER_ITER;  // 24

  // Width / fractional bits of each variable (1-p-q -> W = 1+p+q, F = q).
  localparam int B_W   = 10, B_F   = 6;  // k=1  b_i            1-3-6
  localparam int G_W   = 10, G_F   = 7;  // k=2  g_ij           1-2-7
  localparam int S2_W  = 5,  S2_F  = 3;  // k=3  sigma_n^2=tau  1-1-3
  localparam int RHO_W = 5,  RHO_F = 3;  // k=4  rho            1-1-3
  localparam int WR_W  = 6,  WR_F  = 3;  // k=5  omega*rho      1-2-3
  localparam int X_W   = 5,  X_F   = 2;  // k=6  xhat           1-2-2
  localparam int RT_W  = 6,  RT_F  = 1;  // k=14 1/tau          1-4-1
  localparam int D_W   = 8,  D_F   = 4;  // k=15 d_i            1-3-4
  localparam int Z_W   = 9,  Z_F   = 4;  // k=16 z_i            1-4-4
  localparam int GX_W  = 10, GX_F  = 6;  // k=17 g_ij*xhat_j    1-3-6
  localparam int SG_W  = 8,  SG_F  = 4;  // k=18 sum g*xhat     1-3-4
  localparam int CHI_W = 8,  CHI_F = 1;  // k=20 chi            1-6-1
  localparam int DL_W  = 5,  DL_F  = 1;  // k=21 Delta~         1-3-1

  typedef logic signed [B_W-1:0]   b_t;
  typedef logic signed [G_W-1:0]   g_t;
  typedef logic signed [S2_W-1:0]  s2_t;
  typedef logic signed [RHO_W-1:0] rho_t;
  typedef logic signed [WR_W-1:0]  wr_t;
  typedef logic signed [X_W-1:0]   x_t;
  typedef logic signed [RT_W-1:0]  rt_t;
  typedef logic signed [D_W-1:0]   d_t;
  typedef logic signed [Z_W-1:0]   z_t;
  typedef logic signed [GX_W-1:0]  gx_t;
  typedef logic signed [SG_W-1:0]  sg_t;
  typedef logic signed [CHI_W-1:0] chi_t;
  typedef logic signed [DL_W-1:0]  dl_t;

  // {F4,F5}: which value a_omega = omega_m1 + omega_m2 takes.
  typedef enum logic [1:0] {
    AW_NEG  = 2'b01,   // a_omega = -4 : Delta_tmp = chi + (1/tau << 1)
    AW_POS  = 2'b10,   // a_omega = +4 : Delta_tmp = chi - (1/tau << 1)
    AW_ZERO = 2'b11    // a_omega =  0 : Delta_tmp = chi
  } aw_flag_e;

  // {F1,F2,F3}: interval of z, i.e. the nearest pair (m1, m2).
  //  111 z<-2 (-3,-1) | 110 (-2,-1) (-1,-3) | 010 (-1,0) (-1,+1)
  //  000 (0,1) (+1,-1) | 100 (1,2) (+1,+3)  | 101 z>2 (+3,+1)
  typedef struct packed {
    logic     f1;    // 1: an outer symbol (+-3) is one of the pair
    logic     f2;    // 1: the mean is negative
    logic     f3;    // 1: rho(m1) belongs to the outer symbol
    aw_flag_e f45;
  } nna_flags_t;

  // Round (ties up) by 'shift' fractional bits and clip to a signed 'w'-bit
  // range. Result is returned sign-extended in 32 bits.
  function automatic logic signed [31:0] rnd_sat(input logic signed [31:0] v,
                                                 input int shift, input int w);
    logic signed [31:0] r, hi, lo;
    if (shift > 0) r = (v + (32'sd1 <<< (shift - 1))) >>> shift;
    else           r = v <<< (-shift);
    hi = (32'sd1 <<< (w - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (w - 1));
    if (r > hi)      r = hi;
    else if (r < lo) r = lo;
    return r;
  endfunction

endpackage
