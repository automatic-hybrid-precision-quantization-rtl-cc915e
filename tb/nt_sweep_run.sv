// nt_sweep_run: drives one HF-AMP detector built for N = 2*N_t real lanes
// through a block of frames and checks it against the reference model.
//
// Used by tb_hf_amp_nt_sweep to run the detector with more users than the
// default 8 on the same 128 receive antennas (real model: 256 rows). A
// random channel H (entries of variance 1/256) gives G = H^T H, quantized
// to 1-2-7; random 16-QAM frames x give b = G x + noise of variance S2.
// After G and sigma_n^2 are loaded, NF frames are streamed back to back.
// Every output must equal the reference detector bit for bit, come 25
// cycles after its frame entered and in order; hard decisions must beat
// slicing b directly. The reference loop below is the lane-by-lane model
// of the reference package written for any N. The symbol error counts are
// reported so the sizes can be compared. Interface: clk and rst_n in;
// done rises when the block is finished; checks, failures, sym_err,
// mf_err and sym_tot hold the counts.
module nt_sweep_run
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;
#(
  parameter int  N  = 32,
  parameter int  NF = 200,
  parameter real S2 = 0.25
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   sym_err,
  output int   mf_err,
  output int   sym_tot
);
  localparam int NR2 = 256;   // 2 * N_r real rows of H

  logic in_valid = 0, in_ready;
  b_t   in_b [N];
  logic cfg_valid = 0, cfg_ready, cfg_sel = 0;
  logic [$clog2(N)-1:0] cfg_row = '0;
  g_t   cfg_g_row [N];
  s2_t  cfg_sigma2 = '0;
  logic out_valid;
  x_t   out_xhat [N];
  d_t   out_d [N];
  logic [15:0] out_frame;

  hf_amp_top #(.N(N)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct {
    real xh[N];
    real dd[N];
    int  tx[N];
    int  t_acc;
  } exp_t;
  exp_t expq [$];

  real g_cur [N][N];
  int  n_out = 0;

  initial begin
    done = 0; checks = 0; failures = 0; sym_err = 0; mf_err = 0; sym_tot = 0;
  end

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(65535)) / 65536.0;
    return s - 6.0;
  endfunction

  function automatic int slice(real v);
    return (v < 0) ? ((v < -2.0) ? -3 : -1) : ((v >= 2.0) ? 3 : 1);
  endfunction

  // reference detector for N lanes (same steps as ref_detect)
  function automatic void detect(real b[N], output real xh[N], output real dd[N]);
    real rt, z, chi, r1, r2, s;
    real xn[N];
    logic [4:0] fl;
    int m1, m2;
    rt = ref_rtau(S2);
    for (int i = 0; i < N; i++) begin xh[i] = 0.0; dd[i] = qz(b[i], 3, 4); end
    for (int l = 0; l < NITER; l++) begin
      for (int i = 0; i < N; i++) begin
        z   = xh[i] + dd[i];
        chi = ref_chi(z, rt);
        fl  = ref_flags(z);
        ref_pair(z, m1, m2);
        ref_rho(fl[1:0], chi, rt, r1, r2);
        xn[i] = ref_mean(m1, m2, r1, r2);
      end
      for (int i = 0; i < N; i++) begin
        s = 0.0;
        for (int j = 0; j < N; j++) s += qz(g_cur[i][j] * xn[j], 3, 6);
        dd[i] = qz(b[i] - qz(s, 3, 4), 3, 4);
      end
      xh = xn;
    end
  endfunction

  task automatic configure();
    real h [NR2][N];
    real acc;
    for (int r = 0; r < NR2; r++)
      for (int c = 0; c < N; c++) h[r][c] = gauss() / 16.0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        acc = 0.0;
        for (int r = 0; r < NR2; r++) acc += h[r][i] * h[r][j];
        g_cur[i][j] = qz(acc, 2, 7);
      end
    for (int w = 0; w <= N; w++) begin
      @(negedge clk);
      cfg_valid = 1;
      cfg_sel = (w == N);
      cfg_row = ($clog2(N))'(w);
      for (int j = 0; j < N; j++) cfg_g_row[j] = g_t'(ix(g_cur[w % N][j], G_F));
      cfg_sigma2 = s2_t'(ix(S2, S2_F));
      #1;
      while (!cfg_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    cfg_valid = 0;
  endtask

  task automatic stream();
    exp_t e;
    real bq [N];
    real acc, sig;
    int k;
    sig = $sqrt(S2);
    k = 0;
    while (k < NF) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) e.tx[i] = 2 * $urandom_range(3) - 3;
      for (int i = 0; i < N; i++) begin
        acc = 0.0;
        for (int j = 0; j < N; j++) acc += g_cur[i][j] * real'(e.tx[j]);
        bq[i] = qz(acc + sig * gauss(), 3, 6);
        in_b[i] = b_t'(ix(bq[i], B_F));
      end
      detect(bq, e.xh, e.dd);
      in_valid = 1;
      #1;
      checks++;
      if (!in_ready) failures++;         // nothing holds the input back
      for (int i = 0; i < N; i++) if (slice(bq[i]) != e.tx[i]) mf_err++;
      e.t_acc = cyc;
      expq.push_back(e);
      k++;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    bit bad;
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      e = expq.pop_front();
      bad = 0;
      for (int i = 0; i < N; i++)
        if (fx(out_xhat[i], X_F) != e.xh[i] || fx(out_d[i], D_F) != e.dd[i]) bad = 1;
      if (bad || out_frame != 16'(n_out) || cyc - e.t_acc != PIPE_DEPTH + 1) begin
        failures++;
        if (failures < 5)
          $display("FAIL N=%0d frame %0d latency %0d", N, n_out, cyc - e.t_acc);
      end
      for (int i = 0; i < N; i++) begin
        sym_tot++;
        if (slice(fx(out_xhat[i], X_F)) != e.tx[i]) sym_err++;
      end
    end
    n_out++;
  end

  initial begin
    @(posedge rst_n);
    configure();
    stream();
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_out != NF) failures++;
    checks++;
    if (sym_err > mf_err) failures++;
    done = 1;
  end
endmodule
