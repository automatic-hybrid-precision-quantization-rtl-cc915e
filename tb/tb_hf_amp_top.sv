// tb_hf_amp_top: end-to-end test of the HF-AMP detector at its default size
// (16 real symbols per frame, 4 iterations, 24-stage pipeline).
//
// A random 8 x 128 channel H (real model 256 x 16, entries of variance
// 1/256) gives G = H^T H; random 16-QAM frames x in {-3,-1,1,3} give
// b = G x + noise. The test loads G and sigma_n^2, streams frames with
// random bubbles, reconfigures (new channel and noise) while frames are in
// flight, and streams again. Every result must equal the floating-point
// reference model bit for bit, leave 25 cycles after it entered, in order,
// with its frame number; hard decisions must recover x better than slicing
// b directly.
// Mechanisms counted (each must occur): all six {F1,F2,F3} intervals, all
// three {F4,F5} codes, the clip of Delta~ at -4, input bubbles, and a
// configuration request that had to wait for the pipeline to drain.
module tb_hf_amp_top;
  import hfamp_pkg::*;
  import hfamp_ref_pkg::*;

  localparam int NF1 = 300, NF2 = 300;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  b_t   in_b [16];
  logic cfg_valid = 0, cfg_ready, cfg_sel = 0;
  logic [3:0] cfg_row = 0;
  g_t   cfg_g_row [16];
  s2_t  cfg_sigma2 = 0;
  logic out_valid;
  x_t   out_xhat [16];
  d_t   out_d [16];
  logic [15:0] out_frame;

  hf_amp_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, in order of acceptance
  typedef struct {
    real xh[16];
    real dd[16];
    int  tx[16];
    int  t_acc;
  } exp_t;
  exp_t expq [$];

  real  g_cur [16][16];
  real  s2_cur;
  ref_stats_t st;
  int   bubbles = 0, drains = 0, sym_err = 0, sym_tot = 0, n_out = 0, mf_err = 0;

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(65535)) / 65536.0;
    return s - 6.0;
  endfunction

  // new channel: G = H^T H quantized to 1-2-7, plus its b-side noise scale
  task automatic new_channel(output g_t gq [16][16]);
    real h [256][16];
    real acc;
    for (int r = 0; r < 256; r++)
      for (int c = 0; c < 16; c++) h[r][c] = gauss() / 16.0;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        acc = 0.0;
        for (int r = 0; r < 256; r++) acc += h[r][i] * h[r][j];
        acc = qz(acc, 2, 7);
        g_cur[i][j] = acc;
        gq[i][j] = g_t'(ix(acc, G_F));
      end
  endtask

  task automatic configure(input real s2);
    g_t gq [16][16];
    bit waited;
    new_channel(gq);
    s2_cur = s2;
    for (int w = 0; w <= 16; w++) begin
      @(negedge clk);
      cfg_valid = 1;
      cfg_sel = (w == 16);
      cfg_row = 4'(w);
      cfg_g_row = gq[w % 16];
      cfg_sigma2 = s2_t'(ix(s2, S2_F));
      #1;
      waited = 0;
      while (!cfg_ready) begin
        waited = 1;
        checks++;
        if (in_ready) failures++;      // no frame may enter while config waits
        @(negedge clk); #1;
      end
      if (waited) drains++;
    end
    @(negedge clk);
    cfg_valid = 0;
  endtask

  task automatic stream(input int nf, input real s2);
    exp_t e;
    real bq [16];
    real acc, sig;
    int k;
    sig = $sqrt(s2);
    k = 0;
    while (k < nf) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) begin
        in_valid = 0; bubbles++;
        continue;
      end
      for (int i = 0; i < 16; i++) e.tx[i] = 2 * $urandom_range(3) - 3;
      for (int i = 0; i < 16; i++) begin
        acc = 0.0;
        for (int j = 0; j < 16; j++) acc += g_cur[i][j] * real'(e.tx[j]);
        bq[i] = qz(acc + sig * gauss(), 3, 6);
        in_b[i] = b_t'(ix(bq[i], B_F));
      end
      ref_detect(bq, g_cur, s2_cur, e.xh, e.dd, st);
      in_valid = 1;
      #1;
      if (in_ready) begin
        for (int i = 0; i < 16; i++)
          if (((bq[i] < 0) ? ((bq[i] < -2.0) ? -3 : -1) : ((bq[i] >= 2.0) ? 3 : 1)) != e.tx[i]) mf_err++;
        e.t_acc = cyc;
        expq.push_back(e);
        k++;
      end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int hd;
    bit bad;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      e = expq.pop_front();
      bad = 0;
      for (int i = 0; i < 16; i++)
        if (fx(out_xhat[i], X_F) != e.xh[i] || fx(out_d[i], D_F) != e.dd[i]) bad = 1;
      if (bad || out_frame != 16'(n_out) || cyc - e.t_acc != 25) begin
        failures++;
        if (failures < 10) begin
          $display("FAIL frame %0d (out_frame %0d) latency %0d", n_out, out_frame, cyc - e.t_acc);
          for (int i = 0; i < 16; i++)
            $display("  lane %0d xhat %f exp %f  d %f exp %f", i, fx(out_xhat[i], X_F), e.xh[i],
                     fx(out_d[i], D_F), e.dd[i]);
        end
      end
      for (int i = 0; i < 16; i++) begin
        hd = (out_xhat[i] < 0) ? ((out_xhat[i] < -8) ? -3 : -1) : ((out_xhat[i] >= 8) ? 3 : 1);
        sym_tot++;
        if (hd != e.tx[i]) sym_err++;
      end
    end
    n_out++;
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure(0.25);
    stream(NF1, 0.25);
    // reconfigure while the last frames are still in the pipeline
    configure(0.5);
    stream(NF2, 0.5);
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_out != NF1 + NF2) begin
      failures++;
      $display("FAIL %0d frames out of %0d", n_out, NF1 + NF2);
    end
    $display("symbol errors %0d / %0d (slicing b directly: %0d)", sym_err, sym_tot, mf_err);
    checks++;
    if (sym_err > mf_err || sym_err * 10 > sym_tot) failures++;   // must beat plain slicing, SER < 10 %
    $display("mechanisms:");
    need("interval z<-2 (111)",      st.f_count[7]);
    need("interval (-2,-1) (110)",   st.f_count[6]);
    need("interval (-1,0) (010)",    st.f_count[2]);
    need("interval (0,1) (000)",     st.f_count[0]);
    need("interval (1,2) (100)",     st.f_count[4]);
    need("interval z>2 (101)",       st.f_count[5]);
    need("a_omega=-4 (01)",          st.a_count[1]);
    need("a_omega=0 (11)",           st.a_count[3]);
    need("a_omega=+4 (10)",          st.a_count[2]);
    need("Delta~ clipped at -4",     st.clip_count);
    need("input bubbles",            bubbles);
    need("config waited for drain",  drains);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
