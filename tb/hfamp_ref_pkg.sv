// hfamp_ref_pkg: floating-point reference model of the HF-AMP detector for
// the testbenches.
//
// Every function works on real numbers and narrows results only with qz(),
// the linear quantizer v_Q = round(clip(v, -2^p, 2^p - 2^-q) / 2^-q) * 2^-q
// (ties rounded up, as in the RTL). The nearest-neighbour pair is found by
// comparing z with the interval bounds, and the mean is formed as
// omega_m1 * rho(m1) + omega_m2 * rho(m2), so the model does not reuse the
// bit-level tricks of the RTL (7-bit split adder, shift-and-add branches).
package hfamp_ref_pkg;

  localparam int N = 16;
  localparam int NIT = 4;

  function automatic real qz(real v, int p, int q);
    real c, lo, hi, r;
    c  = 1.0 / real'(1 << q);
    lo = -real'(1 << p);
    hi = real'(1 << p) - c;
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    r = $floor(v / c + 0.5) * c;
    return r;
  endfunction

  // signed fixed-point integer -> real
  function automatic real fx(longint v, int f);
    return real'(v) / real'(1 << f);
  endfunction

  // real (already on the grid) -> integer in units of 2^-f
  function automatic longint ix(real v, int f);
    return longint'($floor(v * real'(1 << f) + 0.5));
  endfunction

  function automatic real ref_rtau(real sigma2);
    real t;
    t = sigma2;
    if (t < 0.125) t = 0.125;
    if (t > 1.875) t = 1.875;
    return qz(8.5 - 4.25 * t, 4, 1);
  endfunction

  function automatic real ref_chi(real z, real rtau);
    return qz(z * rtau, 6, 1);
  endfunction

  // nearest symbol m1 and second nearest m2 of the constellation {-3,-1,1,3}
  function automatic void ref_pair(real z, output int m1, output int m2);
    if (z < -2.0)      begin m1 = -3; m2 = -1; end
    else if (z < -1.0) begin m1 = -1; m2 = -3; end
    else if (z < 0.0)  begin m1 = -1; m2 =  1; end
    else if (z < 1.0)  begin m1 =  1; m2 = -1; end
    else if (z < 2.0)  begin m1 =  1; m2 =  3; end
    else               begin m1 =  3; m2 =  1; end
  endfunction

  // flags {F1,F2,F3,F4,F5} expected for z
  function automatic logic [4:0] ref_flags(real z);
    logic [2:0] f123;
    logic [1:0] f45;
    int m1, m2;
    ref_pair(z, m1, m2);
    // F1: an outer point is involved; F2: negative side; F3: m1 is the outer point
    f123[2] = (m1 * m1 == 9) || (m2 * m2 == 9);
    f123[1] = (m1 + m2 < 0) || (m1 + m2 == 0 && m1 < 0);
    f123[0] = f123[2] && (m1 * m1 == 9);
    if (m1 + m2 < 0)       f45 = 2'b01;
    else if (m1 + m2 == 0) f45 = 2'b11;
    else                   f45 = 2'b10;
    return {f123, f45};
  endfunction

  // rho(m1), rho(m2) from the flags of a_omega, chi and 1/tau
  function automatic void ref_rho(logic [1:0] f45, real chi, real rtau,
                                  output real rho1, output real rho2);
    real sa, dtmp, dl;
    sa   = (f45 == 2'b01) ? -1.0 : (f45 == 2'b10) ? 1.0 : 0.0;   // sign(a_omega)
    dtmp = chi - 2.0 * rtau * sa;
    dl   = -2.0 * ((dtmp < 0) ? -dtmp : dtmp);                    // Delta~
    if (dl < -4.0) dl = -4.0;
    rho1 = 0.5 - 0.125 * dl;                                       // chord of 1/(1+e^x)
    rho2 = 1.0 - rho1;
  endfunction

  // posterior mean from the pair and probabilities, quantized to 1-2-2
  function automatic real ref_mean(int m1, int m2, real rho1, real rho2);
    return qz(real'(m1) * rho1 + real'(m2) * rho2, 2, 2);
  endfunction

  // symbols of the pair named by {F1,F2,F3}
  function automatic void ref_pair_of_flags(logic [2:0] f, output int m1, output int m2);
    case (f)
      3'b111:  begin m1 = -3; m2 = -1; end
      3'b110:  begin m1 = -1; m2 = -3; end
      3'b010:  begin m1 = -1; m2 =  1; end
      3'b011:  begin m1 = -1; m2 =  1; end
      3'b000:  begin m1 =  1; m2 = -1; end
      3'b001:  begin m1 =  1; m2 = -1; end
      3'b100:  begin m1 =  1; m2 =  3; end
      default: begin m1 =  3; m2 =  1; end
    endcase
  endfunction

  // d_i = b_i - sum_j g_ij xhat_j with the detector's formats
  function automatic real ref_resid(real b, real grow[N], real xv[N]);
    real s;
    s = 0.0;
    for (int j = 0; j < N; j++) s += qz(grow[j] * xv[j], 3, 6);
    s = qz(s, 3, 4);
    return qz(b - s, 3, 4);
  endfunction

  typedef struct {
    int f_count[8];    // how often each {F1,F2,F3} code occurred
    int a_count[4];    // how often each {F4,F5} code occurred
    int clip_count;    // Delta~ clipped at -4
  } ref_stats_t;

  // Full detector: NIT iterations from xhat = 0, d = b.
  function automatic void ref_detect(real b[N], real g[N][N], real sigma2,
                                     output real xh[N], output real dd[N],
                                     inout ref_stats_t st);
    real rt, z, chi, r1, r2, dtmp;
    real xn[N];
    logic [4:0] fl;
    int m1, m2;
    rt = ref_rtau(sigma2);
    for (int i = 0; i < N; i++) begin xh[i] = 0.0; dd[i] = qz(b[i], 3, 4); end
    for (int l = 0; l < NIT; l++) begin
      for (int i = 0; i < N; i++) begin
        z   = xh[i] + dd[i];
        chi = ref_chi(z, rt);
        fl  = ref_flags(z);
        ref_pair(z, m1, m2);
        ref_rho(fl[1:0], chi, rt, r1, r2);
        st.f_count[fl[4:2]]++;
        st.a_count[fl[1:0]]++;
        dtmp = chi - 2.0 * rt * ((fl[1:0] == 2'b01) ? -1.0 : (fl[1:0] == 2'b10) ? 1.0 : 0.0);
        if (dtmp > 2.0 || dtmp < -2.0) st.clip_count++;
        xn[i] = ref_mean(m1, m2, r1, r2);
      end
      for (int i = 0; i < N; i++) dd[i] = ref_resid(b[i], g[i], xn);
      xh = xn;
    end
  endfunction

endpackage
