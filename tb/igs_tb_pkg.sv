// igs_tb_pkg -- testbench helpers: complex numbers in double precision,
// Gaussian and 64-QAM stimulus, conversion to and from the fixed-point
// formats of igs_pkg, and a floating-point model of the IGS detector
// (2-term Neumann initial solution, K Gauss-Seidel sweeps, approximate
// SINR, max-log LLRs). The model is written from the equations, independently
// of the RTL's data path, and serves as the reference of the self-checking
// testbenches.
package igs_tb_pkg;
  import igs_pkg::*;

  typedef struct { real re; real im; } cr_t;

  localparam int MAXN = 16;
  localparam int MAXR = 256;
  localparam real RHO_MAX = 1023.75;

  function automatic cr_t c(input real re, input real im);
    cr_t r; r.re = re; r.im = im; return r;
  endfunction
  function automatic cr_t cadd(input cr_t a, input cr_t b);
    return c(a.re + b.re, a.im + b.im);
  endfunction
  function automatic cr_t csub(input cr_t a, input cr_t b);
    return c(a.re - b.re, a.im - b.im);
  endfunction
  function automatic cr_t cmulr(input cr_t a, input cr_t b);
    return c(a.re * b.re - a.im * b.im, a.re * b.im + a.im * b.re);
  endfunction
  function automatic cr_t cconjr(input cr_t a);
    return c(a.re, -a.im);
  endfunction
  function automatic cr_t cscale(input cr_t a, input real s);
    return c(a.re * s, a.im * s);
  endfunction
  function automatic real cabs(input cr_t a);
    return $sqrt(a.re * a.re + a.im * a.im);
  endfunction

  // uniform in (0,1)
  function automatic real urand();
    return (real'($urandom_range(32'hFFFFFF, 1))) / 16777217.0;
  endfunction
  // standard normal (Box-Muller)
  function automatic real gauss();
    return $sqrt(-2.0 * $ln(urand())) * $cos(6.283185307179586 * urand());
  endfunction
  // circularly-symmetric complex Gaussian with variance v
  function automatic cr_t cgauss(input real v);
    return c(gauss() * $sqrt(v / 2.0), gauss() * $sqrt(v / 2.0));
  endfunction

  // 64-QAM symbol from 6 bits (bits[0..2] real part, MSB first, Gray)
  function automatic int gray_inv(input int g);
    int k;
    k = g;
    k = k ^ (k >> 1);
    k = k ^ (k >> 2);
    return k & 7;
  endfunction
  function automatic cr_t qam64(input logic [5:0] bits);
    int gr, gi, kr, ki;
    gr = {29'd0, bits[0], bits[1], bits[2]};
    gi = {29'd0, bits[3], bits[4], bits[5]};
    kr = gray_inv(gr);
    ki = gray_inv(gi);
    return c(real'(2 * kr - 7) / $sqrt(42.0), real'(2 * ki - 7) / $sqrt(42.0));
  endfunction

  // fixed-point conversion
  function automatic d_t to_fix(input real v, input int frac);
    real s;
    longint q;
    s = v * real'(longint'(1) << frac);
    q = (s >= 0.0) ? longint'(s + 0.5) : -longint'(-s + 0.5);
    if (q > 16383) q = 16383;
    if (q < -16384) q = -16384;
    return d_t'(q);
  endfunction
  function automatic cplx_t to_cfix(input cr_t v, input int frac);
    cplx_t r;
    r.re = to_fix(v.re, frac);
    r.im = to_fix(v.im, frac);
    return r;
  endfunction
  function automatic real from_fix(input longint v, input int frac);
    return real'(v) / real'(longint'(1) << frac);
  endfunction
  function automatic cr_t from_cfix(input cplx_t v, input int frac);
    return c(from_fix(longint'(v.re), frac), from_fix(longint'(v.im), frac));
  endfunction

  // max-log LLRs of one 64-QAM symbol estimate z with SINR rho,
  // same labelling as the RTL (positive favours 1)
  function automatic void llr_ref(input cr_t z, input real rho, output real l [6]);
    real comp;
    for (int part = 0; part < 2; part++) begin
      comp = (part == 0) ? z.re : z.im;
      for (int b = 0; b < 3; b++) begin
        real m0, m1, a, d;
        m0 = 1.0e30; m1 = 1.0e30;
        for (int k = 0; k < 8; k++) begin
          int g;
          g = k ^ (k >> 1);
          a = real'(2 * k - 7) / $sqrt(42.0);
          d = (comp - a) * (comp - a);
          if (((g >> (2 - b)) & 1) == 1) begin if (d < m1) m1 = d; end
          else begin if (d < m0) m0 = d; end
        end
        l[part * 3 + b] = rho * (m0 - m1);
      end
    end
  endfunction

  // floating-point IGS detector. Inputs: H (nr x nt), y, n0, K.
  // Outputs: equalised s (after K sweeps), mu, rho and LLRs per user.
  class igs_model;
    int nt, nr;
    cr_t h   [MAXR][MAXN];
    cr_t y   [MAXR];
    real n0;
    cr_t w   [MAXN][MAXN];
    cr_t ymf [MAXN];
    cr_t w2  [MAXN][MAXN];
    cr_t s0  [MAXN];
    cr_t s   [MAXN];
    cr_t ninv[MAXN][MAXN];
    real mu  [MAXN];
    real rho [MAXN];
    real llr [MAXN][6];

    function new(int nt_, int nr_);
      nt = nt_; nr = nr_;
    endfunction

    function void preprocess();
      for (int i = 0; i < nt; i++) begin
        ymf[i] = c(0, 0);
        for (int k = 0; k < nr; k++) ymf[i] = cadd(ymf[i], cmulr(cconjr(h[k][i]), y[k]));
        for (int j = 0; j < nt; j++) begin
          w[i][j] = c(0, 0);
          for (int k = 0; k < nr; k++) w[i][j] = cadd(w[i][j], cmulr(cconjr(h[k][i]), h[k][j]));
        end
        w[i][i] = cadd(w[i][i], c(n0, 0));
      end
    endfunction

    function void init_solution();
      for (int i = 0; i < nt; i++)
        for (int j = 0; j < nt; j++)
          if (i == j) w2[i][j] = c(1.0 / w[i][i].re, 0);
          else w2[i][j] = cscale(w[i][j], -1.0 / (w[i][i].re * w[j][j].re));
      for (int i = 0; i < nt; i++) begin
        s0[i] = c(0, 0);
        for (int j = 0; j < nt; j++) s0[i] = cadd(s0[i], cmulr(w2[i][j], ymf[j]));
      end
    endfunction

    // (D+L)^-1 by forward substitution
    function void lower_inverse();
      for (int i = 0; i < nt; i++)
        for (int j = 0; j < nt; j++) begin
          if (j > i) ninv[i][j] = c(0, 0);
          else if (j == i) ninv[i][j] = c(1.0 / w[i][i].re, 0);
          else begin
            cr_t acc;
            acc = c(0, 0);
            for (int k = j; k < i; k++) acc = cadd(acc, cmulr(w[i][k], ninv[k][j]));
            ninv[i][j] = cscale(acc, -1.0 / w[i][i].re);
          end
        end
    endfunction

    function void gs(int k_iter);
      for (int i = 0; i < nt; i++) s[i] = s0[i];
      for (int k = 0; k < k_iter; k++)
        for (int i = 0; i < nt; i++) begin
          cr_t acc;
          acc = ymf[i];
          for (int j = 0; j < nt; j++)
            if (j != i) acc = csub(acc, cmulr(w[i][j], s[j]));
          s[i] = cscale(acc, 1.0 / w[i][i].re);   // in-place sweep
        end
    endfunction

    function void llrs();
      for (int i = 0; i < nt; i++) begin
        real l [6];
        mu[i]  = 1.0 - n0 / w[i][i].re;
        rho[i] = mu[i] / (1.0 - mu[i]);
        if (rho[i] > RHO_MAX) rho[i] = RHO_MAX;   // 12-bit SINR word of the hardware
        llr_ref(cscale(s[i], 1.0 / mu[i]), rho[i], l);
        for (int b = 0; b < 6; b++) llr[i][b] = l[b];
      end
    endfunction

    function void run(int k_iter);
      preprocess();
      init_solution();
      lower_inverse();
      gs(k_iter);
      llrs();
    endfunction
  endclass

endpackage
