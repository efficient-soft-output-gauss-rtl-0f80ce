// igs_pkg -- shared types, word lengths and arithmetic helpers of the
// improved Gauss-Seidel (IGS) soft-output MIMO detector.
//
// Number formats (each real or imaginary part, two's complement):
//   H      15 bit, 12 fractional bits  (Q2.12)
//   y      15 bit, 10 fractional bits  (Q4.10)
//   N0     15 bit, 10 fractional bits  (Q4.10, non-negative)
//   W, yMF 15 bit,  5 fractional bits  (Q9.5)  -- raw, unnormalised units
//   MAC    22 bit, 12 fractional bits  (Q9.12)
//   compressed W entry: 1 offset flag + 8 remaining bits with 1 fractional bit
//   normalised W/Nr, yMF/Nr, d^-1, W2^-1, N', s: 15 bit, Q2.12
// Because Nr is a power of two, a Q9.5 value of W or yMF read as Q2.12 is
// exactly W/Nr or yMF/Nr (Nr = 128): the 1/Nr normalisation costs no logic.
// The scale is really 2^(F_S - F_W) = 2^7; the LOG2_NR parameters of the
// units name it and must stay 7. A core with fewer antennas (NR = 64) still
// works, with the normalised diagonal near 0.5 instead of 1.
// The 15/22/9/12/10-bit word lengths are the published ones; where the binary
// point sits inside each word is this design's choice.
package igs_pkg;

  localparam int W_D     = 15;   // data word
  localparam int W_ACC   = 22;   // MAC register
  localparam int W_REM   = 8;    // remaining bits of a compressed W entry
  localparam int F_H     = 12;
  localparam int F_Y     = 10;
  localparam int F_N0    = 10;
  localparam int F_W     = 5;
  localparam int F_ACC   = 12;
  localparam int F_S     = 12;   // normalised values
  localparam int F_REM   = 1;
  localparam int W_SCU   = 12;   // SCU outputs (rho, 1/mu)
  localparam int F_RHO   = 2;
  localparam int F_MUINV = 11;
  localparam int W_LCU_IN = 12;
  localparam int F_Z     = 9;
  localparam int W_LLR   = 10;
  localparam int B_BITS  = 6;    // 64-QAM
  localparam int PAM_LVL = 79;   // round(2^F_Z / sqrt(42)): 64-QAM unit spacing

  typedef logic signed [W_D-1:0]   d_t;
  typedef logic signed [W_ACC-1:0] acc_t;

  typedef struct packed {
    logic signed [W_D-1:0] re;
    logic signed [W_D-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [W_ACC-1:0] re;
    logic signed [W_ACC-1:0] im;
  } cacc_t;

  typedef struct packed {
    logic signed [47:0] re;
    logic signed [47:0] im;
  } cwide_t;

  // one compressed real value: offset flag + remaining bits
  typedef struct packed {
    logic                    flag;
    logic signed [W_REM-1:0] rem;
  } wc_t;

  typedef struct packed {
    wc_t re;
    wc_t im;
  } cwc_t;

  // arithmetic shift right by sh (>= 0) with round-half-up
  function automatic logic signed [47:0] rsh(input logic signed [47:0] v, input int sh);
    logic signed [47:0] r;
    if (sh <= 0) r = v;
    else         r = (v + (48'sd1 <<< (sh - 1))) >>> sh;
    return r;
  endfunction

  // saturate to a signed word of w bits (returned sign-extended)
  function automatic logic signed [47:0] sat(input logic signed [47:0] v, input int w);
    logic signed [47:0] mx, mn;
    mx = (48'sd1 <<< (w - 1)) - 48'sd1;
    mn = -(48'sd1 <<< (w - 1));
    if (v > mx)      return mx;
    else if (v < mn) return mn;
    else             return v;
  endfunction

  function automatic d_t sat_d(input logic signed [47:0] v);
    logic signed [47:0] t;
    t = sat(v, W_D);
    return t[W_D-1:0];
  endfunction

  function automatic acc_t sat_acc(input logic signed [47:0] v);
    logic signed [47:0] t;
    t = sat(v, W_ACC);
    return t[W_ACC-1:0];
  endfunction

  function automatic cwide_t cmul(input cplx_t a, input cplx_t b);
    cwide_t r;
    r.re = 48'(a.re) * 48'(b.re) - 48'(a.im) * 48'(b.im);
    r.im = 48'(a.re) * 48'(b.im) + 48'(a.im) * 48'(b.re);
    return r;
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = sat_d(-48'(a.im));
    return r;
  endfunction

  // accumulate a wide product, shifted right by sh, into a MAC register
  function automatic cacc_t cmac(input cacc_t acc, input cwide_t p, input int sh);
    cacc_t r;
    r.re = sat_acc(48'(acc.re) + rsh(p.re, sh));
    r.im = sat_acc(48'(acc.im) + rsh(p.im, sh));
    return r;
  endfunction

  // MAC register (or any wide value) -> data word, shift right by sh
  function automatic cplx_t acc2d(input cacc_t a, input int sh);
    cplx_t r;
    r.re = sat_d(rsh(48'(a.re), sh));
    r.im = sat_d(rsh(48'(a.im), sh));
    return r;
  endfunction

  function automatic cplx_t wide2d(input cwide_t a, input int sh);
    cplx_t r;
    r.re = sat_d(rsh(a.re, sh));
    r.im = sat_d(rsh(a.im, sh));
    return r;
  endfunction

endpackage
