// lcu -- LLR computation unit (the paper's Eq. 5 and Sec. IV-E).
//     L_ib = rho_i * ( min_{a in Omega_b^0} |z_i - a|^2 - min_{a in Omega_b^1} |z_i - a|^2 ),
//     z_i  = s_i / mu_i.
// A positive LLR favours bit value 1. For a Gray-labelled square QAM the
// real and imaginary parts separate; per part |z - a|^2 - z^2 = a^2 - 2az is
// linear in z, so each of the 8 PAM levels costs one constant and one
// scaled copy of z, and a bit's lambda is the difference of two 4-way minima.
// This evaluates Eq. 5 exactly (the paper points to another work for the
// LCU insides).
// 64-QAM, levels (2k-7)/sqrt(42), k = 0..7, labelled with the binary-reflected
// Gray code k ^ (k >> 1); bits 0..2 come from the real part (bit 0 = MSB of
// the label, the sign bit), bits 3..5 from the imaginary part. That labelling
// is this design's choice.
// Interface: after start the unit reads user 0..NT-1 one per cycle (s Q2.12,
// rho Q10.2, 1/mu Q1.11); user 0 leaves 4 cycles after start, one user per cycle, on
// llr_valid / llr_user / llr (10-bit signed, saturating, integer units).
// done pulses with the last user. Inputs must be stable until done.
module lcu
  import igs_pkg::*;
#(
  parameter int NT = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t s     [NT],
  input  logic [W_SCU-1:0] rho   [NT],
  input  logic [W_SCU-1:0] muinv [NT],
  output logic        llr_valid,
  output logic [7:0]  llr_user,
  output logic signed [W_LLR-1:0] llr [B_BITS],
  output logic        done
);
  typedef logic signed [31:0] lam_t;

  logic        busy;
  int unsigned icnt;

  // per-dimension lambda for the three bits of one PAM-8 part (Q.18)
  function automatic void pam_lambda(input logic signed [W_LCU_IN-1:0] z,
                                     output lam_t lam [3]);
    lam_t cost [8];
    lam_t m0, m1, a;
    for (int k = 0; k < 8; k++) begin
      a       = lam_t'((2 * k - 7) * PAM_LVL);
      cost[k] = a * a - 2 * a * lam_t'(z);
    end
    for (int b = 0; b < 3; b++) begin
      m0 = 32'sh3fffffff;
      m1 = 32'sh3fffffff;
      for (int k = 0; k < 8; k++) begin
        int g;
        g = k ^ (k >> 1);
        if (((g >> (2 - b)) & 1) == 1) begin
          if (cost[k] < m1) m1 = cost[k];
        end else begin
          if (cost[k] < m0) m0 = cost[k];
        end
      end
      lam[b] = m0 - m1;
    end
  endfunction

  // stage 1: z = s / mu
  logic signed [W_LCU_IN-1:0] z_re, z_im;
  logic [W_SCU-1:0]           rho1;
  logic [7:0]                 u1;
  logic                       v1;
  // stage 2: lambda
  lam_t                       lam2 [B_BITS];
  logic [W_SCU-1:0]           rho2;
  logic [7:0]                 u2;
  logic                       v2;

  function automatic logic signed [W_LCU_IN-1:0] to_z(input d_t sv, input logic [W_SCU-1:0] mi);
    logic signed [47:0] s12, p;
    s12 = sat(rsh(48'(sv), F_S - F_Z), W_LCU_IN);     // 12-bit LCU input
    p   = s12 * 48'(mi);
    return W_LCU_IN'(sat(rsh(p, F_MUINV), W_LCU_IN));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; icnt <= 0; done <= 1'b0;
      z_re <= '0; z_im <= '0; rho1 <= '0; u1 <= '0; v1 <= 1'b0;
      rho2 <= '0; u2 <= '0; v2 <= 1'b0;
      for (int b = 0; b < B_BITS; b++) begin lam2[b] <= '0; llr[b] <= '0; end
      llr_valid <= 1'b0; llr_user <= '0;
    end else begin
      done <= 1'b0;
      // input sequencing
      v1 <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; icnt <= 0;
      end else if (busy) begin
        int unsigned i;
        i = (icnt < NT) ? icnt : 0;
        z_re <= to_z(s[i].re, muinv[i]);
        z_im <= to_z(s[i].im, muinv[i]);
        rho1 <= rho[i];
        u1   <= 8'(icnt);
        v1   <= 1'b1;
        if (icnt == NT - 1) busy <= 1'b0;
        icnt <= icnt + 1;
      end
      // stage 2
      begin
        lam_t lr [3], li [3];
        pam_lambda(z_re, lr);
        pam_lambda(z_im, li);
        for (int b = 0; b < 3; b++) begin
          lam2[b]     <= lr[b];
          lam2[b + 3] <= li[b];
        end
      end
      rho2 <= rho1; u2 <= u1; v2 <= v1;
      // stage 3
      for (int b = 0; b < B_BITS; b++)
        llr[b] <= W_LLR'(sat(rsh(48'(lam2[b]) * 48'(rho2), 2 * F_Z + F_RHO), W_LLR));
      llr_user  <= u2;
      llr_valid <= v2;
      if (v2 && u2 == 8'(NT - 1)) done <= 1'b1;
    end
  end
endmodule
