// scu -- SINR computation unit (the paper's Sec. III-C and IV-E).
// With the 2-term Neumann approximation the diagonal of W^-1 is 1/d_i, so
//     mu_i  = 1 - N0 W'_ii = 1 - N0 (1/d_i)       (effective channel gain)
//     rho_i = mu_i / (1 - mu_i)                    (post-equalisation SINR)
// The unit also returns 1/mu_i, which the LLR unit needs for z_i = s_i/mu_i.
// The normalised reciprocal dinv_i = Nr/d_i comes from the ISCU, so
// N0/d_i = N0 * dinv_i / Nr, where the 1/Nr is a re-interpretation of bits.
// Built from one multiplier, one adder, two LUT reciprocal units and one
// output multiplier, processing one user per cycle (NT cycles, as in Fig. 18).
// Inputs are 15 bit (N0 Q4.10, dinv Q2.12), outputs 12 bit:
// rho unsigned Q10.2 and 1/mu unsigned Q1.11, both saturating.
// done pulses when all NT results are in rho / muinv (NT + 4 cycles after
// start); n0 and dinv must be stable from start until done.
module scu
  import igs_pkg::*;
#(
  parameter int NT      = 8,
  parameter int LOG2_NR = 7
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  d_t    n0,
  input  d_t    dinv  [NT],
  output logic [W_SCU-1:0] rho   [NT],
  output logic [W_SCU-1:0] muinv [NT],
  output logic  done
);
  localparam int XF = F_N0 + F_S + LOG2_NR;   // fraction bits of x = N0/d
  localparam int XW = 30;

  logic        busy;
  int unsigned icnt, ocnt;
  logic [XW-1:0] x_c, mu_c;
  logic          vin;

  assign vin = busy && (icnt < NT);

  always_comb begin
    logic [47:0] p;
    p    = 48'(unsigned'(n0[W_D-2:0])) * 48'(unsigned'(dinv[(icnt < NT) ? icnt : 0][W_D-2:0]));
    x_c  = (p > 48'(1) << XF) ? XW'(1) << XF : XW'(p);
    mu_c = (XW'(1) << XF) - x_c;
  end

  logic          v_x, v_m;
  logic [19:0]   inv_x;
  logic [11:0]   inv_mu;
  logic [XW-1:0] mu_d [3];

  recip_lut #(.IN_W(XW), .IN_F(XF), .OUT_W(20), .OUT_F(F_RHO)) u_rx (
    .clk, .rst_n, .in_valid(vin), .x(x_c), .out_valid(v_x), .y(inv_x)
  );
  recip_lut #(.IN_W(XW), .IN_F(XF), .OUT_W(W_SCU), .OUT_F(F_MUINV)) u_rmu (
    .clk, .rst_n, .in_valid(vin), .x(mu_c), .out_valid(v_m), .y(inv_mu)
  );

  logic [47:0] rho_w;
  always_comb begin
    logic [47:0] mu16;
    mu16  = 48'(mu_d[2] >> (XF - 15));            // mu as Q1.15
    rho_w = (mu16 * 48'(inv_x) + (48'd1 << 14)) >> 15;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; icnt <= 0; ocnt <= 0; done <= 1'b0;
      for (int i = 0; i < 3; i++) mu_d[i] <= '0;
      for (int i = 0; i < NT; i++) begin rho[i] <= '0; muinv[i] <= '0; end
    end else begin
      done <= 1'b0;
      mu_d[0] <= mu_c;
      mu_d[1] <= mu_d[0];
      mu_d[2] <= mu_d[1];
      if (start && !busy) begin
        busy <= 1'b1; icnt <= 0; ocnt <= 0;
      end else if (busy) begin
        if (icnt < NT) icnt <= icnt + 1;
        if (v_x) begin
          rho[ocnt]   <= (rho_w > 48'((1 << W_SCU) - 1)) ? W_SCU'((1 << W_SCU) - 1) : W_SCU'(rho_w);
          muinv[ocnt] <= inv_mu;
          if (ocnt == NT - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          ocnt <= ocnt + 1;
        end
      end
    end
  end
endmodule
