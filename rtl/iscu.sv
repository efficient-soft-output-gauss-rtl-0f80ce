// iscu -- initial solution computation unit (the paper's Sec. IV-C, Figs. 11
// and 13). It forms the 2-term Neumann-series approximation
//     W2^-1 = D^-1 - D^-1 E D^-1
// and the initial Gauss-Seidel solution s0 = W2^-1 yMF, all in the
// normalised domain (W/Nr, yMF/Nr, Q2.12), where both steps give the same
// numbers as in raw units because the two 1/Nr factors cancel.
//
// Schedule after start (the low-latency architecture of Fig. 13):
//   1. NT reciprocal units work in parallel on all diagonal entries d_i
//      (3-cycle table lookup); d^-1 is then held as a vector (dinv, also used
//      by the forward substitution and the SINR unit, dinv_valid high).
//   2. One row w_i of W2^-1 per cycle, NT cycles: the row e_i of E is negated,
//      scaled by d_i^-1 (mul-A), multiplied element-wise by d^-1 (mul-B) and
//      d_i^-1 is added on the diagonal.
//   3. s0 = W2^-1 yMF on the matched-filter style systolic array, 2NT-1
//      cycles. done pulses when s0 is valid.
// Stages 2 and 3 take 3NT-1 cycles, the ISCU time of the paper's Fig. 18.
// The entries are decompressed on entry, as the paper prescribes.
module iscu
  import igs_pkg::*;
#(
  parameter int NT = 8,
  parameter int NR = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cwc_t  wc_low [NT][NT],
  input  cplx_t ymf    [NT],
  output logic  dinv_valid,
  output d_t    dinv   [NT],
  output cplx_t w2inv  [NT][NT],
  output cplx_t s0     [NT],
  output logic  done
);
  typedef enum logic [2:0] {S_IDLE, S_RECIP, S_ROWS, S_MV, S_OUT} state_t;
  state_t state;
  int unsigned cnt;

  cplx_t wn [NT][NT];
  w_unpack #(.NT(NT), .NR(NR)) u_unpack (.wc_low, .w(wn));

  // reciprocal units (one per user)
  logic [NT-1:0]  rv;
  logic [13:0]    rq [NT];
  logic           rstart;
  assign rstart = (state == S_IDLE) && start;

  for (genvar i = 0; i < NT; i++) begin : g_rec
    logic [14:0] dx;
    assign dx = wn[i][i].re[W_D-1] ? '0 : wn[i][i].re;
    recip_lut #(.IN_W(15), .IN_F(F_S), .OUT_W(14), .OUT_F(F_S)) u_rec (
      .clk, .rst_n, .in_valid(rstart), .x(dx), .out_valid(rv[i]), .y(rq[i])
    );
  end

  // row computation (mul-A, mul-B, add)
  cplx_t row_c [NT];
  int unsigned r;
  assign r = (cnt < NT) ? cnt : 0;
  always_comb begin
    cplx_t e, m;
    cwide_t p;
    for (int j = 0; j < NT; j++) begin
      e = (j == int'(r)) ? '0 : wn[r][j];
      e.re = sat_d(-48'(e.re));                       // -1
      e.im = sat_d(-48'(e.im));
      p.re = 48'(dinv[r]) * 48'(e.re);             // mul-A
      p.im = 48'(dinv[r]) * 48'(e.im);
      m    = wide2d(p, F_S);
      p.re = 48'(m.re) * 48'(dinv[j]);               // mul-B
      p.im = 48'(m.im) * 48'(dinv[j]);
      row_c[j] = wide2d(p, F_S);
      if (j == int'(r)) row_c[j].re = sat_d(48'(row_c[j].re) + 48'(dinv[r]));  // add
    end
  end

  // s0 = W2^-1 yMF
  logic  mv_clr, mv_en;
  cplx_t mv_col [NT];
  cplx_t mv_x;
  cacc_t mv_acc [NT];
  assign mv_en  = (state == S_MV);
  assign mv_clr = (state == S_ROWS);
  always_comb begin
    for (int i = 0; i < NT; i++)
      mv_col[i] = (cnt < NT) ? w2inv[i][cnt] : '0;
    mv_x = (cnt < NT) ? ymf[cnt] : '0;
  end
  mv_systolic #(.N(NT), .PROD_SH(2 * F_S - F_ACC)) u_mv (
    .clk, .rst_n, .clr(mv_clr), .en(mv_en), .a_col(mv_col), .x(mv_x), .acc(mv_acc)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= 0; done <= 1'b0; dinv_valid <= 1'b0;
      for (int i = 0; i < NT; i++) begin
        dinv[i] <= '0; s0[i] <= '0;
        for (int j = 0; j < NT; j++) w2inv[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RECIP; dinv_valid <= 1'b0;
        end
        S_RECIP: if (rv[0]) begin
          for (int i = 0; i < NT; i++) dinv[i] <= d_t'({1'b0, rq[i]});
          dinv_valid <= 1'b1;
          state <= S_ROWS; cnt <= 0;
        end
        S_ROWS: begin
          for (int j = 0; j < NT; j++) w2inv[r][j] <= row_c[j];
          if (cnt == NT - 1) begin state <= S_MV; cnt <= 0; end
          else cnt <= cnt + 1;
        end
        S_MV: begin
          if (cnt == 2 * NT - 2) state <= S_OUT;
          cnt <= cnt + 1;
        end
        S_OUT: begin
          for (int i = 0; i < NT; i++) s0[i] <= acc2d(mv_acc[i], F_ACC - F_S);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
