// pu -- preprocessing unit: matched filter and regularized Gram matrix in
// parallel (the paper's Sec. IV-B), followed by the W compression and the
// register file that holds the results for the later units.
//
// After start the unit accepts NR input beats. A beat (in_valid high) carries
// one column k of H^H (h_col[i] = conj(H[k][i])) and y_k. Both systolic arrays
// advance only on beats, so the source may leave gaps. After the last beat
// the arrays drain for 2NT-1 cycles (the RGM latency 2Nt+Nr-1 of the paper),
// then yMF (Q9.5) and the compressed lower triangle of W are written into
// registers and done pulses for one cycle. The noise variance n0 is sampled
// at start. The upper triangle L^H is not stored: consumers read the lower
// triangle and conjugate it, which holds the same information; wc_low[i][j]
// for j > i is held at zero.
module pu
  import igs_pkg::*;
#(
  parameter int NT = 8,
  parameter int NR = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  output logic  in_ready,
  input  cplx_t h_col [NT],
  input  cplx_t y,
  input  d_t    n0,
  output logic  done,
  output cplx_t ymf    [NT],
  output cwc_t  wc_low [NT][NT]
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DRAIN, S_STORE} state_t;
  state_t state;
  int unsigned cnt;
  d_t    n0_q;
  logic  clr, en;
  cplx_t a_col [NT];
  cplx_t x_in;
  cacc_t mf_acc [NT];
  cplx_t w_low  [NT][NT];
  cwc_t  wc_c   [NT][NT];

  assign in_ready = (state == S_LOAD);
  assign clr      = start && (state == S_IDLE);
  assign en       = (state == S_LOAD && in_valid) || (state == S_DRAIN);

  always_comb begin
    for (int i = 0; i < NT; i++) a_col[i] = (state == S_LOAD) ? h_col[i] : '0;
    x_in = (state == S_LOAD) ? y : '0;
  end

  mv_systolic #(.N(NT), .PROD_SH(F_H + F_Y - F_ACC)) u_mf (
    .clk, .rst_n, .clr, .en, .a_col, .x(x_in), .acc(mf_acc)
  );

  rgm_array #(.N(NT)) u_rgm (
    .clk, .rst_n, .clr, .en, .h_col(a_col), .n0(n0_q), .w_low
  );

  for (genvar i = 0; i < NT; i++) begin : g_ci
    for (genvar j = 0; j < NT; j++) begin : g_cj
      if (j <= i) begin : g_c
        w_compress #(.NR(NR)) u_cre (.w(w_low[i][j].re), .c(wc_c[i][j].re));
        w_compress #(.NR(NR)) u_cim (.w(w_low[i][j].im), .c(wc_c[i][j].im));
      end else begin : g_z
        assign wc_c[i][j] = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= 0;
      done  <= 1'b0;
      n0_q  <= '0;
      for (int i = 0; i < NT; i++) begin
        ymf[i] <= '0;
        for (int j = 0; j < NT; j++) wc_low[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          cnt   <= 0;
          n0_q  <= n0;
        end
        S_LOAD: if (in_valid) begin
          if (cnt == NR - 1) begin
            state <= S_DRAIN;
            cnt   <= 0;
          end else cnt <= cnt + 1;
        end
        S_DRAIN: begin
          if (cnt == 2 * NT - 2) state <= S_STORE;
          cnt <= cnt + 1;
        end
        S_STORE: begin
          for (int i = 0; i < NT; i++) begin
            ymf[i] <= acc2d(mf_acc[i], F_ACC - F_W);
            for (int j = 0; j < NT; j++) wc_low[i][j] <= wc_c[i][j];
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
