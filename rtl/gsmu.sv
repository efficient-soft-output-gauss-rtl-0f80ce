// gsmu -- Gauss-Seidel method unit (the paper's Sec. IV-D, Fig. 15).
// Each iteration computes
//     s(k) = N' ( y' + (1/Nr) M s(k-1) ),   M = -L^H,  N' = Nr (D+L)^-1,
// y' = yMF/Nr, which equals s(k) = (D+L)^-1 (yMF - L^H s(k-1)).
// Phase 1 (mul-C): c = M s(k-1) on a reversed-schedule triangular systolic
//   array; M is used in raw units (Q9.5) and the 1/Nr scaling is a shift.
// Phase 2 (add):   b = y' + c, NT complex adders, one cycle.
// Phase 3 (mul-D): s(k) = N' b on the second reversed-schedule array.
// s(k) is kept in a register and fed back; the number of iterations k_iter
// (>= 1) is sampled at start. All values are Q2.12 except M.
//
// Timing: start -> mul-C (NT cycles) -> add -> mul-D (NT cycles) per
// iteration; each array adds one cycle for its done flag, so an iteration
// takes 2NT+3 cycles against the paper's 2NT+1. done pulses with s valid.
module gsmu
  import igs_pkg::*;
#(
  parameter int NT      = 8,
  parameter int NR      = 128,
  parameter int LOG2_NR = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] k_iter,
  input  cplx_t      s0     [NT],
  input  cplx_t      yn     [NT],       // y' = yMF/Nr
  input  cplx_t      np     [NT][NT],   // N'
  input  cwc_t       wc_low [NT][NT],
  output cplx_t      s      [NT],
  output logic       done
);
  typedef enum logic [1:0] {S_IDLE, S_C, S_ADD, S_D} state_t;
  state_t     state;
  logic [3:0] k_left;

  cplx_t wn [NT][NT];
  cplx_t m  [NT][NT];
  w_unpack #(.NT(NT), .NR(NR)) u_unpack (.wc_low, .w(wn));

  always_comb
    for (int i = 0; i < NT; i++)
      for (int j = 0; j < NT; j++)
        if (j > i) begin
          m[i][j].re = sat_d(-48'(wn[i][j].re));
          m[i][j].im = sat_d(-48'(wn[i][j].im));
        end else m[i][j] = '0;

  cplx_t b [NT];
  cacc_t c_acc [NT], d_acc [NT];
  logic  c_start, c_done, d_start, d_done;

  assign c_start = (state == S_IDLE && start) || (state == S_D && d_done && k_left != 0);
  assign d_start = (state == S_ADD);

  tri_mv_systolic #(.N(NT), .MODE(0), .PROD_SH(F_W + F_S - F_ACC)) u_mulc (
    .clk, .rst_n, .start(c_start), .mat(m), .vec(s), .res(c_acc), .done(c_done)
  );
  tri_mv_systolic #(.N(NT), .MODE(1), .PROD_SH(2 * F_S - F_ACC)) u_muld (
    .clk, .rst_n, .start(d_start), .mat(np), .vec(b), .res(d_acc), .done(d_done)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; k_left <= '0; done <= 1'b0;
      for (int i = 0; i < NT; i++) begin s[i] <= '0; b[i] <= '0; end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < NT; i++) s[i] <= s0[i];
          k_left <= (k_iter == 0) ? 4'd0 : k_iter - 4'd1;
          state  <= S_C;
        end
        S_C: if (c_done) begin
          for (int i = 0; i < NT; i++) begin
            cplx_t c;
            c = acc2d(c_acc[i], LOG2_NR + F_ACC - F_S);   // (1/Nr) M s
            b[i].re <= sat_d(48'(yn[i].re) + 48'(c.re));
            b[i].im <= sat_d(48'(yn[i].im) + 48'(c.im));
          end
          state <= S_ADD;
        end
        S_ADD: state <= S_D;
        S_D: if (d_done) begin
          for (int i = 0; i < NT; i++) s[i] <= acc2d(d_acc[i], 0);
          if (k_left != 0) begin
            k_left <= k_left - 4'd1;
            state  <= S_C;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
