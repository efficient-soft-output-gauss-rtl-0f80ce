// rgm_array -- triangular systolic array computing the lower triangle of the
// regularized Gram matrix W = H^H H + N0 I (the paper's Fig. 7).
//
// The array has N(N+1)/2 PEs: PE-B on the diagonal, PE-A below it. Each
// enabled cycle the caller presents column k of H^H (h_col[i] = conj(H[k][i])).
// Row i of that column is skewed by i cycles at the input and then moves right
// along row i of the array. When a value reaches the PE-B of its row it is
// conjugated and sent down that column, so PE-A (i,j) sees H^H[i][k] from the
// left and conj(H^H[j][k]) from above in the same cycle and accumulates their
// product, G[i][j]. PE-B (i,i) accumulates |H^H[i][k]|^2 (a real value) and
// adds N0 when the result is read out.
//
// Timing: LEN columns, then 2(N-1) drain cycles with zero input, then the
// registered output stage: W is valid in w_low after LEN + 2N - 1 enabled
// cycles, the latency the paper gives (2Nt + Nr - 1).
// w_low[i][j] is meaningful for i >= j (15 bit, Q9.5), other entries are 0.
module rgm_array
  import igs_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  cplx_t h_col [N],
  input  d_t    n0,             // Q4.10
  output cplx_t w_low [N][N]
);

  cplx_t a_dly [N][N];          // input skew lines
  cplx_t hreg  [N][N];          // value leaving PE (i,j) to the right
  cplx_t vreg  [N][N];          // value leaving PE (i,j) downwards
  cacc_t acc   [N][N];
  cplx_t h_in  [N][N];
  cplx_t v_in  [N][N];

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (j == 0) h_in[i][j] = (i == 0) ? h_col[0] : a_dly[i][i-1];
        else        h_in[i][j] = hreg[i][j-1];
        v_in[i][j] = (i > j) ? vreg[i-1][j] : '0;
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_dly[i][j] <= '0;
          hreg[i][j]  <= '0;
          vreg[i][j]  <= '0;
          acc[i][j]   <= '0;
        end
    end else if (en) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_dly[i][j] <= (j == 0) ? h_col[i] : a_dly[i][j-1];
          if (j < i) begin
            // PE-A
            hreg[i][j] <= h_in[i][j];
            vreg[i][j] <= v_in[i][j];
            acc[i][j]  <= cmac(acc[i][j], cmul(h_in[i][j], v_in[i][j]), 2*F_H - F_ACC);
          end else if (j == i) begin
            // PE-B: conjugate and pass down, accumulate |h|^2
            vreg[i][j]  <= cconj(h_in[i][j]);
            acc[i][j]   <= cmac(acc[i][j], cmul(h_in[i][j], cconj(h_in[i][j])), 2*F_H - F_ACC);
          end
        end
    end
  end

  // output stage; PE-B adds N0 to the diagonal
  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) w_low[i][j] <= '0;
    end else if (en) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          if (j < i)
            w_low[i][j] <= acc2d(acc[i][j], F_ACC - F_W);
          else if (j == i) begin
            w_low[i][j].re <= sat_d(rsh(48'(acc[i][j].re) + (48'(n0) <<< (F_ACC - F_N0)),
                                        F_ACC - F_W));
            w_low[i][j].im <= '0;
          end else
            w_low[i][j] <= '0;
        end
    end
  end

endmodule
