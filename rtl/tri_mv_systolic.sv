// tri_mv_systolic -- linear systolic array of N complex MACs for a triangular
// matrix-vector product with the reversed input schedule of the paper's
// Figs. 16 and 17. A plain systolic matrix-vector product needs 2N-1 cycles;
// reversing the input order lets every PE finish after N cycles.
//
// MODE 0 (mul-C, upper-triangular M, Fig. 16): the vector enters the top PE
//   in reverse order v[N-1], ..., v[0] and moves one PE down per cycle; PE p
//   computes row p and meets v[j] with M[p][j] for j = N-1 down to p.
// MODE 1 (mul-D, lower-triangular N', Fig. 17): the vector enters in natural
//   order v[0], ..., v[N-1]; PE p computes row N-1-p (the rows are assigned in
//   reverse) and meets v[j] with N'[N-1-p][j] for j = 0 .. N-1-p.
// In both modes the entries PE p would need outside the triangle arrive
// after cycle N-1 and are never used.
//
// start clears the accumulators; res (22-bit MAC registers, products shifted
// right by PROD_SH) is valid when done pulses, N+1 cycles after start
// (N MAC cycles plus the done register). mat and vec must be held stable.
module tri_mv_systolic
  import igs_pkg::*;
#(
  parameter int N       = 8,
  parameter int MODE    = 0,
  parameter int PROD_SH = 12
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t mat [N][N],
  input  cplx_t vec [N],
  output cacc_t res [N],
  output logic  done
);
  logic        busy;
  int unsigned t;
  cplx_t       x_pipe [N];
  cplx_t       x_at   [N];
  cplx_t       m_at   [N];
  cacc_t       acc    [N];

  always_comb begin
    for (int p = 0; p < N; p++) begin
      int e;     // index of the vector entry at PE p in this cycle
      int row;
      e   = (MODE == 0) ? (N - 1 - (int'(t) - p)) : (int'(t) - p);
      row = (MODE == 0) ? p : (N - 1 - p);
      if (p == 0) x_at[p] = vec[(MODE == 0) ? (N - 1 - ((t < N) ? t : 0)) : ((t < N) ? t : 0)];
      else        x_at[p] = x_pipe[p];
      if (int'(t) >= p && int'(t) < N && e >= 0 && e < N) m_at[p] = mat[row][e];
      else                                               m_at[p] = '0;
    end
    for (int p = 0; p < N; p++)
      res[(MODE == 0) ? p : (N - 1 - p)] = acc[p];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; t <= 0; done <= 1'b0;
      for (int p = 0; p < N; p++) begin acc[p] <= '0; x_pipe[p] <= '0; end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; t <= 0;
        for (int p = 0; p < N; p++) begin acc[p] <= '0; x_pipe[p] <= '0; end
      end else if (busy) begin
        for (int p = 0; p < N; p++) begin
          acc[p] <= cmac(acc[p], cmul(m_at[p], x_at[p]), PROD_SH);
          if (p > 0) x_pipe[p] <= x_at[p-1];
        end
        if (t == N - 1) begin busy <= 1'b0; done <= 1'b1; end
        t <= t + 1;
      end
    end
  end
endmodule
