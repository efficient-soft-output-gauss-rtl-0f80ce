// mv_systolic -- linear systolic array of N complex MAC processing elements
// computing acc = A * x (the matched-filter array of the paper's Fig. 6).
//
// Each enabled cycle the caller presents one column k of A (a_col[i] = A[i][k])
// and the matching vector entry x_k. Column entry i is skewed by i cycles in a
// small input delay line and x_k travels down the PE chain one PE per cycle,
// so PE i multiplies A[i][k] by x_k i cycles after they were presented
// (the staggered "dashed line" of Fig. 6). After LEN columns, N-1 further
// enabled cycles with zero inputs drain the skew: LEN + N - 1 cycles in all,
// the latency the paper states for the matched filter (Nt + Nr - 1).
//
// en   : advances the whole array (input skew, x chain and accumulators)
// clr  : synchronous clear of accumulators and pipeline
// acc  : 22-bit MAC registers; each product is shifted right by PROD_SH
//        before accumulation so that the accumulator keeps F_ACC fraction bits.
// The array is used as the matched filter (A = H^H, x = y) and in the ISCU
// for s0 = W2^-1 yMF, which the paper says runs on the same structure.
module mv_systolic
  import igs_pkg::*;
#(
  parameter int N       = 8,    // number of PEs (rows), Nt
  parameter int PROD_SH = 10    // product fraction bits minus F_ACC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  cplx_t a_col [N],
  input  cplx_t x,
  output cacc_t acc   [N]
);

  // a_dly[i][j]: column entry for row i, delayed j+1 cycles
  cplx_t a_dly [N][N];
  cplx_t x_pipe [N];     // x_pipe[i]: value of x held by PE i (i >= 1)
  cplx_t a_at [N];
  cplx_t x_at [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      a_at[i] = (i == 0) ? a_col[0] : a_dly[i][i-1];
      x_at[i] = (i == 0) ? x        : x_pipe[i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        acc[i]    <= '0;
        x_pipe[i] <= '0;
        for (int j = 0; j < N; j++) a_dly[i][j] <= '0;
      end
    end else if (clr) begin
      for (int i = 0; i < N; i++) begin
        acc[i]    <= '0;
        x_pipe[i] <= '0;
        for (int j = 0; j < N; j++) a_dly[i][j] <= '0;
      end
    end else if (en) begin
      for (int i = 0; i < N; i++) begin
        acc[i] <= cmac(acc[i], cmul(a_at[i], x_at[i]), PROD_SH);
        for (int j = 0; j < N; j++)
          a_dly[i][j] <= (j == 0) ? a_col[i] : a_dly[i][j-1];
        if (i > 0) x_pipe[i] <= x_at[i-1];
      end
    end
  end

endmodule
