// tb_rgm_array -- checks the triangular Gram-matrix array bit-exactly:
// lower triangle of H^H H (products rounded by 12 bits, accumulated, then
// rounded to Q9.5) with N0 added on the diagonal, against an integer model;
// and checks that W appears exactly after LEN + 2N - 1 enabled cycles.
module tb_rgm_array;
  import igs_pkg::*;
  localparam int N = 8, LEN = 32;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  always #5 clk = ~clk;
  cplx_t h_col [N];
  d_t    n0;
  cplx_t w_low [N][N];
  rgm_array #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint hr [N][LEN], hi [N][LEN];   // H^H[i][k]
  longint er [N][N], ei [N][N];

  function automatic longint rnd(longint v, int sh);
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) h_col[i] = '0;
    n0 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      n0 = d_t'($urandom_range(4000));
      for (int k = 0; k < LEN; k++)
        for (int i = 0; i < N; i++) begin
          hr[i][k] = longint'($urandom_range(8000)) - 4000;
          hi[i][k] = longint'($urandom_range(8000)) - 4000;
        end
      for (int i = 0; i < N; i++)
        for (int j = 0; j <= i; j++) begin
          longint ar, ai;
          ar = 0; ai = 0;
          for (int k = 0; k < LEN; k++) begin
            // H^H[i][k] * conj(H^H[j][k])
            ar += rnd(hr[i][k] * hr[j][k] + hi[i][k] * hi[j][k], 12);
            ai += rnd(hi[i][k] * hr[j][k] - hr[i][k] * hi[j][k], 12);
          end
          if (i == j) begin ar += longint'(n0) << 2; ai = 0; end
          er[i][j] = rnd(ar, 7);
          ei[i][j] = rnd(ai, 7);
        end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int t = 0; t < LEN + 2 * N - 1; t++) begin
        en = 1;
        for (int i = 0; i < N; i++) begin
          h_col[i].re = (t < LEN) ? d_t'(hr[i][t]) : '0;
          h_col[i].im = (t < LEN) ? d_t'(hi[i][t]) : '0;
        end
        @(negedge clk);
        if (t == LEN + 2 * N - 3) begin
          checks++;
          if (longint'(w_low[N-1][N-1].re) == er[N-1][N-1]) begin
            failures++; $display("W[N-1][N-1] valid too early");
          end
        end
      end
      en = 0;
      @(negedge clk);
      for (int i = 0; i < N; i++)
        for (int j = 0; j <= i; j++) begin
          checks++;
          if (longint'(w_low[i][j].re) != er[i][j] || longint'(w_low[i][j].im) != ei[i][j]) begin
            failures++;
            $display("W[%0d][%0d] got %0d %0d expected %0d %0d", i, j,
                     w_low[i][j].re, w_low[i][j].im, er[i][j], ei[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
