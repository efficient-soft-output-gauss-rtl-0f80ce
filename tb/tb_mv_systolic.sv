// tb_mv_systolic -- checks the systolic matrix-vector array bit-exactly
// against an integer model (rounded product shift, then accumulate), and
// checks that the result is complete exactly after LEN + N - 1 enabled
// cycles, not one cycle earlier. Random enable gaps check that the array
// holds its state while en is low.
module tb_mv_systolic;
  import igs_pkg::*;
  localparam int N = 8, LEN = 24, SH = 10;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  always #5 clk = ~clk;
  cplx_t a_col [N];
  cplx_t x;
  cacc_t acc [N];
  mv_systolic #(.N(N), .PROD_SH(SH)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint a_re [N][LEN], a_im [N][LEN], x_re [LEN], x_im [LEN];
  longint ref_re [N], ref_im [N];

  function automatic longint rnd(longint v, int sh);
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) a_col[i] = '0;
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int k = 0; k < LEN; k++) begin
        x_re[k] = longint'($urandom_range(8000)) - 4000;
        x_im[k] = longint'($urandom_range(8000)) - 4000;
        for (int i = 0; i < N; i++) begin
          a_re[i][k] = longint'($urandom_range(8000)) - 4000;
          a_im[i][k] = longint'($urandom_range(8000)) - 4000;
        end
      end
      for (int i = 0; i < N; i++) begin
        ref_re[i] = 0; ref_im[i] = 0;
        for (int k = 0; k < LEN; k++) begin
          ref_re[i] += rnd(a_re[i][k] * x_re[k] - a_im[i][k] * x_im[k], SH);
          ref_im[i] += rnd(a_re[i][k] * x_im[k] + a_im[i][k] * x_re[k], SH);
        end
      end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int t = 0; t < LEN + N - 1; t++) begin
        while ($urandom_range(3) == 0) begin en = 0; @(negedge clk); end
        en = 1;
        for (int i = 0; i < N; i++) begin
          a_col[i].re = (t < LEN) ? d_t'(a_re[i][t]) : '0;
          a_col[i].im = (t < LEN) ? d_t'(a_im[i][t]) : '0;
        end
        x.re = (t < LEN) ? d_t'(x_re[t]) : '0;
        x.im = (t < LEN) ? d_t'(x_im[t]) : '0;
        @(negedge clk);
        if (t == LEN + N - 3) begin
          // one cycle early the last row is still missing its last product
          checks++;
          if (longint'(acc[N-1].re) == ref_re[N-1] && longint'(acc[N-1].im) == ref_im[N-1]) begin
            failures++; $display("last row complete too early");
          end
        end
      end
      en = 0;
      repeat (2) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (longint'(acc[i].re) != ref_re[i] || longint'(acc[i].im) != ref_im[i]) begin
          failures++;
          $display("row %0d: got %0d %0d, expected %0d %0d", i, acc[i].re, acc[i].im, ref_re[i], ref_im[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
