// tb_tri_mv_systolic -- checks both reversed schedules bit-exactly: mode 0
// (mul-C) computes M v for an upper-triangular M, mode 1 (mul-D) computes
// N' v for a lower-triangular N'; products rounded by PROD_SH bits and
// accumulated, compared with an integer model. Entries outside the
// triangle are filled with random values to show that they are never used.
// done must come N + 1 cycles after start.
module tb_tri_mv_systolic;
  import igs_pkg::*;
  localparam int N = 8, SH = 12;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  cplx_t mat [N][N];
  cplx_t vec [N];
  cacc_t res_c [N], res_d [N];
  logic  done_c, done_d;
  tri_mv_systolic #(.N(N), .MODE(0), .PROD_SH(SH)) dut_c (.clk, .rst_n, .start, .mat, .vec, .res(res_c), .done(done_c));
  tri_mv_systolic #(.N(N), .MODE(1), .PROD_SH(SH)) dut_d (.clk, .rst_n, .start, .mat, .vec, .res(res_d), .done(done_d));

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint rnd(longint v, int sh);
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      int t;
      for (int i = 0; i < N; i++) begin
        vec[i].re = d_t'($urandom_range(16000) - 8000);
        vec[i].im = d_t'($urandom_range(16000) - 8000);
        for (int j = 0; j < N; j++) begin
          mat[i][j].re = d_t'($urandom_range(16000) - 8000);
          mat[i][j].im = d_t'($urandom_range(16000) - 8000);
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!done_c) begin @(negedge clk); t++; end
      checks++;
      if (t != N + 1 || !done_d) begin failures++; $display("done after %0d cycles", t); end
      for (int i = 0; i < N; i++) begin
        longint ur, ui, lr, li;
        ur = 0; ui = 0; lr = 0; li = 0;
        for (int j = 0; j < N; j++) begin
          longint pr, pi;
          pr = longint'(mat[i][j].re) * longint'(vec[j].re) - longint'(mat[i][j].im) * longint'(vec[j].im);
          pi = longint'(mat[i][j].re) * longint'(vec[j].im) + longint'(mat[i][j].im) * longint'(vec[j].re);
          if (j >= i) begin ur += rnd(pr, SH); ui += rnd(pi, SH); end
          if (j <= i) begin lr += rnd(pr, SH); li += rnd(pi, SH); end
        end
        checks += 2;
        if (longint'(res_c[i].re) != ur || longint'(res_c[i].im) != ui) begin
          failures++; $display("mul-C row %0d got %0d expected %0d", i, res_c[i].re, ur);
        end
        if (longint'(res_d[i].re) != lr || longint'(res_d[i].im) != li) begin
          failures++; $display("mul-D row %0d got %0d expected %0d", i, res_d[i].re, lr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
