// tb_pu -- checks the preprocessing unit at a reduced size (NT = 4,
// NR = 16): random channel, receive vector and noise variance are streamed
// in with random gaps; yMF must match H^H y and the decompressed register
// file must match H^H H + N0 I (lower triangle) within the quantisation of
// the compressed format. Also checks that done comes 2NT cycles after the
// last beat and that in_ready is low outside the load phase.
module tb_pu;
  import igs_pkg::*;
  import igs_tb_pkg::*;
  localparam int NT = 4, NR = 16;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_ready, done;
  always #5 clk = ~clk;
  cplx_t h_col [NT];
  cplx_t y;
  d_t    n0;
  cplx_t ymf [NT];
  cwc_t  wc_low [NT][NT];
  pu #(.NT(NT), .NR(NR)) dut (.*);
  cplx_t wdec [NT][NT];
  w_unpack #(.NT(NT), .NR(NR)) u_unp (.wc_low, .w(wdec));

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    igs_model m;
    for (int i = 0; i < NT; i++) h_col[i] = '0;
    y = '0; n0 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      int t;
      m = new(NT, NR);
      for (int k = 0; k < NR; k++) begin
        m.y[k] = from_cfix(to_cfix(cgauss(4.0), F_Y), F_Y);
        for (int i = 0; i < NT; i++) m.h[k][i] = from_cfix(to_cfix(cgauss(1.0), F_H), F_H);
      end
      m.n0 = from_fix(longint'(to_fix(0.05 * real'(rep + 1), F_N0)), F_N0);
      m.preprocess();
      @(negedge clk); start = 1; n0 = to_fix(m.n0, F_N0); @(negedge clk); start = 0;
      for (int k = 0; k < NR; k++) begin
        while ($urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < NT; i++) h_col[i] = to_cfix(cconjr(m.h[k][i]), F_H);
        y = to_cfix(m.y[k], F_Y);
        checks++;
        if (!in_ready) begin failures++; $display("not ready in load phase"); end
        @(negedge clk);
      end
      in_valid = 0;
      t = 0;
      while (!done) begin
        checks++;
        if (in_ready) begin failures++; $display("ready after the load phase"); end
        @(negedge clk); t++;
      end
      checks++;
      if (t != 2 * NT) begin failures++; $display("done %0d cycles after last beat", t); end
      @(negedge clk);
      for (int i = 0; i < NT; i++) begin
        cr_t g, d;
        g = from_cfix(ymf[i], F_W);
        d = csub(g, m.ymf[i]);
        checks++;
        if (cabs(d) > 0.06) begin failures++; $display("yMF[%0d] off by %0.4f", i, cabs(d)); end
        for (int j = 0; j <= i; j++) begin
          g = from_cfix(wdec[i][j], F_W);
          d = csub(g, m.w[i][j]);
          checks++;
          if (cabs(d) > 0.4) begin
            failures++; $display("W[%0d][%0d] got %0.3f,%0.3f expected %0.3f,%0.3f", i, j, g.re, g.im, m.w[i][j].re, m.w[i][j].im);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
