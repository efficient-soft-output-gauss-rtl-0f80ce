// tb_iscu -- checks the initial solution unit: d^-1, the 2-term Neumann
// approximation W2^-1 = D^-1 - D^-1 E D^-1 and s0 = W2^-1 y' against a
// floating-point evaluation of the same formulas (tolerances cover the
// 15-bit Q2.12 word length), and the schedule: dinv_valid before the rows,
// done exactly 3NT + 4 cycles after start (3-cycle reciprocal, NT rows,
// 2NT-1 array cycles, output register).
module tb_iscu;
  import igs_pkg::*;
  import igs_tb_pkg::*;
  localparam int NT = 8, NR = 128;
  logic clk = 0, rst_n = 0, start = 0, dinv_valid, done;
  always #5 clk = ~clk;
  cwc_t  wc_low [NT][NT];
  cplx_t ymf [NT];
  d_t    dinv [NT];
  cplx_t w2inv [NT][NT];
  cplx_t s0 [NT];
  iscu #(.NT(NT), .NR(NR)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  `include "tb_iscu_common.svh"

  initial begin
    igs_model m;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      int t;
      m = new(NT, NR);
      make_w(wc_low, m.w);
      for (int i = 0; i < NT; i++) begin
        ymf[i] = to_cfix(c(2.0 * urand() - 1.0, 2.0 * urand() - 1.0), F_S);
        m.ymf[i] = from_cfix(ymf[i], F_S);
      end
      m.init_solution();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      checks += 2;
      if (t != 3 * NT + 4) begin failures++; $display("done after %0d cycles", t); end
      if (!dinv_valid) begin failures++; $display("dinv not valid"); end
      for (int i = 0; i < NT; i++) begin
        real e;
        cr_t d;
        e = real'(dinv[i]) / 4096.0 - 1.0 / m.w[i][i].re;
        checks++;
        if (e > 0.002 || e < -0.002) begin failures++; $display("dinv[%0d] error %0.5f", i, e); end
        for (int j = 0; j < NT; j++) begin
          d = csub(from_cfix(w2inv[i][j], F_S), m.w2[i][j]);
          checks++;
          if (cabs(d) > 0.003) begin failures++; $display("W2inv[%0d][%0d] error %0.5f", i, j, cabs(d)); end
        end
        d = csub(from_cfix(s0[i], F_S), m.s0[i]);
        checks++;
        if (cabs(d) > 0.01) begin failures++; $display("s0[%0d] error %0.5f", i, cabs(d)); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
