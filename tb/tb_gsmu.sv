// tb_gsmu -- checks the Gauss-Seidel unit for K = 1, 2 and 3 iterations:
// s(K) must match a floating-point in-place Gauss-Seidel sweep started from
// the same s0 (N' supplied from the exact lower-triangular inverse in
// Q2.12), within the fixed-point tolerance; and done must come exactly
// K(2NT+3) + 1 cycles after start.
module tb_gsmu;
  import igs_pkg::*;
  import igs_tb_pkg::*;
  localparam int NT = 8, NR = 128;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  logic [3:0] k_iter;
  cplx_t s0 [NT], yn [NT], s [NT];
  cplx_t np [NT][NT];
  cwc_t  wc_low [NT][NT];
  gsmu #(.NT(NT), .NR(NR)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  `include "tb_iscu_common.svh"

  initial begin
    igs_model m;
    k_iter = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 30; rep++) begin
      int t, k;
      k = 1 + rep % 3;
      m = new(NT, NR);
      make_w(wc_low, m.w);
      for (int i = 0; i < NT; i++) begin
        yn[i] = to_cfix(c(2.0 * urand() - 1.0, 2.0 * urand() - 1.0), F_S);
        m.ymf[i] = from_cfix(yn[i], F_S);
      end
      m.init_solution();
      m.lower_inverse();
      for (int i = 0; i < NT; i++) begin
        s0[i] = to_cfix(m.s0[i], F_S);
        m.s0[i] = from_cfix(s0[i], F_S);
        for (int j = 0; j < NT; j++) np[i][j] = to_cfix(m.ninv[i][j], F_S);
      end
      m.gs(k);
      k_iter = 4'(k);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      checks++;
      if (t != k * (2 * NT + 3) + 1) begin failures++; $display("K=%0d done after %0d cycles", k, t); end
      for (int i = 0; i < NT; i++) begin
        cr_t d;
        d = csub(from_cfix(s[i], F_S), m.s[i]);
        checks++;
        if (cabs(d) > 0.01) begin failures++; $display("K=%0d s[%0d] error %0.5f", k, i, cabs(d)); end
      end
      // the iteration must have moved s away from s0 when s0 is not yet exact
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
