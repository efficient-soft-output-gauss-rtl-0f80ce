// tb_fs_unit -- checks the forward substitution: N' = (D + L)^-1 in the
// normalised domain against a floating-point forward substitution of the
// same matrix (reciprocals 1/d_i supplied in Q2.12), including the zero
// upper triangle; done exactly NT(NT+1)/2 + 1 cycles after start.
module tb_fs_unit;
  import igs_pkg::*;
  import igs_tb_pkg::*;
  localparam int NT = 8, NR = 128;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  d_t    dinv [NT];
  cwc_t  wc_low [NT][NT];
  cplx_t np [NT][NT];
  fs_unit #(.NT(NT), .NR(NR)) dut (.*);

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
      for (int i = 0; i < NT; i++) dinv[i] = to_fix(1.0 / m.w[i][i].re, F_S);
      m.lower_inverse();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      checks++;
      if (t != NT * (NT + 1) / 2 + 1) begin failures++; $display("done after %0d cycles", t); end
      @(negedge clk);
      for (int i = 0; i < NT; i++)
        for (int j = 0; j < NT; j++) begin
          cr_t d;
          d = csub(from_cfix(np[i][j], F_S), m.ninv[i][j]);
          checks++;
          if (cabs(d) > 0.003) begin failures++; $display("N'[%0d][%0d] error %0.5f", i, j, cabs(d)); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
