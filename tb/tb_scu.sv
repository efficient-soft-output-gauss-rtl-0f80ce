// tb_scu -- checks the SINR unit against the formulas in floating point:
// mu = 1 - N0 * dinv / Nr, rho = mu / (1 - mu) (saturated at 1023.75),
// 1/mu (saturated below 2), for random noise variances and reciprocals,
// and that done follows start after NT + 4 cycles.
module tb_scu;
  import igs_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  d_t n0;
  d_t dinv [NT];
  logic [W_SCU-1:0] rho [NT], muinv [NT];
  scu #(.NT(NT)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 40; rep++) begin
      int t;
      n0 = d_t'($urandom_range(8192, 20));            // 0.02 .. 8
      for (int i = 0; i < NT; i++) dinv[i] = d_t'($urandom_range(6600, 2400));
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      checks++;
      if (t != NT + 4) begin failures++; $display("done after %0d", t); end
      for (int i = 0; i < NT; i++) begin
        real x, mu, r, mi, er, em;
        x  = real'(n0) / 1024.0 * real'(dinv[i]) / 4096.0 / 128.0;
        mu = 1.0 - x;
        r  = mu / x;  if (r > 1023.75) r = 1023.75;
        mi = 1.0 / mu; if (mi > 4095.0 / 2048.0) mi = 4095.0 / 2048.0;
        er = real'(rho[i]) / 4.0 - r;     if (er < 0) er = -er;
        em = real'(muinv[i]) / 2048.0 - mi; if (em < 0) em = -em;
        checks += 2;
        if (er > 0.25 + r / 256.0) begin failures++; $display("rho got %0d expected %0.2f", rho[i], r * 4); end
        if (em > 2.0 / 2048.0) begin failures++; $display("1/mu got %0d expected %0.2f", muinv[i], mi * 2048); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
