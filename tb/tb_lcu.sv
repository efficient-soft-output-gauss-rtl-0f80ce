// tb_lcu -- checks the LLR unit against a floating-point max-log evaluation
// of Eq. 5 on the same Gray-labelled 64-QAM constellation: z = s / mu from
// the 12-bit input, LLR = rho * lambda_b(z), saturated to 10 bits. The
// tolerance covers the 12-bit quantisation of s and z. Also checks the
// output order (users 0..NT-1 on consecutive cycles) and its start 4 cycles
// after start, and that saturation occurs.
module tb_lcu;
  import igs_pkg::*;
  import igs_tb_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst_n = 0, start = 0, done, llr_valid;
  always #5 clk = ~clk;
  cplx_t s [NT];
  logic [W_SCU-1:0] rho [NT], muinv [NT];
  logic [7:0] llr_user;
  logic signed [W_LLR-1:0] llr [B_BITS];
  lcu #(.NT(NT)) dut (.*);

  int checks = 0, failures = 0, nsat = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      int t;
      for (int i = 0; i < NT; i++) begin
        s[i].re = d_t'($urandom_range(10000) - 5000);
        s[i].im = d_t'($urandom_range(10000) - 5000);
        rho[i]  = W_SCU'($urandom_range((rep < 25) ? 800 : 4095));
        muinv[i] = W_SCU'($urandom_range(2600, 2048));
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t = 1;
      while (!llr_valid) begin @(negedge clk); t++; end
      checks++;
      if (t != 4) begin failures++; $display("first output after %0d cycles", t); end
      for (int u = 0; u < NT; u++) begin
        real l [6];
        cr_t z;
        checks++;
        if (!llr_valid || llr_user != 8'(u)) begin failures++; $display("user order"); end
        z = cscale(c(real'(s[u].re) / 4096.0, real'(s[u].im) / 4096.0), real'(muinv[u]) / 2048.0);
        llr_ref(z, real'(rho[u]) / 4.0, l);
        for (int b = 0; b < 6; b++) begin
          real e, d;
          e = l[b]; if (e > 511) e = 511; if (e < -512) e = -512;
          d = real'(llr[b]) - e; if (d < 0) d = -d;
          if (llr[b] == 511 || llr[b] == -512) nsat++;
          checks++;
          if (d > 1.5 + 0.02 * real'(rho[u]) / 4.0) begin
            failures++; $display("user %0d bit %0d: got %0d expected %0.2f", u, b, llr[b], l[b]);
          end
        end
        @(negedge clk);
      end
    end
    checks++; if (nsat == 0) begin failures++; $display("no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
