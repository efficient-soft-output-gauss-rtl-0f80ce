// tb_igs_top -- full-size end-to-end test of the detector array with all
// parameters at their defaults: 10 instances, 128 receive antennas, 8 users.
// All instances detect at the same time, each with its own channel, symbols,
// SNR and iteration count (K = 1, 2, 3 rotate over the instances); every
// odd instance receives its input with random gaps. Each instance's LLRs are
// compared with the floating-point model (sign where the model is clearly
// non-zero, value within a tolerance), the latency of the stall-free
// instances is checked against the schedule, and every mechanism (K = 1..3,
// stalls, both offset-flag states, LLR saturation) must occur.
module tb_igs_top;
  import igs_pkg::*;
  import igs_tb_pkg::*;

  localparam int NINST = 10;
  localparam int NT = 8;
  localparam int NR = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start     [NINST];
  logic       busy      [NINST];
  logic [3:0] k_iter    [NINST];
  d_t         n0        [NINST];
  logic       in_valid  [NINST];
  logic       in_ready  [NINST];
  cplx_t      h_col     [NINST][NT];
  cplx_t      y         [NINST];
  logic       llr_valid [NINST];
  logic [7:0] llr_user  [NINST];
  logic signed [W_LLR-1:0] llr [NINST][B_BITS];
  logic       done      [NINST];

  igs_top dut (.*);

  int checks = 0, failures = 0;
  int n_k [4];
  int n_stall = 0, n_flag1 = 0, n_flag0 = 0, n_sat = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  igs_model m [NINST];
  logic go = 0;
  int   n_fin = 0;

  // one driver process per instance
  for (genvar g = 0; g < NINST; g++) begin : g_drv
    initial begin
      wait (go);
      drive(g, 1 + g % 3, g % 2 == 1);
      n_fin++;
    end
  end
  int got [NINST][NT][6];
  int nrx [NINST];

  always @(posedge clk)
    for (int n = 0; n < NINST; n++)
      if (llr_valid[n]) begin
        for (int b = 0; b < 6; b++) got[n][llr_user[n]][b] = int'(llr[n][b]);
        nrx[n]++;
      end

  task automatic make_case(input int n, input real snr_db);
    logic [5:0] bits [NT];
    m[n] = new(NT, NR);
    for (int k = 0; k < NR; k++)
      for (int i = 0; i < NT; i++)
        m[n].h[k][i] = from_cfix(to_cfix(cgauss(1.0), F_H), F_H);
    for (int i = 0; i < NT; i++) bits[i] = 6'($urandom);
    m[n].n0 = from_fix(longint'(to_fix(real'(NT) / $pow(10.0, snr_db / 10.0), F_N0)), F_N0);
    for (int k = 0; k < NR; k++) begin
      cr_t v;
      v = cgauss(m[n].n0);
      for (int i = 0; i < NT; i++) v = cadd(v, cmulr(m[n].h[k][i], qam64(bits[i])));
      m[n].y[k] = from_cfix(to_cfix(v, F_Y), F_Y);
    end
  endtask

  task automatic drive(input int n, input int k, input bit stalls);
    int t0, lat, expected;
    nrx[n] = 0;
    @(negedge clk);
    start[n] = 1; k_iter[n] = 4'(k); n0[n] = to_fix(m[n].n0, F_N0);
    t0 = cyc;
    @(negedge clk);
    start[n] = 0;
    for (int kk = 0; kk < NR; kk++) begin
      while (stalls && ($urandom_range(3) == 0)) begin
        in_valid[n] = 0; n_stall++;
        @(negedge clk);
      end
      in_valid[n] = 1;
      for (int i = 0; i < NT; i++) h_col[n][i] = to_cfix(cconjr(m[n].h[kk][i]), F_H);
      y[n] = to_cfix(m[n].y[kk], F_Y);
      @(negedge clk);
    end
    in_valid[n] = 0;
    wait (done[n]);
    lat = cyc - t0;
    expected = NR + 2 * NT + 2 + 4 + NT * (NT + 1) / 2 + 1 + k * (2 * NT + 3) + 1 + NT + 3;
    if (!stalls) begin
      checks++;
      if (lat != expected) begin failures++; $display("inst %0d latency %0d expected %0d", n, lat, expected); end
    end
    $display("inst %0d k=%0d stalls=%0d latency=%0d", n, k, stalls, lat);
    @(negedge clk);
  endtask

  task automatic compare(input int n);
    checks++;
    if (nrx[n] != NT) begin failures++; $display("inst %0d: %0d LLR beats", n, nrx[n]); end
    for (int i = 0; i < NT; i++)
      for (int b = 0; b < 6; b++) begin
        real r, rc, tol;
        int g;
        r  = m[n].llr[i][b];
        g  = got[n][i][b];
        rc = (r > 511.0) ? 511.0 : ((r < -512.0) ? -512.0 : r);
        tol = 3.0 + 0.08 * ((rc < 0) ? -rc : rc);
        if (g == 511 || g == -512) n_sat++;
        checks++;
        if ((real'(g) - rc > tol) || (rc - real'(g) > tol) || (r > 6.0 && g <= 0) || (r < -6.0 && g >= 0)) begin
          failures++;
          $display("inst %0d user %0d bit %0d: llr %0d model %0.2f", n, i, b, g, r);
        end
      end
  endtask

  initial begin
    for (int n = 0; n < NINST; n++) begin
      start[n] = 0; in_valid[n] = 0; k_iter[n] = 1; n0[n] = '0; y[n] = '0;
      for (int i = 0; i < NT; i++) h_col[n][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int n = 0; n < NINST; n++) make_case(n, 8.0 + 3.0 * real'(n));
    for (int n = 0; n < NINST; n++) begin
      int k;
      k = 1 + n % 3;
      m[n].run(k);
      n_k[k]++;
    end
    go = 1;
    wait (n_fin == NINST);
    for (int n = 0; n < NINST; n++) begin
      compare(n);
      for (int i = 0; i < NT; i++)
        for (int j = 0; j <= i; j++) begin
          // offset flags of instance 0 and 9 through the hierarchy
          if (n == 0) begin if (dut.g_inst[0].u_core.wc_low[i][j].re.flag) n_flag1++; else n_flag0++; end
        end
    end
    checks++; if (n_k[1] == 0 || n_k[2] == 0 || n_k[3] == 0) begin failures++; $display("iteration counts not all used"); end
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    checks++; if (n_flag1 == 0 || n_flag0 == 0) begin failures++; $display("offset flag not seen in both states"); end
    checks++; if (n_sat == 0) begin failures++; $display("no LLR saturation"); end
    $display("mechanisms: k1=%0d k2=%0d k3=%0d stall_cycles=%0d flag1=%0d flag0=%0d llr_sat=%0d",
             n_k[1], n_k[2], n_k[3], n_stall, n_flag1, n_flag0, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
