// tb_igs_core_64 -- the same end-to-end test as tb_igs_core, run on the
// 64 x 8 antenna configuration that the published fixed-point error-rate
// study also covers (64 receive antennas, 8 users, 64-QAM). The core is
// built with NR = 64 and LOG2_NR = 6: the offset of the compressed format
// becomes 64. LOG2_NR stays 7: it is the fixed scale 2^7 between the Q9.5
// words of W and their Q2.12 reading, not log2 of the antenna count, so the
// normalised diagonal of W sits near 0.5 instead of 1 and the LLR tolerance
// is wider (15 % instead of 8 %) for the lost bit of precision. Each run
// compares the LLRs with the floating-point model (sign where the model is
// clearly non-zero, value within a tolerance), checks the exact latency of
// this schedule and counts the mechanisms exercised (K = 1, 2, 3, input
// stalls, both offset-flag states, LLR saturation).
module tb_igs_core_64;
  import igs_pkg::*;
  import igs_tb_pkg::*;

  localparam int NT = 8;
  localparam int NR = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, busy, in_valid, in_ready, llr_valid, done;
  logic [3:0] k_iter;
  d_t         n0;
  cplx_t      h_col [NT];
  cplx_t      y;
  logic [7:0] llr_user;
  logic signed [W_LLR-1:0] llr [B_BITS];

  igs_core #(.NT(NT), .NR(NR), .LOG2_NR(7)) dut (.*);

  int checks = 0, failures = 0;
  int n_k1 = 0, n_k2 = 0, n_k3 = 0, n_stall = 0, n_flag1 = 0, n_flag0 = 0, n_sat = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  igs_model m;
  logic [5:0] bits [NT];
  int got [NT][6];
  int nrx;

  always @(posedge clk)
    if (llr_valid) begin
      for (int b = 0; b < 6; b++) got[llr_user][b] = int'(llr[b]);
      nrx++;
    end

  task automatic run(input int k, input real snr_db, input bit stalls);
    int t0, lat, expected;
    real es_n0;
    m = new(NT, NR);
    for (int k2 = 0; k2 < NR; k2++)
      for (int i = 0; i < NT; i++) m.h[k2][i] = cgauss(1.0);
    for (int i = 0; i < NT; i++) bits[i] = 6'($urandom);
    m.n0 = real'(NT) / $pow(10.0, snr_db / 10.0);
    for (int k2 = 0; k2 < NR; k2++) begin
      m.y[k2] = cgauss(m.n0);
      for (int i = 0; i < NT; i++) m.y[k2] = cadd(m.y[k2], cmulr(m.h[k2][i], qam64(bits[i])));
    end
    // the hardware sees the quantised inputs; so does the model
    for (int k2 = 0; k2 < NR; k2++) begin
      m.y[k2] = from_cfix(to_cfix(m.y[k2], F_Y), F_Y);
      for (int i = 0; i < NT; i++) m.h[k2][i] = from_cfix(to_cfix(m.h[k2][i], F_H), F_H);
    end
    m.n0 = from_fix(longint'(to_fix(m.n0, F_N0)), F_N0);
    m.run(k);

    nrx = 0;
    @(negedge clk);
    start = 1; k_iter = 4'(k); n0 = to_fix(m.n0, F_N0);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    for (int k2 = 0; k2 < NR; k2++) begin
      while (stalls && ($urandom_range(3) == 0)) begin
        in_valid = 0;
        n_stall++;
        @(negedge clk);
      end
      in_valid = 1;
      for (int i = 0; i < NT; i++) h_col[i] = to_cfix(cconjr(m.h[k2][i]), F_H);
      y = to_cfix(m.y[k2], F_Y);
      @(posedge clk);
      if (!in_ready) begin failures++; $display("beat %0d not accepted", k2); end
      @(negedge clk);
    end
    in_valid = 0;
    wait (done);
    lat = cyc - t0;
    @(negedge clk);

    // compressed-entry statistics
    for (int i = 0; i < NT; i++)
      for (int j = 0; j <= i; j++)
        if (dut.wc_low[i][j].re.flag) n_flag1++; else n_flag0++;

    // latency of this schedule: PU NR + 2NT + 1, ISCU/FS max(3NT+5, NT(NT+1)/2 + 5),
    // GSMU k(2NT+3) + 1, LCU NT + 4 (see README)
    expected = NR + 2 * NT + 2 + 4 + NT * (NT + 1) / 2 + 1 + k * (2 * NT + 3) + 1 + NT + 3;
    if (!stalls) begin
      checks++;
      if (lat != expected) begin
        failures++;
        $display("latency %0d, expected %0d (k=%0d)", lat, expected, k);
      end
    end
    $display("run k=%0d snr=%0.1f stalls=%0d latency=%0d cycles", k, snr_db, stalls, lat);

    checks++;
    if (nrx != NT) begin failures++; $display("got %0d LLR beats", nrx); end
    for (int i = 0; i < NT; i++)
      for (int b = 0; b < 6; b++) begin
        real r, rc, tol;
        r  = m.llr[i][b];
        rc = (r > 511.0) ? 511.0 : ((r < -512.0) ? -512.0 : r);
        tol = 3.0 + 0.15 * ((rc < 0) ? -rc : rc);
        if (got[i][b] == 511 || got[i][b] == -512) n_sat++;
        checks++;
        if ((real'(got[i][b]) - rc > tol) || (rc - real'(got[i][b]) > tol) ||
            (r > 6.0 && got[i][b] <= 0) || (r < -6.0 && got[i][b] >= 0)) begin
          failures++;
          $display("user %0d bit %0d: llr %0d, model %0.2f", i, b, got[i][b], r);
        end
      end
    case (k) 1: n_k1++; 2: n_k2++; 3: n_k3++; default: ; endcase
  endtask

  initial begin
    start = 0; in_valid = 0; k_iter = 1; n0 = '0; y = '0;
    for (int i = 0; i < NT; i++) h_col[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run(1, 15.0, 0);
    run(2, 10.0, 0);
    run(3, 20.0, 0);
    run(1, 12.0, 1);
    run(1, 35.0, 0);
    // every mechanism must have happened
    checks++; if (n_k1 == 0 || n_k2 == 0 || n_k3 == 0) begin failures++; $display("iteration counts not all used"); end
    checks++; if (n_stall == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_flag1 == 0 || n_flag0 == 0) begin failures++; $display("offset flag not seen in both states"); end
    checks++; if (n_sat == 0) begin failures++; $display("no LLR saturation"); end
    $display("mechanisms: k1=%0d k2=%0d k3=%0d stall_cycles=%0d flag1=%0d flag0=%0d llr_sat=%0d",
             n_k1, n_k2, n_k3, n_stall, n_flag1, n_flag0, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
