// tb_recip_lut -- checks the table reciprocal in the two formats the design
// uses (Q2.12 -> Q1.12, and Q.29 -> 20-bit Q.2) against 1/x computed in
// floating point: relative error below 2^-9 or one output LSB, saturation
// at the top of the range, zero input giving the maximum, and the 3-cycle
// latency with one result per cycle.
module tb_recip_lut;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        iv, ov, iv2, ov2;
  logic [14:0] x;
  logic [13:0] yq;
  logic [29:0] x2;
  logic [19:0] y2;
  recip_lut #(.IN_W(15), .IN_F(12), .OUT_W(14), .OUT_F(12)) dut (
    .clk, .rst_n, .in_valid(iv), .x, .out_valid(ov), .y(yq));
  recip_lut #(.IN_W(30), .IN_F(29), .OUT_W(20), .OUT_F(2)) dut2 (
    .clk, .rst_n, .in_valid(iv2), .x(x2), .out_valid(ov2), .y(y2));

  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [14:0] xs [$];
  logic [29:0] x2s [$];
  int pending = 0;

  always @(posedge clk) if (rst_n) begin
    if (ov) begin
      real e, g, err;
      logic [14:0] xv;
      xv = xs.pop_front();
      e = (xv == 0) ? 16383.0 : 4096.0 * 4096.0 / real'(xv);
      if (e > 16383.0) e = 16383.0;
      g = real'(yq);
      err = (g > e) ? g - e : e - g;
      checks++;
      if (err > 1.0 + e / 512.0) begin failures++; $display("1/%0d: got %0d expected %0.2f", xv, yq, e); end
    end
    if (ov2) begin
      real e, g, err;
      logic [29:0] xv;
      xv = x2s.pop_front();
      e = (xv == 0) ? 1048575.0 : 4.0 * real'(64'd1 << 29) / real'(xv);
      if (e > 1048575.0) e = 1048575.0;
      g = real'(y2);
      err = (g > e) ? g - e : e - g;
      checks++;
      if (err > 1.0 + e / 512.0) begin failures++; $display("1/%0d: got %0d expected %0.2f", xv, y2, e); end
    end
  end

  initial begin
    int t_in, t_out;
    iv = 0; iv2 = 0; x = '0; x2 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency
    iv = 1; x = 15'd4096; xs.push_back(x);
    @(negedge clk); iv = 0;
    t_in = 0;
    while (!ov) begin @(negedge clk); t_in++; end
    checks++;
    if (t_in != 2) begin failures++; $display("latency %0d", t_in + 1); end
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      iv = 1; iv2 = 1;
      case (n)
        0: x = 0;
        1: x = 1;
        2: x = 15'h7fff;
        default: x = 15'($urandom_range(32767));
      endcase
      x2 = (n == 0) ? 30'd0 : ((n < 1000) ? 30'($urandom_range(32'h3FFFFFFF)) : 30'($urandom_range(1 << 20)));
      xs.push_back(x); x2s.push_back(x2);
      @(negedge clk);
    end
    iv = 0; iv2 = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (xs.size() != 0 || x2s.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
