// tb_w_codec -- checks the offset-flag compressor for every 15-bit input in
// a wide window around 0 and around Nr (Q9.5): flag set exactly when
// W > Nr/2, remaining bits = W or W - Nr in units of 1/2 (rounded half up)
// and saturated to 8 bits signed.
module tb_w_codec;
  import igs_pkg::*;
  localparam int NR = 128;
  d_t  w;
  wc_t c;
  w_compress #(.NR(NR)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int v = -6000; v <= 12000; v += 1) begin
      int val, rem, exp_flag;
      w = d_t'(v);
      #1;
      exp_flag = (2 * v > NR * 32) ? 1 : 0;
      val = exp_flag ? v - NR * 32 : v;
      rem = (val + 8) >>> 4;
      if (val + 8 < 0) rem = -((-(val + 8) + 15) / 16);
      if (rem > 127) rem = 127;
      if (rem < -128) rem = -128;
      checks++;
      if (int'(c.flag) != exp_flag || int'(c.rem) != rem) begin
        failures++;
        if (failures < 10) $display("w=%0d: flag %0d rem %0d, expected %0d %0d", v, c.flag, c.rem, exp_flag, rem);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
