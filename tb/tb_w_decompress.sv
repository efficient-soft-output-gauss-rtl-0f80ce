// tb_w_decompress -- checks the decompressor for all 512 codes: the value is
// 16 * remaining bits, plus Nr in Q9.5 (= Nr * 32) when the offset flag is
// set; and that compressing then decompressing any W within the coded range
// returns it to within half a step (8 LSBs of Q9.5); values just below Nr/2
// saturate the remainder and are left out.
module tb_w_decompress;
  import igs_pkg::*;
  localparam int NR = 128;
  wc_t c, c2;
  d_t  w, win;
  w_decompress #(.NR(NR)) dut (.c, .w);
  w_compress   #(.NR(NR)) u_cmp (.w(win), .c(c2));
  d_t w2;
  w_decompress #(.NR(NR)) u_dec2 (.c(c2), .w(w2));
  int checks = 0, failures = 0;
  initial begin
    for (int f = 0; f < 2; f++)
      for (int r = -128; r < 128; r++) begin
        c.flag = f[0]; c.rem = 8'(r);
        #1;
        checks++;
        if (int'(w) != 16 * r + f * NR * 32) begin
          failures++; $display("flag %0d rem %0d: got %0d", f, r, w);
        end
      end
    for (int v = -2000; v <= 6000; v += 7) begin
      if (v >= 2040 && v <= 2048) continue;   // just below Nr/2: the 8-bit remainder saturates
      win = d_t'(v);
      #1;
      checks++;
      if (int'(w2) - v > 8 || v - int'(w2) > 8) begin
        failures++; $display("round trip %0d -> %0d", v, w2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
