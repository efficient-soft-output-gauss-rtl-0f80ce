// w_decompress -- inverse of w_compress (the paper's Fig. 10): the remaining
// bits are scaled back to Q9.5 and, when the offset flag is set, the offset
// Nr is added. Combinational; output 15 bit Q9.5. Read as Q2.12 the same
// bits are W/Nr, the normalised value the ISCU, FS and GSMU work with.
module w_decompress
  import igs_pkg::*;
#(
  parameter int NR = 128
) (
  input  wc_t c,
  output d_t  w
);
  localparam logic signed [47:0] NR_W = 48'(NR) <<< F_W;

  logic signed [47:0] base;

  always_comb begin
    base = 48'(c.rem) <<< (F_W - F_REM);
    w    = sat_d(c.flag ? base + NR_W : base);
  end
endmodule
