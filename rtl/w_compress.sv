// w_compress -- offset-flag compression of one real value of the regularized
// Gram matrix W (the paper's Fig. 9 and its data compression scheme).
//
// Entries of W cluster around 0 (off-diagonal) and around Nr (diagonal).
// The comparator sets the offset flag when W > Nr/2; the adder then removes
// the offset Nr, and the multiplexer passes W or W - Nr on as the remaining
// bits. The remaining bits are an 8-bit signed value with one fractional bit
// (rounded, saturated), so a compressed value is 9 bits wide.
// Combinational; input 15 bit Q9.5.
module w_compress
  import igs_pkg::*;
#(
  parameter int NR = 128              // receive antennas, the offset
) (
  input  d_t  w,
  output wc_t c
);
  localparam logic signed [47:0] NR_W = 48'(NR) <<< F_W;   // Nr in Q9.5

  logic signed [47:0] w_ext, diff, sel, r;

  always_comb begin
    w_ext  = 48'(w);
    // W > Nr/2, evaluated as 2W > Nr
    c.flag = (w_ext <<< 1) > NR_W;
    diff   = w_ext - NR_W;
    sel    = c.flag ? diff : w_ext;
    r      = sat(rsh(sel, F_W - F_REM), W_REM);
    c.rem  = r[W_REM-1:0];
  end
endmodule
