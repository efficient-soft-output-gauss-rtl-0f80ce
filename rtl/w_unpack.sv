// w_unpack -- decompresses the stored lower triangle of W into a full
// Hermitian matrix using one w_decompress per real value.
// w[i][j] for i >= j comes from the stored entry, w[i][j] for i < j is
// conj(w[j][i]). The output bits are Q9.5 (raw W) or, read as Q2.12, W/Nr.
// Combinational.
module w_unpack
  import igs_pkg::*;
#(
  parameter int NT = 8,
  parameter int NR = 128
) (
  input  cwc_t  wc_low [NT][NT],
  output cplx_t w      [NT][NT]
);
  cplx_t lo [NT][NT];

  for (genvar i = 0; i < NT; i++) begin : g_i
    for (genvar j = 0; j < NT; j++) begin : g_j
      if (j <= i) begin : g_l
        w_decompress #(.NR(NR)) u_re (.c(wc_low[i][j].re), .w(lo[i][j].re));
        w_decompress #(.NR(NR)) u_im (.c(wc_low[i][j].im), .w(lo[i][j].im));
        assign w[i][j] = lo[i][j];
      end else begin : g_u
        assign lo[i][j] = '0;
        assign w[i][j]  = cconj(lo[j][i]);
      end
    end
  end
endmodule
