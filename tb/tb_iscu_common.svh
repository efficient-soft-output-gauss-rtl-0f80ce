// Shared stimulus of the ISCU, FS and GSMU testbenches: a random compressed
// regularized Gram matrix with a dominant diagonal, given directly as codes
// (offset flag, remaining bits), and its value W/Nr in floating point.
// Normalised value of a code: flag + rem / 256.
task automatic make_w(output cwc_t wc [NT][NT], output cr_t wf [MAXN][MAXN]);
  for (int i = 0; i < NT; i++)
    for (int j = 0; j < NT; j++) begin
      wc[i][j] = '0;
      if (j == i) begin
        wc[i][j].re.flag = 1'b1;
        wc[i][j].re.rem  = 8'($urandom_range(100) - 50);
      end else if (j < i) begin
        wc[i][j].re.rem = 8'($urandom_range(60) - 30);
        wc[i][j].im.rem = 8'($urandom_range(60) - 30);
      end
    end
  for (int i = 0; i < NT; i++)
    for (int j = 0; j < NT; j++) begin
      int a, b;
      a = (i >= j) ? i : j;
      b = (i >= j) ? j : i;
      wf[i][j] = c(real'(wc[a][b].re.flag) + real'(wc[a][b].re.rem) / 256.0,
                   real'(wc[a][b].im.rem) / 256.0);
      if (i < j) wf[i][j] = cconjr(wf[i][j]);
    end
endtask
