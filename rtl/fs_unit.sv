// fs_unit -- forward substitution computing N' = Nr (D + L)^-1, the
// lower-triangular matrix the GS method unit multiplies with (the paper's
// "FS" of Fig. 18, Sec. IV-D). In the normalised domain N' = (D/Nr + L/Nr)^-1.
//
// With T = D + L (normalised) and X = T^-1, row i of X follows from the rows
// above it:  X[i][i] = 1/d_i,  X[i][j] = -(1/d_i) * sum_{k<i} T[i][k] X[k][j].
// The unit keeps NT complex MACs, one per column j. Row i takes i
// accumulation cycles (k = 0..i-1, all columns at once) and one cycle in
// which the sums are scaled by -1/d_i and written. The reciprocals 1/d_i are
// taken from the ISCU (dinv), which computes them in parallel for all users.
// Total NT(NT+1)/2 cycles after start (36 for NT = 8); the paper names this
// block and its time (3Nt-1) but not its insides, so this schedule is this
// design's own and is longer than the paper's for NT > 4.
module fs_unit
  import igs_pkg::*;
#(
  parameter int NT = 8,
  parameter int NR = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  d_t    dinv   [NT],
  input  cwc_t  wc_low [NT][NT],
  output cplx_t np     [NT][NT],
  output logic  done
);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_WRITE} state_t;
  state_t state;
  int unsigned row, k;
  cacc_t acc [NT];

  cplx_t wn [NT][NT];
  w_unpack #(.NT(NT), .NR(NR)) u_unpack (.wc_low, .w(wn));

  int unsigned ri, ki;
  assign ri = (row < NT) ? row : 0;
  assign ki = (k < NT) ? k : 0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= 0; k <= 0; done <= 1'b0;
      for (int i = 0; i < NT; i++) begin
        acc[i] <= '0;
        for (int j = 0; j < NT; j++) np[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          row <= 0; k <= 0; state <= S_WRITE;
          for (int i = 0; i < NT; i++) begin
            acc[i] <= '0;
            for (int j = 0; j < NT; j++) np[i][j] <= '0;
          end
        end
        S_ACC: begin
          for (int j = 0; j < NT; j++)
            acc[j] <= cmac(acc[j], cmul(wn[ri][ki], np[ki][j]), 2 * F_S - F_ACC);
          if (k == row - 1) state <= S_WRITE;
          k <= k + 1;
        end
        S_WRITE: begin
          for (int j = 0; j < NT; j++) begin
            cwide_t p;
            p.re = -(48'(dinv[ri]) * 48'(acc[j].re));
            p.im = -(48'(dinv[ri]) * 48'(acc[j].im));
            if (j < int'(row))       np[ri][j] <= wide2d(p, F_S + F_ACC - F_S);
            else if (j == int'(row)) np[ri][j] <= '{re: dinv[ri], im: '0};
            acc[j] <= '0;
          end
          if (row == NT - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            row   <= row + 1;
            k     <= 0;
            state <= S_ACC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
