// igs_top -- NINST independent IGS detector instances side by side, the
// configuration whose throughput the paper reports (10 instances, one per
// subcarrier, 128 receive antennas, 8 users, 64-QAM, one GS iteration).
// Each instance has its own input stream, LLR stream and control; they share
// only the clock and reset. All ports are arrays indexed by instance.
module igs_top
  import igs_pkg::*;
#(
  parameter int NINST   = 10,
  parameter int NT      = 8,
  parameter int NR      = 128,
  parameter int LOG2_NR = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start     [NINST],
  output logic       busy      [NINST],
  input  logic [3:0] k_iter    [NINST],
  input  d_t         n0        [NINST],
  input  logic       in_valid  [NINST],
  output logic       in_ready  [NINST],
  input  cplx_t      h_col     [NINST][NT],
  input  cplx_t      y         [NINST],
  output logic       llr_valid [NINST],
  output logic [7:0] llr_user  [NINST],
  output logic signed [W_LLR-1:0] llr [NINST][B_BITS],
  output logic       done      [NINST]
);
  for (genvar n = 0; n < NINST; n++) begin : g_inst
    igs_core #(.NT(NT), .NR(NR), .LOG2_NR(LOG2_NR)) u_core (
      .clk, .rst_n,
      .start(start[n]), .busy(busy[n]), .k_iter(k_iter[n]), .n0(n0[n]),
      .in_valid(in_valid[n]), .in_ready(in_ready[n]), .h_col(h_col[n]), .y(y[n]),
      .llr_valid(llr_valid[n]), .llr_user(llr_user[n]), .llr(llr[n]), .done(done[n])
    );
  end
endmodule
