// igs_core -- one improved Gauss-Seidel (IGS) soft-output detector instance:
// the five units of the paper's Fig. 5 and the four-stage schedule of Fig. 18.
//   Stage 1  PU:    matched filter and regularized Gram matrix while the
//                   NR columns of H^H and y stream in; W is compressed.
//   Stage 2  ISCU:  d^-1, W2^-1 and s0; in parallel FS: N' = Nr (D+L)^-1
//                   (FS starts as soon as the ISCU has d^-1).
//   Stage 3  GSMU:  k_iter Gauss-Seidel iterations; in parallel SCU: rho, 1/mu.
//   Stage 4  LCU:   six LLRs per user, one user per cycle.
// One detection runs at a time; start is accepted when busy is low. The input
// handshake is in_ready/in_valid (a beat is taken when both are high), the
// output is a stream of NT beats on llr_valid, and done pulses with the last.
// k_iter and n0 are sampled at start (k_iter = 0 is treated as 1).
// LOG2_NR is the fixed normalisation shift of igs_pkg (7) and must stay 7;
// NR (the number of input beats and the compression offset) may change.
module igs_core
  import igs_pkg::*;
#(
  parameter int NT      = 8,
  parameter int NR      = 128,
  parameter int LOG2_NR = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  input  logic [3:0] k_iter,
  input  d_t         n0,
  input  logic       in_valid,
  output logic       in_ready,
  input  cplx_t      h_col [NT],
  input  cplx_t      y,
  output logic       llr_valid,
  output logic [7:0] llr_user,
  output logic signed [W_LLR-1:0] llr [B_BITS],
  output logic       done
);
  typedef enum logic [2:0] {S_IDLE, S_PU, S_ISCU, S_GS, S_LCU} state_t;
  state_t state;

  d_t         n0_q;
  logic [3:0] k_q;
  logic       pu_done, iscu_done, fs_done, gs_done, scu_done, lcu_done;
  logic       iscu_f, fs_f, fs_started, gs_f, scu_f;
  logic       dinv_valid;

  cplx_t ymf    [NT];
  cwc_t  wc_low [NT][NT];
  d_t    dinv   [NT];
  cplx_t w2inv  [NT][NT];
  cplx_t s0     [NT];
  cplx_t np     [NT][NT];
  cplx_t s_hat  [NT];
  logic [W_SCU-1:0] rho [NT], muinv [NT];

  logic pu_start, iscu_start, fs_start, gs_start, lcu_start;
  assign busy       = (state != S_IDLE);
  assign pu_start   = (state == S_IDLE) && start;
  assign iscu_start = (state == S_PU) && pu_done;
  assign fs_start   = (state == S_ISCU) && dinv_valid && !fs_started;
  assign gs_start   = (state == S_ISCU) && (iscu_f || iscu_done) && (fs_f || fs_done);
  assign lcu_start  = (state == S_GS) && (gs_f || gs_done) && (scu_f || scu_done);

  pu #(.NT(NT), .NR(NR)) u_pu (
    .clk, .rst_n, .start(pu_start), .in_valid, .in_ready, .h_col, .y, .n0,
    .done(pu_done), .ymf, .wc_low
  );

  iscu #(.NT(NT), .NR(NR)) u_iscu (
    .clk, .rst_n, .start(iscu_start), .wc_low, .ymf, .dinv_valid, .dinv,
    .w2inv, .s0, .done(iscu_done)
  );

  fs_unit #(.NT(NT), .NR(NR)) u_fs (
    .clk, .rst_n, .start(fs_start), .dinv, .wc_low, .np, .done(fs_done)
  );

  gsmu #(.NT(NT), .NR(NR), .LOG2_NR(LOG2_NR)) u_gsmu (
    .clk, .rst_n, .start(gs_start), .k_iter(k_q), .s0, .yn(ymf), .np, .wc_low,
    .s(s_hat), .done(gs_done)
  );

  scu #(.NT(NT), .LOG2_NR(LOG2_NR)) u_scu (
    .clk, .rst_n, .start(gs_start), .n0(n0_q), .dinv, .rho, .muinv, .done(scu_done)
  );

  lcu #(.NT(NT)) u_lcu (
    .clk, .rst_n, .start(lcu_start), .s(s_hat), .rho, .muinv,
    .llr_valid, .llr_user, .llr, .done(lcu_done)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; n0_q <= '0; k_q <= '0; done <= 1'b0;
      iscu_f <= 1'b0; fs_f <= 1'b0; fs_started <= 1'b0; gs_f <= 1'b0; scu_f <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n0_q  <= n0;
          k_q   <= (k_iter == 0) ? 4'd1 : k_iter;
          state <= S_PU;
        end
        S_PU: if (pu_done) begin
          iscu_f <= 1'b0; fs_f <= 1'b0; fs_started <= 1'b0;
          state  <= S_ISCU;
        end
        S_ISCU: begin
          if (fs_start)  fs_started <= 1'b1;
          if (iscu_done) iscu_f <= 1'b1;
          if (fs_done)   fs_f   <= 1'b1;
          if (gs_start) begin
            gs_f <= 1'b0; scu_f <= 1'b0;
            state <= S_GS;
          end
        end
        S_GS: begin
          if (gs_done)  gs_f  <= 1'b1;
          if (scu_done) scu_f <= 1'b1;
          if (lcu_start) state <= S_LCU;
        end
        S_LCU: if (lcu_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a beat is only taken while the preprocessing unit is loading
  property p_no_beat_when_busy_elsewhere;
    @(posedge clk) disable iff (!rst_n) (in_valid && state != S_PU) |-> !in_ready;
  endproperty
  a_beats: assert property (p_no_beat_when_busy_elsewhere);
endmodule
