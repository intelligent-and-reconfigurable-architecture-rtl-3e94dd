// qf_calc: quality-factor (QF) calculation for one arm, the content of one
// reconfigurable region in the published architecture.
//
// KLUCB mode runs the modified KLUCB index of Algorithm 1: the pre-processing
// stage gives S1, S2, l_id(1) = S1 and u_id(1); then BETA bisection steps,
// which depend on each other and so run one after another on a single
// klucb_iter instance, narrow [l_id, u_id]; Q_kl = u_id after the last step.
// The UCB index Qu (Eq. 1) comes out of pre-processing in the same pass, so
// both are available for the KLUCB/UCB agreement check. UCB mode stops after
// pre-processing (log-log, S2 and the loop are skipped) and reports Qu as the
// QF, which is what makes the switch to UCB pay off in latency.
//
// The published design swaps the region's logic by partial reconfiguration;
// here the algorithm is a run-time input `alg` sampled at `start`.
//
// Interface: pulse `start` with counters and parameters valid. `done` pulses
// when `q` (QF of the selected algorithm) and `q_ucb` are ready; both hold
// until the next start. Latency: UCB = preproc(UCB); KLUCB = preproc(KLUCB)
// + BETA * (iteration latency + 1) + 1 cycles.
module qf_calc
  import mab_pkg::*;
#(
  parameter int unsigned BETA = 16     // bisection steps (beta = 16 in the paper's results)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  alg_e alg,
  input  cnt_t x_cnt,
  input  cnt_t t_cnt,
  input  cnt_t n_cnt,
  input  fx_t  c,
  input  fx_t  alpha,
  output logic busy,
  output logic done,
  output fx_t  q,
  output fx_t  q_ucb
);

  typedef enum logic [1:0] {ST_IDLE, ST_PRE, ST_ITER} st_e;
  st_e st;

  logic pre_done, it_go, it_done;
  fx_t  s1, s2, u1, qu, l_id, u_id, l_nx, u_nx;
  alg_e alg_r;
  logic [$clog2(BETA+1)-1:0] it_cnt;

  qf_preproc u_pre (
    .clk, .rst_n, .start(start && st == ST_IDLE), .kl_en(alg == ALG_KLUCB),
    .x_cnt, .t_cnt, .n_cnt, .c, .alpha,
    .done(pre_done), .s1, .s2, .u1, .qu
  );

  klucb_iter u_iter (
    .clk, .rst_n, .start(it_go), .l(l_id), .u(u_id), .s1, .s2,
    .done(it_done), .l_next(l_nx), .u_next(u_nx)
  );

  assign busy = (st != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= ST_IDLE;
      alg_r  <= ALG_KLUCB;
      it_go  <= 1'b0;
      it_cnt <= '0;
      l_id   <= '0;
      u_id   <= '0;
      q      <= '0;
      q_ucb  <= '0;
      done   <= 1'b0;
    end else begin
      done  <= 1'b0;
      it_go <= 1'b0;
      unique case (st)
        ST_IDLE: if (start) begin
          alg_r <= alg;
          st    <= ST_PRE;
        end
        ST_PRE: if (pre_done) begin
          q_ucb <= qu;
          if (alg_r == ALG_UCB || BETA == 0) begin
            q    <= (alg_r == ALG_UCB) ? qu : u1;
            done <= 1'b1;
            st   <= ST_IDLE;
          end else begin
            l_id   <= s1;
            u_id   <= u1;
            it_cnt <= '0;
            it_go  <= 1'b1;
            st     <= ST_ITER;
          end
        end
        ST_ITER: if (it_done) begin
          l_id   <= l_nx;
          u_id   <= u_nx;
          it_cnt <= it_cnt + 1'b1;
          if (32'(it_cnt) + 1 == BETA) begin
            q    <= u_nx;                 // Q_kl(k,n) = u_id after beta steps
            done <= 1'b1;
            st   <= ST_IDLE;
          end else begin
            it_go <= 1'b1;
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  // A new request while busy would be lost
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> st == ST_IDLE);

endmodule
