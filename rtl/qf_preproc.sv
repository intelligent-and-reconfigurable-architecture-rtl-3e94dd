// qf_preproc: pre-processing stage of one arm's QF calculation.
//
// From the counters X(k,n), T(k,n) and the slot number n it computes
//   S1 = X/T                                (empirical mean, = l_id(1))
//   S2 = (ln n + c ln ln n) / T             (KLUCB exploration level)
//   u1 = min(1, S1 + sqrt(S2/2))            (initial upper bound u_id(1))
//   Qu = S1 + sqrt(alpha ln n / T)          (UCB index, Eq. 1)
// with one shared divider, one log unit and one square-root unit, stepped by
// a small sequencer. The formulas follow Algorithm 1 and Eq. 1 of the
// published design; its pre-processing drawing shows no halving before the
// square root, the algorithm listing does, and the listing is followed here.
// When `kl_en` is 0 (UCB mode) the second log, the S2 divide, the second root
// and the min are skipped, mirroring the blocks marked unused for UCB.
//
// Sequence (each step waits for all units it started):
//   A: S1 = X/T            || L1 = ln n
//   B: U  = alpha*L1 / T   || L2 = ln L1            (L2 only if kl_en)
//   C: sqrt(U)             || S2 = (L1 + c*L2) / T  (S2 only if kl_en)
//   D: sqrt(S2/2)                                   (only if kl_en)
// Latency: UCB 2*DIV + SQRT + 4, KLUCB 3*DIV + SQRT + 4 cycles (DIV, SQRT
// are the unit latencies). If ln n <= 0 (n = 1) the c*ln ln n term is taken
// as 0, a guard of this design.
//
// Interface: pulse `start` with inputs valid; `done` pulses once, outputs
// hold until the next start.
module qf_preproc
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic kl_en,
  input  cnt_t x_cnt,
  input  cnt_t t_cnt,
  input  cnt_t n_cnt,
  input  fx_t  c,
  input  fx_t  alpha,
  output logic done,
  output fx_t  s1,
  output fx_t  s2,
  output fx_t  u1,
  output fx_t  qu
);

  typedef enum logic [2:0] {ST_IDLE, ST_A, ST_B, ST_C, ST_D} st_e;
  st_e st;

  // Shared operator units
  logic div_go, div_done, log_go, log_done, sq_go, sq_done;
  fx_t  div_a, div_b, div_q, log_x, log_y, sq_x, sq_y;

  fx_div  u_div  (.clk, .rst_n, .start(div_go), .a(div_a), .b(div_b), .done(div_done), .q(div_q));
  fx_log  u_log  (.clk, .rst_n, .start(log_go), .x(log_x), .done(log_done), .y(log_y));
  fx_sqrt u_sqrt (.clk, .rst_n, .start(sq_go),  .x(sq_x),  .done(sq_done),  .y(sq_y));

  fx_t  t_fx, l1, l2, u1_sum;
  logic kl_r;
  logic [2:0] pend;        // {sqrt, log, div} still running

  assign t_fx   = fx_from_int(t_cnt);
  assign u1_sum = s1 + sq_y;

  // Operands and start strobes for each step
  always_comb begin
    div_go = 1'b0; log_go = 1'b0; sq_go = 1'b0;
    div_a  = fx_from_int(x_cnt);
    div_b  = t_fx;
    log_x  = fx_from_int(n_cnt);
    sq_x   = div_q;
    unique case (st)
      ST_IDLE: begin
        div_go = start;
        log_go = start;
      end
      ST_A: if (pend == '0) begin
        div_a  = fx_mul(alpha, l1);
        div_go = 1'b1;
        log_x  = l1;
        log_go = kl_r;
      end
      ST_B: if (pend == '0) begin
        sq_x   = div_q;
        sq_go  = 1'b1;
        div_a  = l1 + ((l1 > 0) ? fx_mul(c, l2) : '0);
        div_go = kl_r;
      end
      ST_C: if (pend == '0 && kl_r) begin
        sq_x  = div_q >>> 1;
        sq_go = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= ST_IDLE;
      pend <= '0;
      kl_r <= 1'b0;
      done <= 1'b0;
      l1   <= '0;
      l2   <= '0;
      s1   <= '0;
      s2   <= '0;
      u1   <= '0;
      qu   <= '0;
    end else begin
      done <= 1'b0;
      pend <= (pend & ~{sq_done, log_done, div_done}) | {sq_go, log_go, div_go};
      unique case (st)
        ST_IDLE: if (start) begin
          kl_r <= kl_en;
          st   <= ST_A;
        end
        ST_A: begin
          if (div_done) s1 <= div_q;
          if (log_done) l1 <= log_y;
          if (pend == '0) st <= ST_B;
        end
        ST_B: begin
          if (log_done) l2 <= log_y;
          if (pend == '0) st <= ST_C;
        end
        ST_C: begin
          if (sq_done) begin
            qu   <= s1 + sq_y;
          end
          if (div_done) s2 <= div_q;
          if (pend == '0) begin
            if (kl_r) st <= ST_D;
            else begin
              u1   <= qu;
              done <= 1'b1;
              st   <= ST_IDLE;
            end
          end
        end
        ST_D: begin
          if (sq_done) begin
            u1   <= (u1_sum > FX_ONE) ? FX_ONE : u1_sum;
            done <= 1'b1;
            st   <= ST_IDLE;
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

endmodule
