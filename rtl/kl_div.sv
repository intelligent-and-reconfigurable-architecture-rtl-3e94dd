// kl_div: Bernoulli Kullback-Leibler divergence
//   d(p,q) = p*ln(p/q) + (1-p)*ln((1-p)/(1-q)).
//
// Two parallel branches, as in the published KL datapath: one divides p by
// q, takes the log and multiplies by p; the other does the same with the
// complements 1-p and 1-q. A final adder sums the two terms. Each branch has
// its own divider and log unit, so the latency is one divide plus one log
// plus one cycle: LAT = (FX_W+FX_F+1) + (FX_F+2) + 1.
//
// Limits (this design's choice, the paper does not discuss them): a term
// whose weight p or 1-p is zero is 0 (the limit of x ln x); q >= 1 with p < 1
// gives FX_MAX (divergence is infinite).
//
// Interface: pulse `start` with p, q valid (both in [0,1]); `done` pulses
// LAT cycles later and `d` is held until the next start.
module kl_div
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  p,
  input  fx_t  q,
  output logic done,
  output fx_t  d
);

  fx_t  p_r, q_r, pc_r;          // p, q and 1-p captured at start
  fx_t  r1, r2, l1, l2;
  logic d1_done, d2_done, g1_done, g2_done;

  fx_div u_div_p (.clk, .rst_n, .start(start), .a(p),          .b(q),          .done(d1_done), .q(r1));
  fx_div u_div_c (.clk, .rst_n, .start(start), .a(FX_ONE - p), .b(FX_ONE - q), .done(d2_done), .q(r2));
  fx_log u_log_p (.clk, .rst_n, .start(d1_done), .x(r1), .done(g1_done), .y(l1));
  fx_log u_log_c (.clk, .rst_n, .start(d2_done), .x(r2), .done(g2_done), .y(l2));

  fx_t t1, t2;
  always_comb begin
    t1 = (p_r <= 0)  ? '0 : fx_mul(p_r, l1);
    t2 = (pc_r <= 0) ? '0 : fx_mul(pc_r, l2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_r  <= '0;
      q_r  <= '0;
      pc_r <= '0;
      d    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        p_r  <= p;
        q_r  <= q;
        pc_r <= FX_ONE - p;
      end
      if (g1_done && g2_done) begin
        if (q_r >= FX_ONE && pc_r > 0) d <= FX_MAX;
        else                           d <= t1 + t2;
        done <= 1'b1;
      end
    end
  end

endmodule
