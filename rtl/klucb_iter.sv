// klucb_iter: one bisection step of the modified KLUCB index (Algorithm 1,
// loop body).
//
//   m = (l + u) / 2;  if d(S1, m) > S2 then u = m else l = m
//
// The midpoint adder and halving feed the KL divergence unit; a comparator
// against S2 drives the select of the two output multiplexers, wired as in
// the published iteration diagram (l_next = sel ? l : m, u_next = sel ? m : u).
// The same instance is reused for all beta steps by the QF controller.
//
// Interface: pulse `start` with l, u, s1, s2 valid; `done` pulses
// LAT = kl_div latency + 1 cycles later with l_next, u_next held until the
// next start.
module klucb_iter
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  l,
  input  fx_t  u,
  input  fx_t  s1,
  input  fx_t  s2,
  output logic done,
  output fx_t  l_next,
  output fx_t  u_next
);

  fx_t  m, m_r, l_r, u_r, s2_r, d;
  logic kl_done;

  assign m = fx_t'((33'(l) + 33'(u)) >>> 1);

  kl_div u_kl (.clk, .rst_n, .start(start), .p(s1), .q(m), .done(kl_done), .d(d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_r    <= '0;
      l_r    <= '0;
      u_r    <= '0;
      s2_r   <= '0;
      l_next <= '0;
      u_next <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        m_r  <= m;
        l_r  <= l;
        u_r  <= u;
        s2_r <= s2;
      end
      if (kl_done) begin
        // sel = d(S1, m) > S2
        l_next <= (d > s2_r) ? l_r : m_r;
        u_next <= (d > s2_r) ? m_r : u_r;
        done   <= 1'b1;
      end
    end
  end

endmodule
