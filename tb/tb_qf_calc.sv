// tb_qf_calc: self-checking test of one arm's QF calculation.
// Random counters are run in KLUCB and UCB mode. The KLUCB index is compared
// with a real-valued model of the same beta-step bisection (to 1e-2), the UCB
// index with Eq. 1 (to 2e-3), and the latency with the documented formula.
module tb_qf_calc;
  import mab_pkg::*;

  localparam int BETA = 16;
  localparam int DIV  = FX_W + FX_F + 1;
  localparam int SQ   = (FX_W + FX_F) / 2 + 1;
  localparam int ITER = DIV + (FX_F + 2) + 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  alg_e alg;
  cnt_t x_cnt, t_cnt, n_cnt;
  fx_t  c, alpha, q, q_ucb;
  int   checks = 0, failures = 0;

  qf_calc #(.BETA(BETA)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fr(fx_t v);
    return real'(v) / real'(1 << FX_F);
  endfunction

  function automatic real ref_kl(real pr, real qr);
    real r = 0.0;
    if (qr >= 1.0 && pr < 1.0) return 1.0e9;
    if (pr > 0.0) r += pr * $ln(pr / qr);
    if (pr < 1.0) r += (1.0 - pr) * $ln((1.0 - pr) / (1.0 - qr));
    return r;
  endfunction

  function automatic real ref_klucb(int x, int t, int n, real cr);
    real s1, s2, lo, hi, m, ln1;
    s1  = real'(x) / real'(t);
    ln1 = $ln(real'(n));
    s2  = (ln1 + ((ln1 > 0) ? cr * $ln(ln1) : 0.0)) / real'(t);
    lo  = s1;
    hi  = s1 + $sqrt(s2 / 2.0);
    if (hi > 1.0) hi = 1.0;
    for (int i = 0; i < BETA; i++) begin
      m = (lo + hi) / 2.0;
      if (ref_kl(s1, m) > s2) hi = m; else lo = m;
    end
    return hi;
  endfunction

  task automatic run(int x, int t, int n, real cr, real ar, alg_e a);
    int lat;
    real e;
    @(negedge clk);
    x_cnt = cnt_t'(x); t_cnt = cnt_t'(t); n_cnt = cnt_t'(n);
    c = fx_t'($rtoi(cr * (1 << FX_F))); alpha = fx_t'($rtoi(ar * (1 << FX_F)));
    alg = a; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    e = real'(x) / real'(t) + $sqrt(ar * $ln(real'(n)) / real'(t));
    checks++;
    if (fr(q_ucb) - e > 2e-3 || e - fr(q_ucb) > 2e-3) begin
      failures++; $display("FAIL Qu got %f exp %f", fr(q_ucb), e);
    end
    checks++;
    if (a == ALG_UCB) begin
      if (q !== q_ucb) begin failures++; $display("FAIL UCB mode q != Qu"); end
      if (lat != 2 * DIV + SQ + 5) begin failures++; $display("FAIL UCB latency %0d", lat); end
    end else begin
      e = ref_klucb(x, t, n, cr);
      if (fr(q) - e > 1e-2 || e - fr(q) > 1e-2) begin
        failures++; $display("FAIL Qkl(%0d,%0d,%0d) got %f exp %f", x, t, n, fr(q), e);
      end
      if (lat != 3 * DIV + SQ + 5 + BETA * (ITER + 1)) begin
        failures++; $display("FAIL KLUCB latency %0d", lat);
      end
    end
  endtask

  initial begin
    x_cnt = '0; t_cnt = '1; n_cnt = '1; c = '0; alpha = '0; alg = ALG_KLUCB;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 1, 4, 0.0, 2.0, ALG_KLUCB);
    run(1, 1, 4, 0.0, 2.0, ALG_KLUCB);
    run(30, 100, 1000, 0.0, 2.0, ALG_KLUCB);
    run(30, 100, 1000, 0.0, 2.0, ALG_UCB);
    for (int i = 0; i < 40; i++) begin
      int t, x, n;
      t = $urandom_range(1, 3000);
      x = $urandom_range(0, t);
      n = $urandom_range(t + 3, 10000);
      run(x, t, n, (i % 2) ? 3.0 : 0.0, 1.0 + (i % 2), (i % 4 == 3) ? ALG_UCB : ALG_KLUCB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
