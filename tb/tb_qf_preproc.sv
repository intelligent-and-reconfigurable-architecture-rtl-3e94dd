// tb_qf_preproc: self-checking test of the QF pre-processing stage.
// Random counters (X <= T <= n) and parameters c, alpha are driven in both
// modes; S1, S2, u1 and Qu are compared with real-valued formulas to within
// 2e-3, and the start-to-done latency with the documented cycle counts.
module tb_qf_preproc;
  import mab_pkg::*;

  localparam int DIV = FX_W + FX_F + 1;
  localparam int SQ  = (FX_W + FX_F) / 2 + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, kl_en, done;
  cnt_t x_cnt, t_cnt, n_cnt;
  fx_t  c, alpha, s1, s2, u1, qu;
  int   checks = 0, failures = 0;

  qf_preproc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fr(fx_t v);
    return real'(v) / real'(1 << FX_F);
  endfunction

  task automatic chk(string what, real got, real expv, real tol);
    checks++;
    if (got - expv > tol || expv - got > tol) begin
      failures++;
      $display("FAIL %s: got %f exp %f", what, got, expv);
    end
  endtask

  task automatic run(int x, int t, int n, real cr, real ar, bit kl);
    int lat;
    real m, ln1, e_s2, e_u1, e_qu;
    @(negedge clk);
    x_cnt = cnt_t'(x); t_cnt = cnt_t'(t); n_cnt = cnt_t'(n);
    c = fx_t'($rtoi(cr * (1 << FX_F))); alpha = fx_t'($rtoi(ar * (1 << FX_F)));
    kl_en = kl; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    m    = real'(x) / real'(t);
    ln1  = $ln(real'(n));
    e_qu = m + $sqrt(ar * ln1 / real'(t));
    chk("S1", fr(s1), m, 1e-4);
    chk("Qu", fr(qu), e_qu, 2e-3);
    checks++;
    if (kl) begin
      e_s2 = (ln1 + ((ln1 > 0) ? cr * $ln(ln1) : 0.0)) / real'(t);
      e_u1 = m + $sqrt(e_s2 / 2.0);
      if (e_u1 > 1.0) e_u1 = 1.0;
      chk("S2", fr(s2), e_s2, 2e-3);
      chk("u1", fr(u1), e_u1, 2e-3);
      if (lat != 3 * DIV + SQ + 4) begin
        failures++;
        $display("FAIL KLUCB latency %0d", lat);
      end
    end else if (lat != 2 * DIV + SQ + 4) begin
      failures++;
      $display("FAIL UCB latency %0d", lat);
    end
  endtask

  initial begin
    x_cnt = '0; t_cnt = '1; n_cnt = '1; c = '0; alpha = '0; kl_en = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1, 1, 4, 0.0, 2.0, 1'b1);        // S1 = 1 -> u1 clamps to 1
    run(0, 1, 4, 0.0, 2.0, 1'b1);
    run(3, 10, 100, 3.0, 1.0, 1'b1);
    run(400, 1000, 10000, 0.0, 0.5, 1'b1);
    run(400, 1000, 10000, 0.0, 2.0, 1'b0);
    for (int i = 0; i < 100; i++) begin
      int t, x, n;
      t = $urandom_range(1, 2000);
      x = $urandom_range(0, t);
      n = $urandom_range(t + 3, 10000);
      run(x, t, n, (i % 2) ? 3.0 : 0.0, 0.5 + 0.5 * (i % 4), i % 3 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
