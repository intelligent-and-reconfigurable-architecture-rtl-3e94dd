// tb_klucb_iter: self-checking test of one KLUCB bisection step.
// For random l < u, S1 <= l and S2 the step must return (l, m) when
// d(S1, m) > S2 and (m, u) otherwise, m = (l+u)/2, with the decision taken
// from a real-valued reference (cases within 2e-3 of the threshold are
// skipped). Latency must be the KL latency + 1.
module tb_klucb_iter;
  import mab_pkg::*;

  localparam int LAT = (FX_W + FX_F + 1) + (FX_F + 2) + 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  fx_t  l, u, s1, s2, l_next, u_next;
  int   checks = 0, failures = 0, ups = 0, downs = 0;

  klucb_iter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fr(fx_t v);
    return real'(v) / real'(1 << FX_F);
  endfunction

  function automatic real ref_kl(real pr, real qr);
    real r = 0.0;
    if (pr > 0.0) r += pr * $ln(pr / qr);
    if (pr < 1.0) r += (1.0 - pr) * $ln((1.0 - pr) / (1.0 - qr));
    return r;
  endfunction

  task automatic run(fx_t lv, fx_t uv, fx_t s1v, fx_t s2v);
    int lat;
    fx_t m;
    real dk;
    @(negedge clk);
    l = lv; u = uv; s1 = s1v; s2 = s2v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    m  = (lv + uv) >>> 1;
    dk = ref_kl(fr(s1v), fr(m));
    if (dk - fr(s2v) > 2e-3 || fr(s2v) - dk > 2e-3) begin
      checks++;
      if (dk > fr(s2v)) begin
        downs++;
        if (l_next !== lv || u_next !== m) begin failures++; $display("FAIL expected u=m"); end
      end else begin
        ups++;
        if (l_next !== m || u_next !== uv) begin failures++; $display("FAIL expected l=m"); end
      end
    end
    checks++;
    if (lat != LAT) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    l = '0; u = FX_ONE; s1 = '0; s2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      fx_t a, b, s;
      s = fx_t'($urandom_range(0, 60000));
      a = s + fx_t'($urandom_range(0, 2000));
      b = a + fx_t'($urandom_range(2, 65536 - 2001)) ;
      if (b > FX_ONE) b = FX_ONE;
      run(a, b, s, fx_t'($urandom_range(1, 20000)));
    end
    checks++;
    if (ups == 0 || downs == 0) begin failures++; $display("FAIL one branch never taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
