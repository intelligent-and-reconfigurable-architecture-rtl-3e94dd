// tb_kl_div: self-checking test of the Bernoulli KL divergence unit.
// Random (p, q) pairs and the corner cases p = 0, p = 1, q = 1 are compared
// with the real-valued formula to within 1e-3; latency must be
// DIV + LOG + 1 cycles.
module tb_kl_div;
  import mab_pkg::*;

  localparam int LAT = (FX_W + FX_F + 1) + (FX_F + 2) + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  fx_t  p, q, d;
  int   checks = 0, failures = 0;

  kl_div dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_kl(real pr, real qr);
    real r = 0.0;
    if (pr > 0.0) r += pr * $ln(pr / qr);
    if (pr < 1.0) r += (1.0 - pr) * $ln((1.0 - pr) / (1.0 - qr));
    return r;
  endfunction

  task automatic run(real pr, real qr);
    int lat;
    real got, expv;
    @(negedge clk);
    p = fx_t'($rtoi(pr * (1 << FX_F))); q = fx_t'($rtoi(qr * (1 << FX_F)));
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    got = real'(d) / real'(1 << FX_F);
    checks++;
    if (qr >= 1.0 && pr < 1.0) begin
      if (d !== FX_MAX) begin failures++; $display("FAIL q=1: got %f", got); end
    end else begin
      expv = ref_kl(real'(p) / real'(1 << FX_F), real'(q) / real'(1 << FX_F));
      if (got - expv > 1e-3 || expv - got > 1e-3) begin
        failures++;
        $display("FAIL d(%f,%f): got %f exp %f", pr, qr, got, expv);
      end
    end
    checks++;
    if (lat != LAT) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    p = '0; q = FX_HALF;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0.0, 0.5);
    run(1.0, 0.75);
    run(1.0, 1.0);
    run(0.3, 1.0);
    run(0.5, 0.5);
    run(0.2, 0.9);
    for (int i = 0; i < 200; i++) begin
      real pr, qr;
      pr = real'($urandom_range(0, 1000)) / 1000.0;
      qr = pr + (1.0 - pr) * real'($urandom_range(1, 999)) / 1000.0;
      run(pr, qr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
