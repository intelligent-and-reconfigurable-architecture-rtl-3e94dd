// tb_fx_div: self-checking test of the fixed-point divider.
// Random signed operands plus corner cases (zero divisor, overflow) are
// compared with a 64-bit integer reference; the start-to-done latency must be
// exactly FX_W + FX_F + 1 cycles.
module tb_fx_div;
  import mab_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  fx_t  a, b, q;
  int   checks = 0, failures = 0;

  fx_div dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t ref_div(fx_t x, fx_t y);
    longint ma, mb, r;
    bit neg;
    ma  = (x < 0) ? -longint'(x) : longint'(x);
    mb  = (y < 0) ? -longint'(y) : longint'(y);
    neg = (x < 0) != (y < 0);
    if (mb == 0) return neg ? FX_MIN : FX_MAX;
    r = (ma <<< FX_F) / mb;
    if (r > 64'sh7FFF_FFFF) return neg ? FX_MIN : FX_MAX;
    return neg ? fx_t'(-r) : fx_t'(r);
  endfunction

  task automatic run(fx_t x, fx_t y);
    int lat;
    @(negedge clk);
    a = x; b = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (q !== ref_div(x, y)) begin
      failures++;
      $display("FAIL div %0d/%0d: got %0d exp %0d", x, y, q, ref_div(x, y));
    end
    checks++;
    if (lat != FX_W + FX_F + 1) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(fx_from_int(3), fx_from_int(4));       // 0.75
    run(fx_from_int(1), fx_from_int(10000));
    run(-fx_from_int(7), fx_from_int(2));
    run(fx_from_int(5), '0);                   // divide by zero
    run(fx_from_int(30000), fx_t'(1));         // overflow
    run(FX_MIN, fx_from_int(3));
    for (int i = 0; i < 300; i++) begin
      fx_t x, y;
      x = fx_t'($urandom);
      y = fx_t'($urandom) >>> ($urandom_range(0, 24));
      if (i % 3 == 0) x = x >>> 12;
      run(x, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
