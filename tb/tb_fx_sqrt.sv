// tb_fx_sqrt: self-checking test of the fixed-point square root.
// The result must equal floor(sqrt(x * 2^FX_F)), checked with integer
// arithmetic (r*r <= v < (r+1)*(r+1)); latency must be (FX_W+FX_F)/2 + 1.
module tb_fx_sqrt;
  import mab_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  fx_t  x, y;
  int   checks = 0, failures = 0;

  fx_sqrt dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(fx_t v);
    int lat;
    longint rad, r;
    @(negedge clk);
    x = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    rad = (v < 0) ? 0 : (longint'(v) <<< FX_F);
    r   = longint'(y);
    checks++;
    if (!(r * r <= rad && (r + 1) * (r + 1) > rad)) begin
      failures++;
      $display("FAIL sqrt %0d: got %0d", v, y);
    end
    checks++;
    if (lat != (FX_W + FX_F) / 2 + 1) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0);
    run(FX_ONE);
    run(fx_from_int(2));
    run(FX_MAX);
    run(-FX_ONE);
    for (int i = 0; i < 300; i++) run(fx_t'($urandom & 32'h7FFF_FFFF) >>> $urandom_range(0, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
