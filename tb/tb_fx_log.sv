// tb_fx_log: self-checking test of the fixed-point natural logarithm.
// Results are compared with the real-valued $ln to within 8 LSBs; x <= 0 must
// saturate to FX_MIN; latency must be FX_F + 2 cycles.
module tb_fx_log;
  import mab_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  fx_t  x, y;
  int   checks = 0, failures = 0;

  fx_log dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(fx_t v);
    int lat;
    real expv, got;
    @(negedge clk);
    x = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (v <= 0) begin
      if (y !== FX_MIN) begin
        failures++;
        $display("FAIL log of %0d: got %0d", v, y);
      end
    end else begin
      expv = $ln(real'(v) / real'(1 << FX_F));
      got  = real'(y) / real'(1 << FX_F);
      if ((got - expv) > 8.0 / (1 << FX_F) || (expv - got) > 8.0 / (1 << FX_F)) begin
        failures++;
        $display("FAIL log of %0d: got %f exp %f", v, got, expv);
      end
    end
    checks++;
    if (lat != FX_F + 2) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(FX_ONE);                 // ln 1 = 0
    run(fx_from_int(2));
    run(fx_from_int(10000));
    run(fx_t'(1));               // smallest positive
    run('0);
    run(-FX_ONE);
    run(FX_MAX);
    for (int i = 0; i < 300; i++) run(fx_t'(($urandom & 32'h7FFF_FFFF) >> $urandom_range(0, 30)) | fx_t'(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
