// tb_intelligence_unit: random C_n streams with a drifting probability of 1
// are fed to the unit (WINDOW = 16) and to a software sliding-window model;
// `switched` must match the model after every flag, stay high until restart,
// and never rise while enable is low.
module tb_intelligence_unit;
  localparam int W = 16;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0, enable = 1'b1, cn_valid = 1'b0, cn = 1'b0, switched;
  int checks = 0, failures = 0, rises = 0;
  bit hist [$];
  bit model;

  intelligence_unit #(.WINDOW(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 12; e++) begin
      enable = (e % 4 != 3);
      @(negedge clk); restart = 1'b1;
      @(negedge clk); restart = 1'b0;
      hist.delete(); model = 1'b0;
      for (int s = 0; s < 120; s++) begin
        int ones;
        ones = 0;
        cn = ($urandom_range(0, 119) < s + 10 * e - 20);
        cn_valid = 1'b1;
        @(negedge clk);
        cn_valid = 1'b0;
        hist.push_back(cn);
        if (hist.size() > W) void'(hist.pop_front());
        foreach (hist[i]) ones += hist[i];
        if (enable && hist.size() == W && 2 * ones > W) begin
          if (!model) rises++;
          model = 1'b1;
        end
        @(negedge clk);
        checks++;
        if (switched != model) begin failures++; $display("FAIL exp %0d slot %0d: got %0d exp %0d ones %0d seen %0d mones %0d", e, s, switched, model, dut.ones, dut.seen, ones); end
      end
    end
    checks++;
    if (rises < 3) begin failures++; $display("FAIL switch rarely happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
