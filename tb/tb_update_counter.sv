// tb_update_counter: random en/clr sequence against a software count,
// including wrap-around at 2^W (W = 4 here).
module tb_update_counter;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [3:0] cnt;
  int model = 0, checks = 0, failures = 0;

  update_counter #(.W(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 30) == 0);
      en  = $urandom_range(0, 1);
      @(posedge clk);
      if (clr) model = 0; else if (en) model = (model + 1) % 16;
      #1;
      checks++;
      if (cnt !== 4'(model)) begin failures++; $display("FAIL cnt %0d exp %0d", cnt, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
