// tb_init_arm_sel: for every non-empty enable mask of 4 arms, a restart
// followed by K steps must visit each enabled arm exactly once and never a
// disabled one; the order must follow the x^3 + x^2 + 1 LFSR (1,2,5,3,7,6,4)
// restricted to enabled arms.
module tb_init_arm_sel;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0, step = 1'b0;
  logic [3:0] arm_en;
  logic [2:0] arm;
  int checks = 0, failures = 0;
  int lfsr_order [7] = '{1, 2, 5, 3, 7, 6, 4};

  init_arm_sel #(.KMAX(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arm_en = 4'hF;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 1; m < 16; m++) begin
      int exp_seq [$];
      exp_seq.delete();
      arm_en = 4'(m);
      foreach (lfsr_order[i]) if (lfsr_order[i] <= 4 && m[lfsr_order[i] - 1]) exp_seq.push_back(lfsr_order[i]);
      @(negedge clk); restart = 1'b1;
      @(negedge clk); restart = 1'b0;
      foreach (exp_seq[i]) begin
        checks++;
        if (int'(arm) != exp_seq[i]) begin
          failures++;
          $display("FAIL mask %b step %0d: arm %0d exp %0d", arm_en, i, arm, exp_seq[i]);
        end
        step = 1'b1;
        @(negedge clk);
        step = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
