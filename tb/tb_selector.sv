// tb_selector: random candidate pairs; the registered output must be the
// candidate with the larger Q (first input on a tie, invalid inputs lose),
// one cycle after in_valid.
module tb_selector;
  import mab_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  qf_cand_t a, b, y;
  int checks = 0, failures = 0;

  selector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      qf_cand_t e;
      a = '{vld: ($urandom_range(0, 5) != 0), q: fx_t'($urandom_range(0, 20)) - 10, idx: 8'd1};
      b = '{vld: ($urandom_range(0, 5) != 0), q: (i % 7 == 0) ? a.q : fx_t'($urandom_range(0, 20)) - 10, idx: 8'd2};
      in_valid = 1'b1;
      if (!a.vld)      e = b;
      else if (!b.vld) e = a;
      else             e = (a.q >= b.q) ? a : b;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || y !== e) begin failures++; $display("FAIL a %p b %p y %p", a, b, y); end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid not a pulse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
