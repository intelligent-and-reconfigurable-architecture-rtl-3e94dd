// tb_arm_select: random QF vectors and enable masks for KMAX = 4 and 5
// (padded tree); I_n must be the lowest-numbered enabled arm with the largest
// Q, arm_ucb likewise for Q_ucb, C_n their equality; done follows start by
// clog2(KMAX) cycles.
module tb_arm_select;
  import mab_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // KMAX = 4
  fx_t q4 [4], u4 [4], qm4;
  logic [3:0] en4;
  logic d4, cn4;
  logic [2:0] a4, au4;
  arm_select #(.KMAX(4)) dut4 (.clk, .rst_n, .start, .q(q4), .q_ucb(u4), .arm_en(en4),
                               .done(d4), .arm(a4), .arm_ucb(au4), .cn(cn4), .q_max(qm4));
  // KMAX = 5
  fx_t q5 [5], u5 [5], qm5;
  logic [4:0] en5;
  logic d5, cn5;
  logic [2:0] a5, au5;
  arm_select #(.KMAX(5)) dut5 (.clk, .rst_n, .start, .q(q5), .q_ucb(u5), .arm_en(en5),
                               .done(d5), .arm(a5), .arm_ucb(au5), .cn(cn5), .q_max(qm5));

  function automatic int argmax(fx_t v [5], logic [4:0] en, int n);
    int b = 0;
    for (int k = 0; k < n; k++)
      if (en[k] && (b == 0 || v[k] > v[b - 1])) b = k + 1;
    return b;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      fx_t vq [5], vu [5];
      logic [4:0] m;
      int e4, eu4, e5, eu5;
      for (int k = 0; k < 5; k++) begin
        vq[k] = fx_t'($urandom_range(0, 8));
        vu[k] = fx_t'($urandom_range(0, 8));
      end
      m = 5'($urandom_range(0, 31));
      for (int k = 0; k < 4; k++) begin q4[k] = vq[k]; u4[k] = vu[k]; end
      for (int k = 0; k < 5; k++) begin q5[k] = vq[k]; u5[k] = vu[k]; end
      en4 = m[3:0]; en5 = m;
      e4 = argmax(vq, {1'b0, m[3:0]}, 4); eu4 = argmax(vu, {1'b0, m[3:0]}, 4);
      e5 = argmax(vq, m, 5);              eu5 = argmax(vu, m, 5);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      @(negedge clk);                       // 2 levels for KMAX = 4
      checks++;
      if (!d4 || int'(a4) != e4 || int'(au4) != eu4 || cn4 != (e4 == eu4)) begin
        failures++; $display("FAIL K4 mask %b: arm %0d/%0d exp %0d/%0d", en4, a4, au4, e4, eu4);
      end
      @(negedge clk);                       // 3 levels for KMAX = 5
      checks++;
      if (!d5 || int'(a5) != e5 || int'(au5) != eu5 || cn5 != (e5 == eu5)) begin
        failures++; $display("FAIL K5 mask %b: arm %0d/%0d exp %0d/%0d", en5, a5, au5, e5, eu5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
