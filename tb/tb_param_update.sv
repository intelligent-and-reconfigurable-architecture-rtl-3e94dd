// tb_param_update: drives restart and random feedback words into the
// parameter update block and compares X, T, n, the INIT flag and the INIT
// arm sequence with a software model; upd_done must follow each word by one
// cycle.
module tb_param_update;
  import mab_pkg::*;
  localparam int KMAX = 4;

  logic clk = 1'b0, rst_n = 1'b0, fb_valid = 1'b0, init, restart, upd_done;
  logic [4:0] fb;
  logic [3:0] arm_en;
  cnt_t x_cnt [KMAX];
  cnt_t t_cnt [KMAX];
  cnt_t n_cnt;
  logic [2:0] init_arm;
  int xm [KMAX];
  int tm [KMAX];
  int nm, checks = 0, failures = 0;

  param_update #(.KMAX(KMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [4:0] w);
    @(negedge clk);
    fb = w; fb_valid = 1'b1;
    @(negedge clk);
    fb_valid = 1'b0;
    checks++;
    if (!upd_done) begin failures++; $display("FAIL no upd_done"); end
    if (w[3]) begin
      for (int k = 0; k < KMAX; k++) begin xm[k] = 0; tm[k] = 0; end
      nm = 0;
    end else begin
      nm++;
      if (w[2:0] >= 1 && w[2:0] <= KMAX) begin
        tm[w[2:0] - 1]++;
        xm[w[2:0] - 1] += w[4];
      end
    end
    checks++;
    if (int'(n_cnt) != nm) begin failures++; $display("FAIL n %0d exp %0d", n_cnt, nm); end
    for (int k = 0; k < KMAX; k++) begin
      checks++;
      if (int'(x_cnt[k]) != xm[k] || int'(t_cnt[k]) != tm[k]) begin
        failures++; $display("FAIL arm %0d X %0d T %0d exp %0d %0d", k + 1, x_cnt[k], t_cnt[k], xm[k], tm[k]);
      end
    end
  endtask

  initial begin
    fb = '0; arm_en = 4'b1011;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 3; e++) begin
      int seen [KMAX];
      int kact;
      arm_en = (e == 0) ? 4'b1011 : 4'b1111;
      kact = $countones(arm_en);
      foreach (seen[i]) seen[i] = 0;
      send({1'b0, 1'b1, 3'd0});                 // restart
      // INIT: play the arm the block proposes
      for (int s = 0; s < kact; s++) begin
        checks++;
        if (!init || init_arm == 0 || !arm_en[init_arm - 1] || seen[init_arm - 1] != 0) begin
          failures++; $display("FAIL INIT slot %0d arm %0d init %0d", s, init_arm, init);
        end else seen[init_arm - 1] = 1;
        send({1'($urandom_range(0, 1)), 1'b0, init_arm});
      end
      checks++;
      if (init) begin failures++; $display("FAIL INIT longer than K"); end
      for (int s = 0; s < 200; s++) send({1'($urandom_range(0, 1)), 1'b0, 3'($urandom_range(0, 7))});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
