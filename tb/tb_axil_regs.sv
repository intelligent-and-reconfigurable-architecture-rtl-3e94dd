// tb_axil_regs: AXI4-Lite transactions against the register block: feedback
// writes must produce one fb_valid pulse with the word, configuration
// registers must read back, status inputs must appear at the documented bit
// positions, and address/data may arrive in either order.
module tb_axil_regs;
  import mab_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] s_axi_awaddr, s_axi_araddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic fb_valid, auto_en;
  logic [4:0] fb;
  logic [3:0] arm_en, arm_ucb;
  fx_t c, alpha;
  logic [2:0] st_arm;
  logic st_valid, st_cn, st_init, st_switched, st_busy;
  cnt_t st_slot, st_switch_slot;
  int checks = 0, failures = 0, fb_pulses = 0;
  logic [4:0] last_fb;

  axil_regs #(.KMAX(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (fb_valid) begin fb_pulses++; last_fb = fb; end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] expv, string what);
    checks++;
    if (got !== expv) begin failures++; $display("FAIL %s: got %h exp %h", what, got, expv); end
  endtask

  task automatic wr(logic [4:0] a, logic [31:0] d, int order);
    @(negedge clk);
    if (order != 2) begin s_axi_awaddr = a; s_axi_awvalid = 1'b1; end
    if (order != 1) begin s_axi_wdata = d; s_axi_wvalid = 1'b1; end
    if (order == 1) begin
      do @(posedge clk); while (!s_axi_awready);
      @(negedge clk); s_axi_awvalid = 1'b0; s_axi_wdata = d; s_axi_wvalid = 1'b1;
      do @(posedge clk); while (!s_axi_wready);
    end else if (order == 2) begin
      do @(posedge clk); while (!s_axi_wready);
      @(negedge clk); s_axi_wvalid = 1'b0; s_axi_awaddr = a; s_axi_awvalid = 1'b1;
      do @(posedge clk); while (!s_axi_awready);
    end else begin
      do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    end
    @(negedge clk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    s_axi_bready = 1'b0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);                          // hold off BREADY one cycle
    chk(32'(s_axi_bvalid), 1, "BVALID held");
    s_axi_bready = 1'b1;
    @(negedge clk);
  endtask

  task automatic rd(logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1'b1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 1'b0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] d;
    s_axi_awaddr = '0; s_axi_awvalid = 1'b0; s_axi_wdata = '0; s_axi_wstrb = 4'hF;
    s_axi_wvalid = 1'b0; s_axi_bready = 1'b1; s_axi_araddr = '0; s_axi_arvalid = 1'b0;
    s_axi_rready = 1'b1;
    st_arm = 3'd3; st_valid = 1'b1; st_cn = 1'b0; st_init = 1'b1; st_switched = 1'b1; st_busy = 1'b0;
    st_slot = cnt_t'(1234); st_switch_slot = cnt_t'(567);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // reset values
    rd(5'h04, d); chk(d, 32'h0001_000F, "CONFIG reset");
    rd(5'h0C, d); chk(d, 32'h0002_0000, "ALPHA reset");
    // feedback writes, three orderings
    for (int o = 0; o < 3; o++) begin
      int pulses0;
      pulses0 = fb_pulses;
      wr(5'h00, 32'h15 + o, o);
      chk(32'(fb_pulses - pulses0), 1, "one fb_valid pulse");
      chk(32'(last_fb), 32'(5'(32'h15 + o)), "feedback word");
    end
    wr(5'h04, 32'h0000_0305, 0);
    chk(32'(arm_en), 32'h5, "arm_en");
    chk(32'(arm_ucb), 32'h3, "arm_ucb");
    chk(32'(auto_en), 0, "auto_en");
    wr(5'h08, 32'h0003_0000, 1);
    chk(32'(c), 32'h0003_0000, "c");
    wr(5'h0C, 32'h0000_8000, 2);
    rd(5'h0C, d); chk(d, 32'h0000_8000, "ALPHA readback");
    rd(5'h10, d); chk(d, 32'h0000_0D03, "STATUS");
    st_cn = 1'b1; st_busy = 1'b1; st_init = 1'b0;
    rd(5'h10, d); chk(d, 32'h0000_1B03, "STATUS 2");
    rd(5'h14, d); chk(d, 1234, "SLOT");
    rd(5'h18, d); chk(d, 567, "SWITCH");
    chk(32'(s_axi_rresp), 0, "RRESP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
