// tb_mab_demo: adding an arm between two experiments, at default parameters
// (KMAX = 4, BETA = 16, WINDOW = 128).
// Experiment 1 runs 3 enabled arms with means {0.51, 0.52, 0.53} for 10000
// slots, all on KLUCB with the automatic switch to UCB. A fourth arm is then
// enabled, and experiment 2 runs arms with means {0.51, 0.52, 0.53, 0.54} for
// 10000 slots. The model prints the switch slot and how often each arm was
// played in each experiment. It checks every slot, and checks that the
// SWITCH register reports the slot the majority rule predicts. The processor
// model and all checks are in mab_host.
module tb_mab_demo;
  import mab_pkg::*;

  localparam int unsigned KMAX = 4, BETA = 16, WINDOW = 128;
  localparam int unsigned AW = arm_w(KMAX);

  logic clk = 1'b0, rst_n;
  logic [4:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic [AW-1:0] arm_out;
  logic arm_valid, cn_out, init_out, ucb_active;

  always #5 clk = ~clk;

  mab_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .arm_out, .arm_valid, .cn_out, .init_out, .ucb_active
  );

  mab_host #(.KMAX(KMAX), .BETA(BETA), .WINDOW(WINDOW), .N1(10000), .N2(10000),
             .NA1(3), .NA2(4), .SCENARIO(2), .MIN_SPEEDUP(5.0), .WATCHDOG(400_000_000)) host (.*);

  // overall time limit, in addition to the model's own watchdog
  initial begin
    repeat (500_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule
