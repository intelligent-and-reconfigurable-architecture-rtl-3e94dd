// tb_mab_top: end-to-end test of mab_top at reduced sizes (BETA = 4,
// WINDOW = 16) so that a whole scenario runs in seconds: 300 slots on all 4
// arms, then 150 slots on 2 arms with arm 1 held on UCB, then a short
// restarted run. The processor model and all checks are in mab_host.
module tb_mab_top;
  import mab_pkg::*;

  localparam int unsigned KMAX = 4, BETA = 4, WINDOW = 16;
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

  mab_top #(.KMAX(KMAX), .BETA(BETA), .WINDOW(WINDOW)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .arm_out, .arm_valid, .cn_out, .init_out, .ucb_active
  );

  mab_host #(.KMAX(KMAX), .BETA(BETA), .WINDOW(WINDOW), .N1(300), .N2(150), .NA2(2),
             .MIN_SPEEDUP(2.0), .WATCHDOG(5_000_000)) host (.*);
endmodule
