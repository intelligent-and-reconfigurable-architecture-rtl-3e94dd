// tb_mab_beta: execution time against reward for several KLUCB bisection
// depths BETA.
//
// Four copies of mab_top are built side by side with BETA = 4, 8, 12 and 16.
// All other parameters are at their defaults. Each copy is driven by its own
// processor model (mab_host, SCENARIO 1). The model runs two experiments on
// four arms, both with all arms on KLUCB and the automatic switch to UCB on:
//   - means {0.2, 0.4, 0.6, 0.8} for N slots;
//   - means {0.51, 0.52, 0.53, 0.54} for N slots.
// The model checks every slot of every copy against its real-valued model at
// that copy's BETA.
//
// This testbench then compares the copies with each other:
//   - KLUCB slot latency grows by exactly one bisection step per extra BETA,
//     ITER = DIV + LOG + 3 cycles, where the DIV and LOG latencies come from
//     the fixed-point format;
//   - the reward of the first run is at least 0.7 N (always playing the best
//     arm would give 0.8 N, a uniform random choice 0.5 N), and that of the
//     second run is not far below 0.51 N, the mean of its worst arm.
// It prints one line per BETA with the latency and both rewards.
module tb_mab_beta;
  import mab_pkg::*;

  localparam int unsigned KMAX = 4;
  localparam int unsigned AW = arm_w(KMAX);
  localparam int unsigned NB = 4;
  localparam int unsigned BETAS [NB] = '{4, 8, 12, 16};
  localparam int unsigned N = 10000;
  // one bisection step: divider, log unit, adder, comparator/mux, loop register
  localparam int ITER = (FX_W + FX_F + 1) + (FX_F + 2) + 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int chk [NB], fl [NB], lkl [NB], rw1 [NB], rw2 [NB];
  bit fin [NB];

  for (genvar b = 0; b < NB; b++) begin : g_b
    logic rst_n;
    logic [4:0] awaddr, araddr;
    logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
    logic [31:0] wdata, rdata;
    logic [3:0] wstrb;
    logic [1:0] bresp, rresp;
    logic [AW-1:0] arm_out;
    logic arm_valid, cn_out, init_out, ucb_active;

    mab_top #(.BETA(BETAS[b])) dut (
      .clk, .rst_n,
      .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
      .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
      .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
      .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
      .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
      .arm_out, .arm_valid, .cn_out, .init_out, .ucb_active
    );

    mab_host #(.KMAX(KMAX), .BETA(BETAS[b]), .WINDOW(128), .N1(N), .N2(N),
               .NA1(4), .NA2(4), .MIN_SPEEDUP(2.0), .WATCHDOG(400_000_000),
               .SCENARIO(1), .STANDALONE(1'b0)) host (.*);

    initial begin
      fin[b] = 1'b0;
      wait (host.finished);
      chk[b] = host.checks;
      fl[b]  = host.failures;
      lkl[b] = host.lat_kl;
      rw1[b] = host.rewards[0];
      rw2[b] = host.rewards[1];
      fin[b] = 1'b1;
    end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (300_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1'b1;
      for (int b = 0; b < NB; b++) all &= fin[b];
    end while (!all);

    for (int b = 0; b < NB; b++) begin
      checks += chk[b];
      failures += fl[b];
      $display("BETA %2d: KLUCB slot %5d cycles, reward %0d (mu1), %0d (mu2) over %0d slots",
               BETAS[b], lkl[b], rw1[b], rw2[b], N);
      checks++;
      if (lkl[b] - lkl[0] != int'(BETAS[b] - BETAS[0]) * ITER) begin
        failures++;
        $display("FAIL BETA %0d: KLUCB latency %0d, expected %0d", BETAS[b], lkl[b],
                 lkl[0] + int'(BETAS[b] - BETAS[0]) * ITER);
      end
      checks++;
      if (rw1[b] < int'(0.7 * N) || rw2[b] < int'(0.51 * N) - 300) begin
        failures++;
        $display("FAIL BETA %0d: rewards too low", BETAS[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
