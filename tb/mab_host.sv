// mab_host: processor-side model used by the end-to-end testbenches.
//
// It plays the part of the processor and its reward-generation software:
// drives the AXI4-Lite slave of mab_top, writes one feedback word per slot,
// waits for I_n, draws a Bernoulli reward for that arm with $urandom, and
// keeps its own copy of X, T and n. For every slot it checks the design
// against a real-valued model written independently of the RTL:
//   - INIT: each enabled arm is played exactly once in the first K slots;
//   - the chosen arm's index (modified KLUCB with BETA steps, or UCB) is
//     within TOL of the best enabled arm's index;
//   - C_n matches the model when the choice is unambiguous;
//   - the KLUCB->UCB switch happens exactly when the majority rule says so;
//   - the STATUS and SLOT registers agree with the output ports;
//   - slot latency is the same for all slots of one mode, and UCB slots are
//     faster than KLUCB slots by at least MIN_SPEEDUP.
// Scenario: experiment 1 on NA1 arms with means MU1 (automatic switch on);
// reconfiguration to NA2 arms with arm 1 forced to UCB (mixed regions);
// restart, experiment 2 with means MU2; then a short restart mid-run.
// Each mechanism is counted and one that never happened is a failure.
// SCENARIO 1 instead runs MU1 for N1 slots and then MU2 for N2 slots on
// NA1 arms, all KLUCB with the automatic switch, and records the reward of
// each run (rewards[0], rewards[1]). With STANDALONE = 0 the model does not
// end the simulation: it sets `finished` and leaves checks, failures,
// rewards and lat_kl for the enclosing testbench to collect.
// SCENARIO 2 runs MU2 on NA1 arms for N1 slots, then enables more arms and
// runs MU2 on NA2 arms for N2 slots (adding an arm between experiments).
module mab_host
  import mab_pkg::*;
#(
  parameter int unsigned KMAX        = 4,
  parameter int unsigned BETA        = 16,
  parameter int unsigned WINDOW      = 128,
  parameter int unsigned N1          = 400,   // slots of experiment 1
  parameter int unsigned N2          = 200,   // slots of experiment 2
  parameter int unsigned NA1         = 4,     // arms enabled in experiment 1
  parameter int unsigned NA2         = 3,     // arms enabled in experiment 2
  parameter real         MIN_SPEEDUP = 2.0,
  parameter longint      WATCHDOG    = 50_000_000,
  parameter int unsigned SCENARIO    = 0,     // 0: full scenario, 1: MU1 then MU2 on NA1 arms,
                                              // 2: MU2 on NA1 arms, then on NA2 arms
  parameter bit          STANDALONE  = 1,     // 0: set `finished` instead of calling $finish
  localparam int unsigned AW         = arm_w(KMAX)
) (
  input  logic          clk,
  output logic          rst_n,
  output logic [4:0]    awaddr,
  output logic          awvalid,
  input  logic          awready,
  output logic [31:0]   wdata,
  output logic [3:0]    wstrb,
  output logic          wvalid,
  input  logic          wready,
  input  logic [1:0]    bresp,
  input  logic          bvalid,
  output logic          bready,
  output logic [4:0]    araddr,
  output logic          arvalid,
  input  logic          arready,
  input  logic [31:0]   rdata,
  input  logic [1:0]    rresp,
  input  logic          rvalid,
  output logic          rready,
  input  logic [AW-1:0] arm_out,
  input  logic          arm_valid,
  input  logic          cn_out,
  input  logic          init_out,
  input  logic          ucb_active
);

  localparam real TOL = 0.01;
  localparam real MU1 [4] = '{0.2, 0.4, 0.6, 0.8};
  localparam real MU2 [4] = '{0.51, 0.52, 0.53, 0.54};

  int checks = 0, failures = 0;
  int reward = 0;
  int rewards [2] = '{0, 0};
  bit finished = 1'b0;
  // mechanism counters
  int m_init = 0, m_klucb = 0, m_ucb = 0, m_switch = 0, m_cn0 = 0, m_cn1 = 0,
      m_restart = 0, m_reconf = 0, m_mixed = 0;
  int lat_kl = -1, lat_ucb = -1;
  longint cyc = 0;

  // host-side model state
  int        xm [KMAX];
  int        tm [KMAX];
  int        nm;
  bit        en [KMAX];
  bit        force_ucb [KMAX];
  bit        sw_model;
  int        sw_slot_m;
  bit        hist [$];
  real       mu [KMAX];
  int        picks [KMAX];
  real       alpha_m = 2.0;

  always @(posedge clk) cyc++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    $display("FAIL [slot %0d] %s", nm, msg);
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(logic [4:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wvalid = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) fail("BRESP not OKAY");
    @(negedge clk);
  endtask

  task automatic axi_read(logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
  endtask

  // ---------------- real-valued reference ----------------
  function automatic real kl(real p, real q);
    real r = 0.0;
    if (q >= 1.0 && p < 1.0) return 1.0e9;
    if (p > 0.0) r += p * $ln(p / q);
    if (p < 1.0) r += (1.0 - p) * $ln((1.0 - p) / (1.0 - q));
    return r;
  endfunction

  function automatic real q_ucb(int k);
    return real'(xm[k]) / real'(tm[k]) + $sqrt(alpha_m * $ln(real'(nm)) / real'(tm[k]));
  endfunction

  function automatic real q_kl(int k);
    real s1, s2, lo, hi, m, l1;
    s1 = real'(xm[k]) / real'(tm[k]);
    l1 = $ln(real'(nm));
    s2 = l1 / real'(tm[k]);                      // c = 0
    lo = s1;
    hi = s1 + $sqrt(s2 / 2.0);
    if (hi > 1.0) hi = 1.0;
    for (int i = 0; i < BETA; i++) begin
      m = (lo + hi) / 2.0;
      if (kl(s1, m) > s2) hi = m; else lo = m;
    end
    return hi;
  endfunction

  // best and runner-up over enabled arms; returns index of best
  function automatic int best(real v [KMAX], output real gap, output real vbest);
    int b = -1;
    real second = -1.0e9;
    vbest = -1.0e9;
    for (int k = 0; k < KMAX; k++) if (en[k]) begin
      if (v[k] > vbest) begin second = vbest; vbest = v[k]; b = k; end
      else if (v[k] > second) second = v[k];
    end
    gap = vbest - second;
    return b;
  endfunction

  // ---------------- one slot ----------------
  logic [AW-1:0] last_arm;
  bit            last_rwd;

  task automatic slot(bit restart);
    logic [31:0] st, sl;
    longint t0;
    int lat, k;
    real vs [KMAX];
    real vu [KMAX];
    real gs, gu, bs, bu;
    int  as_, au;
    bit  was_init, all_kl, all_ucb, any_ucb;

    // model state used by the design for this slot
    was_init = 1'b0;
    all_kl = 1'b1; all_ucb = 1'b1; any_ucb = 1'b0;
    if (restart) begin
      for (int i = 0; i < KMAX; i++) begin xm[i] = 0; tm[i] = 0; end
      nm = 0;
      sw_model = 1'b0;
      hist.delete();
    end else begin
      tm[int'(last_arm) - 1]++;
      xm[int'(last_arm) - 1] += last_rwd;
      nm++;
    end
    t0 = cyc;
    axi_write(5'h00, restart ? 32'(1 << AW) : 32'({last_rwd, 1'b0, last_arm}));
    while (!arm_valid) @(negedge clk);
    lat = int'(cyc - t0);
    k = int'(arm_out) - 1;

    // registers agree with the ports
    axi_read(5'h10, st);
    axi_read(5'h14, sl);
    checks++;
    if (st[7:0] != 8'(arm_out) || !st[8] || st[9] != cn_out || st[10] != init_out || st[11] != ucb_active)
      fail($sformatf("STATUS %h does not match ports", st));
    checks++;
    if (int'(sl) != nm) fail($sformatf("SLOT %0d expected %0d", sl, nm));

    checks++;
    if (k < 0 || k >= KMAX || !en[k]) begin
      fail($sformatf("arm %0d is not an enabled arm", arm_out));
      k = 0;
    end

    for (int i = 0; i < KMAX; i++) if (en[i]) begin
      if (force_ucb[i] || sw_model) all_kl = 1'b0; else all_ucb = 1'b0;
      if (force_ucb[i]) any_ucb = 1'b1;
    end

    if (init_out) begin
      m_init++;
      was_init = 1'b1;
      checks++;
      if (tm[k] != 0) fail("INIT plays an arm twice");
    end else begin
      int nen = 0;
      for (int i = 0; i < KMAX; i++) nen += en[i];
      checks++;
      if (nm < nen) fail("INIT phase ended early");
      for (int i = 0; i < KMAX; i++) if (en[i]) begin
        vu[i] = q_ucb(i);
        vs[i] = (force_ucb[i] || sw_model) ? vu[i] : q_kl(i);
      end
      as_ = best(vs, gs, bs);
      au  = best(vu, gu, bu);
      checks++;
      if (vs[k] < bs - TOL) fail($sformatf("arm %0d index %f, best %0d %f", k + 1, vs[k], as_ + 1, bs));
      if (gs > TOL && gu > TOL) begin
        checks++;
        if (cn_out != (as_ == au)) fail($sformatf("C_n %0d expected %0d", cn_out, as_ == au));
      end
      if (cn_out) m_cn1++; else m_cn0++;
      if (all_kl) begin
        m_klucb++;
        checks++;
        if (lat_kl < 0) lat_kl = lat; else if (lat != lat_kl) fail($sformatf("KLUCB slot latency %0d vs %0d", lat, lat_kl));
      end
      if (all_ucb) begin
        m_ucb++;
        checks++;
        if (lat_ucb < 0) lat_ucb = lat; else if (lat != lat_ucb) fail($sformatf("UCB slot latency %0d vs %0d", lat, lat_ucb));
      end
      if (any_ucb && !all_ucb) m_mixed++;
      // intelligence: sliding-window majority of C_n
      hist.push_back(cn_out);
      if (hist.size() > WINDOW) void'(hist.pop_front());
      if (hist.size() == WINDOW && !sw_model) begin
        int ones = 0;
        foreach (hist[i]) ones += hist[i];
        if (2 * ones > WINDOW) begin
          sw_model = 1'b1;
          sw_slot_m = nm;
          m_switch++;
          $display("switch from KLUCB to UCB at slot %0d", nm);
        end
      end
    end
    checks++;
    if (ucb_active != sw_model) fail($sformatf("ucb_active %0d expected %0d", ucb_active, sw_model));
    if (was_init && cn_out != 1'b1) fail("C_n not 1 in INIT");

    picks[k]++;
    last_arm = arm_out;
    last_rwd = (real'($urandom_range(0, 9999)) < mu[k] * 10000.0);
    reward += int'(last_rwd);
  endtask

  task automatic configure(int na, bit ucb1);
    logic [31:0] cfg;
    cfg = 32'(1 << 16);
    for (int i = 0; i < KMAX; i++) begin
      en[i] = (i < na);
      force_ucb[i] = ucb1 && (i == 0);
      cfg[i] = en[i];
      cfg[8 + i] = force_ucb[i];
    end
    axi_write(5'h04, cfg);
  endtask

  task automatic experiment(int na, int nslots, bit use_mu2);
    for (int i = 0; i < KMAX; i++) begin
      mu[i] = use_mu2 ? MU2[i % 4] : MU1[i % 4];
      picks[i] = 0;
    end
    reward = 0;
    m_restart++;
    slot(1'b1);
    for (int s = 1; s < nslots; s++) slot(1'b0);
    begin
      logic [31:0] swr;
      axi_read(5'h18, swr);
      checks++;
      if (int'(swr) != (sw_model ? sw_slot_m : 0))
        fail($sformatf("SWITCH register %0d expected %0d", swr, sw_model ? sw_slot_m : 0));
    end
    $display("arms played: %0d %0d %0d %0d", picks[0], picks[1 % KMAX], picks[2 % KMAX], picks[3 % KMAX]);
  endtask

  initial begin
    rst_n = 1'b0;
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = 4'hF; wvalid = 1'b0; bready = 1'b1;
    araddr = '0; arvalid = 1'b0; rready = 1'b1;
    last_arm = '0; last_rwd = 1'b0; nm = 0; sw_model = 1'b0;
    for (int i = 0; i < KMAX; i++) begin xm[i] = 0; tm[i] = 0; en[i] = 1'b1; force_ucb[i] = 1'b0; picks[i] = 0; mu[i] = 0.5; end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // experiment 1: all KLUCB, automatic switch, alpha = 0.5
    alpha_m = 0.5;
    axi_write(5'h0C, 32'(1 << (FX_F - 1)));
    configure(NA1, 1'b0);
    experiment(NA1, N1, SCENARIO == 2);
    if (SCENARIO != 2) begin  // arm means 0.01 apart need not be ranked within N1 slots
      int b = 0;
      for (int i = 1; i < NA1; i++) if (picks[i] > picks[b]) b = i;
      checks++;
      if (b != NA1 - 1) fail("best arm of experiment 1 is not the most played");
    end
    rewards[0] = reward;
    if (SCENARIO == 0) begin
      // reconfiguration: fewer arms, arm 1 runs UCB, experiment 2
      m_reconf++;
      configure(NA2, 1'b1);
      experiment(NA2, N2, 1'b1);
      rewards[1] = reward;
      // restart in the middle of a short run
      configure(NA1, 1'b0);
      experiment(NA1, NA1 + 3, 1'b0);
      m_reconf++;
    end else if (SCENARIO == 2) begin
      // same means, arms added between the experiments
      m_reconf++;
      configure(NA2, 1'b0);
      experiment(NA2, N2, 1'b1);
      rewards[1] = reward;
    end else begin
      // second workload on the same arms, same configuration
      configure(NA1, 1'b0);
      experiment(NA1, N2, 1'b1);
      rewards[1] = reward;
    end
    $display("rewards: %0d (experiment 1, %0d slots), %0d (experiment 2, %0d slots)", rewards[0], N1, rewards[1], N2);

    $display("mechanisms: init=%0d klucb=%0d ucb=%0d switch=%0d cn0=%0d cn1=%0d restart=%0d reconf=%0d mixed=%0d",
             m_init, m_klucb, m_ucb, m_switch, m_cn0, m_cn1, m_restart, m_reconf, m_mixed);
    $display("slot latency: KLUCB %0d cycles, UCB %0d cycles (incl. AXI write)", lat_kl, lat_ucb);
    checks++; if (m_init == 0)    fail("INIT bypass never happened");
    checks++; if (m_klucb == 0)   fail("no KLUCB slot");
    checks++; if (m_ucb == 0)     fail("no UCB slot");
    checks++; if (m_switch == 0)  fail("KLUCB->UCB switch never happened");
    checks++; if (m_cn0 == 0)     fail("C_n = 0 never seen");
    checks++; if (m_cn1 == 0)     fail("C_n = 1 never seen");
    if (SCENARIO == 0) begin
      checks++; if (m_mixed == 0) fail("mixed UCB/KLUCB regions never ran");
    end
    checks++;
    if (lat_kl > 0 && lat_ucb > 0 && real'(lat_kl) < MIN_SPEEDUP * real'(lat_ucb))
      fail($sformatf("UCB slots not %f x faster", MIN_SPEEDUP));
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    finished = 1'b1;
  end

  wire unused_ok = &{1'b0, rresp};

endmodule
