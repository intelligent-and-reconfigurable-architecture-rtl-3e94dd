// mab_top: programmable-logic part of the reconfigurable KLUCB/UCB bandit
// accelerator.
//
// Each slot of a multi-armed bandit experiment runs three tasks:
//   1. param_update   decodes the processor's feedback word {R, restart,
//                     I_{n-1}} and updates X(k,n), T(k,n) and n;
//   2. qf_calc x KMAX one quality factor per enabled arm, modified KLUCB
//                     (Algorithm 1, beta bisection steps) or UCB (Eq. 1);
//   3. arm_select     I_n = argmax Q, plus C_n (KLUCB and UCB agree).
// During the INIT phase (first K slots) tasks 2 and 3 are bypassed and a
// multiplexer passes the INIT sequencer's arm instead. intelligence_unit
// watches C_n and moves every arm to UCB once KLUCB has settled, after which
// a slot costs only the UCB pre-processing. The processor, which supplies the
// rewards, talks to the design through one AXI4-Lite slave (axil_regs).
//
// Departures from the published system, all of this design's choosing:
// fixed-point arithmetic instead of floating-point cores; start/done strobes
// instead of AXI4-Stream links between blocks; run-time arm-enable and
// algorithm bits instead of partial reconfiguration of the four regions; the
// majority check on C_n is hardware here, software on the processor there.
//
// Slot protocol: write FEEDBACK, poll STATUS until bit 8 (valid) is set, read
// I_n from STATUS[7:0], play that arm, write the next FEEDBACK. The same
// result is also driven on the arm_* output ports. Slot latency after INIT:
// about 140 cycles for UCB and 1,300 for KLUCB at the default sizes, from
// the feedback write to I_n valid (bus transfer included).
module mab_top
  import mab_pkg::*;
#(
  parameter int unsigned KMAX   = 4,    // arms / reconfigurable regions (K_max = 4)
  parameter int unsigned BETA   = 16,   // KLUCB bisection steps (beta = 16)
  parameter int unsigned WINDOW = 128,  // C_n majority window in slots
  localparam int unsigned AW    = arm_w(KMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave (from the processor)
  input  logic [4:0]    s_axi_awaddr,
  input  logic          s_axi_awvalid,
  output logic          s_axi_awready,
  input  logic [31:0]   s_axi_wdata,
  input  logic [3:0]    s_axi_wstrb,
  input  logic          s_axi_wvalid,
  output logic          s_axi_wready,
  output logic [1:0]    s_axi_bresp,
  output logic          s_axi_bvalid,
  input  logic          s_axi_bready,
  input  logic [4:0]    s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  // slot result, also readable over AXI
  output logic [AW-1:0] arm_out,       // I_n
  output logic          arm_valid,
  output logic          cn_out,        // C_n of this slot (1 in INIT)
  output logic          init_out,      // slot belongs to the INIT phase
  output logic          ucb_active     // switched from KLUCB to UCB
);

  localparam int unsigned FBW = AW + 2;

  // configuration and feedback
  logic            fb_valid, auto_en;
  logic [FBW-1:0]  fb;
  logic [KMAX-1:0] arm_en, arm_ucb;
  fx_t             c, alpha;

  // block 1
  cnt_t            x_cnt [KMAX];
  cnt_t            t_cnt [KMAX];
  cnt_t            n_cnt;
  logic            init, restart, upd_done;
  logic [AW-1:0]   init_arm;

  // block 2
  logic [KMAX-1:0] qf_start, qf_done, qf_busy, qf_pend;
  fx_t             q [KMAX];
  fx_t             q_ucb [KMAX];

  // block 3
  logic            sel_start, sel_done, sel_cn;
  logic [AW-1:0]   sel_arm, sel_arm_ucb;
  fx_t             q_max;

  // slot control
  typedef enum logic [1:0] {SL_IDLE, SL_QF, SL_SEL} slot_e;
  slot_e           sl;
  logic            switched, switched_q, cn_valid;
  cnt_t            switch_slot;

  axil_regs #(.KMAX(KMAX), .ADDR_W(5)) u_axil (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .fb_valid, .fb, .arm_en, .arm_ucb, .auto_en, .c, .alpha,
    .st_arm(arm_out), .st_valid(arm_valid), .st_cn(cn_out), .st_init(init_out),
    .st_switched(switched), .st_busy(sl != SL_IDLE), .st_slot(n_cnt),
    .st_switch_slot(switch_slot)
  );

  param_update #(.KMAX(KMAX)) u_pu (
    .clk, .rst_n, .fb_valid, .fb, .arm_en,
    .x_cnt, .t_cnt, .n_cnt, .init, .init_arm, .restart, .upd_done
  );

  for (genvar k = 0; k < KMAX; k++) begin : g_qf
    qf_calc #(.BETA(BETA)) u_qf (
      .clk, .rst_n, .start(qf_start[k]),
      .alg((arm_ucb[k] || switched) ? ALG_UCB : ALG_KLUCB),
      .x_cnt(x_cnt[k]), .t_cnt(t_cnt[k]), .n_cnt, .c, .alpha,
      .busy(qf_busy[k]), .done(qf_done[k]), .q(q[k]), .q_ucb(q_ucb[k])
    );
  end

  arm_select #(.KMAX(KMAX)) u_sel (
    .clk, .rst_n, .start(sel_start), .q, .q_ucb, .arm_en,
    .done(sel_done), .arm(sel_arm), .arm_ucb(sel_arm_ucb), .cn(sel_cn), .q_max
  );

  intelligence_unit #(.WINDOW(WINDOW)) u_intel (
    .clk, .rst_n, .restart, .enable(auto_en), .cn_valid, .cn(sel_cn), .switched
  );

  assign ucb_active = switched;
  assign cn_valid   = sel_done;
  assign qf_start   = (sl == SL_IDLE && upd_done && !init) ? arm_en : '0;
  assign sel_start  = (sl == SL_QF && qf_pend == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sl          <= SL_IDLE;
      qf_pend     <= '0;
      arm_out     <= '0;
      arm_valid   <= 1'b0;
      cn_out      <= 1'b0;
      init_out    <= 1'b0;
      switched_q  <= 1'b0;
      switch_slot <= '0;
    end else begin
      switched_q <= switched;
      if (restart) switch_slot <= '0;
      else if (switched && !switched_q) switch_slot <= n_cnt;
      if (fb_valid) arm_valid <= 1'b0;
      unique case (sl)
        SL_IDLE: if (upd_done) begin
          if (init) begin
            // INIT bypass: the MUX passes the sequencer's arm
            arm_out   <= init_arm;
            arm_valid <= 1'b1;
            cn_out    <= 1'b1;
            init_out  <= 1'b1;
          end else begin
            qf_pend <= arm_en;
            sl      <= SL_QF;
          end
        end
        SL_QF: begin
          qf_pend <= qf_pend & ~qf_done;
          if (qf_pend == '0) sl <= SL_SEL;
        end
        SL_SEL: if (sel_done) begin
          arm_out   <= sel_arm;
          arm_valid <= 1'b1;
          cn_out    <= sel_cn;
          init_out  <= 1'b0;
          sl        <= SL_IDLE;
        end
        default: sl <= SL_IDLE;
      endcase
    end
  end

  // Feedback for the next slot must wait until this slot's arm is out
  a_fb_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                   fb_valid |-> sl == SL_IDLE);

  wire unused_ok = &{1'b0, qf_busy, sel_arm_ucb, q_max};

endmodule
