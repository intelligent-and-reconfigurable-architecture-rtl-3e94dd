// axil_regs: AXI4-Lite slave through which the processor drives the design.
//
// The published design receives the per-slot feedback word over AXI4-Lite
// and returns I_n (and C_n) to the processor. This block implements that
// port as a small register file; the register map below is this design's
// own. Run-time configuration registers take the place of partial
// reconfiguration: an arm's enable bit stands for loading or blanking its
// region, its algorithm bit for loading the UCB or the KLUCB QF logic.
//
//   0x00 FEEDBACK  W   {R, restart, I_{n-1}} in the low AW+2 bits; each write
//                      is one slot's feedback (fb_valid pulse)
//   0x04 CONFIG    RW  [KMAX-1:0] arm enable (reset: all), [8+k] arm k+1
//                      runs UCB (reset: KLUCB), [16] automatic KLUCB->UCB
//                      switch enable (reset: 1)
//   0x08 C         RW  c of the KLUCB exploration term, fixed point (reset 0)
//   0x0C ALPHA     RW  alpha of the UCB index, fixed point (reset 2.0)
//   0x10 STATUS    R   [7:0] I_n, [8] I_n valid, [9] C_n, [10] INIT phase,
//                      [11] switched to UCB, [12] busy
//   0x14 SLOT      R   n
//   0x18 SWITCH    R   slot at which the switch to UCB happened (0: none)
//
// Handshake: write address and data may arrive in either order; the write
// is done when both are held, then BVALID is raised until BREADY. A read
// returns RVALID one cycle after the address handshake. Responses are OKAY.
module axil_regs
  import mab_pkg::*;
#(
  parameter int unsigned KMAX   = 4,
  parameter int unsigned ADDR_W = 5,
  localparam int unsigned AW    = arm_w(KMAX),
  localparam int unsigned FBW   = AW + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // towards the design
  output logic              fb_valid,
  output logic [FBW-1:0]    fb,
  output logic [KMAX-1:0]   arm_en,
  output logic [KMAX-1:0]   arm_ucb,
  output logic              auto_en,
  output fx_t               c,
  output fx_t               alpha,
  // status from the design
  input  logic [AW-1:0]     st_arm,
  input  logic              st_valid,
  input  logic              st_cn,
  input  logic              st_init,
  input  logic              st_switched,
  input  logic              st_busy,
  input  cnt_t              st_slot,
  input  cnt_t              st_switch_slot
);

  localparam logic [ADDR_W-1:0] A_FB = 'h00, A_CFG = 'h04, A_C = 'h08, A_ALPHA = 'h0C,
                                A_STATUS = 'h10, A_SLOT = 'h14, A_SWITCH = 'h18;

  logic [ADDR_W-1:0] aw_q;
  logic [31:0]       w_q;
  logic              aw_hold, w_hold;
  logic [31:0]       cfg;
  logic [31:0]       rd_mux;

  assign s_axi_awready = !aw_hold && !s_axi_bvalid;
  assign s_axi_wready  = !w_hold && !s_axi_bvalid;
  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  assign arm_en  = cfg[KMAX-1:0];
  assign arm_ucb = cfg[8 +: KMAX];
  assign auto_en = cfg[16];

  always_comb begin
    unique case (s_axi_araddr)
      A_FB:     rd_mux = 32'(fb);
      A_CFG:    rd_mux = cfg;
      A_C:      rd_mux = 32'(c);
      A_ALPHA:  rd_mux = 32'(alpha);
      A_STATUS: rd_mux = {19'b0, st_busy, st_switched, st_init, st_cn, st_valid, 8'(st_arm)};
      A_SLOT:   rd_mux = 32'(st_slot);
      A_SWITCH: rd_mux = 32'(st_switch_slot);
      default:  rd_mux = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_hold      <= 1'b0;
      w_hold       <= 1'b0;
      aw_q         <= '0;
      w_q          <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      fb_valid     <= 1'b0;
      fb           <= '0;
      cfg          <= (32'(1) << 16) | 32'((64'(1) << KMAX) - 1);
      c            <= '0;
      alpha        <= 2 * FX_ONE;
    end else begin
      fb_valid <= 1'b0;
      if (s_axi_awvalid && s_axi_awready) begin
        aw_q    <= s_axi_awaddr;
        aw_hold <= 1'b1;
      end
      if (s_axi_wvalid && s_axi_wready) begin
        w_q    <= s_axi_wdata;
        w_hold <= 1'b1;
      end
      if (aw_hold && w_hold) begin
        aw_hold      <= 1'b0;
        w_hold       <= 1'b0;
        s_axi_bvalid <= 1'b1;
        unique case (aw_q)
          A_FB: begin
            fb       <= w_q[FBW-1:0];
            fb_valid <= 1'b1;
          end
          A_CFG:   cfg   <= w_q;
          A_C:     c     <= fx_t'(w_q);
          A_ALPHA: alpha <= fx_t'(w_q);
          default: ;
        endcase
      end
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rdata  <= rd_mux;
        s_axi_rvalid <= 1'b1;
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, is held until it is accepted
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

  // Only full-word writes are meaningful here
  wire unused_ok = &{1'b0, s_axi_wstrb};

endmodule
