// param_update: initialization and parameter update block (block 1).
//
// Holds the learning state of an experiment: X(k,n) (rewards collected by
// arm k), T(k,n) (times arm k was played) and the slot number n, each an
// update_counter driven by the decoded feedback word, as in the published
// block diagram. The update is made at the start of the next slot from the
// feedback that carries I_{n-1} and R_{n-1}. A restart word clears all
// counters and starts the INIT phase, which lasts K slots (K = number of
// enabled arms); during it `init` (the "sel" of the published figure) is high
// and `init_arm` is the arm to play, from the pseudo-random INIT sequencer.
//
// Timing: the counters change on the clock edge where `fb_valid` is sampled;
// `upd_done` pulses one cycle later, when X, T, n, init and init_arm already
// reflect the new slot.
module param_update
  import mab_pkg::*;
#(
  parameter int unsigned KMAX = 4,
  localparam int unsigned AW  = arm_w(KMAX),
  localparam int unsigned FBW = AW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            fb_valid,
  input  logic [FBW-1:0]  fb,
  input  logic [KMAX-1:0] arm_en,
  output cnt_t            x_cnt [KMAX],
  output cnt_t            t_cnt [KMAX],
  output cnt_t            n_cnt,
  output logic            init,
  output logic [AW-1:0]   init_arm,
  output logic            restart,
  output logic            upd_done
);

  logic            n_en;
  logic [KMAX-1:0] x_en, t_en;
  logic [$clog2(KMAX+1)-1:0] k_act;

  fb_decoder #(.KMAX(KMAX)) u_dec (
    .fb_valid, .fb, .restart, .n_en, .x_en, .t_en
  );

  for (genvar k = 0; k < KMAX; k++) begin : g_arm
    update_counter #(.W(CNT_W)) u_x (.clk, .rst_n, .clr(restart), .en(x_en[k]), .cnt(x_cnt[k]));
    update_counter #(.W(CNT_W)) u_t (.clk, .rst_n, .clr(restart), .en(t_en[k]), .cnt(t_cnt[k]));
  end

  update_counter #(.W(CNT_W)) u_n (.clk, .rst_n, .clr(restart), .en(n_en), .cnt(n_cnt));

  init_arm_sel #(.KMAX(KMAX)) u_init (
    .clk, .rst_n, .restart, .step(n_en && init), .arm_en, .arm(init_arm)
  );

  always_comb begin
    k_act = '0;
    for (int k = 0; k < KMAX; k++) k_act += arm_en[k];
  end

  assign init = (32'(n_cnt) < 32'(k_act));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) upd_done <= 1'b0;
    else        upd_done <= fb_valid;
  end

endmodule
