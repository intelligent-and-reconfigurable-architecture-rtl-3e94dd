// arm_select: arm selection block (block 3) with the KLUCB/UCB agreement flag.
//
// A binary tree of registered selectors picks I_n = argmax_k Q(k,n) over the
// enabled arms (for KMAX = 4: two selectors for pairs (1,2), (3,4) and one
// for the winners, as in the published figure). A second, identical tree runs
// on the UCB indices Qu(k,n) computed in the same pass, and
//   C_n = 1 when both trees choose the same arm, else 0,
// which the intelligence unit uses to decide when KLUCB exploration is over.
// The leaves are padded to a power of two with invalid candidates. Both
// trees advance together, so the UCB tree's valid outputs are left open.
//
// Interface: pulse `start` with q, q_ucb and arm_en valid; `done` pulses
// LEVELS = clog2(KMAX) cycles later (at least 1) with arm, arm_ucb, cn and
// q_max valid until the next done. arm = 0 if no arm is enabled.
module arm_select
  import mab_pkg::*;
#(
  parameter int unsigned KMAX = 4,
  localparam int unsigned AW  = arm_w(KMAX)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  fx_t             q     [KMAX],
  input  fx_t             q_ucb [KMAX],
  input  logic [KMAX-1:0] arm_en,
  output logic            done,
  output logic [AW-1:0]   arm,
  output logic [AW-1:0]   arm_ucb,
  output logic            cn,
  output fx_t             q_max
);

  localparam int unsigned LEVELS = (KMAX < 2) ? 1 : $clog2(KMAX);
  localparam int unsigned P      = 1 << LEVELS;      // padded leaf count
  localparam int unsigned NN     = 2 * P - 1;        // nodes, heap order

  qf_cand_t nk [NN];    // KLUCB (or selected algorithm) tree
  qf_cand_t nu [NN];    // UCB tree
  logic     nv [NN];    // node valid (same for both trees)

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < KMAX) begin : g_arm
      assign nk[P-1+i] = '{vld: arm_en[i], q: q[i],     idx: 8'(i + 1)};
      assign nu[P-1+i] = '{vld: arm_en[i], q: q_ucb[i], idx: 8'(i + 1)};
    end else begin : g_pad
      assign nk[P-1+i] = '0;
      assign nu[P-1+i] = '0;
    end
    assign nv[P-1+i] = start;
  end

  for (genvar i = 0; i < P - 1; i++) begin : g_node
    selector u_k (.clk, .rst_n, .in_valid(nv[2*i+1]), .a(nk[2*i+1]), .b(nk[2*i+2]),
                  .out_valid(nv[i]), .y(nk[i]));
    selector u_u (.clk, .rst_n, .in_valid(nv[2*i+1]), .a(nu[2*i+1]), .b(nu[2*i+2]),
                  .out_valid(), .y(nu[i]));
  end

  assign done    = nv[0];
  assign arm     = nk[0].vld ? AW'(nk[0].idx) : '0;
  assign arm_ucb = nu[0].vld ? AW'(nu[0].idx) : '0;
  assign cn      = (arm == arm_ucb);
  assign q_max   = nk[0].q;

endmodule
