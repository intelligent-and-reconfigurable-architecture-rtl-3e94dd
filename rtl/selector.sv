// selector: one node of the arm selection tree.
//
// Compares the QF values of two candidates with a ">=" comparator and passes
// on the larger together with its arm number, as in the published selector
// (extract Q and index from both inputs, compare, multiplex the index, form
// the output). On a tie the first input (lower arm number) wins. A candidate
// with vld = 0 (a disabled arm, a "blank" region) always loses. The output is
// registered, one cycle per tree level; the registers stand in for the
// stream handshakes of the published design.
module selector
  import mab_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  qf_cand_t a,
  input  qf_cand_t b,
  output logic     out_valid,
  output qf_cand_t y
);

  logic take_a;

  assign take_a = a.vld && (!b.vld || (a.q >= b.q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= take_a ? a : b;
    end
  end

endmodule
