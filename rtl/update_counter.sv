// update_counter: the "Update" element of the parameter update block.
//
// An incrementer (+1) whose output is fed back through a register (the
// "Delay" in the published inset): on each clock with `en` high the count
// grows by one. `clr` (a new experiment) clears it and has priority. Used for
// X(k,n), T(k,n) and the slot counter n. The count wraps at 2^W; W is sized
// so the horizon never reaches that.
module update_counter #(
  parameter int unsigned W = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] cnt
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   cnt <= '0;
    else if (clr) cnt <= '0;
    else if (en)  cnt <= cnt + 1'b1;
  end

endmodule
