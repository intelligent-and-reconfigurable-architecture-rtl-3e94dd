// init_arm_sel: arm selection for the INIT phase.
//
// During the first K slots of an experiment every enabled arm must be played
// exactly once. A maximal-length LFSR of AW = arm_w(KMAX) bits runs through
// all non-zero AW-bit values, i.e. all arm numbers 1..2^AW-1, once per period;
// values that are not enabled arms are skipped, so the enabled arms come out
// in a pseudo-random order, each once. The published design states only that a
// pseudo-random sequence generator of length K is used; the LFSR, its
// polynomials and the skipping are this design's choice.
//
// `arm` is the arm to play in the current INIT slot. `restart` reloads the
// seed (the first enabled arm reachable from state 1); `step` (one per
// completed slot) moves to the next enabled arm. Both take effect on the next
// clock. If no arm is enabled `arm` is 0.
module init_arm_sel
  import mab_pkg::*;
#(
  parameter int unsigned KMAX = 4,
  localparam int unsigned AW  = arm_w(KMAX)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            restart,
  input  logic            step,
  input  logic [KMAX-1:0] arm_en,
  output logic [AW-1:0]   arm
);

  localparam int unsigned PERIOD = (1 << AW) - 1;

  // Tap mask of a maximal-length polynomial for each width (KMAX <= 255)
  function automatic logic [7:0] taps8(int unsigned w);
    unique case (w)
      2:       return 8'b0000_0011;   // x^2 + x + 1
      3:       return 8'b0000_0110;   // x^3 + x^2 + 1
      4:       return 8'b0000_1100;   // x^4 + x^3 + 1
      5:       return 8'b0001_0100;   // x^5 + x^3 + 1
      6:       return 8'b0011_0000;   // x^6 + x^5 + 1
      7:       return 8'b0110_0000;   // x^7 + x^6 + 1
      default: return 8'b1011_1000;   // x^8 + x^6 + x^5 + x^4 + 1
    endcase
  endfunction

  localparam logic [AW-1:0] TAPS = AW'(taps8(AW));

  // One Fibonacci LFSR shift (a 1-bit "LFSR" stays at 1)
  function automatic logic [AW-1:0] lfsr_next(logic [AW-1:0] s);
    if (AW == 1) return s;
    return AW'({s, ^(s & TAPS)});
  endfunction

  function automatic logic is_arm(logic [AW-1:0] s, logic [KMAX-1:0] en);
    return (s != '0) && (32'(s) <= KMAX) && en[32'(s) - 1];
  endfunction

  // First enabled arm at or after state s along the LFSR sequence
  function automatic logic [AW-1:0] seek(logic [AW-1:0] s, logic [KMAX-1:0] en);
    logic [AW-1:0] cur, found;
    logic hit;
    cur = s; found = '0; hit = 1'b0;
    for (int i = 0; i < PERIOD; i++) begin
      if (!hit && is_arm(cur, en)) begin
        found = cur;
        hit   = 1'b1;
      end
      cur = lfsr_next(cur);
    end
    return found;
  endfunction

  logic [AW-1:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= AW'(1);
    else if (restart) state <= seek(AW'(1), arm_en);
    else if (step)    state <= seek(lfsr_next(state == '0 ? AW'(1) : state), arm_en);
  end

  assign arm = is_arm(state, arm_en) ? state : seek(state == '0 ? AW'(1) : state, arm_en);

endmodule
