// fb_decoder: input decoder of the initialization and parameter update block.
//
// Splits the per-slot feedback word into enables, as in the published block
// diagram: n_en once per slot, Tk_en for the arm played in the previous slot,
// Xk_en for that arm only when its reward was 1, and a restart strobe that
// begins a new experiment. Word layout (MSB first): reward R, restart,
// then the previous arm index numbered 1..KMAX, in arm_w(KMAX) bits. With
// KMAX = 4 that is 5 bits, the width shown in the published format figure.
// Purely combinational; all outputs are qualified by `fb_valid`. An arm index
// of 0 or above KMAX updates no arm counter (this design's choice).
module fb_decoder
  import mab_pkg::*;
#(
  parameter int unsigned KMAX = 4,
  localparam int unsigned AW  = arm_w(KMAX),
  localparam int unsigned FBW = AW + 2
) (
  input  logic            fb_valid,
  input  logic [FBW-1:0]  fb,
  output logic            restart,
  output logic            n_en,
  output logic [KMAX-1:0] x_en,
  output logic [KMAX-1:0] t_en
);

  logic          rwd, rst_bit;
  logic [AW-1:0] arm;

  assign {rwd, rst_bit, arm} = fb;

  always_comb begin
    restart = fb_valid & rst_bit;
    n_en    = fb_valid & ~rst_bit;
    for (int k = 0; k < KMAX; k++) begin
      t_en[k] = n_en & (32'(arm) == k + 1);
      x_en[k] = t_en[k] & rwd;
    end
  end

endmodule
