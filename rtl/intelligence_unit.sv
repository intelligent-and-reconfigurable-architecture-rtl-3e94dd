// intelligence_unit: decides when to switch from KLUCB to UCB.
//
// Every slot after INIT brings one agreement flag C_n (1 when KLUCB and UCB
// would pick the same arm). The unit keeps the last WINDOW flags in a shift
// register with a running count of ones; once the window is full and more
// than half of it is 1, KLUCB exploration is taken as finished and `switched`
// goes high, moving all arms to UCB. It stays high until the next experiment
// (`restart`). `enable` = 0 disables the automatic switch.
//
// The published design runs this check as software on the processor and
// gives its rule (majority of C_n = 1 over a window) but not the window
// length or whether the window slides; a sliding window of WINDOW = 128
// slots is this design's choice.
//
// Timing: `switched` rises on the clock after the cn_valid that completes the
// majority, so it applies from the next slot on.
module intelligence_unit #(
  parameter int unsigned WINDOW = 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic restart,
  input  logic enable,
  input  logic cn_valid,
  input  logic cn,
  output logic switched
);

  localparam int unsigned CW = $clog2(WINDOW + 1);

  logic [WINDOW-1:0] hist;
  logic [CW-1:0]     ones, seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist     <= '0;
      ones     <= '0;
      seen     <= '0;
      switched <= 1'b0;
    end else if (restart) begin
      hist     <= '0;
      ones     <= '0;
      seen     <= '0;
      switched <= 1'b0;
    end else begin
      if (cn_valid) begin
        // the oldest flag leaves the window (it is 0 until the window is full)
        hist <= {hist[WINDOW-2:0], cn};
        ones <= ones + CW'(cn) - CW'(hist[WINDOW-1]);
        if (seen != CW'(WINDOW)) seen <= seen + 1'b1;
      end
      if (enable && seen == CW'(WINDOW) && 2 * 32'(ones) > WINDOW) switched <= 1'b1;
    end
  end

endmodule
