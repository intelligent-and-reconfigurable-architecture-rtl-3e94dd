// fx_log: sequential fixed-point natural logarithm, y = ln(x).
//
// log2(x) is split into an integer part, the position of the leading one,
// and a fraction found by repeated squaring of the normalised mantissa
// m in [1,2): each square that reaches 2 yields a 1 bit and is halved. One
// fraction bit is produced per clock; a last clock multiplies by ln 2. It
// stands for the log operators of the QF datapath (pre-processing and KL
// divergence); the algorithm is this design's own choice.
//
// Interface: pulse `start` with `x` valid. `done` pulses LAT = FX_F + 2 cycles
// later and `y` holds the result until the next start. x <= 0 gives FX_MIN
// (minus infinity saturated). Error is a few LSBs from truncated squaring.
module fx_log
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic done,
  output fx_t  y
);

  localparam int unsigned MB = FX_W;     // mantissa register, Q2.(MB-2)
  localparam int unsigned SW = 2 * MB;   // square width

  logic [MB-1:0]           man;
  logic [SW-1:0]           sq;
  logic [MB-1:0]           sq_n;
  logic signed [FX_W-1:0]  lg2;         // log2 being assembled
  logic                    zero_in, busy, fin;
  logic [$clog2(FX_F+1)-1:0] cnt;
  logic [$clog2(FX_W)-1:0] lead;
  logic [FX_W-1:0]         xn;

  // Leading-one position of the input
  always_comb begin
    lead = '0;
    for (int i = 0; i < FX_W; i++)
      if (x[i]) lead = ($clog2(FX_W))'(i);
  end
  // Mantissa normalised so its leading one sits at bit MB-2 (value 1.0)
  assign xn   = FX_W'(x) << (FX_W - 2 - int'(lead));
  assign sq   = SW'(man) * SW'(man);
  assign sq_n = sq[2*MB-3 -: MB];        // square rescaled to Q2.(MB-2)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      fin  <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      man  <= '0;
      lg2  <= '0;
      zero_in <= 1'b0;
      y    <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start) begin
        zero_in <= (x[FX_W-1] || x == '0);
        man  <= xn;
        lg2  <= fx_t'(int'(lead) - int'(FX_F)) <<< FX_F;
        cnt  <= ($clog2(FX_F+1))'(FX_F);
        busy <= 1'b1;
      end else if (busy) begin
        if (sq_n[MB-1]) begin
          man <= sq_n >> 1;
          lg2 <= lg2 | (fx_t'(1) <<< (int'(cnt) - 1));
        end else begin
          man <= sq_n;
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end
      end
      if (fin) begin
        y    <= zero_in ? FX_MIN : fx_mul(lg2, FX_LN2);
        done <= 1'b1;
      end
    end
  end

endmodule
