// fx_sqrt: sequential fixed-point square root, y = sqrt(x).
//
// Digit-by-digit (restoring) integer square root of x << FX_F, two radicand
// bits per clock, so the FX_F fractional bits of the result come out right.
// It stands for the square-root operator of the QF pre-processing stage; the
// algorithm is this design's own choice.
//
// Interface: pulse `start` with `x` valid. `done` pulses LAT = (FX_W+FX_F)/2 + 1
// cycles later and `y` holds the result until the next start. Negative inputs
// give 0. The result is truncated (floor).
module fx_sqrt
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic done,
  output fx_t  y
);

  localparam int unsigned RB = FX_W + FX_F;  // radicand bits
  localparam int unsigned QB = RB / 2;       // root bits

  logic [RB-1:0]   rad;
  logic [QB-1:0]   root;
  logic [QB+2:0]   rem;
  logic [QB+2:0]   rem_sh, trial;
  logic            busy;
  logic [$clog2(QB+1)-1:0] cnt;

  assign rem_sh = {rem[QB:0], rad[RB-1 -: 2]};
  assign trial  = {1'b0, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      rad  <= '0;
      root <= '0;
      rem  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rad  <= x[FX_W-1] ? '0 : {x, {FX_F{1'b0}}};
        root <= '0;
        rem  <= '0;
        cnt  <= ($clog2(QB+1))'(QB);
        busy <= 1'b1;
      end else if (busy) begin
        rad <= {rad[RB-3:0], 2'b00};
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[QB-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[QB-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign y = fx_t'(root);

endmodule
