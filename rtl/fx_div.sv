// fx_div: sequential fixed-point divider, q = a / b in the shared Q format.
//
// A radix-2 restoring divider on magnitudes: the dividend |a| << FX_F is
// shifted through a remainder register one bit per clock, and the sign is
// applied at the end. It takes the place of the divide operators drawn in
// the QF datapath (pre-processing and KL divergence), which the published
// design builds from floating-point cores; the restoring algorithm and the
// saturation rules are this design's own.
//
// Interface: pulse `start` for one cycle with `a`, `b` valid. `done` pulses
// exactly LAT = FX_W + FX_F + 1 cycles later; `q` is valid from then until
// the next start. Division by zero, or a quotient that does not fit, gives
// FX_MAX (or FX_MIN when the result is negative).
module fx_div
  import mab_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  a,
  input  fx_t  b,
  output logic done,
  output fx_t  q
);

  localparam int unsigned NB = FX_W + FX_F;   // quotient bits produced

  logic [NB-1:0]         dvd;     // dividend shifting out, quotient shifting in
  logic [FX_W:0]         rem;
  logic [FX_W-1:0]       dvs;
  logic                  neg, dz, busy;
  logic [$clog2(NB+1)-1:0] cnt;
  logic [FX_W:0]         r2;
  logic [FX_W-1:0]       mag_a, mag_b;

  assign mag_a = a[FX_W-1] ? FX_W'(-a) : FX_W'(a);
  assign mag_b = b[FX_W-1] ? FX_W'(-b) : FX_W'(b);
  assign r2    = {rem[FX_W-1:0], dvd[NB-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      dvd  <= '0;
      rem  <= '0;
      dvs  <= '0;
      neg  <= 1'b0;
      dz   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        dvd  <= {mag_a, {FX_F{1'b0}}};
        rem  <= '0;
        dvs  <= mag_b;
        neg  <= a[FX_W-1] ^ b[FX_W-1];
        dz   <= (b == '0);
        cnt  <= ($clog2(NB+1))'(NB);
        busy <= 1'b1;
      end else if (busy) begin
        if (r2 >= {1'b0, dvs}) begin
          rem <= r2 - {1'b0, dvs};
          dvd <= {dvd[NB-2:0], 1'b1};
        end else begin
          rem <= r2;
          dvd <= {dvd[NB-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Sign and saturation applied to the finished quotient
  always_comb begin
    if (dz || (dvd[NB-1:FX_W-1] != '0)) q = neg ? FX_MIN : FX_MAX;
    else if (neg)                       q = -fx_t'(dvd[FX_W-1:0]);
    else                                q = fx_t'(dvd[FX_W-1:0]);
  end

endmodule
