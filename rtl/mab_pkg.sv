// mab_pkg: types and constants shared by the bandit (MAB) accelerator.
//
// All QF arithmetic is done in signed two's-complement fixed point, FX_W bits
// wide with FX_F fractional bits (Q15.16 by default). The published design
// uses single-precision floating-point operator cores; fixed point is this
// design's own choice, made so that every operator can be written as plain
// synthesizable logic. With 16 fractional bits a bisection of beta = 16 steps
// still resolves the index interval down to one LSB.
//
// The feedback word (one per slot) follows the published layout: reward bit
// in the MSB, restart bit next, then the index of the arm played in the
// previous slot, numbered from 1 (0 = no arm).
package mab_pkg;

  parameter int unsigned FX_W = 32;  // fixed-point word width
  parameter int unsigned FX_F = 16;  // fractional bits

  typedef logic signed [FX_W-1:0] fx_t;

  // Width of the slot counter n and the per-arm counters X, T: the largest
  // integer the fixed-point format holds (32767 slots by default)
  parameter int unsigned CNT_W = FX_W - FX_F - 1;
  typedef logic [CNT_W-1:0] cnt_t;

  localparam fx_t FX_ONE  = fx_t'(1) <<< FX_F;
  localparam fx_t FX_HALF = fx_t'(1) <<< (FX_F - 1);
  localparam fx_t FX_MAX  = {1'b0, {(FX_W-1){1'b1}}};
  localparam fx_t FX_MIN  = {1'b1, {(FX_W-1){1'b0}}};
  // ln(2) rounded to FX_F fractional bits (0.693147 * 2^16)
  localparam fx_t FX_LN2  = fx_t'(45426);

  // Algorithm held by one QF region
  typedef enum logic {
    ALG_KLUCB = 1'b0,
    ALG_UCB   = 1'b1
  } alg_e;

  // One candidate in the arm selection tree: QF value and arm number (1-based)
  typedef struct packed {
    logic       vld;
    fx_t        q;
    logic [7:0] idx;
  } qf_cand_t;

  // Fixed-point multiply with truncation towards minus infinity
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_F);
  endfunction

  // Integer to fixed point (no overflow check: callers keep ints below 2^(FX_W-FX_F-1))
  function automatic fx_t fx_from_int(cnt_t v);
    return fx_t'({1'b0, v, {FX_F{1'b0}}});
  endfunction

  // Arm index field width: arms are numbered 1..kmax, 0 means "none"
  function automatic int unsigned arm_w(int unsigned kmax);
    return (kmax < 1) ? 1 : $clog2(kmax + 1);
  endfunction

endpackage
