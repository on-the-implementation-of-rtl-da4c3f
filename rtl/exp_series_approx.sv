// exp_series_approx: e^-x for the residual 0 <= x < 1/8 by a third-order
// Taylor series written in 1's complement arithmetic.
//
// The series 1 - x(1 - x/2(1 - x/3)) is used with 1/3 replaced by 2.5/8 =
// 1/4 + 1/16, and every "1 - v" replaced by the bitwise inverse of v (for a
// fraction v with F bits, ~v = 1 - 2^-F - v). That gives the circuit
//   Tc = ~((x >> 2) + (x >> 4))      cubic term,  CUBIC_W fractional bits
//   Ts = ~((x >> 1) * Tc)            square term, SQUARE_W fractional bits
//   y  = ~(x * Ts)                   linear term, MUL_W fractional bits
// with one adder, two multipliers and three inverters and no subtractors.
// The circuit, the constants and the word lengths (8 and 11 bits for the
// cubic and square terms, 17 for the linear term) are the paper's. Cutting
// each term to its word length by dropping the low bits (truncation) and
// treating x >> 1 as a move of the binary point (no bit is lost) are this
// design's choices.
//
// x has PMAX-3 bits and weighs x * 2^-PMAX. y is an unsigned fraction with
// MUL_W bits, value y * 2^-MUL_W, always below 1. Purely combinational.
module exp_series_approx #(
  parameter  int unsigned PMAX     = 16,
  parameter  int unsigned CUBIC_W  = 8,
  parameter  int unsigned SQUARE_W = 11,
  parameter  int unsigned MUL_W    = 17,
  localparam int unsigned X_W      = PMAX - 3
) (
  input  logic [X_W-1:0]   x,
  output logic [MUL_W-1:0] y
);

  // Fractional bits of the two products before they are cut.
  localparam int unsigned PC_F = PMAX + CUBIC_W + 1;  // (x/2) * Tc
  localparam int unsigned PS_F = PMAX + SQUARE_W;     // x * Ts

  logic [X_W-1:0]          c_sum;  // (x>>2)+(x>>4), PMAX frac bits
  logic [CUBIC_W-1:0]      t_c;
  logic [X_W+CUBIC_W-1:0]  p_c;    // x * Tc, PC_F frac bits (x/2)
  logic [SQUARE_W-1:0]     t_s;
  logic [X_W+SQUARE_W-1:0] p_s;    // x * Ts, PS_F frac bits

  always_comb begin
    // Appending zeros and shifting right moves a value from one number of
    // fractional bits to another, truncating; the cast drops the upper bits,
    // which are zero by the bounds noted on each line.
    // Cubic term. 5x/16 < 2^-4, so it fits in CUBIC_W fractional bits.
    c_sum = (x >> 2) + (x >> 4);
    t_c   = ~CUBIC_W'({c_sum, {CUBIC_W{1'b0}}} >> PMAX);
    // Square term. (x/2)*Tc < 2^-4 fits in SQUARE_W fractional bits.
    p_c   = x * t_c;
    t_s   = ~SQUARE_W'({p_c, {SQUARE_W{1'b0}}} >> PC_F);
    // Linear term. x*Ts < 2^-3 fits in MUL_W fractional bits.
    p_s   = x * t_s;
    y     = ~MUL_W'({p_s, {MUL_W{1'b0}}} >> PS_F);
  end

endmodule
