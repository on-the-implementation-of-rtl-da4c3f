// exp_mult_stage: the two output multipliers that combine the three partial
// exponentials, e^-a = e^-a_precise_1 * e^-a_precise_2 * e^-a_imprecise.
//
// The two table values (LUT_W fractional bits, at most 1.0) are multiplied
// first and the product is cut to MUL_W fractional bits; that is multiplied
// by the series value (MUL_W fractional bits, below 1) and cut to MUL_W
// fractional bits again. The order of the multiplications follows the block
// diagram (the two LUT outputs meet first); cutting by truncation is this
// design's choice, the 17-bit multiplier precision is the paper's.
//
// Interface: e_int, e_frac, e_imp in; y (MUL_W+1 bits, value y*2^-MUL_W) out.
// Purely combinational.
module exp_mult_stage #(
  parameter int unsigned LUT_W = 17,
  parameter int unsigned MUL_W = 17
) (
  input  logic [LUT_W:0]   e_int,
  input  logic [LUT_W:0]   e_frac,
  input  logic [MUL_W-1:0] e_imp,
  output logic [MUL_W:0]   y
);

  localparam int unsigned P1_W = 2 * (LUT_W + 1);
  localparam int unsigned P2_W = 2 * MUL_W + 1;

  logic [P1_W-1:0] p1;  // 2*LUT_W fractional bits
  logic [MUL_W:0]  m1;  // MUL_W fractional bits
  logic [P2_W-1:0] p2;  // 2*MUL_W fractional bits

  always_comb begin
    p1      = e_int * e_frac;
    m1      = (MUL_W + 1)'({p1, {MUL_W{1'b0}}} >> (2 * LUT_W));
    p2      = m1 * e_imp;
    y       = (MUL_W + 1)'(p2 >> MUL_W);
  end

endmodule
