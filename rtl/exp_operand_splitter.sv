// exp_operand_splitter: cuts the operand a of e^-a into the pieces that the
// tables and the series approximation evaluate.
//
// The operand is an unsigned fixed-point number with a run-time number of
// fractional bits P (input `precision`), value a * 2^-P. Following the paper
// it is cut at fixed distances from the binary point:
//   saturation part   bits IN_W-1 .. P+4   (any one set means a >= 16)
//   a_precise_1       bits P+3 .. P        (integer LUT index, 0..15)
//   a_precise_2       bits P-1 .. P-3      (fractional LUT index, steps of 1/8)
//   a_imprecise       bits P-4 .. 0        (residual below 1/8)
// When the saturation part is non-zero the three lower parts are forced to all
// ones, so the datapath returns its smallest value, about e^-16, which is
// below one LSB at 16 fractional bits.
//
// How P is handled is this design's choice: the operand is shifted left by
// PMAX-P, so the residual always leaves on a fixed PMAX-3 bit bus whose LSB
// weighs 2^-PMAX, and the series circuit after it has a fixed shape. For
// P < 3 the fractional index simply has zeros at the bottom. A precision above
// PMAX is treated as PMAX.
//
// Interface: a, precision in; idx_int, idx_frac, x_imp, sat out.
// Purely combinational.
module exp_operand_splitter
  import exp_pkg::*;
#(
  parameter  int unsigned IN_W = 32,
  parameter  int unsigned PMAX = 16,
  localparam int unsigned P_W  = $clog2(PMAX + 1),
  localparam int unsigned X_W  = PMAX - FRAC_IDX_W
) (
  input  logic [IN_W-1:0]       a,
  input  logic [P_W-1:0]        precision,
  output logic [INT_IDX_W-1:0]  idx_int,
  output logic [FRAC_IDX_W-1:0] idx_frac,
  output logic [X_W-1:0]        x_imp,
  output logic                  sat
);

  // Operand aligned to PMAX fractional bits: 4 integer bits + PMAX fraction.
  localparam int unsigned AL_W   = INT_IDX_W + PMAX;
  // Wide enough to shift a left by up to PMAX without losing bits.
  localparam int unsigned WIDE_W = IN_W + PMAX;

  if (PMAX < FRAC_IDX_W + 1) begin : g_pmax_check
    $error("exp_operand_splitter: PMAX must be at least 4");
  end

  logic [P_W-1:0]    p_eff;
  logic [AL_W-1:0]   aligned;

  always_comb begin
    p_eff = (precision > P_W'(PMAX)) ? P_W'(PMAX) : precision;
    // Saturation part: everything from bit P+4 upwards.
    sat     = |(a >> (32'(p_eff) + INT_IDX_W));
    // Below saturation a < 2^(P+4), so the shifted value fits in AL_W bits.
    aligned = sat ? '1 : AL_W'(WIDE_W'(a) << (PMAX - 32'(p_eff)));
    idx_int  = aligned[AL_W-1 -: INT_IDX_W];
    idx_frac = aligned[PMAX-1 -: FRAC_IDX_W];
    x_imp    = aligned[X_W-1:0];
  end

endmodule
