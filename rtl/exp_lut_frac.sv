// exp_lut_frac: LUT#1 of the datapath, e^-(j/8) for the top three fractional
// bits of the operand.
//
// The operand's bits P-1..P-3 (a_precise_2) select one of 8 words. Word j
// holds round(e^-(j/8) * 2^LUT_W), unsigned, LUT_W fractional bits and one
// integer bit (word 0 is exactly 1.0). The depth and the 17-bit precision are
// the paper's; the contents are computed at elaboration from that formula.
//
// Interface: idx (3 bits) in, val (LUT_W+1 bits) out. Purely combinational.
module exp_lut_frac
  import exp_pkg::*;
#(
  parameter int unsigned LUT_W = 17
) (
  input  logic [FRAC_IDX_W-1:0] idx,
  output logic [LUT_W:0]        val
);

  typedef logic [LUT_W:0] word_t;
  typedef word_t          table_t [FRAC_DEPTH];

  function automatic table_t build_table();
    table_t t;
    for (int unsigned j = 0; j < FRAC_DEPTH; j++)
      t[j] = word_t'(exp_neg_fixed(real'(j) / real'(FRAC_DEPTH), LUT_W));
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  if (LUT_W > 30) begin : g_width_check
    $error("exp_lut_frac: LUT_W must be at most 30");
  end

  assign val = TABLE[idx];

endmodule
