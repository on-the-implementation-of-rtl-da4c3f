// exp_lut_int: LUT#0 of the datapath, e^-k for the integer part k = 0..15.
//
// The operand's integer bits P+3..P (a_precise_1) select one of 16 words.
// Word k holds round(e^-k * 2^LUT_W), an unsigned number with LUT_W
// fractional bits and one integer bit (word 0 is exactly 1.0). The depth and
// the 17-bit LUT precision are the paper's; the contents are computed at
// elaboration from that formula, so the table is a constant ROM that
// synthesis turns into logic.
//
// Interface: idx (4 bits) in, val (LUT_W+1 bits) out. Purely combinational.
module exp_lut_int
  import exp_pkg::*;
#(
  parameter int unsigned LUT_W = 17
) (
  input  logic [INT_IDX_W-1:0] idx,
  output logic [LUT_W:0]       val
);

  typedef logic [LUT_W:0] word_t;
  typedef word_t          table_t [INT_DEPTH];

  function automatic table_t build_table();
    table_t t;
    for (int unsigned k = 0; k < INT_DEPTH; k++)
      t[k] = word_t'(exp_neg_fixed(real'(k), LUT_W));
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  if (LUT_W > 30) begin : g_width_check
    $error("exp_lut_int: LUT_W must be at most 30");
  end

  assign val = TABLE[idx];

endmodule
