// exp_pkg: constants and constant functions shared by the e^-a datapath.
//
// The operand is split into a 4-bit integer index (16-word table), a 3-bit
// fractional index (8-word table, steps of 1/8) and a residual below 1/8 that
// goes to the series approximation. Those split points follow the paper; the
// table-filling function below is this design's way of building the two
// tables at elaboration time instead of listing their contents.
package exp_pkg;

  // Integer LUT: a_precise_1 = bits P+3..P of the operand, e^-k for k = 0..15.
  localparam int unsigned INT_IDX_W  = 4;
  localparam int unsigned INT_DEPTH  = 1 << INT_IDX_W;
  // Fractional LUT: a_precise_2 = bits P-1..P-3, e^-(j/8) for j = 0..7.
  localparam int unsigned FRAC_IDX_W = 3;
  localparam int unsigned FRAC_DEPTH = 1 << FRAC_IDX_W;

  // round(e^-v * 2^frac_bits): a table word with frac_bits fractional bits.
  // Valid for frac_bits <= 30 (the result must fit in an int).
  function automatic int unsigned exp_neg_fixed(real v, int unsigned frac_bits);
    real scaled;
    scaled = $exp(-v) * (2.0 ** frac_bits);
    return int'($rtoi(scaled + 0.5));
  endfunction

endpackage
