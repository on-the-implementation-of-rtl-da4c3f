// exp_neg: fixed-point e^-a for a non-negative operand a, one result per
// clock cycle.
//
// The operand a (IN_W bits, `precision` = P fractional bits, value a*2^-P)
// is cut by the operand splitter into an integer index, a 1/8-step fractional
// index and a residual below 1/8. Two small tables give e^-(integer part) and
// e^-(fractional index/8); a 1's complement third-order series gives
// e^-(residual); two multipliers combine the three. Operands of 16 or more
// saturate to the smallest value the datapath produces. This structure, the
// table sizes, the series circuit and the word lengths (17-bit tables and
// multipliers, 11-bit square term, 8-bit cubic term: the paper's
// variable-word-length configuration) follow the paper.
//
// This design's own choices: the result is returned at the operand's
// precision, y = e^-a * 2^P truncated (an unsigned number with one integer
// bit and P fractional bits, right-aligned in PMAX+1 bits); the whole datapath
// is combinational between the input ports and one output register, so a
// result appears on the clock edge after the operand was presented with
// in_valid (latency 1, throughput 1 per cycle); `sat` reports that the
// operand was in the saturation region; rst_n is an asynchronous active-low
// reset of the output register. (Lint notes rst_n as used both
// asynchronously and synchronously: the synchronous use is only the
// assertion's disable condition, not logic.)
module exp_neg
  import exp_pkg::*;
#(
  parameter  int unsigned IN_W     = 32,
  parameter  int unsigned PMAX     = 16,
  parameter  int unsigned LUT_W    = 17,
  parameter  int unsigned MUL_W    = 17,
  parameter  int unsigned CUBIC_W  = 8,
  parameter  int unsigned SQUARE_W = 11,
  localparam int unsigned P_W      = $clog2(PMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [IN_W-1:0] a,
  input  logic [P_W-1:0]  precision,
  output logic            out_valid,
  output logic [PMAX:0]   y,
  output logic            sat
);

  localparam int unsigned X_W = PMAX - FRAC_IDX_W;

  if (MUL_W < PMAX) begin : g_width_check
    $error("exp_neg: MUL_W must be at least PMAX");
  end

  logic [INT_IDX_W-1:0]  idx_int;
  logic [FRAC_IDX_W-1:0] idx_frac;
  logic [X_W-1:0]        x_imp;
  logic                  sat_c;
  logic [LUT_W:0]        e_int, e_frac;
  logic [MUL_W-1:0]      e_imp;
  logic [MUL_W:0]        e_all;     // e^-a with MUL_W fractional bits
  logic [P_W-1:0]        p_eff;
  logic [PMAX:0]         y_c;

  exp_operand_splitter #(.IN_W(IN_W), .PMAX(PMAX)) u_splitter (
    .a, .precision, .idx_int, .idx_frac, .x_imp, .sat(sat_c)
  );

  exp_lut_int #(.LUT_W(LUT_W)) u_lut0 (.idx(idx_int), .val(e_int));

  exp_lut_frac #(.LUT_W(LUT_W)) u_lut1 (.idx(idx_frac), .val(e_frac));

  exp_series_approx #(
    .PMAX(PMAX), .CUBIC_W(CUBIC_W), .SQUARE_W(SQUARE_W), .MUL_W(MUL_W)
  ) u_series (.x(x_imp), .y(e_imp));

  exp_mult_stage #(.LUT_W(LUT_W), .MUL_W(MUL_W)) u_mult (
    .e_int, .e_frac, .e_imp, .y(e_all)
  );

  // Return the result at the operand's precision P.
  always_comb begin
    p_eff = (precision > P_W'(PMAX)) ? P_W'(PMAX) : precision;
    y_c   = (PMAX + 1)'(e_all >> (MUL_W - 32'(p_eff)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y   <= y_c;
        sat <= sat_c;
      end
    end
  end

  // A result follows every accepted operand on the next clock edge.
  a_latency : assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |=> out_valid);

endmodule
