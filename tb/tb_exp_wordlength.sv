// tb_exp_wordlength: accuracy of the unit across word lengths of the cubic
// and square terms, over the whole input range 0..16 at 16 fractional bits.
//
// One unit per combination of cubic-term width 5..13 and square-term width
// 10..16 (tables and multipliers at 17 bits) runs side by side on every
// operand a = 0 .. 16*2^16 - 1. For each unit the testbench records the largest
// |y - e^-a| in units of 2^-16 and prints the accuracy as the number of
// fractional bits that are always right, floor(16 - log2(max error)), next to
// the figure the source paper gives for the same combination.
// Checks: every unit matches the bit-exact model on a sample of operands, and
// each unit's largest error stays within its error budget,
//   1 (output truncation) + 0.5 (tables, multipliers)
//   + 2 * 2^-CUBIC_W * 2^-7 * 2^16 + 2 * 2^-SQUARE_W * 2^-3 * 2^16,
// i.e. one truncation and one 1's complement LSB per term, scaled by how
// strongly each term reaches the output (x^2/2 <= 2^-7 and x <= 2^-3).
module tb_exp_wordlength;
  import exp_ref_pkg::*;
  localparam int unsigned NC = 9, NS = 7;       // cubic 5..13, square 10..16
  localparam int unsigned P = 16;
  // Accuracy in fractional bits reported by the paper for the same grid.
  localparam int PAPER [NC][NS] = '{
    '{13, 13, 13, 13, 13, 13, 13},
    '{14, 14, 14, 14, 13, 13, 13},
    '{14, 14, 14, 14, 14, 14, 14},
    '{14, 15, 15, 14, 14, 14, 14},
    '{14, 15, 15, 15, 15, 15, 15},
    '{14, 15, 15, 15, 15, 15, 15},
    '{14, 15, 15, 15, 15, 15, 15},
    '{14, 15, 15, 15, 15, 15, 15},
    '{14, 15, 15, 15, 15, 15, 15}};

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] a = '0;
  logic [4:0]  precision = 5'(P);
  logic [16:0] yy  [NC][NS];
  logic        ov  [NC][NS];
  logic        sat [NC][NS];
  real max_err [NC][NS];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NC; c++) begin : g_c
    for (genvar s = 0; s < NS; s++) begin : g_s
      exp_neg #(.CUBIC_W(5 + c), .SQUARE_W(10 + s)) u_exp (
        .clk, .rst_n, .in_valid, .a, .precision,
        .out_valid(ov[c][s]), .y(yy[c][s]), .sat(sat[c][s]));
    end
  end

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exact, err, budget;
    int acc;
    foreach (max_err[c, s]) max_err[c][s] = 0.0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (longint unsigned av = 0; av < (longint'(16) << P); av++) begin
      @(negedge clk);
      in_valid = 1; a = 32'(av);
      @(posedge clk); #1;
      exact = $exp(-real'(av) / (2.0 ** P)) * (2.0 ** P);
      for (int c = 0; c < NC; c++)
        for (int s = 0; s < NS; s++) begin
          err = real'(yy[c][s]) - exact;
          if (err < 0) err = -err;
          if (err > max_err[c][s]) max_err[c][s] = err;
          if (av % 509 == 0) begin
            checks++;
            if (!ov[c][s] ||
                yy[c][s] != 17'(exp_ref_bits(av, P, P, 17, 17, 5 + c, 10 + s))) begin
              failures++;
              if (failures < 10) $display("FAIL cubic %0d square %0d a=%0d", 5 + c, 10 + s, av);
            end
          end
        end
    end
    $display("accuracy in fractional bits (this design / paper), rows cubic 5..13, columns square 10..16");
    for (int c = 0; c < NC; c++) begin
      string line;
      line = $sformatf("cubic %2d:", 5 + c);
      for (int s = 0; s < NS; s++) begin
        acc  = $rtoi($floor(real'(P) - $ln(max_err[c][s]) / $ln(2.0)));
        line = {line, $sformatf("  %0d/%0d", acc, PAPER[c][s])};
        budget = 1.5 + 2.0 * (2.0 ** (16.0 - 7.0 - real'(5 + c)))
                     + 2.0 * (2.0 ** (16.0 - 3.0 - real'(10 + s)));
        checks++;
        if (max_err[c][s] > budget) begin
          failures++;
          $display("FAIL cubic %0d square %0d: error %f over budget %f",
                   5 + c, 10 + s, max_err[c][s], budget);
        end
      end
      $display("%s", line);
    end
    $display("largest error at cubic 8 / square 11: %f units of 2^-16", max_err[3][1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
