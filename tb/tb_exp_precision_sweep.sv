// tb_exp_precision_sweep: largest error of the unit for output precisions
// Q = 8, 12 and 16 when the multipliers and the tables are built with Q..Q+4
// fractional bits each (1's complement arithmetic, every series term at the
// multiplier width).
//
// For each Q a group of 25 units (PMAX = Q, MUL_W and LUT_W from Q to Q+4,
// CUBIC_W = SQUARE_W = MUL_W) runs side by side on every operand
// a = 0 .. 16*2^Q - 1 with P = Q. The largest |y - e^-a| of each unit is printed
// in units of 2^-Q. Checks: every unit matches the bit-exact model on a sample
// of operands, and its largest error stays within the budget
//   1 (output truncation) + 2.5 * 2^(Q-MUL_W) (products, series)
//   + 1.5 * 2^(Q-LUT_W) (table rounding, carried through two products).
module tb_exp_precision_sweep;
  import exp_ref_pkg::*;
  localparam int unsigned NQ = 3, NW = 5;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] a = '0;
  logic [16:0] yy [NQ][NW][NW];       // [precision][multiplier][table]
  logic        ov [NQ][NW][NW];
  real max_err [NQ][NW][NW];
  int checks = 0, failures = 0;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    localparam int unsigned Q = 8 + 4 * q;
    for (genvar m = 0; m < NW; m++) begin : g_m
      for (genvar l = 0; l < NW; l++) begin : g_l
        logic [Q:0] y_l;
        logic       sat_l;
        exp_neg #(.PMAX(Q), .MUL_W(Q + m), .LUT_W(Q + l),
                  .CUBIC_W(Q + m), .SQUARE_W(Q + m)) u_exp (
          .clk, .rst_n, .in_valid, .a, .precision($clog2(Q + 1)'(Q)),
          .out_valid(ov[q][m][l]), .y(y_l), .sat(sat_l));
        assign yy[q][m][l] = 17'(y_l);
      end
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
    foreach (max_err[q, m, l]) max_err[q][m][l] = 0.0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int q = 0; q < NQ; q++) begin
      int unsigned Q;
      Q = 8 + 4 * q;
      for (longint unsigned av = 0; av < (longint'(16) << Q); av++) begin
        @(negedge clk);
        in_valid = 1; a = 32'(av);
        @(posedge clk); #1;
        exact = $exp(-real'(av) / (2.0 ** Q)) * (2.0 ** Q);
        for (int m = 0; m < NW; m++)
          for (int l = 0; l < NW; l++) begin
            err = real'(yy[q][m][l]) - exact;
            if (err < 0) err = -err;
            if (err > max_err[q][m][l]) max_err[q][m][l] = err;
            if (av % 251 == 0) begin
              checks++;
              if (!ov[q][m][l] || yy[q][m][l] !=
                  17'(exp_ref_bits(av, Q, Q, Q + l, Q + m, Q + m, Q + m))) begin
                failures++;
                if (failures < 10) $display("FAIL Q=%0d mul %0d lut %0d a=%0d", Q, Q + m, Q + l, av);
              end
            end
          end
      end
      $display("output precision %0d: largest error in units of 2^-%0d", Q, Q);
      for (int l = 0; l < NW; l++) begin
        string line;
        line = $sformatf("  table %2d bits:", Q + l);
        for (int m = 0; m < NW; m++) begin
          line = {line, $sformatf("  mul %2d: %5.2f", Q + m, max_err[q][m][l])};
          budget = 1.0 + 2.5 * (2.0 ** -real'(m)) + 1.5 * (2.0 ** -real'(l));
          checks++;
          if (max_err[q][m][l] > budget) begin
            failures++;
            $display("FAIL Q=%0d mul %0d lut %0d: error %f over budget %f",
                     Q, Q + m, Q + l, max_err[q][m][l], budget);
          end
        end
        $display("%s", line);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
