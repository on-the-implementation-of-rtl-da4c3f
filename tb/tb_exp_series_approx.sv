// tb_exp_series_approx: drives every residual x = 0 .. 2^13-1 (the whole
// range below 1/8 at 16 fractional bits) through the series circuit and
// checks (1) the exact output bits against an integer model of
// ~(x*~((x>>1)*~((x>>4)+(x>>2)))) with the 8/11/17-bit term widths, and
// (2) that the result stays within 4.5 units of 2^-16 of e^-x, the error
// budget of those widths, with the largest error printed for reference.
module tb_exp_series_approx;
  import exp_ref_pkg::*;
  localparam int unsigned PMAX = 16, CUBIC_W = 8, SQUARE_W = 11, MUL_W = 17;
  localparam int unsigned X_W = PMAX - 3;

  logic [X_W-1:0]   x;
  logic [MUL_W-1:0] y;
  int checks = 0, failures = 0;
  real err, max_err = 0.0;

  exp_series_approx #(.PMAX(PMAX), .CUBIC_W(CUBIC_W), .SQUARE_W(SQUARE_W),
                      .MUL_W(MUL_W)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned i = 0; i < (1 << X_W); i++) begin
      longint unsigned e;
      x = X_W'(i); #1;
      e = series_ref(i, PMAX, CUBIC_W, SQUARE_W, MUL_W);
      checks++;
      if (y != MUL_W'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL bits x=%0d y=%0d expected %0d", i, y, e);
      end
      err = (real'(y) / (2.0 ** MUL_W) - $exp(-real'(i) / (2.0 ** PMAX))) * (2.0 ** PMAX);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      checks++;
      if (err > 4.5) begin
        failures++;
        if (failures < 10) $display("FAIL error x=%0d: %f ulp", i, err);
      end
    end
    $display("series: max |error| = %f units of 2^-16", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
