// tb_exp_lut_frac: reads all 8 words of the fractional table and compares
// each with round(e^-(j/8) * 2^17) computed here, plus hand-worked constants.
module tb_exp_lut_frac;
  import exp_ref_pkg::*;
  localparam int unsigned LUT_W = 17;
  logic [2:0]     idx;
  logic [LUT_W:0] val;
  int checks = 0, failures = 0;

  exp_lut_frac #(.LUT_W(LUT_W)) dut (.idx, .val);

  task automatic expect_eq(longint unsigned got, longint unsigned exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 8; j++) begin
      idx = 3'(j); #1;
      expect_eq(val, rnd_exp(real'(j) / 8.0, LUT_W), $sformatf("word %0d", j));
    end
    idx = 0; #1; expect_eq(val, 131072, "e^0");
    idx = 4; #1; expect_eq(val, 79499, "e^-0.5");    // 0.60653066 * 131072 = 79499.2
    idx = 7; #1; expect_eq(val, 54639, "e^-0.875");  // 0.41686202 * 131072 = 54638.9
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
