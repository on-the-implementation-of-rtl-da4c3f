// tb_exp_lut_int: reads all 16 words of the integer table and compares each
// with round(e^-k * 2^17) computed here, and checks a few words against
// constants worked out by hand (1.0, e^-1, e^-2, e^-15).
module tb_exp_lut_int;
  import exp_ref_pkg::*;
  localparam int unsigned LUT_W = 17;
  logic [3:0]     idx;
  logic [LUT_W:0] val;
  int checks = 0, failures = 0;

  exp_lut_int #(.LUT_W(LUT_W)) dut (.idx, .val);

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
    for (int k = 0; k < 16; k++) begin
      idx = 4'(k); #1;
      expect_eq(val, rnd_exp(real'(k), LUT_W), $sformatf("word %0d", k));
    end
    idx = 0;  #1; expect_eq(val, 131072, "e^0");
    idx = 1;  #1; expect_eq(val, 48219, "e^-1");   // 0.36787944 * 131072 = 48218.7
    idx = 2;  #1; expect_eq(val, 17739, "e^-2");   // 0.13533528 * 131072 = 17738.7
    idx = 15; #1; expect_eq(val, 0, "e^-15");      // 3.06e-7 * 131072 = 0.04
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
