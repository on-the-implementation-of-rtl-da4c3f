// tb_exp_mult_stage: drives the combination multipliers with every pair of
// table words (1.0 included) and random series values, including the
// extremes, and compares with floor(floor(l0*l1/2^17)*s/2^17) computed here.
module tb_exp_mult_stage;
  localparam int unsigned LUT_W = 17, MUL_W = 17;
  logic [LUT_W:0]   e_int, e_frac;
  logic [MUL_W-1:0] e_imp;
  logic [MUL_W:0]   y;
  int checks = 0, failures = 0;

  exp_mult_stage #(.LUT_W(LUT_W), .MUL_W(MUL_W)) dut (.*);

  task automatic check(longint unsigned l0, longint unsigned l1, longint unsigned s);
    longint unsigned m1, e;
    e_int = (LUT_W + 1)'(l0); e_frac = (LUT_W + 1)'(l1); e_imp = MUL_W'(s);
    #1;
    m1 = (l0 * l1) / (longint'(1) << (2 * LUT_W - MUL_W));
    e  = (m1 * s) / (longint'(1) << MUL_W);
    checks++;
    if (y != (MUL_W + 1)'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL %0d*%0d*%0d: y=%0d expected %0d", l0, l1, s, y, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned one = longint'(1) << LUT_W;
    check(one, one, (longint'(1) << MUL_W) - 1);
    check(one, one, 0);
    check(0, one, 12345);
    for (int i = 0; i < 20000; i++)
      check({$urandom} % (one + 1), {$urandom} % (one + 1), {$urandom} % (longint'(1) << MUL_W));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
