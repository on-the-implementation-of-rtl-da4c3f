// tb_exp_operand_splitter: checks the operand split against an arithmetic
// reference, for two builds side by side: PMAX = 16 (the default) and
// PMAX = 12 (whose 4-bit precision input makes P+4 and PMAX-P wrap if they
// are computed at that width). For every precision P = 0..PMAX+3 (those above
// PMAX must act as PMAX) it drives the saturation edge (16*2^P - 1 and
// 16*2^P), the extremes and random operands, and compares the integer index
// floor(a/2^P), the fractional index floor(8*frac) and the residual with
// numbers computed by division and remainder.
module tb_exp_operand_splitter;
  localparam int unsigned IN_W = 32;
  localparam int unsigned PMAX = 16, PMAX_B = 12;

  logic [IN_W-1:0] a;
  logic [4:0]  precision;
  logic [3:0]  precision_b;
  logic [3:0]  idx_int, idx_int_b;
  logic [2:0]  idx_frac, idx_frac_b;
  logic [12:0] x_imp;
  logic [8:0]  x_imp_b;
  logic        sat, sat_b;
  int checks = 0, failures = 0;

  exp_operand_splitter #(.IN_W(IN_W), .PMAX(PMAX)) dut (.*);
  exp_operand_splitter #(.IN_W(IN_W), .PMAX(PMAX_B)) dut_b (
    .a, .precision(precision_b), .idx_int(idx_int_b), .idx_frac(idx_frac_b),
    .x_imp(x_imp_b), .sat(sat_b));

  // Expected fields for a build with maximum precision pm.
  function automatic void expected(longint unsigned av, int unsigned p, int unsigned pm,
                                   output bit e_sat, output longint unsigned e_int,
                                   output longint unsigned e_frac, output longint unsigned e_x);
    longint unsigned pe, fr;
    pe = (p > pm) ? pm : p;
    e_sat = (av / (longint'(1) << pe)) >= 16;
    if (e_sat) begin
      e_int = 15; e_frac = 7; e_x = (longint'(1) << (pm - 3)) - 1;
    end else begin
      fr     = (av % (longint'(1) << pe)) << (pm - pe);   // fraction at pm bits
      e_int  = av / (longint'(1) << pe);
      e_frac = fr / (longint'(1) << (pm - 3));
      e_x    = fr % (longint'(1) << (pm - 3));
    end
  endfunction

  task automatic check(longint unsigned av, int unsigned p);
    longint unsigned e_int, e_frac, e_x;
    bit e_sat;
    a = IN_W'(av); precision = 5'(p); precision_b = 4'(p > 15 ? 15 : p);
    #1;
    expected(av, p, PMAX, e_sat, e_int, e_frac, e_x);
    checks++;
    if (sat !== e_sat || idx_int !== 4'(e_int) || idx_frac !== 3'(e_frac) ||
        x_imp !== 13'(e_x)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%0d P=%0d: sat=%0b int=%0d frac=%0d x=%0d, expected %0b %0d %0d %0d",
                 av, p, sat, idx_int, idx_frac, x_imp, e_sat, e_int, e_frac, e_x);
    end
    expected(av, p > 15 ? 15 : p, PMAX_B, e_sat, e_int, e_frac, e_x);
    checks++;
    if (sat_b !== e_sat || idx_int_b !== 4'(e_int) || idx_frac_b !== 3'(e_frac) ||
        x_imp_b !== 9'(e_x)) begin
      failures++;
      if (failures < 10)
        $display("FAIL (PMAX 12) a=%0d P=%0d: sat=%0b int=%0d frac=%0d x=%0d, expected %0b %0d %0d %0d",
                 av, p, sat_b, idx_int_b, idx_frac_b, x_imp_b, e_sat, e_int, e_frac, e_x);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned p = 0; p <= PMAX + 3; p++) begin
      int unsigned pe;
      pe = (p > PMAX) ? PMAX : p;
      check(0, p);
      check((longint'(16) << pe) - 1, p);
      check(longint'(16) << pe, p);
      if (p <= PMAX_B) begin
        check((longint'(16) << p) - 1, p);
        check(longint'(16) << p, p);
      end
      check((longint'(1) << IN_W) - 1, p);
      check(longint'(1) << (IN_W - 1), p);
      for (int i = 0; i < 200; i++) check({$urandom} % (longint'(17) << pe), p);
      for (int i = 0; i < 20; i++) check({$urandom}, p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
