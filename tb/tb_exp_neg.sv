// tb_exp_neg: end-to-end test of the e^-a unit at its default parameters
// (32-bit operand, precision up to 16, 17-bit tables and multipliers, 8/11-bit
// cubic/square terms).
//
// Operands are driven on the falling clock edge with random bubbles in
// in_valid; after each rising edge the registered outputs are compared with
// the bit-exact integer model in exp_ref_pkg (y and sat) and y is also held
// against the real e^-a: within 1 unit of 2^-P for the final truncation plus
// 4.5 units of 2^-16 for the series approximation. out_valid must follow
// in_valid by exactly one cycle (the unit's latency).
//
// Phases: every operand 0 .. 17*2^P - 1 at P = 16, 12 and 8 (the three output
// precisions the paper evaluates, across the whole non-saturated range into
// saturation); a sweep of every P from 0 to 16; random operands with random
// precisions, 17..31 included (treated as 16); an asynchronous reset in the
// middle of traffic. Counted mechanisms, each of which must occur: saturation,
// precision switches between consecutive operands, precision clamping,
// bubbles, and the reset clearing out_valid.
module tb_exp_neg;
  import exp_ref_pkg::*;
  localparam int unsigned IN_W = 32, PMAX = 16, LUT_W = 17, MUL_W = 17;
  localparam int unsigned CUBIC_W = 8, SQUARE_W = 11;
  localparam int unsigned P_W = $clog2(PMAX + 1);

  logic            clk = 0, rst_n = 0, in_valid = 0;
  logic [IN_W-1:0] a = '0;
  logic [P_W-1:0]  precision = '0;
  logic            out_valid, sat;
  logic [PMAX:0]   y;

  exp_neg dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycles = 0;
  int n_sat = 0, n_switch = 0, n_clamp = 0, n_bubble = 0, n_reset = 0;
  real max_err [PMAX+1];

  // What was presented before the last rising edge.
  logic            prev_valid = 0;
  longint unsigned prev_a;
  int unsigned     prev_p;
  int unsigned     last_p = 0;
  logic [PMAX:0]   held_y;
  logic            held_sat;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL @%0d: %s", cycles, msg);
  endtask

  // Check the outputs for the previous cycle's inputs.
  task automatic check_outputs();
    longint unsigned e;
    int unsigned pe;
    bit e_sat;
    real exact, err, bound;
    checks++;
    if (out_valid !== prev_valid) fail($sformatf("out_valid=%0b expected %0b", out_valid, prev_valid));
    if (!prev_valid) begin
      checks++;
      if (y !== held_y || sat !== held_sat) fail("outputs changed without a valid operand");
      return;
    end
    pe    = (prev_p > PMAX) ? PMAX : prev_p;
    e     = exp_ref_bits(prev_a, prev_p, PMAX, LUT_W, MUL_W, CUBIC_W, SQUARE_W);
    e_sat = (prev_a >> (pe + 4)) != 0;
    checks++;
    if (y !== (PMAX + 1)'(e) || sat !== e_sat)
      fail($sformatf("a=%0d P=%0d: y=%0d sat=%0b, model %0d %0b", prev_a, prev_p, y, sat, e, e_sat));
    exact = exp_ref_real(prev_a, pe) * (2.0 ** pe);
    err   = real'(y) - exact;
    if (err < 0) err = -err;
    bound = 1.0 + 4.5 * (2.0 ** (real'(pe) - 16.0)) + 1e-9;
    checks++;
    if (err > bound) fail($sformatf("a=%0d P=%0d: |error| %f units > %f", prev_a, pe, err, bound));
    if (err > max_err[pe]) max_err[pe] = err;
    if (e_sat) n_sat++;
  endtask

  task automatic drive(bit v, longint unsigned av, int unsigned p);
    @(negedge clk);
    in_valid  = v;
    a         = IN_W'(av);
    precision = P_W'(p);
    if (!v) n_bubble++;
    if (v) begin
      if (p != last_p) n_switch++;
      if (p > PMAX) n_clamp++;
      last_p = p;
    end
    @(posedge clk);
    #1;
    cycles++;
    prev_valid = v; prev_a = av; prev_p = p;
    check_outputs();
    held_y = y; held_sat = sat;
  endtask

  task automatic op(longint unsigned av, int unsigned p);
    if ($urandom_range(0, 15) == 0) drive(0, {$urandom}, $urandom_range(0, 31));
    drive(1, av, p);
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (max_err[i]) max_err[i] = 0.0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) fail("out_valid set during reset");
    held_y = y; held_sat = sat;
    @(negedge clk) rst_n = 1;

    // Full sweeps at the paper's three output precisions.
    for (int unsigned p = 16; p >= 8; p -= 4)
      for (longint unsigned av = 0; av < (longint'(17) << p); av++) op(av, p);
    // Every precision, coarser steps.
    for (int unsigned p = 0; p <= PMAX; p++)
      for (longint unsigned av = 0; av < (longint'(17) << p); av += 1 + (longint'(1) << p) / 64)
        op(av, p);
    // Random precisions (17..31 included) and operands of every size.
    for (int i = 0; i < 20000; i++) begin
      int unsigned p, pe;
      longint unsigned av;
      p  = $urandom_range(0, 31);
      pe = (p > PMAX) ? PMAX : p;
      av = ($urandom_range(0, 3) == 0) ? longint'({$urandom}) : {$urandom} % (longint'(17) << pe);
      op(av, p);
    end
    // Asynchronous reset in the middle of traffic.
    @(negedge clk);
    in_valid = 1; a = 5; precision = 4;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b1) fail("out_valid missing before reset");
    #2 rst_n = 0; #1;
    checks++;
    if (out_valid !== 1'b0 || y !== '0) fail("asynchronous reset did not clear outputs");
    else n_reset++;
    @(negedge clk) in_valid = 0;
    @(negedge clk) rst_n = 1;
    held_y = y; held_sat = sat; prev_valid = 0;
    for (int i = 0; i < 100; i++) op({$urandom} % (longint'(17) << 10), 10);

    $display("max |error| in units of 2^-P: P=8 %f, P=12 %f, P=16 %f",
             max_err[8], max_err[12], max_err[16]);
    $display("cycles=%0d saturated=%0d precision_switches=%0d clamped=%0d bubbles=%0d resets=%0d",
             cycles, n_sat, n_switch, n_clamp, n_bubble, n_reset);
    checks++; if (n_sat == 0)    fail("saturation never happened");
    checks++; if (n_switch == 0) fail("precision never switched");
    checks++; if (n_clamp == 0)  fail("precision never clamped");
    checks++; if (n_bubble == 0) fail("no bubble in in_valid");
    checks++; if (n_reset == 0)  fail("reset never checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
