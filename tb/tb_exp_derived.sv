// tb_exp_derived: uses the e^-a unit the way an activation-function block
// would, to evaluate a Gaussian, the sigmoid and tanh at 16 fractional bits,
// and measures the largest error of each against the exact function.
//
// Only the exponential is hardware here; the argument preparation (|x|,
// 2|x|, (x-mu)^2/(2 sigma^2)) and the final divisions are done in real
// arithmetic by the testbench:
//   sigmoid(x) = 1/(1+e^-|x|)          (x >= 0; 1 - that for x < 0)
//   tanh(x)    = (1-e^-2|x|)/(1+e^-2|x|), odd in x
//   gauss(x)   = e^-((x-mu)^2/(2 sigma^2)), mu = 0.75, sigma = 1.5
// Two units run side by side: the default one (8/11-bit cubic/square terms)
// and one with every term at 17 bits (the constant word-length variant).
// Each function's error must stay within what the exponential's own error
// allows (sensitivity times the exponential's error bound); the measured
// figures are printed in units of 2^-16.
module tb_exp_derived;
  localparam int unsigned PMAX = 16, P = 16;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] a = '0;
  logic [4:0]  precision = 5'(P);
  logic        ov_v, ov_f, sat_v, sat_f;
  logic [PMAX:0] y_v, y_f;
  int checks = 0, failures = 0;
  real err_v [3], err_f [3];
  string names [3] = '{"gaussian", "sigmoid", "tanh"};

  exp_neg dut_var (.clk, .rst_n, .in_valid, .a, .precision,
                   .out_valid(ov_v), .y(y_v), .sat(sat_v));
  exp_neg #(.CUBIC_W(17), .SQUARE_W(17)) dut_fix (.clk, .rst_n, .in_valid, .a, .precision,
                   .out_valid(ov_f), .y(y_f), .sat(sat_f));

  always #5 clk = ~clk;

  // e^-v through both units (v >= 0 is rounded to P fractional bits first).
  task automatic hw_exp(real v, output real ev, output real ef, output real vq);
    longint unsigned q;
    q = longint'($rtoi(v * (2.0 ** P) + 0.5));
    if (q > 64'hFFFF_FFFF) q = 64'hFFFF_FFFF;
    vq = real'(q) / (2.0 ** P);
    @(negedge clk);
    in_valid = 1; a = 32'(q);
    @(posedge clk); #1;
    checks++;
    if (!ov_v || !ov_f) begin
      failures++;
      $display("FAIL: no result one cycle after the operand");
    end
    ev = real'(y_v) / (2.0 ** P);
    ef = real'(y_f) / (2.0 ** P);
  endtask

  task automatic note(int f, real approx_v, real approx_f, real exact);
    real dv, df;
    dv = approx_v - exact; if (dv < 0) dv = -dv;
    df = approx_f - exact; if (df < 0) df = -df;
    dv *= 2.0 ** P; df *= 2.0 ** P;
    if (dv > err_v[f]) err_v[f] = dv;
    if (df > err_f[f]) err_f[f] = df;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, ev, ef, vq, ex;
    real bound_v [3], bound_f [3];
    foreach (err_v[i]) begin err_v[i] = 0.0; err_f[i] = 0.0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = -4096; i <= 4096; i++) begin
      x = real'(i) / 256.0;                               // -16 .. 16
      // Gaussian: the exponent is quantised; exact value uses the same exponent.
      hw_exp((x - 0.75) * (x - 0.75) / (2.0 * 1.5 * 1.5), ev, ef, vq);
      note(0, ev, ef, $exp(-vq));
      // Sigmoid.
      hw_exp(x < 0 ? -x : x, ev, ef, vq);
      ex = 1.0 / (1.0 + $exp(-vq));
      if (x < 0) note(1, 1.0 - 1.0 / (1.0 + ev), 1.0 - 1.0 / (1.0 + ef), 1.0 - ex);
      else       note(1, 1.0 / (1.0 + ev), 1.0 / (1.0 + ef), ex);
      // tanh.
      hw_exp(2.0 * (x < 0 ? -x : x), ev, ef, vq);
      ex = (1.0 - $exp(-vq)) / (1.0 + $exp(-vq));
      note(2, (1.0 - ev) / (1.0 + ev), (1.0 - ef) / (1.0 + ef), ex);
    end
    // Error budget: e^-a within 1 + 4.41 units (default) or 1 + 0.75 units
    // (17-bit terms); sigmoid and Gaussian pass it on at most 1:1, tanh 2:1.
    bound_v = '{5.5, 5.5, 11.0};
    bound_f = '{1.8, 1.8, 3.6};
    for (int f = 0; f < 3; f++) begin
      $display("%-9s max |error|: %f units of 2^-16 (8/11-bit terms), %f (17-bit terms)",
               names[f], err_v[f], err_f[f]);
      checks += 2;
      if (err_v[f] > bound_v[f] || err_f[f] > bound_f[f]) begin
        failures++;
        $display("FAIL %s: error over budget", names[f]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
