// tb_sigmoid_pwl: self-checking test of the piecewise-linear sigmoid. Sweeps the input
// over [-8, 8) in steps of 1/64 plus random accumulator values and compares each output
// with the four-segment formula evaluated in real arithmetic (within 1 LSB of Q1.14),
// with the exact logistic function (within 0.02) and checks monotonicity (up to the 1/256 step where two segments meet).
module tb_sigmoid_pwl;
  import gnn_pkg::*;
  localparam int unsigned IN_FRAC = 10;
  acc_t  x;
  coef_t y;
  int checks = 0, failures = 0;

  sigmoid_pwl #(.IN_FRAC(IN_FRAC)) dut (.x, .y);

  function automatic real plan(input real v);
    real a, r;
    a = (v < 0.0) ? -v : v;
    if (a >= 5.0)        r = 1.0;
    else if (a >= 2.375) r = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   r = 0.125 * a + 0.625;
    else                 r = 0.25 * a + 0.5;
    return (v < 0.0) ? 1.0 - r : r;
  endfunction

  task automatic check(input acc_t xv);
    real xr, yr, e1, e2;
    x = xv;
    #1;
    xr = real'(xv) / real'(1 << IN_FRAC);
    yr = real'(y) / 16384.0;
    e1 = yr - plan(xr);
    e2 = yr - 1.0 / (1.0 + $exp(-xr));
    checks++;
    if (e1 > 1.01 / 16384.0 || e1 < -1.01 / 16384.0 || e2 > 0.02 || e2 < -0.02) begin
      failures++;
      if (failures < 10) $display("x=%f y=%f plan=%f", xr, yr, plan(xr));
    end
  endtask

  initial begin
    coef_t prev;
    prev = '0;
    for (int k = -8 * 64; k < 8 * 64; k++) begin
      check(acc_t'(k * 16));
      checks++;
      // the segments meet with a step of 1/256 at |x| = 2.375, so allow that much
      if (int'(y) < int'(prev) - 64) begin failures++; $display("not monotonic at %0d", k); end
      prev = y;
    end
    for (int k = 0; k < 2000; k++) check(acc_t'($urandom));
    check(acc_t'(32'h7fffffff));
    check(acc_t'(32'h80000000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
