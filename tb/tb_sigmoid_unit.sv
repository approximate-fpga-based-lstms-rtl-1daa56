// tb_sigmoid_unit: self-checking test of the PLAN sigmoid lane.
// Inputs sweep -10..10 plus random values; each result must match a real-
// valued evaluation of the four PLAN segments within 2^-14, and the true
// logistic function within 0.02. Symmetry sigmoid(-x) = 1 - sigmoid(x) is
// also checked.
module tb_sigmoid_unit;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  fp32_t x, y;
  int checks = 0, failures = 0;

  sigmoid_unit dut (.x, .y);

  function automatic real plan(real v);
    real a = (v < 0.0) ? -v : v;
    real p;
    if (a >= 5.0)        p = 1.0;
    else if (a >= 2.375) p = a / 32.0 + 0.84375;
    else if (a >= 1.0)   p = a / 8.0 + 0.625;
    else                 p = a / 4.0 + 0.5;
    return (v < 0.0) ? 1.0 - p : p;
  endfunction

  task automatic try(real v);
    real got, ref_plan, ref_true, y2;
    x = from_real(v); #1;
    got      = to_real(y);
    ref_plan = plan(to_real(x));
    ref_true = 1.0 / (1.0 + $exp(-to_real(x)));
    checks++;
    if (got - ref_plan > 6.2e-5 || ref_plan - got > 6.2e-5 ||
        got - ref_true > 0.02 || ref_true - got > 0.02) begin
      failures++;
      if (failures < 10) $display("FAIL sigmoid(%f) = %f plan %f true %f", v, got, ref_plan, ref_true);
    end
    x = from_real(-to_real(x)); #1;
    y2 = to_real(y);
    checks++;
    if (got + y2 - 1.0 > 6.2e-5 || 1.0 - got - y2 > 6.2e-5) begin
      failures++;
      if (failures < 10) $display("FAIL symmetry at %f: %f + %f", v, got, y2);
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = -1000; n <= 1000; n++) try(real'(n) / 100.0);
    for (int n = 0; n < 2000; n++) try((real'($urandom_range(0, 2000000)) - 1000000.0) / 50000.0);
    try(1.0e-30); try(100.0); try(-1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
