// tb_tanh_unit: self-checking test of the tanh lane.
// The result must match 2*PLAN(2x)-1 evaluated in real arithmetic within
// 2^-13, the true tanh within 0.045, and be an odd function of x.
module tb_tanh_unit;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  fp32_t x, y;
  int checks = 0, failures = 0;

  tanh_unit dut (.x, .y);

  function automatic real plan(real v);
    real a = (v < 0.0) ? -v : v;
    real p;
    if (a >= 5.0)        p = 1.0;
    else if (a >= 2.375) p = a / 32.0 + 0.84375;
    else if (a >= 1.0)   p = a / 8.0 + 0.625;
    else                 p = a / 4.0 + 0.5;
    return (v < 0.0) ? 1.0 - p : p;
  endfunction

  function automatic real tanh_ref(real v);
    real e2 = $exp(2.0 * v);
    return (e2 - 1.0) / (e2 + 1.0);
  endfunction

  task automatic try(real v);
    real got, xv, ref_plan, ref_true, y2;
    x = from_real(v); #1;
    xv = to_real(x);
    got = to_real(y);
    ref_plan = 2.0 * plan(2.0 * xv) - 1.0;
    ref_true = tanh_ref(xv);
    checks++;
    if (got - ref_plan > 1.3e-4 || ref_plan - got > 1.3e-4 ||
        got - ref_true > 0.045 || ref_true - got > 0.045) begin
      failures++;
      if (failures < 10) $display("FAIL tanh(%f) = %f plan %f true %f", v, got, ref_plan, ref_true);
    end
    x = from_real(-xv); #1;
    y2 = to_real(y);
    checks++;
    if (got + y2 > 1.0e-9 || got + y2 < -1.0e-9) begin
      failures++;
      if (failures < 10) $display("FAIL odd symmetry at %f", v);
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
    for (int n = -600; n <= 600; n++) try(real'(n) / 100.0);
    for (int n = 0; n < 2000; n++) try((real'($urandom_range(0, 2000000)) - 1000000.0) / 100000.0);
    try(0.0); try(50.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
