// tb_fp32_add: self-checking test of the fp32 adder.
// Random operands (same and opposite signs, close and far exponents) are
// added and compared with the simulator's single-precision rounding of the
// double-precision sum. When the exponents differ by more than 28 the double
// sum may itself be rounded, so one unit in the last place is allowed;
// otherwise the result must match bit for bit. Directed cases cover exact
// cancellation, zero operands, subnormal flushing and overflow.
module tb_fp32_add;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  function automatic fp32_t rnd_fp(int emin, int emax);
    fp32_t r;
    r[31]    = 1'($urandom);
    r[30:23] = 8'(emin + int'($urandom_range(0, emax - emin)));
    r[22:0]  = 23'($urandom);
    return r;
  endfunction

  task automatic check(fp32_t ea, fp32_t eb, fp32_t exp_y, int tol);
    int diff;
    a = ea; b = eb; #1;
    checks++;
    diff = int'(y[30:0]) - int'(exp_y[30:0]);
    if (diff < 0) diff = -diff;
    if (!(y == exp_y || (y[31] == exp_y[31] && diff <= tol))) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h expected %h", ea, eb, y, exp_y);
    end
  endtask

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x1, x2;
    real   r;
    int    de;
    for (int n = 0; n < 30000; n++) begin
      x1 = rnd_fp(100, 160);
      case (n % 3)
        0: x2 = rnd_fp(100, 160);
        1: begin x2 = rnd_fp(100, 160); x2[30:23] = x1[30:23] - 8'($urandom_range(0, 2)); end
        default: begin x2 = x1; x2[31] = ~x1[31]; x2[10:0] = 11'($urandom); end
      endcase
      r  = to_real(x1) + to_real(x2);
      de = int'(x1[30:23]) - int'(x2[30:23]);
      if (de < 0) de = -de;
      check(x1, x2, from_real(r), (de > 28) ? 1 : 0);
    end
    check(32'h3f80_0000, 32'h3f80_0000, 32'h4000_0000, 0);   // 1+1
    check(32'h3f80_0000, 32'hbf80_0000, 32'h0000_0000, 0);   // 1-1
    check(32'h0000_0000, 32'hc0a0_0000, 32'hc0a0_0000, 0);   // 0+(-5)
    check(32'h4040_0000, 32'h0000_0000, 32'h4040_0000, 0);   // 3+0
    check(32'h4040_0000, 32'h0000_0001, 32'h4040_0000, 0);   // subnormal flushed
    check(32'h7f7f_ffff, 32'h7f7f_ffff, 32'h7f80_0000, 0);   // overflow
    check(32'h3f80_0000, 32'hb380_0000, 32'h3f7f_ffff, 0);   // 1 - 2^-24
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
