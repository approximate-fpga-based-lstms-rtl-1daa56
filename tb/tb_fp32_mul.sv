// tb_fp32_mul: self-checking test of the fp32 multiplier.
// Random normal operands are multiplied and compared bit-exactly with the
// simulator's own single-precision rounding of the exact double-precision
// product (a float*float product is exact in double, so one rounding gives
// the correctly rounded result). Directed cases cover zero, subnormal
// flushing, overflow to infinity and underflow to zero.
module tb_fp32_mul;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  fp32_t a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_mul dut (.a, .b, .y);

  function automatic fp32_t rnd_fp(int emin, int emax);
    fp32_t r;
    r[31]    = 1'($urandom);
    r[30:23] = 8'(emin + int'($urandom_range(0, emax - emin)));
    r[22:0]  = 23'($urandom);
    return r;
  endfunction

  task automatic expect_eq(fp32_t ea, fp32_t eb, fp32_t exp_y);
    a = ea; b = eb; #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 4) $display("FAIL %h * %h = %h expected %h %f", ea, eb, y, exp_y, to_real(ea));
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
    for (int n = 0; n < 20000; n++) begin
      x1 = rnd_fp(64, 190);
      x2 = rnd_fp(64, 190);
      r  = to_real(x1) * to_real(x2);
      expect_eq(x1, x2, from_real(r));
    end
    expect_eq(32'h3f80_0000, 32'h4000_0000, 32'h4000_0000);   // 1*2
    expect_eq(32'h3fc0_0000, 32'hbfc0_0000, 32'hc010_0000);   // 1.5*-1.5
    expect_eq(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);   // 0*2
    expect_eq(32'h8000_0000, 32'h4000_0000, 32'h8000_0000);   // -0*2
    expect_eq(32'h0040_0000, 32'h4000_0000, 32'h0000_0000);   // subnormal in
    expect_eq(32'h7f00_0000, 32'h4080_0000, 32'h7f80_0000);   // overflow
    expect_eq(32'h0100_0000, 32'h0100_0000, 32'h0000_0000);   // underflow
    expect_eq(32'h7f80_0000, 32'hbf80_0000, 32'hff80_0000);   // inf*-1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
