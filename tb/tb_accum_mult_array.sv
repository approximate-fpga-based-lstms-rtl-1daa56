// tb_accum_mult_array: self-checking test of the u multiplier array and the
// refinement accumulators. For NSTEP steps a scalar is offered, held while
// R/TR random u tiles stream in (with random gaps), and popped. Checks:
// each pop comes with the last tile, done pulses once after the last step,
// every accumulated output matches sum_n s(n) u(n) in real arithmetic within
// a relative bound, and a second run overwrites (does not add to) the first.
module tb_accum_mult_array;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned R = 16, TR = 4, ROWS = R / TR, NSTEP = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic s_valid, s_ready, s_first, s_last, u_valid, u_ready, done;
  fp32_t s_data, u_data [TR], rd_data [TR];
  logic [$clog2(ROWS)-1:0] rd_row;
  fp32_t uu [NSTEP][R];
  fp32_t ss [NSTEP];
  int checks = 0, failures = 0, ndone = 0;

  accum_mult_array #(.R(R), .TR(TR)) dut (.*);

  always @(posedge clk) if (done) ndone++;

  function automatic fp32_t rnd_val();
    return from_real((real'($urandom_range(0, 2000)) - 1000.0) / 300.0);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run();
    ndone = 0;
    for (int n = 0; n < NSTEP; n++) begin
      ss[n] = rnd_val();
      for (int r = 0; r < R; r++) uu[n][r] = rnd_val();
    end
    for (int n = 0; n < NSTEP; n++) begin
      s_valid <= 1; s_data <= ss[n]; s_first <= (n == 0); s_last <= (n == NSTEP - 1);
      for (int t = 0; t < ROWS; t++) begin
        while ($urandom_range(0, 3) == 0) begin u_valid <= 0; @(posedge clk); end
        u_valid <= 1;
        for (int k = 0; k < TR; k++) u_data[k] <= uu[n][t*TR+k];
        @(posedge clk);
        while (!u_ready) @(posedge clk);
        checks++;
        if (s_ready !== (t == ROWS - 1)) begin failures++; $display("FAIL pop at tile %0d", t); end
      end
      s_valid <= 0; u_valid <= 0;
      @(posedge clk);
    end
    repeat (2) @(posedge clk);
    checks++;
    if (ndone != 1) begin failures++; $display("FAIL done pulsed %0d times", ndone); end
    for (int r = 0; r < ROWS; r++) begin
      rd_row = r[$clog2(ROWS)-1:0]; #1;
      for (int k = 0; k < TR; k++) begin
        real e = 0.0, m = 0.0, p, g;
        for (int n = 0; n < NSTEP; n++) begin
          p = to_real(ss[n]) * to_real(uu[n][r*TR+k]);
          e += p; m += (p < 0) ? -p : p;
        end
        g = to_real(rd_data[k]);
        checks++;
        if (g - e > 1e-6 * m || e - g > 1e-6 * m) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d] got %f exp %f", r*TR+k, g, e);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; s_valid = 0; u_valid = 0; rd_row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run();
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
