// tb_elementwise_unit: self-checking test of the nonlinearity/state stage.
// Random gate pre-activations and c(t-1) rows are pushed with random gaps
// while the output side applies random back-pressure. Every result row is
// checked for its row tag and against c = f*c_prev + i*g, h = c*o computed
// in real arithmetic from the PLAN sigmoid (tolerance 1e-3 relative), and
// with c_zero set c_prev must be ignored. It also checks that the stage
// accepts a row every cycle when the output is always ready.
module tb_elementwise_unit;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned TR = 4, RW = 4, NROWS = 200;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, c_zero, out_valid, out_ready;
  logic [RW-1:0] in_row, out_row;
  fp32_t pre_i [TR], pre_f [TR], pre_g [TR], pre_o [TR], c_prev [TR], h [TR], c [TR];
  fp32_t qi [NROWS][TR], qf [NROWS][TR], qg [NROWS][TR], qo [NROWS][TR], qc [NROWS][TR];
  bit    qz [NROWS];
  int checks = 0, failures = 0, nin = 0, nout = 0, bp = 1, nstall = 0;
  int cyc_first, cyc_last;

  elementwise_unit #(.TR(TR), .RW(RW)) dut (.*);

  function automatic real plan(real v);
    real a = (v < 0.0) ? -v : v;
    real p;
    if (a >= 5.0)        p = 1.0;
    else if (a >= 2.375) p = a / 32.0 + 0.84375;
    else if (a >= 1.0)   p = a / 8.0 + 0.625;
    else                 p = a / 4.0 + 0.5;
    return (v < 0.0) ? 1.0 - p : p;
  endfunction

  function automatic fp32_t rnd_val();
    return from_real((real'($urandom_range(0, 2000)) - 1000.0) / 150.0);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: random back-pressure, check each row
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_row !== RW'(nout)) begin failures++; $display("FAIL row tag %0d expected %0d", out_row, nout); end
      for (int k = 0; k < TR; k++) begin
        real ig, ff, gg, oo, cp, ce, he;
        ig = plan(to_real(qi[nout][k]));
        ff = plan(to_real(qf[nout][k]));
        gg = 2.0 * plan(2.0 * to_real(qg[nout][k])) - 1.0;
        oo = plan(to_real(qo[nout][k]));
        cp = qz[nout] ? 0.0 : to_real(qc[nout][k]);
        ce = ff * cp + ig * gg;
        he = ce * oo;
        checks++;
        if ((to_real(c[k]) - ce) > 1e-3 * (1.0 + (ce < 0 ? -ce : ce)) ||
            (ce - to_real(c[k])) > 1e-3 * (1.0 + (ce < 0 ? -ce : ce)) ||
            (to_real(h[k]) - he) > 1e-3 * (1.0 + (he < 0 ? -he : he)) ||
            (he - to_real(h[k])) > 1e-3 * (1.0 + (he < 0 ? -he : he))) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d c %f/%f h %f/%f", nout, k, to_real(c[k]), ce, to_real(h[k]), he);
        end
      end
      nout++;
    end
    out_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (in_valid && !in_ready) nstall++;
  end

  initial begin
    rst_n = 0; in_valid = 0; out_ready = 0; c_zero = 0;
    for (int n = 0; n < NROWS; n++) begin
      qz[n] = (n % 5 == 0);
      for (int k = 0; k < TR; k++) begin
        qi[n][k] = rnd_val(); qf[n][k] = rnd_val(); qg[n][k] = rnd_val();
        qo[n][k] = rnd_val(); qc[n][k] = rnd_val();
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NROWS; n++) begin
      if (n == NROWS / 2) begin
        // second half: output always ready, one row per cycle
        in_valid <= 0;
        while (nout < n) @(posedge clk);
        bp = 0;
        @(posedge clk);
        cyc_first = $time;
      end
      while (bp && $urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1; in_row <= RW'(n); c_zero <= qz[n];
      pre_i <= qi[n]; pre_f <= qf[n]; pre_g <= qg[n]; pre_o <= qo[n]; c_prev <= qc[n];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    cyc_last = $time;
    while (nout < NROWS) @(posedge clk);
    checks++;
    if ((cyc_last - cyc_first) / 10 != NROWS / 2) begin
      failures++; $display("FAIL %0d cycles for %0d rows", (cyc_last - cyc_first) / 10, NROWS / 2);
    end
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL back-pressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
