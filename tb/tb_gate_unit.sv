// tb_gate_unit: self-checking test of one hardware gate unit.
// A random augmented weight approximation (NSTEP steps of sigma, u and a
// sparse v with random column indices) is streamed in with random gaps;
// the testbench models the x~ buffer. After done, every output is checked
// against y = sum_n sigma(n) u(n) (v(n)^T x~) computed in real arithmetic.
// A stall-free run also checks the step rate: with NZ/TC > R/TR the unit
// must finish within NSTEP*(NZ/TC) + R/TR + 4 cycles of start.
module tb_gate_unit;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned R = 16, C = 32, NZ = 12, TR = 4, TC = 2, SW = 8;
  localparam int unsigned ROWS = R / TR, TILES = NZ / TC, NSTEP = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, done;
  logic [SW-1:0] n_steps;
  logic v_valid, v_ready, u_valid, u_ready;
  fp32_t v_val [TC], v_sigma, u_data [TR], x_data [TC], rd_data [TR];
  logic [$clog2(C)-1:0] v_idx [TC], x_idx [TC];
  logic [$clog2(ROWS)-1:0] rd_row;
  fp32_t xmem [C];
  fp32_t vv [NSTEP][NZ], uu [NSTEP][R], sg [NSTEP];
  int vi [NSTEP][NZ];
  int checks = 0, failures = 0, cycle = 0, stalls = 0;
  int t_start, t_done;

  gate_unit #(.R(R), .C(C), .NZ(NZ), .TR(TR), .TC(TC), .STEPS_W(SW)) dut (.*);

  always_ff @(posedge clk) for (int k = 0; k < TC; k++) x_data[k] <= xmem[x_idx[k]];
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (done) t_done <= cycle;

  function automatic fp32_t rnd_val();
    return from_real((real'($urandom_range(0, 2000)) - 1000.0) / 300.0);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive_v();
    for (int n = 0; n < NSTEP; n++)
      for (int t = 0; t < TILES; t++) begin
        while (stalls && $urandom_range(0, 3) == 0) begin v_valid <= 0; @(posedge clk); end
        v_valid <= 1;
        for (int k = 0; k < TC; k++) begin
          v_val[k] <= vv[n][t*TC+k]; v_idx[k] <= vi[n][t*TC+k][$clog2(C)-1:0];
        end
        v_sigma <= sg[n];
        @(posedge clk);
        while (!v_ready) @(posedge clk);
      end
    v_valid <= 0;
  endtask

  task automatic drive_u();
    for (int n = 0; n < NSTEP; n++)
      for (int t = 0; t < ROWS; t++) begin
        while (stalls && $urandom_range(0, 3) == 0) begin u_valid <= 0; @(posedge clk); end
        u_valid <= 1;
        for (int k = 0; k < TR; k++) u_data[k] <= uu[n][t*TR+k];
        @(posedge clk);
        while (!u_ready) @(posedge clk);
      end
    u_valid <= 0;
  endtask

  task automatic run(int with_stalls);
    stalls = with_stalls;
    for (int c = 0; c < C; c++) xmem[c] = rnd_val();
    for (int n = 0; n < NSTEP; n++) begin
      sg[n] = rnd_val();
      for (int j = 0; j < NZ; j++) begin vv[n][j] = rnd_val(); vi[n][j] = $urandom_range(0, C - 1); end
      for (int r = 0; r < R; r++) uu[n][r] = rnd_val();
    end
    t_done = -1;
    @(posedge clk);
    start <= 1; n_steps <= SW'(NSTEP); t_start = cycle;
    @(posedge clk);
    start <= 0;
    fork drive_v(); drive_u(); join
    while (t_done < 0) @(posedge clk);
    for (int r = 0; r < ROWS; r++) begin
      rd_row = r[$clog2(ROWS)-1:0]; #1;
      for (int k = 0; k < TR; k++) begin
        real e = 0.0, m = 0.0, d, g;
        for (int n = 0; n < NSTEP; n++) begin
          d = 0.0;
          for (int j = 0; j < NZ; j++) d += to_real(vv[n][j]) * to_real(xmem[vi[n][j]]);
          d = d * to_real(sg[n]) * to_real(uu[n][r*TR+k]);
          e += d; m += (d < 0) ? -d : d;
        end
        g = to_real(rd_data[k]);
        checks++;
        if (g - e > 1e-4 * m + 1e-6 || e - g > 1e-4 * m + 1e-6) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d] got %f exp %f", r*TR+k, g, e);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; v_valid = 0; u_valid = 0; rd_row = 0; n_steps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    checks++;
    if (t_done - t_start > NSTEP * TILES + ROWS + 4) begin
      failures++; $display("FAIL took %0d cycles", t_done - t_start);
    end
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
