// tb_dot_product_unit: self-checking test of the sparse dot-product unit.
// Runs with TC = 4 lanes (so the adder tree is exercised) on random sparse
// v vectors, random x~ and random sigma. The testbench models the x~
// buffer (registered read) and a consumer of the hand-off register.
// Each scaled result is compared with a real-valued reference within a
// relative bound; the first/last-step flags and the number of results are
// checked. Run 1 has no stalls and checks the timing: first result NZ/TC+1
// cycles after the first tile, then one result every NZ/TC cycles. Run 2
// adds random gaps in the v stream and a slow consumer, so the unit has to
// hold its last tile back.
module tb_dot_product_unit;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned C = 64, NZ = 16, TC = 4, SW = 8;
  localparam int unsigned TILES = NZ / TC;
  localparam int unsigned NSTEP = 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start;
  logic [SW-1:0] n_steps;
  logic v_valid, v_ready;
  fp32_t v_val [TC];
  logic [$clog2(C)-1:0] v_idx [TC];
  fp32_t v_sigma;
  logic [$clog2(C)-1:0] x_idx [TC];
  fp32_t x_data [TC];
  logic s_valid, s_ready, s_ready_q, s_first, s_last;
  int   first_fire_cyc;
  bit   seen_fire;
  fp32_t s_data;

  fp32_t xmem [C];
  fp32_t vv [NSTEP][NZ];
  int    vi [NSTEP][NZ];
  fp32_t sg [NSTEP];
  int checks = 0, failures = 0;
  int cycle = 0;
  int stall_v = 0, slow_consumer = 0;
  int t_res [NSTEP], nres;
  int hold_cnt, v_hold_seen;

  dot_product_unit #(.C(C), .NZ(NZ), .TC(TC), .STEPS_W(SW)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;
  // fast consumer pops in the cycle the result appears; slow one waits
  assign s_ready = slow_consumer ? s_ready_q : s_valid;
  always @(posedge clk) if (v_valid && v_ready && !seen_fire) begin
    seen_fire <= 1; first_fire_cyc <= cycle;
  end
  always_ff @(posedge clk) for (int k = 0; k < TC; k++) x_data[k] <= xmem[x_idx[k]];

  function automatic fp32_t rnd_val();
    return from_real((real'($urandom_range(0, 2000)) - 1000.0) / 250.0);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer of the v stream
  task automatic drive_v();
    for (int s = 0; s < NSTEP; s++)
      for (int t = 0; t < TILES; t++) begin
        while (stall_v && $urandom_range(0, 2) == 0) begin
          v_valid <= 0; @(posedge clk);
        end
        v_valid <= 1;
        for (int k = 0; k < TC; k++) begin
          v_val[k] <= vv[s][t*TC+k];
          v_idx[k] <= vi[s][t*TC+k][$clog2(C)-1:0];
        end
        v_sigma <= (t == TILES - 1) ? sg[s] : fp32_t'($urandom);
        @(posedge clk);
        while (!v_ready) begin
          if (slow_consumer) v_hold_seen++;
          @(posedge clk);
        end
      end
    v_valid <= 0;
  endtask

  // consumer of results
  task automatic consume();
    nres = 0;
    while (nres < NSTEP) begin
      @(posedge clk);
      s_ready_q <= 0;
      if (s_valid && (!slow_consumer || !s_ready_q)) begin
        real acc = 0.0, mag = 0.0, got, expv;
        t_res[nres] = cycle;
        for (int j = 0; j < NZ; j++) begin
          acc += to_real(vv[nres][j]) * to_real(xmem[vi[nres][j]]);
          mag += (to_real(vv[nres][j]) * to_real(xmem[vi[nres][j]])) ** 2 > 0 ?
                 ((to_real(vv[nres][j]) * to_real(xmem[vi[nres][j]])) < 0 ?
                  -(to_real(vv[nres][j]) * to_real(xmem[vi[nres][j]])) :
                   (to_real(vv[nres][j]) * to_real(xmem[vi[nres][j]]))) : 0.0;
        end
        expv = acc * to_real(sg[nres]);
        got  = to_real(s_data);
        checks++;
        if ((got - expv) > 1e-5 * mag * (to_real(sg[nres]) < 0 ? -to_real(sg[nres]) : to_real(sg[nres])) + 1e-30 ||
            (expv - got) > 1e-5 * mag * (to_real(sg[nres]) < 0 ? -to_real(sg[nres]) : to_real(sg[nres])) + 1e-30) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d got %f exp %f", nres, got, expv);
        end
        checks++;
        if (s_first !== (nres == 0) || s_last !== (nres == NSTEP - 1)) begin
          failures++;
          $display("FAIL flags step %0d first %b last %b", nres, s_first, s_last);
        end
        if (slow_consumer) begin
          hold_cnt = 3 * TILES;
          repeat (hold_cnt) @(posedge clk);
          s_ready_q <= 1;
        end
        nres++;
      end
    end
    @(posedge clk); s_ready_q <= 0;
  endtask

  task automatic run(int stalls, int slow);
    for (int c = 0; c < C; c++) xmem[c] = rnd_val();
    for (int s = 0; s < NSTEP; s++) begin
      for (int j = 0; j < NZ; j++) begin vv[s][j] = rnd_val(); vi[s][j] = $urandom_range(0, C - 1); end
      sg[s] = rnd_val();
    end
    stall_v = stalls; slow_consumer = slow;
    @(posedge clk);
    start <= 1; n_steps <= SW'(NSTEP);
    @(posedge clk);
    start <= 0;
    fork
      drive_v();
      consume();
    join
    repeat (3) @(posedge clk);
    checks++;
    if (v_ready !== 1'b0) begin failures++; $display("FAIL still asking for tiles"); end
  endtask

  initial begin
    seen_fire = 0; rst_n = 0; start = 0; v_valid = 0; s_ready_q = 0; n_steps = 0; v_hold_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0);
    // timing without stalls: first tile accepted in the cycle after start
    checks++;
    if (t_res[0] - first_fire_cyc != TILES + 1) begin
      failures++; $display("FAIL first result after %0d cycles, expected %0d", t_res[0] - first_fire_cyc, TILES + 1);
    end
    for (int s = 1; s < NSTEP; s++) begin
      checks++;
      if (t_res[s] - t_res[s-1] != TILES) begin
        failures++; $display("FAIL step period %0d, expected %0d", t_res[s] - t_res[s-1], TILES);
      end
    end
    run(1, 1);
    checks++;
    if (v_hold_seen == 0) begin failures++; $display("FAIL back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
