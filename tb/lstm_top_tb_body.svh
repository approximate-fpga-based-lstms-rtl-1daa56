// Shared body of the end-to-end testbenches of lstm_top.
//
// The including module defines the localparams R, C, NZ, TR, TC, SW, NT
// (time steps), STALLS (1: random gaps on all input streams and random
// back-pressure on the output) and the step counts in STEPS[NT], then
// instantiates the accelerator as 'dut' on the signals declared here.
//
// The testbench plays the off-chip memory: it generates, per gate and per
// refinement step, a singular value, a dense u and NZ non-zero v values with
// distinct random column indices, and serves them on the v and u streams of
// every time step. It also supplies x(t) and takes the h/c rows.
//
// Reference: for each gate y = sum_n sigma(n) u(n) (v(n)^T x~) in real
// arithmetic, then the PLAN nonlinearities and c = f*c_prev + i*g,
// h = c*o. x~ holds x(t) and the previous h as returned by the device, so
// the recurrence is checked step by step. Tolerances are relative (1e-3).
//
// Mechanisms counted (each must occur at least once):
//   overlap   : a gate's v and u streams both move in the same cycle, i.e. the
//               dot product of step n+1 runs while step n is being multiplied in
//   handoff   : a gate holds its v stream back because the multiplier array
//               has not yet taken the previous scalar
//   outstall  : an h/c row waits for the output side
//   newseq    : a time step started with new_seq (h(0)=0, c(0)=0)
//   recur     : a time step that used the previous h and c
//   refine    : a time step with more than one refinement step
// In runs without stalls the gate phase is also timed against
// n_steps * max(NZ/TC + 1, R/TR) + R/TR plus a few cycles of pipeline.
// The testbench sees only the accelerator's ports, no internal signals.

  localparam int unsigned IW = $clog2(C);
  localparam int unsigned HROWS = R / TR, XROWS = (C - R) / TR, TILES = NZ / TC;
  localparam int unsigned RWT = (HROWS > 1) ? $clog2(HROWS) : 1;
  localparam int unsigned NSMAX = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, new_seq, busy, done;
  logic [SW-1:0] n_steps;
  logic x_valid, x_ready;
  fp32_t x_data [TR];
  logic v_valid [NGATES], v_ready [NGATES];
  fp32_t v_val [NGATES][TC];
  logic [IW-1:0] v_idx [NGATES][TC];
  fp32_t v_sigma [NGATES];
  logic u_valid [NGATES], u_ready [NGATES];
  fp32_t u_data [NGATES][TR];
  logic out_valid, out_ready;
  logic [RWT-1:0] out_row;
  fp32_t out_h [TR], out_c [TR];

  // weights (the off-chip memory contents)
  fp32_t sg [NGATES][NSMAX];
  fp32_t uu [NGATES][NSMAX][R];
  fp32_t vv [NGATES][NSMAX][NZ];
  int    vi [NGATES][NSMAX][NZ];
  // state as returned by the device
  real   hprev [R], cprev [R];
  real   xt [C];
  fp32_t xin [C];
  real   exp_h [R], exp_c [R];

  int checks = 0, failures = 0, cycle = 0;
  int n_overlap = 0, n_handoff = 0, n_outstall = 0, n_newseq = 0, n_recur = 0, n_refine = 0;
  int rows_seen, t_gate_start, t_gate_end;
  bit in_gates;

  task automatic fail(string m);
    failures++;
    if (failures < 12) $display("FAIL %s", m);
  endtask

  function automatic real plan(real v);
    real a = (v < 0.0) ? -v : v;
    real p;
    if (a >= 5.0)        p = 1.0;
    else if (a >= 2.375) p = a / 32.0 + 0.84375;
    else if (a >= 1.0)   p = a / 8.0 + 0.625;
    else                 p = a / 4.0 + 0.5;
    return (v < 0.0) ? 1.0 - p : p;
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NGATES; g++) begin
      if (v_valid[g] && v_ready[g] && u_valid[g] && u_ready[g]) n_overlap++;
    end
    if (out_valid && !out_ready) n_outstall++;
  end

  initial begin
    repeat (200000 * NT) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gen_weights();
    for (int g = 0; g < NGATES; g++)
      for (int n = 0; n < NSMAX; n++) begin
        int perm [C];
        sg[g][n] = from_real(urand(0.5, 2.0) / real'(n + 1));
        for (int r = 0; r < R; r++) uu[g][n][r] = from_real(urand(-1.0, 1.0));
        for (int c = 0; c < C; c++) perm[c] = c;
        for (int c = C - 1; c > 0; c--) begin
          int j = $urandom_range(0, c);
          int tmp = perm[c]; perm[c] = perm[j]; perm[j] = tmp;
        end
        for (int j = 0; j < NZ; j++) begin
          vi[g][n][j] = perm[j];
          vv[g][n][j] = from_real(urand(-2.0, 2.0) / $sqrt(real'(NZ)));
        end
      end
  endtask

  task automatic gap();
    while (STALLS && $urandom_range(0, 3) == 0) @(posedge clk);
  endtask

  task automatic drive_v(int g, int ns);
    @(posedge clk);
    while (!in_gates) @(posedge clk);
    for (int n = 0; n < ns; n++)
      for (int t = 0; t < TILES; t++) begin
        v_valid[g] <= 0;
        gap();
        v_valid[g] <= 1;
        for (int k = 0; k < TC; k++) begin
          v_val[g][k] <= vv[g][n][t*TC+k];
          v_idx[g][k] <= IW'(vi[g][n][t*TC+k]);
        end
        v_sigma[g] <= sg[g][n];
        @(posedge clk);
        while (!v_ready[g]) begin n_handoff++; @(posedge clk); end
      end
    v_valid[g] <= 0;
  endtask

  task automatic drive_u(int g, int ns);
    for (int n = 0; n < ns; n++)
      for (int t = 0; t < HROWS; t++) begin
        u_valid[g] <= 0;
        gap();
        u_valid[g] <= 1;
        for (int k = 0; k < TR; k++) u_data[g][k] <= uu[g][n][t*TR+k];
        @(posedge clk);
        while (!u_ready[g]) @(posedge clk);
      end
    u_valid[g] <= 0;
  endtask

  task automatic drive_x();
    for (int t = 0; t < XROWS; t++) begin
      x_valid <= 0;
      gap();
      x_valid <= 1;
      for (int k = 0; k < TR; k++) x_data[k] <= xin[t*TR+k];
      @(posedge clk);
      while (!x_ready) @(posedge clk);
    end
    x_valid <= 0;
  endtask

  task automatic take_out();
    rows_seen = 0;
    while (rows_seen < HROWS) begin
      out_ready <= STALLS ? ($urandom_range(0, 2) != 0) : (($urandom_range(0, 7) != 0));
      @(posedge clk);
      if (out_valid && out_ready) begin
        int r = int'(out_row);
        checks++;
        if (r != rows_seen) fail($sformatf("row order %0d vs %0d", r, rows_seen));
        for (int k = 0; k < TR; k++) begin
          real gh = to_real(out_h[k]), gc = to_real(out_c[k]);
          int  e  = r * TR + k;
          checks++;
          if (absr(gc - exp_c[e]) > 1e-3 * (1.0 + absr(exp_c[e])) ||
              absr(gh - exp_h[e]) > 1e-3 * (1.0 + absr(exp_h[e])))
            fail($sformatf("elem %0d c %f/%f h %f/%f", e, gc, exp_c[e], gh, exp_h[e]));
          hprev[e] = gh;
          cprev[e] = gc;
        end
        rows_seen++;
      end
    end
    out_ready <= 0;
  endtask

  task automatic time_step(bit ns, int nsteps);
    real y [NGATES][R];
    // new x(t); reference x~ = [x; h(t-1)]
    for (int c = 0; c < C - R; c++) begin xin[c] = from_real(urand(-1.0, 1.0)); xt[c] = to_real(xin[c]); end
    if (ns) for (int r = 0; r < R; r++) begin hprev[r] = 0.0; cprev[r] = 0.0; end
    for (int r = 0; r < R; r++) xt[C - R + r] = hprev[r];
    for (int g = 0; g < NGATES; g++) begin
      for (int r = 0; r < R; r++) y[g][r] = 0.0;
      for (int n = 0; n < nsteps; n++) begin
        real d = 0.0;
        for (int j = 0; j < NZ; j++) d += to_real(vv[g][n][j]) * xt[vi[g][n][j]];
        d = d * to_real(sg[g][n]);
        for (int r = 0; r < R; r++) y[g][r] += d * to_real(uu[g][n][r]);
      end
    end
    for (int r = 0; r < R; r++) begin
      real ig = plan(y[GATE_I][r]), fg = plan(y[GATE_F][r]);
      real gg = 2.0 * plan(2.0 * y[GATE_G][r]) - 1.0, og = plan(y[GATE_O][r]);
      exp_c[r] = fg * cprev[r] + ig * gg;
      exp_h[r] = exp_c[r] * og;
    end
    if (ns) n_newseq++; else n_recur++;
    if (nsteps > 1) n_refine++;

    @(posedge clk);
    start <= 1; new_seq <= ns; n_steps <= SW'(nsteps);
    @(posedge clk);
    start <= 0;
    fork
      drive_x();
      drive_v(0, nsteps); drive_u(0, nsteps);
      drive_v(1, nsteps); drive_u(1, nsteps);
      drive_v(2, nsteps); drive_u(2, nsteps);
      drive_v(3, nsteps); drive_u(3, nsteps);
      take_out();
      begin
        // gate phase: from the first cycle a gate asks for v tiles to the
        // first cycle a result row is offered (one cycle after issue)
        while (!v_ready[0]) @(posedge clk);
        t_gate_start = cycle; in_gates = 1;
        while (!out_valid) @(posedge clk);
        t_gate_end = cycle - 1; in_gates = 0;
      end
    join
    while (busy) @(posedge clk);
    if (!STALLS) begin
      int lim = nsteps * ((TILES + 1 > HROWS) ? TILES + 1 : HROWS) + HROWS + 6;
      checks++;
      if (t_gate_end - t_gate_start > lim)
        fail($sformatf("gate phase took %0d cycles, limit %0d", t_gate_end - t_gate_start, lim));
    end
  endtask

  initial begin
    rst_n = 0; start = 0; new_seq = 0; n_steps = 0; x_valid = 0; out_ready = 0; in_gates = 0;
    for (int g = 0; g < NGATES; g++) begin v_valid[g] = 0; u_valid[g] = 0; end
    gen_weights();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) time_step(t == 0 || t == NT - 1 && NT > 3, STEPS[t]);
    $display("mechanisms: overlap=%0d handoff=%0d outstall=%0d newseq=%0d recur=%0d refine=%0d",
             n_overlap, n_handoff, n_outstall, n_newseq, n_recur, n_refine);
    checks++; if (n_overlap  == 0) fail("overlap never happened");
    checks++; if (n_handoff  == 0 && NZ / TC < R / TR) fail("hand-off stall never happened");
    checks++; if (n_outstall == 0) fail("output stall never happened");
    checks++; if (n_newseq   == 0) fail("new sequence never happened");
    checks++; if (n_recur    == 0) fail("recurrence never happened");
    checks++; if (n_refine   == 0) fail("multi-step refinement never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
