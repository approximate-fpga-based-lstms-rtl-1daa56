// tb_lstm_controller: self-checking test of the time-step sequencer.
// The testbench stands in for the datapath: gate units that report done
// after different random delays and an elementwise stage with random
// back-pressure. Over several time steps (with and without new_seq) it
// checks the order and number of x~ buffer writes (x rows, then zero rows
// only for a new sequence, then h rows as results leave), the single
// gate_start pulse with n_steps, that elementwise rows are issued only
// after all four gates are done and in order, that c_zero follows new_seq,
// and that done pulses once after the last output row.
module tb_lstm_controller;
  import lstm_pkg::*;
  localparam int unsigned R = 32, C = 64, TR = 8, SW = 8;
  localparam int unsigned XROWS = (C - R) / TR, HROWS = R / TR, BROWS = C / TR;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, new_seq, busy, done, x_valid, x_ready;
  logic [SW-1:0] n_steps, gate_steps;
  logic xb_wr_en, gate_start, el_valid, el_ready, c_zero, out_fire, cb_wr_en;
  logic [$clog2(BROWS)-1:0] xb_wr_row;
  xwsel_e xb_wr_sel;
  logic [NGATES-1:0] gate_done;
  logic [$clog2(HROWS)-1:0] el_row, out_row;
  int checks = 0, failures = 0;
  int nx, nz, nh, ngs, nel, ndone, gates_done_cnt, pend, nout;
  int gdelay [NGATES];
  int cyc = 0, gs_cyc;
  logic [$clog2(HROWS)-1:0] q [$];

  lstm_controller #(.R(R), .C(C), .TR(TR), .STEPS_W(SW)) dut (.*);

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // datapath stand-in
  always @(posedge clk) begin
    if (!rst_n) begin
      gate_done <= '0; el_ready <= 1; out_fire <= 0; pend = 0;
    end else begin
      gate_done <= '0;
      if (gate_start) begin
        ngs++; gs_cyc = cyc;
        checks++; if (gate_steps !== n_steps) fail("gate_steps");
        for (int g = 0; g < NGATES; g++) gdelay[g] = $urandom_range(1, 30);
      end
      for (int g = 0; g < NGATES; g++)
        if (gs_cyc >= 0 && cyc == gs_cyc + gdelay[g]) begin gate_done[g] <= 1; gates_done_cnt++; end
      if (xb_wr_en) begin
        checks++;
        case (xb_wr_sel)
          XW_INPUT: begin if (xb_wr_row != nx) fail("x row order"); nx++; end
          XW_ZERO:  begin if (xb_wr_row != XROWS + nz) fail("zero row order"); nz++; end
          default:  begin if (xb_wr_row != XROWS + out_row) fail("h row"); nh++; end
        endcase
      end
      if (el_valid && el_ready) begin
        checks++;
        if (gates_done_cnt != NGATES) fail("elementwise before gates done");
        if (el_row != nel) fail("el row order");
        q.push_back(el_row); nel++;
      end
      out_fire <= 0;
      if (q.size() > 0 && $urandom_range(0, 1) == 1) begin
        out_fire <= 1; out_row <= q.pop_front(); nout++;
      end
      el_ready <= (q.size() < 2) && ($urandom_range(0, 3) != 0);
      if (done) ndone++;
    end
  end

  task automatic step(bit ns, int steps);
    nx = 0; nz = 0; nh = 0; ngs = 0; nel = 0; ndone = 0; gates_done_cnt = 0; gs_cyc = -1; nout = 0;
    @(posedge clk);
    start <= 1; new_seq <= ns; n_steps <= SW'(steps);
    @(posedge clk);
    start <= 0;
    #1; checks++; if (!busy) fail("busy");
    // feed x with gaps
    while (nx < XROWS) begin
      x_valid <= ($urandom_range(0, 2) != 0);
      @(posedge clk);
    end
    x_valid <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    checks++; if (ngs != 1) fail("gate_start count");
    checks++; if (nz != (ns ? HROWS : 0)) fail("zero rows");
    checks++; if (nh != HROWS || nel != HROWS) fail("h rows");
    checks++; if (ndone != 1) fail("done count");
    checks++; if (busy) fail("still busy");
    checks++; if (c_zero !== ns) fail("c_zero");
  endtask

  initial begin
    rst_n = 0; start = 0; x_valid = 0; new_seq = 0; n_steps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    step(1, 3);
    step(0, 5);
    step(0, 1);
    step(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
