// lstm_top: approximate LSTM accelerator with iterative rank-1 gate weights.
//
// Each of the four LSTM gates replaces its R x C augmented weight matrix by
// a sum of N_steps pruned rank-1 terms sigma(n) u(n) (f(n) o v(n))^T, which
// are precomputed offline and streamed from off-chip memory. Per time step:
//   * x(t) is loaded into the on-chip x~ buffer next to h(t-1);
//   * the four gate units run in parallel, each streaming NZ non-zero v
//     elements (TC per cycle, with their column indices) and R u elements
//     (TR per cycle) per refinement step;
//   * the elementwise stage applies sigmoid/tanh and computes c(t), h(t)
//     TR lanes at a time; h(t) and c(t) leave through the out_* stream
//     (the write-back to off-chip memory) and are kept on chip for t+1.
// The structure (four parallel gate units, TC-wide dot product, sigma
// multiplier, TR-wide multiplier and accumulator arrays, sigmoid/tanh stage,
// three multiplier arrays and one adder array) follows the source design;
// the stream formats, the index encoding of the pruning masks, the
// controller and the PLAN nonlinearities are this design's own.
// Gate order on the per-gate ports: 0 input, 1 forget, 2 cell, 3 output.
//
// Host protocol: with busy low, pulse start (with new_seq for the first step
// of a sequence and n_steps >= 1), feed (C-R)/TR x beats, serve the v and u
// streams of every gate (n_steps * NZ/TC v beats and n_steps * R/TR u beats
// each), and take R/TR output rows; done pulses after the last row.
// When the streams never stall, refinement steps follow each other every
// max(NZ/TC, R/TR) cycles, and a time step takes about
// (C-R)/TR + n_steps*max(NZ/TC, R/TR) + 2*R/TR cycles plus a few of pipeline.
module lstm_top
  import lstm_pkg::*;
#(
  parameter int unsigned R       = 512,
  parameter int unsigned C       = 1024,
  parameter int unsigned NZ      = 512,
  parameter int unsigned TR      = 32,
  parameter int unsigned TC      = 1,
  parameter int unsigned STEPS_W = 16,
  localparam int unsigned IW     = $clog2(C),
  localparam int unsigned HROWS  = R / TR,
  localparam int unsigned RW     = (HROWS > 1) ? $clog2(HROWS) : 1,
  localparam int unsigned BROWS  = C / TR,
  localparam int unsigned BW     = (BROWS > 1) ? $clog2(BROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host control
  input  logic               start,
  input  logic               new_seq,
  input  logic [STEPS_W-1:0] n_steps,
  output logic               busy,
  output logic               done,
  // x(t)
  input  logic               x_valid,
  output logic               x_ready,
  input  fp32_t              x_data  [TR],
  // per-gate v streams (non-zero elements of f o v, their indices, sigma)
  input  logic               v_valid [NGATES],
  output logic               v_ready [NGATES],
  input  fp32_t              v_val   [NGATES][TC],
  input  logic [IW-1:0]      v_idx   [NGATES][TC],
  input  fp32_t              v_sigma [NGATES],
  // per-gate u streams
  input  logic               u_valid [NGATES],
  output logic               u_ready [NGATES],
  input  fp32_t              u_data  [NGATES][TR],
  // h(t), c(t) write-back stream
  output logic               out_valid,
  input  logic               out_ready,
  output logic [RW-1:0]      out_row,
  output fp32_t              out_h   [TR],
  output fp32_t              out_c   [TR]
);
  // controller wiring
  logic               xb_wr_en, gate_start, el_valid, el_ready, c_zero, cb_wr_en;
  logic [BW-1:0]      xb_wr_row;
  xwsel_e             xb_wr_sel;
  logic [STEPS_W-1:0] gate_steps;
  logic [NGATES-1:0]  gate_done;
  logic [RW-1:0]      el_row;
  logic               out_fire;

  fp32_t              xb_wr_data [TR];
  logic [IW-1:0]      xb_rd_idx  [NGATES*TC];
  fp32_t              xb_rd_data [NGATES*TC];
  fp32_t              pre        [NGATES][TR];
  fp32_t              c_prev     [TR];

  assign out_fire = out_valid && out_ready;

  lstm_controller #(.R(R), .C(C), .TR(TR), .STEPS_W(STEPS_W)) u_ctrl (
    .clk, .rst_n, .start, .new_seq, .n_steps, .busy, .done,
    .x_valid, .x_ready,
    .xb_wr_en, .xb_wr_row, .xb_wr_sel,
    .gate_start, .gate_steps, .gate_done,
    .el_valid, .el_ready, .el_row, .c_zero,
    .out_fire, .out_row,
    .cb_wr_en
  );

  always_comb begin
    for (int k = 0; k < TR; k++) begin
      unique case (xb_wr_sel)
        XW_INPUT: xb_wr_data[k] = x_data[k];
        XW_H:     xb_wr_data[k] = out_h[k];
        default:  xb_wr_data[k] = FP_ZERO;
      endcase
    end
  end

  xtilde_buffer #(.C(C), .TR(TR), .NPORTS(NGATES * TC)) u_xbuf (
    .clk, .wr_en(xb_wr_en), .wr_row(xb_wr_row), .wr_data(xb_wr_data),
    .rd_idx(xb_rd_idx), .rd_data(xb_rd_data)
  );

  for (genvar g = 0; g < NGATES; g++) begin : g_gate
    logic [IW-1:0] x_idx  [TC];
    fp32_t         x_data_g [TC];
    for (genvar l = 0; l < TC; l++) begin : g_port
      assign xb_rd_idx[g*TC + l] = x_idx[l];
      assign x_data_g[l]         = xb_rd_data[g*TC + l];
    end
    gate_unit #(.R(R), .C(C), .NZ(NZ), .TR(TR), .TC(TC), .STEPS_W(STEPS_W)) u_gate (
      .clk, .rst_n,
      .start   (gate_start),
      .n_steps (gate_steps),
      .done    (gate_done[g]),
      .v_valid (v_valid[g]), .v_ready(v_ready[g]),
      .v_val   (v_val[g]),   .v_idx  (v_idx[g]), .v_sigma(v_sigma[g]),
      .u_valid (u_valid[g]), .u_ready(u_ready[g]), .u_data(u_data[g]),
      .x_idx   (x_idx),      .x_data (x_data_g),
      .rd_row  (el_row),     .rd_data(pre[g])
    );
  end

  cell_state_buffer #(.R(R), .TR(TR)) u_cbuf (
    .clk, .rd_row(el_row), .rd_data(c_prev),
    .wr_en(cb_wr_en), .wr_row(out_row), .wr_data(out_c)
  );

  elementwise_unit #(.TR(TR), .RW(RW)) u_elem (
    .clk, .rst_n,
    .in_valid(el_valid), .in_ready(el_ready), .in_row(el_row),
    .pre_i(pre[GATE_I]), .pre_f(pre[GATE_F]), .pre_g(pre[GATE_G]), .pre_o(pre[GATE_O]),
    .c_prev, .c_zero,
    .out_valid, .out_ready, .out_row, .h(out_h), .c(out_c)
  );
endmodule
