// gate_unit: one hardware gate unit of the LSTM accelerator.
//
// Computes the pre-activation of one LSTM gate with the iterative
// rank-1-plus-pruning approximation of its augmented weight matrix:
//     y = sum_{n=1..N_steps} sigma(n) u(n) ((f(n) o v(n))^T x~)
// Following the source design, the unit is a TC-lane dot-product unit with
// a sigma multiplier (dot_product_unit) feeding a TR-lane multiplier array
// and TR accumulators (accum_mult_array). The two halves overlap: while
// the u tiles of step n are multiplied in, the dot product of step n+1 is
// already running, so a step costs about max(NZ/TC, R/TR) cycles.
// Interface: start (one-cycle pulse) with n_steps >= 1 runs the unit; done
// pulses once when the last u tile of the last step has been accumulated.
// The v and u streams are valid/ready; x_idx/x_data is a read port into the
// x~ buffer with one cycle of latency; rd_row/rd_data reads the result.
module gate_unit
  import lstm_pkg::*;
#(
  parameter int unsigned R       = 512,
  parameter int unsigned C       = 1024,
  parameter int unsigned NZ      = 512,
  parameter int unsigned TR      = 32,
  parameter int unsigned TC      = 1,
  parameter int unsigned STEPS_W = 16,
  localparam int unsigned IW     = $clog2(C),
  localparam int unsigned ROWS   = R / TR,
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [STEPS_W-1:0] n_steps,
  output logic               done,
  input  logic               v_valid,
  output logic               v_ready,
  input  fp32_t              v_val   [TC],
  input  logic [IW-1:0]      v_idx   [TC],
  input  fp32_t              v_sigma,
  input  logic               u_valid,
  output logic               u_ready,
  input  fp32_t              u_data  [TR],
  output logic [IW-1:0]      x_idx   [TC],
  input  fp32_t              x_data  [TC],
  input  logic [RW-1:0]      rd_row,
  output fp32_t              rd_data [TR]
);
  logic  s_valid, s_ready, s_first, s_last;
  fp32_t s_data;

  dot_product_unit #(.C(C), .NZ(NZ), .TC(TC), .STEPS_W(STEPS_W)) u_dot (
    .clk, .rst_n, .start, .n_steps,
    .v_valid, .v_ready, .v_val, .v_idx, .v_sigma,
    .x_idx, .x_data,
    .s_valid, .s_ready, .s_data, .s_first, .s_last
  );

  accum_mult_array #(.R(R), .TR(TR)) u_acc (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_data, .s_first, .s_last,
    .u_valid, .u_ready, .u_data,
    .done, .rd_row, .rd_data
  );
endmodule
