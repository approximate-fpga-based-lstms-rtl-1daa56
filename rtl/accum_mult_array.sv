// accum_mult_array: u multiplier array and refinement accumulators of one gate.
//
// Holds the scalar s(n) = sigma(n) * (f(n) o v(n))^T x~ from the dot-product
// unit and multiplies it with the left singular vector u(n), streamed in
// tiles of TR values per cycle, in an array of TR fp32 multipliers. An array
// of TR fp32 adders then adds each product to the running gate output
//     y[r] += s(n) * u(n)[r]
// so that after N_steps steps y = sum_n s(n) u(n) (the refinement sum of
// the source design). The R partial sums live here, as R/TR rows of TR
// lanes (this design's choice); the first step writes instead of adding,
// so no clearing pass is needed.
// Timing: one u tile per cycle while a scalar is held (u_ready = s_valid);
// the scalar is popped (s_ready) with the last of the R/TR tiles, and
// step_done pulses one cycle later; done pulses one cycle after the last
// tile of the last step. rd_row/rd_data read a finished row combinationally.
module accum_mult_array
  import lstm_pkg::*;
#(
  parameter int unsigned R  = 512,
  parameter int unsigned TR = 32,
  localparam int unsigned ROWS = R / TR,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // scalar from the dot-product unit
  input  logic          s_valid,
  output logic          s_ready,
  input  fp32_t         s_data,
  input  logic          s_first,
  input  logic          s_last,
  // u stream from off-chip memory
  input  logic          u_valid,
  output logic          u_ready,
  input  fp32_t         u_data [TR],
  // results
  output logic          done,
  input  logic [RW-1:0] rd_row,
  output fp32_t         rd_data [TR]
);
  fp32_t acc [ROWS][TR];
  fp32_t prod [TR];
  fp32_t sum  [TR];
  logic [RW-1:0] row;
  logic fire, row_last;

  assign u_ready  = s_valid;
  assign fire     = u_valid && u_ready;
  assign row_last = (row == RW'(ROWS - 1));
  assign s_ready  = fire && row_last;

  for (genvar k = 0; k < TR; k++) begin : g_lane
    fp32_mul u_mul (.a(s_data), .b(u_data[k]), .y(prod[k]));
    fp32_add u_add (.a(acc[row][k]), .b(prod[k]), .y(sum[k]));
  end

  always_ff @(posedge clk) begin
    if (fire)
      for (int k = 0; k < TR; k++) acc[row][k] <= s_first ? prod[k] : sum[k];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row  <= '0;
      done <= 1'b0;
    end else begin
      done <= fire && row_last && s_last;
      if (fire) row <= row_last ? '0 : row + 1'b1;
    end
  end

  assign rd_data = acc[rd_row];
endmodule
