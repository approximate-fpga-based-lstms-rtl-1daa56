// cell_state_buffer: on-chip store of the LSTM cell state c.
//
// Holds the R words of c as R/TR rows of TR lanes. The elementwise stage
// reads row r of c(t-1) and, when that row's result leaves the accelerator,
// overwrites it with c(t). Keeping c on chip is this design's reading of the
// source, whose memory-traffic model counts only the write-back of h and c
// and no read of c. Read is combinational; a write lands on the clock edge.
module cell_state_buffer
  import lstm_pkg::*;
#(
  parameter int unsigned R  = 512,
  parameter int unsigned TR = 32,
  localparam int unsigned ROWS = R / TR,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic [RW-1:0] rd_row,
  output fp32_t         rd_data [TR],
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  fp32_t         wr_data [TR]
);
  fp32_t mem [ROWS][TR];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  assign rd_data = mem[rd_row];
endmodule
