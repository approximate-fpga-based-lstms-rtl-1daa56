// xtilde_buffer: on-chip store of the augmented input vector x~ = [x(t); h(t-1)].
//
// At the start of every time step x~ is placed on chip because all four gate
// units read it again in every refinement step (this follows the source
// design). How the buffer is organised is this design's choice: C fp32 words
// in one array, written a row of TR consecutive words per cycle (x(t) from
// the host, zeros for h(0), or h(t) from the elementwise stage), and read
// through NPORTS independent registered read ports, one per dot-product
// lane of every gate unit (4*TC ports).
// Timing: rd_data[p] is mem[rd_idx[p]] one clock after rd_idx[p] is
// presented; a write becomes visible to reads on the following clock.
module xtilde_buffer
  import lstm_pkg::*;
#(
  parameter int unsigned C      = 1024,
  parameter int unsigned TR     = 32,
  parameter int unsigned NPORTS = 4,
  localparam int unsigned ROWS  = C / TR,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IW    = $clog2(C)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  fp32_t           wr_data [TR],
  input  logic [IW-1:0]   rd_idx  [NPORTS],
  output fp32_t           rd_data [NPORTS]
);
  fp32_t mem [C];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < TR; k++) mem[wr_row * TR + k] <= wr_data[k];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) rd_data[p] <= mem[rd_idx[p]];
  end

  initial assert (C % TR == 0) else $error("C must be a multiple of TR");
endmodule
