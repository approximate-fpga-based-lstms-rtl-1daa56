// elementwise_unit: nonlinearities and the cell/output update of one TR-row.
//
// For TR lanes at a time it applies the gate nonlinearities and the LSTM
// state update of the source design:
//     i = sigmoid(y_i), f = sigmoid(y_f), g = tanh(y_g), o = sigmoid(y_o)
//     c(t) = f * c(t-1) + i * g
//     h(t) = c(t) * o
// using three TR-wide multiplier arrays and one TR-wide adder array. As in
// the image-captioning LSTM the source follows, h is c*o with no tanh on c.
// c_zero makes c(t-1) read as zero (first step of a sequence).
// Timing: one row per cycle; the row's results are registered, so out_*
// is valid the cycle after in_valid && in_ready, and in_ready is low only
// while a result waits for out_ready. in_row travels with the data.
module elementwise_unit
  import lstm_pkg::*;
#(
  parameter int unsigned TR = 32,
  parameter int unsigned RW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [RW-1:0] in_row,
  input  fp32_t         pre_i  [TR],
  input  fp32_t         pre_f  [TR],
  input  fp32_t         pre_g  [TR],
  input  fp32_t         pre_o  [TR],
  input  fp32_t         c_prev [TR],
  input  logic          c_zero,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [RW-1:0] out_row,
  output fp32_t         h      [TR],
  output fp32_t         c      [TR]
);
  fp32_t ai [TR], af [TR], ag [TR], ao [TR], cp [TR];
  fp32_t fc [TR], ig [TR], cn [TR], hn [TR];
  logic  fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  for (genvar k = 0; k < TR; k++) begin : g_lane
    sigmoid_unit u_si (.x(pre_i[k]), .y(ai[k]));
    sigmoid_unit u_sf (.x(pre_f[k]), .y(af[k]));
    tanh_unit    u_tg (.x(pre_g[k]), .y(ag[k]));
    sigmoid_unit u_so (.x(pre_o[k]), .y(ao[k]));
    assign cp[k] = c_zero ? FP_ZERO : c_prev[k];
    fp32_mul u_mfc (.a(af[k]), .b(cp[k]), .y(fc[k]));
    fp32_mul u_mig (.a(ai[k]), .b(ag[k]), .y(ig[k]));
    fp32_add u_add (.a(fc[k]), .b(ig[k]), .y(cn[k]));
    fp32_mul u_mho (.a(cn[k]), .b(ao[k]), .y(hn[k]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n)              out_valid <= 1'b0;
    else if (fire)           out_valid <= 1'b1;
    else if (out_ready)      out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      out_row <= in_row;
      h       <= hn;
      c       <= cn;
    end
  end
endmodule
