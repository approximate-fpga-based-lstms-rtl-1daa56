// sigmoid_unit: combinational logistic sigmoid on one fp32 value.
//
// One lane of the sigmoid stage that follows the input, forget and output
// gate units. The source design names a "sigmoid unit" but does not say how
// it is built; this design uses the piecewise-linear PLAN approximation,
// whose slopes are powers of two so that it needs only shifts and adds:
// the input magnitude is converted to Q3.16 fixed point (saturating at 8),
// one of four line segments is chosen, negative inputs use 1-y, and the
// Q0.16 result is converted back to fp32 exactly. The largest deviation
// from the true sigmoid is about 0.019.
// Interface: y = sigmoid(x), combinational.
module sigmoid_unit
  import lstm_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);
  logic [19:0] mag;
  logic [16:0] pos, q;

  always_comb begin
    mag = fp_to_mag_q16(x, 1'b0);
    pos = plan_pos_q16(mag);
    q   = x[31] ? 17'd65536 - pos : pos;
    y   = q16_to_fp(1'b0, q);
  end
endmodule
