// tanh_unit: combinational hyperbolic tangent on one fp32 value.
//
// One lane of the tanh stage that follows the cell gate unit. The source
// design names a tanh unit without giving its construction; this design
// reuses the PLAN sigmoid through tanh(x) = 2*sigmoid(2x) - 1. The doubling
// is folded into the fp32-to-fixed conversion, the odd symmetry of tanh is
// used so only the positive branch is evaluated, and the Q0.16 result is
// converted back to fp32 with the input's sign. Largest deviation from the
// true tanh is about 0.04.
// Interface: y = tanh(x), combinational.
module tanh_unit
  import lstm_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);
  logic [19:0] mag2;
  logic [16:0] s, t;

  always_comb begin
    mag2 = fp_to_mag_q16(x, 1'b1);               // |2x| in Q3.16
    s    = plan_pos_q16(mag2);                   // sigmoid(|2x|) in [0.5, 1]
    t    = 17'((s << 1) - 18'd65536);            // 2s - 1 in [0, 1]
    y    = q16_to_fp(x[31], t);
  end
endmodule
