// lstm_pkg: types, constants and fixed-point helpers shared by the LSTM
// accelerator.
//
// All datapath words are IEEE-754 single precision (fp32_t), as in the
// accelerator's published configuration. The four gate units are numbered
// in the order their outputs enter the elementwise stage: input, forget,
// cell (tanh) and output gate. The helper functions implement the
// piecewise-linear "PLAN" sigmoid in Q.16 fixed point, which this design
// chooses for the nonlinearity units (the source design names the units
// but does not say how they are built).
package lstm_pkg;

  typedef logic [31:0] fp32_t;

  localparam int unsigned NGATES = 4;
  localparam int unsigned GATE_I = 0;  // input gate, sigmoid
  localparam int unsigned GATE_F = 1;  // forget gate, sigmoid
  localparam int unsigned GATE_G = 2;  // cell gate, tanh
  localparam int unsigned GATE_O = 3;  // output gate, sigmoid

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;

  // Where a row written into the x~ buffer comes from.
  typedef enum logic [1:0] {
    XW_INPUT = 2'd0,  // x(t) from the host stream
    XW_ZERO  = 2'd1,  // zero h(0) at the start of a sequence
    XW_H     = 2'd2   // h(t) from the elementwise stage
  } xwsel_e;

  // Magnitude of an fp32 value as unsigned Q3.16, saturated at 8.0.
  // 'dbl' doubles the value first (used for tanh(x) = 2*sigmoid(2x)-1).
  // Subnormals count as zero.
  function automatic logic [19:0] fp_to_mag_q16(fp32_t x, logic dbl);
    logic [8:0]  e;
    logic [23:0] m;
    int          sh;
    e = {1'b0, x[30:23]} + {8'd0, dbl};
    m = {1'b1, x[22:0]};
    if (x[30:23] == 8'd0) return 20'd0;
    if (e >= 9'd130) return 20'h80000;          // |x| >= 8
    sh = 134 - int'(e);                          // value*2^16 = m >> sh
    if (sh >= 24) return 20'd0;
    return 20'(m >> sh);
  endfunction

  // PLAN sigmoid of a non-negative Q3.16 magnitude, result Q0.16 in [0.5, 1].
  //   a >= 5        : 1
  //   2.375 <= a < 5: a/32 + 0.84375
  //   1 <= a < 2.375: a/8  + 0.625
  //   a < 1         : a/4  + 0.5
  function automatic logic [16:0] plan_pos_q16(logic [19:0] a);
    if (a >= 20'd327680)      return 17'd65536;
    else if (a >= 20'd155648) return 17'(a >> 5) + 17'd55296;
    else if (a >= 20'd65536)  return 17'(a >> 3) + 17'd40960;
    else                      return 17'(a >> 2) + 17'd32768;
  endfunction

  // Convert sign and Q0.16 magnitude (0 .. 1.0) to fp32. Exact.
  function automatic fp32_t q16_to_fp(logic sgn, logic [16:0] q);
    int    p;
    logic [22:0] man;
    logic [39:0] t;
    if (q == 17'd0) return FP_ZERO;
    p = 0;
    for (int k = 0; k < 17; k++) if (q[k]) p = k;
    t   = {23'd0, q} << (23 - p);               // leading one at bit 23
    man = t[22:0];
    return {sgn, 8'(127 + p - 16), man};
  endfunction

endpackage
