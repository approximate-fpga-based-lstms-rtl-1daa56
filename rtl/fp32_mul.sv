// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// This is the "x" element of every multiplier array of the accelerator
// (dot-product lanes, sigma scaling, u multiplier array and the three
// elementwise multiplier arrays). The source design only states that all
// data are single-precision floating point; the rounding and special-value
// policy here is this design's choice:
//   * round to nearest, ties to even;
//   * subnormal inputs and results are flushed to (signed) zero;
//   * overflow and any infinite/NaN input give a signed infinity.
// Interface: y = a*b, purely combinational, no clock.
module fp32_mul
  import lstm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sgn;
  logic [47:0] prod;
  logic [22:0] man;
  logic        guard, sticky, rnd;
  logic [24:0] man_r;
  logic signed [10:0] exp;

  always_comb begin
    sgn   = a[31] ^ b[31];
    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp   = 11'(signed'({3'b000, a[30:23]})) + 11'(signed'({3'b000, b[30:23]})) - 11'sd127;
    if (prod[47]) begin
      man    = prod[46:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp    = exp + 11'sd1;
    end else begin
      man    = prod[45:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd   = guard & (sticky | man[0]);
    man_r = {2'b01, man} + 25'(rnd);
    if (man_r[24]) exp = exp + 11'sd1;           // rounding carried out

    if (a[30:23] == 8'hff || b[30:23] == 8'hff) y = {sgn, 8'hff, 23'd0};
    else if (a[30:23] == 8'd0 || b[30:23] == 8'd0) y = {sgn, 31'd0};
    else if (exp >= 11'sd255) y = {sgn, 8'hff, 23'd0};
    else if (exp <= 11'sd0)   y = {sgn, 31'd0};
    else y = {sgn, exp[7:0], man_r[24] ? 23'd0 : man_r[22:0]};
  end
endmodule
