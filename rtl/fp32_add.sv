// fp32_add: combinational IEEE-754 single-precision adder.
//
// This is the "+" element of the dot-product adder tree, of the refinement
// accumulators and of the cell-state adder array. The operand of larger
// magnitude is kept, the other is aligned with guard, round and sticky bits,
// the two are added or subtracted, the result is renormalised with a
// leading-zero count and rounded to nearest, ties to even. As in fp32_mul
// (this design's choice, the source only fixes the format): subnormals are
// flushed to zero, overflow gives infinity, an infinite input is passed on,
// and an exact cancellation gives +0.
// Interface: y = a+b, purely combinational.
module fp32_add
  import lstm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       big, sml;
  logic [7:0]  d;
  logic [26:0] mb, ms, msh;
  logic        st;
  logic [27:0] s;
  int          lz;
  logic signed [9:0] exp;
  logic        rnd;
  logic [24:0] man_r;

  always_comb begin
    // order by magnitude
    if (a[30:0] >= b[30:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d   = big[30:23] - sml[30:23];
    st  = 1'b0;
    mb  = {1'b1, big[22:0], 3'b000};
    ms  = {1'b1, sml[22:0], 3'b000};
    if (d >= 8'd27) begin
      msh = 27'd1;                               // only sticky survives
    end else begin
      msh = ms >> d;
      for (int k = 0; k < 27; k++) if (k < int'(d) && ms[k]) st = 1'b1;
      msh[0] = msh[0] | st;
    end
    exp = 10'(signed'({2'b00, big[30:23]}));
    if (big[31] == sml[31]) s = {1'b0, mb} + {1'b0, msh};
    else                    s = {1'b0, mb} - {1'b0, msh};

    lz = 0;
    if (s[27]) begin
      s   = {1'b0, s[27:2], s[1] | s[0]};        // shift right keeping sticky
      exp = exp + 10'sd1;
    end else begin
      for (int k = 26; k >= 0; k--) if (s[k] && lz == 0) lz = 27 - k;
      if (lz > 1) begin
        s   = s << (lz - 1);
        exp = exp - 10'(lz - 1);
      end
    end
    // s[26] is the hidden bit, s[25:3] the mantissa, s[2:0] guard/round/sticky
    rnd   = s[2] & (s[1] | s[0] | s[3]);
    man_r = {1'b0, s[26:3]} + 25'(rnd);
    if (man_r[24]) begin
      man_r = man_r >> 1;
      exp   = exp + 10'sd1;
    end

    if (big[30:23] == 8'hff)      y = big;
    else if (sml[30:23] == 8'd0)  y = (big[30:23] == 8'd0) ? FP_ZERO : big;
    else if (s == 28'd0)          y = FP_ZERO;
    else if (exp >= 10'sd255)     y = {big[31], 8'hff, 23'd0};
    else if (exp <= 10'sd0)       y = {big[31], 31'd0};
    else                          y = {big[31], exp[7:0], man_r[22:0]};
  end
endmodule
