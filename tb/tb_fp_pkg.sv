// tb_fp_pkg: reference conversions between fp32 bit patterns and real, for
// the testbenches. to_real is exact. from_real rounds a double to single
// precision, nearest-even, flushing results below the normal range to zero
// and saturating overflow to infinity (the policy of the datapath).
package tb_fp_pkg;
  function automatic real to_real(logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] from_real(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic [28:0] low;
    logic        rnd;
    d   = $realtobits(r);
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:29]};
    low = d[28:0];
    rnd = low[28] && ((|low[27:0]) || m[0]);
    m   = m + 24'(rnd);
    if (m == 24'd0) e = e + 1;                   // carried out of 24 bits
    if (d[62:0] == 63'd0 || e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction
endpackage
