// tb_fp_pkg: reference floating-point arithmetic for the testbenches.
//
// Works on IEEE doubles (real) and rounds to single precision by bit
// manipulation, independently of the RTL converters. A product of two singles
// is exact in double, and a sum of two singles rounded first to double and
// then to single gives the correctly rounded single result, so these
// functions reproduce round-to-nearest-even single-precision arithmetic.
// Results below the normal single range are flushed to zero, like the RTL.
package tb_fp_pkg;

  function automatic logic [31:0] r2f(real x);
    logic [63:0] b;
    logic [52:0] m;
    logic [24:0] m24;
    int          e;
    b = $realtobits(x);
    if (b[62:52] == 11'd0) return {b[63], 31'd0};
    e   = int'(b[62:52]) - 1023 + 127;
    m   = {1'b1, b[51:0]};
    m24 = {1'b0, m[52:29]};
    if (m[28] && ((|m[27:0]) || m24[0])) m24 = m24 + 1;
    if (m24[24]) begin m24 = m24 >> 1; e = e + 1; end
    if (e >= 255) return {b[63], 8'hff, 23'd0};
    if (e <= 0)   return {b[63], 31'd0};
    return {b[63], 8'(e), m24[22:0]};
  endfunction

  function automatic real f2r(logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic real h2r(logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) v = real'(h[9:0]) * (2.0 ** -24);
    else        v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // random normal half-precision value with exponent field in [elo, ehi]
  function automatic logic [15:0] rand_h(int elo, int ehi);
    return {1'($urandom), 5'(elo + int'($urandom % (ehi - elo + 1))), 10'($urandom)};
  endfunction

  // one dequantisation step exactly as the hardware orders it
  function automatic logic [31:0] deq_ref(logic [31:0] acc, logic [15:0] sd,
                                          logic [15:0] wd, int isum);
    logic [31:0] d, fi, p;
    d  = r2f(h2r(sd) * h2r(wd));
    fi = r2f(real'(isum));
    p  = r2f(f2r(d) * f2r(fi));
    return r2f(f2r(acc) + f2r(p));
  endfunction

endpackage
