// cvt53_unit: the OP_CVT53 instruction used by the Q3_K kernel.
//
// Q3_K weights are stored as a 6-bit sub-block scale plus a 2-bit and a 1-bit
// part per weight. Before the data reach the accelerator the scale is reduced
// to a signed 5-bit value and the two weight parts are packed into one signed
// 3-bit value (range -4..3). OP_CVT53 takes those two narrow formats, widens
// both to one signed format, multiplies the 3-bit weights by the int8
// activations, and applies the 5-bit scale, in both 32-bit lanes at once:
//
//   y.lane = sext32( s5 * (a0*q0 + a1*q1) )      (24-bit result)
//
// Operand layout per 32-bit lane (this design's choice):
//   a: int8 activations at [7:0] and [23:16]       (same as OP_SML8)
//   b: q0 at [2:0], scale s5 at [12:8], q1 at [18:16]
// The paper gives the function (5-bit and 3-bit inputs converted to a single
// format, scaling and signed multiplication in parallel) and Fig. 4 shows the
// results entering the same 24-bit reduction tree as OP_SML8. Combinational.
module cvt53_unit
  import imax_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      logic signed [7:0]  a0, a1, q0, q1, sc;
      logic signed [23:0] dot, s;
      a0  = a[32*l +: 8];
      a1  = a[32*l + 16 +: 8];
      // widen the 3-bit weights and the 5-bit scale to signed 8-bit
      q0  = 8'(signed'(b[32*l +: 3]));
      q1  = 8'(signed'(b[32*l + 16 +: 3]));
      sc  = 8'(signed'(b[32*l + 8 +: 5]));
      dot = 24'(a0 * q0) + 24'(a1 * q1);
      s   = dot * 24'(sc);
      y[32*l +: 32] = {{8{s[23]}}, s};
    end
  end
endmodule
