// sml8_unit: the OP_SML8 instruction, a 2-way SIMD signed 8-bit multiply-add.
//
// The 64-bit operands are split into two independent 32-bit lanes. In each
// lane the two signed 8-bit elements of a are multiplied by the elements of b
// in the same positions, the two products are added, and the sum is returned
// as a 24-bit integer sign-extended to the full 32-bit lane.
//
// Element positions: bits [7:0] and [23:16] of each lane (the low byte of
// each 16-bit half). The paper gives the operation, the 2-way SIMD form and
// the 24-bit sign-extended result; Fig. 3 draws the operand words with the
// int8 values in every other byte, and the exact bit positions are this
// design's choice. Purely combinational; the enclosing PE registers y.
module sml8_unit
  import imax_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      logic signed [7:0]  a0, a1, b0, b1;
      logic signed [23:0] s;
      a0 = a[32*l +: 8];
      a1 = a[32*l + 16 +: 8];
      b0 = b[32*l +: 8];
      b1 = b[32*l + 16 +: 8];
      s  = 24'(a0 * b0) + 24'(a1 * b1);
      y[32*l +: 32] = {{8{s[23]}}, s};
    end
  end
endmodule
