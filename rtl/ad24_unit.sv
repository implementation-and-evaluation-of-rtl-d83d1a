// ad24_unit: the OP_AD24 instruction, a 2-way 24-bit integer addition.
//
// Each 32-bit lane adds the low 24 bits of a and b modulo 2^24 and returns the
// sum sign-extended to 32 bits, so that its output has the same format as an
// OP_SML8 or OP_CVT53 result and can feed the next level of the reduction.
// The operation and its 2-way, 24-bit form come from the paper; wrap-around
// on overflow is this design's choice (the Q8_0 and Q3_K block sums stay far
// below 2^23). Combinational.
module ad24_unit
  import imax_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      logic [23:0] s;
      s = a[32*l +: 24] + b[32*l +: 24];
      y[32*l +: 32] = {{8{s[23]}}, s};
    end
  end
endmodule
