// deq_unit: the dequantisation step and UPDATE accumulation that close the
// Q8_0 and Q3_K dot-product kernels (dashed "Dequantization" box of Figs. 3
// and 4).
//
// Inputs are the two F16 block scales (activation scale sd, weight scale wd),
// the 2-way 24-bit integer partial sum produced by the OP_SML8 / OP_CVT53 /
// OP_AD24 reduction, and the running F32 accumulator. The unit
//   1. widens sd and wd to F32 (F16=>F32),
//   2. adds the two 24-bit lanes of the partial sum and converts it to F32,
//   3. forms d = sd*wd and p = d*isum (two F32 multiplies, each rounded),
//   4. returns acc + p (F32 add, rounded) as the new accumulator value.
// The figure draws the two converters, two multipliers, one adder and the
// UPDATE feedback; it also shows one F32 operand (drawn in yellow) that the
// paper does not explain. This design follows the usual GGML definition of a
// quantised block dot product, acc += sd*wd*sum(x*w), which uses all drawn
// units. Combinational; the PE registers the accumulator.
module deq_unit
  import imax_pkg::*;
(
  input  logic [15:0] sd,      // activation block scale, F16
  input  logic [15:0] wd,      // weight block scale, F16
  input  word_t       isum,    // two sign-extended 24-bit partial sums
  input  logic [31:0] acc,     // running accumulator, F32
  output logic [31:0] acc_nxt  // acc + sd*wd*isum, F32
);
  logic [31:0] sdf, wdf, isf, dsc, prod;
  logic signed [31:0] itot;

  assign itot = 32'(signed'(isum[23:0])) + 32'(signed'(isum[55:32]));

  f16_to_f32 u_cvt_sd (.h(sd), .f(sdf));
  f16_to_f32 u_cvt_wd (.h(wd), .f(wdf));
  int_to_f32 u_cvt_i  (.i(itot), .f(isf));
  fp32_mul   u_mul_d  (.a(sdf), .b(wdf), .y(dsc));
  fp32_mul   u_mul_p  (.a(dsc), .b(isf), .y(prod));
  fp32_add   u_add    (.a(acc), .b(prod), .y(acc_nxt));
endmodule
