// pe_alu: arithmetic unit of one PE.
//
// Selects, by the PE's configured opcode, among the instructions the
// quantised dot-product kernels need: OP_SML8, OP_AD24, OP_CVT53 and OP_DEQ
// (dequantisation with F32 accumulation). OP_NOP produces no result and the
// PE then passes its bus through unchanged. The paper names the three integer
// instructions and draws the dequantisation step; collecting them behind one
// opcode field, and treating the dequantisation step as one instruction of a
// single PE, are this design's choices.
//
// Operands a, b, c are 64-bit; for OP_DEQ, a[15:0] and b[15:0] carry the F16
// scales, c the integer partial sums and acc the PE's F32 accumulator. The
// result y is a 64-bit word (for OP_DEQ the F32 value sits in y[31:0]).
// Combinational; the PE registers y one cycle later.
module pe_alu
  import imax_pkg::*;
(
  input  op_e         op,
  input  word_t       a,
  input  word_t       b,
  input  word_t       c,
  input  logic [31:0] acc,
  output word_t       y,
  output logic [31:0] acc_nxt
);
  word_t       y_sml8, y_ad24, y_cvt53;
  logic [31:0] y_deq;

  sml8_unit  u_sml8  (.a(a), .b(b), .y(y_sml8));
  ad24_unit  u_ad24  (.a(a), .b(b), .y(y_ad24));
  cvt53_unit u_cvt53 (.a(a), .b(b), .y(y_cvt53));
  deq_unit   u_deq   (.sd(a[15:0]), .wd(b[15:0]), .isum(c), .acc(acc), .acc_nxt(y_deq));

  always_comb begin
    acc_nxt = acc;
    unique case (op)
      OP_SML8:  y = y_sml8;
      OP_AD24:  y = y_ad24;
      OP_CVT53: y = y_cvt53;
      OP_DEQ: begin
        y       = {32'd0, y_deq};
        acc_nxt = y_deq;
      end
      default:  y = '0;
    endcase
  end
endmodule
