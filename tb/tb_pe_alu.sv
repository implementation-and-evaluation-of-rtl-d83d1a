// tb_pe_alu: drives every opcode with random operands and compares the
// result word and the accumulator output with the reference models.
module tb_pe_alu;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  op_e         op;
  word_t       a, b, c, y, e;
  logic [31:0] acc, acc_nxt, eacc;
  int checks = 0, failures = 0;

  pe_alu dut (.op, .a, .b, .c, .acc, .y, .acc_nxt);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      op  = op_e'(n % 5);
      a   = {$urandom, $urandom};
      b   = {$urandom, $urandom};
      c   = {$urandom, $urandom};
      acc = {1'($urandom), 8'(110 + $urandom % 20), 23'($urandom)};
      eacc = acc;
      case (op)
        OP_SML8:  e = sml8_ref(a, b);
        OP_AD24:  e = ad24_ref(a, b);
        OP_CVT53: e = cvt53_ref(a, b);
        OP_DEQ: begin
          a[14:10] = 5'(8 + $urandom % 14);
          b[14:10] = 5'(8 + $urandom % 14);
          eacc = deq_ref(acc, a[15:0], b[15:0],
                         int'($signed(c[23:0])) + int'($signed(c[55:32])));
          e = {32'd0, eacc};
        end
        default:  e = '0;
      endcase
      #1;
      checks++;
      if (y !== e || acc_nxt !== eacc) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s y=%h exp=%h acc=%h exp=%h", op.name(), y, e, acc_nxt, eacc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
