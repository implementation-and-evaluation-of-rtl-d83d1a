// tb_sml8_unit: checks OP_SML8 against integer arithmetic on random operands
// (including the extreme values -128 and 127) and checks that the bytes that
// do not carry elements are ignored.
module tb_sml8_unit;
  import imax_pkg::*;
  word_t a, b, y;
  int checks = 0, failures = 0;

  sml8_unit dut (.a, .b, .y);

  function automatic logic signed [7:0] pickv();
    case ($urandom % 6)
      0: return -8'sd128;
      1: return 8'sd127;
      default: return 8'($urandom);
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int e [2];
      logic signed [7:0] av [4], bv [4];
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      for (int k = 0; k < 4; k++) begin
        av[k] = pickv(); bv[k] = pickv();
        a[16*k +: 8] = av[k];
        b[16*k +: 8] = bv[k];
      end
      for (int l = 0; l < 2; l++) e[l] = av[2*l] * bv[2*l] + av[2*l+1] * bv[2*l+1];
      #1;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if ($signed(y[32*l +: 32]) != e[l]) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h lane%0d y=%h exp=%0d", a, b, l, y[32*l +: 32], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
