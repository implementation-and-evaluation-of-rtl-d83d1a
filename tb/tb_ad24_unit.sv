// tb_ad24_unit: checks OP_AD24 on random 24-bit operands, including sums that
// wrap around 2^24, and checks that the upper byte of each lane is ignored.
module tb_ad24_unit;
  import imax_pkg::*;
  word_t a, b, y;
  int checks = 0, failures = 0;

  ad24_unit dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint e [2];
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      for (int l = 0; l < 2; l++) begin
        longint s;
        s = longint'($signed(a[32*l +: 24])) + longint'($signed(b[32*l +: 24]));
        // wrap into the signed 24-bit range
        s = ((s + 64'sd8388608) % 64'sd16777216 + 64'sd16777216) % 64'sd16777216 - 64'sd8388608;
        e[l] = s;
      end
      #1;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (longint'($signed(y[32*l +: 32])) != e[l]) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h lane%0d y=%h exp=%0d", a, b, l, y[32*l +: 32], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
