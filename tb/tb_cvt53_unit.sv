// tb_cvt53_unit: checks OP_CVT53. Raw Q3_K fields (6-bit scale, 2-bit low
// part, high-mask bit) are drawn at random, repacked the way the host does it
// (scale (sc-32)>>>1 as 5 bits, weight {~h, low2} as 3 bits), and the result
// is compared with s5 * (x0*q0 + x1*q1) computed from the unpacked values.
module tb_cvt53_unit;
  import imax_pkg::*;
  word_t a, b, y;
  int checks = 0, failures = 0;

  cvt53_unit dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int e [2];
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      for (int l = 0; l < 2; l++) begin
        int sc6, s5, x0, x1, q [2];
        sc6 = int'($urandom % 64);
        s5  = (sc6 - 32) >>> 1;
        x0  = int'($signed(a[32*l +: 8]));
        x1  = int'($signed(a[32*l + 16 +: 8]));
        for (int k = 0; k < 2; k++) begin
          int lo, h;
          lo = int'($urandom % 4);
          h  = int'($urandom % 2);
          q[k] = lo - (h ? 0 : 4);
          b[32*l + 16*k +: 3] = {~1'(h), 2'(lo)};
        end
        b[32*l + 8 +: 5] = 5'(s5);
        e[l] = s5 * (x0 * q[0] + x1 * q[1]);
      end
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
