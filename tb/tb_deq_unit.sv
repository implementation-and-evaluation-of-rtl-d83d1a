// tb_deq_unit: checks the dequantisation step bit for bit against reference
// single-precision arithmetic (tb_fp_pkg): random F16 scales, random 24-bit
// partial sums in both lanes, random accumulators, plus zero, subnormal F16
// scales and cancelling cases.
module tb_deq_unit;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  logic [15:0] sd, wd;
  word_t       isum;
  logic [31:0] acc, y;
  int checks = 0, failures = 0;

  deq_unit dut (.sd, .wd, .isum, .acc, .acc_nxt(y));

  task automatic check_one(int i0, int i1);
    logic [31:0] e;
    isum = {$urandom, $urandom};
    isum[23:0]  = 24'(i0);
    isum[55:32] = 24'(i1);
    e = deq_ref(acc, sd, wd, i0 + i1);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL sd=%h wd=%h i=%0d acc=%h y=%h exp=%h", sd, wd, i0 + i1, acc, y, e);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int i0, i1;
      sd  = rand_h(5, 25);
      wd  = rand_h(5, 25);
      i0  = int'($urandom % 1000001) - 500000;
      i1  = int'($urandom % 1000001) - 500000;
      case (n % 5)
        0: acc = 32'd0;
        1: acc = r2f(-f2r(deq_ref(32'd0, sd, wd, i0 + i1)) * 1.0);  // cancel
        2: begin sd = {1'($urandom), 5'd0, 10'($urandom)}; acc = {1'($urandom), 8'(100 + $urandom % 40), 23'($urandom)}; end
        default: acc = {1'($urandom), 8'(100 + $urandom % 40), 23'($urandom)};
      endcase
      if (n % 97 == 0) begin i0 = 0; i1 = 0; end
      check_one(i0, i1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
