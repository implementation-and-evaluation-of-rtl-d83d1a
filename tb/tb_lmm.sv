// tb_lmm: writes random words, reads them back on both ports and checks the
// one-clock read latency, read-hold while the enable is low, and that a read
// in the same clock as a write to that address returns the old word.
module tb_lmm;
  import imax_pkg::*;
  localparam int unsigned DEPTH = LMM_WORDS;
  logic clk = 0, re0 = 0, re1 = 0, we = 0;
  logic [AW-1:0] raddr0 = '0, raddr1 = '0, waddr = '0;
  word_t rdata0, rdata1, wdata = '0;
  word_t model [DEPTH];
  int checks = 0, failures = 0;

  lmm dut (.*);

  always #5 clk = ~clk;

  task automatic chk(word_t got, word_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads on both ports, random writes
    for (int n = 0; n < 4000; n++) begin
      int a0, a1, aw;
      word_t e0, e1;
      a0 = int'($urandom % DEPTH); a1 = int'($urandom % DEPTH); aw = int'($urandom % DEPTH);
      if (n % 3 == 0) aw = a0;            // read-during-write, same address
      re0 = 1; re1 = 1; raddr0 = AW'(a0); raddr1 = AW'(a1);
      we = (n % 2 == 0); waddr = AW'(aw); wdata = {$urandom, $urandom};
      e0 = model[a0]; e1 = model[a1];
      if (we) model[aw] = wdata;
      @(posedge clk); #1;
      chk(rdata0, e0, "port0");
      chk(rdata1, e1, "port1");
      // hold while the enables are low
      @(negedge clk);
      re0 = 0; re1 = 0; we = 0; raddr0 = ~raddr0;
      @(posedge clk); #1;
      chk(rdata0, e0, "hold0");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
