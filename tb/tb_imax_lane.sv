// tb_imax_lane: runs quantised dot products end to end on one lane of 64 PEs.
//
// Three jobs are streamed through the command port with random idle cycles,
// and the response port applies random back-pressure: a Q8_0 dot product of
// five blocks, a Q3_K dot product of two super-blocks (eight iterations, which
// reconfigures PEs used by the first job) and a one-block Q8_0 job with a
// non-zero initial accumulator. Each drained result is compared bit for bit
// with the reference, and each EXEC phase must last iterations + NPE + 2
// clocks (one iteration per clock).
module tb_imax_lane;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_kernel_pkg::*;

  localparam int NPE = NPE_DEF;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0, busy;
  word_t cmd_data = '0, rsp_data;
  phase_e phase;
  logic [NPHASE-1:0][31:0] phase_cycles;
  int checks = 0, failures = 0;

  imax_lane #(.NPE(NPE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic send(word_t q[$]);
    foreach (q[i]) begin
      while ($urandom % 4 == 0) begin @(negedge clk); cmd_valid = 0; end
      @(negedge clk);
      cmd_valid = 1; cmd_data = q[i];
      #1;
      while (!cmd_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic recv(output word_t r);
    forever begin
      @(negedge clk);
      rsp_ready = ($urandom % 3 != 0);
      #1;
      if (rsp_valid && rsp_ready) begin r = rsp_data; @(posedge clk); break; end
    end
    @(negedge clk); rsp_ready = 0;
  endtask

  task automatic run(job_t jb, word_t q[$], string name);
    word_t r;
    int    ex0;
    ex0 = int'(phase_cycles[PH_EXEC]);
    fork
      send(q);
      recv(r);
    join
    checks++;
    if (r[31:0] !== jb.expected) begin
      failures++;
      $display("FAIL %s result=%h (%f) expected=%h (%f)", name, r[31:0], f2r(r[31:0]),
               jb.expected, f2r(jb.expected));
    end else $display("%s: result %h (%f) ok", name, r[31:0], f2r(r[31:0]));
    checks++;
    if (int'(phase_cycles[PH_EXEC]) - ex0 != jb.iters + NPE + 2) begin
      failures++;
      $display("FAIL %s EXEC took %0d clocks, expected %0d", name,
               int'(phase_cycles[PH_EXEC]) - ex0, jb.iters + NPE + 2);
    end
  endtask

  initial begin
    word_t q [$];
    job_t  jb;
    repeat (3) @(posedge clk);
    rst_n = 1;
    q.delete(); jb = job_q8(q, 5, NPE, 32'd0);          run(jb, q, "Q8_0 K=5");
    q.delete(); jb = job_q3(q, 2, NPE, 32'd0);          run(jb, q, "Q3_K S=2");
    q.delete(); jb = job_q8(q, 1, NPE, 32'h3f80_0000);  run(jb, q, "Q8_0 K=1 acc0=1.0");
    checks++;
    if (phase_cycles[PH_CONF] == 0 || phase_cycles[PH_REGV] == 0 || phase_cycles[PH_RANGE] == 0 ||
        phase_cycles[PH_LOAD] == 0 || phase_cycles[PH_DRAIN] == 0) begin
      failures++;
      $display("FAIL a phase counter stayed at zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
