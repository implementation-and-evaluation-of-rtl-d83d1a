// tb_lane_host: host model for one lane in the multi-lane testbench.
//
// run_job() builds a Q8_0 or Q3_K job with tb_kernel_pkg, streams its
// commands with random idle cycles, collects the drained result with random
// back-pressure, compares it with the reference and checks the length of the
// EXEC phase (iterations + NPE + 2 clocks). Counters are exported as ports.
module tb_lane_host
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_kernel_pkg::*;
#(
  parameter int LANE = 0,
  parameter int NPE  = NPE_DEF
) (
  input  logic        clk,
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output word_t       cmd_data,
  input  logic        rsp_valid,
  output logic        rsp_ready,
  input  word_t       rsp_data,
  input  logic [31:0] exec_cycles,
  output int          checks,
  output int          failures,
  output int          n_gap,
  output int          n_sml8,
  output int          n_cvt53,
  output int          n_deq
);
  initial begin
    cmd_valid = 0; cmd_data = '0; rsp_ready = 0;
    checks = 0; failures = 0; n_gap = 0; n_sml8 = 0; n_cvt53 = 0; n_deq = 0;
  end

  task automatic send(word_t q[$]);
    foreach (q[i]) begin
      while ($urandom % 4 == 0) begin @(negedge clk); cmd_valid = 0; n_gap++; end
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

  task automatic run_job(bit q3, int size, logic [31:0] acc0);
    word_t q [$];
    word_t r;
    job_t  jb;
    int    ex0;
    if (q3) begin jb = job_q3(q, size, NPE, acc0); n_cvt53 += 16 * jb.iters; end
    else    begin jb = job_q8(q, size, NPE, acc0); n_sml8  += 8 * jb.iters; end
    n_deq += jb.iters;
    ex0 = int'(exec_cycles);
    fork
      send(q);
      recv(r);
    join
    checks++;
    if (r[31:0] !== jb.expected) begin
      failures++;
      $display("FAIL lane %0d %s result=%h expected=%h", LANE, q3 ? "Q3_K" : "Q8_0", r[31:0], jb.expected);
    end else
      $display("lane %0d %s size %0d: %h (%f) ok", LANE, q3 ? "Q3_K" : "Q8_0", size, r[31:0], f2r(r[31:0]));
    checks++;
    if (int'(exec_cycles) - ex0 != jb.iters + NPE + 2) begin
      failures++;
      $display("FAIL lane %0d EXEC took %0d clocks, expected %0d", LANE,
               int'(exec_cycles) - ex0, jb.iters + NPE + 2);
    end
  endtask
endmodule
