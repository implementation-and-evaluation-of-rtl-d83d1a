// tb_imax3_top: end-to-end test of the full accelerator at its default size
// (8 lanes of 64 PEs, 1024-word LMM per PE).
//
// All eight lanes run concurrently, each from its own host thread: even lanes
// run a Q8_0 job and then a Q3_K job, odd lanes the other way round, with
// different sizes per lane, so every lane is reconfigured between kernels and
// its accumulator restarts. Command streams have random idle cycles and the
// response ports random back-pressure. Every drained result is compared bit
// for bit with the reference, every EXEC phase must take iterations + 64 + 2
// clocks, and the testbench counts how often each mechanism occurred (each
// host phase, each instruction kind, command idle cycles, response
// back-pressure, several lanes busy at once, accumulator restart); one that
// never occurred counts as a failure.
module tb_imax3_top;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_kernel_pkg::*;

  localparam int NL  = NLANE_DEF;
  localparam int NPE = NPE_DEF;

  logic clk = 0, rst_n = 0;
  logic  [NL-1:0] cmd_valid, cmd_ready, rsp_valid, rsp_ready, busy;
  word_t [NL-1:0] cmd_data, rsp_data;
  phase_e [NL-1:0] phase;
  logic  [NL-1:0][NPHASE-1:0][31:0] phase_cycles;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_phase [NPHASE];
  int n_sml8 = 0, n_cvt53 = 0, n_deq = 0, n_gap = 0, n_bp = 0, n_multi = 0, n_restart = 0;

  imax3_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NL; l++) n_phase[phase[l]]++;
    if ($countones(busy) >= 2) n_multi++;
    for (int l = 0; l < NL; l++) if (rsp_valid[l] && !rsp_ready[l]) n_bp++;
  end

  int h_checks [NL], h_failures [NL], h_gap [NL], h_sml8 [NL], h_cvt53 [NL], h_deq [NL];
  logic [NL-1:0] lane_done = '0;

  for (genvar l = 0; l < NL; l++) begin : g_host
    tb_lane_host #(.LANE(l), .NPE(NPE)) u_host (
      .clk        (clk),
      .cmd_valid  (cmd_valid[l]),
      .cmd_ready  (cmd_ready[l]),
      .cmd_data   (cmd_data[l]),
      .rsp_valid  (rsp_valid[l]),
      .rsp_ready  (rsp_ready[l]),
      .rsp_data   (rsp_data[l]),
      .exec_cycles(phase_cycles[l][PH_EXEC]),
      .checks     (h_checks[l]),
      .failures   (h_failures[l]),
      .n_gap      (h_gap[l]),
      .n_sml8     (h_sml8[l]),
      .n_cvt53    (h_cvt53[l]),
      .n_deq      (h_deq[l])
    );
    // even lanes: Q8_0 then Q3_K; odd lanes: Q3_K then Q8_0
    initial begin
      wait (rst_n);
      u_host.run_job(l % 2 == 1, 1 + l % 3, 32'd0);
      u_host.run_job(l % 2 == 0, 1 + (l + 1) % 3, {1'b0, 8'(120 + l), 23'($urandom)});
      n_restart++;
      lane_done[l] = 1'b1;
    end
  end

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never occurred: %s", what); end
    else $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    foreach (n_phase[i]) n_phase[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&lane_done);
    for (int l = 0; l < NL; l++) begin
      checks += h_checks[l]; failures += h_failures[l]; n_gap += h_gap[l];
      n_sml8 += h_sml8[l]; n_cvt53 += h_cvt53[l]; n_deq += h_deq[l];
    end
    expect_seen("CONF clocks", n_phase[PH_CONF]);
    expect_seen("REGV clocks", n_phase[PH_REGV]);
    expect_seen("RANGE clocks", n_phase[PH_RANGE]);
    expect_seen("LOAD clocks", n_phase[PH_LOAD]);
    expect_seen("EXEC clocks", n_phase[PH_EXEC]);
    expect_seen("DRAIN clocks", n_phase[PH_DRAIN]);
    expect_seen("OP_SML8 operations", n_sml8);
    expect_seen("OP_CVT53 operations", n_cvt53);
    expect_seen("OP_DEQ (UPDATE) operations", n_deq);
    expect_seen("command idle cycles", n_gap);
    expect_seen("response back-pressure", n_bp);
    expect_seen("clocks with >=2 lanes busy", n_multi);
    expect_seen("accumulator restarts", n_restart);
    // cross-check the phase counters of the lanes against the monitor
    for (int p = 1; p < NPHASE; p++) begin
      int s;
      s = 0;
      for (int l = 0; l < NL; l++) s += int'(phase_cycles[l][p]);
      checks++;
      if (s != n_phase[p]) begin
        failures++;
        $display("FAIL phase %0d counters %0d monitor %0d", p, s, n_phase[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
