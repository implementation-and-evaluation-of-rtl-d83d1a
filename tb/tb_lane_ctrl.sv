// tb_lane_ctrl: drives the lane controller's command stream directly and
// watches its PE-side outputs (a small PE-side model supplies LMM read data
// one clock after host_re, as the LMM does). Checked:
//   - CONF/REGV/RANGE give exactly one strobe of the right kind, with the
//     data word and the addressed PE;
//   - LOAD gives count writes at consecutive addresses with the data words;
//   - EXEC issues count tokens on consecutive clocks, iterations 0..count-1,
//     'first' only on iteration 0, tok_q is tok_d delayed by one clock, and
//     the phase lasts count + NPE + 2 clocks; EXEC with count 0 issues none;
//   - DRAIN returns count words from consecutive addresses, in order, under
//     random back-pressure;
//   - a command to a PE index out of range writes nothing;
//   - the per-phase clock counters agree with the testbench's own count.
module tb_lane_ctrl;
  import imax_pkg::*;
  import tb_kernel_pkg::hdr;

  localparam int NPE = 12;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  word_t cmd_data = '0, rsp_data, host_wdata, host_rdata = '0;
  logic [15:0] pe_sel;
  logic cfg_we, rng_we, reg_we, host_we, host_re, busy;
  logic [AW-1:0] host_addr;
  tok_t tok_d, tok_q;
  phase_e phase;
  logic [NPHASE-1:0][31:0] phase_cycles;
  int checks = 0, failures = 0;

  // event log written by the monitor
  typedef struct { int kind; int pe; int addr; word_t data; } ev_t;  // kind: 1 cfg 2 rng 3 reg 4 load
  ev_t   evs [$];
  tok_t  toks [$];
  int    ph_count [NPHASE];
  tok_t  tok_d_prev = '0;

  lane_ctrl #(.NPE(NPE)) dut (.*);

  always #5 clk = ~clk;

  function automatic word_t lmm_val(int pe, int a);
    return {16'(pe), 16'(a), 32'hC0DE_0000 + 32'(a)};
  endfunction

  always @(posedge clk) begin
    host_rdata <= host_re ? lmm_val(int'(pe_sel), int'(host_addr)) : host_rdata;
    if (rst_n) begin
      ph_count[phase]++;
      if (cfg_we)  evs.push_back('{1, int'(pe_sel), 0, host_wdata});
      if (rng_we)  evs.push_back('{2, int'(pe_sel), 0, host_wdata});
      if (reg_we)  evs.push_back('{3, int'(pe_sel), 0, host_wdata});
      if (host_we) evs.push_back('{4, int'(pe_sel), int'(host_addr), host_wdata});
      if (tok_d.valid) toks.push_back(tok_d);
      checks++;
      if (tok_q != tok_d_prev) begin failures++; $display("FAIL tok_q is not tok_d delayed"); end
      tok_d_prev <= tok_d;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic send(word_t w);
    while ($urandom % 3 == 0) begin @(negedge clk); cmd_valid = 0; end
    @(negedge clk); cmd_valid = 1; cmd_data = w;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    word_t d [$];
    foreach (ph_count[i]) ph_count[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // single-word phases
    for (int k = 0; k < 12; k++) begin
      phase_e ph;
      int     pe, kind;
      word_t  w;
      ph   = (k % 3 == 0) ? PH_CONF : (k % 3 == 1) ? PH_RANGE : PH_REGV;
      kind = (k % 3 == 0) ? 1 : (k % 3 == 1) ? 2 : 3;
      pe   = int'($urandom % NPE);
      w    = {$urandom, $urandom};
      evs.delete();
      send(hdr(ph, pe, 0, 1)); send(w); wait_idle();
      chk(evs.size() == 1 && evs[0].kind == kind && evs[0].pe == pe && evs[0].data == w,
          $sformatf("%s pe %0d: %0d events", ph.name(), pe, evs.size()));
    end
    // out-of-range PE: nothing written
    evs.delete();
    send(hdr(PH_CONF, NPE + 3, 0, 1)); send('1);
    send(hdr(PH_LOAD, NPE, 5, 2)); send('1); send('1); wait_idle();
    chk(evs.size() == 0, "out-of-range PE wrote");

    // LOAD
    for (int k = 0; k < 3; k++) begin
      int pe, a0, n;
      pe = int'($urandom % NPE); a0 = int'($urandom % 900); n = 1 + int'($urandom % 20);
      evs.delete(); d.delete();
      send(hdr(PH_LOAD, pe, a0, n));
      for (int i = 0; i < n; i++) begin d.push_back({$urandom, $urandom}); send(d[i]); end
      wait_idle();
      chk(evs.size() == n, "LOAD count");
      foreach (evs[i])
        chk(evs[i].kind == 4 && evs[i].pe == pe && evs[i].addr == a0 + i && evs[i].data == d[i],
            $sformatf("LOAD word %0d", i));
    end

    // EXEC
    for (int k = 0; k < 4; k++) begin
      int n, c0, ph0;
      n = (k == 0) ? 0 : 1 + int'($urandom % 30);
      toks.delete();
      ph0 = ph_count[PH_EXEC];
      c0  = int'(phase_cycles[PH_EXEC]);
      send(hdr(PH_EXEC, 0, 0, n)); wait_idle();
      chk(toks.size() == n, $sformatf("EXEC %0d tokens, got %0d", n, toks.size()));
      foreach (toks[i]) chk(toks[i].iter == ITW'(i) && toks[i].first == (i == 0), "token order");
      chk(ph_count[PH_EXEC] - ph0 == n + NPE + 2,
          $sformatf("EXEC %0d took %0d clocks", n, ph_count[PH_EXEC] - ph0));
      chk(int'(phase_cycles[PH_EXEC]) - c0 == n + NPE + 2, "EXEC counter");
    end

    // DRAIN with back-pressure
    for (int k = 0; k < 3; k++) begin
      int pe, a0, n, got;
      pe = int'($urandom % NPE); a0 = int'($urandom % 900); n = 1 + int'($urandom % 10);
      got = 0;
      fork
        send(hdr(PH_DRAIN, pe, a0, n));
        while (got < n) begin
          @(negedge clk); rsp_ready = ($urandom % 2 == 0);
          #1;
          if (rsp_valid && rsp_ready) begin
            chk(rsp_data == lmm_val(pe, a0 + got), $sformatf("DRAIN word %0d got %h", got, rsp_data));
            got++;
          end
        end
      join
      @(negedge clk); rsp_ready = 0;
      wait_idle();
      chk(!rsp_valid, "extra DRAIN word");
    end

    for (int p = 1; p < NPHASE; p++)
      chk(int'(phase_cycles[p]) == ph_count[p], $sformatf("phase %0d counter", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
