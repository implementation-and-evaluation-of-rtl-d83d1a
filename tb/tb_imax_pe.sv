// tb_imax_pe: one PE driven the way its neighbours drive it.
//
// The testbench plays the previous PE: each clock it presents the lookahead
// token (pre_tok) and, one clock later, the same token on bus_in together
// with random slot data, with random bubbles. Four programs are run:
//   1. OP_SML8 on two LMM words (ports 0 and 1, stride 1), result to slot 1
//      and stored into the LMM, then read back through the host port;
//   2. OP_CVT53 with operand a from slot 3 and b from LMM port 1;
//   3. OP_AD24 of slot 0 and the REGV constant, result to slot 2;
//   4. OP_DEQ (F16 scales from the LMM, integer sum from slot 2), with the
//      accumulator restarting from the REGV value on the first iteration and
//      the running value stored to one LMM word (stride 0);
// plus OP_NOP, which must pass the bus unchanged. Every bus_out word is
// compared with the reference, and the untouched slots must pass through.
module tb_imax_pe;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 40;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, rng_we = 0, reg_we = 0, host_we = 0, host_re = 0;
  word_t cfg_wdata = '0, host_wdata = '0, host_rdata;
  logic [AW-1:0] host_addr = '0;
  tok_t pre_tok = '0;
  bus_t bus_in = '0, bus_out;
  int checks = 0, failures = 0;

  word_t mem [LMM_WORDS];
  word_t regv;

  imax_pe dut (.*);

  always #5 clk = ~clk;

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

  task automatic wr(ref logic we, input word_t d);
    @(negedge clk); we = 1; cfg_wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic hwrite(int a, word_t d);
    @(negedge clk); host_we = 1; host_addr = AW'(a); host_wdata = d; mem[a] = d;
    @(negedge clk); host_we = 0;
  endtask

  function automatic word_t pick(src_e s, bus_t b, word_t r0, word_t r1);
    case (s)
      SRC_SLOT0: return b.slot[0];
      SRC_SLOT1: return b.slot[1];
      SRC_SLOT2: return b.slot[2];
      SRC_SLOT3: return b.slot[3];
      SRC_LMM0:  return r0;
      SRC_LMM1:  return r1;
      SRC_REG:   return regv;
      default:   return '0;
    endcase
  endfunction

  // run a burst of N iterations; returns the final accumulator of the model
  task automatic burst(pe_cfg_t c, pe_range_t r);
    tok_t        t [$];
    bus_t        prev;
    logic [31:0] acc;
    int          it;
    it = 0;
    while (it < N) begin
      tok_t x;
      x = '0;
      if ($urandom % 4 != 0) begin x.valid = 1; x.first = (it == 0); x.iter = ITW'(it); it++; end
      t.push_back(x);
    end
    t.push_back('0);
    prev = '0;
    acc  = 32'd0;
    foreach (t[i]) begin
      bus_t  cur, e;
      word_t r0, r1, a, b, cc, y;
      @(negedge clk);
      pre_tok = t[i];
      cur.tok = (i == 0) ? tok_t'('0) : t[i-1];
      for (int s = 0; s < NSLOT; s++) cur.slot[s] = {$urandom, $urandom};
      if (c.op == OP_DEQ) begin      // keep the integer operand inside 24 bits
        cur.slot[2][31:0]  = 32'(int'($urandom % 200001) - 100000);
        cur.slot[2][63:32] = 32'(int'($urandom % 200001) - 100000);
      end
      bus_in = cur;
      // expected output for this token
      e = cur;
      if (cur.tok.valid && c.op != OP_NOP) begin
        r0 = mem[AW'(r.base0 + AW'(cur.tok.iter) * r.stride0)];
        r1 = mem[AW'(r.base1 + AW'(cur.tok.iter) * r.stride1)];
        a  = pick(c.sa, cur, r0, r1);
        b  = pick(c.sb, cur, r0, r1);
        cc = pick(c.sc, cur, r0, r1);
        case (c.op)
          OP_SML8:  y = sml8_ref(a, b);
          OP_AD24:  y = ad24_ref(a, b);
          OP_CVT53: y = cvt53_ref(a, b);
          default: begin
            if (cur.tok.first) acc = regv[31:0];
            acc = deq_ref(acc, a[15:0], b[15:0], int'($signed(cc[23:0])) + int'($signed(cc[55:32])));
            y = {32'd0, acc};
          end
        endcase
        e.slot[c.dst] = y;
        if (c.st) mem[AW'(r.basew + AW'(cur.tok.iter) * r.stridew)] = y;
      end
      @(posedge clk); #1;
      chk(bus_out.tok == e.tok, "token");
      if (e.tok.valid)
        chk(bus_out.slot == e.slot, $sformatf("slots op=%s iter=%0d got=%h exp=%h", c.op.name(),
            e.tok.iter, bus_out.slot[c.dst], e.slot[c.dst]));
    end
    @(negedge clk); pre_tok = '0; bus_in = '0;
  endtask

  task automatic readback(int a0, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); host_re = 1; host_addr = AW'(a0 + i);
      @(posedge clk); #1;
      chk(host_rdata == mem[a0 + i], $sformatf("readback %0d got=%h exp=%h", a0 + i, host_rdata, mem[a0 + i]));
      @(negedge clk); host_re = 0;
    end
  endtask

  initial begin
    pe_cfg_t   c;
    pe_range_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LMM contents: random words, scale words with a sane F16 in [15:0]
    for (int i = 0; i < 2 * N; i++) hwrite(i, {$urandom, $urandom});
    for (int i = 512; i < 512 + 2 * N; i++) hwrite(i, {$urandom, $urandom});
    for (int i = 300; i < 300 + N; i++) hwrite(i, {$urandom, 16'($urandom), rand_h(8, 16)});
    for (int i = 400; i < 400 + N; i++) hwrite(i, {$urandom, 16'($urandom), rand_h(8, 16)});
    regv = {$urandom, 1'b0, 8'd127, 23'($urandom)};
    wr(reg_we, regv);

    // 1. SML8 from the LMM, stored
    c = '{op: OP_SML8, sa: SRC_LMM0, sb: SRC_LMM1, sc: SRC_ZERO, dst: 2'd1, st: 1'b1};
    r = '{base0: 10'd0, stride0: 10'd1, base1: 10'd512, stride1: 10'd1, basew: 10'd800, stridew: 10'd1};
    wr(cfg_we, word_t'(c)); wr(rng_we, word_t'(r));
    burst(c, r);
    readback(800, N);
    // 2. CVT53, operand a from the bus, stride 2 on port 1
    c = '{op: OP_CVT53, sa: SRC_SLOT3, sb: SRC_LMM1, sc: SRC_ZERO, dst: 2'd0, st: 1'b0};
    r = '{base0: 10'd0, stride0: 10'd0, base1: 10'd513, stride1: 10'd2, basew: 10'd0, stridew: 10'd0};
    wr(cfg_we, word_t'(c)); wr(rng_we, word_t'(r));
    burst(c, r);
    // 3. AD24 of a slot and the constant
    c = '{op: OP_AD24, sa: SRC_SLOT0, sb: SRC_REG, sc: SRC_ZERO, dst: 2'd2, st: 1'b0};
    wr(cfg_we, word_t'(c));
    burst(c, r);
    // 4. DEQ with UPDATE, stored to one word
    c = '{op: OP_DEQ, sa: SRC_LMM0, sb: SRC_LMM1, sc: SRC_SLOT2, dst: 2'd3, st: 1'b1};
    r = '{base0: 10'd300, stride0: 10'd1, base1: 10'd400, stride1: 10'd1, basew: 10'd900, stridew: 10'd0};
    wr(cfg_we, word_t'(c)); wr(rng_we, word_t'(r));
    burst(c, r);
    burst(c, r);          // second burst: accumulator must restart
    readback(900, 1);
    // 5. NOP passes the bus
    c = '{op: OP_NOP, sa: SRC_LMM0, sb: SRC_LMM1, sc: SRC_SLOT2, dst: 2'd3, st: 1'b1};
    wr(cfg_we, word_t'(c));
    burst(c, r);
    readback(900, 1);     // NOP must not store
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
