// imax_pe: one processing element (PE) of the IMAX linear array.
//
// A PE is one pipeline stage of the lane. It holds
//   - configuration registers written by the lane controller: the
//     instruction (CONF phase), a 64-bit constant (REGV phase) and three
//     address generators (RANGE phase), each of the form base + iter*stride;
//   - its local memory (lmm) with two read ports and one write port;
//   - the ALU (pe_alu) and the F32 accumulator used by OP_DEQ (UPDATE).
//
// During a burst (EXEC phase) a token carrying the iteration number travels
// down the array one PE per clock together with a bus of NSLOT 64-bit slots.
// Because every PE also sees the token one cycle early (pre_tok, the token
// that is entering the previous PE), it starts its LMM reads in time for the
// data to be ready when the token arrives: a PE therefore accepts one
// iteration per clock and adds one clock of latency. The PE takes up to three
// operands from bus slots, its LMM read ports, its constant or zero, writes
// its result into slot dst of the outgoing bus, and, if cfg.st is set, also
// stores the result into its own LMM (that is how results reach the DRAIN
// phase). The accumulator restarts from the low 32 bits of the constant on
// the first iteration of every burst.
//
// Outside a burst the lane controller reads and writes the LMM through the
// host_* ports (LOAD and DRAIN phases; read data one clock after host_re).
//
// The paper gives the linear array of PEs, each with a pipelined ALU and a
// local memory, and the phase names. Slot bus, lookahead token, address
// generators and the accumulator restart are this design's choices.
module imax_pe
  import imax_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // configuration writes (already decoded for this PE)
  input  logic          cfg_we,
  input  logic          rng_we,
  input  logic          reg_we,
  input  word_t         cfg_wdata,
  // host access to the LMM
  input  logic          host_we,
  input  logic          host_re,
  input  logic [AW-1:0] host_addr,
  input  word_t         host_wdata,
  output word_t         host_rdata,
  // linear array
  input  tok_t          pre_tok,   // token entering the previous PE this cycle
  input  bus_t          bus_in,    // registered output of the previous PE
  output bus_t          bus_out    // registered output of this PE
);
  pe_cfg_t     cfg;
  pe_range_t   rng;
  word_t       regv;
  logic [31:0] acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg  <= '{op: OP_NOP, sa: SRC_ZERO, sb: SRC_ZERO, sc: SRC_ZERO, dst: 2'd0, st: 1'b0};
      rng  <= '0;
      regv <= '0;
    end else begin
      if (cfg_we) cfg  <= pe_cfg_t'(cfg_wdata[$bits(pe_cfg_t)-1:0]);
      if (rng_we) rng  <= pe_range_t'(cfg_wdata[$bits(pe_range_t)-1:0]);
      if (reg_we) regv <= cfg_wdata;
    end
  end

  // ------------------------------------------------------------------ LMM
  logic [AW-1:0] ea0, ea1, eaw;
  logic          re0, we;
  logic [AW-1:0] raddr0, waddr;
  word_t         rd0, rd1, wdata, y;

  assign ea0    = rng.base0 + AW'(pre_tok.iter) * rng.stride0;
  assign ea1    = rng.base1 + AW'(pre_tok.iter) * rng.stride1;
  assign eaw    = rng.basew + AW'(bus_in.tok.iter) * rng.stridew;
  assign re0    = pre_tok.valid | host_re;
  assign raddr0 = host_re ? host_addr : ea0;
  assign we     = host_we | (bus_in.tok.valid & cfg.st & (cfg.op != OP_NOP));
  assign waddr  = host_we ? host_addr : eaw;
  assign wdata  = host_we ? host_wdata : y;

  lmm u_lmm (
    .clk   (clk),
    .re0   (re0),
    .raddr0(raddr0),
    .rdata0(rd0),
    .re1   (pre_tok.valid),
    .raddr1(ea1),
    .rdata1(rd1),
    .we    (we),
    .waddr (waddr),
    .wdata (wdata)
  );

  assign host_rdata = rd0;

  // ------------------------------------------------------------------ ALU
  function automatic word_t pick(src_e s, bus_t bi, word_t r0, word_t r1, word_t rv);
    unique case (s)
      SRC_SLOT0: return bi.slot[0];
      SRC_SLOT1: return bi.slot[1];
      SRC_SLOT2: return bi.slot[2];
      SRC_SLOT3: return bi.slot[3];
      SRC_LMM0:  return r0;
      SRC_LMM1:  return r1;
      SRC_REG:   return rv;
      default:   return '0;
    endcase
  endfunction

  word_t       opa, opb, opc;
  logic [31:0] acc_in, acc_nxt;

  assign opa    = pick(cfg.sa, bus_in, rd0, rd1, regv);
  assign opb    = pick(cfg.sb, bus_in, rd0, rd1, regv);
  assign opc    = pick(cfg.sc, bus_in, rd0, rd1, regv);
  assign acc_in = bus_in.tok.first ? regv[31:0] : acc_q;

  pe_alu u_alu (
    .op     (cfg.op),
    .a      (opa),
    .b      (opb),
    .c      (opc),
    .acc    (acc_in),
    .y      (y),
    .acc_nxt(acc_nxt)
  );

  // ------------------------------------------------------------ pipeline
  tok_t                     tok_q;
  logic [NSLOT-1:0][DW-1:0] slot_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_q <= '0;
      acc_q <= '0;
    end else begin
      tok_q <= bus_in.tok;
      if (bus_in.tok.valid && cfg.op == OP_DEQ) acc_q <= acc_nxt;
    end
  end

  always_ff @(posedge clk) begin
    slot_q <= bus_in.slot;
    if (bus_in.tok.valid && cfg.op != OP_NOP) slot_q[cfg.dst] <= y;
  end

  assign bus_out = '{tok: tok_q, slot: slot_q};

  // the host must not touch the LMM while a burst is using it
  a_no_host_in_burst: assert property (@(posedge clk) disable iff (!rst_n)
    !((host_we || host_re) && (bus_in.tok.valid || pre_tok.valid)));
endmodule
