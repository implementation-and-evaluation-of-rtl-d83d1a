// tb_kernel_pkg: host-side software model for the lane testbenches.
//
// Builds the command stream that maps one quantised dot product onto a lane
// and computes the expected F32 result with reference arithmetic.
//
// Mapping (the same for both kernels): multiply PEs m_0..m_{n-1} sit at PE
// 0, 1, 3, 5, ..., 2n-3, each reading an activation word (LMM port 0, words
// 0..K-1) and a weight word (LMM port 1, words 512..512+K-1). An OP_AD24 PE
// at 2, 4, ..., 2n-2 adds the running sum (slot 0) and the newest product
// (slot 1). The OP_DEQ PE at 2n-1 reads the F16 scales from its own LMM,
// accumulates in F32 and stores the accumulator to word RES_ADDR, from which
// DRAIN returns it. All remaining PEs are configured as OP_NOP.
//   Q8_0: one iteration = one 32-element block, n = 8 OP_SML8 PEs (16 PEs).
//   Q3_K: one iteration = a quarter of a 256-element super-block (64
//         elements), n = 16 OP_CVT53 PEs (32 PEs); four iterations per
//         super-block.
// int8 elements sit at bits 16*t+7:16*t of a word (t = 0..3); every other
// bit of the data words is filled with random values, which the lane must
// ignore.
package tb_kernel_pkg;
  import imax_pkg::*;
  import tb_fp_pkg::*;

  localparam int RES_ADDR = 1000;
  localparam int WBASE    = 512;

  typedef struct {
    logic [31:0] expected;
    int          iters;
    int          drain_pe;
  } job_t;

  function automatic word_t hdr(phase_e ph, int pe, int addr, int count);
    cmd_t c;
    c       = '0;
    c.phase = ph;
    c.pe    = 16'(pe);
    c.addr  = 16'(addr);
    c.count = 16'(count);
    return word_t'(c);
  endfunction

  function automatic word_t cfgw(op_e op, src_e sa, src_e sb, src_e sc, int dst, bit st);
    pe_cfg_t c;
    c = '{op: op, sa: sa, sb: sb, sc: sc, dst: 2'(dst), st: st};
    return word_t'(c);
  endfunction

  function automatic word_t rngw(int b0, int s0, int b1, int s1, int bw, int sw);
    pe_range_t r;
    r = '{base0: AW'(b0), stride0: AW'(s0), base1: AW'(b1), stride1: AW'(s1),
          basew: AW'(bw), stridew: AW'(sw)};
    return word_t'(r);
  endfunction

  function automatic void put1(ref word_t q[$], input phase_e ph, input int pe, input word_t d);
    q.push_back(hdr(ph, pe, 0, 1));
    q.push_back(d);
  endfunction

  function automatic int mul_pe(int j);
    return (j == 0) ? 0 : 2 * j - 1;
  endfunction

  // configure the reduction chain; returns the index of the OP_DEQ PE
  function automatic int chain_conf(ref word_t q[$], input op_e mop, input int nmul,
                                    input int npe, input logic [31:0] acc0);
    int dq;
    for (int j = 0; j < nmul; j++) begin
      put1(q, PH_CONF, mul_pe(j), cfgw(mop, SRC_LMM0, SRC_LMM1, SRC_ZERO, (j == 0) ? 0 : 1, 0));
      put1(q, PH_RANGE, mul_pe(j), rngw(0, 1, WBASE, 1, 0, 0));
      if (j > 0) put1(q, PH_CONF, 2 * j, cfgw(OP_AD24, SRC_SLOT0, SRC_SLOT1, SRC_ZERO, 0, 0));
    end
    dq = 2 * nmul - 1;
    put1(q, PH_CONF, dq, cfgw(OP_DEQ, SRC_LMM0, SRC_LMM1, SRC_SLOT0, 2, 1));
    put1(q, PH_RANGE, dq, rngw(0, 1, WBASE, 1, RES_ADDR, 0));
    put1(q, PH_REGV, dq, {32'($urandom), acc0});
    for (int p = dq + 1; p < npe; p++)
      put1(q, PH_CONF, p, cfgw(OP_NOP, SRC_ZERO, SRC_ZERO, SRC_ZERO, 0, 0));
    return dq;
  endfunction

  function automatic void load(ref word_t q[$], input int pe, input int addr, input word_t d[$]);
    q.push_back(hdr(PH_LOAD, pe, addr, d.size()));
    foreach (d[i]) q.push_back(d[i]);
  endfunction

  function automatic word_t pack4(int v [4]);
    word_t w;
    w = {$urandom, $urandom};
    for (int t = 0; t < 4; t++) w[16*t +: 8] = 8'(v[t]);
    return w;
  endfunction

  function automatic int rand_i8();
    return int'($signed(8'($urandom)));
  endfunction

  // ------------------------------------------------------------------ Q8_0
  function automatic job_t job_q8(ref word_t q[$], input int K, input int npe,
                                  input logic [31:0] acc0);
    job_t        jb;
    int          x [][32], w [][32];
    logic [15:0] sd [], wd [];
    word_t       dx [$], dw [$];
    logic [31:0] acc;
    int          dq;
    x  = new[K]; w = new[K]; sd = new[K]; wd = new[K];
    for (int k = 0; k < K; k++) begin
      for (int e = 0; e < 32; e++) begin x[k][e] = rand_i8(); w[k][e] = rand_i8(); end
      sd[k] = rand_h(8, 16);
      wd[k] = rand_h(8, 16);
    end
    dq = chain_conf(q, OP_SML8, 8, npe, acc0);
    for (int j = 0; j < 8; j++) begin
      dx.delete(); dw.delete();
      for (int k = 0; k < K; k++) begin
        int vx [4], vw [4];
        for (int t = 0; t < 4; t++) begin vx[t] = x[k][4*j+t]; vw[t] = w[k][4*j+t]; end
        dx.push_back(pack4(vx));
        dw.push_back(pack4(vw));
      end
      load(q, mul_pe(j), 0, dx);
      load(q, mul_pe(j), WBASE, dw);
    end
    dx.delete(); dw.delete();
    for (int k = 0; k < K; k++) begin
      dx.push_back({$urandom, 16'($urandom), sd[k]});
      dw.push_back({$urandom, 16'($urandom), wd[k]});
    end
    load(q, dq, 0, dx);
    load(q, dq, WBASE, dw);
    q.push_back(hdr(PH_EXEC, 0, 0, K));
    q.push_back(hdr(PH_DRAIN, dq, RES_ADDR, 1));
    acc = acc0;
    for (int k = 0; k < K; k++) begin
      int s;
      s = 0;
      for (int e = 0; e < 32; e++) s += x[k][e] * w[k][e];
      acc = deq_ref(acc, sd[k], wd[k], s);
    end
    jb.expected = acc;
    jb.iters    = K;
    jb.drain_pe = dq;
    return jb;
  endfunction

  // ------------------------------------------------------------------ Q3_K
  // Raw Q3_K super-block: 16 six-bit scales (bias 32), 256 two-bit low parts,
  // 256 high-mask bits, one F16 scale d. Weight value = low - (h ? 0 : 4).
  // Host repacking: 5-bit scale s5 = (sc-32)>>>1 with d doubled, 3-bit weight
  // {~h, low}.
  function automatic job_t job_q3(ref word_t q[$], input int S, input int npe,
                                  input logic [31:0] acc0);
    job_t        jb;
    int          K, dq;
    int          sc [][16], lo [][256], hb [][256], x [][64];
    logic [15:0] d [], sd [];
    word_t       dx [$], dw [$];
    logic [31:0] acc;
    K  = 4 * S;
    sc = new[S]; lo = new[S]; hb = new[S]; d = new[S];
    x  = new[K]; sd = new[K];
    for (int s = 0; s < S; s++) begin
      for (int b = 0; b < 16; b++) sc[s][b] = int'($urandom % 64);
      for (int e = 0; e < 256; e++) begin lo[s][e] = int'($urandom % 4); hb[s][e] = int'($urandom % 2); end
      d[s] = rand_h(8, 16);
    end
    for (int k = 0; k < K; k++) begin
      for (int e = 0; e < 64; e++) x[k][e] = rand_i8();
      sd[k] = rand_h(8, 16);
    end
    dq = chain_conf(q, OP_CVT53, 16, npe, acc0);
    for (int j = 0; j < 16; j++) begin
      dx.delete(); dw.delete();
      for (int k = 0; k < K; k++) begin
        int    vx [4], s, t;
        word_t ww;
        s = k / 4; t = k % 4;
        for (int u = 0; u < 4; u++) vx[u] = x[k][4*j+u];
        dx.push_back(pack4(vx));
        ww = {$urandom, $urandom};
        for (int l = 0; l < 2; l++) begin
          int e0, sub;
          e0  = 64 * t + 4 * j + 2 * l;
          sub = e0 / 16;
          ww[32*l +: 3]      = {~1'(hb[s][e0]), 2'(lo[s][e0])};
          ww[32*l + 16 +: 3] = {~1'(hb[s][e0+1]), 2'(lo[s][e0+1])};
          ww[32*l + 8 +: 5]  = 5'((sc[s][sub] - 32) >>> 1);
        end
        dw.push_back(ww);
      end
      load(q, mul_pe(j), 0, dx);
      load(q, mul_pe(j), WBASE, dw);
    end
    dx.delete(); dw.delete();
    for (int k = 0; k < K; k++) begin
      logic [15:0] d2;
      d2 = d[k/4];
      d2[14:10] = d2[14:10] + 5'd1;           // doubled: compensates the halved scale
      dx.push_back({$urandom, 16'($urandom), sd[k]});
      dw.push_back({$urandom, 16'($urandom), d2});
    end
    load(q, dq, 0, dx);
    load(q, dq, WBASE, dw);
    q.push_back(hdr(PH_EXEC, 0, 0, K));
    q.push_back(hdr(PH_DRAIN, dq, RES_ADDR, 1));
    acc = acc0;
    for (int k = 0; k < K; k++) begin
      int          isum, s, t;
      logic [15:0] d2;
      s = k / 4; t = k % 4;
      isum = 0;
      for (int e = 0; e < 64; e++) begin
        int ee, wq, s5;
        ee   = 64 * t + e;
        wq   = lo[s][ee] - (hb[s][ee] ? 0 : 4);
        s5   = (sc[s][ee/16] - 32) >>> 1;
        isum += s5 * wq * x[k][e];
      end
      d2 = d[s];
      d2[14:10] = d2[14:10] + 5'd1;
      acc = deq_ref(acc, sd[k], d2, isum);
    end
    jb.expected = acc;
    jb.iters    = K;
    jb.drain_pe = dq;
    return jb;
  endfunction
endpackage
