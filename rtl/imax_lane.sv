// imax_lane: one IMAX3 lane, a linear array of NPE processing elements fed by
// a lane controller.
//
// The controller (lane_ctrl) decodes host commands and writes the
// configuration registers and local memories of the addressed PE. In an EXEC
// burst it injects one iteration token per clock at the head of the array;
// PE j sees iteration i at clock t0+i+j, so a dot-product mapping that uses
// the first k PEs delivers one result-stream element per clock after a
// latency of k clocks. PE j+1 receives, as its lookahead token, the token at
// the input of PE j. The bus entering PE 0 carries zeros in every slot.
//
// The paper gives 64 PEs per lane in a linear array, each with an ALU and a
// local memory; the way they are chained and addressed is this design's own.
module imax_lane
  import imax_pkg::*;
#(
  parameter int unsigned NPE = NPE_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_valid,
  output logic  cmd_ready,
  input  word_t cmd_data,
  output logic  rsp_valid,
  input  logic  rsp_ready,
  output word_t rsp_data,
  output phase_e phase,
  output logic  busy,
  output logic [NPHASE-1:0][31:0] phase_cycles
);
  logic [15:0]   pe_sel;
  logic          cfg_we, rng_we, reg_we, host_we, host_re;
  logic [AW-1:0] host_addr;
  word_t         host_wdata, host_rdata;
  tok_t          tok_d, tok_q;

  bus_t  bus [NPE+1];
  tok_t  pre [NPE];
  word_t rdata [NPE];

  lane_ctrl #(.NPE(NPE)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_data,
    .rsp_valid, .rsp_ready, .rsp_data,
    .pe_sel, .cfg_we, .rng_we, .reg_we,
    .host_we, .host_re, .host_addr, .host_wdata, .host_rdata,
    .tok_d, .tok_q,
    .phase, .busy, .phase_cycles
  );

  assign bus[0] = '{tok: tok_q, slot: '0};

  for (genvar j = 0; j < NPE; j++) begin : g_pe
    logic sel;
    assign sel    = (pe_sel == 16'(j));
    assign pre[j] = (j == 0) ? tok_d : bus[(j == 0) ? 0 : j - 1].tok;

    imax_pe u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_we    (cfg_we & sel),
      .rng_we    (rng_we & sel),
      .reg_we    (reg_we & sel),
      .cfg_wdata (host_wdata),
      .host_we   (host_we & sel),
      .host_re   (host_re & sel),
      .host_addr (host_addr),
      .host_wdata(host_wdata),
      .host_rdata(rdata[j]),
      .pre_tok   (pre[j]),
      .bus_in    (bus[j]),
      .bus_out   (bus[j+1])
    );
  end

  // read data of the PE addressed by the current command
  always_comb begin
    host_rdata = '0;
    for (int j = 0; j < NPE; j++) if (pe_sel == 16'(j)) host_rdata = rdata[j];
  end
endmodule
