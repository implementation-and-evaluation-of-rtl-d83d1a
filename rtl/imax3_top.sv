// imax3_top: the IMAX3 accelerator core, NLANE independent lanes of NPE PEs.
//
// Each lane has its own host command and response stream, so that software
// can give every lane a different kernel and run the lanes in parallel; in
// the original system those streams come from the host processor and a DMA
// engine over an on-chip network, which are outside this RTL. The lanes share
// only the clock and reset.
//
// Eight lanes of 64 PEs, with 512 KB of local memory per lane, follow the
// paper's main configuration.
module imax3_top
  import imax_pkg::*;
#(
  parameter int unsigned NLANE = NLANE_DEF,
  parameter int unsigned NPE   = NPE_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic  [NLANE-1:0]      cmd_valid,
  output logic  [NLANE-1:0]      cmd_ready,
  input  word_t [NLANE-1:0]      cmd_data,
  output logic  [NLANE-1:0]      rsp_valid,
  input  logic  [NLANE-1:0]      rsp_ready,
  output word_t [NLANE-1:0]      rsp_data,
  output logic  [NLANE-1:0]      busy,
  output phase_e [NLANE-1:0]     phase,
  output logic  [NLANE-1:0][NPHASE-1:0][31:0] phase_cycles
);
  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    imax_lane #(.NPE(NPE)) u_lane (
      .clk         (clk),
      .rst_n       (rst_n),
      .cmd_valid   (cmd_valid[l]),
      .cmd_ready   (cmd_ready[l]),
      .cmd_data    (cmd_data[l]),
      .rsp_valid   (rsp_valid[l]),
      .rsp_ready   (rsp_ready[l]),
      .rsp_data    (rsp_data[l]),
      .phase       (phase[l]),
      .busy        (busy[l]),
      .phase_cycles(phase_cycles[l])
    );
  end
endmodule
