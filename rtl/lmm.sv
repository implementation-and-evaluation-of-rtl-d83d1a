// lmm: the local memory module (LMM) of one PE.
//
// The paper places a local memory next to every PE of the linear array and
// gives the total LMM size of a lane, 512 KB; with 64 PEs that is 8 KB, or
// 1024 words of 64 bits, per PE. This design gives the LMM two synchronous
// read ports, so that one PE can fetch both operands of a multiply (an
// activation word and a weight word) in the same cycle, and one write port
// shared by LOAD transfers and results stored during EXEC. The port count is
// this design's choice.
//
// Timing: read data appear on rdata0/rdata1 one clock after re0/re1 with the
// address; they hold their value while the read enable is low. A write takes
// effect at the clock edge. A read and a write to the same address in the
// same cycle return the old word.
module lmm
  import imax_pkg::*;
#(
  parameter int unsigned DEPTH = LMM_WORDS,
  parameter int unsigned ABITS = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re0,
  input  logic [ABITS-1:0] raddr0,
  output word_t            rdata0,
  input  logic             re1,
  input  logic [ABITS-1:0] raddr1,
  output word_t            rdata1,
  input  logic             we,
  input  logic [ABITS-1:0] waddr,
  input  word_t            wdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end
endmodule
