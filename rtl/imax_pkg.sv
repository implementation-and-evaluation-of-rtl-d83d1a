// imax_pkg: types and constants shared by the IMAX3 lane.
//
// A lane is a linear array of processing elements (PEs). Every PE holds a
// 64-bit datapath that is treated as two 32-bit SIMD lanes ("2-way"), a local
// memory module (LMM) and a small set of configuration registers written by
// the lane controller. Data move down the array on a bus of NSLOT 64-bit slots
// that is registered once in every PE; each PE may overwrite one slot with its
// result.
//
// Taken from the paper: 64 PEs per lane, 8 lanes, 512 KB of LMM per lane, the
// instruction names OP_SML8, OP_AD24 and OP_CVT53, the dequantisation step and
// the host phases CONF, REGV, RANGE, LOAD, EXEC and DRAIN. The encodings, slot
// count, word width, command format and address-generator form are this
// design's own choices.
package imax_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DW        = 64;    // PE datapath / LMM word width
  localparam int unsigned NSLOT     = 4;     // slots on the inter-PE bus
  localparam int unsigned NPE_DEF   = 64;    // PEs per lane (paper)
  localparam int unsigned NLANE_DEF = 8;     // lanes (paper)
  localparam int unsigned LANE_LMM_BYTES = 512 * 1024;               // paper
  localparam int unsigned LMM_WORDS = LANE_LMM_BYTES / NPE_DEF / (DW / 8); // 1024
  localparam int unsigned AW        = $clog2(LMM_WORDS);             // 10
  localparam int unsigned ITW       = 16;    // iteration counter width

  typedef logic [DW-1:0] word_t;

  // ---------------------------------------------------------- instructions
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,   // pass the bus unchanged
    OP_SML8  = 3'd1,   // 2-way int8 multiply-add -> int24
    OP_AD24  = 3'd2,   // 2-way int24 add
    OP_CVT53 = 3'd3,   // 2-way 5-bit scale x 3-bit weight x int8 -> int24
    OP_DEQ   = 3'd4    // F16 scales x int sum, F32 accumulate (UPDATE)
  } op_e;

  // operand sources
  typedef enum logic [2:0] {
    SRC_SLOT0 = 3'd0,
    SRC_SLOT1 = 3'd1,
    SRC_SLOT2 = 3'd2,
    SRC_SLOT3 = 3'd3,
    SRC_LMM0  = 3'd4,  // LMM read port 0 (address generator 0)
    SRC_LMM1  = 3'd5,  // LMM read port 1 (address generator 1)
    SRC_REG   = 3'd6,  // constant written in the REGV phase
    SRC_ZERO  = 3'd7
  } src_e;

  // per-PE instruction (CONF phase), 15 bits
  typedef struct packed {
    op_e        op;
    src_e       sa;
    src_e       sb;
    src_e       sc;
    logic [1:0] dst;   // slot that receives the result
    logic       st;    // store the result into the LMM every iteration
  } pe_cfg_t;

  // per-PE address generators (RANGE phase): addr = base + iter * stride
  typedef struct packed {
    logic [AW-1:0] base0;
    logic [AW-1:0] stride0;
    logic [AW-1:0] base1;
    logic [AW-1:0] stride1;
    logic [AW-1:0] basew;
    logic [AW-1:0] stridew;
  } pe_range_t;

  // token that travels with the data down the array during EXEC
  typedef struct packed {
    logic           valid;
    logic           first;  // first iteration of the burst: accumulators restart
    logic [ITW-1:0] iter;
  } tok_t;

  typedef struct packed {
    tok_t                  tok;
    logic [NSLOT-1:0][DW-1:0] slot;
  } bus_t;

  // ------------------------------------------------------------- host side
  typedef enum logic [3:0] {
    PH_IDLE  = 4'd0,
    PH_CONF  = 4'd1,   // one data word: pe_cfg_t in the low bits
    PH_REGV  = 4'd2,   // one data word: the PE's constant register
    PH_RANGE = 4'd3,   // one data word: pe_range_t in the low bits
    PH_LOAD  = 4'd4,   // count data words into the PE's LMM from addr
    PH_EXEC  = 4'd5,   // burst of count iterations, no data words
    PH_DRAIN = 4'd6    // count words read from the PE's LMM from addr
  } phase_e;

  localparam int unsigned NPHASE = 7;

  // command header word
  typedef struct packed {
    phase_e      phase;   // [63:60]
    logic [11:0] rsvd;    // [59:48]
    logic [15:0] pe;      // [47:32] PE index
    logic [15:0] addr;    // [31:16] LMM word address
    logic [15:0] count;   // [15:0]  words (LOAD/DRAIN) or iterations (EXEC)
  } cmd_t;

endpackage
