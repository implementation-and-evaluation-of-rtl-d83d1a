# IMAX3 lane RTL: quantised dot products on a coarse-grained linear array

IMAX3 is a general-purpose accelerator built as a *coarse-grained linear
array* (CGLA): a chain of 64 processing elements (PEs), each with its own
ALU and local memory, through which data flow one PE per clock. A kernel is
not compiled into a program counter loop but laid out in space: every PE is
given one instruction and one set of memory address ranges, and a burst of
iterations then streams through the chain. Eight such chains ("lanes") work
independently, each fed by the host.

This RTL implements that structure together with the instructions used to
run the quantised dot products of Stable Diffusion inference (the GGML
`Q8_0` and `Q3_K` formats): a 2-way int8 multiply-add (`OP_SML8`), a 2-way
24-bit add (`OP_AD24`), a Q3_K scale-and-multiply (`OP_CVT53`) and a
floating-point dequantise-and-accumulate step (`OP_DEQ`). With it, one lane
computes a full-length quantised dot product at one block per clock and
returns the single-precision result.

The published description of IMAX3 gives the array organisation, the sizes,
the instruction semantics and the host phases, but not the PE
microarchitecture, the instruction encoding or the host interface. Those
parts are this design's own and are marked as such below and in each file's
header.

## 1. Structure

```
            host command stream (64-bit valid/ready)        DRAIN stream
                        |                                        ^
                  +-----v----------------------------------------+-----+
   lane           |                  lane_ctrl                         |
                  |  CONF / REGV / RANGE / LOAD / EXEC / DRAIN          |
                  +--+--------+--------+--------------------------+-----+
          token +    | config, LMM writes/reads (one PE at a time)
          lookahead  v        v        v                          v
                  +------+ +------+ +------+                  +------+
        bus[0] -->| PE 0 |-| PE 1 |-| PE 2 |- - - - - - - - - | PE 63|--> (unused)
        (zeros)   | ALU  | | ALU  | | ALU  |                  | ALU  |
                  | LMM  | | LMM  | | LMM  |                  | LMM  |
                  +------+ +------+ +------+                  +------+
imax3_top = 8 lanes side by side, each with its own command/response streams
```

| Module | Role |
|---|---|
| `imax3_top` | `NLANE` = 8 independent lanes |
| `imax_lane` | `lane_ctrl` + `NPE` = 64 chained `imax_pe` |
| `lane_ctrl` | decodes host commands, issues EXEC iteration tokens, streams DRAIN data, counts clocks per phase |
| `imax_pe` | configuration registers, address generators, `lmm`, `pe_alu`, F32 accumulator, pipeline register |
| `lmm` | 1024 x 64-bit local memory, two synchronous read ports, one write port |
| `pe_alu` | selects one of the instruction units below |
| `sml8_unit`, `ad24_unit`, `cvt53_unit` | integer SIMD instructions |
| `deq_unit` | F16->F32, int->F32, two F32 multiplies, F32 add (uses `f16_to_f32`, `int_to_f32`, `fp32_mul`, `fp32_add`) |
| `imax_pkg` | shared sizes, opcode and source enums, configuration/command structs |

Sizes at the defaults: 8 lanes x 64 PEs; 512 KB of local memory per lane,
that is 8 KB (1024 words of 64 bits) per PE.

## 2. The datapath word and the integer instructions

Every PE works on 64-bit words treated as two independent 32-bit lanes
("2-way SIMD"). In an operand word carrying int8 data, each 32-bit lane holds
two elements, at bits `[7:0]` and `[23:16]`; the other bits are ignored. A
word therefore carries four elements `e0..e3` at bits `16*t+7 : 16*t`.

* **OP_SML8** - per lane, `y = a0*b0 + a1*b1` as a 24-bit integer,
  sign-extended to 32 bits. One instruction therefore performs four int8
  multiplies.
* **OP_AD24** - per lane, `y = a[23:0] + b[23:0]` modulo 2^24, sign-extended.
  It builds the reduction of SML8/CVT53 results.
* **OP_CVT53** - the Q3_K instruction. A Q3_K weight is stored in GGML as a
  2-bit low part plus one high-mask bit, with a 6-bit scale per 16 weights and
  an F16 scale per 256. Before loading, the host repacks it:
  * weight: 3-bit two's complement `{~hmask, low2}`, which equals
    `low2 - (hmask ? 0 : 4)`, range -4..3;
  * scale: 5-bit signed `s5 = (sc6 - 32) >>> 1`, with the F16 super-block
    scale doubled to compensate (the scale loses its least significant bit,
    an approximation the original authors report as harmless).

  Weight word layout per 32-bit lane: `q0` at `[2:0]`, `s5` at `[12:8]`, `q1`
  at `[18:16]`. The instruction widens both narrow fields to one signed format
  and computes, per lane, `y = s5 * (a0*q0 + a1*q1)` as a sign-extended 24-bit
  value, so its output feeds the same OP_AD24 tree as OP_SML8.

The 24-bit sums never overflow for the two kernels: a Q8_0 block sum is at
most 32 x 128 x 128 = 2^19, a 64-element Q3_K sum at most 64 x 16 x 4 x 128 =
2^19.

## 3. Dequantisation and UPDATE (`OP_DEQ`)

The last stage of either kernel turns an integer block sum into a scaled F32
contribution and adds it to a running total:

```
acc_new = acc + ( f32(sd) * f32(wd) ) * f32( isum.lane0 + isum.lane1 )
```

`sd` and `wd` are the F16 scales of the activation block and of the weight
block (`a[15:0]`, `b[15:0]`), `isum` is the two-lane 24-bit output of the
reduction (operand `c`). Every F32 operation rounds to nearest-even;
subnormal F32 values are read as zero and tiny results flush to zero. F16
subnormal scales are converted exactly. The accumulator lives in the PE; on
the first iteration of a burst it restarts from the low 32 bits of the PE's
REGV constant. The new value is also written to the PE's result slot and, if
the PE's store bit is set, to its local memory, which is how the host
collects it.

The drawn dequantisation block of the original design has the same set of
units (two F16 converters, one integer converter, two multipliers, one adder
and a feedback path) but also an F32 input whose source is not explained; the
equation above is the GGML definition of a quantised block dot product and is
what this RTL computes.

## 4. How a burst moves through the array

This is the part of the design with the tightest timing, so it is worth
reading before changing anything.

* The lane controller issues one **token** `{valid, first, iter}` per clock
  for `count` clocks. `tok_d` is the token entering the array at the next
  edge; `tok_q` is the registered copy presented to PE 0.
* PE *j* sees iteration *i* on its `bus_in` at clock `t0 + i + j`. Its
  `bus_out` (token plus four 64-bit slots) is a register: one clock per PE.
* The local memory has synchronous reads. So that operand words are ready
  when the token arrives, PE *j* also receives a **lookahead token**: the
  token that is at the input of PE *j-1* (for PE 0, `tok_d`). On that token
  it reads `base0 + iter*stride0` on port 0 and `base1 + iter*stride1` on
  port 1; one clock later the data and the token meet in the ALU.
* Each PE picks operands `a`, `b`, `c` from one of: the four bus slots, LMM
  port 0, LMM port 1, its REGV constant, zero. Its result overwrites slot
  `dst`; other slots pass unchanged. An `OP_NOP` PE passes everything.
* If the store bit is set, the result is written to `basew + iter*stridew`
  of the PE's own memory in the same clock. A stride of zero keeps only the
  last value (used for the accumulator).
* After the last token, the controller waits until it has left PE 63. An
  EXEC command therefore takes `count + NPE + 2` clocks: one iteration per
  clock plus a fixed 66-clock tail at 64 PEs.

An assertion in each PE flags a host access to its memory while a token is
inside it.

## 5. Host interface and phases

A lane is driven through six phases (CONF, REGV, RANGE, LOAD, EXEC, DRAIN),
the same split the original system uses to account for time. The host sends
64-bit words on a valid/ready stream. Each command starts with a header
(`cmd_t`):

| bits | field |
|---|---|
| 63:60 | phase: 1 CONF, 2 REGV, 3 RANGE, 4 LOAD, 5 EXEC, 6 DRAIN |
| 47:32 | PE index (ignored for EXEC) |
| 31:16 | LMM word address (LOAD, DRAIN) |
| 15:0 | count: words (LOAD, DRAIN) or iterations (EXEC) |

| phase | data words that follow | effect |
|---|---|---|
| CONF | 1: `pe_cfg_t` in the low 15 bits (`op`, `sa`, `sb`, `sc`, `dst`, `st`) | the PE's instruction |
| REGV | 1: 64-bit constant | the PE's constant / accumulator start |
| RANGE | 1: `pe_range_t` in the low 60 bits (`base0, stride0, base1, stride1, basew, stridew`, 10 bits each) | address generators |
| LOAD | `count` | written to `addr, addr+1, ...` of the PE's LMM, one per clock |
| EXEC | none | `count` iterations through the whole array |
| DRAIN | none | `count` words from `addr...` returned on the response stream, one per three clocks |

A command addressed to a PE that does not exist is consumed and ignored.
`phase_cycles[p]` counts the clocks the lane has spent in phase `p`; `phase`
and `busy` show the current state. Reset clears every PE to `OP_NOP`.

## 6. Mapping the two kernels

The mapping is software; the testbenches use the following one (in
`tb/tb_kernel_pkg.sv`). Multiply PEs sit at 0, 1, 3, 5, ..., an OP_AD24 PE
after each one from the second on adds it to the running sum, and the
dequantisation PE closes the chain:

| | Q8_0 | Q3_K |
|---|---|---|
| elements per iteration | 32 (one block) | 64 (a quarter super-block) |
| multiply PEs | 8 x OP_SML8 | 16 x OP_CVT53 |
| OP_AD24 PEs | 7 | 15 |
| OP_DEQ PE | PE 15 | PE 31 |
| PEs used | 16 | 32 |

Each multiply PE holds, for its word position, the activation words of all
iterations at LMM addresses 0.. and the weight words at 512..; the OP_DEQ PE
holds the scale pairs at the same addresses and stores its accumulator at
word 1000, from which DRAIN reads the result. One EXEC computes one output
element, a dot product of up to 488 iterations (15,616 Q8_0 elements or
31,232 Q3_K elements). The original work used 46 PEs (Q8_0) and 51 PEs
(Q3_K) with a mapping not described in enough detail to reproduce; any
mapping that fits in 64 PEs runs on this RTL without change.

## 7. What comes from the original design and what does not

Taken from the published description: the linear array of PEs each with an
ALU and local memory; 64 PEs per lane and 8 lanes; 512 KB of local memory
(read here as per lane); the semantics of OP_SML8 (2-way, int8, 24-bit
sign-extended), OP_AD24 (2-way, 24-bit) and OP_CVT53 (5-bit scale, 3-bit
weights, scaling and signed multiply); the Q3_K repacking into 5-bit scales
and 3-bit weights; the units of the dequantisation step and the UPDATE
feedback; the host phases.

This design's own choices: the 64-bit word and element positions; the
weight layout of OP_CVT53 and how the 6-bit scale becomes 5 bits; the
opcode and operand-source encodings; the four-slot inter-PE bus and the
lookahead token; two read ports per local memory; base + iter x stride
address generators; the single-stage PE (the F32 path is combinational
within the stage); the host command format and valid/ready streams;
per-phase clock counters; flush-to-zero of subnormal F32 values.

Departures and gaps to keep in mind:

* Only the instructions of the two quantised kernels exist. The rest of the
  general-purpose IMAX instruction set, its cache/memory protocol and its
  compiler interface are not described and are not built.
* The dequantisation step converts the full integer sum, where one drawing
  labels that converter "I16=>F32" while showing a 24-bit input.
* The PE is one clock stage. The original ASIC projection reaches 840 MHz
  in 28 nm; this RTL has not been timed, and the F32 multiply-multiply-add
  chain of OP_DEQ would need internal pipelining (with the accumulator
  loop adjusted) to approach such a clock.
* The host CPU, the DMA controller, the on-chip network and the DRAM are not
  part of the RTL: each lane's command and response streams are top-level
  ports where they would connect. Host repacking of Q3_K data is modelled
  only in the testbench.
* The F16 and F32 dot products, which take most of the dot-product time in
  Stable Diffusion, run on the host in the original system and have no
  hardware here either.

## 8. Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`),
ending with a `TB_RESULT checks=N failures=M` line:

* `tb_sml8_unit`, `tb_ad24_unit`, `tb_cvt53_unit`: thousands of random
  operands against integer arithmetic; CVT53 starting from raw Q3_K fields
  and the host repacking.
* `tb_deq_unit`, `tb_pe_alu`: bit-exact comparison with reference
  single-precision arithmetic computed in double precision and rounded in
  the testbench (`tb_fp_pkg`).
* `tb_lmm`: both read ports, latency, hold, read-during-write.
* `tb_imax_pe`: the PE between a modelled predecessor, with bubbles, every
  operand source, stores, read-back and accumulator restart.
* `tb_lane_ctrl`: command decoding, LOAD addressing, EXEC token sequence and
  length, DRAIN under back-pressure, out-of-range PEs, phase counters.
* `tb_imax_lane`: a 64-PE lane running Q8_0 and Q3_K dot products end to end,
  compared bit for bit with the reference and checked for the
  `count + 66`-clock EXEC length.
* `tb_imax3_top`: the full default configuration (8 lanes x 64 PEs), all
  lanes at once, each running a Q8_0 and a Q3_K job with random stalls and
  back-pressure; it also counts that each phase, each instruction, idle
  command cycles, back-pressure, concurrent lanes and accumulator restarts
  all occurred.

To run one with Verilator, for example the full-size test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/imax_pkg.sv tb/tb_fp_pkg.sv tb/tb_kernel_pkg.sv tb/tb_imax3_top.sv \
    --top-module tb_imax3_top -o sim
./obj_dir/sim
```

The `-Irtl -Itb` paths let Verilator find every other module by its file
name. Unit testbenches need only `rtl/imax_pkg.sv`, the reference packages
they import (`tb_fp_pkg.sv`, `tb_ref_pkg.sv`, `tb_kernel_pkg.sv`) and their
own file. The full-size build takes a few minutes (mostly C++ compilation);
the simulation itself takes under a second.

Not verified: timing, area and power; any workload beyond randomly generated
blocks of the two formats (real model weights were not used); behaviour with
NaN or infinite scales beyond the unit-level rules.
