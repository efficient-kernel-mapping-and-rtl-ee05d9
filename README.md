# IMAX: a linear PE/LMM array for offloaded LLM dot products

Most of the time in LLM inference goes into dot products. These come from the
linear projections, the attention scores, the attention-weighted values and
the feed-forward network. Their weights are usually quantised to low-bit
integer formats. IMAX is a coarse-grained *linear* array (CGLA). Processing
elements (PEs) and local memories (LMMs) alternate along a single
one-dimensional chain. The host CPU keeps the control-heavy work:
tokenisation, normalisation, rotary encoding, softmax and KV-cache
management. For each dot-product kernel the host does four things:

1. It writes a small program into the PEs over programmed I/O (PIO).
2. It copies the kernel's operands into the LMMs with one DMA burst.
3. It lets the array run.
4. It copies the results back.

Within the array, data moves only from one PE to the next, and each PE reads
only its own LMM. No routing network exists, and no PE depends on another
PE's memory. Weights, activations and scales stream down the chain one
iteration per clock. Every PE performs one step of the dot product on the
iteration passing through it.

This repository is synthesizable SystemVerilog for the accelerator core:

- the PEs with their custom low-bit instructions;
- the double-buffered LMMs;
- the lanes;
- the DMA engine;
- the PIO register file.

The host processor, the on-chip network and the DDR memory sit outside the
core. At the default parameters the core has 2 lanes × 64 PEs, each PE with a
64 KB LMM. This matches the prototype configuration used for the LLM
evaluation, which used 2 of the 8 lanes the FPGA holds.

```
 host PIO ──► imax_ctrl ──► configuration write bus ─────────────┐
                  │ LOAD/DRAIN commands                          │
 DMA in  ──► imax_dma ──► LMM write bus (broadcast) ─────────────┤
 DMA out ◄──    │     ◄── LMM read-back (OR of all PEs) ◄────────┤
                                                                 ▼
 lane 0:  seq ─► PE0+LMM ─► PE1+LMM ─► ... ─► PE63+LMM ─► last_out
 lane 1:  seq ─► PE0+LMM ─► PE1+LMM ─► ... ─► PE63+LMM ─► last_out
```

## A kernel call, step by step

The host performs these steps for every kernel call. The test
`tb_imax_top` drives the core the same way.

1. **CONF / AG1 / AG2 / REGV / RANGE.** PIO writes place into each PE its
   operation word, its two address-generator settings, its constant and its
   LMM window. The host repeats only what changes between calls.
2. **LOAD.** The host has already gathered every input array of the call
   into one contiguous block. Examples are activations, weights, block
   scales and conversion tables. One LOAD command moves the whole block.
   Each word carries an address in a single address space shared by all
   LMMs. Every PE whose RANGE window contains the address stores the word.
   One word can therefore land in several PEs at once, for example an
   activation vector that every row needs.
3. **SWAP.** The freshly loaded buffers pass to the PEs, and the old compute
   buffers pass to the DMA side.
4. **EXEC** with an iteration count N and a lane mask. Each selected lane
   clears its accumulators and pushes N iterations down its chain.
5. **SWAP**, then **DRAIN.** The results that the PEs stored now sit on the
   transfer side. One DRAIN command streams a contiguous address range back
   out.

LOAD and DRAIN only touch the buffers the PEs are not using. The next call's
LOAD can therefore run while the current EXEC runs. SWAP can also be folded
into EXEC with bit 55. In steady state a call is then:

1. one EXEC-with-swap;
2. the previous call's DRAIN, alongside that EXEC;
3. the next call's LOAD, alongside that EXEC.

`tb_imax_top` runs both kinds of overlap and counts them.

## The lane: one pipeline, one iteration per cycle

A lane is `NUM_PE` copies of `imax_pe` connected in a chain. Each link
carries a *bundle* (`stage_t`), registered once per PE:

| field   | width  | meaning                                            |
|---------|--------|----------------------------------------------------|
| `valid` | 1      | this slot carries an iteration                     |
| `idx`   | 16     | iteration index 0..N-1                             |
| `r[0:3]`| 4 × 64 | pipeline registers, operands for the next PE       |

A sequencer at the head of the lane injects N valid bundles, one per cycle,
with `idx` = 0..N-1 and all registers zero. Each PE works on the bundle in
front of it and writes a new bundle one cycle later. The N-th bundle leaves
PE `NUM_PE-1` after `NUM_PE` cycles. The lane therefore reports `busy` for
exactly **N + NUM_PE cycles**, then pulses `done`. Measured from the PIO
write of EXEC, this is N + NUM_PE + 1 cycles.

Only valid bundles change state. Loads, stores and accumulator updates are
all qualified by `valid`. A gap in the stream is therefore harmless.

Data dependences run strictly forward. If PE *k* needs an operand from
memory, PE *k-1* loads it from its own LMM into one of the pipeline
registers, and the operand arrives at PE *k* one cycle later, in the same
bundle as the rest of that iteration's data. In the paper's PE figure, the
LMM output feeds the registers of the next PE, and this lane follows it.
The only backward path is each PE's accumulator, which feeds its own ALU.
This is the "UPDATE" loop of the dot-product kernels.

## Inside a PE

Every cycle with a valid input bundle, a PE does three things:

- **Compute.** It selects three operands `a`, `b`, `c`. Each comes from
  `r0..r3` of the incoming bundle, the constant register REGV, the
  accumulator, or zero. The operands go through ALU1 → ALU2 → ALU3, a
  purely combinational chain:
  - ALU1 is arithmetic: integer SIMD, FP32 and the custom instructions.
  - ALU2 is logical: AND, OR or XOR with operand `c`.
  - ALU3 shifts: 32-bit SIMD or 64-bit, by `shamt`.

  If `res_en` is set, the result replaces outgoing register `res_dst` and
  also becomes the new accumulator. The accumulator is cleared at EXEC start.
- **Load (AG1).** If `ld_en` is set, AG1 reads one word of the PE's compute
  bank into outgoing register `ld_dst`. The read is synchronous. Its data is
  spliced into the registered bundle from the memory's output, so a load
  adds no cycle.
- **Store (AG2).** If `st_en` is set, the ALU result is written to the
  compute bank at the AG2 address.

An address generator computes

```
addr = (base & mask0) + (offset & mask1)
offset = idx * stride                 (stream mode)
offset = r[lut_src][15:0]             (table mode, AG1 with ld_lut = 1)
```

Stream mode walks through an array one entry per iteration. Table mode
turns the LMM into a lookup table indexed by data. The FP16 kernel uses it
for its FP16→FP32 table, and `mask1` bounds the index.

### Configuration registers

All PE registers are 64-bit PIO writes.

| reg | name  | contents (MSB → LSB)                                        |
|-----|-------|-------------------------------------------------------------|
| 0   | CONF  | `conf_t` in bits [33:0], see below                           |
| 1   | AG1   | base[63:48] stride[47:32] mask0[31:16] mask1[15:0]           |
| 2   | AG2   | same layout as AG1, used for stores                          |
| 3   | REGV  | 64-bit constant operand                                      |
| 4   | RANGE | base[63:32] size[31:0] in 64-bit words; size 0 disables      |

`conf_t` fields, from bit 33 down:

| field | bits | field | bits | field | bits |
|---|---|---|---|---|---|
| op1 | 33:30 | sel_b | 15:13 | ld_dst | 5:4 |
| op2 | 29:28 | sel_c | 12:10 | ld_lut | 3 |
| op3 | 27:25 | res_en | 9 | lut_src | 2:1 |
| shamt | 24:19 | res_dst | 8:7 | st_en | 0 |
| sel_a | 18:16 | ld_en | 6 | | |

Operand selectors: 0–3 select `r0`–`r3`, 4 selects REGV, 5 the accumulator
and 6 zero. All addresses are in 64-bit words. The AG address indexes the
PE's compute bank. The RANGE window maps shared address `base + i` to word
`i` of the transfer bank.

## Custom instructions

The 64-bit datapath is used as two 32-bit SIMD halves. The low-bit kernels
share one back end: an integer dot product into 24-bit partial sums, then
one FP32 scale per block. Each format only needs its own front end, which
unpacks its weights into 8-bit or 16-bit integers. The bit layouts below are
this design's. The paper names the instructions and gives their widths, but
not the encodings.

| op | operation |
|----|-----------|
| `SML8`  | `a[31:0]` and `b[31:0]` each hold four int8 values. The result is lo = a0·b0 + a1·b1 and hi = a2·b2 + a3·b3. Each sum is sign-extended from 24 bits into a 32-bit half. |
| `AD24`  | 2-way 24-bit add, results sign-extended. |
| `SUM24` | Adds the two 24-bit halves of `a` into the low half. This is the last adder of the reduction. |
| `SML16` | Like `SML8`, but `a` holds four int16 values (the output of `CVT86`) and `b[31:0]` holds four int8 activations. |
| `CVT86` | Q6_K front end. `a[15:0]` holds four 4-bit QL fields and `a[23:16]` four 2-bit QH fields. The weight is q = {QH,QL} − 32. `b[7:0]` scales elements 0–1 and `b[15:8]` scales elements 2–3. The result is four int16 values q·scale. |
| `CVT53` | Q3_K front end. `a[7:0]` holds four 2-bit QL fields, `a[11:8]` the four high-mask bits, and `b[5:0]` the 6-bit sub-block scale s. The scale is approximated to 5 bits as (s − 32) >>> 1. The 3-bit weight is QL − (mask ? 0 : 4). The result is four int8 products, fed to `SML8`. The dropped scale bit is a factor of two and is folded into the FP32 block scale. |
| `I2F`   | 2-way signed 24-bit integer to FP32. |
| `FMA`, `FMUL`, `FADD` | 2-way FP32 operations: a·b + c, a·b and a + b. |
| `ADD32`, `SUB32`, `PASS` | 2-way 32-bit integer add or subtract, and pass-through of `a`. |

FP32 results are truncated toward zero. Denormals are flushed to zero, and
NaN is not handled. Results are within about one unit in the last place.
`tb_imax_alu` checks a relative error of 1e-6.

## Mapping kernels onto a chain

A kernel is a sequence of PE configurations. The mappings below are the ones
exercised by the testbenches. PE *k* loads what PE *k+1* consumes.

**Q8_0, one row per group of six PEs** (`tb_imax_lane`, `tb_imax_top`).
Each iteration handles 4 elements, so a 32-element block takes 8
iterations, and its scale word is repeated 8 times. `tb_imax_qwen_q8` does
this. `tb_imax_top` uses an independent scale per iteration. The stages are:

| PE | stage |
|----|-------|
| 0 | load x (4 int8 values) → r0 |
| 1 | load w → r1 |
| 2 | `SML8`(r0, r1) → r2, and load the FP32 scale d_x·d_w → r3 (the scale stream has one word per iteration) |
| 3 | `SUM24`(r2) → r2 |
| 4 | `I2F`(r2) → r2 |
| 5 | `FMA`(r2, r3, acc) → acc, and store the accumulator |

The accumulator of PE 5 ends up holding Σ_blocks d·Σ(x·w). A 64-PE lane
holds 10 such groups, so 10 rows per EXEC; the last 4 PEs pass data
through. The top-level test computes 20 rows on 2 lanes. The activation
vector is loaded once and reaches all 20 "load x" PEs, because their RANGE
windows overlap.

**Q8_0 with an AD24 reduction, 8 elements per iteration**
(`tb_imax_kernels`). This version is closer to the paper's Q8_0 dataflow.
Several `SML8` partial sums are combined with `AD24` along the pipeline
before one FP32 scale is applied. The stages are:

| PE | stage |
|----|-------|
| 0 | load x (8 int8 values) → r0 |
| 1 | load w → r1 |
| 2 | `SML8` on the low halves → r2 |
| 3 | `SRL64` x by 32 |
| 4 | `SRL64` w by 32 |
| 5 | `SML8` on the high halves → r0, and load the block scale → r3 |
| 6 | `AD24`(r0, r2) → r2 |
| 7 | `SUM24` |
| 8 | `I2F` |
| 9 | `FMA` into the accumulator |

A 32-element block takes 4 iterations here. Adding more `SML8`/`AD24`
stages widens the same pattern.

**Q6_K** (`tb_imax_kernels`). The stages are:

| PE | stage |
|----|-------|
| 0 | load packed QL/QH |
| 1 | load the two int8 scales |
| 2 | `CVT86`, and load int8 activations |
| 3 | `SML16` |
| 4 | `SUM24`, and load the FP32 super-block scale |
| 5 | `I2F` |
| 6 | `FMA` into the accumulator |

**Q3_K** (`tb_imax_kernels`). This is the same chain with `CVT53` at PE 2
and `SML8` at PE 3. It is the Q8_0 back end behind a different front end.

**FP16** (`tb_imax_kernels`). The stages are:

| PE | stage |
|----|-------|
| 0 | load a word with two FP16 weights |
| 1 | table-mode load of the low FP16 code → FP32 in r1, and `SRL64` the word by 16 |
| 2 | table-mode load of the second code, now in the low bits → FP32 in r2 |
| 3 | `OR` the two converted halves into one 2×FP32 word, and load two FP32 activations |
| 4 | 2-way `FMA` into the accumulator |
| 5, 6 | add the accumulator's two halves with `FADD` |

The conversion tables are ordinary LMM contents and arrive with the LOAD
burst.

## Local memory: double buffer and shared address space

Each LMM (`imax_lmm`) has two banks of `LMM_BYTES/2`, which is 32 KB of
4096 64-bit words by default. At any time one bank belongs to the PE and the
other to the DMA engine. Each side has one synchronous read port and one
write port. A one-cycle `swap` exchanges the roles. After reset the PE owns
bank 0.

Every PE's RANGE register places its transfer-side bank in one shared
address space, so that one burst can fill any set of LMMs:

- The LMM write bus is broadcast to all PEs of all lanes, and a PE accepts
  every address inside its window.
- On a read, the PE that owns the address answers, and the answers are
  OR-combined.

Windows should not overlap when data is drained.

## DMA engine

`imax_dma` has two independent directions:

- **LOAD** `{len, addr}` accepts `len` words from the input stream
  (`ld_valid/ld_ready/ld_data`) and writes them to shared addresses
  `addr, addr+1, ...`. It moves one word per cycle while the stream is
  valid, and gaps only delay it.
- **DRAIN** `{len, addr}` reads `len` words and offers each on the output
  stream (`dr_valid/dr_ready/dr_data`). It holds each word until it is
  accepted. Because of the one-cycle read, it moves at most one word every
  two cycles.

A command arriving while the same direction is busy is ignored. Software
polls STATUS first.

## PIO register map

Word addresses are 24 bits, writes take effect at the clock edge, and reads
are combinational.

| address | register |
|---------|----------|
| bit 23 = 1 | PE register: bits 22:20 lane, 19:14 PE, 2:0 register number |
| `0x000000` EXEC  | `wdata[16:0]` iterations, `wdata[63:56]` lane mask, `wdata[55]` swap the lanes' buffers in the same cycle |
| `0x000001` SWAP  | `wdata[7:0]` lane mask |
| `0x000002` LOAD  | `wdata[31:0]` start address, `wdata[63:32]` length in words |
| `0x000003` DRAIN | same layout as LOAD |
| `0x000004` STATUS (read) | {drain busy, load busy, busy bit per lane} |
| `0x000005`–`7` (read) | cycles since reset with some lane executing, LOAD busy, and DRAIN busy |

The three counters give the EXEC/LOAD/DRAIN time breakdown directly. The
CONF/REGV/RANGE time is the host's own PIO time.

## Parameters

| parameter | default | where |
|-----------|---------|-------|
| `NUM_LANES` | 2 | `imax_top`: the main evaluation configuration, out of at most 8 (3-bit lane field, 8-bit masks) |
| `NUM_PE` | 64 | `imax_top`, `imax_lane`: PEs per lane |
| `LMM_BYTES` | 65536 | `imax_top`, `imax_lane`, `imax_pe`, `imax_lmm`: per-PE LMM size, both buffers together |

The datapath width (64), the number of pipeline registers (4) and the field
widths are package constants in `imax_pkg`.

### What fits

One LMM buffer holds 4096 words. The quantised kernels above pack 4 weights
per word, so one stream of a row may be 16384 elements long. The longest
rows in Qwen3 are the feed-forward down projections: 3072, 6144 and 12288
elements for the 0.6B, 1.7B and 8B models. These sizes come from the
published model configurations, not from the paper. All of them fit.
`tb_imax_qwen_q8` runs the longest of them, K = 12288, on the full-size
core. That call is one LOAD of 125,952 words and an EXEC of 3,136 cycles.
`tb_imax_kernels` runs the Q3_K and Q6_K chains at the same length.

An FP16 attention head of dimension 128, with at most 48 cached tokens,
needs 3072 words, which also fits. The FP16→FP32 table does **not** fit
whole. One FP32 entry per word allows 4096 codes per PE, and 65536 FP16
codes exist. `tb_imax_kernels` loads only the part of the table that covers the
test's weights: 1024 codes, 0x3800–0x3BFF, indexed by `code & 0xFFF`. The low-half and
high-half conversions use separate tables in PEs 1 and 2. Each table entry
already sits in the half where it is needed, so an OR merges them. How the
original hardware holds the full table is not known to this design.

## How far it can be trusted

Every block has a self-checking testbench. Each ends with
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_imax_alu` | Every instruction against integer or real-arithmetic references, over random operands. |
| `tb_imax_agu` | Stream and table addressing, and both masks. |
| `tb_imax_lmm` | The bank ownership across swaps, and both ports. |
| `tb_imax_dma` | LOAD with gaps, DRAIN with back-pressure, and that a 64-word ungapped LOAD takes 64 cycles. |
| `tb_imax_ctrl` | The decoder and the counters. |
| `tb_imax_pe` | Loads, stores, table mode, the accumulator, bubbles and RANGE decode. |
| `tb_imax_lane` | A Q8_0 chain of 6 PEs, and the N + NUM_PE timing. |
| `tb_imax_kernels` | The Q6_K, Q3_K, FP16 and AD24-reduced Q8_0 chains on a 12-PE lane with 64 KB LMMs, against reference dot products. Q3_K and Q6_K also run at K = 12288. |
| `tb_imax_top` | The full-size core, with no parameter overrides. |
| `tb_imax_qwen_q8` | The full-size core running Q8_0 rows of real Qwen3 lengths: K = 1024, 3072 and 12288, 20 rows per call. It also checks that EXEC takes K/4 + 64 cycles. |

`tb_imax_top` makes two overlapped kernel calls of 20 Q8_0 rows each. It
counts every mechanism it relies on and fails if any of them never
happened. One run counted:

| mechanism | count |
|-----------|-------|
| configuration writes | 280 |
| LOADs | 2 |
| DRAINs | 2 |
| SWAPs (one of them folded into an EXEC) | 3 |
| EXECs | 2 |
| broadcast words | 32 |
| input-stream stall cycles | 456 |
| output stall cycles | 15 |
| cycles of LOAD overlapping EXEC | 78 |
| cycles of DRAIN overlapping EXEC | 67 |

That run made 50 checks with 0 failures. For each block, a deliberately
broken copy was run under its testbench, and each testbench caught its
fault.

Not verified: timing closure at any clock frequency. The single-cycle FP32
FMA is a long combinational path, so a real implementation would pipeline
ALU1. Power was not checked either.

## Where this design departs from the paper, or fills gaps in it

- **Host side is outside.** The host CPU, the network-on-chip, DDR and the
  AXI protocol are not modelled. The DMA ports are valid/ready streams, and
  the host is the testbench.
- **Buffer switching.** The paper calls the LMM double buffer
  hardware-managed but does not say what triggers the switch. Here the host
  requests it, either with a SWAP command or with the swap bit of EXEC. The
  swap itself happens in hardware, in one cycle, for all LMMs of the
  selected lanes.
- **Whether 64 KB is per buffer or in total** is not stated. Here each
  buffer is half of the 64 KB.
- **PE registers.** The PE figure shows two groups of 16 registers per PE
  (Grp. A/B, Reg#0–15). Here each PE has four 64-bit pipeline registers, a
  constant and an accumulator.
- **Array topology.** The figure of a lane draws 8 columns of 8 PE/LMM pairs
  with a line returning from the last to the first. Here the 64 PEs form one
  straight chain with no loop-back.
- **Column-wise multithreading is not built.** The paper time-multiplexes
  several logical FMAs on one pipelined FPU. Here the FPU is combinational,
  so there is no FPU latency to hide.
- **Kernel shapes differ.** The paper's Q8_0 kernel runs a 12-PE SML8/AD24
  tree replicated four times, with 46 arithmetic units and 32 elements in two
  passes. Its FP16 kernel uses 22 units for 16 elements, Q6_K 64 units and
  Q3_K 51 units. The mappings here are shorter chains. Most process 4
  elements per iteration (2 for FP16). The closest to the paper is the Q8_0
  variant with an `AD24` reduction, at 8 elements per iteration on 10 PEs.
  The four parallel copies of the paper's kernel are not reproduced.
- **Instruction encodings are this design's own**, including the
  Q6_K/Q3_K offsets (−32 and −4 for a cleared high bit, as in the usual
  K-quant formats) and the exact 6→5-bit scale approximation, which the
  paper does not give.
- **FP32 rounding.** FP32 truncates. Rounding is not specified in the paper.
- **The FP16→FP32 table** is a table-mode LMM load and cannot hold all 65536
  codes (see *What fits*).
- **Programming interface.** The PIO address map, the STATUS register and
  the cycle counters are this design's choices.

## Simulating and changing it

Any testbench runs under plain Verilator. The package must come first, and
`-y` lets Verilator find the rest:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_imax_top \
    -y rtl -y tb rtl/imax_pkg.sv tb/tb_imax_top.sv
./obj_dir/Vtb_imax_top
```

Replace `tb_imax_top` with any other `tb_*` name. The full-size top takes
about 40 s to build and under a second to run.

To try another array size, override `NUM_LANES`, `NUM_PE` or `LMM_BYTES` on
`imax_top`. To write a new kernel, start from the configuration helpers in
`tb_imax_lane.sv` or `tb_imax_kernels.sv`. These pack `conf_t`, the AG
words and RANGE. Then plan one column per PE: what it computes, what it
loads for the next PE, and where its window sits in the shared address
space.

| file | contents |
|------|----------|
| `rtl/imax_pkg.sv` | types, opcodes, FP32 helpers |
| `rtl/imax_alu.sv` | ALU1→ALU2→ALU3 |
| `rtl/imax_agu.sv` | address generator |
| `rtl/imax_lmm.sv` | double-buffered LMM |
| `rtl/imax_pe.sv` | PE with its LMM |
| `rtl/imax_lane.sv` | chain and EXEC sequencer |
| `rtl/imax_dma.sv` | LOAD and DRAIN engine |
| `rtl/imax_ctrl.sv` | PIO decoder and counters |
| `rtl/imax_top.sv` | the core |
