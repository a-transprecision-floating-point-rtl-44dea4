# A transprecision floating-point cluster with shared FPUs

Near-sensor analytics kernels (filters, FFT, convolutions, small classifiers) need floating
point, but not always 32 bits of it, and a core rarely issues an FP operation every cycle.
This cluster exploits both facts. Eight small integer cores share a pool of four
floating-point units. Each unit computes in `float`, `float16` and `bfloat16`, runs two
16-bit operations side by side as a packed-SIMD pair, and can multiply two 16-bit values
while accumulating in `float` (multi-format FMA). Division and square root are rare and
expensive, so one iterative DIV-SQRT unit serves all eight cores. The cores exchange data
through a banked, single-cycle scratchpad (the TCDM), which a DMA fills from and drains to
a larger L2 memory. An event unit provides barriers, a lock and wake-up, and per-core
counters record where the cycles went.

The RTL here is the cluster in its 8-core, 4-FPU, one-pipeline-stage configuration. The
cores, the instruction cache and the SoC around the cluster are not included: their
signals are ports of the top module `tp_cluster`, and the testbenches drive them.

## Block map

```
 core 0..7 APU ports ──► fpu_interconnect ──► fpu_top x4 (ADDMUL | COMP | CONV)
                               └─────────────► fpu_divsqrt x1
 core 0..7 data ports ─┬─► tcdm_interconnect ──► tcdm_bank x16   (64 kB)
                       └─► core_ext_* ports (addresses outside the TCDM window)
 cluster_dma (master 8 of tcdm_interconnect) ◄──► l2_mem (512 kB, 15 cycles)
 event_unit (barrier, mutex, dispatch, clock enables)
 perf_counters x8 (9 events per core)
```

| file | role |
|---|---|
| `rtl/tp_pkg.sv` | formats, opcodes, request/response structs, unpack and round-and-pack |
| `rtl/fp_fma.sv` | combinational FMA lane; also ADD and MUL |
| `rtl/fpu_addmul.sv`, `fpu_noncomp.sv`, `fpu_conv.sv` | the three operation groups of an FPU |
| `rtl/fpu_pipe.sv` | 0..N ready/valid register stages |
| `rtl/rr_arbiter.sv` | round-robin arbiter used everywhere |
| `rtl/fpu_top.sv` | one FPU instance |
| `rtl/fpu_divsqrt.sv` | shared divide / square root |
| `rtl/fpu_interconnect.sv` | core-to-FPU sharing network |
| `rtl/tcdm_bank.sv`, `tcdm_interconnect.sv` | TCDM |
| `rtl/l2_mem.sv`, `cluster_dma.sv` | L2 and the DMA |
| `rtl/event_unit.sv`, `perf_counters.sv` | synchronisation and counters |
| `rtl/tp_cluster.sv` | top level |

## How a core reaches an FPU

A core issues an FP operation over an APU-style port. The port carries a ready/valid
request (`fpu_req_t`: operation, source and destination format, vector bit, rounding mode,
three operands, tag) and a ready/valid response (`fpu_rsp_t`: result, five IEEE flags,
tag). To the core the port looks like a private FPU. A core can stall on it in two places:
before issue, when the request is not accepted, and at write-back, when the core is not
ready to take a result.

**Static interleaved mapping.** Core *c* always uses FPU *c* mod 4, so cores 0 and 4 share
FPU 0, cores 1 and 5 share FPU 1, and so on. Cores with neighbouring numbers, which tend to
run similar code at the same time, therefore land on different units. The mapping is fixed
wiring, not a crossbar, which keeps the paths from the cores to the first FPU register
short.

**Arbitration.** Each FPU has a round-robin arbiter over the cores that share it. Only the
winner sees `ready`; the others hold their request and retry. The arbiter pointer moves
past the winner, so when two cores compete all the time they alternate. Operations
classified as DIV or SQRT bypass the FPUs and go to a second round-robin arbiter over all
eight cores, which feeds the single DIV-SQRT unit.

**Tags and the way back.** The interconnect writes the requesting core's index into the
upper four bits of the 9-bit tag. The lower five bits belong to the core. Each FPU passes
the tag along unchanged, and results are steered back by that index, so no state is kept
per operation in flight. If an FPU result and a DIV-SQRT result are ready for the same
core in the same cycle, the FPU result goes first and the DIV-SQRT result waits. A stalled
result also stalls the FPU's output register, because the FPU pipeline has ready/valid
back-pressure. This is the FPU write-back stall the counters record.

## Inside one FPU

`fpu_top` decodes the operation into one of three groups:
- ADDMUL: FMA, FNMSUB, ADD, MUL;
- COMP: sign injection, min/max, compare, classify;
- CONV: format and integer conversion, cast-and-pack.

Only the selected group receives the operands. The others see all zeros (operand
silencing), so their logic does not toggle. Each group ends in its own `PIPE_REGS`
register stages (default 1). A round-robin arbiter merges the groups' outputs, because a
short operation issued after a long one can finish in the same cycle. At one stage every
operation has a latency of one cycle and the unit accepts one operation per cycle.

**Vector lanes.** ADDMUL holds two `fp_fma` lanes.
- Lane 1 is 32 bits wide. It computes `float`, either 16-bit format, and the multi-format
  case.
- Lane 2 computes the upper element of a packed 16-bit pair and is silenced otherwise.

A vector operation requires equal source and destination formats and a 16-bit format. Its
operands are split into halves, and the results are reassembled with the two lanes' flags
ORed. A 16-bit scalar result is NaN-boxed: its upper 16 bits are all ones.

**The FMA datapath.** `fp_fma` is fully combinational:
1. It unpacks the operands into sign, an unbiased exponent and a normalised 24-bit
   significand. Subnormals are normalised with a leading-zero count.
2. It forms the exact product.
3. It aligns the addend against the product in a 76-bit window. Bits shifted out of the
   window are folded into a sticky bit.
4. It adds or subtracts, normalises, and rounds once in the destination format with any
   of the five rounding modes (`tp_pkg::round_pack`).

ADD is executed as *b*·1 + *c* and MUL as *a*·*b* + (−0). In the multi-format case *a* and
*b* are unpacked in the 16-bit source format, while *c* and the result use `float`.
Tininess is detected before rounding.

**COMP and CONV** follow the RISC-V F extension:
- NaN handling for min/max and quiet/signalling comparisons follows that extension.
- Classify returns its 10-bit mask.
- Float-to-integer conversion saturates.
- The variant of an operation (e.g. min or max, le/lt/eq) is chosen through the
  rounding-mode field.

Cast-and-pack converts two `float` operands to a 16-bit format. It packs operand *a* into
bits [15:0] and operand *b* into bits [31:16].

## DIV-SQRT

`fpu_divsqrt` is iterative and unpipelined. It accepts a new operation only after its
result has been taken. The sequence of cycles is:
1. One cycle unpacks and normalises the operands and resolves special cases: NaN,
   infinities, zeros, x/0, sqrt of a negative number.
2. A restoring digit recurrence then yields three quotient or root bits per cycle, which
   makes it effectively radix 8.
3. A last cycle rounds, using the final remainder as the sticky bit.

The number of iterations is ⌈(mantissa bits + 3)/3⌉. That gives these latencies from
acceptance to `out_valid`:

| format | latency (cycles) |
|---|---|
| `float` | 11 |
| `float16` | 7 |
| `bfloat16` | 6 |

These are the latencies the design is specified to have; the radix and the split into
cycles are this implementation's way of reaching them. A packed-SIMD request is executed
on its lower element only.

## Memory system

**TCDM.** The 64 kB TCDM has 16 banks of 1024 words. Addresses are word-interleaved:
- byte address bits [5:2] select the bank;
- the bits above them select the word inside the bank.

Nine masters use it: the eight cores and the DMA. Each bank has its own round-robin
arbiter. A losing master sees `gnt` low and keeps its request up (a TCDM contention
stall). A granted access returns `r_valid`, with read data, exactly one cycle later;
writes receive the same pulse. The top decodes the TCDM window starting at `TCDM_BASE`
(0x1000_0000). Core accesses outside it leave on `core_ext_req_o`, the place where the
cluster's bus to the SoC would connect.

**L2 and DMA.** `l2_mem` is a 512 kB array. It grants every request immediately and
returns read data after a fixed 15-cycle pipeline. The DMA copies `len` words in either
direction between L2 and the TCDM, one word at a time: read, wait for the data, write,
wait for the write response. At the default latencies a word therefore costs 18 cycles in
both directions, and `done_o` pulses once at the end. This is deliberately the simplest
engine that works: there is no burst, no 2-D addressing and no queue of commands.

## Event unit and counters

**Barrier.** A core joins by pulsing `barrier_req_i`. One cycle after the last member of
`team_mask_i` arrives, every member receives a one-cycle `barrier_release_o`.

**Mutex.** A core holds `mutex_req_i` high for as long as it wants the lock. The unit
grants the lock to one requester at a time, round robin.

**Dispatch.** `dispatch_push_i` places a 32-bit word for a mask of cores. Each core
acknowledges the word separately.

**Clock enables.** `clk_en_o` is low for a core that waits at a barrier, for the lock, or
for a dispatch, so that its clock can be gated.

**Performance counters.** Each core has nine 32-bit counters:
- total cycles;
- active cycles;
- instructions;
- memory stalls;
- TCDM contention;
- FPU stall;
- FPU contention;
- FPU write-back stall;
- instruction-cache misses.

The cluster generates TCDM contention, FPU contention and write-back stall itself. The
others come from the core over `core_events_i`. The counters share one enable and one
clear, and any counter of any core can be read combinationally through `perf_core_i` and
`perf_idx_i`.

## Where this RTL departs from, or adds to, the specification it follows

- **TCDM organisation.** The bank count (16) and the per-bank all-to-all arbiter are
  choices. The memory is specified only as multi-banked, word-interleaved and single-cycle.
- **L2.** It is a single pipelined array, not several banks.
- **FPU details.** The tag layout, NaN-boxing, operand placement for cast-and-pack, the
  position of the pipeline registers, and the priority of FPU over DIV-SQRT results are
  choices.
- **DMA and event unit.** Their signal protocols are choices; only their functions are
  given.
- **Not included:**
  - the RI5CY cores and their ISA extensions;
  - the two-level shared instruction cache;
  - the cluster and SoC buses;
  - the fabric controller;
  - the peripherals;
  - the process-specific SRAM macros (the memories here are plain arrays).
- **Benchmarks.** The design was evaluated on CONV, DWT, FFT, FIR, IIR, k-means, matrix
  multiplication and SVM. Their data sizes are not known, so whether each fits the 64 kB
  TCDM cannot be stated. All the FP operations they need exist in this RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog if it hangs.
- **Arithmetic blocks.** They are checked against a reference written with `real`
  arithmetic in `tb/tb_fp_ref.svh`. A two-sum error term gives exact rounding decisions
  for FMA, and the reference covers all formats and rounding modes, including subnormals
  and special values.
- **Latency.** The testbenches check the cycle counts: FPU latency equal to the pipeline
  depth, DIV-SQRT 11/7/6, TCDM one cycle, L2 15 cycles, and DMA 18 cycles per word.
- **Arbiters.** The fairness bounds of the arbiters are checked.
- **`tb_tp_cluster`.** It runs the whole cluster at its default parameters:
  1. The DMA loads data from L2.
  2. Eight behavioural cores run scalar FMA, packed `float16` ADD, multi-format FMA, DIV
     and SQRT on operands loaded from the same TCDM bank, and store the results.
  3. The cores increment a shared word under the mutex and meet at barriers.
  4. The DMA writes the results back to L2, where they are compared.
  5. The performance counters are compared with counts taken by the testbench.

  The testbench also counts each mechanism it is meant to exercise: FPU stalls, real FPU
  sharing conflicts, DIV-SQRT use, vector and multi-format operations, TCDM contention,
  write-back stalls, DMA in both directions, barrier, mutex, dispatch and counter reads.
  Any mechanism that never occurs counts as a failure.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tp_cluster \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/tp_pkg.sv tb/tb_tp_cluster.sv
./obj_dir/Vtb_tp_cluster
```

Replace `tb_tp_cluster` with any other testbench name.

The configuration is set by these parameters of `tp_cluster`:
- `NB_CORES`, `NB_FPUS`, `FPU_PIPE_REGS`;
- `NB_BANKS`, `TCDM_SIZE`;
- `L2_SIZE`, `L2_LATENCY`.

The interleaved mapping follows `NB_FPUS` automatically. Only the end-to-end testbench
assumes the default sizes.
