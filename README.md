# Strix: end-to-end fault tolerance for a systolic-array NPU, in RTL

A deep-learning accelerator is a pipeline: commands are queued and decoded, operand
blocks are moved into on-chip memory, a systolic array multiplies them, and non-linear units
post-process the results. A soft error or a stuck bit anywhere in that pipeline can corrupt
an inference. Protecting the whole accelerator uniformly (ECC on every memory, triplication
of every datapath) is expensive and slows it down badly. The Strix approach gives each stage
the cheapest guard that suits how that stage holds and moves data:

| stage | what it holds | guard used here |
|---|---|---|
| command queue, configuration registers | few bits, read often, large fan-out | SEC-DED code per word |
| scratchpad / accumulator | wide rows, streamed at full bandwidth | row + column checksums per 16 x 16 block, kept in a separate memory |
| systolic array | linear math at full rate | checksums of the product predicted on the side (ABFT), checked and repaired after the array |
| ReLU, pooling | cheap, no simple invariant | three copies and a vote (TMR) |
| softmax, LayerNorm | have a sum invariant | check that a row sums to 1 (softmax) or 0 (LayerNorm) |

Every block of data passes through some check on its way between stages, so the protection
holds end to end. The guards are placed next to the memories and the array rather than
inside them, so the original datapath and its timing stay as they are.

This repository is synthesizable SystemVerilog for that scheme, built around a
Gemmini-style weight-stationary INT8 NPU. By default it has a 16 x 16 array of 1-PE tiles, a
256 KB scratchpad and a 64 KB accumulator. It includes self-checking testbenches for every
block and for the whole NPU.

## Contents

- [Block map](#block-map)
- [How a matrix multiply is protected](#how-a-matrix-multiply-is-protected)
- [Local-memory checksums](#local-memory-checksums)
- [The shield group: checking the array without touching it](#the-shield-group-checking-the-array-without-touching-it)
- [Register ECC](#register-ecc)
- [Non-linear operators](#non-linear-operators)
- [Fault log and fault injection](#fault-log-and-fault-injection)
- [Commands](#commands)
- [Where this RTL departs from the published design](#where-this-rtl-departs-from-the-published-design)
- [Size](#size)
- [What the default configuration can run](#what-the-default-configuration-can-run)
- [Simulating](#simulating)

## Block map

```
            cmd ──► reservation_station (ECC queue, inserts PRECOMP before COMPUTE)
                          │
                          ▼
                    strix_npu controller ─── ecc_reg x4 (checksum masks, constants)
                          │
   dma_in ──► checksum_adder ──► guardpad ◄── linker_block (block ─► checksum row, valid)
      │                              │
      ▼                              ▼
  scratchpad / accumulator ──► data_verifier ──► data_corrector ──► operands / mvout
                                                     │                   │
                                             error_block ◄───────────────┤
                                                                         ▼
  operands ──► systolic_array ──► data_verifier + data_corrector ──► accumulator (+D)
      │                                  ▲  (ABFT check, 32 bit)
      ├──► transposer ──► shield_group ──┘  (predicted row / column checksums of A x B)
      └──► checksum_adder (rowsum B, colsum A)

  mvout ──► relu_tmr ──► dma_out        pool ──► maxpool_tmr     softmax / LN ──► *_guard
```

| file | role |
|---|---|
| `strix_pkg.sv` | command format, status codes, counters, sizing functions for K, sigma and L_SA |
| `secded_enc.sv`, `secded_dec.sv`, `ecc_reg.sv` | register SEC-DED code and a protected register |
| `reservation_station.sv` | command FIFO whose entries are SEC-DED words; generates precompute |
| `scratchpad.sv`, `accumulator.sv` | banked row memories (INT8 rows, INT32 rows) |
| `guardpad.sv`, `linker_block.sv` | checksum memory and the block-to-checksum binding |
| `checksum_adder.sv`, `data_verifier.sv`, `data_corrector.sv` | the three guard operators |
| `error_block.sv` | fault log with an Id and a Times count per location |
| `systolic_array.sv` | weight-stationary array, I x I tiles of J x J PEs |
| `shield.sv`, `shield_group.sv`, `transposer.sv` | ABFT checksum prediction for the array |
| `tmr_vote.sv`, `relu_tmr.sv`, `maxpool_tmr.sv` | triplicated non-linear operators |
| `softmax_guard.sv`, `layernorm_guard.sv` | sum-invariant checks |
| `strix_npu.sv` | top level: controller and wiring |

## How a matrix multiply is protected

The NPU computes `C = A x B + D` on 16 x 16 blocks. A is INT8 input, B is INT8 weights and
D is the INT32 bias held in the accumulator. The host sends:

1. `MVIN` A, `MVIN` B (scratchpad) and `MVIN_ACC` D (accumulator). As the 16 rows of a
   block stream in, a checksum adder forms its 16 row sums and 16 column sums. The two
   vectors are written to the guardpad, and the linker block marks the block as protected.
2. `PRELOAD` B. B is read back through the **verifier** and **corrector**: its sums are
   recomputed and compared with the guardpad, and any located error is repaired. B is then
   loaded into the array's stationary weights and into the transposer. On the same pass a
   checksum adder forms rowsum(B), the row checksums of B at full 32-bit width.
3. `COMPUTE`. The reservation station first issues a **precompute** carrying the same
   addresses. The precompute reads A (and D when accumulating) through the verifier and
   corrector, and forms colsum(A). The compute then streams A into the array. In the same
   cycle the **shield group** starts predicting the row and column checksums of `A x B`
   from A, B^T, rowsum(B) and colsum(A).
4. The 16 result rows leave the array and pass a 32-bit verifier and corrector, with the
   shield group's predictions as reference. A single faulty element, or several in distinct
   rows and columns, is repaired. D is added. The block is written to the accumulator, and
   fresh checksums of `C + D` go to the accumulator part of the guardpad.
5. `MVOUT` reads the result block through the accumulator verifier and corrector, then the
   triplicated ReLU, and sends it out.

The shield group never touches the array: it takes copies of the operands at the array's
input. The array's timing is therefore exactly that of the unprotected array.

## Local-memory checksums

**Layout.** For block b (rows 16b to 16b+15 of the scratchpad or accumulator) the guardpad
holds:
- at row 2b, the 16 row sums;
- at row 2b+1, the 16 column sums.

Checksums have the same width as the data: 8 bits for the scratchpad, 32 bits for the
accumulator. The sums are plain binary addition modulo 2^W, whatever the data means. A
checksum only has to reproduce itself, so wrap-around is harmless. The linker block keeps
one valid bit per block; a block that was never written through the guarded path is read
without a check.

**Bit selection.** Configuration registers 0 (INT8 data) and 1 (INT32 data) hold a mask of
bits left out of all checksums. The default is 0, meaning every bit is covered. Each element
is ANDed with the inverse mask before it is summed. This lets software ignore bits whose
corruption does not matter, at the price of not seeing faults in them.

**Decision rule.** The verifier gives, for every row and column, a mismatch flag and
`delta = recomputed - stored`. The corrector then decides:

| mismatching rows | mismatching columns | verdict | action |
|---|---|---|---|
| none | none | OK | forward the block |
| some | none, or none and some | checksum fault | data left alone; the recomputed checksums are written back to the guardpad |
| some | some, and each pairs with exactly one partner of equal delta | corrected | subtract the delta from each paired element (selected bits only) |
| some | some, otherwise | uncorrectable | forward unchanged, raise `err_irq` |

The pairing by equal delta is what lets more than one error be repaired. An error of value
e at (r, c) shifts the sum of row r and of column c by the same e. For example, errors of
+4 at (3, 7) and of -16 at (9, 2) make rows 3 and 9 and columns 7 and 2 mismatch, with
deltas 4, -16, 4, -16. Matching the deltas puts the errors at (3, 7) and (9, 2) and not at
(3, 2) and (9, 7). Two errors in the same row cannot be separated: that row's delta is the
sum of the two and matches neither column. The block is then reported as uncorrectable.

**Timing.** A block read takes 16 cycles, one row per cycle. The verdict comes 3 cycles
after the last row, and the corrected rows then leave the corrector's buffer in 16 more
cycles.

## The shield group: checking the array without touching it

For `C = A x B`, let `rsB[k] = sum_j B[k][j]` and `csA[k] = sum_i A[i][k]`. Then:

- row checksum i of C = `A[i,:] . rsB`
- column checksum j of C = `B^T[j,:] . csA`

These are the checksums that a classic ABFT product of checksum-extended matrices would
produce. Here they are computed from 2N vector dot products, with no extra row or column in
the array.

A **shield** holds one fixed 32-bit vector (rsB or csA) and takes one 16-element INT8
vector per cycle. It has 16 multipliers, one per PE of an array row, and a pipelined adder
tree. Its latency is `1 + tree_stages(N, J)` cycles.

Each tree stage adds groups of 2^J values. That makes a stage exactly as deep as the J
chained PEs of a tile, so the checker never sets the critical path. For J = 1 the tree
has four 2-input stages, and a shield takes 5 cycles.

**How many shields.** K shields share the 2N vectors, so the group needs
`sigma = 2IJ/K + 1 + (tree depth term + 1)` cycles. For the array to never wait, sigma may
not exceed the array window `L_SA = IJ + 2I - 1`: the time from the first input row
entering to the last result row leaving. The smallest K that fits is

```
K = ceil( 2IJ / (IJ + 2I - 3 - max(0, floor(log2(ceil(IJ / 2^J)) / J))) )
```

`strix_pkg::shield_count()` evaluates this, and `shield_group` uses it as its default.

| configuration | K | sigma | L_SA |
|---|---|---|---|
| I = 16, J = 1 (default) | 1 | 37 | 47 |
| I = 4, J = 2 (tested) | 2 | 11 | 15 |

An assertion in the top checks that the shield group has finished by the time the array
result has been checked.

**Localising a bad PE.** In weight-stationary mode a faulty PE in column c corrupts column c
of every result row it touches. The earliest mismatching column, divided by J, is reported
as the faulty tile column (`array_fault_tile_col`) and logged in the error block.

**Timing of the systolic array.** Input rows are skewed by tile row and results deskewed by
tile column. Each result row therefore leaves exactly `2I - 1` cycles after its input row
entered: 31 cycles for the default. A full 16-row block occupies the array for 47 cycles.

## Register ECC

Data bits are numbered from 1. Partial parity bit i is the XOR of the data bits whose
number has bit i set. A global parity bit is the XOR of all data bits. A word of α data bits
therefore carries `ceil(log2(α+1)) + 1` check bits: 7 for a 32-bit register and 8 for a
71-bit queued command.

On a read:

| syndrome | global parity | meaning | action |
|---|---|---|---|
| s, nonzero | mismatch | single data error at bit s | flipped back |
| zero | mismatch | the global bit itself was hit | reported as a check-bit fault |
| nonzero | matches | multi-bit error | reported as uncorrectable |

A protected register writes the corrected word back on the next cycle. The reservation
station drops a command it cannot correct.

A limit of this code: a single upset in a partial-parity bit looks exactly like a
double data error. It is therefore reported as uncorrectable, and a queued command hit
that way is dropped, even though its data bits were intact.

## Non-linear operators

- **ReLU and max pooling.** Each is computed three times by differently written logic and
  voted bit by bit. A disagreement is counted and does not affect the output. ReLU sits on
  the mvout path. Pooling takes one window of 4 values on its own ports.
- **Softmax and LayerNorm.** These operator cores are not part of this RTL. Their outputs are
  brought in on ports and checked:
  - a softmax row (16 values, Q1.15) must sum to 1.0 within 16 LSBs;
  - a pre-affine LayerNorm row (16 signed values) must sum to 0 within 16 LSBs.

## Fault log and fault injection

The error block has 16 entries. Each holds a source (scratchpad, accumulator, array or
register), a 16-bit location and a saturating 8-bit Times count. The location is:
- the faulty row address, for memory data;
- the guardpad row, for a bad checksum;
- the tile column, for the array.

A repeated location only increments its Times count, which is how a permanent fault stands
out from transient ones. `MVOUT_ERR` streams the 16 entries out, one per output row:
- lane 0 = {valid, source, location};
- lane 1 = Times;
- lane 2 = Id.

The `fi_*` ports of the top inject faults for evaluation:
- an XOR mask on one scratchpad, accumulator or guardpad row as it is read;
- a bit flip, stuck-at-0 or stuck-at-1 on one PE's partial sum;
- an XOR mask on one queued command or configuration register;
- an XOR mask on one copy of the TMR units.

The `counters` output counts every guard event.

## Commands

`strix_pkg::cmd_t` is `{op[3], addr_a[16], addr_b[16], accumulate, relu, cfg_idx[2],
cfg_data[32]}`. Addresses are row addresses and multiples of 16.

| op | fields used | effect |
|---|---|---|
| CONFIG | cfg_idx, cfg_data | write register 0 (INT8 checksum mask), 1 (INT32 mask), 2 or 3 (constants) |
| MVIN | addr_a | 16 rows from `dma_in` (low byte of each lane) to the scratchpad |
| MVIN_ACC | addr_a | 16 rows of INT32 to the accumulator |
| PRELOAD | addr_a | B block from the scratchpad into the array |
| COMPUTE | addr_a, addr_b, accumulate | A at addr_a times the preloaded B, result (+D from addr_b) to accumulator addr_b |
| MVOUT | addr_a, relu | accumulator block to `dma_out`, optionally through ReLU |
| MVOUT_ERR | — | error block to `dma_out` |

The encoding is this design's own.

## Where this RTL departs from the published design

- **No pipelining between commands.** The published design overlaps the precompute of the
  next instruction group with the current compute, and the check of the current group with
  the next preload. That four-stage pipeline hides the guard latency. Here each command
  finishes before the next starts, so the guard latency is visible in the cycle count. The
  shield group itself does run in parallel with the array, as in the original.
- **Weight-stationary only.** Gemmini's output-stationary mode is not built.
- **Whole aligned blocks only.** Strided or partial block fetches, and the re-checksumming
  of a partial block they would need, are not built.
- **Operator cores not included.** The host, the DMA engine, the instruction front end and
  the softmax, LayerNorm and GELU units are outside this RTL and appear as ports. GELU has
  no guard here, because its triplication needs the GELU core itself.
- **Parity convention.** The written description calls the code "odd parity" and says the
  global bit checks the partial bits. The worked example it draws has printed bit values
  that only fit plain XOR (even) parity, with the global bit taken over the data bits.
  The example is followed here.
- **No double buffering.** The local memories are single row arrays. The ping-pong halves
  the original NPU uses to overlap loading with computing are not modelled.
- **No protection-control instructions.** Only the fault-log readout is a command. Other
  host-visible switches, such as turning protection on and off, are not built.
- **Own choices where the description is silent.** These include:
  - the command encoding and the guardpad layout;
  - the equal-delta pairing rule;
  - the error-block size and overflow behaviour;
  - the tolerances of the sum checks;
  - a 4-input pooling window;
  - reporting a syndrome that points past the last data bit as uncorrectable.
- **Adder-tree fan-in.** The description gives both "first-level fan-in at most 2^(J-1)" and
  "tree depth capped at the PEs per tile row". The second is implemented: 2^J inputs per
  registered stage.

## Size

After coarse synthesis at the default size, the top has about 15,600 word-level cells and
about 62,000 flip-flop bits. It also has 2.95 Mbit of memory:
- 2 Mbit of scratchpad;
- 0.5 Mbit of accumulator;
- 0.3 Mbit of guardpad;
- the rest is buffers.

The guardpad adds 12.5 % to the scratchpad and the accumulator, one checksum row per 8 data
rows. The block buffers of the correctors are the largest part of the flip-flops.

## What the default configuration can run

The default is the INT8 16 x 16 configuration with 256 KB and 64 KB of memory. Any INT8 GEMM
can be run on it once software tiles it into 16 x 16 x 16 block products, which covers the
INT8 CNNs (ResNet-50, AlexNet, MobileNet-V2) and BERT. Their layers hold 0.4 MB to 38 MB of
weights and live in external memory. Convolution lowering and the softmax, LayerNorm and
GELU units are not part of this RTL.

The FP32 and BF16 configurations need floating-point arrays, which are not built. The larger
INT8 configuration (128 x 128 PEs as 32 x 32 tiles of 4 x 4) is reachable through the
parameters: I = 32, J = 4, which gives K = 2. It has not been simulated. The LLMs usually evaluated with this scheme (1 to 7 billion
parameters) run on those large configurations, so they are outside the built default.

## Simulating

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M` and has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/strix_pkg.sv tb/tb_strix_npu.sv \
          --top-module tb_strix_npu -Mdir obj && obj/Vtb_strix_npu
```

The same works for any `tb/tb_<block>.sv`. `-I` lets Verilator find each module by its file
name. `-Wno-fatal` is needed because Verilator warns that the array's PE wire grid looks
circular; it is not, since each wire is driven only from its left or upper neighbour. Adding
`+verilator+rand+reset+2` to the simulation run starts every register at a random value. The
testbenches pass that way too.

`tb_strix_npu` runs the full-size NPU, with no parameter overrides, in under a minute. It
moves operands in, runs accumulate and non-accumulate products, and compares every block
with a reference model. It then provokes each guard once:
- scratchpad, accumulator and guardpad faults;
- a double fault in one row;
- a masked checksum;
- a transient and a stuck-at PE;
- single and double upsets in a queued command;
- a configuration register upset;
- TMR copy faults;
- bad softmax and LayerNorm rows.

Finally it reads the fault log out. It counts how often each mechanism fired, and fails if
one never did.

`tb_systolic_array` and `tb_shield_group` also run an 8 x 8 array of 2 x 2-PE tiles. That
exercises the J > 1 paths and checks the latencies 2I - 1 and sigma against their
formulas.
