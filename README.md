# PANTHER tile in SystemVerilog

This is RTL for one tile of PANTHER, a ReRAM-based accelerator for training neural networks.
Most ReRAM accelerators compute only inference-style matrix-vector products (MVM) in analog
crossbars. PANTHER's crossbars also do the other two operations of training:

- the transposed product (MTVM), which back-propagates layer gradients;
- the weight update itself, an outer product accumulated in place (OPA), so weights are
  never read out, changed and written back.

A 16-bit by 16-bit OPA is too precise for one crossbar, so the update is split three ways:

- The row input is **bit-streamed**: one bit per step, 16 steps.
- The column input is **bit-sliced**: shifted left by the step number and cut into 4-bit
  chunks, one chunk per slice.
- The 32-bit weight is **bit-sliced** across eight crossbars of 4 to 6 bits.

Carries between slices are not propagated during an update. Each slice keeps its own digit and
saturates at its end states. Every 1024 batches a **carry resolution step (CRS)** reads the
weights back, resolves the carries and rewrites them.

The RTL covers everything up to the tile:

| module | what it is |
|---|---|
| `rtl/panther_pkg.sv` | shared constants, types, instruction format |
| `rtl/xbar_slice.sv` | **behavioural model** of one 128x128 ReRAM crossbar slice |
| `rtl/adc.sv` | **behavioural model** of a bank of ADCs |
| `rtl/input_driver.sv` | row (1-bit) and column (4-bit chunk) drivers with sign handling |
| `rtl/shift_add.sv` | combines slices and input bits into 16-bit results |
| `rtl/mcu.sv` | Matrix Computation Unit: MVM, MTVM, OPA, CRS, variant-3 commit, weight port |
| `rtl/vfu.sv` | vector functional unit (add, sub, mul, ReLU, ReLU derivative) |
| `rtl/core.sv` | programmable core: fetch/decode/execute, register file, VFU, load/store, MCUs |
| `rtl/shared_memory.sv` | tile memory with round-robin arbitration |
| `rtl/panther_tile.sv` | **top**: 8 cores of 2 MCUs sharing one memory |

Not built:

- **The node.** A node is 138 tiles joined by an on-chip network. The network's design is not
  described, so neither the network nor the send/receive instructions that use it are built.
  A host port on the shared memory stands in for them.
- **The compiler**, which is software.

## Number formats

- **Data** (inputs, outputs, activations, gradients): 16-bit two's complement in registers and
  memory. The drivers convert to sign-magnitude, as the scheme requires. -32768 becomes -32767.
- **Weights**: 32-bit. The MVM/MTVM result is `sat16(sum(x * W) >> 16)`, so weights carry 16
  fraction bits. The VFU multiplies with 8 fraction bits. Both scalings are this design's
  choice.
- **Slices.** Slice k (k = 0 is least significant) holds a signed digit `d_k`, with
  `W = sum_k d_k * 16^k`. The digit is stored as an unsigned cell level biased by
  `2^(bits-1)`; that level plays the role of the (Ron+Roff)/2 reference state. Slice widths,
  MSB to LSB, are 4,4,4,6,6,5,5,5 (39 bits). `SLICE_BITS_DEFAULT = 32'h4446_6555` in the
  package: nibble k is the width of slice k.
- **Programming and CRS.** Weights are written as balanced digits in [-8, 7]. Wider slices have
  headroom for carries that accumulate between CRS passes.

## How an MCU works

An MCU has:

- four 128-entry operand registers: XbarIn row side, XbarIn column side, XbarOut column side
  and XbarOut row side;
- `VARIANT` copies of the weight matrix, each made of 8 slices;
- per slice: ADCs and shift-and-add units for the column and row directions.

Operation passes:

- **MVM** (copy 0): for n = 0..14, bit n of each row operand drives the rows as +1/0/-1. The
  column sums are converted, shifted by `4k + n` and accumulated. The result goes to XbarOut
  (column side).
- **MTVM** (copy 1 in variants 2 and 3): the same from the column side into XbarOut (row side).
- **OPA**: for n = 0..14, bit n of XbarIn (row side) gates the rows. Chunk k of
  `|XbarOut col| << n` drives the columns of slice k. Each cell moves by the product and clips
  at its end levels. Clipped cells are counted in `sat_events`.

Timing:

- A pass costs 22 cycles: 16 streaming steps plus issue, ADC/adder drain and write-back.
- Several passes requested together share those 22 cycles where the variant allows it.
- In variants 1 and 2, a command that fuses MVM with OPA takes one extra cycle, so the OPA
  reads its column operand before the MVM result overwrites it.

Variants are chosen by a parameter:

| VARIANT | copies | MVM / MTVM | OPA |
|---|---|---|---|
| 1 (SGD) | 1 | run one after the other | deferred: applied at halt |
| 2 (mini-batch, default) | 2 | in parallel | deferred: applied to both copies at halt |
| 3 (large batch) | 3 | in parallel on copies 0 and 1 | at once on copy 2; batch end commits copy 2 to copies 0 and 1 (2x128 cycles) |

Batch end:

- The command's `batch_end` bit counts batches. Every `CRS_PERIOD` batches a CRS runs on every
  copy.
- CRS reads each row, sums the digits to a 32-bit value (saturating) and writes the value back
  as balanced digits. It takes 2x128 cycles per copy.

Host access: single weights can be written (to all copies) and read (from any copy) through the
row-decoder path (`w_*` ports).

## How a core works

The core executes 64-bit instructions in order, each to completion. The instruction is
`{op[4], a[20], b[20], c[12], len[8]}`:

| op | meaning |
|---|---|
| `SET a, imm=b` | write a register |
| `LD a, mem b, len` / `ST mem a, b, len` | move `len` words between registers and shared memory |
| `VADD/VSUB/VMUL/VRELU/VDRELU a, b, c, len` | `reg[a+i] = f(reg[b+i], reg[c+i])`, 2 cycles per element |
| `MCU masks=a` | 3 bits per MCU `{MVM, MTVM, OPA}` (mask 110 = MVM+MTVM); starts them together and waits |
| `HALT` | end of kernel and batch |

Registers are one address space:

- words 0..1023 are the register file;
- MCU m's operand register v (0 = XbarIn row, 1 = XbarIn col, 2 = XbarOut col, 3 = XbarOut row)
  element i is at `1024 + m*512 + v*128 + i`.

OPA takes effect at halt in every variant, so the same code runs on every variant:

- In variants 1 and 2, an OPA request saves its two operand vectors to a log in shared memory
  (`LOG_ENTRIES` pairs per MCU). At `HALT` the core loads each pair back and runs the OPA.
- When the log is full, further OPAs in that batch are dropped and counted in `log_overflow`.
- In variant 3 the MCU runs the OPA immediately on its third copy.
- After the OPAs, `HALT` sends end-of-batch to every MCU (commit, and CRS when due). Then
  `halted` rises.

## The tile (top)

`panther_tile` has 8 cores and a 256K-word shared memory with 9 round-robin ports: 8 cores and
the host. Its interfaces:

- Instructions are loaded per core through `im_*`. `start` runs all cores.
- The host moves data through `hm_*` and weights through `w_*`.
- Event counters are summed over the tile: MVM, MTVM, OPA, saturations, commits, CRS, logged
  and dropped OPAs, instructions.
- Core c's OPA log sits below the top of memory at `SHMEM_WORDS - (c+1)*NMCU*LOG_ENTRIES*256`.

## Where this departs from the source design

- **Ideal analog.** Crossbars and ADCs are behavioural: exact integer sums, no device noise or
  non-linearity, and one cycle per operation. The ADC only clips.
- **ADC resolution.** Each slice's ADC has slice bits + 8 bits, so a full 128-row sum never
  clips. That is 12 to 14 bits against the 8-12 bits the source assumes. The ADC-skipping
  optimisation is not modelled.
- **Cycle counts are this design's.** Cycle counts (22 per pass, 2x128 for CRS and commit, two
  cycles per VFU element) are not taken from the source, which gives energy and latency only
  at system level. The row-at-a-time CRS and commit ordering is this design's choice.
- **Instruction set.** Only the operations needed for training kernels are implemented. There
  are no branches, send/receive or scalar instructions.
- **OPA log and batch size.** The log size is a parameter. At its default of 16 pairs per MCU,
  a mini-batch of 64 does not fit. Such a batch must halt every 16 examples, or `LOG_ENTRIES`
  and `SHMEM_WORDS` must be raised. Logging all 16 MCUs at 64 entries would take the whole
  256K-word memory.
- **Convolution layers.** These need one OPA per output position per example, which makes the
  log limit tighter.
- **Capacity.** One tile holds 16 MCUs of 128x128 32-bit weights.
  - MLP-L4 (1024-256-512-512-10) needs 44 MCUs, which is three tiles.
  - VGG-16 needs 2084 MCUs, within a 138-tile node (2208 MCUs). The node is not built.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|---|---|
| `tb_input_driver` | all steps and slices of random operands, including -32768 |
| `tb_xbar_slice` | write/read with clipping and masks, MVM/MTVM dot products, OPA with saturation count |
| `tb_adc` | latency and clipping |
| `tb_shift_add` | result against a reference sum over 16 steps, saturation |
| `tb_vfu` | every operation on random operands |
| `tb_shared_memory` | three random requesters against a memory model; one-hot grants; no requester waits NPORTS cycles |
| `tb_mcu` (with `mcu_harness.sv`) | all three variants against a digit-level reference model: programmed weights, MVM+MTVM results and their 22-cycle busy time, OPA, saturation count, commit, CRS, OPA after CRS |
| `tb_core` | a training-style kernel on variants 2 and 3: memory results of MVM, MTVM and every VFU op; weights unchanged before halt and W + x*g after; log/replay versus eager OPA plus commit; counters; MCU busy cycles |
| `tb_panther_tile` | two cores, 1-entry log, CRS every 2 batches; the kernel of `tb/tile_test.svh` twice on both cores |
| `tb_panther_tile_full` | the same kernel on all 8 cores of the full-size tile, no parameter overrides |

The two tile tests count every mechanism and fail if one never happened:

- MVM, MTVM, OPA logged and replayed;
- cell saturation;
- shared-memory contention;
- carry resolution and log overflow (reduced tile only).

Build and run a test with plain Verilator, for example:

```
verilator --binary -j 8 --timing --assert -Irtl -Itb rtl/panther_pkg.sv tb/tb_mcu.sv --top-module tb_mcu
./obj_dir/Vtb_mcu
```

Simulation notes:

- Keep crossbar models at N = 128 in simulation. At N of 64 or less, Verilator unrolls the
  cell loops and the build becomes very large.
- The full tile simulates at roughly a thousand cycles per second.
