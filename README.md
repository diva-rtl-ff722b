# DiVa: an outer-product accelerator for differentially private training

Differentially private SGD (DP-SGD) bounds how much any single training example
can move the model. Each example's weight gradient is clipped to a maximum L2
norm before the gradients of a mini-batch are summed and noised. Two steps
dominate the cost on a conventional accelerator:

* **Per-example gradient GEMMs.** A per-example weight gradient is the product
  of one example's activations and its output gradients. Its inner (reduction)
  dimension K is only the number of positions of that example: the pixels of a
  feature map, or the tokens of a sequence, often 16 to 1024. A weight-stationary
  systolic array needs about as many cycles to fill and empty as it spends
  computing such a product, so it idles most of the time.
* **Norm derivation.** Each per-example gradient must be written out, read back
  and reduced to one number. This is a memory-bound pass over data that is only
  used once.

The design here is built around the reweighted form of DP-SGD. A first backward
pass computes only the per-example norms. A second pass computes a single
per-batch gradient in which each example is scaled by its clipping factor. The
chip therefore has two jobs: GEMMs with a short K, at full MAC use, and a
squared L2 norm for every per-example gradient tile, computed on the fly so
that the tile never leaves the chip.

## Block diagram

```
            host commands (diva_cmd_t, valid/ready)
                         |
                   control_unit ----------------------------+
                  /     |      \                            |
   mem_* <-> dma_unit   |       \                           |
             |   ^      |        \                          |
      (demux)|   |      v         v                         |
   LHS input_buffer  RHS input_buffer                       |
        |                 |                                 |
   transpose_unit    transpose_unit  (bypass, or column     |
        |                 |           reads of a tile)      |
        v                 v                                 |
   vector_queue      vector_queue   } gemm_engine           |
        \                 /                                 |
      PE_H x PE_W pe array (row / column broadcast)         |
                |   drain: R rows per clock                 |
                v                                           |
         +------+-------+                                   |
         v              v                                   |
    output_buffer      ppu: square -> R adder trees ->      |
         ^              combine tree -> accumulator ------->+
         +-- dma_unit (store)        norm_sq (NORM_WR)
```

Every box is one module in `rtl/`. `diva_top` wires them together. The
off-chip DRAM sits behind the `mem_*` port; a behavioural model
(`tb/dram_model.sv`) stands in for it in the testbenches.

## Default configuration

| Parameter | Default | Meaning |
|---|---|---|
| `PE_H`, `PE_W` | 128, 128 | PE array rows and columns (the top requires `PE_H == PE_W`) |
| `R` | 8 | output rows drained per clock; also the number of PPU row trees |
| `IB_DEPTH` | 16384 | lines per input buffer (16384 × 128 × 2 B = 4 MB, one each for LHS and RHS) |
| `OB_ROWS` | 16384 | output-buffer rows (16384 × 128 × 4 B = 8 MB) |
| `QDEPTH` | 4 | entries per vector queue |
| DRAM port | 2048 bit | one 256-byte beat per request; the model answers after 100 cycles |

The PE counts, R, the 16 MB total of on-chip SRAM and the 100-cycle DRAM
latency are the published configuration. The paper does not say how the SRAM
is split; this design gives 4 MB to each input buffer and 8 MB to the output
buffer. The queue depth and the port width are also this design's own choices.

## Number formats

Operands are BF16 and products are accumulated in FP32, as in the published
configuration. `rtl/fp_pkg.sv` holds the arithmetic as functions:

* `bf16_to_fp32` widens an operand.
* `fp32_mul` and `fp32_add` work on FP32 and round to nearest, ties to even.
* Subnormal results and subnormal inputs are flushed to zero.
* Overflow gives infinity.
* NaN and infinity inputs are not treated specially.

A BF16 × BF16 product is exact in FP32. The PE therefore rounds once, in the
addition. The testbenches compute their reference values in double precision
and round once to FP32. That gives the same result, since a double holds the
exact sum of two FP32 values before rounding.

## The outer-product GEMM engine (`gemm_engine`, `pe`, `vector_queue`)

One output tile C (PE_H × PE_W, FP32) is computed as the sum over K of outer
products. In step k, column k of A (PE_H BF16 values) goes on the row
broadcast buses. Row k of B (PE_W values) goes on the column broadcast buses.
Every PE(i, j) multiplies its two inputs and adds the product to its own
accumulator. This is output-stationary with broadcast instead of
neighbour-to-neighbour passing. Nothing has to ripple through the array, so a
tile costs exactly K compute cycles and every MAC works in every one of them,
whatever K is.

The engine takes its vectors from two small FIFOs (`vector_queue`):

* `start` latches `k_steps`.
* A step is taken in every cycle in which both queues hold a vector.
* An empty queue stalls the array (`stall` is high) without losing a step.
* `done` pulses with the last step.
* The first step of a tile overwrites the accumulators. With `acc_continue`
  set at `start`, it adds onto them instead. This lets one tile's K be split
  over several starts, with new operands loaded between them.

**Draining.** Once the array is idle, `drain_req` with group index g returns,
one clock later, accumulator rows g·R … g·R+R−1. A full tile drains in
PE_H/R = 16 clocks. Computing and draining do not overlap: the accumulators
are not double-buffered.

The MAC (BF16 multiply, FP32 add) is one combinational stage in this RTL. A
real 940 MHz implementation would pipeline it. The array would then need an
accumulation pipeline or interleaved tiles; that is not modelled here.

## Post-processing unit (`ppu`, `adder_tree`)

The PPU turns the drained rows of a per-example gradient tile into the
running sum of their squares. It sits on the drain path, so the norm costs no
extra pass:

1. **Square.** All R × PE_W elements are squared (one register stage).
2. **Row trees.** R pipelined adder trees of log2(PE_W) = 7 levels each reduce
   every row to one sum. Each tree has one register per level.
3. **Combine tree.** A log2(R) = 3-level tree adds the R row sums.
4. **Accumulate.** The result is added into a register. When `in_first` marks
   the first group of a new example, it replaces the register instead.

Timing:

* Latency is 1 + 7 + 3 = 11 cycles from a group's input to the accumulator
  update, then 1 cycle for the accumulator register.
* One group (R rows) is accepted per clock.
* `busy` stays high while the pipeline holds data.

The output is the **squared** norm. Clipping needs only the factor
min(1, C/‖g‖), which software computes from it, so no square-root or divide
unit is built. The adder trees add in a fixed pairwise order. A result can
therefore differ in the last bits from a sequential sum; the testbenches model
the same order.

## On-chip buffers and data movement

**`input_buffer`**

* Simple dual-port SRAM of 128-lane BF16 lines.
* One write and one read per clock.
* Read data follows one clock later, with `rvalid`.
* There is one buffer for LHS and one for RHS.
* The DMA fills them through a demultiplexer.

**`transpose_unit`**

* Sits between an input buffer and its queue.
* In bypass mode, a buffer line is passed straight through as the outer-product
  vector.
* In transpose mode, the unit first collects up to 128 lines into a square
  tile register, which is cleared to zero at the start of every GEMM. It then
  hands out column k at step k.
* This serves operands held in the other major order, such as the transposed
  activations of the backward pass.
* A transposed operand is limited to K ≤ 128 and ≤ 128 lines per GEMM.

**`output_buffer`**

* R banks interleaved by row, so one drain group of R rows is written in a
  single clock.
* The write row must be a multiple of R; an assertion checks this.
* A per-row write mask lets NORM_WR write a single row.
* The store path reads one row per clock.

**`dma_unit`**

* Loads: DRAM beats of 256 B = one 128-lane BF16 line, into the LHS or RHS
  buffer.
* Stores: output-buffer rows (128 × FP32 = 512 B = 2 beats) to DRAM.
* Load requests are issued back to back and responses return in order, so a
  long load pays the DRAM latency once.
* Store writes are posted.

## Command interface and control (`control_unit`, `diva_pkg`)

Software describes the tiled computation as a stream of `diva_cmd_t`
commands. The control unit runs one command at a time; `cmd_ready` is high
when it is idle.

| `op` | Action |
|---|---|
| `OP_LOAD_LHS` / `OP_LOAD_RHS` | `len` lines from DRAM beat `dram_addr` to input-buffer line `buf_addr` |
| `OP_STORE` | `len` output-buffer rows from `buf_addr` to DRAM beat `dram_addr` (2 beats per row) |
| `OP_GEMM` | one output tile; see below |
| `OP_NORM_WR` | wait for the PPU to empty, then write `norm_sq` into lane 0 of output row `out_base` |

An `OP_GEMM` command runs these phases:

1. **FILL.** Only for an operand with `lhs_tr` / `rhs_tr` set: `lhs_rows` /
   `rhs_rows` lines are read from the buffer into the transpose tile.
2. **START.** The engine is started with `k` steps and `k_continue` as
   `acc_continue`.
3. **STREAM.** `k` vector pairs are pushed, one pair per clock. Each vector is
   either buffer line `lhs_base + step` / `rhs_base + step`, or column `step`
   of the transpose tile. Issue pauses while either queue reports almost full.
4. **WAIT.** The control unit waits for the engine's last step.
5. **DRAIN.** 16 clocks, skipped when `no_drain` is set. Group g goes either
   to output rows `out_base + g·R` or, with `to_ppu`, into the PPU.
   `norm_clear` marks a tile that starts a new example; tiles of the same
   example without it add onto the running norm.

For one training step of the reweighted algorithm, software:

1. issues the per-example gradient tiles of each example with `to_ppu`;
2. reads each norm back with `OP_NORM_WR` + `OP_STORE`;
3. scales the output gradients by the clipping factors;
4. issues the per-batch gradient GEMM with results to the output buffer.

A per-batch K (batch size × positions) can exceed the 16384-line input buffer.
It is then split over several GEMM commands: all but the last set `no_drain`,
and all but the first set `k_continue`, with LOAD commands between them.

## Cycle counts

For one GEMM tile that needs no transposition:

* **Compute:** K clocks, plus about 3 clocks of buffer-read and queue latency.
* **Drain:** 16 clocks, or none with `no_drain`.
* **Transposed operand:** add the `lhs_rows` / `rhs_rows` lines read into the
  transpose tile.

A tile with K = 32 (a BERT layer at sequence length 32) thus spends 32 of about
51 clocks computing. Loads move one 256 B line per clock after the first
response. At 940 MHz that is about 240 GB/s, below the 450 GB/s memory system
of the published configuration.

## Departures from the published design

* **No im2col.** The paper's data-permutation step also performs the
  convolution lowering (im2col). This RTL only transposes, so convolution
  operands must be lowered before they are loaded.
* **No compute/drain overlap.** Draining runs after the last step instead of
  overlapping with the next tile. The paper does not say which it does.
* **Sequential control.** Loads, GEMMs and stores do not overlap. The command
  set is this design's own.
* **Single-cycle MAC.** The MAC is one combinational stage (see above).
* **Squared norm only.** The PPU stops at the squared norm. The square root
  and clip factor are left to software.
* **Memory system.** One in-order 2048-bit DRAM port replaces the paper's 16
  channels, at about half their bandwidth. The DRAM is only a behavioural
  model.
* **SRAM split.** The 4 MB + 4 MB + 8 MB split of the 16 MB is assumed.
* **Power and area.** The paper's energy model, area and power numbers are not
  part of the RTL.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench:

* compares against values computed independently in the testbench, using the
  double-precision helpers in `tb/tb_fp_pkg.sv`;
* checks cycle counts where the design defines them;
* has a watchdog;
* ends with a `TB_RESULT checks=… failures=…` line.

| Testbench | What it covers |
|---|---|
| `tb_pe` | MAC against the reference, first-step overwrite, hold when disabled |
| `tb_vector_queue` | random push/pop against a model queue, full / almost-full flags |
| `tb_gemm_engine` | 8×8 array, R = 2: random tiles, K = 1..40, stalls from empty queues, K split over three starts, drain order, busy for exactly K firing cycles |
| `tb_adder_tree` | random vectors, pipeline latency log2(N) |
| `tb_ppu` | per-example norm accumulation and restart, latency |
| `tb_input_buffer`, `tb_output_buffer` | random write/read traffic, banking, write mask |
| `tb_transpose_unit` | bypass and column reads of a random tile, clearing |
| `tb_dma_unit` | loads and stores against the DRAM model, with random stalls |
| `tb_control_unit` | every command at default sizes with stand-in blocks: phase order, addresses, back-pressure from the queues, no_drain / k_continue |
| `tb_diva_top` | whole chip at 8×8, R = 2: see below |
| `tb_diva_mid` | the same program on a 32 × 32 array with the default R = 8 |

`tb_diva_top` runs a small DP-SGD program end to end against the DRAM model:

* two examples, each reduced by the PPU to a squared norm that is then
  written back and stored;
* the first example has two per-example gradient tiles (K = 5 and 3), so its
  norm accumulates over both;
* the second example has one tile (K = 6) with both operands transposed on
  chip;
* one per-batch tile with K = 20, split over two GEMM commands.

It checks the DRAM contents afterwards and counts each mechanism: load and
store beats, transposed operands, engine stalls, drains to the PPU and to the
buffer, norm accumulation and restart, norm writes, and K-split
continuations. It reports a failure for any mechanism that never happened.
`tb_diva_mid` runs the same program on a 32 × 32 array with R = 8, so the PPU
has all eight row trees. This is the largest size simulated end to end. At the
default 128 × 128 size the design elaborates cleanly, but Verilator turns it
into about 1,200 C++ files (1.5 GB). Compiling those takes over an hour, so
there is no default-size simulation.

Simulation with Verilator 5:

```
verilator --binary --timing --assert rtl/fp_pkg.sv rtl/diva_pkg.sv tb/tb_fp_pkg.sv \
    -y rtl -y tb tb/tb_diva_top.sv --top-module tb_diva_top
obj_dir/Vtb_diva_top
```

Use the same command for any other testbench, with its name in place of
`tb_diva_top`. The design at default size is large: 16,384 FP32 MACs plus
16 MB of buffer arrays. Verilator needs about four minutes and 7 GB to lint
it. The 8 × 8 testbenches build in under a minute; `tb_diva_mid` takes about
two minutes.

## Files

* `rtl/fp_pkg.sv`: BF16 / FP32 types and arithmetic functions.
* `rtl/diva_pkg.sv`: default sizes, command and DMA descriptor types.
* `rtl/pe.sv`, `rtl/vector_queue.sv`, `rtl/gemm_engine.sv`: the GEMM engine.
* `rtl/adder_tree.sv`, `rtl/ppu.sv`: the post-processing unit.
* `rtl/input_buffer.sv`, `rtl/output_buffer.sv`, `rtl/transpose_unit.sv`:
  on-chip storage and operand permutation.
* `rtl/dma_unit.sv`, `rtl/control_unit.sv`: data movement and sequencing.
* `rtl/diva_top.sv`: the chip.
* `tb/`: the testbenches above, the reference arithmetic package
  `tb_fp_pkg.sv` and the DRAM model `dram_model.sv`.
