# WaveCore: a systolic training core with gap-less waves

Training a convolutional network moves far more data than inference: every
layer's output must be kept for the backward pass, and with a mini-batch of
dozens of samples a single layer's activations no longer fit on chip. The
approach this core is built for, mini-batch serialization, splits the
mini-batch into sub-batches whose inter-layer data does fit in a large
on-chip buffer, so consecutive layers hand their results to each other through
SRAM instead of DRAM. Smaller sub-batches make each GEMM (convolutions are
lowered to matrix multiplies with im2col) shorter, so the compute engine must
stay busy on short problems. WaveCore does that with a 128 x 128
weight-stationary systolic array whose processing elements hold **two**
weight registers: the next block of weights is shifted in while the current
block is still multiplying, so consecutive "waves" through the array follow
each other with no bubble.

This repository holds synthesizable SystemVerilog for one WaveCore core and
a self-checking testbench for every block.

## GEMM as tiles and waves

The core computes `C = A x B` in fp16 with fp32 accumulation.

* A **B block** is `k x n` = 128 x 128 weights, one per processing element
  (PE).
* An **A block** is `m x k`: up to 256 rows of 128 elements.
* A **wave** streams one A block through the array against one B block and
  produces `m x n` partial results.
* A **tile** of C (`m x n`) is the sum over `nwaves` waves, one per
  128-wide slice of the inner dimension. The accumulation buffer adds the
  waves of a tile column by column.

Each wave has two phases:

1. **Pre-load.** The B block enters the PEs from the top, one row per cycle.
2. **Stream.** The A rows enter from the left, skewed one cycle per array
   row. Dot products leave the bottom of each column.

With one weight register per PE the pre-load of wave `g+1` would have to wait
until wave `g` has left the array. With two registers the pre-load goes into
the idle register. The wave only has to wait until its weights are in place
and the previous wave's A stream has gone by. The tile controller
(`wc_tile_ctrl`) schedules each wave `g` with these rules, where `P_g` is the
cycle its pre-load starts and `S_g` the cycle its stream starts:

* `S_g >= P_g + K`: a stream starts after its weights are in the PEs.
* `P_g >= P_{g-1} + K`: the weight path carries one block at a time.
* `P_g >= S_{g-2} + m + N - 2`: the register being overwritten was last used
  by wave `g-2`, and its last A row must have crossed the whole row.

Once the loaders keep up, streams follow each other with `S_g = S_{g-1} + m`.
The controller counts such back-to-back waves (`n_gapless`) and every cycle it
waits for a loader (`n_stall`). At the default sizes a wave has `m = 256`
cycles of streaming, while the pre-load plus drain needs `n + 2k - 2 = 382`
cycles spread over two waves. The pre-load is therefore hidden completely.

## The processing element and its register select

`wc_pe` registers three paths:

* horizontal, 17 bits: `{sel, fp16 A}`;
* vertical weight path, 17 bits: `{sel, fp16 weight}`;
* vertical partial sum, 32 bits.

The select bit travelling with A picks which weight register feeds the
multiplier. The select bit on the weight path says which register a weight
is meant for.

The column of weights is shifted down a chain of PEs, so each PE has to know
which word belongs to it. This design's rule adds no extra wire:

* Each PE remembers the select of the last weight it captured.
* The first arriving word with a *different* select is captured into
  `wreg[sel]`.
* In its place, a word carrying the *old* select is passed down. Lower PEs
  ignore that word.
* Words whose select matches the stored one pass through unchanged.

The B buffer sends row 0 first. Row 0 is captured by the top PE, row 1 by the
second, and so on. A load takes `2k-1` cycles until the bottom PE has its
word. The one-row-per-cycle injection still takes `k` cycles, which is what
the scheduling rules use. At reset the stored select is 1, so the first block
goes to register 0.

The MAC (`wc_mac`) multiplies fp16 x fp16 exactly and adds into fp32. When
either operand is zero it skips the arithmetic and passes the partial sum
through. The testbench counts how often this happens.

Floating-point conventions, chosen here (numeric details are not given in
the source description):

* IEEE binary16 and binary32 formats;
* round to nearest even;
* subnormals flushed to zero;
* overflow to infinity;
* no special NaN handling beyond what falls out of the arithmetic.

All functions are in `wc_fp_pkg`.

## Timing of the array edges

`feed_start` pulses in cycle `S` for A and in cycle `P` for B. Then:

* A row `i`, element `r` is on `a_edge[r]` in cycle `S + 2 + i + r`.
* Weight row `j` is on every `w_edge[c]` in cycle `P + 2 + j`.
* A value entering row `r` of column `c` in cycle `t` reaches the bottom of
  column `c` in cycle `t + (K - r) + c`. The result for A row `i` therefore
  leaves column `c` in cycle `S + 2 + i + K + c`.

The row tag `{valid,row,first,last,bank}` leaves the A buffer with element 0
of each row. The accumulation buffer delays the tag `K` cycles, then one more
cycle per column. Each column's adder therefore sees the tag that matches its
data: `first` overwrites, later waves add, and `last` on the last row ends the
tile.

## Buffers

| Buffer | Organisation | Size per half/part at defaults |
|---|---|---|
| A local buffer (`wc_a_buffer`) | 2 halves x 256 rows x 128 fp16 | 64 KiB |
| B local buffer (`wc_b_buffer`) | 2 halves x 128 x 128 fp16 | 32 KiB |
| Accumulation buffer (`wc_accum_buffer`) | 3 parts x 256 x 128 fp32 | 128 KiB |
| Global buffer (`wc_global_buffer`) | 32 banks x 10240 x 256 bit | 10 MiB total |

While one half of a local buffer feeds the array, the other half is filled
from the global buffer by a `wc_block_mover`. This small engine walks the
rows of a block and moves them through one or more crossbar ports. It is
shared by the A loader (8 ports), the B loader (4 ports) and the accumulation
drain (4 ports). The accumulation buffer has three parts:

* one accumulates the current tile;
* one can be draining the previous tile, rounded to fp16, into the global
  buffer;
* one is free for the tile after that.

A global-buffer word is 256 bits: 16 fp16 values. A row of a block with `w`
columns takes `w/16` consecutive words, starting at `base + row * (w/16)`.
Banks are interleaved on the low five address bits, so consecutive words go
to different banks.

## Crossbar and load coalescing

`wc_crossbar` connects 24 requester ports to the 32 banks:

* Ports 0-3: memory controllers.
* Ports 4-11: A loader.
* Ports 12-15: B loader.
* Ports 16-19: accumulation drain.
* Ports 20-21: vector unit.
* Ports 22-23: spare.

Each bank has a round-robin arbiter (`wc_coalesce`). Several reads of the
*same* word in one cycle are merged: all of them are granted and they share
the winner's single bank access. This is the load coalescing that keeps
duplicated fetches from costing bank bandwidth.

Protocol:

* A request is granted combinationally in the same cycle.
* Read data arrives one cycle after the grant, with `rvalid`.
* A request that is not granted must be held.

The crossbar reports how many reads were coalesced and how many requests
lost arbitration in each cycle.

## Vector unit

`wc_vector_unit` handles the memory-bound layers next to the global buffer. It
processes 16 fp16 lanes, one 256-bit word per step, with these operations:

* ReLU;
* ReLU that also writes a 1-bit-per-element gradient mask (16 words of data
  give one word of mask);
* ReLU backward using such a mask;
* element-wise max (pooling);
* add (residual joins);
* scale and shift (normalisation with given gamma/beta);
* sum and sum of squares over a vector (normalisation statistics).

It uses one crossbar read port and one write port.

## Top level: `wavecore_core`

The top level instantiates:

* the array;
* the three local buffers;
* the tile controller;
* the crossbar;
* the global buffer;
* the vector unit.

Interfaces:

* **Tile commands** (`tile_valid/ready`, `tile_cmd_t`): A, B and C base
  addresses, the number of waves and the tile height `m`.
* **Vector commands** (`vec_valid/ready`, `vec_cmd_t`).
* **Memory-controller ports** (`mc_req/mc_rsp[4]`): raw crossbar ports where
  DRAM controllers or a host can read and write the global buffer.
* **Event counters**: waves, gap-less waves, stall cycles, coalesced reads,
  bank conflicts and finished tiles.

## Departures from the described design

* One core only. The described chip has two cores on an on-chip network,
  with HBM2 behind memory controllers. Neither the network nor the
  controllers are specified in enough detail to build, so the core exposes
  the four controller ports instead.
* A weight load takes `2k-1` cycles through the PE chain, because of the
  capture rule above, instead of `k`. At the default sizes this stays hidden
  behind the previous wave.
* The accumulation buffer does not read back partial sums from memory. A
  tile's inner dimension is covered entirely by its waves.
* Normalisation division and square root are not in hardware. The vector
  unit provides the sums, and the scalar step is left to the controlling
  software.
* The target clock is 0.7 GHz. The MAC here is one combinational stage
  between PE registers, and no timing closure has been attempted.
* Loader bandwidth is sized so the buffers keep up with gap-less waves at
  the defaults. The A loader moves 8 words per cycle, one 128-element row,
  which is what a wave consumes. The B loader moves 4 words per cycle, so a
  1024-word B block arrives in 256 cycles, the length of one 256-row wave.
* Arbitration policy, port allocation, bank interleaving, memory latencies,
  reset behaviour and floating-point corner cases are this design's own
  choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The testbenches compare
against independent references: `tb_fp_ref_pkg` computes in double precision,
and `tb_gb_model` is a behavioural memory with random grant stalls.

| Testbench | What it checks | Size simulated |
|---|---|---|
| `tb_wc_mac` | 40k random and corner-case MACs against a double-precision reference, zero skip | - |
| `tb_wc_pe` | double-buffered weight capture, register select, pass-through | - |
| `tb_wc_systolic_array` | 8 back-to-back waves, each output cycle-exact, gap-less issue | 8 x 6 array |
| `tb_wc_a_buffer`, `tb_wc_b_buffer` | fill through stalling ports, skewed feed, selects, back-to-back feeds | k=32 / 12 x 64 |
| `tb_wc_accum_buffer` | multi-wave accumulation, two tiles, fp16 drain, busy/done | 4 x 32 |
| `tb_wc_global_buffer`, `tb_wc_crossbar`, `tb_wc_coalesce` | banked storage, arbitration fairness, coalescing, read latency | full 24 ports |
| `tb_wc_vector_unit` | every operation against a reference | 16 lanes |
| `tb_wavecore_core` | four GEMM tiles (1-3 waves each) checked against a reference, vector ops run concurrently, all mechanisms counted | 16 x 16 array, M_MAX=32 |

The largest configuration simulated end to end is a 16 x 16 array with 32-row
A blocks and 256-word banks. That run counted 8 waves, at least one gap-less
wave, loader stalls, coalesced reads, bank conflicts, 4 drained tiles and
skipped zero products. The 128 x 128 default lints and elaborates, but
verilator generates tens of kilobytes of C++ per PE, so a full-size simulation
was not practical.

To simulate a block, for example the core:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/wc_fp_pkg.sv rtl/wc_core_pkg.sv tb/tb_fp_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) tb/tb_gb_model.sv tb/tb_wavecore_core.sv --top-module tb_wavecore_core
./obj_dir/Vtb_wavecore_core
```

Change the sizes through the parameters of `wavecore_core` (`K_ROWS`,
`N_COLS`, `M_MAX`, `GB_BANKS`, `GB_BANK_WORDS`). `N_COLS` and `K_ROWS` must be
multiples of 16.

## Workloads

The design targets ResNet-50, Inception v3, Inception v4 (32 samples per
core) and AlexNet (64 samples per core). At one sample, the largest
activation tensor ranges from about 0.55 MiB (AlexNet) to about 4 MiB
(Inception v4). Sub-batches of 2-18 samples therefore fit in the 10 MiB global
buffer. The weights, tens of megabytes, live in DRAM. Tiling makes every
layer's GEMM runnable on the array.
