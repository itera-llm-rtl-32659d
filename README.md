# Low-rank MatMul accelerator for sub-8-bit transformer layers

A linear layer of a transformer computes Y = X W, where X is M x K
(activations: M tokens with K features each) and W is K x N. When W is stored
as two low-rank factors, W ≈ W1 W2 with W1 of K x R and W2 of R x N, the
layer becomes Y = (X W1) W2. For R well below K and N this needs fewer
multiply-accumulates and far fewer weight bytes than the dense product. The
factors here are quantised to 4 bits and the activations to 8 bits (W4A8).
The point of the accelerator is that the low-rank form keeps the
weight-fetch bandwidth low without the accuracy loss of quantising W itself
to 4 bits.

This RTL implements the hardware side of that scheme. It is a spatial array
of multiply-accumulate processing elements (PEs), organised as:

- a **Single engine**: one array computes X W1, keeps the result on chip,
  and then computes (X W1) W2; or
- a **Cascade engine**: two arrays compute the two products in parallel,
  joined by an on-chip intermediate buffer.

The default build is a Single engine of 104 x 28 PEs, each taking 2 products
per cycle. That is the published W4A8 design point for a Xilinx ZCU111 board
at 170 Gbit/s of off-chip bandwidth. The same hardware also runs ordinary
dense layers.

## The processing element (`pe`)

A PE computes one dot product along K, taking `KF` (default 2) activation and
weight pairs per cycle. It has three register stages:

1. `KF` signed 8 x 4-bit multipliers;
2. an adder tree over the `KF` products;
3. an accumulator.

The stream of beats carries two flags:

- `first` restarts the accumulator;
- `last` makes the PE present `acc + sum` on `out_data`, with `out_valid`
  high for one cycle.

The latency is therefore 3 cycles. A PE accepts one beat per cycle and needs
no K counter. Consecutive dot products can follow each other with no gap: the
first beat of the next product overwrites the accumulator in the same cycle
in which the previous result is registered.

`en` freezes all three stages at once, and that is how the whole design
stalls. The accumulator is 32 bits wide, which holds 2048 products of 8 x 4
bits without overflow.

## The spatial array (`pe_array`)

`MT x NT` PEs are arranged as a grid. It is output-stationary: each PE owns
one element of the output tile for the whole reduction. LHS vectors (`KF`
activations of one X row) are broadcast along the PE rows. RHS vectors (`KF`
weights of one W column) are broadcast along the PE columns. There is no
systolic skew: every PE sees the same beat index in the same cycle, so after
`ceil(K/KF)` beats plus 3 cycles the whole `MT x NT` tile is finished at
once.

The loop nest that the engines wrap around the array is:

```
for each M tile of MT rows             (X tile loaded once)
  for each N tile of NT columns        (W tile streamed once per M tile)
    for k = 0 .. ceil(K/KF)-1          (one beat per cycle, all PEs together)
```

## Buffers

| block | holds | organisation |
|---|---|---|
| `lhs_buffer` | two MT x K tiles of X (two banks) | per bank, one memory per PE row, `ceil(KMAX/KF)` words of KF activations; all rows of the selected bank read the same address in the same cycle; the stream port fills one bank while the array reads the other; a second write port writes one word into every row of a bank at once |
| `rhs_buffer` | weight beats on their way to the array | one FIFO per PE column, depth `ceil(KMAX/KF)`, pushed and popped in lock step |
| `output_buffer` | one finished MT x NT tile | takes the whole tile in one cycle, then gives it out one row per cycle; while it is full the array freezes as soon as its next tile is done |
| `intermediate_buffer` | the MT x R tile of requantised X W1 | 8-bit elements addressed by (bank, row, column); written in row segments of the producing array's width, read as KF columns of every row at once |

The RHS side is a FIFO because each weight beat is used exactly once per
M tile. The LHS side must be addressable, because the same X tile is read
again for every N tile.

Reads of `lhs_buffer` and `intermediate_buffer` are combinational. An FPGA
build would map them to distributed RAM. For block RAM, add one register
stage in front of the array and delay the control flags by the same amount.

## Requantisation of X W1

The 32-bit dot products of X W1 become the 8-bit activations of the second
product:

```
t = sat8( (acc + 2^(s-1)) >>> s )      (s = cfg.rq_shift; s = 0 means no rounding)
```

This is an arithmetic right shift with round-half-up, followed by saturation
to [-128, 127]. The shift is set per layer in the configuration. It is the
only place where precision is lost inside the accelerator. Y is delivered at
full 32-bit precision.

## Single engine (`single_svd_engine`)

One array does everything, so the N tiling factor of the hardware serves both
as the R tiling of W1 and as the N tiling of W2. Per M tile:

1. **LOAD** – `rows x ceil(K/KF)` cycles. X arrives on the `x` stream, row by
   row, into one bank of the LHS buffer. A separate loader does this while
   the array is still working on the previous M tile from the other bank. A
   bank can be refilled as soon as its tile has finished pass 2.
2. **PASS 1** – `ceil(R/NT)` tiles of `ceil(K/KF)` beats. W1 tiles arrive on
   the weight stream. Each finished tile leaves the output buffer row by row,
   is requantised, and is written into the intermediate buffer at column
   `tile x NT`.
3. **COPY** – `ceil(R/KF)` cycles. The MT x R intermediate tile is written
   back into the LHS bank just computed from, one word into all rows per
   cycle. X is no longer needed there. This is the feedback path from the
   output/intermediate buffer to the LHS buffer.
4. **PASS 2** – `ceil(N/NT)` tiles of `ceil(R/KF)` beats. W2 tiles arrive on
   the same weight stream. Finished tiles go out on `y`.

With `cfg.svd_en = 0`, steps 2 and 3 are skipped and pass 2 runs the dense W
with `ceil(K/KF)` beats. This is the plain MatMul engine on which both SVD
engines are based.

### Cycle count

With streams that never wait, let `KB = ceil(K/KF)` and `RB = ceil(R/KF)`.
For an M tile of `rows` rows:

```
load    L = rows*KB
compute C = KB + (ceil(R/NT)-1) * max(KB, rows+1) + rows + 4      pass 1
          + RB                                                    copy
          + RB + (ceil(N/NT)-1) * max(RB, rows+1) + rows + 4      pass 2
```

In dense mode, C is just one pass with `KB` beats. The timing of tile i:

- Its load starts when load i-1 has ended and computation i-2 has freed the
  bank.
- Its computation starts one cycle after both load i and computation i-1
  have ended.
- `done` comes one cycle after the last computation.

The term `max(beats, rows+1)` appears because a tile cannot enter the output
buffer before the previous tile has left it, one row per cycle. When a pass
has fewer beats than the tile has rows, the output port, not the array, sets
the pace, and `stall` goes high.

Example: the 512 x 512 x 512 layer at rank 128 takes 134,428 cycles, which
is 0.67 ms at 200 MHz. The full-size testbench checks this count exactly.

The layer is bound by loading X. The `x` port brings KF activations per
cycle, so a 104 x 512 tile takes 26,624 cycles to arrive. Computing it takes
about 3,500 cycles, with the second pass output-bound at 64 beats per tile
against 104 rows. A wider `x` port, writing one word into several row
memories per cycle, would make the array the bottleneck again. It is not
built.

## Cascade engine (`cascade_svd_engine`)

Array A (`MT x RT` PEs) computes X W1, and array B (`MT x NT` PEs) computes
(X W1) W2. Both arrays must share `MT`, so that a row tile of X W1 is exactly
a row tile of B's input. Each array has its own column factor and its own
weight stream (`w1`, `w2`).

The intermediate buffer has two banks:

- **Front end (array A):** loads the X tile, waits until its bank is free,
  runs the `ceil(R/RT)` W1 tiles into it, marks the bank full and switches
  to the other bank.
- **Back end (array B):** waits for a full bank and reads it directly as its
  LHS. No copy step is needed. It runs the `ceil(N/NT)` W2 tiles out to `y`,
  then frees the bank.

Array A can therefore work on M tile i+1 while array B finishes tile i. The
arrays really work at the same time only when B's work on a tile is at least
as long as A's load of the next one. `cfg.svd_en` is ignored: this engine
always computes the two-factor product.

The default column split is `RT = NT = 14`: half of the Single design point's
28 columns each. No published Cascade design point gives these numbers.

## Top level (`itera_accel`)

`ENGINE` selects `ENGINE_SINGLE` (the default) or `ENGINE_CASCADE` when the
design is built. All data moves on valid/ready streams, which is where
off-chip memory and its DMA engines connect:

| port | beat |
|---|---|
| `x_*` | KF activations (8 bits each, element f at bits `[8f+7:8f]`); rows of `ceil(K/KF)` beats, M rows in order |
| `w1_*` | for each PE column j, KF weights (4 bits each) at bits `[(j*KF+f)*4 +: 4]`. Single: per M tile, the `ceil(R/NT)` W1 tiles of `ceil(K/KF)` beats, then the `ceil(N/NT)` W2 tiles of `ceil(R/KF)` beats (dense: W tiles only). Cascade: per M tile, the W1 tiles (`CASC_RT` columns) |
| `w2_*` | Cascade only: per M tile, the W2 tiles (`CASC_NT` columns). Never ready in a Single build |
| `y_*` | one row of YN 32-bit results (`YN` = NT or CASC_NT): per M tile, per N tile, rows 0..rows-1 |

The sender zero-pads every beat past K, R or N. The last M tile may have
fewer than MT rows. Results in columns past N are padding.

Control: `cfg` (a `layer_cfg_t` with M, K, N, R, `svd_en` and `rq_shift`) is
sampled with `start` while `busy` is low. `done` pulses once at the end.
`stall` is high in each cycle in which an array is frozen because its output
buffer is still full. Reset is asynchronous and active low.

### Parameters

The Single engine's LHS buffer has two banks. The Cascade engine's has one.

| parameter | default | where it comes from |
|---|---|---|
| `MT`, `NT`, `KF` | 104, 28, 2 | published W4A8 design point at 170 Gbit/s (also given there: W6A8 172/16/2; at 42.5 Gbit/s 256/8/2 for both) |
| `A_W`, `W_W` | 8, 4 | W4A8 |
| `ACC_W` | 32 | chosen: exact for K up to 2048 |
| `KMAX` | 2048 | largest K of the transformer-base layers (feed-forward down-projection); the Q/K/V layers have K = 512 |
| `RMAX` | 512 | full rank of a 512-wide layer |
| `CASC_RT`, `CASC_NT` | 14, 14 | chosen |

## Verification

Each block has a self-checking testbench in `tb/` that compares every output
against an integer reference computed in the testbench from random data:

- `tb_pe`, `tb_pe_array`, `tb_lhs_buffer`, `tb_rhs_buffer`,
  `tb_output_buffer`, `tb_intermediate_buffer` test the units. They cover
  bubbles, freezes, back-to-back products, full buffers and partial writes.
- `tb_single_svd_engine` and `tb_cascade_svd_engine` run layers with partial
  M and N tiles.
  - Single runs with free streams are checked against the cycle formula above.
  - Cascade runs are checked to beat the serial schedule, and the testbench
    confirms that both arrays really worked in the same cycles.
- `tb_itera_accel` runs small builds of both organisations through the top.
  It counts stalls, SVD and dense layers, partial tiles, saturated
  intermediate values and cycles in which the two Cascade arrays overlap. It
  fails if any of them never happened.
- `tb_itera_accel_full` runs the default build on a 512 x 512 x 512 layer at
  rank 128. It checks all 262,144 outputs and the exact cycle count, and
  takes about 20 s of simulation.
- `tb_itera_accel_workloads` runs the other evaluated shapes on full-size
  builds. It takes about 3 minutes.
  - Single engine: the dense 512 x 512 x 512 layer, and the first M tiles
    (208 or 104 rows) of three more layers: the same layer at full rank 512,
    the feed-forward up-projection 512 -> 2048 at rank 256, and the
    down-projection 2048 -> 512 at rank 256. Each cycle count is checked
    against the timing model.
  - Cascade engine (104 x 14 + 104 x 14 PEs): the 512 x 512 x 512 layer at
    rank 128.

| layer (M = 512) | engine | cycles | at 200 MHz |
|---|---|---|---|
| 512 x 512 x 512 dense | Single | 136,038 | 0.68 ms |
| 512 x 512 x 512, R = 128 | Single | 134,428 | 0.67 ms |
| 512 x 512 x 512, R = 512 | Single | 141,258 | 0.71 ms |
| 512 -> 2048, R = 256 | Single | 143,434 | 0.72 ms |
| 2048 -> 512, R = 256 | Single | 537,290 | 2.69 ms |

The Single-engine numbers for full rank and the feed-forward layers come from
the timing model. Full M = 512 runs of these three layers reproduced them
exactly during development, but the testbench now runs only their first
M tiles.
| 512 x 512 x 512, R = 128 | Cascade | 148,066 | 0.74 ms |

All of these are bound by the `x` port (see above), which is why the low-rank
layers gain little over the dense one in this build.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_itera_accel \
    rtl/itera_pkg.sv rtl/*.sv tb/tb_accel_harness.sv tb/tb_itera_accel.sv -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=N failures=M`. Variables that
nothing initialises may start at random values (`+verilator+rand+reset+2`),
and the testbenches are written to pass that way.

## Where this design makes its own choices

The tiling, the output-stationary array with broadcast operands, the per-row
and per-column buffers of depth `ceil(K/KF)`, the Single engine's time reuse
with an on-chip M-tile of X W1, and the Cascade engine's two arrays sharing
`MT` all follow the published architecture. The following are this design's
own choices:

- **Number format and requantisation.** The number format (signed two's
  complement) and the requantisation between the two products are not
  specified by the source. Real deployments may need per-channel scales
  instead of one shift.
- **Loading.** The Single engine overlaps loading one M tile with computing
  the previous one, using two LHS banks. Its `x` port carries only KF
  activations per cycle, which makes loading the longer part at the default
  size. The Cascade engine's first array loads its X tile before computing
  it; only the two arrays overlap each other. In the Single engine the copy
  of X W1 into the LHS bank costs `ceil(R/KF)` cycles per M tile.
- **Output port width.** The output buffer drains one row per cycle. For
  layers whose passes have fewer beats than `MT`, this port, not the array,
  sets the throughput.
- **Ping-pong intermediate buffer.** The Cascade engine's two intermediate
  banks are added so that the arrays can overlap.
- **No off-chip side.** DMA engines, off-chip memory, the host interface and
  the clock (200 MHz in the published evaluation) are outside this RTL. Its
  edge is the valid/ready streams and `start/cfg/done`.
- **Plain multipliers.** The default array has 104 x 28 x 2 = 5,824
  multipliers of 8 x 4 bits. That is more than the ZCU111's 4,272 DSP
  blocks, so the published resource budget relies on packing two such
  products into one DSP. The RTL writes plain signed multiplies and leaves
  that mapping to synthesis.
- **Memories as arrays.** Buffers are written as plain arrays, so synthesis
  decides between block RAM, distributed RAM and registers. At the default
  size the LHS and intermediate buffers are large: 2 x 104 x 1024 x 16 bits
  and 104 x 512 x 8 bits.
