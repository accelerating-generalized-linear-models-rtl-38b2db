# MLWeaving: an any-precision SGD engine for linear models

Training a generalized linear model (least-squares regression, linear SVM)
with stochastic gradient descent is bound by memory bandwidth. Every sample is
read once per epoch, and the arithmetic per byte is small. Low-precision
training reduces the bytes, but usually only by storing a separate quantized
copy of the dataset for each precision.

MLWeaving avoids the copies by storing the dataset **bit-transposed**. Bit 0
(the most significant bit) of many feature values is stored together, then bit
1, and so on. Training at precision *s* then means reading only the first *s*
bit planes of each feature. One stored copy serves every precision from 1 to
32 bits, and the memory traffic and run time fall in proportion to *s*. The
engine consumes the bit planes with **bit-serial multipliers**: one bit of
every feature value enters per cycle, so a lower precision simply finishes in
fewer cycles.

This repository contains synthesizable SystemVerilog for the engine:
- the dot-product, gradient and model-update datapaths;
- the read-after-write hazard control that keeps mini-batch SGD synchronous, with and without "chaining";
- the address generator for the woven layout;
- the per-epoch precision and learning-rate schedules.

It follows the MLWeaving design published by Wang et al. ("Accelerating
Generalized Linear Models with MLWeaving", technical report). Its block
structure and mechanisms are theirs. The port protocols, queue sizes,
pipeline registers and a few safety additions are this implementation's own;
the section "Departures and open points" lists them.

## 1. The woven layout

The data path is built around 512-bit cache lines and 8 **banks**. A group of
8 consecutive samples is processed together, one sample per bank. Features are
handled in **chunks** of 64, so a model of *M* features has C = ceil(M/64)
chunks.

For group *g*, chunk *c* and bit plane *w* (w = 0 is the MSB), one cache line
holds:

| line bits       | content                                              |
|-----------------|------------------------------------------------------|
| `[64k + j]`     | bit *w* of feature `64c + j` of sample `8g + k`     |

So bank *k* takes bits `[64k+63 : 64k]`, and lane *j* within the bank is
feature *j* of the chunk. Features beyond *M* in the last chunk are zero.

The 32 bit planes of one (group, chunk) pair are stored in 32 consecutive
lines. Pairs are ordered chunk-fastest. With addresses counted in cache lines:

    addr(g, c, w) = base + (g*C + c)*32 + w,   w < s

At precision *s* the engine requests the first *s* lines of every block of 32
and skips the rest (`mlw_addr_gen`). One epoch is (N/8)·C·s lines, and the
engine takes one line per cycle.

Feature values are unsigned fractions: bit *w* has weight 2^-(w+1). Labels
and model values are signed Q8.24 (`FIX_ONE = 1 << 24`).

## 2. What is computed, bit for bit

The bit-serial product of a feature value *a*, truncated to *s* bits, with a
model value *x* is

    Q_s(a) * x  =  sum over i = 1..s of  a_bit(i-1) ? (x >>> i) : 0

Each term is shifted right arithmetically and truncated before it is added,
in 32-bit two's complement with wrap-around. Because the order of additions
does not matter modulo 2^32, every adder tree and accumulator below gives
exactly this sum. Any software reference that uses the same rule matches the
hardware bit for bit; the testbenches rely on that.

For each sample *n* of a group, the engine computes:
1. `dot = sum over features m of Q_s(a[n][m]) * x[m]`.
2. `scale = df(dot, b[n]) >>> lr`, where `df` is the loss derivative:
   - least squares: `dot - b`;
   - hinge: `-b` if `b*dot < 1`, else `0`, with labels ±1.0.
3. For each feature *m*, the group's gradient contribution
   `g[m] = sum over the 8 samples of Q_s(a[n][m]) * scale[n]`.
   This is the same bit-serial product with the scale as operand, using the same *s* bits.
4. `x_w[m] -= g[m]`. The working model absorbs every group.
5. At the end of each mini-batch of B samples, `x <- x_w`. The architectural
   model, which the dot product reads, changes only here.

The learning rate is a power of two applied as a right shift. The 1/B of the
mini-batch average is folded into the same shift, so the host programs
`lr_shift = log2(1/λ) + log2(B)`.

## 3. The pipeline

```
 addr_gen --req--> memory --lines--> front sequencer --+--> 8 x dot_bank --> serial_part --> scale queue
                                                       |        ^ x (one 2048-bit word per cycle)      |
                                                       +--> sample FIFO ------------------------> grad_stage
                                                                                                      |
                                       hazard_ctrl <-- commit events -- model_update <-- 64 x 8-input sums
```

- **Front sequencer** (in `mlweaving_top`). It walks groups, chunks and bit
  planes in the order the lines arrive and takes one line per cycle. For each
  line it reads the model word `x[c]` (64 values, 2048 bits) once; all 8
  banks share it. A new group may start only when four things hold:
  - the hazard controller grants the read;
  - the group's labels are present;
  - the label queue has room;
  - fewer than 16 groups are in flight.

  Each accepted line is also pushed into the sample FIFO.
- **Dot-product bank** (`mlw_dot_bank`, 8 instances). It contains:
  - 64 bit-serial multipliers (`mlw_bitserial_mul`), one per lane, each
    accumulating `x >>> i` over the bit planes of a chunk;
  - a 6-level pipelined adder tree (`mlw_adder_tree`) over the 64 lanes;
  - a chunk accumulator that adds the C chunk sums into the sample's dot product.

  `dot_valid` rises 8 cycles after the cycle that presents the last bit of the
  last chunk: 1 cycle in the multiplier, 6 in the tree and 1 in the accumulator.
- **Serial part** (`mlw_serial_part`). It applies `df` and the learning-rate
  shift to the 8 dot products, one cycle after they arrive. The results wait
  in a 16-entry scale queue.
- **Sample FIFO** (`mlw_fifo`, 16384 × 512 bits). It keeps the lines of a group until
  the group's scales exist, so the data is read from memory only once per epoch.
- **Gradient stage** (`mlw_grad_stage`). It replays a group's lines from the
  FIFO through 8 × 64 more bit-serial multipliers. Each bank's scale is
  broadcast to its 64 lanes.
- **Gradient accumulation** (`mlw_grad_accum`). It adds each lane's 8 bank
  products in 64 three-level adder trees. The result is one 64-value gradient
  chunk per chunk of the group. Groups follow each other without a gap.
- **Model update** (`mlw_model_update`). It read-modify-writes `x_w` one chunk
  at a time: the read is issued in one cycle, and the subtraction and write
  happen in the next. For the last group of a mini-batch the same value is
  also written to `x`. When C·s = 1, two groups update the same word in
  consecutive cycles. A one-entry forwarding register then supplies the value
  still being written.
- **Model memories** (`mlw_model_mem`, two of 512 × 2048 bits). They hold
  32K values each, with a registered read that returns the old contents when
  a word is read and written in the same cycle. The host loads both models
  and reads `x` back through the `host_mdl_*` port while the engine is idle.

## 4. Keeping mini-batch SGD synchronous: hazard control and chaining

The first group of mini-batch *n+1* must not read `x` before mini-batch *n*
has written its update. With the update sitting at the end of a deep
pipeline, this read-after-write hazard decides the engine's efficiency.
`mlw_hazard_ctrl` resolves it with two 16-bit counters:

- `wr_counter` starts at B, the credit for the first batch. It grows by B each
  time a batch's update of `x` is "done".
- `rd_counter` starts at 0. It grows by 8 each time a group starts reading `x`.
- A group may start only while `rd_counter != wr_counter`.

So the reader can run at most one batch ahead of the writer, and the batch
it runs is always the one whose model is complete.

What "done" means is the chaining switch.

- **Without chaining**, the update counts when its *last* chunk is written.
  The dot product then stands idle while the model update writes all C
  chunks, one every *s* cycles.
- **With chaining**, the update counts when its *first* chunk is written. The
  model is treated like a vector register that is written and read in the
  same order, one chunk every *s* cycles at both ends. The next batch starts
  reading chunk 0 as soon as it is written, and stays behind the writer from
  then on. Each batch that has a successor in the epoch therefore saves
  (C−1)·s cycles. The end-to-end test checks this exactly.

The published timing diagrams give per batch:
- read time `B/8 · C · s`;
- without chaining, a further `C · s` for the gradient and update of the last group;
- with chaining, only the gap of one chunk (`s`).

The published cost model adds a fixed pipeline latency of L = 40 + 2s cycles
per batch. This implementation's latency is shorter: about 27 cycles per batch
at s = 6 with chaining, measured. The fixed part adds up to about 16 + s
cycles:
- 1 cycle for the line register;
- 8 cycles for the dot product;
- 1 cycle for the serial part;
- the FIFO replay of one chunk (s cycles);
- 1 cycle for the multiplier, 3 for the trees and 1 for the tag;
- 1 cycle for the write.

The queue hand-offs and the epoch start account for the rest of the measurement.

One addition is not in the published design: a **chunk guard**. While a
batch's commit is in progress, chunk *c* of `x` may be read only after it has
been written (`chunk_ok`). By the argument above the reader never overtakes
the writer, so the guard should never act. It makes the design safe if the
two sides' rates ever differ, for example through a memory stall on the
writer's side in a changed design. No test run has seen it act
(`stats.guard_stall` stays 0).

## 5. Epochs, precision and learning rate

`mlw_epoch_ctrl` runs E epochs. Before each one it fixes:
- **Precision** *s*: either the fixed value, or the dynamic schedule
  `s(e) = max(2, ceil(log2 e))`, at most 32. That is 2 bits for epochs 1–4,
  3 for 5–8, 4 for 9–16, and so on. Training starts coarse and adds bits as
  it converges.
- **Learning-rate shift**: `lr_shift` for epochs 1..alpha, and `lr_shift + 1`
  (half the rate) after that.

The pipeline drains completely between epochs. An epoch ends when the update
of its last group is written. The hazard counters, FIFO and sequencers are
then re-initialised.

## 6. Top-level interface (`mlweaving_top`)

| group        | signals | notes |
|--------------|---------|-------|
| config       | `start`, `num_samples` (N), `num_features` (M), `batch` (B), `prec_fixed`, `adaptive`, `lr_shift`, `alpha`, `epochs`, `loss`, `chaining`, `base` | Sampled on `start` while idle. N must be a multiple of B. B must be a power of two and a multiple of 8. M ≤ 32768. C·s ≤ `FIFO_DEPTH` is required. |
| requests     | `req_valid`, `req_ready`, `req_addr[47:0]` | Cache-line addresses, valid/ready. |
| lines        | `line_valid`, `line_ready`, `line_data[511:0]` | Lines returned **in request order**, any latency. |
| labels       | `lbl_valid`, `lbl_ready`, `lbl_data[8][32]` | The 8 labels of each group, in group order, once per epoch. |
| model access | `host_mdl_we/waddr/wdata`, `host_mdl_raddr/rdata` | While idle. A write goes to both `x` and `x_w`. A read returns `x` one cycle later. |
| status       | `busy`, `done` (pulse), `cur_epoch`, `cur_prec`, `stats` | `stats` counts lines, groups, RAW stalls, guard stalls, FIFO-full stalls, batch commits and forwarding hits. It is cleared at `start`. |

Parameters: `FIFO_DEPTH` (default 16384 lines) and `Q_DEPTH` (16, for the label
and scale queues). The widths of the data path are the paper's constants and
are kept in `mlw_pkg`: 512-bit lines, 8 banks, 64 lanes, 32-bit values, 32
bits of precision, a 32K-value model and 16-bit hazard counters.

## 7. Sizes and datasets

The default configuration holds a model of up to 32K features (512 chunks)
and any precision up to 32 bits. A group's lines (C·s ≤ 512·32 = 16384) always
fit the sample FIFO. The dataset itself is streamed, so the number of samples
is unlimited. The five datasets the paper evaluates all fit:

| dataset | features | C  | lines per group at s = 32 |
|---------|---------:|---:|--------------------------:|
| Gisette | 5000     | 79 | 2528                      |
| Epsilon | 2000     | 32 | 1024                      |
| KDD     | 2399     | 38 | 1216                      |
| TL      | 2048     | 32 | 1024                      |
| Madelon | 500      | 8  | 256                       |

The price of the deep FIFO is memory. The two models take 2 Mb and the
FIFO takes 8 Mb. The published FPGA reports 3.25 Mb of block RAM in total, so
its sample buffer must be much smaller; its size is not published. A smaller
`FIFO_DEPTH` is safe for any job with C·s ≤ `FIFO_DEPTH`. A job that breaks
this rule deadlocks, because a group's scale needs all of the group's lines
to have been accepted. Nothing checks the rule in hardware.

## 8. Departures and open points

- The published top-level block diagram was not available. The wiring
  follows the text and the two hazard timing diagrams.
- Labels come on their own stream instead of being interleaved with the
  feature lines. The published design loads them from memory but does not
  show the path.
- The pipeline latency is shorter than the published 40 + 2s cycles (section 4).
- The chunk guard, the forwarding register in the update, the 16-entry
  label and scale queues, and the in-flight limit are this implementation's own.
- The learning rate and 1/B form one right shift. The gradient has no
  regularisation term.
- Host-side parts are outside this RTL. These are the memory interface that
  turns requests into cache lines, and the software that weaves the
  dataset and sets the configuration.
- The paper also compares asynchronous training, which reads a stale model,
  and other layouts. These are baselines and are not built.

## 9. Verification and simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The checks are:

| testbench | checks |
|-----------|--------|
| `tb_mlw_bitserial_mul` | products against the truncated-shift sum, s = 1..32, negative operands |
| `tb_mlw_adder_tree` | sums and the log2(N) latency |
| `tb_mlw_dot_bank` | dot products over random C and s, and the 8-cycle latency |
| `tb_mlw_serial_part` | both loss derivatives and the shift |
| `tb_mlw_fifo` | order, full/empty, simultaneous push and pop |
| `tb_mlw_grad_accum`, `tb_mlw_grad_stage` | element-wise gradients and chunk/commit tags |
| `tb_mlw_model_mem` | read latency and read-before-write |
| `tb_mlw_model_update` | `x_w`/`x` contents, forwarding, commit events |
| `tb_mlw_hazard_ctrl` | counters, grant and guard, cycle by cycle, in both modes |
| `tb_mlw_addr_gen` | address sequence and the (N/8)·C·s cycle count |
| `tb_mlw_epoch_ctrl` | precision and learning-rate schedules, and timing |
| `tb_mlweaving_top` | end-to-end training (see below) |
| `tb_mlweaving_full` | the top at default parameters |

`tb_mlweaving_top` trains small problems end to end. A memory model builds
woven lines on demand, with random latency and back-pressure. A reference
model runs the same SGD, and the final model must match it exactly. The jobs
cover least squares and hinge loss, fixed and dynamic precision, and a
learning-rate decay. It makes every mechanism happen and fails if one does
not:
- a read-after-write stall;
- a full sample FIFO (it uses a 64-line FIFO);
- forwarding in the update;
- batch commits;
- a precision switch;
- the learning-rate decay;
- both hinge branches;
- the exact chaining saving.

It also checks each batch's overhead against the published cost model.

`tb_mlweaving_full` runs the top with its default parameters on one epoch of a
2000-feature (Epsilon-sized) problem at 4 bits and checks the model.

With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/mlw_pkg.sv rtl/mlw_*.sv \
        rtl/mlweaving_top.sv tb/tb_mlweaving_top.sv --top-module tb_mlweaving_top
    ./obj_dir/Vtb_mlweaving_top

Replace the testbench name to run any other test. Each test finishes in
seconds. The full-size build takes longer because of the 8 Mb FIFO array.
