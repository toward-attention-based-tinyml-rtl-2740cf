# A Snitch-style cluster with an integer Transformer accelerator on its shared L1

Attention layers are hard to run on a microcontroller-class system. The matrix products
are large, and softmax is a row-wise operation that normally needs a second pass over the
score matrix. This design attaches a fixed-function Transformer engine (called ITA, for
Integer Transformer Accelerator) to the shared, multi-banked L1 memory of a small RISC-V
cluster. The engine sees the same memory as the cores, with no private copy. It computes
8-bit matrix products with 16 dot-product units of length 64, and it evaluates softmax
*while* the scores are produced. The cores program it through memory-mapped registers.
It works through a queue of two tasks, so the next tile can be programmed while the
current one runs.

The RTL here covers the L1 memory system, the accelerator and its integration shell.
This shell follows the usual PULP "HWPE" (hardware processing engine) pattern: a
controller, streamers and an engine. The RISC-V cores, the DMA engine, the instruction
cache and the AXI crossbars are not included. Their connections are ports of the top
module `ita_cluster`. Testbenches stand in for them with behavioural drivers.

## Structure

```
            core ports (9 x 64 bit)   DMA ports (8 x 64 bit = 512 bit)
                     |                        |
narrow AXI  ->  axi_to_periph                 |
(64 bit)             | peripheral bus         |
                     v                        v
   +---------------- ita_hwpe ------------+   |
   | hwpe_ctrl (2 task contexts, FSM)     |   |
   |   | task        | stream configs     |   |
   |   v             v                    |   |
   | ita_engine <- 3 source streamers ----+-- hwpe_tcdm_mux --(16 ports)--+
   |            -> 1 sink streamer   -----+                                |
   +--------------------------------------+                                v
                          tcdm_interconnect (33 masters x 32 banks, round robin)
                                          |
                          32 x tcdm_bank (4 KiB each, 64-bit words) = 128 KiB
```

| File | Role |
|------|------|
| `ita_pkg.sv` | Sizes (N = 16, M = 64, D = 26), bus structs, task layout, register map, requantiser |
| `tcdm_bank.sv` | One 512 x 64-bit single-port SRAM bank with byte enables |
| `rr_arbiter.sv`, `tcdm_interconnect.sv` | Combinational crossbar with one round-robin arbiter per bank |
| `hwpe_fifo.sv`, `hwpe_addressgen.sv` | FIFO and two-level address generator used by the streamers |
| `hwpe_source_streamer.sv`, `hwpe_sink_streamer.sv` | Memory-to-stream and stream-to-memory movers |
| `hwpe_tcdm_mux.sv` | Shares the 16 memory ports among the 4 streamers |
| `hwpe_ctrl.sv` | Register file with two task contexts and the task FSM |
| `axi_to_periph.sv` | Single-beat AXI4 slave to the controller's peripheral bus |
| `ita_weight_buffer.sv`, `ita_dotp.sv`, `ita_sum_buffer.sv`, `ita_accumulator.sv`, `ita_activation.sv`, `ita_itamax.sv` | Engine datapath parts |
| `ita_engine.sv` | Sequencer and pipeline of the accelerator |
| `ita_hwpe.sv` | Controller, streamers, port mux and engine |
| `ita_cluster.sv` | Top: L1 memory, interconnect, HWPE and the AXI adapter |

## Shared L1 memory

The L1 has 32 banks of 4 KiB each, so 128 KiB in total. Words are 64 bits, and
consecutive words go to consecutive banks: the bank is `addr[7:3]` and the row is
`addr[16:8]`. The crossbar is purely combinational. A master raises `req` and sees
`gnt` in the same cycle if its bank picked it. `rvalid`/`rdata` follow one cycle later,
for writes as well as reads. A master that loses keeps its request up. Each bank has
its own round-robin pointer, which moves past the winner, so no master waits longer than
32 rounds. The full crossbar moves 32 x 8 B = 256 B per cycle.

There are 33 masters:
- 9 core ports;
- the 512-bit DMA path, seen as 8 parallel 64-bit ports;
- 16 accelerator ports.

Sixteen accelerator ports are 128 B per cycle. That is exactly two 64-byte vectors (one
input row and one weight row) per cycle, which is what the engine needs at full speed.

## The accelerator's task

One task computes one 64 x 64 output tile over one 64-wide slice of the reduction
dimension K:

```
Y[i][j] = act( requant( sum_k X[i][k] * W[j][k]  (+ bias[j])  (+ partial[i][j]) ) )
```

Here `X` is 64 x 64 signed int8, stored row-major. `W` is 64 x 64 int8 in the same
orientation: row `j` of `W` is output column `j`, so K^T needs no transposition. Larger
products are split into tasks:
- A K of up to 512 (or more, see the limits below) is split into K-tiles. The first
  task sets `first_k` and the last sets `last_k`. Partial sums stay in the engine's sum
  buffer between them, so a tile's partial sums never go to memory.
- Bias is added on the first K-tile.
- The 8-bit output is written only on the last K-tile.

Every task takes at least 256 cycles. This is the number of (column group, input row)
pairs: 4 groups of 16 output columns times 64 input rows. Each cycle, the 16 dot-product
units each combine the current input row with one of the group's 16 weight rows.

### Dataflow inside the engine

The engine mixes two reuse schemes:

- **Output-stationary over the tile.** The 64 x 64 accumulators of a tile live in the
  sum buffer (256 entries of 16 x 26 bits) until the last K-tile.
- **Weight-stationary within a group.** The 16 weight rows of a group are held in one
  bank of the double-buffered weight buffer while all 64 input rows stream past them.
  Meanwhile the weight streamer fills the other bank with the next group's rows.

The pipeline has three stages:

| Stage | Work |
|-------|------|
| S0 (issue) | Select the input row (ITAMax EN output in A x V tasks). Compute the 16 dot products combinationally. Read the partial sum. |
| S1 | Add bias and partial sum at D = 26 bits. Store the sum back (not last K-tile) or requantise to int8. |
| S2 | Activation (identity, ReLU, i-GeLU). Push into a 4-line output FIFO. In Q x K^T tasks, also feed the ITAMax DA stage. |

Issue stalls (`stall_o`) when any of these is missing:
- an input row;
- a full weight bank;
- the group's bias line, on the group's first row;
- room in the output FIFO.

A task is done after the pipeline and output FIFO have drained. If requested, the
softmax inversion must also have finished.

### Requantisation and activations

Every int8 result comes from the same operation: `clip((x * mult + 2^(shift-1)) >> shift,
-128, 127)`. Here `mult` is an unsigned 8-bit value and `shift` a 5-bit value. The
accumulator uses one such requantiser. The i-GeLU mode uses a second one after the
polynomial.

i-GeLU follows I-BERT's integer polynomial for erf:

```
t = min(|q|, -b) + b
L = sgn(q) * (c - t^2)
y = requant(q * (L + one))
```

Software chooses `b = floor(-1.769 / S)`, `c = floor(1 / (0.2888 * S^2))` and `one = c`,
where S is the scale of x / sqrt(2). Compared with I-BERT, the sign of the erf scale is
folded into `c`, so every scale is positive and the unsigned requantiser works. With
`b = -29`, `c = one = 841` and an output requantiser of 39 / 2^16, `GeLU(q)` is about `q`
for large positive q and 0 for large negative q.

## Streaming softmax (ITAMax)

The softmax of a score row needs the row's maximum and the sum of exponentials. The
engine produces each score row 16 values at a time, in four passes (one per column
group). ITAMax keeps a running maximum and a running denominator per row, so the scores
never return to memory. It works in base 2 on the int8 scores:

```
e(x)   = 2^9 >> ((max - x) >> 5)                  one halving per 32 score LSBs
DA:    max' = max(max, max of the 16 new values)
       sum' = (sum >> ((max' - max) >> 5)) + sum_j e'(x_j)     19-bit, saturating
DI:    sum  <- 2^24 / sum            (one row per cycle, into the same buffer)
EN:    a    = min(127, ((inv >> ((max - x) >> 5)) >> 8))
```

The three stages are:
- **DA (denominator accumulation)** runs on the activated outputs of Q x K^T tasks. A
  task with `max_clear` clears the row state first.
- **DI (denominator inversion)** runs after a Q x K^T task with `max_invert`. That task
  should be the last column tile of the row block. The 64 row sums are replaced by their
  inverses in 64 cycles.
- **EN (normalisation)** applies in A x V tasks. Each input row from memory (the stored
  int8 scores) is turned on the fly into unsigned 7-bit probabilities before the dot
  products. The result is `A x V` with `A = softmax(Q K^T)` scaled by 127.

Softmax therefore adds no pass over memory. The only extra time is the 64 DI cycles at
the end of a row block. The score matrix of a row block can be up to 512 wide: the 19-bit
sum holds 512 x 2^9.

## Controller and programming model

Register map, as 32-bit registers on the peripheral bus:

| Offset | Name | Access |
|--------|------|--------|
| 0x00 | TRIGGER | Write: queue the context being programmed; programming moves to the other context |
| 0x04 | ACQUIRE | Read: id of the context to program, or `0xFFFFFFFF` if both are queued |
| 0x08 | STATUS | Read: `{queued_count[1:0], busy}` |
| 0x0C | RUNNING | Read: context being run |
| 0x10 | CLEAR | Write: drop queued tasks (when idle) |
| 0x14 | DONE_CNT | Read: tasks finished |
| 0x40 + 4k | job register k | Write/read: k = 0..12 of the context being programmed |

Job registers:

| k | Content |
|---|---------|
| 0 | input base |
| 1 | input row stride |
| 2 | weight base |
| 3 | weight row stride |
| 4 | bias base (64 x 32-bit words, low 24 bits used) |
| 5 | output base |
| 6 | output row stride |
| 7 | flags |
| 8 | `{shift[12:8], mult[7:0]}` |
| 9 | GeLU `b` (int8) |
| 10 | GeLU `c` |
| 11 | GeLU `one` |
| 12 | activation requantiser `{shift, mult}` |

The flags in register 7 are `[1:0]` op (0 GEMM, 1 Q x K^T, 2 A x V), `[3:2]` activation
(0 identity, 1 ReLU, 2 GeLU), `[4]` first_k, `[5]` last_k, `[6]` bias_en, `[7]` max_clear
and `[8]` max_invert. All addresses must be 8-byte aligned.

The FSM takes queued contexts in order. For each one it:
1. hands the decoded task to the engine;
2. configures the four streamers;
3. waits for the engine and for the last output write to be granted;
4. frees the context and pulses `evt_o`.

With two contexts, a core can program tile n+1 while tile n runs.

On the 64-bit AXI port, the adapter takes single-beat transfers. Register offset `a`
uses data bits `[32*a[2] +: 32]`. A burst gets SLVERR and is not executed. When a read
and a write arrive together, the write goes first.

## Streamers and port sharing

There are four streamers:
- **Input:** 64 rows, each fetched once per column group.
- **Weight:** 64 rows in task order.
- **Bias:** 4 lines of 16 words. It is only active on a first K-tile with bias.
- **Output:** 64 x 4 lines of 16 bytes.

A source streamer requests the 8 words of a line together and reassembles them. It pushes
a 64-byte vector into its FIFO (4 lines deep) when all words are back. It only starts a
line when the FIFO is certain to have room. The sink streamer writes a 16-byte output
line as two words.

The port mux gives whole lines to streamers in a rotating order, as long as free ports
remain. So two 8-word source streamers (or one plus the 2-word sink) can access memory in
the same cycle. It routes each response using the owner it registered in the grant cycle.

## Cycle counts

These were measured in the testbenches:

- **Engine alone, operands ready:** start to `done` in 256 issue cycles plus 3 to 4 pipeline
  cycles, with no stall.
- **Full cluster:** trigger over AXI to `evt_o` takes about 370 cycles for a single task,
  which includes the streamers' start-up latency. A sequence of 9 back-to-back tasks runs
  with about 69 % issue utilisation in the end-to-end test, where random core traffic competes for
  the banks.

## Limits and differences from the published design

- **Not built.** The Snitch cores, the DMA engine, the 8 KiB instruction cache, the
  512-bit and 64-bit AXI crossbars, the cluster peripherals, and the compiler flow that
  tiles networks and generates the accelerator's task lists. The top has their ports:
  core and DMA L1 ports, and the AXI slave port for the accelerator's registers.
- **Requantisation and softmax arithmetic.** The exact arithmetic of requantisation and
  of the softmax approximation (the constants 2^9, 32 LSBs per halving, 2^24 / sum,
  >> 8) is this design's own. The published description gives the three softmax stages
  and the i-GeLU choice, not the bit-level formulas.
- **Weight prefetch across tasks.** The published kernels load the next task's weights
  during the current one. Here the weight buffer is double-buffered between the column
  groups of a task. The weight streamer of a task starts with the task, so the first
  group's 16 rows cost about 16 cycles at each task start.
- **Utilisation.** Peak issue utilisation in the integrated system is reported at about
  85 % for GEMM. The end-to-end test here reaches about 69 % under heavy random core
  contention. It has no DMA overlap, and the per-task start-up (the point above) is not
  hidden.
- **Softmax padding.** Rows whose length is not a multiple of 64 must be padded by
  software. The padding is not masked in hardware: padded scores should be set to -128.
  Even then, a padded column adds `2^9 >> ((max + 128) >> 5)` to the denominator.
- **Accumulator range.** D = 26 bits holds K = 512 with bias safely. For K = 1536
  (feed-forward layers with d_ff = 1536), the worst case of all products at -128 x -128
  plus the largest bias reaches the edge of the range. Real data stay far below it. The
  sum wraps (two's complement) and is not saturated.
- **Core count and DMA path.** The 9 core ports are 8 worker cores plus the core that
  controls the DMA. The published block diagram attaches the 512-bit DMA to groups of 8
  banks ("super banks"). Here the DMA uses 8 ordinary 64-bit crossbar ports instead, and
  banks are not grouped.
- **External access to the L1.** The AXI-to-L1 bridge that lets masters outside the
  cluster reach the L1 is not built.
- **Lint warnings.** The assertions that use `disable iff (!rst_ni)` produce
  Verilator `SYNCASYNCNET` warnings, because the reset is then used both asynchronously
  and in a synchronous expression. This is intended.

## Verification

Every module has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. The shared integer models
(requantiser, i-GeLU, ITAMax row model) are in `tb/ita_ref_pkg.sv`. They are written
separately from the RTL.

- `tb_ita_engine` drives the streams with random bubbles. It runs:
  - a two-K-tile GEMM with bias and ReLU;
  - an ideal-stream tile, which checks the 256-cycle bound and that no stall occurs;
  - Q x K^T followed by A x V through ITAMax;
  - an i-GeLU tile.
- `tb_ita_hwpe` runs the accelerator against a memory that refuses 30 % of requests,
  programming it through the register port.
- `tb_ita_cluster` uses the top at its default sizes. It loads the L1 through the DMA
  ports and programs tasks over AXI while the core ports issue random reads. It runs a
  128-deep GEMM with bias, ReLU and GeLU tiles, and a two-tile Q x K^T with softmax
  followed by A x V. It checks every output byte and counts each mechanism:
  - context-full back-pressure;
  - partial sums;
  - bias;
  - each activation;
  - DA, DI and EN;
  - engine stalls;
  - bank conflicts.

  It fails if any of these never happened.

Run any of them with plain Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ita_pkg.sv tb/ita_ref_pkg.sv tb/tb_ita_cluster.sv --top-module tb_ita_cluster
./obj_dir/Vtb_ita_cluster
```

(`tb/ita_ref_pkg.sv` is only needed by the `tb_ita_*` benches.) The end-to-end bench
builds in a few minutes and simulates in about a second.
