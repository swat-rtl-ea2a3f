# SWAT: a sliding-window attention accelerator in SystemVerilog

This is an RTL implementation of the SWAT architecture ("Scalable and
Efficient Window Attention-based Transformers Acceleration on FPGAs"). It
computes one attention head of a sliding-window Transformer (Longformer
style, with optional BigBird-style global and random tokens) in FP16:

    Z_i = sum_j exp(Q_i . K_j) V_j  /  sum_j exp(Q_i . K_j)

for every query row i, where j runs over the 2w tokens of the window of row
i and, when configured, a set of global and random tokens. The default
configuration is the one the architecture is built around: head dimension
H = 64, window 2w = 512, so 512 attention cores, FP16 throughout, an
initiation interval of 3 cycles for every FP16 accumulation.

The design follows three ideas of the architecture:

* **Kernel fusion.** The softmax denominator is a per-row scale factor, so it
  is applied after the weighted sum `sum_j exp(S_ij) V_j`. A row is computed
  in one pass; no S or S' matrix is ever stored.
* **Row-major dataflow with a FIFO window.** Consecutive rows share all but
  one window token. The K/V rows live on chip in a fixed set of buffers;
  each row brings in one new token and evicts the one that left the window,
  so every K and V row is read from memory once.
* **Input-stationary attention cores.** Each core keeps the K and V row of
  one token next to its own multiply-accumulate, exponential and multiplier.
  The Q row is broadcast; the data that is reused stays where it is.

## 1. Block overview

| Module | Stage | What it does |
|---|---|---|
| `swat_top` | all | Wires the blocks below; exposes two read channels (Q, K/V) and one write channel (Z) |
| `swat_ctrl` | control | Six-stage row pipeline, lock-step advance |
| `swat_loader` | LOAD | Fetches Q row i and the K/V row entering the window; global preload; random reload |
| `swat_core_array` | QK, SV | NC attention cores plus the QK and SV issue sequencers |
| `swat_attn_core` | QK, SV | One core: K/V ring, MAC for S, exp, Z slice buffer |
| `swat_zred1` | ZRED1 | Z reduction, phase 1: G = NC/H groups of H channels |
| `swat_zred2` | ZRED2 | Z reduction, phase 2: adder tree over the G partial rows |
| `swat_rowsum` | ROWSUM1/2 | Softmax denominator in the same two phases |
| `swat_div_out` | DIV&OUT | Z / row sum, one quotient every 2 cycles, output channel |
| `swat_fp16_acc` | shared | FP16 accumulator with a 3-stage pipelined adder (II = 3) |
| `swat_issue_seq` | shared | Issues N element indices every II cycles, then waits a fixed tail |
| `swat_pkg` | shared | FP16 type, stage enum, FP16 multiply/add/divide/exp functions |

Parameters of `swat_top`: `H` (head dimension, 64), `W2` (window cores 2w,
512), `NG` (global cores, 0), `NR` (random cores, 0), `II` (3), `GLOBAL_IDX`
(token index of each global core) and `RND_OFF` (offset of each random
core). The total number of cores is NC = W2 + NG + NR; NC must be a multiple
of H and H a power of two.

## 2. The row pipeline and its control

A query row passes six stages, one pipeline interval each:

    LOAD -> QK -> SV -> ZRED1 + ROWSUM1 -> ZRED2 + ROWSUM2 -> DIV&OUT

Up to six rows are in flight. `swat_ctrl` keeps a valid bit and a row number
per stage. In every interval it starts all occupied stages together
(`st_start`), waits until every stage has dropped its busy flag, then
issues a single-cycle `adv`. At `adv` every stage hands its result to the
next one, and all rows move one stage on. The interval is therefore the
slowest stage plus three control cycles (ADV, LAUNCH, and the cycle in which
the last busy falls).

The architecture describes a balanced pipeline but not how the stages
hand over. The lock-step scheme was chosen because it makes hand-over a
single, well-defined moment: every buffer that one stage writes and the
next reads is either double-buffered and flipped at `adv`, or copied into a
hold register at `adv`. No stage ever needs to know the state of another.

Measured stage lengths in this RTL for H = 64, 2w = 512, compared with the
architecture's stage table:

| Stage | This RTL (busy cycles) | Architecture |
|---|---|---|
| LOAD (window only) | about 66 + memory latency | 66 |
| QK | 1 + 3·63 + 4 = 194 | 201 |
| SV | 1 + 3·63 + 1 = 191 | 197 |
| ZRED1 | 1 + 3·63 + 4 = 194 | 195 |
| ROWSUM1 | 1 + 3·63 + 3 = 193 | 195 |
| ZRED2 | 1 + 63 + 4 = 68 | 66 |
| ROWSUM2 | 1 + 3·7 + 3 = 25 | 27 |
| DIV&OUT | about 2·64 + 2 = 130 (no stalls) | 179 |

The full-size simulation measures a steady-state interval of 197
cycles per row. The architecture reports 201, set by the QK stage; here too
QK and ZRED1 set the interval. Row 0 takes longer because its LOAD also
brings in the first half window.

## 3. The attention core (`swat_attn_core`)

The core is where most of the design effort went, because three rows use
it at the same time: LOAD writes the K/V row for row i+2 while QK of row
i+1 reads its K row and SV of row i reads its V row.

**K/V ring.** The core's K and V stores have three row entries each, used
as a ring with three pointers:

* `wp`: the entry LOAD writes;
* `kr`: the entry QK reads;
* `vr`: the entry SV reads.

At `adv`, `vr` takes the old `kr`. If a row was committed since the last
advance, `kr` takes `wp` and `wp` moves to the next entry. A window core
receives a new token only once every 2w rows, so for it the ring is more
than needed. A random-attention core, however, gets a new token in every
row. For it all three entries are live at once, and the ring guarantees
that LOAD never overwrites the row QK or SV is using.

After `clear` (start of a sequence) the pointers are set to three different
entries (`wp`=0, `kr`=2, `vr`=1). With equal pointers, the first row written
would land in the entry a running stage reads.

**Masking.** Every ring entry has a valid bit, written with the row.
Entries never written, or written for a token outside the sequence, are
invalid. The bit travels with the row into SV, where an invalid row gives
S' = 0 and a zero Z slice. The same mechanism covers the start and end of a
sequence and global tokens that lie beyond a short sequence.

**Datapath.**

* QK: each broadcast Q element is multiplied with the K element at the same
  index (one product register). The product then goes into a
  `swat_fp16_acc`. After H issues, S is in the accumulator.
* At `adv`: S is copied to a hold register, together with the valid bit of
  the K entry.
* SV: the first cycle computes S' = exp(S), or 0 for a masked core. Then, at
  every issue, `ZBuf[idx] = S' * V[idx]`.
* ZBuf has two halves. SV writes one half while ZRED1 reads the other, with
  one cycle read latency. The halves swap at `adv`. S' is also copied to a
  hold register at `adv`, for ROWSUM1.

## 4. Loading (`swat_loader`)

For row i of a sequence of n tokens, the loader:

1. Requests Q row i on the Q channel and stores it in a load buffer. The row
   moves to the QK buffer at the next `adv`. The QK stage reads that buffer
   combinationally, one element per issue.
2. Brings token t = i + w − 1 into window core t mod 2w. This modulo pointer
   *is* the FIFO eviction: the token it overwrites is t − 2w, which has just
   left the window [i − w, i + w − 1]. A token t ≥ n is committed as invalid
   without a memory read.
3. Row 0 only: preloads tokens 0 .. w − 2 (row 0 needs them and no earlier
   row brought them in). It also loads the NG global tokens into cores
   W2 .. W2+NG−1, which keep them for the whole sequence.
4. Reloads every random core W2+NG+k with token (i + RND_OFF[k]) mod n.

The Q and K/V channels run in parallel. The loader raises busy the cycle
after its start and lowers it when both the Q row and all K/V rows have
arrived.

**Memory protocol.** A request is a token index with valid/ready. It is
answered, at any later time, by exactly H in-order response beats, one
element per beat. K and V arrive together on the K/V channel. Off-chip
memory itself is not part of the design; the testbenches model it with
random ready, latency and gaps between beats.

## 5. Reductions

**ZRED1 (`swat_zred1`).** Summing NC Z slices with one set of H channels
would take about 3·NC cycles, eight pipeline intervals. As in the
architecture, the cores are grouped by H: each of the G = NC/H groups has
its own H accumulation channels, so the stage takes about 3·H cycles and
yields G partial Z rows.

The architecture does not say how H channels read H cores that each have a
single-port ZBuf. This design uses a diagonal schedule. At step k, channel
e of a group adds element e of core (e + k) mod H. So core p is read at
exactly one address per step, (p − k) mod H, and after H steps every
channel has seen every core once. The read address is computed per core
from the step counter. The data path is a fixed rotation by k inside each
group.

**ZRED2 (`swat_zred2`).** Adds the G partial rows element by element with a
registered adder tree of log2(G) levels. The tree accepts one element per
cycle, so the stage takes H + log2(G) + 2 cycles (68 for G = 8). The result is held
at `adv` for the division stage.

**ROWSUM1/2 (`swat_rowsum`).** These run in the same two phases. ROWSUM1
has one accumulator per group, adding the S' of its H cores one after
another (3·H cycles). In the next interval, ROWSUM2 adds the G group sums
with a single accumulator (3·G cycles). For 512 cores this matches the
195/27 cycles of the architecture's stage table.

## 6. Division and output (`swat_div_out`)

This stage divides each Z element by the row sum, one quotient every 2
cycles. Each quotient is offered on the output channel with its row number
and element index (valid/ready). A stalled output holds the stage, and
through `swat_ctrl` the whole pipeline.

## 7. FP16 arithmetic (`swat_pkg`, `swat_fp16_acc`)

All values are IEEE binary16. The arithmetic functions are written for this
design:

* Multiply: 11×11-bit mantissa product, rounded to nearest.
* Add: split into three functions, align / add / normalise-and-round. The
  accumulator registers between them. Its loop runs through all three
  registers, so it accepts one addend every three cycles. This is how the
  architecture's "FP16 MAC pipelined at II = 3" arises here.
* Divide: integer division of the mantissas.
* Exp: computed as 2^(x·log2 e). The integer part becomes the exponent. The
  fractional power is a cubic polynomial in Q.14 fixed point, with relative
  error below 2·10⁻⁴.
* Subnormals are flushed to zero, ties are rounded away from zero, overflow
  gives infinity, and NaN is not produced.

The functions were checked against double-precision arithmetic on random
operands. End to end, outputs agree with a double-precision reference to
about 1·10⁻⁴ for values of magnitude below 1.

## 8. Differences from the architecture description

* **No max subtraction.** Like the fused formula, the core computes exp(S)
  directly. FP16 overflows for S above about 11, so inputs must be scaled so
  that the dot products stay small. The testbenches use elements in
  [−1/4, 1/4].
* **Window bounds.** The text gives both "width 2w" and j ∈ [i−w, i+w]
  (2w+1 tokens). With 2w cores, this design uses the 2w tokens i−w .. i+w−1.
* **Random token pattern.** The architecture sets random indices as
  synthesis parameters without giving a formula. Here random core k
  attends token (i + RND_OFF[k]) mod n, a static pattern.
* **LOAD with random cores.** Random K/V rows are fetched one after another
  over a single K/V channel, so LOAD takes about (1 + NR)·H cycles. The
  architecture reports 195 cycles for 192 random tokens, which implies a
  wider or parallel load path that it does not describe. The BigBird
  configuration is therefore functionally correct here but LOAD-bound.
* **Stage lengths.** These are close to, but not identical with, the
  architecture's stage table (Section 2). DIV&OUT is shorter here (about 130
  vs 179) because write-back latency is hidden behind the valid/ready channel.
* **Pipeline control.** This is lock-step, with three cycles of control
  overhead per interval. The architecture's own hand-over mechanism is not
  described.
* **Not built.** The FP32 variant, the dual-pipeline (two heads)
  configuration, and the off-chip HBM/DRAM are not built. Memory appears
  only as a behavioural model in the testbenches.

## 9. Workloads

| Workload | Fits | Notes |
|---|---|---|
| Longformer head, 1024 tokens | yes | simulated at full size: 222,215 cycles including memory stalls |
| Longformer head, 4096 tokens, 2w=512, H=64 | yes | about 4096 × 197 ≈ 0.81 M cycles per head |
| Longformer head, 16384 tokens | yes | on-chip state does not grow with n; 16-bit indices allow n ≤ 65535 |
| BigBird 192 window + 128 global + 192 random | yes, slower | `W2=192, NG=128, NR=192`; LOAD ≈ 12.4 k cycles per row (about 14.9 k measured with memory stalls) |
| Two heads in parallel (dual pipeline) | not built | would be two `swat_top` instances |
| FP32 datapath | not built | arithmetic is FP16 only |

On-chip storage per core is 3 K rows + 3 V rows + 2 Z slices of H FP16
values (1 KiB for H = 64), about 0.5 MiB for 512 cores.

## 10. Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`:

| Testbench | Covers |
|---|---|
| `tb_swat_fp16_acc` | random accumulation sequences against a double-precision sum, single additions to 1 ulp, II = 3 latency |
| `tb_swat_attn_core` | ring pointers over many rows, masking, S, S', Z slices, ZBuf swap |
| `tb_swat_core_array` | write decode, QK/SV broadcast, stage cycle counts |
| `tb_swat_loader` | window/global/random schedule, masked tokens, memory stalls |
| `tb_swat_zred1` | diagonal schedule, partial sums, cycle count |
| `tb_swat_zred2` | adder tree against a model, cycle count |
| `tb_swat_rowsum` | both phases, cycle counts (1 + 3(N−1) + 3) |
| `tb_swat_div_out` | quotients, 2-cycle spacing, back-pressure |
| `tb_swat_ctrl` | row numbers per stage, advance only when idle, done |
| `tb_swat_top` | end to end, H=4, 2w=8: sequences of 21, 3 and 1 tokens, masking, FIFO wrap, memory stalls, output back-pressure |
| `tb_swat_bigbird` | end to end with 4 global and 4 random cores |
| `tb_swat_full` | default size (H=64, 2w=512), 1024 tokens, all 65,536 output elements, steady-state interval |
| `tb_swat_bigbird_full` | BigBird size (H=64, 192 window, 128 global, 192 random cores), 40 tokens |

The end-to-end benches compare every output element with a double-precision
reference of the windowed softmax attention (tolerance 6·10⁻³). They also
check that rows leave in order.

To run one bench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/swat_pkg.sv tb/swat_tb_pkg.sv \
        tb/tb_swat_top.sv --top-module tb_swat_top
    obj_dir/Vtb_swat_top

The full-size bench builds in one to two minutes and simulates in about 75 seconds (1024 rows, 222,215 cycles).
