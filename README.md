# Sequential node2vec training core

This core trains a graph embedding one random walk at a time, on chip, so the
embedding can keep up with a graph that grows after deployment (for example a
network of IoT devices that gains links). It replaces the usual skip-gram
back-propagation with an OS-ELM (online sequential extreme learning machine)
update. That update is a single pass: it needs no epochs and no learning rate.
It also does not overwrite what earlier walks taught, which is the weakness of
retraining a skip-gram model by gradient descent.

Two ideas make the model small enough for an FPGA:

* **Tied weights.** An OS-ELM network normally has fixed random input weights
  `alpha` (n x N) and trained output weights `beta` (N x m). Here `alpha` is
  dropped. The hidden vector for centre node `c` is the node's own row of
  `beta` scaled by a constant: `H = mu * beta[c]`. Only `beta` (one N-wide row
  per graph node) and the N x N matrix `P` of the OS-ELM recursion are stored.
* **Working set per walk.** With negative sampling, one walk touches at most
  `l + ns` nodes (walk length plus negative samples). The host sends only those
  rows of `beta`, the core trains on them, and the host writes them back.
  The whole embedding stays in host memory. The on-chip buffers are therefore
  the same size whatever the size of the graph.

Default configuration: N = 32 embedding dimensions, walk length l = 80,
window w = 8, ns = 10 negative samples, 200 MHz. The core is parameterised and
has also been simulated at N = 64 and N = 96.

## What one walk computes

The host performs the node2vec random walk `RW` (l nodes) and draws ns negative
nodes. All contexts of the walk share the same negative nodes. The walk is cut
into `l - w + 1` contexts, which is 73 for l = 80 and w = 8. Context `c` has
centre `RW[c]`, and its w - 1 following nodes `RW[c+1..c+w-1]` are the positive
samples. Each positive sample is followed by the ns negatives, so a context has
`(w-1)(ns+1) = 77` samples.

`P` and `beta` are frozen for the whole walk. Only their accumulated
differences `dP` and `dB` change from context to context. This is the form of
the algorithm that lets a hardware implementation stream through the contexts
without waiting for the previous update. For every context:

| stage | computation | sequencer | clocks |
|---|---|---|---|
| 1 | `H = mu * beta[c]`; `v = P H^T` (row-by-row dot products); `u = H P` (sum of `H[k] * P[k,:]`) | front | N+4 |
| 2 | `s = H v = H P H^T`; rows `v[j] * u` of `P H^T H P` into a buffer | front | N+1 |
| 3 | for each sample x: `e_x = t_x - H . beta[x]` with t = 1 for the positive sample and 0 for a negative one | front | 78 |
| 4 | `inv = 1/(1+s)`; `g = v * inv`; `dP -= (P H^T H P) * inv`; `dB[x] += e_x * g` for every sample | back | 1 + (N+1) + 78 |

After the last context the core applies `P += dP` and `beta += dB`. The vector
`g` is `P_i H^T`, the gain of the OS-ELM step. The core uses the exact identity
`P_i H^T = P H^T / (1 + H P H^T)`, so the updated `P_i` never has to be
formed inside the walk.

A node can appear several times among a context's samples, for example when a
positive sample is also a negative one. Its `dB` row then receives several
updates in a row. The `dB` update is a read-modify-write with forwarding of
the row written on the previous clock, so such updates are all kept.

## Overlapping contexts

Stages 1 to 3 read only `P`, `beta` and the walk, which do not change inside
a walk. Stage 4 writes only `dP` and `dB`. So stages 1 to 3 of context c+1
need nothing from stage 4 of context c, and the engine runs them at the same
time with two sequencers:

* The **front** sequencer runs stages 1 to 3 on the dot-product array and the
  first multiply-accumulate array.
* The **back** sequencer runs stage 4 on a second multiply-accumulate array.

When the front has finished stage 3 of a context, it hands the context over
(one clock) as soon as the back is idle and `1/(1+s)` is ready. The
reciprocal, the error-buffer half and the context number go with it. In its
first clock the back forms `g = v * inv`. Only after that does the front
overwrite `v` with the next context's values. Handover state:

* **Error buffer.** It has two halves of 77 entries. Alternate contexts write
  alternate halves, so the front can fill one while the back reads the other.
* **PHHP buffer.** It is single. The back reads it in the first N+1 clocks
  after the handover. The front does not write it again until N+4 clocks
  after the handover. An assertion guards this.
* **Divider.** It starts as soon as `s` is known and runs while the PHHP rows
  and the errors are computed.

Stage 4 (N + 80 clocks) is always shorter than stages 1 to 3 (2N + 84
clocks), so the front never waits for the back. A context costs the front's
time, and only the last context's stage 4 shows in the run time. The
arithmetic is the same as running the contexts strictly one after another:
stage 4 of the contexts still runs in order, so the `dP` and `dB` sums are
bit-identical.

## Block structure

```
            AXI4-Lite                     AXI4-Stream in / out
                |                                 |
          +-----------+   start, sizes,    +-------------+
          | axil_ctrl |------------------->|  xfer_unit  |  job sequencer:
          +-----------+<-- busy/done ------+-------------+  receive, train, send
                |  mu, walk_len                  | buffer port, eng_start/done
                v                                v
          +---------------------------------------------------+
          | train_engine                                       |
          |  row_ram x5: beta, dB (90 rows), P, dP, PHHP (N)   |
          |  front: fx_dot (N-lane dot product),               |
          |         fx_axpy (N-lane y + a*x)   stages 1-3      |
          |  back:  fx_axpy (N-lane y + a*x)   stage 4         |
          |  recip_unit (1/(1+s), bit-serial)                  |
          |  walk/negative index registers,                    |
          |  error buffer (2 x 77)                             |
          +---------------------------------------------------+
```

| file | role |
|---|---|
| `rtl/n2v_pkg.sv` | number format, `fx_mul`, buffer selector enum, register map |
| `rtl/n2v_core.sv` | top level: AXI4-Lite slave, AXI4-Stream slave and master |
| `rtl/axil_ctrl.sv` | control and status registers |
| `rtl/xfer_unit.sv` | stream framing and job sequencing |
| `rtl/train_engine.sv` | front and back stage sequencers and datapath of the training algorithm |
| `rtl/fx_dot.sv`, `rtl/fx_axpy.sv` | the multiply-add arrays, one row per clock |
| `rtl/recip_unit.sv` | reciprocal of 1 + H P H^T |
| `rtl/row_ram.sv` | row-wide buffer with a registered read (block RAM style) |

In the original system the core sits in the programmable logic of a Zynq
UltraScale+ device. An ARM Cortex-A53 runs the random walks and the
alias-table negative sampling, and a DMA engine moves data between DRAM and the
core's streams. Those parts, and the AXI interconnects between them, are not
part of this RTL. The board diagram also shows an AXI4 master port on the core.
Its use is not described, so that port is absent.

## Using the core: one job per walk

Registers (32-bit, byte addresses):

| addr | name | meaning |
|---|---|---|
| 0x00 | CTRL | write bit0 = 1: start (ignored while busy). Read: bit0 busy, bit1 done (sticky until the next start) |
| 0x04 | FLAGS | bit0: a P matrix follows the beta rows in the input. bit1: send P after beta in the output |
| 0x08 | WALK_LEN | nodes in the walk, from w to 80 |
| 0x0C | NUM_ROWS | beta rows sent with this walk, from 1 to 90 |
| 0x10 | MU | scale factor mu in Q15.16 (0.01 is 655) |
| 0x14 | CYCLES | read-only: clocks taken by the last training run |

The input stream carries 32-bit words in this order:

1. WALK_LEN words: the walk, given as local row numbers (0 .. NUM_ROWS-1).
2. 10 words: the negative samples, also as local row numbers.
3. NUM_ROWS x N words: beta rows, row 0 first, lane 0 first within a row.
4. If FLAGS.bit0 is set: N x N words of P, row by row.

The host decides which graph node goes to which local row. It sends each
distinct node once.

When training finishes, the output stream returns the NUM_ROWS updated beta
rows in the same layout. If FLAGS.bit1 is set, P follows. `tlast` marks the
last word. P stays in the core between jobs, so it is normally loaded once
(for example as a scaled identity, which is the host's choice) and then left
in place. The sequential scenario adds an edge and walks from both of its
ends: each such walk is one more job.

## Timing

A training run takes

```
CLR + contexts * FRONT + BACK + APPLY + 2 clocks
CLR   = max(90, N)                                  clear dP and dB
FRONT = 2 + (N+1) + 1 + N + 78 + 1 + WAIT           stages 1-3, handover
WAIT  = max(0, 34 - N - 77)                         rest of the divider
BACK  = 1 + (N+1) + 78                              stage 4, last context
APPLY = (N+1) + 91                                  P += dP, beta += dB
```

The reciprocal 1/(1+s) comes from a bit-serial divider that needs 34 clocks.
It runs alongside stages 2 and 3, so at these sizes the handover never waits
for it (WAIT is zero). In general WAIT = max(0, 2F+2 - N - NSAMP), with F the
fraction bits and NSAMP = (w-1)(ns+1). The reduced-size engine test runs
with a non-zero WAIT.

For a full walk (73 contexts) this gives:

| N | clocks | time at 200 MHz |
|---|---|---|
| 32 | 11,059 | 55 us |
| 64 | 15,795 | 79 us |
| 96 | 20,537 | 103 us |

These times exclude the transfers. Receiving a job takes one clock per input
word, about 3,000 words at N = 32. Sending takes N + 2 clocks per output row.
For comparison, the published FPGA implementation reports 0.777 / 0.878 /
0.985 ms per walk including transfers. That implementation overlaps the
stages of successive contexts too, with wider and uneven parallelism: 32
lanes, and partly 48 or 64 lanes at the larger N. Here each array is N lanes
wide and handles one row per clock.

## Number format

Every datapath value is a signed 32-bit fixed-point number with 16 fraction
bits (Q15.16):

* A product is formed at 64 bits, shifted right arithmetically by 16 (floor)
  and truncated to 32 bits.
* A dot product sums the full-width products first and shifts once.
* Accumulations wrap; there is no saturation.
* The reciprocal is `floor(2^32 / (2^16 + s))`. It saturates to 0x7FFFFFFF if
  the result does not fit or if `1 + s <= 0`. `1 + s > 0` holds whenever P is
  positive definite.

The published design states only that it uses fixed-point multiply-add
arithmetic. The word length and rounding are this implementation's choice.
Keep `mu * beta`, `P` and its updates well inside the +/-32768 range. With
mu = 0.001, the smallest value in the published sweep, mu is quantised to
65/65536.

## Where this RTL departs from the published design or fills gaps

* **Reciprocal term.** The algorithm listing writes `1/(H P H^T)`, but the
  OS-ELM formula has `(I + H P H^T)^-1`. Taken literally, the listing makes
  the gain `P_i H^T` exactly zero, so nothing would train. The core uses
  `1/(1 + H P H^T)`.
* **Error term.** The listing computes `t - H beta[sample]` in the sample loop
  and names the same quantity `(y - H beta)` in the update. Both are read as
  the per-sample error `e`.
* **Context shape.** Each context has a centre node and the w - 1 nodes after
  it. This matches the 73 contexts reported for l = 80 and w = 8, and the
  worked example in which the neighbourhood of a node is the nodes that follow
  it in the walk.
* **Scheduling.** Successive contexts overlap at two levels: stages 1 to 3,
  and stage 4. The published design is a dataflow pipeline of the four
  stages, but its depth and buffering are not given. A deeper split
  (stage 1 / stage 2 / stage 3 / stage 4) would need more lanes for the
  stages to be balanced. The arithmetic results do not depend on the
  schedule; only the clock count does.
* **Parallelism.** One row per clock per array, using 3N multipliers in
  total, plus the divider. The 48/64-lane arrangement of the published N = 64 and N = 96 builds is not
  reproduced.
* **Interfaces.** The register map, the stream word order, the P load/dump
  options and the persistence of P in the core are this design's own. The
  AXI4 master port is omitted.
* **Reset.** Control state has an asynchronous active-low reset. Buffer
  contents are not reset. dP and dB are cleared at the start of every run.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_fx_dot`, `tb_fx_axpy` | arithmetic against the documented rounding, with extreme operands |
| `tb_recip_unit` | quotient, saturation and the 34-clock latency |
| `tb_row_ram` | read latency, read-during-write and depths 32 and 90 |
| `tb_axil_ctrl` | register map, start pulse, sticky done, held responses |
| `tb_xfer_unit` | stream framing and ordering against a model of the engine buffers, with stalls, back-pressure and tlast |
| `tb_train_engine` | every beta and P word and the clock count at a small size (N = 8, l = 16, w = 4, ns = 3), including back-to-back updates of one row |
| `tb_n2v_core` | three jobs at the default size (N = 32, l = 80); see below |
| `tb_workload_dims` | the same jobs on cores built with N = 64 and N = 96 |

`tb_n2v_core` runs three jobs at the default size, every parameter at its
default:

* a full walk with P loaded and read back;
* a short walk with P kept from the first job, repeated sample rows, input
  gaps and output back-pressure;
* a full walk over 90 rows.

It compares every output word, `tlast`, the status register and the CYCLES
register with a reference model written as plain loops over contexts, window
positions and samples (`tb/n2v_ref_pkg.sv` holds the shared rounding
helpers). It also counts how often each mechanism occurred (P load, P dump,
P kept, input stall, output back-pressure, back-to-back row update, and
contexts whose stage 4 ran alongside the next context, worked out from the
clocks saved against a strictly sequential schedule). It fails if any of these never happened. The reference model
runs the contexts strictly one after another. Matching it word for word
shows that the overlap does not change the result.

The reference model uses the same number format as the RTL. The testbenches
therefore show that the RTL computes the algorithm as documented here. They
do not measure embedding quality (F1 scores), which needs a full graph
pipeline on the host.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/n2v_pkg.sv tb/n2v_ref_pkg.sv tb/tb_n2v_core.sv \
  --top-module tb_n2v_core -o sim
./obj_dir/sim
```

The packages are listed first. Verilator finds every other module in `rtl/`
and `tb/` by its file name. To run another testbench, replace the testbench
file and the top module name. Each testbench builds in under a minute and
runs in a second or two.

To change the configuration, set the parameters of `n2v_core`:

* `DIM`: embedding dimensions, and also the lane count.
* `MAX_WALK`: longest walk.
* `WIN`: window size.
* `NNEG`: number of negative samples.

The buffer depth is `MAX_WALK + NNEG` rows. The number format is set by
`FX_W` and `FX_FRAC` in `n2v_pkg`; the reference package in `tb/` must match
it.
