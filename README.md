# QUILL deformable-attention accelerator: SystemVerilog implementation

Multi-scale deformable attention (MSDeformAttn, the attention of Deformable
DETR and its descendants) does very little arithmetic per byte it touches.
Every query reads a few fractional 2x2 neighbourhoods per head on each of
four feature levels, and the next query in token order usually looks
somewhere else entirely, so a conventional cache misses and the multipliers
wait. This design makes the gathers local and keeps the datapath busy. It
does this in three steps:

1. **Reorder queries by proximity.** A scheduler keeps a window of 512
   waiting queries and always issues the one whose reference point is
   nearest (l1 distance) to the query just issued.
2. **Prefetch one step ahead.** Because the next query is known one step in
   advance, its feature regions can be loaded into a second buffer while the
   current query is computed from the first. Only the pixels that the
   previous region did not already contain are fetched from memory.
3. **Fuse the whole attention into one pass.** Sampling, Softmax, weighted
   aggregation and the output projection run in one pass per query. No
   intermediate tensor leaves the core. The value and output projections
   are folded offline into one matrix `W'' = W_m * W_m'`.

The RTL implements the whole attention path. It also includes the two
systolic GEMM engines that the surrounding dense layers use and the on-chip
SRAMs. Everything is parameterised. The defaults are the evaluated
configuration:

- D = 256 channels
- M = 8 heads, L = 4 levels, K = 4 points per level and head
- scheduling window w_d = 512
- up to 20097 queries
- GEMM engines of 32x32 and 64x64

At these defaults the design has been simulated end to end, bit-exact, on a
300-query pass.

## One pass through the accelerator

Before a pass, the host loads three things:

- the **reference-point SRAM**: one `{y, x}` pair per query, Q0.12, in the
  normalised [0,1) image frame;
- the **W'' SRAM**: D x D int8;
- for pruned models, the **sparse index buffer**: the original token index
  of every surviving ("compact") query.

The feature maps and the per-query operands sit in external memory. The
operands are the sampling offsets `dp` and the attention logits `A'`, which
the dense projections produce. The host then pulses `start` with
`n_queries`, and the pass runs as follows:

```
ref-point SRAM --feeder--> DOOQ scheduler --next query--> feature cache (prefetch into idle buffer)
                                                              |  current buffer
                                                              v
                         W'' SRAM -----------------------> fused core --row q--> output SRAM
                                                                                     |
                           external memory <--OUT_BASE+token(q)-- gather-scatter <---'
```

- The feeder streams reference points in stored order.
- The scheduler returns them in proximity order.
- The feature cache accepts a query as soon as one of its two buffers is
  free. It fetches the query's operands and its four regions, and it marks
  the buffer ready once every response has arrived.
- The core takes the ready buffer, computes the query, writes one D-byte row
  into the output SRAM at the query id, and releases the buffer. The two
  buffers therefore alternate.
- When all `n` queries are done, the gather-scatter unit copies the output
  SRAM to external memory at `OUT_BASE + token[q]`. `done` then rises.

Reordering is invisible outside the chip. Results are addressed by query id
and not by issue order. Within one query, the sampling order and the Softmax
are exactly those of the original layer.

## The scheduler (`dooq_scheduler`)

The window holds up to `WD` slots of `{x, y, query id}`. Each emitted query
takes these steps:

1. **Distance (1 cycle).** Every slot's key becomes
   `{empty, |x - cx| + |y - cy|, query id, slot}`, where `(cx, cy)` is the
   query emitted last. Empty slots sort to the end. Ties go to the lower
   query id, which makes the schedule deterministic.
2. **Sort (log2(WD)(log2(WD)+1)/2 cycles).** A bitonic network of WD/2
   compare-and-swap elements sorts the keys. Only one stage exists in
   hardware. It is reused over 45 cycles for WD = 512. Each element picks its
   partner `i ^ 2^j` through a small log2(WD)-input multiplexer.
3. **Emit (1 cycle).** The head of the sorted list is offered to the cache.
   When it is taken, the slot it leaves is refilled at once from the stored
   order, or freed at the end of the list.

At WD = 512, one decision takes 47 cycles. The core needs at least
D/p_d = 128 cycles per query, so the scheduler is never the bottleneck. The
first query of a pass is passed through unsorted. `out_dist` reports each
step's l1 distance, and the top sums it in `stat_dist`, which is a direct
measure of schedule locality.

A full sort for each emission is more work than the minimum, which needs only
a minimum search. It is kept because it is the structure the paper
describes, and because its timing is fixed.

## The feature cache (`feature_cache`)

### Regions and the ping-pong pair

Each of the two buffers holds:

- one query's operands (`OPB` memory beats);
- for each level `l`, an `S x S` pixel square with S = 2R+2 = 10, with all
  D channels per pixel.

The square's origin is `floor(p * W_l) - R`, where `W_l` is the level width
and `p` the reference point. Sampling offsets within about R-1 pixels of
the reference point are therefore served from the square. The paper fixes
the radius per model from the largest observed offset. Here R is a
parameter (default 4).

### Incremental fetch

The buffer being filled is walked pixel by pixel, level by level, row by
row. For each pixel:

- **off the feature map:** it is written as zero. This is grid-sample zero
  padding, and no memory access is made.
- **inside the other buffer's square of the same level:** it is copied on
  chip, one pixel per cycle. This counts as a *hit*.
- **otherwise:** it is requested from memory. This counts as a *miss*.

Because the scheduler issues neighbours back to back, most of a square is
usually a hit. Only the strip the reference point moved into is fetched.
Requests are pipelined, up to `FQ` = 16 outstanding. A small in-order FIFO
remembers where each response goes: operand beat, region pixel, or victim
entry.

### Conflict-free 2x2 reads

Each level's square is split into four banks by the parity of the
*absolute* pixel coordinates, `bank = {y[0], x[0]}`. Any 2x2 neighbourhood
contains exactly one pixel of each parity class. The four corners of a
bilinear sample therefore always come from four different banks,
independently of where the square starts. Inside a bank, the word address is
`(ly >> 1) * S/2 + (lx >> 1)`, relative to the square.

### Victim path

An offset may fall outside the square. The paper calls these rare; the
testbenches inject about one in 64. Such a corner is served by a per-level
victim buffer of `VD` = 16 whole pixels with FIFO replacement:

1. If the corner is on the map but in neither the square nor the victim
   buffer, the read returns `rd_hit = 0`.
2. The cache issues that pixel ahead of any prefetch traffic.
3. The core retries the same read every cycle until it hits.

With VD >= 4K, all corners a read needs fit at once, so progress is
guaranteed.

### Core read port

The read port is combinational. For one head, the core presents the `L*K`
top-left corners and a channel-slice number. In the same cycle it receives
4 corners x `PD` channels for every sample.

## The fused core (`msda_core`)

Each query goes through three phases:

| phase | what happens | cycles |
|-------|--------------|--------|
| PREP | `index_weight_gen` turns each of the M*L*K offsets into a corner and four bilinear weights (one per cycle). In parallel, `softmax_unit` normalises each head's L*K logits. | max(M L K, M (2 L K + 2)) = 272 at defaults |
| COMP | One cycle per (head, slice of PD channels). All 2x2 corners of the head's L*K samples are read, interpolated and aggregated (`bilerp_agg`). In the next cycle, `linear_projector` adds x[PD] times the matching PD rows of W'' into all D accumulators. | D/PD = 128 when nothing stalls |
| WRITE | The D accumulators are shifted, saturated to int8 and written to the output SRAM at the query id. The buffer is released. | 1 (+2 pipeline) |

The projection works because head `m` owns channels `m*D/M ... (m+1)*D/M-1`
of the aggregated vector. Streaming those channels PD at a time against
`W''` rows of the same index computes `sum_m W''_m * agg_m` without storing
`agg`. The W'' SRAM holds one row group per word: D/PD words of D*PD bytes,
with `W''[r*PD+p][j]` at byte `j*PD+p`. It is read one cycle ahead of use.

### Number formats

| quantity | format |
|----------|--------|
| reference point p | unsigned Q0.12 |
| sampling offset dp | signed Q11.4, in pixels of the sample's level |
| sampling position | `p*W_l - 0.5 + dp`, truncated to 1/16 pixel |
| bilinear weights | (16-fx)(16-fy), ... as 9-bit integers summing to 256 |
| interpolated value | sum w*x, then `>>> 8` (int8 range) |
| logits A' | signed Q7.8 |
| Softmax weights A | unsigned Q0.16 |
| aggregation | sum A*v in 28 bits, `>>> 16`, saturate to int8 |
| features, W'' | int8 |
| projector accumulators | 24 bits; output `>>> 8`, saturate to int8 |

The Softmax subtracts the maximum, then computes each exponential as
`e^-z = 2^-k * P(f)`. Here `z*log2(e) = k + f`, and `P` is the [2/2] Padé
approximant `(12 - 6y + y^2)/(12 + 6y + y^2)` of `e^-y` with `y = f*ln2`.
It then divides by the sum. Exponentials and normalisation share one
divider, NS cycles each, so a head takes 2NS+2 cycles. The weights are held
until the next start, and the core copies them into a per-head table.

## Output gather-scatter and the GEMM engines

- **`gather_scatter`** holds the compact-to-token index table. It drains the
  output SRAM one row per cycle to `OUT_BASE + token[q]`. With pruning
  (Sparse-DETR top-rho encoders, top-N decoders), the results land at their
  original token positions without a separate scatter pass.
- **`systolic_gemm`** is an output-stationary int8 array with skewed edges.
  Each cycle takes one column of A and one row of B. After the last input,
  `2*(SIZE-1)+1` cycles pass until the last product is accumulated. The top
  has a 32x32 instance for the projections before the attention and a 64x64
  instance for the FFN. Their operands and results are plain top-level ports.
  Tiling and control of the dense layers is left to the host, because the
  paper does not describe it.

## Memory map and top-level interface

External memory is word addressed. One word is one pixel, D bytes, which
at 1 GHz matches the 256 B/cycle of the HBM2 assumed for the evaluation.

| region | address |
|--------|---------|
| level `l` pixel (x, y) | `lvl_base(l) + y*W_l + x`, levels 151x100, 76x50, 38x25, 19x13 |
| operands of query q | `32768 + q*OPB`. The dp pairs come first (32 bits per sample, x in the low half), then the logits (16 bits per sample). The sample index is `(m*L + l)*K + k`. |
| output row of token t | `65536 + t` |

Port groups of `quill_top`:

- **SRAM loads:** `rp_*`, `wm_*` and `idx_*`. These are simple write ports.
- **Control:** `flush` forgets all cached pixels. `start` with `n_queries`
  begins a pass, and `done` signals its end.
- **Feature read:** `mem_rd_*` is valid/ready. Responses on `mem_rsp_*`
  arrive in order, with any latency.
- **Output write:** `mem_wr_*` is valid/ready.
- **GEMM engines:** `pre_*` and `post_*`.
- **Counters:** `stat_*` gives hits, misses, victim fetches, core stall
  cycles, queries and schedule distance.

The feature-level sizes are this design's choice. They are the usual
Deformable DETR input of about 1200x800 at strides 8 to 64, and they sum to
the 20097 tokens of the evaluation. To change them, edit `LVL_W`/`LVL_H` in
`quill_pkg`.

## Where this design departs from the paper or fills gaps

- **Channels per cycle.** The paper never gives p_d, the number of channels
  the core handles per cycle. Here p_d = 2, which leaves D/p_d = 128 cycles
  per query, well above the scheduler's 47.
- **Region radius R.** R = 4 is assumed. The paper derives it from each
  model's offset statistics.
- **Victim buffer.** Its size (16 per level) and FIFO replacement are
  assumed.
- **Numeric formats.** All formats above are this design's. They follow the
  paper's precision classes: 8-bit weights and activations for the
  bilinear and linear paths, 16-bit weights for aggregation and Softmax,
  and wider accumulators.
- **Softmax overlap.** The Softmax runs beside index generation and does not
  overlap the previous query's COMP phase. This costs PREP cycles per query
  compared with a fully overlapped pipeline.
- **Full sort per decision.** The scheduler re-sorts the whole window for
  every decision, as the paper's cyclic bitonic unit implies. The paper's
  ablation over other window sizes is served by the `WD` parameter.
- **Not built:**
  - the host interface, of which the paper gives only the name;
  - the external memory and its controller;
  - striping of W'' for D or M larger than the defaults;
  - the sequencing of the dense layers on the GEMM engines.

## Verification

Each unit has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Stimulus comes from hash
functions of the coordinates (`tb_quill_pkg`), so no data files are
needed. `tb_quill_pkg` also holds an independent reference MSDeformAttn,
written from the mathematical definition with the same fixed-point
conventions. `ext_mem_model` is a behavioural external memory with random
back-pressure and 20-cycle latency.

| testbench | what it checks |
|-----------|----------------|
| `tb_dooq_scheduler` | Emission order against a greedy nearest-neighbour model of the window, ties, and one query per 1 + 6 + 1 = 8 cycles at WD = 8. |
| `tb_feature_cache` | Read data on every corner and channel, including victim and off-map corners. Hit and miss counts exactly equal a set-difference model of consecutive regions. In-region reads hit in the same cycle. With 1500-cycle queries, the next buffer is ready the cycle after release. |
| `tb_index_weight_gen`, `tb_bilerp_agg`, `tb_linear_projector` | Random vectors against integer and real reference models. |
| `tb_softmax_unit` | Against a real-valued Softmax, within 256/65536 per weight and 512/65536 on the sum. Latency 2NS+2. |
| `tb_msda_core` | Every output row exact against the reference. Exactly D/PD served reads per query, consecutive when nothing stalls. Stall count equal to refused reads. |
| `tb_sram_1r1w`, `tb_gather_scatter`, `tb_systolic_gemm` | Read latency and read-during-write. Scatter addresses, data and n+1-cycle drain. Products of depth 1-12 and completion time. |
| `tb_quill_top` | End to end at D = 32, M = 4, K = 2, w_d = 16, 40 queries. Every scattered row exact. Counts reorder, look-ahead, hit, miss, victim, stall and scatter events and fails if any is zero. |
| `tb_quill_full` | The same at the default parameters: one 300-query decoder pass. All 300 x 256 outputs are checked. About 161k cycles, with about 69k hits, 32k misses, 1k victim fetches and 23k stall cycles. |

To run one testbench with Verilator (Verilator 5, `--timing`):

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/quill_pkg.sv tb/tb_quill_pkg.sv tb/tb_quill_top.sv --top-module tb_quill_top
./obj_dir/Vtb_quill_top
```

The full-size run builds in under a minute and simulates in about 35
seconds.

### Lint notes

Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is asynchronous in
the registers and also appears in `disable iff` of the handshake
assertions. This is harmless: the assertions are not part of the netlist.
