# OASIS accelerator RTL: LUT-based GEMM for 4-bit codebook weights and activations, with outliers handled on the side

This design multiplies an FP16 activation vector by a weight matrix when the
weights and the activations are both stored as 4-bit indices into learned
16-entry codebooks (K-means centroids). The case it targets is one decoding
step of a large language model layer: `y = x · W` with `x` of length K = 4096
and `W` of size 4096 × 4096.

The key observation is that with two 4-bit codebooks there are only
16 × 16 = 256 possible products `C_A[a] · C_W[w]`. These are kept in a
256-entry *Cartesian-product LUT*. An output then needs no K-long chain of
FP16 multiply-adds. Instead, for output channel `n`, the design:

1. pairs each activation index with that channel's weight index (8 bits, `{a, w}`);
2. counts how often each of the 256 pairs occurs;
3. forms `Σ_pairs count[p] · LUT[p]`, which is 256 FP16 multiply-adds no matter how large K is.

Activation outliers are handled separately. A few activations are far outside
the codebook range, and clipping them to the nearest centroid would lose
accuracy. Each token's `k` largest and `k` smallest activations (0.5% each by
default) are found dynamically. The outlier branch then adds back what
quantization lost: the residual `x − C_A[a]` times the weight row of that
input channel. This is the *look-ahead* arrangement. The main branch never
waits for outlier detection and treats every activation as quantized. Both
branches run at the same time and are summed at the end:

```
y[n] = Σ_k LUT[{a_k, w_kn}]                      (look-ahead, main branch)
     + Σ_{k ∈ outliers} (x_k − C_A[a_k]) · C_W[w_kn]   (error compensation)
```

For an outlier the two terms add up to `x_k · C_W[w_kn]`, so that activation
is effectively kept at full FP16 precision.

## Blocks and data flow

```
            host port                                        host port
               │                                                 ▲
        ┌──────▼────────── Output Buffer (32768 × FP16) ─────────┴───┐
        │  x at words 0..K-1                     y at words K..K+N-1 │
        └──┬──────────────────────────┬────────────────────────▲─────┘
           │ 4 reads/cycle            │ 16 words/cycle         │ 16 writes (one per line)
   4 × Clustering Unit             Orizuru (K leaves)          │
           │                          │ one outlier per pop    │
   Activation Index Buffer         Error Calculation Unit      │
           │ broadcast K indices      │ (channel, residual)    │
           ▼                          ▼                        │
   ┌──────── 16 × PE line  (each owns 256 output channels) ────┴──┐
   │ Weight Index Buffer ─► 4096 Concat Units ─► 32 Index Counters │
   │      (256 × 4096 × 4 b)            ─► 32-input FP16 MAC tree ─► la[256]
   │ Weight Index Buffer column ─► Dequantization Unit ─► 8 FP16 MACs ─► acc[256]
   │ merge: y = la + acc, one channel per cycle                    │
   └───────────────────────────────────────────────────────────────┘
                 LUT (256 products + C_W + C_A) feeds every line
                 Memory Controller sequences everything
```

| File | Block | What it does |
|---|---|---|
| `rtl/fp16_pkg.sv` | — | binary16 add, multiply, compare, integer→FP16 |
| `rtl/oasis_pkg.sv` | — | default sizes |
| `rtl/concat_units.sv` | Concat Units | 4096 registers holding `{a, w}` |
| `rtl/index_counter.sv` | Index Counter | 16 inputs → 256 counts (one-hot decode and bit count) |
| `rtl/mac_tree.sv` | MAC tree | 32 × (count → FP16) · LUT, adder tree, accumulator |
| `rtl/dequant_unit.sv` | Dequantization Unit | 8 weight indices → 8 FP16 weights |
| `rtl/ec_mac_array.sv` | error-compensation MACs | 8 FP16 MACs over 256 accumulators; merge adder |
| `rtl/weight_index_buffer.sv` | Weight Index Buffer | row read (4096 indices) and 8-wide column read |
| `rtl/pe_line.sv` | PE line | everything above for 256 output channels |
| `rtl/lut_mem.sv` | LUT | products and both codebooks |
| `rtl/act_idx_buffer.sv` | Activation Index Buffer | 8 rows × 4096 indices, 4 write ports |
| `rtl/output_buffer.sv` | Output Buffer | 64 KB of FP16, multi-ported |
| `rtl/clustering_unit.sv` | Clustering Unit | FP16 → nearest-centroid index |
| `rtl/orizuru.sv` | Orizuru | k largest then k smallest, one per cycle |
| `rtl/error_calc_unit.sv` | Error Calculation Unit | residual `x − nearest centroid` |
| `rtl/mem_ctrl.sv` | Memory Controller | sequencing of both branches and the merge |
| `rtl/oasis_top.sv` | top | 16 lines and the shared units wired together |

Several parts of a complete chip are not written here:

- the on-chip interconnect, which is only drawn as a box;
- the Functional Unit, whose operations are not specified;
- the off-chip HBM, which holds the weights and LUT contents.

In their place, the top has plain load ports for the Output Buffer, the LUT
and the weight indices.

## How a PE line reduces one output channel

This is the least obvious part of the design. A line holds the 4-bit weight
indices of its 256 output channels. It processes one channel per *slot* of
`SLOT = max(CH, BEATS) + 1` cycles, where:

- `CH = K / (32 counters × 16 inputs) = 8` is the number of counting cycles;
- `BEATS = 256 / 32 = 8` is the number of MAC-tree beats.

This gives 9 cycles per slot. Two stages overlap, so channel `n+1` is counted
while channel `n` is reduced:

- **Stage A, counting.** In slot cycle 0 the Concat Units load `{a_k, w_kn}`
  for all k, using the activation indices broadcast from the Activation Index
  Buffer and row `n` of the Weight Index Buffer. In cycles 1..8 the 32 Index
  Counters take a different 512-entry chunk each cycle. Their 32 × 256 counts
  are added into a 256-bin histogram (`hist_a`, 13 bits per bin). At the end
  of the slot, the histogram is handed to stage B (`hist_b`).
- **Stage B, reduction.** In cycles 0..7 the MAC tree takes bins
  `32·beat .. 32·beat+31`. It converts each count to FP16, multiplies it by the
  LUT entry of the same address, and sums the 32 products in a binary adder
  tree. Beat 0 loads the accumulator and later beats add to it. In cycle 8 the
  result is stored as the look-ahead value `la[n]`.

A sweep over 256 channels takes 257 slots (one slot fills the pipeline), which
is 2313 cycles.

Error compensation needs no schedule slot. When a residual `(ch, r)` arrives,
the line reads column `ch` of its Weight Index Buffer, 8 outputs at a time. It
dequantizes the 8 indices and adds `r · C_W[w]` into 8 of its 256 FP16
accumulators. One outlier takes 256 / 8 = 32 cycles, and the line refuses a
new residual until it is finished (`ol_ready`). All 16 lines work in lockstep
on the same residual; the top asserts this.

The merge streams `y[n] = la[n] + acc[n]` out of the line, one channel per
cycle. Each line writes through its own port into the Output Buffer, so the
merge takes 256 cycles.

## Orizuru: top-k by two trees over shared leaves

Orizuru keeps a max tree and a min tree over the same N leaf values. An
internal node stores one *path bit*: which child holds the winner below it.
This makes the index of the current maximum (or minimum) the path bits read
from the root down, with no values copied up the tree.

- **Initialisation.** Comparisons run bottom-up, one level per cycle, so it
  takes log2 N cycles. The min tree's bottom level takes no comparators of its
  own: it reuses the max tree's bottom comparison with the result reversed.
  With equal leaves, both trees pick the left leaf. That is how ties are
  broken everywhere: the left child wins in both trees.
- **Pop.** Each cycle presents the current winner (`out_val`, `out_idx`). When
  it is taken, the popped leaf is masked out. In the max tree it then counts
  as −∞, in the min tree as +∞, and the leaf's stored value itself does not
  change. The nodes on the popped path are re-decided in the same cycle by a
  chain of log2 N comparators, one per level, so a pop costs one cycle. That
  chain is this design's way of fitting the log2 N sequential comparisons of a
  tree update into one clock.
- **Index.** `out_idx` is the leaf number counted from 0. It is the path bits
  read from the root, which equals the heap node number minus N.
- **Output order.** The k maxima come first, then the k minima. Each tree has
  its own mask, so a value can be popped by both trees only if `2k > N`.

The top builds one tree of K = 4096 leaves. It has the same structure as
256 + 16 + 1 = 273 sixteen-input units arranged in three levels. The leaves
are loaded from the Output Buffer, 16 words per cycle.

## Clustering and residuals

A value `x` belongs to centroid `i` when it lies between the mid-points
`b_{i−1} = (c_{i−1}+c_i)/2` and `b_i = (c_i+c_{i+1})/2`. The codebook must be
sorted in ascending order.

- **Clustering Unit.** It finds the index by binary search over the 15
  boundaries: if `x < b` it goes to the lower half, otherwise to the upper
  half. A value exactly on a boundary goes up. It resolves two levels per
  cycle, so one activation every 2 cycles. Four units quantize 4096
  activations in 2048 cycles.
- **Error Calculation Unit.** It runs the same search in a single cycle, only
  for the outliers, and outputs `x − c_idx`.

## Numbers

All arithmetic is IEEE binary16 with these simplifications:

- round to nearest even;
- subnormal inputs and results are treated as zero;
- exponent 31 is read as infinity and no NaN is produced.

The index counts are converted to FP16 exactly up to 2048. Counts up to 4096
are rounded to the nearest even count.

## Timing at the default size

The figures below are for one 1 × 4096 × 4096 GEMM with 20 + 20 outliers,
measured by the full-size testbench. The "reference" column is the per-stage
cycle breakdown published for this architecture.

| Stage | This RTL | Reference |
|---|---|---|
| activation quantization (4 units) | 2049 | 2048 |
| index distribution (counting) | 2048 (8 per channel, overlapped) | 1024 |
| reduction (MAC tree sweep) | 2315 | 2304 |
| outlier detection | 4096/16 load + 12 init + 40 pops | 1344 |
| error compensation | 40 × 32 = 1280 | 1536 |
| outlier branch in total | 1551 | — |
| merge | 256 | 256 |
| whole GEMM, start to done | 4623 (9.2 µs at 500 MHz) | — |

Quantization, reduction and merge agree with the reference. Two stages do not:

- **Counting** takes twice the reference time. The 32 sixteen-input counters
  handle 512 indices per cycle, and 4096 / 512 = 8 cycles per channel. Since
  the counting overlaps the reduction, this does not lengthen the sweep.
- **Outlier detection** is much shorter than the reference. The tree here has
  all N − 1 comparators; the reference uses fewer and takes longer to build
  the tree.

As in the reference, the outlier branch finishes first at 1% outliers. With
many outliers the main branch finishes first and waits.

Loading all weight indices into the 16 lines takes 65,536 cycles at 16 indices
per line per cycle. This is outside the GEMM time above.

## Where this RTL departs from the architecture as published

- **Weight Index Buffer capacity.** The published configuration gives 2 KB
  per line, which is one output channel. Here each line keeps the indices of
  all its 256 channels (512 KB). This lets the outlier branch fetch any input
  channel on chip, as the dataflow requires. Streaming weights from off-chip
  memory is not modelled.
- **Where partial results live.** The look-ahead results and the compensation
  accumulators stay in registers inside each line until the merge. In the
  published dataflow they are parked in the Output Buffer.
- **LUT and Activation Index Buffer.** The LUT holds 576 bytes (256 products
  plus two codebooks) of a nominal 2 KB. The Activation Index Buffer has 8
  token rows, but only row 0 is used, since one token is processed per GEMM.
- **Orizuru build and latency.** See the sections and table above: it has a
  full comparator tree and a one-cycle initialisation per level.
- **Choices of this design where the architecture is silent.**
  - Output channels are mapped to lines in contiguous blocks of 256.
  - The Output Buffer address map is x at 0, y at K.
  - Handshakes are valid/ready; reset is asynchronous and active low.
  - Maxima are popped before minima.
  - The Memory Controller starts quantization and outlier loading together,
    starts the PE sweep when all indices are written, and starts the merge
    when both branches are idle.
- **Fixed layer size.** A layer with K > 4096 does not fit. There is no mode
  that adds a new partial sum into an earlier output. N > 4096 runs in several
  passes with the weight indices reloaded by the host.

## Driving the top module

`oasis_top` has plain ports:

1. **LUT.** Write `lut_we/lut_addr/lut_wdata`:
   - addresses 0..255 hold `C_A[a]·C_W[w]` at address `16·a + w`;
   - 256..271 hold `C_W`;
   - 272..287 hold `C_A` (ascending).
2. **Weights.** Write `w_we/w_row/w_word/w_data`. Each cycle writes 16
   indices of row `w_row` (the output channel within a line), word `w_word`
   (input channels `16·w_word ..`), into every line at once. Line `l` gets
   `w_data[l]`, which is `W[k][l·256 + w_row]`.
3. **Activations.** Write x into the Output Buffer through `h_we/h_waddr/h_wdata`
   at words 0..K−1.
4. **Run.** Set `topk`, pulse `start`, and wait for `done`. `busy` is high in
   between. `cyc_quant`, `cyc_main`, `cyc_outlier` and `cyc_total` report the
   branch times.
5. **Results.** Read `y[n]` at word `K + n` through `h_raddr/h_rdata`. The read
   is combinational.

## Testbenches and simulation

Every block has a self-checking testbench in `tb/`. Each prints one line
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if the
design hangs. Results are compared with references computed in double
precision with a tolerance sized to FP16 accumulation. Where the architecture
gives a rate, the cycle count is checked too:

- 2 cycles per activation per Clustering Unit;
- 32 cycles per outlier, here scaled down to NOUT/NMAC;
- SLOT cycles per output channel;
- Orizuru's log2 N + 2k cycles;
- the Memory Controller's ordering.

`tb_orizuru` uses the eight-value example from the published description
(1 8 2 4 1 5 9 6, k = 2). `tb_mac_tree` and `tb_error_calc_unit` use the
worked examples given there (a weighted sum of 0.94; 5.07 → residual 4.29).

`tb_oasis_top` runs the whole chip at K = 64, 32 outputs and 4 lines, four
times with k = 2, 0, 30 and 7. It counts these events and fails if any never
happens:

- maximum pops and minimum pops;
- Orizuru stalls while the lines are busy compensating;
- a run where the outlier branch ends last and one where the main branch does;
- a run without outliers;
- merged outputs.

`tb_oasis_full` runs the top with every parameter at its default: one
1 × 4096 × 4096 GEMM with 20 + 20 outliers, all 4096 outputs checked. It needs
about two minutes of simulation.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/fp16_pkg.sv rtl/oasis_pkg.sv tb/tb_fp16_pkg.sv tb/tb_oasis_top.sv \
  --top-module tb_oasis_top -o sim && obj_dir/sim
```

Replace `tb_oasis_top` with any other testbench name. All testbenches set
their own sizes with parameter overrides, except `tb_oasis_full`. The RTL
defaults are the published configuration:

- 16 lines;
- 4096 concat units per line;
- 32 counters of 16 inputs per line;
- a 32-input MAC tree and 8 compensation MACs per line;
- 4 clustering units;
- a 64 KB Output Buffer.
