# LearningGroup sparse-training accelerator

The idea: with learnable weight grouping, a weight survives pruning only when
the argmax of its input-grouping row equals the argmax of its output-grouping
column. All rows whose grouping row has the same argmax therefore share the
same mask row. There can be at most G different mask rows. The hardware
never builds the mask matrix. It computes one argmax per row and per column.
It builds a mask row (bitvector, list of non-zero columns, workload) the
first time a group index is seen, and after that it only looks it up. The
compressed weights are then handed out to the cores in row blocks. Each
core packs up to four rows of different widths side by side across its
vector units. Each unit picks its activation with a 2-bit select.

This repository holds a synthesizable SystemVerilog model of that
accelerator. The default size is 3 cores × 264 vector units, up to 16
groups, and layers up to 512 × 512. Arithmetic is FP16.

## Data flow of one layer pass

A pass is started with `mode` (forward with W, or backward with Wᵀ), the
channel counts, the group count and `commit_en`. The
`instruction_scheduler` then runs three stages:

1. **Weight grouping.** The grouping matrices are read from the global
   parameter memory one value per cycle and go through the
   `max_index_unit`. First come the column vectors (OG columns forward, IG
   rows backward). Their argmaxes fill the encoder's column list. Then come
   the row vectors, whose argmaxes stream into the `sparse_data_encoder`.
2. **Weight compression / load allocation.** The `load_allocation_unit`
   walks the index list. For each row it fetches only the unmasked
   weights, at address `r·O + nz` (forward) or `nz·O + r` (backward). It
   sends them, together with the row's activation, local index list and
   the workload table, to the core that owns the row.
3. **Computation.** The three `learninggroup_core`s run in parallel. Their
   partial sums go to the `aggregator`, which adds them into the output
   vector. With `commit_en`, the output is then copied into the activation
   memory and becomes the next layer's input.

The host is outside the design. It uses plain ports on
`learninggroup_top` to load the parameter memory and activations, read the
output vector and the bitvectors, and read statistics counters.

### Memory layout

The global parameter memory holds 2¹⁹ FP16 words:

- `W(i,o)` at `i·O + o`, row-major, I × O.
- `IG(i,g)` at `2¹⁸ + i·16 + g`.
- `OG(g,o)` at `2¹⁸ + 8192 + g·512 + o`.

The weights are stored once. The backward pass reads them transposed by
swapping the roles of row and non-zero index in the address.

## Sparse data encoder (OSEL) and sparse row memory

The encoder keeps the column argmaxes in a 512-entry list. For each
incoming row argmax `g` (one per cycle), it reads the status bit of `g` in
the sparse row memory bank of the current orientation:

- **Miss** (status clear): all 512 column argmaxes are compared with `g`
  at once, which gives the bitvector. In the same cycle, a popcount gives
  the workload and a prefix-count compaction gives the ordered list of
  non-zero column numbers. The tuple (bitvector, non-zero list, workload)
  is written and the status bit is set.
- **Hit:** nothing is generated.

In both cases `g` is appended to the index list. A pass with R rows and K
columns takes K + R + 3 cycles. Hits and misses are counted. The number of
misses always equals the number of distinct row groups.

The sparse row memory has two banks, forward and transposed. Each holds 16
tuples and a 512-entry index list. It has several read ports:

- status, used by the encoder;
- index list plus workload/non-zero index, used by the load allocation
  unit;
- a second non-zero index port, used by the aggregator to turn
  (group, k) into a column;
- a bitvector port for the host.

## Load allocation

Rows are split into contiguous blocks of ⌈R/3⌉, one block per core. A
weight survives with probability 1/G independent of the row, so equal row
counts give near-equal work. The unit first broadcasts the workload table
to all cores. Then it sends each core its index list entries and its
activations. Then it sends the compressed weights in row order, one per
cycle. The parameter memory has a one-cycle read latency, so each write
trails its read by one cycle. At the end each core gets its row count.

## LearningGroup core: time stamps, selects and partial sums

This is the part with the most design decisions. Each core has:

- a workload table (16 entries);
- its local index list and activations;
- a compressed weight memory;
- 264 `vector_processing_unit`s, each with an FP16 multiplier and adder,
  a 4-to-1 activation mux and four accumulation registers;
- an output buffer.

**Planning a time stamp.** The `core_controller` looks at the next four
rows starting at the current row and offset. Each row needs `WL[g]` units
(its group's workload). The rows are laid out left to right: row s takes
units `start_s … start_s + take_s − 1`, and those units get select `s`. If
a row does not fit in the units that are left, it takes what is left and
the time stamp ends there. The rest of that row (a new offset `k0`) starts
the next time stamp. A row of width 0 takes no units. This flattening
reproduces the published example: index list 1 2 1 3 / 0 2 3 3 with
workloads 1 2 1 2 on seven units gives the selects `00000110101111` and
`000110101111`.

**Loading and firing.** The four activations of the time stamp are
broadcast. The per-unit weights are copied from the weight memory into a
staging register N/4 = 66 at a time over four cycles. The weights of a time
stamp are consecutive in the weight memory because the load allocation unit
wrote them in row order. Then all used units fire one MAC. A time stamp
takes 6 cycles: plan, four loads, fire.

**When partial sums leave.** A unit's accumulator for select `s` holds
part of the dot product for one (group, non-zero position k) pair:

- If the next time stamp has exactly the same pattern (same groups, same
  offsets, same widths in every slot), each unit keeps the same (group, k)
  meaning. The core then just accumulates.
- If the pattern differs, the accumulators of the previous time stamp are
  captured into the output buffer. Each entry is tagged with its group and
  its k. The new time stamp starts with cleared accumulators.
- After the last row, a final flush empties the units.
- If the output buffer is still draining when a flush is due, the
  controller waits.

The buffer sends one entry per cycle to the aggregator. Counters record
time stamps, accumulations, flushes, splits, wait cycles and MACs.

**Why the column is looked up later.** A flushed partial sum is
`x[r]·W[r][nz_k]` (summed over rows with the same pattern), and its output
column is `nz_k` of group g. The core does not need to know column
numbers. The aggregator reads `nz_k` from the sparse row memory.

## Aggregator

Each cycle the aggregator takes one partial sum, round-robin over the
cores. It looks up the column and does an FP16 read-modify-write add into
the 512-entry output vector. Back-to-back sums to the same column are safe.
It also holds the activation memory that the load allocation unit reads,
and commits the output into it on request. No activation function is
applied.

## FP16 arithmetic

`fp16_mul` and `fp16_add` are combinational:

- round to nearest even;
- subnormals flushed to zero;
- overflow to infinity;
- no NaN handling.

## Timing of a pass (cycles at the default size)

| layer | stage | group | compress | compute |
|---|---|---|---|---|
| 40×48, G=4 | fwd | 359 | 555 | 481 |
| 96×32, G=4, rows in runs | fwd | 519 | 970 | 218 |
| 16×512, G=2 | fwd | 1063 | 4136 | 4112 |
| 128×512, G=4 | fwd | 2567 | 16721 | 16471 |
| 128×512, G=4 | bwd | 2567 | 17489 | 16471 |

Compression moves one weight per cycle and dominates. Compute is limited by
the aggregator's one sum per cycle. These rates are the model's choices,
not the published ones. The published design reaches much higher
throughput at 175 MHz.

## Parameters

| name | value | published | notes |
|---|---|---|---|
| NUM_CORES (C) | 3 | 3 | |
| NUM_VPU (N) | 264 | 264 | must be a multiple of 4 |
| G_MAX | 16 | 16 | max index 4 bits |
| CH_MAX | 512 | 512 | bitvector width |
| workload width | 10 bits | 9 bits | 10 bits hold a full row of 512 |
| parameter memory | 2¹⁹ words | — | one 512×512 layer plus grouping matrices |
| core weight memory | 87382 words | — | a third of a dense 512×512 layer |

## What is not built

- **Weight update (RMSprop) and gradient computation.** The scheduler
  only sequences grouping, compression and a forward or transposed
  matrix-vector pass.
- **Batching and multi-agent sequencing.** Agents and batch samples are
  handled by the host repeating passes.
- **Overlapping transposed-tuple generation with inference.** It runs as
  its own pass.
- **The host processor and the PCIe/AXI shell.** Plain ports take their
  place.
- **G = 32.** It would need a 5-bit max index.

## Where this model departs from the published design

- Rates. The load path moves one weight per cycle, the aggregator takes one
  partial sum per cycle, and weight loading is not overlapped with the MAC
  step. The published accelerator is much faster; these are the simplest
  choices that give correct results.
- The accumulate-while-the-pattern-repeats rule, the row split, and the
  output-buffer handshake are this model's own reading of how the
  four-row flattening is used. The published text shows only the select
  generation.
- The transposed weight address keeps the output channel count as the
  stride (`nz·O + r`) because the weights are stored once, row-major. The
  published text speaks of using the input channel count as the offset
  in that case.
- Workloads are 10 bits wide instead of 9, so that a full row of 512 fits.

## Verification

Each block has a self-checking testbench in `tb/`:

- FP16 reference in double precision.
- Max index against a software argmax.
- Encoder against a reference tuple builder, including the published
  example.
- Load allocation against a model of the write sequence.
- Core controller against a reference planner, including the published
  select strings.
- Aggregator against a replay of accepted sums.

`tb_learninggroup_top` runs the whole accelerator at the default size
against a double-precision masked product. It covers:

- forward and backward passes;
- a layer with long runs of one group (accumulation) whose committed
  output is fed to the next pass;
- a 16×512 layer whose rows must be split;
- the 128×512, G=4 layer, in both directions.

It fails if any of these mechanisms was never seen: encoder hit and miss,
accumulate, flush, split, wait, backward mode, commit.

## Simulating

All files are plain SystemVerilog; any testbench builds with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_learninggroup_top \
        -y rtl -y tb +libext+.sv rtl/lg_pkg.sv tb/tb_fp16_pkg.sv tb/tb_learninggroup_top.sv
    ./obj_dir/Vtb_learninggroup_top

Every testbench ends with a `TB_RESULT checks=… failures=…` line. The
end-to-end test runs at the default size (no parameter overrides) in a few
seconds of simulation after a build of a few minutes.
