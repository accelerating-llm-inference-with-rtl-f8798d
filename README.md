# FlexCiM: a digital compute-in-memory macro for layer-wise flexible N:M sparsity

Pruned large language models are easier to keep accurate when every layer can pick its
own N:M pattern (N non-zero weights in every block of M consecutive weights), instead of
one pattern for the whole model. The pattern set targeted here is N in {1, 2, 4, 8} and
M in {2, 4, 8} with N <= M: 1:2, 1:4, 2:4, 1:8, 2:8, 4:8, and dense.

A digital compute-in-memory (DCiM) macro keeps the weights in its bit-cells and
multiplies them there, bit-serially, with the input activations (iActs). Each memory
word has only two bit-lines, so it can choose between just two iActs. That is enough
for 1:2, but an N:8 pattern needs an 8:1 choice for every weight. Building that choice
into every cell would cost more area than the cell itself.

FlexCiM solves this by moving the choice out of the array:

* The macro is cut along its rows into **P sub-macros**.
* A **distribution unit** per row index picks, for each sub-macro, the *pair* of iActs
  that holds the wanted one. The word's own 2:1 multiplexer then picks the final iAct.
* The metadata of a weight is its position inside its block of M. Its LSB drives the
  word's 2:1 mux, and its upper bits drive the distribution unit.
* N sets how many sub-macros share one block: those N sub-macros each hold one of the
  block's N non-zeros. M sets how many iActs each distribution multiplexer chooses from.
* A **merging unit** adds the partial sums of the P sub-macros for every output column.

This repository holds a synthesizable SystemVerilog model of that accelerator at its
published size. It also contains a self-checking testbench for every block and
end-to-end tests of every N:M pattern.

## Size of the default configuration

| quantity | value |
|---|---|
| macro | X x Y x 8 = 128 rows x 32 columns x 8-bit words (4 KB of weights) |
| sub-macros | P = 4, each 32 x 32 x 8 (8 Kb) |
| distribution units | 32 (one per row index, shared by all sub-macros and all columns) |
| iAct buffer bandwidth | one line of 128 x 8-bit iActs (1024 bits) per cycle |
| column adder tree | 32 inputs of 8 bits, 17-bit result |
| partial sum per column | 24 bits; merged output 26 bits |
| metadata | 3 bits per stored weight |

Each output column of the macro is one output neuron. All weights in column c, across
all four sub-macros, belong to output c. Their sum of products, taken over every stored
weight, is output c of the pass.

## Block structure

```
             host: weights + metadata, iAct lines, start/cfg
                 |                         |
        +--------v---------+      +--------v--------+
        | global controller|----->|   iAct buffer   |  line s = iActs s*128 .. s*128+127
        | metadata, stages |      +--------+--------+
        +---+----------+---+               | 128 x 8 bit
            |          | dsel (metadata upper bits)
            |   +------v------------------ v ------+
            |   | 32 distribution units (P x P:1 muxes of 16-bit lines)
            |   +---+--------+--------+--------+---+
  ld cmd,   |       |        |        |        |   one iAct pair per sub-macro row
  i_sel     v       v        v        v        v
        +--------+--------+--------+--------+
        | sub-   | sub-   | sub-   | sub-   |   each: 32 columns x (32 words, iAct
        | macro 0| macro 1| macro 2| macro 3|   serializer, 32-input adder tree,
        +---+----+---+----+---+----+---+----+   shift-add accumulator), column
            |        |        |        |        controller, PSum buffer
        +---v--------v--------v--------v---+
        |  merging unit: 4-input adder tree |----> out_valid/out_col/out_data
        +----------------+-----------------+       and output buffer
```

| module | role |
|---|---|
| `flexcim_pkg` | sizes, the `nm_cfg_t` configuration type, N:M helper functions |
| `dcim_word` | 8 bit-cells, shared 2:1 iAct mux, one AND-by-NOR multiplier per bit |
| `iact_serializer` | per column, holds each row's iAct pair and streams it MSB first on BL/BLB |
| `adder_tree` | pairwise signed adder tree (column tree and merging tree) |
| `psum_accumulator` | shift-and-add of the 8 per-bit column sums |
| `dcim_column` | one sub-macro column: words + serializer + tree + accumulator |
| `column_controller` | per sub-macro: EN_COL, stored i_sel bits, MAC start of each column |
| `psum_buffer` | per sub-macro, one partial sum per column |
| `sub_macro` | 32 columns, column controller, PSum buffer |
| `distribution_unit` | per row index, the mode-dependent steering and the P multiplexers |
| `merging_unit` | adds the P partial sums of a column |
| `global_controller` | metadata store, row/column pipeline sequencing, end-of-pass detection |
| `iact_buffer` | 8 lines of 128 iActs, one line read per cycle |
| `output_buffer` | merged outputs of the last pass with valid flags |
| `flexcim_top` | the accelerator |

## How a weight finds its activation

This is the part of the design that needs the most care: the host must put each
non-zero weight in the right word, because the word's position decides which iAct it
meets.

**Row-pipeline stages.** The iAct buffer delivers 128 iActs per cycle. A sub-macro row
in a 1:M pattern needs M candidate iActs, and four sub-macros share each row index. So
one buffer line can feed only some of the 32 row indices of a column at a time. The
rows fed together form a *stage*. In general:

```
stages S  = M / N           (1 when dense)
rows per stage RG = 32 / S
groups per row index G = P / N   (N sub-macros work on the same block of M)
K covered by one pass = 128 * S = 128 * M / N inputs
```

| pattern | S (stages) | rows per stage | iActs per pass (K) | sub-macros per block |
|---|---|---|---|---|
| dense (N = M) | 1 | 32 | 128 | 1 (one iAct per word) |
| 1:2 | 2 | 16 | 256 | 1 |
| 1:4 | 4 | 8 | 512 | 1 |
| 2:4 | 2 | 16 | 256 | 2 |
| 1:8 | 8 | 4 | 1024 | 1 |
| 2:8 | 4 | 8 | 512 | 2 |
| 4:8 | 2 | 16 | 256 | 4 |

**Placement rule.** Take the word at sub-macro p, column c, row r, and write
s = r / RG (its stage) and q = r mod RG (its place within the stage). It belongs to

```
block   b = q * G + p / N              (within buffer line s)
holds   the (p mod N)-th non-zero of that block, in ascending position
meets   iAct  s*128 + b*M + meta,      meta = position of the non-zero in its block (0..M-1)
dense:  iAct  s*128 + q*P + p          (meta unused; both bit-lines carry the same iAct)
```

The distribution unit of row r gives mux p of its P multiplexers these inputs: the
pairs (b*M + 2i, b*M + 2i + 1) of line s, for i = 0 .. M/2 - 1. It selects input
meta >> 1, and the word selects meta & 1 of the pair. For 1:2 and for dense operation
there is only one pair, so no selection happens.

Example, 1:4 (S = 4, RG = 8, G = 4). Row 0 of sub-macros 0..3 takes blocks 0..3, which
are iActs 0-3, 4-7, 8-11 and 12-15. Row 1 takes blocks 4..7, and so on up to row 7. Rows
8..15 form stage 1 and take iActs 128..255. A column therefore holds 128 non-zeros that
stand for 512 dense weights.

Example, 4:8 (S = 2, RG = 16, G = 1). Row 0 of all four sub-macros works on block 0
(iActs 0-7). Sub-macro j holds the j-th of the block's four non-zeros. All four
multiplexers of distribution unit 0 see the same four pairs and pick different ones.

A position that holds no non-zero, because a block has fewer than N, gets weight 0 and
any metadata.

## Pipelining and timing

A pass processes the 32 columns in order. One stage is issued per cycle:

1. The global controller reads line s of the iAct buffer (column c, stage s).
2. One cycle later the line reaches the distribution units. The rows of stage s in
   column c of every sub-macro capture their iAct pair, and the column controller
   captures their i_sel bits. EN_COL of column c rises with its first stage.
3. After the last stage of column c, the column starts its **8-cycle bit-serial MAC**.
   In each cycle every word ANDs the current iAct bit (MSB first) with its 8 weight
   bits. The 32-input adder tree sums the rows, and the accumulator computes
   acc = 2*acc + tree.
4. The partial sum goes into the sub-macro's PSum buffer. The merging unit adds the
   four PSum-buffer entries of that column two cycles later. The merged result appears
   on `out_valid`/`out_col`/`out_data` and in the output buffer.

A new column starts every S cycles, while earlier columns are still in their MAC, so
several columns compute at once (column pipelining). Each column has its own serializer,
so it can keep streaming while the next column loads. For the same reason, one set of 32
distribution units serves all columns.

**Latency.** Count from the cycle in which `start` is sampled to the cycle in which
`done` is high:

```
pass latency = Y * S + 13 cycles   (45 dense, 77 for 1:2/2:4/4:8, 141 for 1:4/2:8, 269 for 1:8)
```

The 13 cycles are: 1 for the buffer read, 1 for the load, 8 for the MAC, 1 for the
PSum-buffer write, 2 in the merging unit. The iAct bandwidth caps one pass at 128 dense
iAct positions per cycle in every mode. A sparse pattern therefore gains by needing
only N/M of the weight words, and so N/M of the weight writes and storage, for the same
K. It does not gain through faster passes. The whole-model latency gains reported for the
original design (up to 1.72x over dense arrays), and the 1.63x and
1.42x labels on its 1:4 and 4:8 examples, come from a system-level simulation of
the memory hierarchy and layer scheduling, which this model does not contain and cannot
reproduce from the published description.

## Number formats

* Weights are signed 8-bit (two's complement).
* iActs are unsigned 8-bit: the accumulator gives every bit a positive weight 2^i.
  Signed activations would need the MSB cycle to subtract. That is not implemented.
* The column tree output is sign-extended to 17 bits, the partial sum is 24 bits, and
  the merged output is 26 bits. None of them can overflow for 8-bit operands.
* The 1-bit multiplier is a NOR gate fed with the complemented iAct bit and the
  complemented stored bit, which is logically an AND.

## Using the top level

All ports are synchronous to `clk`. `rst_n` is an asynchronous active-low reset of the
control state. The weight, metadata and buffer arrays are not reset.

1. **Weights and metadata.** `w_we` writes `w_data` to (`w_sm`, `w_col`, `w_row`) and
   stores `w_meta` for that word. `r_data` reads back the word addressed by the same
   three fields. Do not write while `busy`.
2. **iActs.** `a_we` writes the 128 iActs of `a_data` into line `a_addr`. A pass reads
   lines 0 .. S-1.
3. **Run.** Hold `cfg` (`n_log2`, `m_log2`) and pulse `start` while idle. An illegal
   pattern (M = 1 or N > M) is ignored. Each merged column appears once on
   `out_valid`. The output buffer (`o_addr` -> `o_data`, `o_valid`) keeps the last pass.
   `done` pulses at the end.
4. Larger layers run as a sequence of passes. For K inputs and 32 outputs that is
   K / (128 * M / N) passes, with the outputs of all passes added together outside the
   macro. `tb/tb_workload_gemv.sv` shows this for 4096-input projections.

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends itself. For
example, for the end-to-end test at full size:

```
verilator --binary --timing --assert -Irtl -Itb rtl/flexcim_pkg.sv tb/tb_flexcim_top.sv \
          --top-module tb_flexcim_top -Mdir obj_top
./obj_top/Vtb_flexcim_top
```

Replace the testbench name to run a block test. Each block has `tb/tb_<module>.sv`.

* `tb_flexcim_top` runs all seven patterns twice at the default size. For each pattern
  it builds a random dense weight matrix that obeys the pattern, compresses and places
  it by the rule above, and checks all 32 outputs against a direct dot product. It also
  checks the output buffer, weight read-back and the pass latency. It counts the
  mechanisms it exercises: every N:M mode, multi-stage row pipelining, overlapping
  column MACs, non-zero distribution selects, and selection of the second bit-line. The
  build takes about a minute and the run under a minute.
* `tb_workload_gemv` runs 32-output slices of 4096- and 2048-input projections at 2:4,
  1:8 and 4:8, pass by pass, and checks the accumulated results.

## Where this model departs from, or fills in, the original design

Taken from the published description:

* the partitioning into P sub-macros;
* the 32 distribution units of P P:1 multiplexers with 16-bit lines;
* the metadata split (LSB to the word's 2:1 mux, upper bits to the distribution unit);
* the merging unit as a P-input adder tree over per-sub-macro PSum buffers;
* the MSB-first bit-serial MAC with shift-add accumulation;
* the 32-input column tree and its 8/9/17-bit widths;
* the compute condition (WL = 0 and EN_COL = 1);
* the stage counts for 1:8, 1:4 and 1:2 (8, 4 and 2);
* EN_COL advancing to the next column every S cycles;
* dense operation with the same iAct on both bit-lines.

Choices made here where the description stops:

* **Stage counts for other patterns.** For 2:4, 2:8 and 4:8, S = M/N is derived from
  the 1024-bit buffer bandwidth.
* **Steering in front of the distribution muxes.** Which buffer iActs reach which mux
  input is generalised from two worked examples (1:4 and 4:8). The published
  description gives no general rule.
* **Aligned MAC start.** A column starts its MAC only after all of its stages have
  loaded, so all rows are at the same bit position when the tree adds them. Each column
  has its own serializer.
* **Metadata storage.** The metadata lives in the global controller, and the i_sel bits
  in the column controllers.
* **Host interface.** Weights are written through a plain addressed port. The published
  description mentions reusing the distribution units to place weights; that is not
  modelled. The start/busy/done handshake and all latencies are also choices made here.
* **No overlap between passes.** After the last column has loaded, the first column
  could in principle start loading the next input vector at once. Here a new pass is
  accepted only after `done`, so each pass pays the 13-cycle drain. Overlapping them
  would need a double-buffered iAct buffer, which the published description does not
  give.
* **Sizes.** The iAct buffer holds 8 lines. The PSum and output buffers hold one entry
  per column.
* **Bit-cells.** They are modelled as edge-triggered storage, not latches.
* **Number formats.** Signed weights and unsigned iActs, as described above.
* **Not included.** There is no level-2 shared SRAM, no DRAM interface and no
  accumulation of partial sums across passes; these sit outside the macro. The
  pruning algorithm that chooses each layer's N:M pattern is offline software and is
  not part of the RTL.
