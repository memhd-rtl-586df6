# MEMHD inference engine: multi-centroid binary HDC on in-memory-computing arrays

Hyperdimensional computing (HDC) classifies an input by encoding it into a
long vector (the *hypervector*) and comparing that vector with one stored
vector per class. Binary HDC models usually use about 10,000 dimensions and
one class vector per class. On in-memory-computing (IMC) arrays of, say, 128
rows by 128 columns this fits badly in two ways. A 10k-dimensional vector
needs about 80 arrays stacked along the rows. And each of those arrays uses
only k of its 128 columns, one per class: 10 for MNIST.

MEMHD turns both numbers around. The dimension D is chosen to equal the
array height (for example 128), and the AM's C columns are all filled with
class vectors: several *centroids* per class, not one. The whole
associative memory (AM) then fills exactly one array. The search is a single
array operation, with every column in use. The encoder is a binary random
projection, which is also a plain matrix-vector product. So both halves of
inference run on the same kind of binary IMC array.

This repository holds synthesizable SystemVerilog for that inference engine.
The default configuration is the MNIST model of size 128x128: 784 input
features, D = 128, C = 128 centroid columns and 10 classes, on 128x128
arrays. Seven arrays hold the encoder and one holds the AM. An inference
takes 7 + 1 array operations.

Training is not part of the hardware. It covers the clustering-based
initialisation of the centroids, the choice of how many centroids each
class gets, and quantisation-aware iterative learning. All of it runs
offline in floating point. Its results, the projection matrix, the binary AM
and the class label of every AM column, are written into the engine through
its host ports.

## Inference, step by step

For an input feature vector F of f unsigned 8-bit features:

1. **Encoding.** Q = Mᵀ F. M is the f × D binary projection matrix. Column j
   of M is the base vector of dimension j, so Q[j] is the sum of the features
   whose base-vector bit is 1. The cells are taken as 0/1, not ±1.
2. **Query binarisation.** Q^b[j] = 1 if Q[j] is greater than the mean of all
   D elements of Q, else 0. In hardware this is the exact comparison
   `D*Q[j] > sum(Q)`, with no division.
3. **Associative search.** score[c] = Σ_j Q^b[j] · A[j][c] for every centroid
   column c of the D × C binary AM A. This is the dot similarity of two 0/1
   vectors, the popcount of their AND.
4. **Prediction.** The winning column is the one with the highest score; on a
   tie the lowest column index wins. The predicted class is the label stored
   for that column.

There is no class-level reduction such as a sum or a vote over a class's
centroids. A class wins through its single best-matching centroid. That is
what gives the multi-centroid AM its power: the centroids of one class can
sit in quite different parts of the space.

## Mapping onto arrays

Every array (`imc_array`) stores ROWS × COLS single-bit cells. One operation
multiplies a ROWS-element input vector by the cell matrix and returns COLS
column sums. Matrices larger than one array are cut into *tiles* of ROWS ×
COLS. Each tile gets its own array, and the last tile in each direction is
padded.

**Encoder tiles.** There are N_RB = ⌈f/ROWS⌉ feature blocks and N_DB =
⌈D/COLS⌉ dimension blocks. Tile number `t = db*N_RB + rb`. Row r, column c of
tile t holds M[rb·ROWS + r][db·COLS + c]. Padded rows are harmless, because
features at or beyond f always read as zero from the input buffer. Padded
columns are computed but never read.

**AM tiles.** There are N_DB = ⌈D/ROWS⌉ dimension blocks and N_CB = ⌈C/COLS⌉
centroid blocks. Tile number `t = cb*N_DB + db`. Row r, column c of tile t
holds A[db·ROWS + r][cb·COLS + c]. Padded rows receive a query bit of 0.
Padded columns are skipped by the argmax.

| model (f, D, C, k) | encoder tiles | AM tiles | array operations | latency (cycles) |
|---|---|---|---|---|
| MNIST / FMNIST 128x128 (784, 128, 128, 10), default | 7 × 1 = 7 | 1 × 1 = 1 | 7 + 1 = 8 | 15 |
| ISOLET 512x128 (617, 512, 128, 26) | 5 × 4 = 20 | 4 × 1 = 4 | 20 + 4 = 24 | 31 |

The operation counts equal the single-array cycle counts reported for MEMHD
(8 and 24). The latency adds a fixed 7 cycles of control and pipeline
overhead:

- 1 cycle to accept `start`;
- 2 cycles from the last encoder operation to a valid Q;
- 1 cycle for binarisation;
- 1 cycle to start the AM;
- 2 cycles from the last AM operation, through the argmax, to `done`.

In each cycle at most one array performs an operation. The encoder walks
its tiles in tile order. The column sums of a tile come out of the array one
cycle after the operation and are added into the accumulators for the
tile's D columns. The AM works the same way: it adds up the dimension blocks
of one centroid block, then hands that block's COLS scores to the argmax
unit. The argmax keeps a running best over the blocks. Running every array
in parallel would cut latency to a few cycles. That would be a different
schedule, and the operation count would not change.

Widths grow with the sizes:

- an encoder partial sum has FEAT_W + log2(ROWS) bits;
- Q has FEAT_W + ⌈log2(N_RB·ROWS)⌉ bits, 18 at the defaults;
- a score has ⌈log2(N_DB·ROWS + 1)⌉ bits, 8 at the defaults.

All sums are exact.

## Programming and running it (`memhd_top`)

All host writes are one per cycle, and only while `busy` is low. An
assertion checks this.

- `feat_we, feat_addr, feat_data` write one input feature.
- `w_we, w_sel, w_tile, w_row, w_data` write one row of one tile.
  - `w_sel = 0` selects the encoder: `w_row` is the feature within the block,
    and bit c of `w_data` is dimension db·COLS + c.
  - `w_sel = 1` selects the AM: `w_row` is the dimension within the block,
    and bit c is centroid cb·COLS + c.
- `lbl_we, lbl_col, lbl_class` set the class of one AM column. After reset
  every column is class 0.
- Pulse `start` for one cycle to begin an inference. `busy` rises; a `start`
  while busy is ignored. `done` pulses for one cycle when the result is
  ready. `pred_class`, `pred_col` (the winning centroid) and `pred_score`
  (its dot similarity) hold the result until the next `done`.

The features persist between inferences, so a new input only needs the
features that changed. The arrays and labels can be rewritten between
inferences, for example after a retraining step.

## Structure

| module | role |
|---|---|
| `memhd_pkg` | default sizes, `phase_e` phase encoding, helper functions |
| `imc_array` | one binary array: row writes, one matrix-vector operation per cycle, registered column sums |
| `input_buffer` | feature register file with zero-padded block reads |
| `em_unit` | encoder: ⌈f/ROWS⌉·⌈D/COLS⌉ arrays, tile sequencing, Q accumulators |
| `query_binarizer` | mean-threshold binarisation Q → Q^b |
| `am_unit` | associative memory: ⌈D/ROWS⌉·⌈C/COLS⌉ arrays (1-bit inputs), per-block score accumulation |
| `argmax_unit` | block-serial argmax over valid columns, lowest index on ties |
| `label_table` | class label of each centroid column |
| `memhd_ctrl` | phase sequencer: encode → binarise → search → done |
| `memhd_top` | wires the above together and holds the result registers |

Sizes are parameters. `memhd_top` takes N_FEAT_P, DIM_P, N_COL_P,
N_CLASS_P, ROWS, COLS and FEAT_W_P; their defaults come from `memhd_pkg`.
The design works for any sizes, including ones that are not multiples of
the array size.

## What follows the source design and what is this implementation's choice

These follow the MEMHD description:

- binary projection encoder and binary AM, both on IMC arrays;
- dot similarity as the search metric;
- several centroids per class, filling all C columns;
- prediction as the argmax over all centroids;
- 128x128 arrays;
- the D = C = 128 MNIST model as the main configuration;
- the array and operation counts above.

These are this implementation's own choices:

- **Digital arrays.** The MEMHD figures for energy and cycles come from
  SRAM IMC macros, whose column summation is analog and is read out by ADCs.
  Here each array is a bit-exact digital equivalent: the column sums are
  exact and there is no ADC limit or noise.
- **Feature format.** Features are 8-bit unsigned, which is natural for
  MNIST pixels. ISOLET features are real-valued and would have to be
  quantised first.
- **Query binarisation.** The source defines mean-threshold binarisation
  only for the AM, during training. This design uses the same rule for the
  query, because it has to binarise Q somehow. A different rule, such as a
  fixed threshold or the sign of a ±1 projection, changes only
  `query_binarizer`. Predictions match a trained model only if the training
  used the same rule.
- **0/1 cells.** Cells of the projection matrix count as 0/1, not ±1.
- **Schedule.** One array operation per cycle, in the tile order above.
- **Control.** The start/done pulse handshake, the host write ports, the
  reset values and the lowest-index tie rule are all this design's own.
- **Label table.** A small programmable register table holds the column
  labels.

Not in hardware: the training flow described in the opening section, the
analog periphery of a real SRAM macro, and the host.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_imc_array`, `tb_input_buffer`, `tb_em_unit`, `tb_query_binarizer`,
  `tb_am_unit`, `tb_argmax_unit`, `tb_label_table`, `tb_memhd_ctrl`: unit
  tests. Each compares the module's outputs with values worked out in the
  testbench. Where the module has a schedule, the tests also check its
  operation counts and timing.
- `tb_memhd_top`: end to end at a reduced size, 37 features, D = 12, 20
  columns, 4 classes and 8x8 arrays, padded at every block edge. Random
  weights and labels are used. Each prediction is compared with a reference
  model in the testbench, and so are the encoder and AM operation counts and
  the latency. The testbench counts each mechanism and fails if one never
  occurs:
  - accumulation over feature blocks and over AM dimension blocks;
  - padding;
  - a winner in a later centroid block;
  - a winner that is not its class's first centroid;
  - a tie;
  - an ignored `start`;
  - reprogramming.
- `tb_memhd_full`: the same test at the default size (the MNIST 128x128
  model, no parameter overrides). It takes a few seconds.
- `tb_memhd_isolet`: the same test at the ISOLET 512x128 size, checking 20 +
  4 array operations.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/memhd_pkg.sv tb/tb_memhd_full.sv \
          --top-module tb_memhd_full -Mdir obj_full
./obj_full/Vtb_memhd_full
```

Replace the testbench name to run the others. The testbenches use
`$urandom` and need no input files.

## How far it can be trusted

- The arithmetic of every stage is checked against an independent reference
  on random data, at three sizes including the default.
- None of the tests uses trained weights. They show that the engine computes
  the MEMHD inference function exactly; they say nothing about accuracy.
- Accuracy depends on the offline training, and on the training's query
  binarisation matching the one in `query_binarizer`.
- The arrays are ideal digital arrays. A real SRAM IMC macro with
  limited-precision ADCs would give different column sums once a sum exceeds
  the ADC range.
