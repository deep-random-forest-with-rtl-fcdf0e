# Deep random forest on ferroelectric analog CAM — RTL model

A deep random forest (DRF) classifies by passing an input through a cascade of
levels. Each level is a set of random forests, each forest an ensemble of
decision trees, and the per-class vote vectors of a level are appended to the
input features and handed to the next level. After the last level the vote
vectors are averaged and the largest class wins.

The expensive part in software is walking the trees: a chain of
data-dependent comparisons. This design removes the walk. Every root-to-leaf
path of a tree is a conjunction of interval tests, one per feature, so a
tree is a table of intervals. An **analog content-addressable memory (ACAM)**
stores that table and checks all of it at once. Each ACAM cell stores one
interval and compares it with the voltage on its search line. Each row
(word) stores one path. The one row whose match line stays high names the
leaf that the input reaches. Walking a tree therefore becomes one parallel
search, and a whole forest is a few arrays searched at the same time.

The cell is built from two ferroelectric FETs (FeFETs), and its interval is
set by their programmable threshold voltages. This RTL reduces the analog
cell to level codes and models everything above it (words, arrays, trees,
forests, cascade levels and the sequencing) as synthesizable SystemVerilog.

## The 2FeFET cell and how a branch becomes a row

One cell has two FeFETs on a shared match line (ML):

* **F0** has its gate on the search line SL. It conducts, and pulls the ML
  down, when the search voltage rises above F0's threshold. F0's threshold
  is therefore the **upper bound** of the matching range.
* **F1** has its gate on SL-bar, the inverted search line. It conducts when
  the search voltage falls below (full scale − F1's threshold). F1's
  threshold therefore sets the **lower bound**.

In the RTL, voltages are unsigned codes of `VTH_BITS` bits (default 3: eight
threshold states per FeFET, which is what the device supports). The code
`VMAX = 2^VTH_BITS − 1` is the highest threshold state, at which a FeFET
never turns on. With SL-bar = `VMAX − sl`, a cell matches when

    VMAX − vth_f1  <=  sl  <=  vth_f0

| tree condition on feature x | `vth_f0` (F0) | `vth_f1` (F1) |
|---|---|---|
| `x < θ`  (less-than branch)    | θ − 1 | VMAX (cut off) |
| `x > θ`  (greater-than branch) | VMAX (cut off) | VMAX − (θ + 1) |
| `a <= x <= b` (both splits on one path) | b | VMAX − a |
| feature not tested ("don't care") | VMAX | VMAX |
| row never matches (unused row) | 0 | 0 |

A row (`acam_word`) is COLS cells on one ML. It matches only if no cell
conducts, so the row's matching region is the intersection of its
per-feature intervals, i.e. one tree path. Equality at a bound counts as a
match. The paper leaves this open, and the mapping above is written so that
it gives the right result.

## Sensing: precharge, evaluate, sample

In the circuit, a clocked pMOS precharges every ML to VDD. The search
voltages are then applied, and any conducting cell discharges its ML. A
two-stage buffer reads the ML at a fixed sense time (10 ns in the reference
circuit). The sense time has to grow with the number of cells per row,
because the leakage of many nearly-off cells adds up.

`ml_sense_amp` keeps the logic of this behaviour:

* precharge sets an ML state bit;
* in every evaluate cycle in which the cells do not all match, the bit is
  cleared, and it stays cleared until the next precharge (a discharged line
  does not recover);
* sample copies the bit to `sa_out`.

The analog sense time becomes `EVAL_CYCLES` (default 10, i.e. 10 ns at an
assumed 1 GHz clock). The search lines must stay stable for the whole
evaluate window.

## From arrays to a classifier

```
drf_top
 ├─ drf_ctrl                 sequencer: per level precharge → evaluate×EVAL_CYCLES → sample → vote load
 ├─ drf_layer  × LAYERS      one cascade level; builds the next level's search vector
 │   └─ forest × FORESTS
 │       ├─ tree_unit × TREES
 │       │   ├─ acam_array × SUBARRAYS   ROWS × COLS, one ML + sense amp per row
 │       │   │   └─ acam_word × ROWS
 │       │   │       ├─ acam_cell (CELLS = COLS)
 │       │   │       └─ ml_sense_amp
 │       │   └─ leaf table + priority encoder → (vote_valid, vote_class)
 │       └─ vote_counter     per-class vote count of the forest
 └─ final_predict            per-class sum over the last level's forests, arg-max
```

* **Tree (`tree_unit`).** Rows are leaves and columns are features. A tree
  that needs more features than one array has columns spreads over
  `SUBARRAYS` arrays side by side, all searched at once. A path matches when
  its row matches in every subarray (the AND of the subarrays' row outputs).
  A leaf table holds a class and a valid bit per row. A priority encoder
  turns the matching valid row into the tree's vote. With no matching valid
  row, the tree abstains. In a correctly mapped tree at most one row
  matches; if more did, the lowest row would win.
* **Forest (`forest`, `vote_counter`).** All trees of a forest search the
  same vector. The counter turns their votes into a per-class vote vector,
  which is registered.
* **Cascade level (`drf_layer`).** The level's forests search the same
  vector. The next level's search vector has this layout:

  | columns | content |
  |---|---|
  | `0 … N_FEATURES−1` | the input features |
  | `N_FEATURES + f·N_CLASSES + c` | the vote of forest f for class c |
  | remaining | 0 (program these cells as "don't care") |

  A vote count v (0…TREES) cannot be searched directly by a 3-bit cell, so it
  is requantised to `round(v · VMAX / TREES)`. The first level sees the same
  layout with the vote columns at 0.
* **Final stage (`final_predict`).** It sums each class over the last
  level's forests (FORESTS times the average, so the arg-max is the same)
  and picks the largest sum. Ties go to the lowest class.

Levels are searched one after another, because each level needs the
previous level's votes. Each tree has its own array, so all trees and
forests of one level are searched in the same cycles.

## Interface and timing of `drf_top`

Default parameters:

| parameter | default | origin |
|---|---|---|
| `ROWS` × `COLS` | 128 × 128 | the paper's basic array |
| `TREES` | 8 | the paper: accuracy saturates beyond 8 trees per forest |
| `VTH_BITS` | 3 | the device's 8 threshold states |
| `N_CLASSES` | 6 | the six-movement sEMG task |
| `LAYERS`, `FORESTS` | 2, 2 | this design's choice; the paper gives no numbers |
| `N_FEATURES` | 116 | this design's choice: 116 + 2·6 vote columns = 128 |
| `SUBARRAYS` | 1 | raise for wider feature sets (7 for 784-pixel MNIST) |
| `EVAL_CYCLES` | 10 | 10 ns sense time at an assumed 1 GHz |

**Programming (only while `busy` = 0; an assertion checks this).**

* `prog_we` writes one whole ACAM word: `prog_vth_f0` / `prog_vth_f1`, one
  code per column. The word is addressed by `prog_layer`, `prog_forest`,
  `prog_tree`, `prog_sub` and `prog_row`.
* `leaf_we` writes `leaf_class` / `leaf_valid` of the same row.
* Both can be asserted in the same cycle. One word per cycle means 4096
  cycles for the default model.
* The cells have no reset (the storage is non-volatile). Reset clears the
  leaf valid bits, the vote registers and the sequencer.

**Classification.**

* `start` while `busy` = 0 captures `features` into a register. The search
  lines are driven from that register for the whole operation. `start` is
  ignored while busy.
* Each level takes `EVAL_CYCLES + 3` cycles: precharge, evaluate, sample,
  vote load.
* `out_valid` is high for one cycle, `LAYERS · (EVAL_CYCLES + 3)` cycles
  after the accepting edge (26 cycles at the defaults).
* At that point `pred_class`, `class_sum` (per-class sums of the last level)
  and `layer_votes` (every level's vote vectors) are valid. They hold until
  the next classification.

Only one classification runs at a time. Pipelining the levels would be
possible, since each level has its own arrays, but it is not implemented.

## Simulating

Everything is plain SystemVerilog-2017. `rtl/drf_pkg.sv` must be read first,
and `tb/drf_tb_pkg.sv` before any testbench that imports it. For example:

```
verilator --binary --timing --assert rtl/drf_pkg.sv tb/drf_tb_pkg.sv \
    $(ls rtl/*.sv | grep -v drf_pkg) tb/tb_drf_top.sv --top-module tb_drf_top
./obj_dir/Vtb_drf_top
```

Each testbench checks its block against an independent model, has a
watchdog, and ends by printing `TB_RESULT checks=N failures=M`.

* `tb_acam_cell` is exhaustive over all threshold pairs and search codes.
* `tb_ml_sense_amp` applies mismatch glitches at every position of the
  evaluate window.
* `drf_tb_pkg::rand_tree` builds random trees as partitions of the search
  space. Its leaves become rows, so every query falls into exactly one leaf,
  and the reference lookup is a plain interval test. The tree, forest,
  level and top testbenches use it.
* `tb_drf_top` runs the whole cascade at a reduced size (2 × 2 × 4 trees,
  16 × 32 arrays) for 200 queries. It checks every level's votes, the sums,
  the prediction and the latency. It also requires that each of these
  happens at least once:
  * a level-2 decision depends on a level-1 vote column;
  * a tree abstains;
  * the last-level forests disagree;
  * a start request arrives while busy and is ignored.
* `tb_rf_single` runs the single-forest configuration (`LAYERS = 1`,
  `FORESTS = 1`, 8 trees on 128 × 128 arrays, 2 classes, 126 features) that
  corresponds to the EEG / PET-CT random-forest comparison, with random
  trees in place of a trained model.
* `tb_drf_top_full` is the same test with every parameter at its default:
  32 trees and 4096 words of 128 cells, 40 queries. It passes. Its
  simulation takes seconds, but Verilator needs 10 to 15 minutes to compile
  the full-size model, depending on how many compile jobs it runs. The
  reduced-size tests therefore cover routine regression runs, and the
  default size is the largest size simulated.

## How far it follows the paper

Taken from the paper:

* the cell principle: F0 on SL sets the upper bound, F1 on SL-bar sets the
  lower bound, and both at high threshold means don't care;
* one path per row, one tree per array, and horizontal cascading of arrays
  that are searched simultaneously;
* per-forest vote counting, concatenation of vote vectors with the input
  features, and averaging then arg-max at the end;
* the 128 × 128 array, 3-bit thresholds, 8 trees per forest and the 10 ns
  sense time.

Choices of this design, where the paper is silent:

* level codes in place of voltages, and the exact boundary convention;
* the word-wide programming port and the leaf table with valid bits;
* the lowest-row-wins rule and tie-breaking to the lowest class;
* requantisation of votes to 3-bit codes, and the column layout of the
  concatenated vector;
* the number of levels, forests and features, the 1 GHz clock, and the
  sequencer.

One conflict: the mapping figure labels the horizontally cascaded arrays
"one at a time", while the text says the sub-words are searched
simultaneously. The RTL follows the text.

Not modelled:

* the analog behaviour itself: ML currents, FeFET threshold variation, and
  the dependence of sense time on the number of columns beyond a cycle
  count;
* the FeFET program pulses (a write is one clock edge);
* the search-line DACs.

The paper also proposes a way to reach higher threshold precision with
low-precision cells: split an (N+M)-bit feature into its MSB and LSB parts,
search them as two columns, and check the LSB column only within the
interval located by the MSB column. This is a way of mapping trees onto the
array, not extra hardware. A user can apply it by feeding the two bit-fields
of a feature into two search columns and programming the tree accordingly.

Workload sizes against the defaults:

* MNIST (784 pixels, 10 classes) needs `SUBARRAYS = 7`, `N_FEATURES = 784`
  and `N_CLASSES = 10`.
* The single-forest EEG/PET configuration needs `LAYERS = 1` and
  `FORESTS = 1`.
* Forests larger than 8 trees need `TREES` raised.

All of these are parameter changes only.
