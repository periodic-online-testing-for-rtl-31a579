# Periodic online self-test for a sparse systolic tensor array

A weight-stationary systolic array keeps one tile of the weight matrix in its
processing elements while many rows of activations flow through. A permanent
(stuck-at) fault in one register of the array can silently corrupt every result
computed with that tile. This design checks the whole array every time a new
weight tile is loaded, before the application's rows use it. The check costs
four extra cycles per tile. It needs no scan chains, no stored test patterns and
no reloading of weights: the weights already in the array act as the test
stimulus. It points to the faulty column and names the type of register at
fault.

The RTL follows the scheme of C. Peltekis, C. Nicopoulos and G. Dimitrakopoulos,
"Periodic Online Testing for Sparse Systolic Tensor Arrays". That publication
describes the method, the processing element and the extra gates. It does not
describe the control, the interfaces or the loading of weights. Those parts are
this design's own, and they are listed in the section on departures below.

## The array

`sta_top` multiplies a dense activation matrix `A` by a structured-sparse weight
matrix `W`. The sparsity is N:M with M = 4: in every block of 4 consecutive
weights of a column (along the K dimension), at most N = 2 are non-zero (2:4).
With `mode_1of4` set, at most one is non-zero (1:4).

The array has 8 x 8 tensor processing elements (TPEs). A TPE (`tpe.sv`) holds:

* two **weight registers** with the non-zero weights of one 4-element block;
* two **weight-index registers**, stored one-hot (4 bits each), that say where
  each weight sat in its block;
* an **activation register** that passes the 4-element activation block to the
  east neighbour;
* an **output register** that passes the partial sum to the south neighbour.

Every cycle, two 4-to-1 multiplexers pick the activations that match the stored
weights from the block arriving from the west. The TPE multiplies them by the
weights, adds both products to the partial sum arriving from the north, and
stores the total in its output register. In 1:4 mode the second product is
forced to zero.

Row `r` of the array holds blocks `r` of the K dimension, so one tile covers
K = 8 x 4 = 32 and 8 output columns. Activations and weights are 16-bit signed
integers. Column sums are 32 bits and wrap modulo 2^32. The test arithmetic
relies on that wrapping.

Below the array, every column has an accumulator (`south_acc.sv`). It adds the
column output to a stored partial sum, so the products of successive K-tiles
build up the final result. Its buffer holds 16 output rows.

## The test session

After a tile is loaded, four test slots run in consecutive cycles. In each slot,
the same M-element vector goes into every row of the array, and a fixed value
goes into the sum input of the top row:

| Test | Vector into every row | Top sum input | Column output, fault free |
|------|-----------------------|---------------|---------------------------|
| 1    | [1, 1, 1, 1]          | 0             | V = sum of the column's weights |
| 2    | [-1, -1, -1, -1]      | -1            | -V - 1 = ~V (bit-wise complement) |
| 3    | [1, 2, 3, 4]          | 0             | X = sum of (index+1) x weight |
| 4    | [1, 2, 3, 4], test_4 high | 0         | ((c mod 4)+1) x V in column c |

The comparison with the expected value needs no comparator in the datapath.
During a test slot, a multiplexer in front of the south accumulator replaces
the accumulator feedback by a golden value GV. The accumulator adder then
computes `column output + GV`, and the result is fixed in advance:

| Test | GV fed to column c          | Result, fault free |
|------|-----------------------------|--------------------|
| 1    | -V                          | 0                  |
| 2    | +V                          | -1 (all ones)      |
| 3    | -X                          | 0                  |
| 4    | -((c mod 4)+1) x V          | 0                  |

The golden values depend only on the loaded weights. They are computed ahead of
time, outside this design, and supplied on `gv_i`. In 1:4 mode only the first
weight of each TPE counts in V and X.

What each test exposes:

* **Tests 1 and 2** expose faults in the weight registers and output registers,
  and any fault that reaches the output register through the multipliers or
  adders. Because Test 2 carries the complement of Test 1 through every output
  register, a stuck bit is wrong in one of the two tests, whatever its value.
* **Test 3** exposes faults in the weight-index registers. A wrong index picks a
  different element of [1,2,3,4] and so changes the weighted sum X.
* **Test 4** exposes faults in the activation registers. This is the harder
  case. A corrupted activation element may not be selected by any weight for
  several columns. While `test_4` is high, masking gates on each index register
  (`index_mask.sv`: one OR and three AND gates) force every TPE of column c to
  select element `c mod 4`. A faulty element `e` in the activation register of
  column `c0` therefore shows up in every later column whose position mod 4 is
  `e`: errors four columns apart. The faulty register lies within the four
  columns to the left of the first failing column.

### Telling fault types apart

Each column has a checker (`fault_locator.sv`). It keeps the column outputs of
Tests 1 and 2 before the comparison ("raw") and the adder outputs after it
("result"). If Test 1 or Test 2 fails, it checks whether each pair is bit-wise
complementary:

| raw1 vs raw2    | result1 vs result2 | Reported class (`col_loc`) |
|-----------------|--------------------|----------------------------|
| complementary   | complementary      | weight register            |
| not             | not                | output register            |
| complementary   | not                | comparison adder (south)   |
| not             | complementary      | unknown (no such case in the method) |

The reasoning behind this table:

* A wrong weight shifts V by some e in both tests. Raw values stay complements
  of each other, and the results become e and ~e.
* A stuck output-register bit adds an error to only one of the two tests, so
  neither pair stays complementary.
* A stuck bit in the south adder spoils only the results.

If Tests 1 and 2 pass, a failing Test 3 is reported as a weight-index register
fault. A failure in Test 4 alone is reported as an activation register fault.
The controller also reports the leftmost column that failed Test 4
(`act_err_col`).

The method cannot tell which TPE in a column is faulty. It also cannot reach
every internal fault of the multipliers, because the stimulus is the weights
actually loaded. Repeating the session for every tile widens the coverage over
time.

## Timing of one tile

`test_ctrl.sv` steps through four phases (`state_o`):

1. **ST_IDLE.** The host writes the tile one array row per cycle (`w_we`,
   `w_row`, `w_data`, `w_idx`). Then it pulses `test_start`. Writes are only
   accepted in this phase; an assertion flags any others.
2. **ST_TEST.** Exactly four cycles, one test slot each. The host does nothing.
3. **ST_RUN.** `act_ready` is high. Each cycle with `act_valid` feeds one row
   of `A`: 8 blocks of 4 elements. `act_addr` names the accumulator row that
   receives the 8 outputs. `act_first` marks the first K-tile, so the old
   contents of that row are ignored. `tile_end` comes with the last row.
4. **ST_DRAIN.** 8 + 8 + 2 cycles, so that nothing is still in flight when the
   next tile's weights are written.

The four cycles after `test_start` is taken are the test slots, and activations
are accepted from the cycle after them. The application does not wait for the test verdict. The test responses travel
through the array ahead of the first application row, and the session report
comes out while the computation runs:

* `session_done` pulses ROWS + COLS + 5 = 21 cycles after `test_start`.
* Then `fault_detected`, `col_fail[c][test]`, `col_loc[c]`, `act_err_valid`
  and `act_err_col` are valid, and they hold until the next session.

**Skew.** The array is systolic, so the operands are skewed at its edges (the
`delay_line.sv` instances in `sta_top`):

* Row `r` receives its block `r` cycles late.
* The top sum input of column `c` is delayed `c` cycles.
* A small tag is delayed `ROWS + c` cycles on its way to the accumulator of
  column `c`. The tag says whether the value arriving there is idle, test
  response `k`, or a partial sum for accumulator row `a`.

An A row accepted in cycle t is summed into accumulator row `a` of column c at
the clock edge that ends cycle t + 8 + c. The `test_4` flag moves through the
TPEs next to the activation register, so each TPE sees it in the cycle the
Test 4 vector passes through.

## Files

| File | Content |
|------|---------|
| `rtl/sta_pkg.sv` | default sizes, slot tag, fault classes, phases |
| `rtl/index_mask.sv` | test_4 masking gates of one index register |
| `rtl/tpe.sv` | tensor processing element |
| `rtl/tensor_array.sv` | ROWS x COLS grid of TPEs, row-wise weight write |
| `rtl/test_vector_gen.sv` | the four test vectors and top sum inputs |
| `rtl/delay_line.sv` | edge skew registers |
| `rtl/south_acc.sv` | column accumulator with the GV multiplexer |
| `rtl/fault_locator.sv` | per-column pass/fail and fault classification |
| `rtl/test_ctrl.sv` | phase sequencer and session report |
| `rtl/sta_top.sv` | the complete design |

The parameters of `sta_top` are ROWS = 8, COLS = 8, M = 4, N = 2, DW = 16,
AW = 32 and ACC_DEPTH = 16. All of them except ACC_DEPTH are the sizes of the
published design. ACC_DEPTH is this design's choice.

## Where this RTL goes beyond or departs from the published description

* **Index encoding.** The index registers are one-hot. The method draws four
  gates per index register, one per block element. An encoded 2-bit index with
  a decoder would meet the same description, but the masking gates would then
  sit after the decoder.
* **test_4 timing.** The method describes a single `test_4` control signal that
  is high "only in the clock cycle that Test 4 is performed". In a skewed array,
  each TPE sees Test 4 in a different cycle. Here `test_4` therefore travels in
  a one-bit register next to each activation register. That adds one flip-flop
  per TPE that the method does not count.
* **Golden value of Test 4.** The published timing figure labels the Test 4
  golden value of column 0 as -sum(index x weight), the same as Test 3. The text
  says Test 4 forces column 0 to take the first element, which is 1, so the
  column output is V. This design follows the text: GV = -((c mod 4)+1) x V.
* **Where test results go.** The method does not say where the comparison
  results are stored. Here they go to result registers in each column, not into
  the accumulator buffer. Partial sums of earlier K-tiles therefore survive a
  session.
* **Accumulator details.** The `act_first` flag, which clears an accumulator
  row, and the buffer depth of 16 are this design's choices.
* **Interfaces and timing.** The following are all this design's own, because
  the method does not describe them:
  * the row-wise weight write;
  * the phase machine and the drain time;
  * the slot tag;
  * the report format;
  * the asynchronous active-low reset.
* **Not covered.** Gate-level fault coverage, area and the 1 GHz clock target
  of the published implementation are outside what RTL simulation can show.

## Simulating

Every testbench in `tb/` checks its own results. It prints one line,
`TB_RESULT checks=N failures=F`, and stops by itself, with a watchdog. The
package must come first on the command line. For example:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/sta_pkg.sv tb/tb_sta_top.sv --top-module tb_sta_top -o sim
    ./obj_dir/sim

| Testbench | What it shows |
|-----------|---------------|
| `tb_index_mask` | all index values, both test_4 levels, every forced position |
| `tb_tpe` | 2000 random cycles against integer arithmetic, reloads, both modes, test_4 |
| `tb_tensor_array` | 8x8 array with random tiles and rows, some under test_4, against a matrix product |
| `tb_test_vector_gen` | the test-vector table |
| `tb_south_acc` | random test, compute and idle slots against a reference buffer |
| `tb_fault_locator` | every row of the classification table, plus done/clear timing |
| `tb_test_ctrl` | phase lengths, four-cycle overhead, report and leftmost Test 4 column |
| `tb_sta_top` | full-size design (see below) |
| `tb_workload_gemm` | 16-pixel slices of ResNet50, DenseNet121 and VGG16 layers, tiled |

`tb_sta_top` runs the whole design at its default size. It first accumulates
three tiles (2:4, 1:4, 2:4) and checks the result against an independently
computed product, the four-cycle overhead and the report latency. It then
imposes a permanent fault with `force` on five places in turn, and checks the
reported column and class:

* a weight register;
* an output register bit;
* a bit of a south adder;
* an index register bit;
* an activation register bit, which must fail Test 4 in columns 3 and 7 only.

`tb_workload_gemm` runs layer shapes from the three networks as tiled matrix
products. Each one uses 16 output pixels, which is one pass of the accumulator
buffer. Each tile gets a test session that must pass, and each output is
checked. The layers need 16, 64 and 144 tiles. The bench prints how many cycles
were spent in test slots. With only 16 rows per tile, that share is far higher
than for full layers, where many more rows pass per tile.

Full layers fit the design by tiling: K in steps of 32, filters in steps of 8,
output pixels in passes of 16.
