# CapsAcc in SystemVerilog: a systolic accelerator for capsule-network inference

Capsule networks (CapsuleNets) replace the scalar neurons of a CNN with small
vectors, called capsules. Their final layer also runs an iterative
*routing-by-agreement* loop: it multiplies predictions by coupling
coefficients, squashes the sums, takes dot products to measure agreement, and
applies a softmax. A plain convolution accelerator handles the convolutions
well, but the routing loop causes trouble for three reasons:

- it re-reads the same prediction vectors many times;
- it needs non-linear vector functions (norm, squash, softmax);
- its results become the weights of the next step.

CapsAcc, published by Marchisio, Hanif and Shafique, handles all three.

- **Array:** a 16x16 weight-stationary systolic array of 8-bit
  multiply-accumulate cells.
- **Data reuse:**
  - a second weight register in every cell lets a filter stay in the array
    while data streams past;
  - a horizontal feedback path re-injects the data leaving the array's right
    edge, so one input vector can be multiplied by several weight tiles
    without being read again;
  - a Routing Buffer holds coupling coefficients and capsule outputs and
    feeds them back into the array as weights.
- **Per-column back end:** every column ends in an accumulator FIFO and an
  activation unit with ReLU, Norm, Squash and Softmax.

This repository is a register-transfer description of that architecture.

- **What the source gives:** the structure and the numbers, such as array
  size, bit widths, look-up-table sizes, latencies and the 8 MB of on-chip
  memory.
- **What this design fills in:** everything the published description leaves
  open, such as control, timing, number formats, buffer sizes and the command
  format. These choices are marked as such throughout, both here and in the
  opening comment of every source file.

```
             host port                                  host port
                 |                                          |
           +-----v------+  fill  +-------------+           |
           | Data Memory|------->| Data Buffer |--+        |
           | 64K x 128b |        | 8K x 128b   |  |        |
           +-----^------+        +-------------+  v        |
                 |                 skew lines -> [data mux] <-- horizontal feedback
                 |                                  |            (array right edge)
                 |   +---------------+   fill  +----v-----------------+
                 |   | Weight Memory |-------->|   16 x 16 systolic   |
                 |   | 448K x 128b   |  Weight |   array (PEs)        |
                 |   +---------------+  Buffer +----------^-----------+
                 |                      256 x128b         |  [weight mux]
                 |                          \____ skew ___|/     ^
                 |                                 |       Routing Buffer
                 |                          de-skew lines  2K x 128b
                 |                                 |             ^
                 |                     16 x accumulator FIFO      |
                 |                     16 x activation unit       |
                 +------------ write-back --------+--------------+
```

## The pass: the unit of work

The accelerator runs one *pass* at a time. A pass is a matrix-product job
described by one descriptor, `cmd_t` in `capsacc_pkg`. The host issues
descriptors one after another through a `cmd_valid`/`cmd_ready` handshake,
and `done` pulses when a pass has written all of its results.

A pass consists of K weight *tiles*. Each tile is `n_rows` weight rows of 16
lanes, so it uses `n_rows` array rows and all 16 columns. Tile k multiplies T
data vectors (`n_vec`) of `n_rows` elements each.

| field | meaning |
|---|---|
| `wsrc` | weight source: Weight Buffer (filled from Weight Memory) or Routing Buffer |
| `w_reuse` | tiles are already in the Weight Buffer: no weight fill |
| `w_addr` | first Weight Memory row to fill from, or first Routing Buffer row |
| `d_reuse` | data rows are already in the Data Buffer: no data fill |
| `fb` | tiles 1..K-1 take their data from the horizontal feedback instead of the buffer |
| `d_addr` | first Data Memory row to fill from |
| `n_rows`, `n_vec`, `n_tiles` | rows per tile (1..16), T (1..512), K (1..31) |
| `acc` | 1: sum the K tiles into T results; 0: keep K*T separate results |
| `cont`, `keep` | chain a long reduction over several passes (see the accumulator section) |
| `act`, `shift`, `vec_len` | activation function, reduction shift, vector length for Norm/Squash/Softmax |
| `dst`, `o_addr` | write results to the Data Memory or the Routing Buffer, starting at this row |

The control unit (`capsacc_control`) runs each pass through five phases:

1. **WFILL** copies K·n_rows rows from Weight Memory into the Weight Buffer.
2. **DFILL** copies the pass's data rows from Data Memory into the Data
   Buffer. With `fb` set, only T rows are copied.
3. **RUN** shifts the tiles in and streams the data.
4. **DRAIN** pops the accumulators through the activation units and writes
   each 16-lane result row.
5. **DONE**.

The data layout is the host's job. For example, a convolution is unrolled
into data rows of filter taps, and routing coefficients are laid out one
input capsule per row. There is no address generator for convolution windows.

## Processing element and the weight swap wave

A PE (`capsacc_pe`) has four registers:

- **Data Reg** takes the value from the left and passes it to the right.
- **Weight1 Reg** is one stage of a vertical chain that shifts a new tile in
  from the top.
- **Weight2 Reg** holds the weight in use.
- **Sum Reg** takes `psum_in + Data Reg × Weight2`, with an 8×8 signed
  product and a 25-bit signed sum.

Partial sums flow down, and row 0 gets a zero partial sum.

Because the array holds two weights per cell, the next tile can be shifted
into the Weight1 chain while the current one is still computing. The
published description does not say how the two registers are controlled.
This design's answer is a *swap flag* that rides along with the data:

- The first vector of every tile carries the flag.
- As the flag passes a PE, that PE copies Weight1 into Weight2 on the same
  clock edge that latches the vector.
- The flag therefore sweeps the array along the same diagonal wave as the
  skewed data.
- Every vector is multiplied by exactly the tile it belongs to, even though
  different cells switch tiles in different cycles.

Each column has its own Weight1 shift enable (`w_shift`), because the weight
rows also enter skewed, column c being c cycles late.

## Feeding the array: skew, multiplexers, feedback

A systolic array fed in lock-step needs its inputs skewed:

- Data lane i is delayed by i cycles (`capsacc_skew`).
- The column outputs are re-aligned by delaying column c by 15−c cycles
  (`capsacc_skew` with `REVERSE=1`).
- The weight side has the same kind of skew line. Each of its lanes carries
  the Weight Buffer byte, the Routing Buffer byte and the shift enable.

The two multiplexers in front of the array (`capsacc_operand_mux`) are
registered and select per lane, because the lanes arrive skewed:

- **Data side:** skewed Data Buffer row, or horizontal feedback. The feedback
  is the Data Reg output of the array's last column. A vector that left the
  right edge re-enters row 0 exactly COLS+1 = 17 cycles after it first
  entered.
- **Weight side:** Weight Buffer or Routing Buffer.

Lanes at or above `n_rows` are forced to zero, so unused rows add nothing.

## Tile schedule

This is the part that makes the reuse mechanisms work together. Times are
counted from the start of RUN, and P is the tile period:

- **Weights:** tile k's weight rows are read in cycles `k·P … k·P+n_rows−1`,
  last row first, so the row that ends at the top of the chain goes in last.
- **Data:** tile k's T vectors are issued in cycles
  `n_rows + k·P … n_rows + k·P + T − 1`, the first one carrying the swap flag.
- **Results:** a vector's column sums reach the accumulators
  `L = ROWS + COLS + 2 = 34` cycles after it was issued. This covers the mux
  register, the skew, 16 rows, the de-skew and the memory read.
- **Period:** with feedback, `P = COLS + 1`, the feedback loop length. Then
  vector t of tile k−1 comes back just in time to become vector t of tile k.
  Without feedback, `P = max(T, 2·n_rows)`.

The limits on P have the same cause. Tile k's weight shift overwrites
Weight1. So it must start only after the swap wave of tile k−1 has passed the
last row the shift will reach. Otherwise a PE would copy a half-shifted tile
into Weight2. `2·n_rows ≤ P` guarantees that.

For a feedback pass this gives two limits:

- `2·n_rows ≤ 17`, so at most 8 rows;
- `T ≤ 17` vectors.

An 8-element ClassCaps input capsule reused against 10 weight tiles fits.
Without feedback, a pass takes about `n_rows + (K−1)·P + T + 34` cycles to
run, plus its fills and drain. The control unit asserts the descriptor limits
(`a_fb_len`, `a_rows`, `a_acc_fit`).

## Accumulators, and reductions longer than one pass

Each column has a FIFO of 512 25-bit sums (`capsacc_accumulator`). A
multiplexer writes either the new column sum or that sum plus the FIFO head.

- **Tile 0** of an accumulating pass pushes T new sums.
- **Each later tile** pushes and pops at once, adding to the head, so the T
  running sums go round the FIFO once per tile.
- **With `acc=0`**, every tile's results are pushed separately, K·T in all.
- **During DRAIN**, the FIFO is popped into the activation unit.

A pass covers at most K·n_rows inputs per output. K is at most 31, and 16
when the tiles come from the 256-row Weight Buffer. Longer reductions are
split over passes, and the sums stay in the FIFOs in between:

- **`keep`:** do not drain after RUN.
- **`cont`:** tile 0 also adds to the head.

A reduction of N tiles is therefore:

1. one pass with `keep`;
2. any number of passes with `keep` and `cont`;
3. a final pass with `cont`.

PrimaryCaps (20 736 inputs per output) and the routing sums over 1 152
capsules both need this. It matches the published mapping's aim of finishing
one output channel in the accumulators before moving on.

## Activation unit and number formats

There is one activation unit per column (`capsacc_activation`). It first
reduces the 25-bit sum to 8 bits: an arithmetic right shift by `shift`, then
saturation. The functions all work on that 8-bit value, and a final
multiplexer selects one of them. Besides ReLU, Norm, Squash and Softmax,
there is a `NONE` path (reduction only), used for intermediate results.

| function | structure | format (this design's choice) | latency |
|---|---|---|---|
| ReLU / None | register | Q3.4 in and out | 1 cycle |
| Norm (`capsacc_norm`) | squarer + Square Reg accumulator + 4096×8 square-root table | in Q3.4; table index = Σx²>>4 saturated to 12 bits; out Q4.4 = round(4·√index) | result n+1 cycles after the first element |
| Squash (`capsacc_squash`) | 2048×8 table, 6-bit element × 5-bit norm | element index = top 6 bits of Q3.4; norm index = norm>>3 saturated to 31; out Q0.7 = round(64·s·n/(4+n²)) | 1 cycle after the norm |
| Softmax (`capsacc_softmax`) | 256×16 exponential table + Exp Reg sum + divider | table = round(256·e^(x/16)), saturated; out Q0.7 = min(127, ⌊128·e/Σe⌋) | n cycles to sum, n to divide: 2n |

All tables are computed during elaboration from these formulas, not stored
as data. The exponential uses integer arithmetic: a Taylor series for
e^(x/256), squared four times. This gives exactly the rounded values of the
formula.

Squash and Softmax need each vector element twice: once to build the norm or
the sum of exponentials, and once more to produce the output. The unit keeps
the vector (up to 16 elements) in a small replay register file and replays it.
While it replays, `in_ready` is low and the drain waits.

- **Squash** outputs element j at cycle n+2+j after the first element.
- **Softmax** outputs element j at cycle n+1+j.

All 16 columns see the same sequence, so column 0 provides the handshake for
all of them.

## Memories and buffers

All memories are `capsacc_sram`: one write port, one read port, registered
read, written as arrays. Rows are 16 bytes, with lane i in bits `[8i +: 8]`.

| memory | rows | bytes | basis |
|---|---|---|---|
| Data Memory | 65 536 | 1 MiB | together with the Weight Memory, the published 8 MB of on-chip memory |
| Weight Memory | 458 752 | 7 MiB | holds all 6 815 744 8-bit parameters of the MNIST CapsuleNet |
| Data Buffer | 8 192 | 128 KiB | own choice, 4× the Routing Buffer, as in the published area breakdown |
| Weight Buffer | 256 | 4 KiB | own choice: 16 full tiles |
| Routing Buffer | 2 048 | 32 KiB | own choice: 1 152 rows of coupling coefficients plus the capsule outputs |
| Accumulator FIFO | 512 per column | | own choice: a 20×20 Conv1 feature map is 400 |

The host port writes the Data and Weight Memories, and reads the Data Memory
and the Routing Buffer. Use it only while no pass is running.

## Mapping the MNIST CapsuleNet

These estimates assume a 250 MHz clock. The 28×28 input, stride, capsule
counts and 3 routing iterations are standard CapsuleNet figures.

- **Conv1** (9×9 filters, 256 channels, 20×20 output; simulated for 32
  channels in `tb_capsacc_conv1`):
  - the 81 taps form 9 tiles of 9 rows, and T = 400 output pixels;
  - each pass produces 16 channels, so there are 16 passes;
  - from the second pass on, the unrolled data stays in the Data Buffer
    (`d_reuse`);
  - about 66 k cycles in total.
- **PrimaryCaps** (9×9, stride 2, 256 → 32×8 channels, 6×6 output):
  - 20 736 inputs per output, so 81 chained passes of 16 tiles × 16 rows per
    group of 16 output channels;
  - T = 36;
  - about 1.9 M cycles.
- **ClassCaps predictions** (1 152 capsules of 8 elements → 10 × 16):
  - one feedback pass per input capsule: 8 rows, T = 1, K = 10;
  - the capsule is read once and re-injected 9 times;
  - about 0.33 M cycles.
- **Routing sums and squash** (simulated in `tb_capsacc_classcaps`):
  - coupling coefficients from the Routing Buffer are the weights, and the
    160 prediction components are the data vectors;
  - a coefficient table gets into the Routing Buffer through a pass that
    multiplies it by a scaled identity matrix;
  - the reduction over 1 152 capsules is 5 chained passes;
  - Squash with `vec_len = 16` writes v_j to the Routing Buffer.
- **Routing update and softmax** (simulated in `tb_capsacc_classcaps`):
  - the agreements a_ij = û_j|i·v_j use one pass with the squashed v_j from
    the Routing Buffer as weights, one tile per class, and T = number of
    input capsules; a_ij lands in column j;
  - this softmax runs down one column, so the host re-lays out the 10
    agreements of each capsule into one sequence;
  - a pass with a one-tap identity weight then feeds them to column 0, which
    applies softmax with `vec_len = 10`;
  - putting the new c_ij back into the Routing Buffer's layout (row i,
    lane j) is another host re-layout followed by an identity pass;
  - the RTL has no hardware path for these re-layouts: they go through the
    host port, and their cost is not part of the cycle counts above.

## Where this RTL departs from the published description

- **Control:** the published control unit is described only as "generating
  the control signals". The following are all this design's:
  - the descriptor and the phase machine;
  - the tile schedule and the swap-flag mechanism;
  - the `keep`/`cont` chaining.
- **Added around the array:** the skew and de-skew lines, the register in
  the feedback loop and the per-lane zero mask.
- **Activation unit:**
  - the `NONE` activation path is an addition;
  - Sigmoid appears in the published block diagram but is not described, and
    is not built;
  - the replay register file is this design's way of giving Squash and
    Softmax each element twice.
- **Choices with no published value:** all fixed-point formats, table
  contents, buffer and FIFO sizes, and the host port.
- **Reading of the Norm description:** the published text calls the 12-bit
  in / 8-bit out table the "square operator". Here it is read as the square
  root, with the square done by a multiplier.
- **Verification scope:**
  - the design is functionally simulated only;
  - nothing here has been checked against the published area, power or
    250 MHz timing;
  - per-layer execution times have not been compared with the published ones.

## Source files

`rtl/`:

- `capsacc_pkg.sv`: widths, modes, the descriptor, 8-bit saturation.
- `capsacc_pe.sv`, `capsacc_systolic_array.sv`: the array.
- `capsacc_skew.sv`, `capsacc_operand_mux.sv`: the feed path.
- `capsacc_accumulator.sv`.
- `capsacc_norm.sv`, `capsacc_squash.sv`, `capsacc_softmax.sv`,
  `capsacc_activation.sv`: the activation unit and its functions.
- `capsacc_sram.sv`: every memory.
- `capsacc_control.sv`: the control unit.
- `capsacc_top.sv`: the top level.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`, plus
`capsacc_ref_pkg.sv`. That package is the reference arithmetic, written with
real-valued math and independent of the RTL tables. Every testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. Where a latency is
defined, the testbenches check cycle counts:

- Norm n+1;
- Squash one cycle later;
- Softmax 2n;
- array ROWS+c+1;
- the accumulator push 34 cycles after issue;
- the control schedule.

`tb_capsacc_top` runs the full-size design (default parameters) through 10
passes:

1. convolution-style with ReLU;
2. weight and data reuse with per-tile results;
3. ClassCaps-style feedback;
4. feedback with several vectors per tile;
5. softmax into the Routing Buffer;
6. Routing Buffer weights with squash;
7. Routing Buffer weights with norm;
8. to 10. a reduction split over three chained passes.

It compares every output row with a behavioural model, and it counts a
failure for any mechanism that never occurred.

Two more full-size testbenches run real CapsuleNet layers and check the
results against direct arithmetic rather than a pass model.

- `tb_capsacc_conv1` runs Conv1 on a 28×28 image for 32 of the 256 channels:
  - 9 tiles of 9 rows, T = 400, two passes;
  - the second pass reuses the Data Buffer;
  - all 12 800 outputs are compared with a direct 2-D convolution;
  - it also checks that the 3 600 accumulator pushes of a pass come in 3 600
    consecutive cycles, i.e. one result row per clock;
  - a pass takes 4 131 cycles once the data is in the buffer.
- `tb_capsacc_classcaps` runs ClassCaps and one routing iteration for 32
  of the 1 152 input capsules:
  - a feedback prediction pass per capsule, checked to read the Data Buffer
    once;
  - coupling coefficients loaded into the Routing Buffer by an identity pass;
  - s_j summed over two chained `keep`/`cont` passes with the Routing Buffer
    as weights;
  - squash into the Routing Buffer;
  - agreements with v_j from the Routing Buffer as weights;
  - softmax over the 10 classes;
  - every prediction, coefficient, v_j element, agreement and new
    coefficient is checked.
  It also shows the layout work the host does between steps.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/capsacc_pkg.sv \
    tb/capsacc_ref_pkg.sv tb/tb_capsacc_top.sv --top-module tb_capsacc_top -Mdir obj
./obj/Vtb_capsacc_top +verilator+rand+reset+2
```

Lint is clean except for these warnings:

- unused bits: the descriptor fields a sub-block does not need, `dvalid_q`,
  the FIFO `count`, and the two low element bits the squash table drops;
- `SYNCASYNCNET`, because the reset is used both asynchronously and in
  assertion `disable iff` clauses.
- `UNUSEDPARAM` for the package's `DATA_W` in modules that import the
  package without needing that constant.
