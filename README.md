# SHARP: an LSTM inference engine with a reshapeable MVM tile

An LSTM layer spends almost all of its time in two matrix-vector products per
time step: the stacked gate weights times the input, `W·x_t`, and the stacked
recurrent weights times the previous hidden state, `U·h_{t-1}`. Only the
second product depends on the step before. The rest is cheap element-wise work:
four activations and the cell update. An accelerator built for one matrix shape
loses efficiency on others, for two reasons:
- padding, when the matrix is not a multiple of the tile;
- a pipeline that sits idle while it waits for `h_{t-1}`.

This RTL attacks both problems.

- **A reshapeable tile.** The multiplier array is N vector-scalar (VS) units,
  each K multipliers tall. The same array can be grouped as 8, 4, 2 or 1 row
  groups. A multiplexed adder tree sums each group's products, so the tile shape
  changes with no change to the multipliers. The shape is chosen per layer from
  a small on-chip table. The last row segment of a matrix can also be shrunk to
  cut padding.
- **An unfolded schedule.** The input product of step t+1 does not depend on
  step t. It is issued as soon as the recurrent product of step t has left the
  multipliers, so it overlaps the activation and cell update of step t. Its
  results are held in an intermediate buffer until the recurrent product of
  step t+1 arrives.

The default build is the 1K-MAC configuration: N = 32 VS units of K = 32 fp16
multipliers. Its buffers are sized as in the original evaluation: 26 MB for
weights, 2.3 MB for inputs and hidden states, 24 KB for intermediate results and
192 KB for the cell state.

## Data path

```
 host load ports ──► weight buffer (N banks) ─┐
                 └─► I/H buffer ──────────────┤ one line of each per cycle
                                              ▼
               controller ──► vector multiply (N × K fp16 → fp32 products)
   (Unfolded order,                           ▼
    config table,              reconfigurable add-reduce tree + 8 K-accumulators
    padding, credits)                         ▼
                               tile FIFO (credit controlled)
                                              ▼
                               result router ──► intermediate buffer (input-MVM partials)
                                              ▼  (hidden-MVM partial + buffered input partial)
                               A-MFU: sigmoid / tanh on one K-row block per cycle
                                              ▼
                               cell updater ◄─► cell-state buffer
                                              ▼
                           h_t (K/4 per cycle) ──► I/H buffer and the h_* output port
```

| Module | Role |
|---|---|
| `sharp_pkg` | Types, the tile-control word, and fp16/fp32 arithmetic functions |
| `sharp_weight_buffer` | N banks, one per VS unit; all banks read at one line per cycle |
| `sharp_ih_buffer` | Lines of N fp16 holding x_t for every step and the two hidden vectors (ping-pong) |
| `sharp_vector_multiply` | N VS units; unit n multiplies its K weights by one I/H element |
| `sharp_add_reduce` | Pipelined adder tree with taps at the last four levels and 8 K-wide accumulators |
| `sharp_fifo` | Tile FIFO behind the tree (a generic helper) |
| `sharp_result_router` | Splits tiles into K-row blocks; stores or combines input and hidden partials |
| `sharp_inter_buffer` | Intermediate buffer, two halves selected by the parity of the step |
| `sharp_amfu` | Activation unit: shift, exp, add and divide stages |
| `sharp_cell_updater` | `c = f·c' + i·g`, `h = o·tanh(c)` for K/4 hidden units per cycle |
| `sharp_cell_state` | Cell-state buffer, two halves selected by the parity of the step |
| `sharp_config_table` | Hidden dimension → tile configuration, looked up once per layer |
| `sharp_controller` | Issues tile steps, applies padding reconfiguration, tracks the h dependency and FIFO credits |
| `sharp_top` | Wires all of the above together; one LSTM layer per `start` |

## Tiles and the reconfigurable tree

This is the part that takes the most care.

Every VS unit holds a column slice of K weight rows. It multiplies the slice by
one scalar from the I/H line, which is one element of x or h. With R row groups
(R = 8, 4, 2 or 1 for CFG1..CFG4), the N units split into R groups of N/R units:
- group r covers weight rows `(blk + r)·K … (blk + r)·K + K-1`;
- within a group, unit `n` takes column `col_start + n mod (N/R)`.

One tile step thus covers an `R·K × N/R` piece of the matrix. A tile takes
`ceil(cols / (N/R))` steps, one per cycle, to sweep all columns. Columns past
the end of the matrix get a zero scalar (`col_valid`), so the padding costs
cycles but never corrupts sums.

`sharp_add_reduce` is a plain binary tree over the N product vectors, with a
register after every level. At level `logN − g`, each node holds the sum of
N/2^g neighbouring units. That is exactly the sum of one row group when
R = 2^g. A four-way multiplexer picks the level for the current configuration.
The shallower taps pass through extra delay registers, so every configuration
has the same latency, `logN + 1` cycles, and tiles stay in order. There are 8
K-wide fp32 accumulators, one per possible row group:
- on a tile's first step they load;
- on later steps they add;
- on the last step the R sums leave together with the tile's control word
  (`tile_tag_t`).

**Choosing R.** The configuration table is looked up with the layer's hidden
dimension. A hit gives the stored configuration; a miss gives CFG4. The table's
contents are meant to come from offline exploration.

**Padding reconfiguration.** With `pad_reconfig_en` set, the last tile of a
phase is reshaped when fewer than R row blocks remain. The new shape is the
smallest configuration whose group count covers the remaining blocks. Fewer
rows per tile means more columns per step, so the tile takes fewer cycles.
`cnt_pad_reconfig` counts these tiles.

## The Unfolded schedule and its hazards

Each step t has two phases over the `4H`-row gate matrix, which is walked in
K-row blocks:

- **I(t)**, the input phase, computes `W·x_t` with the bias folded in as an extra
  input column fixed at 1.0. The router narrows each block to fp16 and writes it
  to half `t mod 2` of the intermediate buffer.
- **H(t)**, the hidden phase, computes `U·h_{t-1}`. For each finished block, the
  router reads the matching input partial back and adds it in fp32. The A-MFU
  then applies sigmoid to the i, f and o lanes and tanh to the g lanes.

The controller issues I(0) H(0) I(1) H(1) … with two interlocks:

1. **Dependency stall.** H(t) may start only when the cell updater has produced
   every block of h_{t-1}. I(t+1) has no such wait, so it fills the gap.
   `cnt_dep_stall` counts the cycles spent waiting. H(0) multiplies by
   h_{-1} = 0, so its columns are all masked.
2. **FIFO credits.** A tile's last step, the one that makes the tree emit, is
   issued only while the tile FIFO has a free slot reserved for it. Nothing is
   ever pushed into a full FIFO. `cnt_fifo_stall` counts the stalled cycles.

Tiles drain from the FIFO one K-row block per cycle. The cell updater writes
K/4 fresh elements of h_t per cycle into the I/H buffer, at the half that
H(t+1) reads. These writes take priority over host loads (`ih_ld_ready` drops
for that cycle). The cell state alternates halves in the same way: it reads
c_{t-1} from one half and writes c_t to the other.

## What the host must lay out

The buffers are written through plain load ports. They take the place of the
DRAM and memory controller, which this RTL does not contain.

- **Gate order.** Rows of the stacked gate matrix are interleaved per K-row
  block as `[i | f | g | o]`, K/4 rows each. Block b thus holds all four gates
  of hidden units `b·K/4 … b·K/4 + K/4 − 1`, which is what lets the cell updater
  finish K/4 units per block.
- **Weights.** For each phase there is one weight-buffer line per tile step, in
  issue order:
  - input weights start at `wi_base`, hidden weights at `wh_base`;
  - in that line, bank n, lane k holds `M[(blk + n div (N/R))·K + k][col_start + n mod (N/R)]`, or zero outside the matrix.

  The order includes the reshaped last tile. `tb_sharp_top` contains a reference
  model of this order (task `layout`).
- **Inputs.** x_t (followed by the 1.0 bias element) starts at line
  `x_base + t·ceil(X/N)`, where X counts the bias column.
- **Hidden state.** h_t goes to `h_base + (t mod 2)·ceil(H/N)`. The accelerator
  writes it there itself.
- **Configuration table.** Entries are (hidden dimension, configuration, valid);
  the lowest matching entry wins.

A layer is started with `start` and the descriptor (`x_len` including the bias
column, `h_len`, `t_len`, the base addresses). The run ends with a `done` pulse.
Each element of h_t also leaves on `h_valid/h_blk/h_step/h_data`. Multi-layer
and bidirectional networks are run one layer (or direction) at a time.

## Numerics

| Quantity | Format |
|---|---|
| Multiplier operands | IEEE fp16 |
| Products | fp32, exact (an fp16×fp16 significand needs 22 bits) |
| Tree sums, accumulators, pre-activations, cell state | fp32 |
| Intermediate-buffer contents | fp16, so that 24 KB holds `4H` values per half for H up to 1536 |
| h_t | fp16 |

Additions and every narrowing conversion truncate. Subnormals are flushed to
zero, and no NaN is produced.

The A-MFU computes:
- sigmoid as `1/(1+e^{-x})`, in the order exponentiate, add one, divide;
- tanh as `(1−e^{-2x})/(1+e^{-2x})`, with the shift stage doing the doubling.

`e^y` is `2^(y·log2 e)`. The integer part becomes the exponent, and the fraction
goes through a cubic polynomial with a relative error of about 1e-4. Inputs are
clamped to |y| ≤ 32. Against a double-precision LSTM, the hidden outputs in the
end-to-end tests agree to better than 2e-2 absolute.

## Sizes

| Parameter (`sharp_top`) | Default | Meaning |
|---|---|---|
| `N`, `K` | 32, 32 | VS units and multipliers per unit: 1K MACs. Use N = 128, 512 or 2048 for 4K, 16K or 64K MACs |
| `WB_LINES` | 13312 | Weight lines of N×K fp16: 26 MiB |
| `IH_LINES` | 37683 | I/H lines of N fp16: 2.3 MiB |
| `IB_LINES` | 384 | Intermediate lines of K fp16, two halves: 24 KiB |
| `CS_LINES` | 6144 | Cell-state lines of K/4 fp32, two halves: 192 KiB |
| `CT_ENTRIES` | 16 | Configuration-table entries |
| `FIFO_DEPTH` | 4 | Tiles held behind the tree |

At the defaults, one layer fits when all of the following hold:
- `H ≤ 1536`, set by the intermediate buffer;
- its weights need no more than 13312 lines (about H = X = 1024 at CFG4, which
  needs 8320 lines);
- `T·ceil((X+1)/32) + 2·ceil(H/32) ≤ 37683` I/H lines.

Layers of hidden size 200, 256, 340, 512 and 1024 fit, including sequences of
several hundred steps. A 1500- or 1536-wide layer needs about 37 MB of weights
and does not fit in the weight buffer. Whole networks larger than the buffer
must have their weights reloaded layer by layer.

## Where this RTL departs from, or goes beyond, the original description

- **Activation lanes.** The original configuration lists 64 activation units.
  Here there are K = 32 A-MFU lanes and another K/4 = 8 tanh lanes inside the
  cell updater, which is enough for one K-row block per cycle.
- **Pipeline depth.** The activation unit produces one vector per cycle, but it
  is 4 pipeline stages deep. The cell updater is 8 stages and the tree
  `logN + 1` stages.
- **Prefetch.** Input sequences are not prefetched from DRAM. The host writes
  them through the I/H load port, which works during a run as well.
- **Own design choices.** These were not specified in the original description:
  - the intermediate buffer stored in fp16;
  - truncating rounding;
  - the exp approximation;
  - bias as an input column;
  - the gate interleaving;
  - the weight layout;
  - the table's miss behaviour;
  - credits;
  - the memory maps;
  - one layer per run.
- **Out of scope.** There is no DRAM model and no memory controller.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one:
- compares against an independent model (usually double precision, from
  `sharp_tb_pkg`);
- checks the latencies;
- has a watchdog;
- ends with a line `TB_RESULT checks=<n> failures=<m>`.

Example with Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl \
    rtl/sharp_pkg.sv tb/sharp_tb_pkg.sv tb/tb_sharp_top.sv \
    --top-module tb_sharp_top -Mdir build
./build/Vtb_sharp_top
```

Swap `tb_sharp_top` for any other testbench, for example
`tb_sharp_add_reduce`. Testbenches that do not use `sharp_tb_pkg` do not need
it, but listing it does no harm.

- **`tb_sharp_top`** runs two layers on a small build (N = K = 8, small
  buffers):
  - layer 1 has H = 10, X = 12, T = 4, a table hit (CFG2) and padding
    reconfiguration;
  - layer 2 has H = 6, X = 4, T = 3 and a table miss.

  It checks every h_t element and the number of tile steps. It also counts
  table hit, table miss, padding reconfiguration, dependency stall, FIFO stall
  and Unfolded overlap, and fails if any of them never occurs.
- **`tb_sharp_top_full`** is the same test on the default-size accelerator
  (H = X = 40 and H = 24, X = 20). It runs in seconds.
- **`tb_sharp_workload`** runs two layer sizes from the original evaluation on
  the default-size accelerator:
  - H = X = 200 for 25 steps, using CFG1 with padding reconfiguration;
  - H = X = 340 for 30 steps, using CFG4.

  All 15,200 hidden outputs match the reference. At these sizes there are no
  dependency or FIFO stalls at all: the input MVM of the next step fully covers
  the activation and cell update of the current one. The build takes about a
  minute and the run a few seconds.
