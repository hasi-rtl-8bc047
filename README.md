# DySCNN: a dot-product engine for randomly sparsified CNN filters

HASI ("hardware-accelerated stochastic inference") detects adversarial images by
running a classifier twice: once as trained, and once with noise injected into the
model. Benign inputs barely move under the noise; adversarial inputs, which sit in
small, fragile pockets of the input space, move a lot. The size of the move is measured
as the L1 distance between the two output probability vectors and compared with
thresholds; if the result is ambiguous, further noisy passes are run and their mean
distance is compared with tighter thresholds. The more confident the first
classification, the more noise is injected.

The noise is made by dropping weights at random ("noisy sparsification"): for each
filter a random sparsification rate is drawn, turned into a magnitude threshold, and
every weight at or below it is ignored. That makes the second pass a sparse
computation whose sparsity changes from run to run, and DySCNN is the accelerator that
turns those dropped weights into saved cycles rather than wasted multiplies.

This repository holds synthesizable SystemVerilog for that accelerator and
self-checking testbenches for every block.

## Division of work between host and hardware

The defense is a hardware/software co-design, and most of the decision-making sits on
the host:

| host software (not in this RTL)                               | hardware (this RTL)                                   |
|---------------------------------------------------------------|-------------------------------------------------------|
| offline profiler: per-filter table of thresholds, one per sparsification rate | packed active-weight buffers and bit masks per filter |
| random sparsification-rate generator, threshold lookup        | MUX signal generator: bit mask to input-mux select    |
| bit-mask generator: weight kept if its magnitude exceeds the threshold | PE grid: input mux, multiplier, accumulator          |
| scheduler: groups filters with similar active-weight counts   | window-stepping control, run-time counters            |
| HASI detection: L1 distance, thresholds, extra noisy passes   |                                                       |

The hardware therefore never decides which weights are dropped and never balances
work. It receives, per filter, the surviving weights packed one after another and a
bit mask saying where each one sits, and it computes exact dot products with them. The
noise-free reference pass is the same computation with every mask bit set.

## Data layout: windows, masks and packed weights

A dot product runs over an input vector of length `L` (for a convolution, one im2col
patch, e.g. 3x3x512 = 4608 values). The vector is cut into *windows* of `WIN`
consecutive positions (8 by default); window `b` covers positions `b*WIN` to
`b*WIN+WIN-1`.

For each filter the host writes

* one `WIN`-bit mask per window, bit `i` of window `b` being 1 when the weight at
  position `b*WIN+i` is kept;
* the kept weights only, packed densely in position order: packed entry 0 is the first
  kept weight of window 0, and so on. Dropped weights take no space and are never
  transferred.

Inputs are not sparsified and are stored whole, one row per input vector.

Example with `WIN = 8`, one window:

    position   7 6 5 4 3 2 1 0
    mask       1 0 1 0 0 1 1 0        -> 4 kept weights
    packed     w1 w2 w5 w7            (consecutive entries of the weight buffer)
    selects    cycle 0: 1, cycle 1: 2, cycle 2: 5, cycle 3: 7

## Look-ahead matching and the cost of a window

Each filter column has a MUX signal generator holding the not-yet-used bits of the
current window's mask. Every cycle it offers the lowest remaining position as the
select of the PE input multiplexer, the column's weight pointer reads the next packed
weight, every PE in the column multiplies that weight by the selected input of its
row's window, and the bit is cleared. Dropped positions are simply skipped: the mux
looks ahead across the window to the next kept weight, so a window with `k` kept
weights costs `k` cycles in that column instead of `WIN`.

All columns share the input windows, so they move to the next window together, when
every column has used up its kept weights there. The cost of a run is therefore

    cycles = sum over windows b of  max(1, max over columns c of popcount(mask[c][b]))

plus one cycle after `start` to fetch the first masks. A window in which every weight
of every column was dropped still takes one cycle. A column with fewer kept weights
than the busiest column idles for the difference; `idle_cnt_o` adds those idle
column-cycles up.

This is why the host groups filters by active-weight count before loading a group of
`COLS` filters: a group of similar filters has little idle time. In the end-to-end
test, eight filters with thresholds 0, 16, ..., 112 run as two groups of four over a
256-position vector. Sorted groups (0-48 and 64-112) take 394 cycles; interleaved
groups (0,32,64,96 and 16,48,80,112) take 485 cycles. A dense pass would take 512.

## The PE grid

The grid has `ROWS x COLS` processing elements (4 x 4 by default). Column `c` holds one
filter of the schedule group: its select, weight and enable are broadcast down the
column. Row `r` holds one input vector (one output pixel): its window is broadcast
along the row. PE `(r, c)` therefore accumulates `input_r . filter_c`. Each PE is an
input multiplexer over the `WIN` window values, a signed `DATA_W x DATA_W` multiplier
and an `ACC_W`-bit accumulator (wrapping on overflow), one multiply-accumulate per
cycle.

## Modules

| file                        | block                                                      |
|-----------------------------|------------------------------------------------------------|
| `rtl/dyscnn_pkg.sv`         | default sizes, data types, control-state enum              |
| `rtl/mux_signal_generator.sv` | mask register and priority encoder: next kept position, valid, last |
| `rtl/pe.sv`                 | input mux, multiplier, accumulator                         |
| `rtl/pe_array.sv`           | `ROWS x COLS` grid of PEs with row/column broadcast        |
| `rtl/weight_buffer.sv`      | packed kept weights and window masks of one filter column  |
| `rtl/input_buffer.sv`       | dense input vector of one row, read a window at a time     |
| `rtl/dyscnn_accel.sv`       | top: buffers, generators, grid, window-stepping control    |

## Top-level interface and timing (`dyscnn_accel`)

Loading (only while `busy` is low; one write per cycle per port, all three ports may
be used in the same cycle):

* `wb_we, wb_col, wb_addr, wb_data`: packed kept weight number `wb_addr` of column `wb_col`;
* `mb_we, mb_col, mb_blk, mb_mask`: mask of window `mb_blk` of column `mb_col`;
* `ib_we, ib_row, ib_addr, ib_data`: input value at position `ib_addr` of row `ib_row`.

Running: raise `start` for one cycle with `num_blocks` (1 to `MAX_BLOCKS`) windows and
`clear_acc`. With `clear_acc = 0` the accumulators keep their values, so a dot product
longer than the buffers (VGG16's first fully connected layer, 25088 positions) is run
as several loads. `busy` is high from the cycle after `start` until `done`, a
one-cycle pulse. When `done` is seen, `acc_o[r][c]` holds the results, `cycle_cnt_o`
the compute cycles (the formula above) and `idle_cnt_o` the idle column-cycles.
Counting clock edges after the one that samples `start`, `done` is high after
`1 + cycles` edges.

Assertions check that `start` comes only while idle, that `num_blocks` is in range, that
the buffers are not written during a run, and that a mux select is only consumed while
one is pending.

## Parameters

| parameter    | default | meaning                                                  |
|--------------|---------|----------------------------------------------------------|
| `ROWS`       | 4       | input vectors (output pixels) processed together         |
| `COLS`       | 4       | filters per schedule group                               |
| `WIN`        | 8       | look-ahead window, positions (power of two)              |
| `DATA_W`     | 8       | signed input and weight width                            |
| `ACC_W`      | 32      | accumulator width                                        |
| `MAX_BLOCKS` | 576     | windows per buffer load (576 x 8 = 4608 positions)       |

None of these numbers is given in the description of the design; they are choices
made here. 4608 = 3x3x512 is the longest convolution dot product in VGG16 and ResNet50,
so every convolution of both networks fits in one buffer load; the weight buffer is
sized for the dense worst case so the noise-free pass fits too. With 8-bit operands, a
4608-term dot product stays below 7.6e7 and a 25088-term one below 4.2e8, well inside
32 bits.

## What follows the source design and what is chosen here

Taken from the design description: weights dropped by comparison with a per-filter
threshold chosen from a per-filter random rate; bit masks produced by the host; only
active weights loaded into the accelerator's weight buffers; a MUX signal generator
that maps inputs to active weights from the bit mask with a look-ahead mechanism;
PEs made of an input multiplexer, a multiplier and an accumulator with feedback;
load balancing left to the host scheduler instead of hardware.

Chosen here, where the description gives no detail:

* the look-ahead is a window-synchronous priority encoder. The design it cites as its
  model (TensorDash) also moves operands across neighbouring lanes and uses a sliding
  staging window. The DySCNN description says its version is simpler because the host
  balances the lanes, but does not say how simple. A sliding window would hide some of
  the per-window idle time counted above;
* the row/column broadcast arrangement of the grid, all widths and sizes, and
  asynchronous-read buffers;
* the host write ports, `clear_acc`, the one-cycle mask fetch and the counters;
* reset: asynchronous, active low, clearing the control state, pending masks and
  accumulators; buffer contents are not reset.

The prototype of the original work was built into an existing FPGA CNN accelerator,
whose pooling, activation, data movement and memory interface are not part of this
RTL. The host-side parts listed above, including the adversarial-detection logic, are
not implemented here.

## Verification

Every block has a self-checking testbench in `tb/` that compares the block with a
model computed in the testbench and prints `TB_RESULT checks=N failures=M`:

* `tb_mux_signal_generator`: 305 masks including all-zero and all-one; select order,
  valid, last, cycles per window, load priority over advance;
* `tb_pe`, `tb_pe_array`: random operands, enables and clears against a running sum;
  row and column broadcast on a 3 x 2 grid;
* `tb_weight_buffer`, `tb_input_buffer`: write and read-back at reduced depth;
* `tb_dyscnn_accel`: the whole accelerator at its default parameters. The testbench
  acts as the host: it draws thresholds, builds masks with the magnitude rule, packs
  and loads weights, and checks every accumulator, `cycle_cnt_o`, `idle_cnt_o` and the
  start-to-done latency. It covers a dense reference pass, random noisy passes, an
  all-dropped window, continued accumulation, sorted and interleaved schedule groups,
  and one 4608-position pass. It counts each of these and fails if one never happened.

* `tb_workload_layers`: layer slices of VGG16 (conv1_2 3x3x64, conv5_3 3x3x512, fc6
  25088) and ResNet50 (3x3x64, res5 1x1x2048), eight filters and four output pixels
  each, at the default parameters. Here the testbench models the whole host flow: a
  per-filter threshold table for rates of 10 % to 90 %, a random rate per filter,
  masks, and sorting into schedule groups. fc6 is split over six buffer loads. Results
  are compared with a convolution computed directly from the input tile, not from the
  packed data.

The workload test also reports compute cycles. With rates drawn uniformly from 10 % to
90 % and random weights, the reference pass plus one noisy pass costs 1.66x to 1.79x
the reference pass alone. That is of the same order as the 1.6x to 2x overhead
reported for the FPGA prototype. Those measurements were whole-network run times with
trained weights and confidence-driven rates, so the two sets of numbers are not
directly comparable.

To run a testbench with Verilator 5 (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/dyscnn_pkg.sv tb/tb_dyscnn_accel.sv --top-module tb_dyscnn_accel
    ./obj_dir/Vtb_dyscnn_accel

The simulator has two states. Everything the design reads after reset is reset or is
written by the host before use. Every testbench ends within a few seconds; the
end-to-end one simulates about 0.5 ms of 100 MHz clock.

## Limits

* The results match the reference exactly in simulation, but the design has not been
  run on hardware or timed. The asynchronous-read buffers would become distributed RAM
  on an FPGA; at the default sizes, block RAM with a one-cycle read would need one more
  pipeline stage.
* Throughput is one kept weight per column per cycle. Because columns move between
  windows together, an unbalanced group pays for its heaviest column in every window.
* The adversarial-detection decision (L1 distance, thresholds, repeated noisy passes)
  and the rate-to-threshold tables are host software and are not included.
