# Stream compaction tree for sparse trigger data

A first-level trigger receives a full detector snapshot every few tens of
nanoseconds, but only a few percent of the channels in a snapshot carry a
signal. In the Belle II calorimeter trigger, 576 trigger cells arrive per
125 ns window, and typically only a handful of them are non-empty. A graph
neural network whose cost grows with the square of its input count should
see only those non-empty cells.

This RTL implements a hardware stream compactor for that job. It takes `N_I`
parallel input streams, each carrying one element per clock cycle, marked
non-empty by its valid bit. It moves the non-empty elements onto `N_O`
output streams (`N_O` much smaller than `N_I`) with no gaps. It does this at
a fixed pipeline latency and never holds an element back on purpose. The
default size is 64 inputs onto 2 outputs, with 32-bit elements and 16-entry
FIFOs.

The design follows the architecture of Neu, Haide, Ferber and Becker,
"Real-Time Stream Compaction for Sparse Machine Learning on FPGAs", which
was deployed in the Belle II GNN calorimeter trigger module. The
SystemVerilog here is an independent implementation. It does not come from
the authors' Chisel generator. Where that paper leaves a point open, the
choice made here is stated below and in each file header.

## The idea: a tree of small compactors

Compacting 64 streams in one step would need a 64-input crossbar for every
output, which is slow and hard to route. Instead, the compactor is a binary
tree of identical small cells. Each cell takes `2*N_O` streams and produces
`N_O`. So the crossbar in every cell is only `2*N_O -> N_O`, whatever `N_I`
is.

```
 s_*[0..3]  --FIFO--> +------+ --FIFO--+
                      | cell |         |    +------+ --FIFO--> m_*[0]
 s_*[4..7]  --FIFO--> +------+ --FIFO--+--> | cell |
                                       |    +------+ --FIFO--> m_*[1]
            ...                  ...   |
```

* **Levels.** The tree has `LEVELS = ceil(log2(N_I / N_O))` levels, and
  level `l` has `2**(LEVELS-1-l)` cells. With 64 -> 2, that is 5 levels of
  16, 8, 4, 2 and 1 cells: 31 cells in all.
* **Padding.** If `N_I` is not `N_O * 2**k`, the tree is built for the next
  such size. The extra inputs are tied to permanently empty streams. For
  example, 12 -> 2 is built as 16 -> 2.
* **FIFOs.** Every stream edge has a FIFO (`sc_fifo`, `DEPTH` entries):
  - one per input port;
  - one per output of each cell.

  The FIFOs behind the last cell are the output FIFOs. The FIFOs between
  levels decouple neighbouring cells, so each cell runs on its own. Bursts
  pile up in FIFOs and no global stall signal crosses the tree.

Each cell can pass at most `N_O` elements per cycle. So the tree as a whole
drains at most `N_O` elements per cycle. Any cell's subtree drains at most
`N_O` per cycle too, and a single input stream drains at most 1 per cycle.

## Inside a cell (`stream_compaction`)

A cell has three pipeline stages. The example below uses `N_O = 2`: four
inputs, two outputs.

1. **Prefetch registers** (`prefetch_regs`). Each input has a
   one-element holding register, filled from its FIFO head. A register
   reloads when it is empty, or when its element leaves in this cycle. A
   valid element that was not picked stays in place and competes again in
   the next cycle.
2. **Select.** The valid bits of the registers form a mask, for example
   `1 0 1 1` with port 0 first. The following blocks act on it:
   * `prefix_sum` counts the valid bits from port 0 up: `1 1 2 3`.
   * `rank_mask` zeroes the count of empty slots: `1 0 2 3`. Each valid
     element now has a unique rank.
   * `priority_select` runs `N_O` comparators and priority encoders.
     Encoder `k` finds the port whose rank is `k+1`. Here the encoders
     return ports 0 and 2.

   The picked slots are released to reload. Their data and the crossbar
   settings go into the stage-2 register.
3. **Crossbar** (`crossbar`). Each output is a `2*N_O : 1` multiplexer
   driven from the stage-2 register. The outputs go straight into the
   downstream FIFOs, so the FIFO storage acts as this stage's register.

The loop that decides which prefetch slots to reload sits in stage 1: mask,
prefix sum, rank and reload enable. Its length grows with `2*N_O`, not with
`N_I`. The paper reports clock frequency falling as `N_O` grows and
attributes it to the larger crossbar; both the crossbar and this loop grow
with `N_O` here.

### Balancing the output lanes

With a fixed mapping, the first selected element would always go to lane 0.
When data is thin, lane 0 would fill and lane 1 would stay empty. The cell
avoids this with a rotating offset `rot`:
* the `k`-th selected element goes to lane `(k + rot) mod N_O`;
* `rot` then advances by the number of elements sent.

Over any stretch of time, the lanes of a cell differ by at most one
element. This applies at every level, so the intermediate FIFOs fill evenly
too. The paper says the dense streams are balanced but does not say how;
the rotation is this implementation's choice. Setting `BALANCE = 0` gives
the plain mapping, in which encoder "rank 1" drives output 0.

Because of this spreading, **order is not kept**. Two elements from the same
input port can go down different lanes and leave the tree in either order.
Data that needs to be identified must carry its own tag. In the calorimeter
trigger, each trigger cell carries its identifier, timing, energy and
position.

### Backpressure

All ports use a valid/ready handshake, AXI-Stream style, with only
TVALID, TREADY and TDATA. Each output lane of a cell completes its own
handshake: a lane whose element was taken drops its valid. The cell moves
its pipeline on only once every lane has handed over its element. While a
cell waits, empty prefetch slots still fill. A full FIFO therefore stalls
only the cell in front of it. If the jam lasts, it spreads back to
`s_ready` of the input ports.

## Timing

| quantity | value |
|---|---|
| one cell, FIFO head to write into the next FIFO | 3 clock edges |
| whole tree, `s_*` handshake to `m_*` handshake (empty tree) | `3*LEVELS + 1` cycles, 16 for 64 -> 2 |
| same, counted from the input FIFO heads | `3*LEVELS` cycles, 15 for 64 -> 2 |
| throughput | `N_O` elements per cycle |

The paper gives the latency as `3 * ceil(log2(1 + N_I/N_O))` cycles, which is
18 for 64 -> 2. Its block diagram, however, draws an 8 -> 2 tree with two
levels, where the formula would give three. This RTL follows the diagram.
The formula's extra level appears only when `N_I/N_O` is a power of two. For
ratios such as 2.5 or 3, the two agree. The measured latency is checked by
the testbenches, and they also print the formula's value for comparison.

## Sizing for the Belle II calorimeter trigger

* 576 trigger cells per 125 ns window arrive on 64 ports. That means 9
  cycles of input per window.
* At the 127.216 MHz trigger clock, a window is about 16 cycles. Two output
  ports can carry 32 elements in that time: a density of 5.6 %.
* Shrinking a 576-node graph to 32 nodes cuts the cost of a quadratic GNN
  layer by (576/32)^2 = 324. This is the reduction factor quoted for the
  deployed system.

In simulation at the default size:
* 28 non-empty cells per 16-cycle window (4.9 %) ran for 100 windows.
  Inputs never saw backpressure, and every window left the tree in time.
* At 30 per window, an occasional window finishes late.
* At the full 32 per window, the backlog grows window after window.

The reason is that the tree is not perfectly work-conserving. Near the end
of a burst, the last few elements can be stuck behind one input stream or
one subtree, so the output runs at less than 2 per cycle for a few cycles.
With zero slack in the window, those lost slots never come back. Sustained
operation at exactly 100 % output use would need something this design does
not have. One option is an explicit window boundary with a flush. Another is
to run the tree faster than the data arrive. The design provides the
FIFO depth, but there is no window marker or flush logic.

## Files

Design (`rtl/`), bottom-up:

| file | block |
|---|---|
| `sc_pkg.sv` | default sizes, cell latency, `tree_levels()` |
| `sc_fifo.sv` | FIFO with first-word fall-through head, `in_ready` = not full |
| `prefix_sum.sv` | inclusive prefix count of valid bits |
| `rank_mask.sv` | rank = valid ? prefix : 0 |
| `priority_select.sv` | `K` encoders, encoder `k` finds rank `k+1` |
| `crossbar.sv` | `N_IN -> N_OUT` multiplexers |
| `prefetch_regs.sv` | stage-1 holding registers with reload rule |
| `stream_compaction.sv` | one `2*N_O -> N_O` cell |
| `sparsity_compression.sv` | top: input FIFOs, tree, output FIFOs |

Top-level parameters: `N_I` (64), `N_O` (2), `WIDTH` (32) and `DEPTH` (16).
The ports are:
* `clk`, and `rst` (synchronous, active high);
* `s_valid[N_I]`, `s_ready[N_I]`, `s_data[N_I]`;
* `m_valid[N_O]`, `m_ready[N_O]`, `m_data[N_O]`.

The element format is opaque: any `WIDTH`-bit word passes through
unchanged.

Testbenches (`tb/`). Each one prints `TB_RESULT checks=N failures=M` and
has a watchdog:

| testbench | what it runs |
|---|---|
| `tb_sc_fifo` | queue model, full/empty flags, write-to-read delay |
| `tb_prefix_sum`, `tb_rank_mask`, `tb_priority_select` | the `1 0 1 1 -> 1 1 2 3 -> 1 0 2 3 -> ports 0, 2` example, plus exhaustive or random patterns |
| `tb_crossbar`, `tb_prefetch_regs` | random stimulus against a model |
| `tb_stream_compaction` | a 4 -> 2 cell: the worked example on a `BALANCE = 0` cell, latency, 2 elements/cycle when saturated, lane alternation, random backpressure |
| `tb_sparsity_compression` | 12 -> 2 (padded) and 16 -> 4 trees end to end |
| `tb_sparsity_compression_full` | default 64 -> 2 tree with the calorimeter-like window load |
| `tb_sc_configs` | evaluated sizes 64 -> 8, 128 -> 4 and 256 -> 2 side by side; its tables take any of the nine `N_I` in {64, 128, 256} by `N_O` in {2, 4, 8} (all nine pass, but the nine-instance build takes several minutes) |

`sc_env.sv` is the shared driver and scoreboard for the whole-tree benches.
It tags every element with its port and a sequence number. It then checks:
* every element arrives exactly once;
* the empty-tree latency;
* `N_O` elements per cycle under saturation;
* no input backpressure during the window load;
* the output lanes stay within one element of each other.

It also counts, and requires, input backpressure and output stalls.

To simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sc_pkg.sv \
    tb/tb_sparsity_compression_full.sv --top-module tb_sparsity_compression_full
./obj_dir/Vtb_sparsity_compression_full
```

## What follows the paper and what does not

Taken from the paper:
* the tree of `2*N_O -> N_O` cells joined by FIFOs;
* input and output FIFOs;
* the three cell stages: prefetch, prefix sum + mask + priority encoders,
  crossbar;
* the worked example values;
* the valid/ready streaming interface;
* the parameter set and the evaluated sizes (64/128/256 by 2/4/8, 32 bit,
  depth 16).

Chosen here, because the paper does not specify them:
* the reload rule of the prefetch registers;
* what the stage-2 register holds;
* the rotation used for lane balancing;
* per-lane handshakes with a cell-wide advance;
* padding for input counts that are not powers of two times `N_O`;
* FIFO internals (fall-through head, no write when full);
* synchronous reset.

Known departures and gaps:
* Latency is `3*LEVELS` cycles from the FIFO heads, not the paper's
  formula (see Timing).
* No window marker (AXI-Stream TLAST) or end-of-window flush is built. The
  paper mentions a window of `D` cycles but describes no hardware for it.
* Element order within a stream is not kept.
* Full 100 % output use at the calorimeter load is not reached (see
  Sizing).
* The surrounding system is not part of this RTL: the detector links and
  the GNN accelerator. They connect to the `s_*` and `m_*` ports.
