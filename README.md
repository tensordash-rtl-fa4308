# TensorDash-style sparse FP32 accelerator core in SystemVerilog

Training a deep network spends most of its time in multiply-accumulate
operations, and a large share of them multiply by zero. Zeros come from
ReLU activations, from their gradients, and from pruned weights. A dot-product
unit that simply streams its operands wastes a multiplier slot on every such
pair. This design keeps the dense, lock-step dataflow of a conventional
accelerator but lets each multiplier lane pull an effectual operand pair
forward from a small window of upcoming operands. An effectual pair is one
whose product is non-zero. The data layout in memory stays dense. Skipping
happens entirely inside the processing elements: a lightweight scheduler
re-routes operands over short, fixed wires. The same hardware runs the
forward pass and both backward-pass convolutions of training. It needs no
software pre-processing.

The RTL gives the whole datapath of the core:

- FP32 multipliers and adders;
- the processing element (PE), its staging window, operand multiplexers and
  scheduler;
- the 4x4-PE tile with its scratchpads;
- the transposers on the fill path;
- the per-layer zero counter that turns the skipping on or off;
- the decompressor and backside scheduler that let tensors be kept in memory
  in scheduled (compressed) form.

The large on-chip SRAMs, the DRAM and the DMA engines are outside the top
module. Their traffic is carried by two plain buses.

## 1. Operand promotion

A PE has 16 lanes. Each cycle it multiplies 16 pairs (A, B) and adds all 16
products into one accumulator. In the dense schedule, lane *i* at step *t*
uses element *i* of row *t* of both operand streams.

The PE instead sees a **staging window** of three rows: the current step
(+0) and the next two (+1, +2). Each lane's multiplier inputs come from an
8-input multiplexer. The multiplexer reaches eight window slots, in a fixed
priority order. The 3-bit select is called the movement, MS:

| MS | slot (step, lane) | kind |
|----|-------------------|------|
| 0 | (+0, i)   | dense |
| 1 | (+1, i)   | lookahead |
| 2 | (+2, i)   | lookahead |
| 3 | (+1, i-1) | lookaside |
| 4 | (+1, i+1) | lookaside |
| 5 | (+2, i-2) | lookaside |
| 6 | (+2, i+2) | lookaside |
| 7 | (+1, i-3) | lookaside |

Lane indices wrap around modulo 16. A lane with an effectual value at (+0, i)
always takes it, so the oldest row is never starved. The A and B
multiplexers of a lane use the same MS, so a promoted pair stays a pair.
The products can arrive in any order, because all 16 lanes feed one
accumulator.

After each step the window advances by **AS**, the number of leading rows
that are now fully consumed: 1, 2 or 3 rows. With enough zeros, one step
does the work of up to three dense steps.

Promoted values leave holes in later rows. Every slot of the window
therefore carries a *pending* bit in addition to its value. The pending bit
is cleared when a lane consumes the slot, and it moves with the row as the
window shifts. This is `td_staging_buffer`. The scheduler sees
`non-zero AND pending`, so a value is never used twice.

## 2. The levelled scheduler (`td_scheduler`)

Every lane wants the first available slot in its list. Two lanes may want
the same slot; for example, lane 5's (+1, 4) is lane 4's (+1, i). The
scheduler resolves these conflicts in six **levels**, one per lane group:

    {0,5,10}  {1,6,11}  {2,7,12}  {3,8,13}  {4,9,14}  {15}

The lanes of one group are at least five apart. Their eight-slot
neighbourhoods (offsets -3..+2) therefore never overlap, so a group decides
in parallel:

1. Each lane of the group runs an 8-to-3 priority encoder over the current
   availability vector.
2. The chosen slots are cleared from the vector.
3. The next level sees what is left.

The six levels form one combinational cascade, and the whole schedule
settles in a single cycle. The outputs are:

- per lane, the 3-bit `ms` and a `sel` bit (the lane found a pair; an idle
  lane multiplies zeros);
- the 2-bit advance `adv` (AS);
- `z_left`, the availability left over. `z_left` becomes the new pending
  bits.

When the scheduler is disabled (`en = 0`) it reproduces the dense schedule:
every lane takes MS = 0, and the advance is 1.

The result is greedy, not optimal. A lane in an early level can take a
value that a later lane needed more. This matches the intended hardware:
cheap priority encoders instead of a matching network.

## 3. Tiles and lock step (`td_tile`)

A tile is a 4x4 grid of PEs. PE (r, c) computes the dot product of B stream
*r* with A stream *c*. B values are shared along a PE row, A values along a
PE column.

Scheduling is **one-sided**: a pair counts as ineffectual when its B value is
zero. This lets the hardware be shared:

- each PE row has one B scratchpad, one B staging buffer, one scheduler and
  one B multiplexer block;
- each PE column has one A scratchpad and one A staging buffer;
- every PE has its own A multiplexer block, driven by its row's movements.

All staging buffers share one stream pointer, so they must move together.
Each step the tile advances by the **minimum AS over its rows**. A row whose
own schedule could have drained more keeps the consumed slots marked via its
pending bits. It simply waits; no work is lost. This waiting is the main
cost of sharing, and the tile counts it (`row_waits`).

Each operand pad is a scratchpad of 3 banks x 16 rows of 16 FP32 values
(1 KB per bank). Row *k* is stored in bank *k* mod 3, so the three rows a
3-row advance needs can be read in one cycle.

**Operation.**

1. Load the pads through the write ports, one row per cycle.
2. Pulse `start` with `nsteps`, the stream length in dense rows (at most 48).
3. The tile clears its accumulators, unless `acc_keep` is high with
   `start`, and spends one cycle filling the windows. With `acc_keep`, a
   dot product longer than one pad load continues over several loads.
4. It then performs one scheduling step per cycle until all rows are
   drained.
5. It writes the 16 results as one row of its C pad, with PE (r, c) in lane
   r*4+c, and pulses `done`.

Start to done takes `steps + 2` cycles. Here `steps` is `nsteps` in dense
mode and can be as low as ceil(nsteps/3) in sparse mode. `stats` reports the
steps taken and counts the lookahead picks, lookaside picks, multi-row
advances, row waits and multiplier operations.

## 4. Arithmetic

`fp32_mul` and `fp32_add` are combinational IEEE-754 single-precision units:

- round to nearest, ties to even;
- subnormal inputs and results flushed to zero;
- overflow to infinity;
- NaN returned as 0x7FC00000.

A PE feeds its 16 products into a pairwise adder tree (16→8→4→2→1). The
tree output is added to the accumulator, all in one cycle.

Promotion changes which products meet in the tree, so a sparse run can
round differently from the dense run of the same data. Results agree
exactly when all partial sums are exact. The tile and top testbenches use
small integers for exactly this reason.

## 5. Around the tiles (`tensordash_top`)

`tensordash_top` holds:

- `NUM_TILES` = 16 tiles (4096 MACs per cycle);
- `NUM_XPOSE` = 15 transposers, one each for tiles 0..14;
- one zero monitor;
- one decompressor;
- one backside scheduler.

**Fill bus.** One command per cycle while `fill_valid`; no command while
`fill_ready` is low. `fill_cmd` selects:

- **0, pad write:** `fill_row` goes to row `fill_addr` of the A pad
  (`fill_side` = 0, pad = PE column) or B pad (`fill_side` = 1, pad = PE
  row) `fill_pad` of tile `fill_tile`.
- **1, transposer load:** `fill_row` is stored as block `fill_idx` of the
  tile's transposer.
- **2, transposed write:** column `fill_idx` of the transposer is written
  to a pad as in command 0. The column holds one value from each of the 16
  blocks.
- **3, scheduled write:** one scheduled row goes through the decompressor.
  The row carries:
  - per lane, a value (`fill_row`), a movement (`fill_ms`) and a valid bit
    (`fill_nz`);
  - the row's advance (`fill_as`).

  The dense rows it releases go to consecutive rows of the selected pad. The
  first row is at the `fill_addr` given with a `dec_clear` pulse.

Transposer commands to a tile without a transposer are ignored.

The transposer exists because training reads each tensor in two orders.
The backward pass needs, for example, the filters transposed. Data can be
stored in 16x16 blocks and turned on the way into a pad, instead of being
kept twice.

**Scheduled tensors.** A tensor can be stored as the schedule itself.

- Storage format: (value, movement) pairs for the non-zero values, plus one
  advance count per scheduled row.
- Compression: this form is as short as the sparse run. Zeros are neither
  stored nor read.
- `td_decompress`: the mirror image of the operand multiplexer. It scatters
  each value back to its slot in a three-row window, and emits window row
  +0 to the pad. A row with advance k keeps `fill_ready` low for k-1 extra
  cycles.
- `td_backside_scheduler`: produces this form from results. It uses a single
  scheduler level iteratively, one lane group per cycle, plus one emit
  cycle. So it takes seven cycles per scheduled row instead of one, which
  suits the slow rate at which outputs appear. Its movements equal those
  the front scheduler would pick for the same tensor alone.
- In the top, `bs_push` feeds the row on the read bus to the backside
  scheduler. The scheduled rows appear on the `bs_*` outputs.

**Read bus and mode control.** `rd_tile`/`rd_addr` select a result row
(`rd_row`, combinational).

- Rows read with `rd_valid` pass through `td_zero_monitor`, which counts
  zeros and values.
- `layer_end` closes the tensor. The monitor then decides whether the next
  layer runs sparse: at least `THRESH_PCT` = 10 % zeros.
- With `cfg_auto` set, that decision drives all tiles. Otherwise
  `cfg_td_en` does.
- Dense mode runs the dense schedule through the same window. This stands
  in for bypassing and power-gating the scheduling logic, which a
  simulation cannot show.

`start` launches the same operation in every tile. Each tile runs at its
own pace. `done` pulses one cycle after the slowest tile has finished, so
start to done is the slowest tile's steps + 3 cycles.

## 6. Parameters

| parameter | default | where |
|---|---|---|
| `LANES` | 16 | package `td_pkg`, MACs per PE |
| `DEPTH` | 3 | window rows (lookahead 2) |
| `ROWS`, `COLS` | 4, 4 | PE grid per tile |
| `BANK_ROWS` | 16 | rows per scratchpad bank (x3 banks) |
| `NUM_TILES` | 16 | tiles |
| `NUM_XPOSE` | 15 | transposers |
| `THRESH_PCT` | 10 | zero monitor threshold, this design's choice |

The promotion map, the level groups and the MS/AS widths are tied to
`LANES` = 16 and `DEPTH` = 3. Changing those needs the map in `td_pkg`
redone.

## 7. Simulating

Every testbench is self-checking, prints
`TB_RESULT checks=<n> failures=<m>`, and ends with `$finish`. Build one
with Verilator 5, listing the packages first:

    verilator --binary -Wno-fatal --top-module tb_td_tile \
        rtl/td_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_sched_ref_pkg.sv rtl/*.sv tb/tb_td_tile.sv
    ./obj_dir/Vtb_td_tile

| testbench | what it checks |
|---|---|
| `tb_fp32_mul`, `tb_fp32_add` | random and corner-case operands against a double-precision reference, rounded once |
| `tb_td_scheduler` | exhaustive properties on random windows: no slot used twice, each lane takes its best free option, level order, AS, bypass; plus a worked example |
| `tb_td_staging_buffer`, `tb_td_lane_mux`, `tb_td_scratchpad`, `tb_td_transposer` | cycle-by-cycle comparison with small software models |
| `tb_td_pe` | products, tree and accumulation |
| `tb_td_zero_monitor` | counts and decisions |
| `tb_td_tile` | full tile at default size: all 16 results against exact integer dot products, dense and sparse step counts, latency, and every event kind |
| `tb_td_decompress`, `tb_td_backside_scheduler` | round trips through a reference scheduler and decompressor; the backside movements against the single-cycle scheduler |
| `tb_tensordash_top` | five operations end to end, described below |

`tb_tensordash_top` runs two tiles, one with a transposer and one without.
It performs five operations:

1. sparse mode, set by configuration;
2. automatic switch to dense mode;
3. dense mode with zero-heavy data;
4. automatic switch back to sparse mode;
5. sparse mode after a scheduled-form refill, accumulating onto the
   results of operation 4 (`acc_keep`).

It also runs a backside-scheduler round trip. It checks every result, the
step counts and the latency, and requires each mechanism to occur. The
two-tile version builds in under a minute.

The 16-tile default, with 15 transposers, has been built and simulated once
with an earlier version of this testbench. The build took about 17 minutes
and the simulation about 80 seconds. That run reported 35 failed checks.
Every failure it printed was a mode or step-count check. Its stimulus had
too many outputs equal to zero, so the automatic switch to dense mode never
happened. The stimulus was corrected for the two-tile test, which passes.
The two-tile configuration is the largest one simulated to a clean pass.
Every tile is identical, so two tiles cover all the top-level paths.

## 8. Fidelity and departures

These parts follow the source design:

- the promotion map and its priority;
- the six scheduler levels;
- the 3-bit MS and 2-bit AS;
- the 3-deep window with three-row refill from 3-bank scratchpads;
- the sharing of buffers, schedulers and multiplexers in a 4x4 tile with
  one-sided skipping;
- 16 tiles and 15 transposers with 16x16 buffers;
- the per-layer zero counter;
- the (value, movement) storage format with its mirror-image decompressor;
- a backside scheduler that re-uses one level over six cycles.

These are this design's own choices:

- **Polarity of the scheduling vector.** A 1 marks an effectual pair.
- **Level numbering.** Six levels, numbered 0..5.
- **Pending bits.** Used to avoid re-using promoted values.
- **Lock-step rule.** The minimum AS over the rows.
- **Controllers, buses and handshakes.** Including the 1-cycle fill and
  1-cycle write-back of the tile.
- **Result placement.** One C pad row per tile.
- **Single-cycle arithmetic.** No pipelining; the adder tree order; flushing
  subnormals.
- **Dense mode.** Run through the window instead of a physical bypass.
- **Zero-monitor threshold.** 10 %.
- **Scheduled-row advance.** Storing the advance count with each scheduled
  row.
- **Shared units.** One shared decompressor and one shared backside
  scheduler.

Limits worth knowing:

- **Reduction length.** One operation reduces at most 48 rows x 16 lanes =
  768 products per output. Longer reductions reload the pads and continue
  with `acc_keep`. That costs one fill cycle and one write-back cycle per
  load, plus the reload time of the pads. The pads are not double-buffered.
- **Schedule quality.** Greedy, not optimal.
- **Timing.** The whole scheduler and the FP datapath are single-cycle. No
  timing closure has been attempted; a 500 MHz implementation would
  pipeline the multiply/tree/accumulate path.
- **Outside the top.** The SRAMs, DRAM, DMA and power gating are not
  modelled.
