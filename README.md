# Event-camera graph generator in SystemVerilog

An event camera does not send frames. Each pixel reports, on its own, when its
brightness changes, as an event `(x, y, t, p)`: position, a microsecond timestamp and
a polarity. Graph convolutional networks can use this sparse stream directly if each
event becomes a vertex, joined by edges to nearby vertices in space and time. On a
GPU, edges are usually found by searching the whole point cloud for all neighbours
within a radius. That gives an unbounded number of edges per event and needs a sort,
which suits an FPGA badly.

This RTL builds the graph in hardware, with a fixed amount of work per event. It rests
on three simplifications:

* **Normalisation.** `x`, `y` and `t` are each scaled onto the same integer range
  `0..SIZE-1` (`SIZE = 256`). A vertex then fits in 24 bits, and time is quantised into
  `SIZE` steps over the time window.
* **Neighbour matrix.** A `SIZE x SIZE` RAM holds, for each pixel, only the timestamp
  of the newest event seen there. The neighbours of a new event are found by reading
  the `7 x 7` square around it (radius `R = 3`) and keeping the cells that lie within
  distance `R` in `(x, y, t)`. Only the newest vertex of each pixel can receive an
  edge, so an event has at most 48 edges.
* **Unique, time-directed vertices.** An event whose pixel already holds the same
  normalised timestamp is a duplicate and is dropped. Edges always run from older
  vertices to the new one. A vertex is therefore final as soon as its edge list has
  been emitted, and it never needs updating.

The architecture and its numbers come from a published design for a Zynq UltraScale+
FPGA at 250 MHz or more: the 1024-entry FIFO, the two-port matrix RAM, the 26 clocks per
event and the 24-bit edges. The interfaces, the control details and the handling of
corner cases are this implementation's own. They are marked as such below and in each
file's header.

## Data path

```
 event in ──► normalisation ──► event_fifo ──► context_gen ─────────────┐
 (x,y,t,p,      (1 clock)       1024 x 25 bit   ├ dup_check             │ two candidates
  valid)                                        ├ context_scan          │ per clock
                                                └ nm_bram 256x256x9     ▼
                                  delay_line (event) ───────►  2 x radius_check
                                                                        │
                                                                  edge_output ──► event, edges, done, LEN
```

| module | role |
|---|---|
| `gg_pkg` | default sizes; functions for the candidate count, read-cycle count and window offsets |
| `normalisation` | `floor(v * SIZE / W)` per axis, saturating at `SIZE-1`; registered |
| `event_fifo` | 1024 x 25-bit queue `{x, y, t, p}`; registered read; refuses writes when full |
| `nm_bram` | neighbour matrix, true two-port RAM: port A read/write, port B read only, latency 1 |
| `dup_check` | `dup = cell_valid && cell_t == ev_t` |
| `context_scan` | for read cycle `c`, the two matrix addresses to read and whether each is inside the matrix |
| `context_gen` | controller: fetch, duplicate check, 25 read cycles, write-back, matrix clear |
| `radius_check` | `dx² + dy² + dt² ≤ R²` with `tc ≤ t`; registered |
| `delay_line` | carries the event (and its end flag) alongside the radius check |
| `edge_output` | registered output; counts each event's edges into `len` |
| `graph_gen` | top level |

## Timing of one event

Everything runs on one clock. Normalisation, the FIFO and the radius check are pipelined
and accept one item per clock. The neighbour-matrix RAM is the bottleneck: it has two
ports and a read latency of one clock, and each event needs 49 reads (its own cell and
48 candidates) and one write.

`context_gen` schedules these as follows. Cycle numbers count from the clock in which
the event's first reads are issued.

| cycle | port A | port B |
|---|---|---|
| 0 | event's own cell (duplicate check) | candidate 0 |
| 1 … 23 | candidate 2c−1 | candidate 2c |
| 24 | candidate 47 | — |
| 25 | **write** `{1, t}` to the event's own cell | — |

Candidates are numbered in raster order over the `7 x 7` window, `dy` major, with the
centre skipped. The duplicate result arrives in cycle 1. If the event is a duplicate,
the candidate already read on port B is discarded, no further reads are issued, and the
next event starts in cycle 2. A duplicate therefore costs **2 clocks**. A kept event
costs **26 clocks**: 25 read cycles and 1 write. When the FIFO holds work, events follow
each other with no gap. At 250 MHz that is one event per 104 ns, about 9.6 events/µs.
The next event's first reads, in the cycle after the write, already see the written cell,
so back-to-back events at the same pixel are handled correctly.

A candidate's cell contents return one clock after its read. The radius check registers
its result one clock later, and `edge_output` registers it once more. An event's edges
therefore leave from cycle 3 to cycle 27, up to two per clock. `done` and `len` come in
the same clock as its last edges. A single event presented to an idle generator reaches
`done` 30 clocks after `in_valid`: 1 for normalisation, 1 for the FIFO write, 1 for the
FIFO read, then the reads, the radius check and the output register.

## Top-level interface (`graph_gen`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `t_origin[31:0]` | in | start of the current time window, in the unit of `in_t` (µs) |
| `clear` | in | pulse: start a new graph by emptying the matrix (see below) |
| `in_valid`, `in_x[15:0]`, `in_y[15:0]`, `in_t[31:0]`, `in_p` | in | raw event; there is no back-pressure |
| `fifo_overflow` | out | pulse: an event arrived while the FIFO was full and was lost |
| `fifo_full`, `fifo_count[10:0]` | out | FIFO state |
| `drop` | out | pulse: a duplicate event was discarded |
| `clearing`, `busy` | out | matrix clear in progress; controller not idle |
| `edge_valid[1:0]`, `edge_data[2][23:0]` | out | up to two edges per clock, each `{x, y, t}` of the older vertex |
| `ev_x`, `ev_y`, `ev_t`, `ev_p` | out | the (normalised) event these edges belong to |
| `done`, `len[5:0]` | out | last clock of this event's edge list, and its length (0…48) |

Every event that is not dropped produces exactly one `done`, including events with no
edges (`len = 0`). Events leave in arrival order. A consumer that wants the graph in
coordinate (COO) form appends the vertex `{ev_x, ev_y, ev_t}` with feature `ev_p`, then
one edge per `edge_data` word. A vertex is identified by its position, because
normalised positions are unique.

**Parameters** (defaults in brackets): `SIZE` [256], `R` [3], `FIFO_DEPTH` [1024],
`SENSOR_W` [240], `SENSOR_H` [180] and `WINDOW_US` [50000] (the N-Caltech101 sensor and
a 50 ms window), and the raw input widths `XIN_W`/`YIN_W` [16] and `TIN_W` [32].
`SIZE` must be a power of two. `R` sets the window. The read schedule, 48 candidates
and 25 read cycles, follows from `R` through `gg_pkg`.

## Starting a graph

After reset, and after each `clear` pulse, `context_gen` writes zero to all `SIZE²`
cells through port A. That takes 65,536 clocks at the defaults. `clear` is served once
the event in progress has finished. Events keep arriving in the FIFO meanwhile and are
processed afterwards as part of the new graph. To keep two graphs apart, wait until
`busy` is low and `fifo_count` is zero, then change `t_origin` and pulse `clear`.

## Where this implementation makes its own choices

These points are not fixed by the original description, or are resolved differently:

* **Valid bit in the matrix.** The original stores only the 8-bit timestamp. Nothing
  then tells an empty cell from an event at `t = 0`. Here each word is 9 bits
  `{valid, t}`, and the matrix is cleared explicitly. On the FPGA this costs no extra
  block RAM: 64K x 9 bits occupies the same sixteen 36-kbit blocks as 64K x 8.
* **Radius test.** The description speaks both of a distance "≤ R in each direction" and
  of the ball `dx²+dy²+dt² ≤ R²`. The ball is implemented. Because the graph is
  time-directed, only its past half counts: a cell newer than the event (possible when
  input timestamps are out of order) gives no edge.
* **The event's own pixel is not a candidate.** The window is the 48 cells around the
  event. The previous event at the same pixel is read, but only for the duplicate test.
* **Border.** Window cells outside the matrix are still read, so the schedule stays at
  25 cycles, but they are discarded.
* **Normalisation arithmetic.** `floor(v * SIZE / W)` is computed by multiplying with a
  rounded-up 40-bit reciprocal and shifting. This is exact whenever `v * W < 2^40`.
  Results saturate at `SIZE-1`, so an 8-bit coordinate holds them. Timestamps before
  `t_origin` map to 0, and those after the window end map to `SIZE-1`.
* **Output format.** Edge lists are streamed, with `len` given at the end, rather than
  collected into an array. Nothing about an edge list is stored on chip.
* **Overflow.** The input has only a valid flag, so a full FIFO loses events. Each loss
  is flagged on `fifo_overflow`.
* **Not built.** The original also mentions cheaper, circle-shaped windows of 36 or 24
  reads, and a wider RAM word holding several cells. It builds neither, and neither does
  this RTL. The graph network that consumes the output, and the external memory that
  could hold the graph, are outside this design.

## Does it keep up?

At the defaults, one event per 26 clocks gives 9.6 events/µs at 250 MHz. The busiest
millisecond of the N-Caltech101 recordings averages about 3.3 events/µs, and a 50 ms
sample holds about 56,000 events after normalisation to 256, or 1.1 events/µs on
average. Short bursts above 9.6 events/µs are absorbed by the 1024-entry FIFO, which
holds about 100 µs of input at that rate. The theoretical worst case, all 65,536 pixels
firing within one time step, cannot be sustained: anything past the FIFO is lost and
flagged.

For comparison, the original implementation reports 5,612 LUTs, 950 flip-flops, 17 block
RAMs and 189 DSPs on an XCZU7EV. The 17 block RAMs are consistent with this memory
layout: 16 for the matrix and 1 for the FIFO. This RTL has not been through FPGA
implementation, so its LUT, DSP and timing figures are not known.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `tb_graph_gen` runs the whole generator at its default parameters: about 3,300 events
  in two graphs, with sparse traffic, a burst past the FIFO depth, exact repeats, border
  pixels, late timestamps and timestamps past the window. It compares every event, every
  drop and every edge set with a reference model written in the testbench: integer
  division, an array copy of the matrix, and a plain loop over the window. It checks the
  26-clock period (plus 2 per duplicate in between) and the 30-clock idle latency. It
  counts the duplicate, overflow, backlog, clear, border, newer-cell, saturation, with-edges
  and no-edges cases, and fails if any of them never happens.
* `tb_graph_gen_sizes` repeats that test at graph sizes 128 and 64 (`SIZE` parameter),
  the other two sizes considered for the original design. It uses
  `tb_graph_gen_sized`, a parameterised copy of the same checks.
* `tb_context_gen` checks the controller and matrix cell by cell against a model.
  `tb_context_scan` checks the read schedule over all window positions, corners
  included. `tb_radius_check`, `tb_dup_check` (exhaustive), `tb_normalisation`,
  `tb_event_fifo`, `tb_nm_bram`, `tb_delay_line` and `tb_edge_output` cover the rest.
* `tb_workload_stream` feeds one synthetic 50 ms window at N-Caltech-like rates: about
  57,000 events, with a 5 ms burst at 3.3 events/µs. Nothing overflows, every edge list
  matches the model, and the FIFO never holds more than a handful of events. That
  confirms the roughly threefold margin of 9.6 over 3.3 events/µs.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/gg_pkg.sv tb/tb_graph_gen.sv --top-module tb_graph_gen
./obj_dir/Vtb_graph_gen
```

Any other testbench is run the same way, with its own file and top module. The RTL
uses only synthesizable SystemVerilog: packages, `always_ff`/`always_comb` and typed
parameters. The memories are plain arrays with registered reads, so they map to block
RAM. The assertions (no pop from an empty FIFO, write-back to the event's own cell) are
checked in simulation.
