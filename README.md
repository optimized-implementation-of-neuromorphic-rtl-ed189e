# CWTS: a streaming HATS event classifier in SystemVerilog

This is RTL for an FPGA accelerator that classifies the output of an
event camera (an asynchronous time-based image sensor) with a hardware-friendly
variant of HATS, *Histogram of Averaged Time Surfaces*. It follows the
architecture published in "Optimized Implementation of Neuromorphic HATS
Algorithm on FPGA" (K. Sethi, M. Suri). In that design a set of processing
elements sits next to an ARM processor on a Zynq-7000. The publication gives
the algorithm, the block structure, the sizes and the arithmetic precision.
It does not give the bit-level interfaces, the memory organisation or the
control sequence. Those are filled in here, and every such choice is marked
below and in the header comment of the module it belongs to.

## The idea

An event camera does not send frames. Each pixel sends an event
`e = (x, y, t, p)` when its brightness changes, where `p` is the polarity
(ON or OFF). HATS groups the pixels into cells of `K x K`. For every event it
builds a small *local time surface*: a `(2ρ+1) x (2ρ+1)` patch around the
pixel. Each bin of the patch adds a time-decaying weight for every earlier
event of the same polarity that the cell remembers at that offset. Averaged
over all events of a cell, these patches form a histogram, and a linear SVM
classifies the concatenated histograms of all cells.

Building the histogram and only then classifying takes much memory. The
hardware variant, called here CWTS (*continuously weighted time surfaces*),
changes the order: it multiplies each event's time surface with the SVM
weights of its cell **right away**. Only one scalar per cell and class is
kept, the partial sum:

```
S[cell][k] += Σ_z  TS_e(z) · W[cell][p][k][z]          (per event)
Count[cell] += 1
score[k]    = Σ_cell S[cell][k] / Count[cell]           (in software, per sample)
```

The classifier is linear, so the order of the sums does not matter. Dividing
by `Count` afterwards gives the same score as classifying the normalised
histogram. The second saving is the kernel. The exponential `exp(-Δt/τ)` of
HATS is replaced by the linear `1 - Δt/τ`, which needs no exponential unit.

Default sizes, all from the publication: a 120 x 100 pixel frame, `K = 10`
(so 12 x 10 = 120 cells), `ρ = 3` (49 bins), a time window
`Δt = 100 ms`, a decay constant `τ = 10^6 ms`, 8 processing elements,
signed fixed point `<24,12>` (12 integer bits including the sign, 12
fractional bits), and a multiply-accumulate done in 2 iterations of 11 clock
cycles at a 100 MHz clock.

## System structure

```
                 AXI-Lite                         +-----------+
  processor ───────────────> axil_interconnect ──>│  hats_pe 0│<── axis_event_fifo <─┐
  (weights, reset,            (64 KiB per PE)  ──>│  hats_pe 1│<── axis_event_fifo <─┤
   read-back)                                  ──>│    ...    │<──       ...         ├── axis_event_router <── DMA
                                               ──>│  hats_pe 7│<── axis_event_fifo <─┘   (AXI-Stream,
                                                  +-----------+                          24-bit AER + time)
```

`hats_top` holds everything to the right of the processor and the DMA. Both
of those are vendor parts, so the top brings out their links as ports: an
AXI-Stream slave for events and an AXI-Lite slave for the processor.

* **Event format.** `TDATA[23:0]` carries the AER word: `[6:0] x`, `[13:7] y`,
  `[14]` polarity (1 = ON), and the rest zero. `TUSER[31:0]` carries the
  timestamp in microseconds. The publication says the stream carries 24-bit
  AER words and that timestamps have microsecond precision. The bit layout is
  this design's own. So is the side band: a 24-bit word cannot hold both
  coordinates and a 17-bit time.
* **Cell ownership.** Cells are numbered column-major:
  `l = (x / K) · (N / K) + y / K`. Cell `l` belongs to PE `l mod NUM_PE`, so
  each PE owns 15 of the 120 cells. The publication only says the cells are
  divided equally. The interleave is this design's choice: a moving object
  then spreads over several PEs. The router passes each event straight to the
  FIFO of the owning PE. It consumes events outside the frame and counts them
  in `dropped_events`.
* **FIFOs.** There is one 16-deep AXI-Stream FIFO per PE. While a PE is busy
  its FIFO fills up, and the router then stalls the whole stream. Events are
  never reordered, and two events of the same cell always reach the same PE
  in order.

## Inside a processing element

A PE (`hats_pe`) handles one event at a time, in four steps:

| step | cycles | what happens |
|---|---|---|
| ACCEPT | 1 | Take the event. Find its local cell (`l / NUM_PE`) and its position inside the cell. Clear the 49 time-surface bins. |
| SCAN | F + 1 | Read the F events stored in the cell, one per cycle (`cell_memory`), through the `spatial_filter` into the `time_surface` bins. |
| DRAIN | 1 | Wait for the last bin update. |
| MAC | 23 per class | Start `cwts_mac`. 22 cycles later add its local sum to `S[cell][k]` (`partial_sum_mem`). In the first MAC cycle the event is also appended to the cell memory and `Count[cell]` goes up. |

So an event occupies its PE for **F + 3 + 23·NUM_CLASSES cycles** (F + 26
with one class), where F is the number of events already stored in its cell.
The time surface is built before the event is stored, so an event never sees
itself. This follows the order of the publication's equations: time surface
first, then memory update.

**Spatial filter.** A stored event counts if it has the same polarity, lies
within ±ρ pixels in x and y, and is at most Δt old. Its bin is
`z = (dy+ρ)(2ρ+1) + (dx+ρ)`. Only the cell's own memory is searched, which is
the "local memory" of HATS: events just across a cell border do not
contribute, even inside the window.

**Time surface and kernel.** Each selected event adds the kernel

```
k(Δt) = 2^12 − ((Δt · RECIP) >> 32),   RECIP = floor(2^(12+32) / τ),   0 if Δt ≥ τ
```

to its bin, in `<24,12>`. The reciprocal form avoids a divider; it is this
design's own. **At the published τ = 10^6 ms the correction term is 0 for
every age below about 244 ms, and the window is 100 ms.** So with the
published parameters each bin holds exactly 4096 × (number of matching
events), and the decay has no effect on the result. The testbenches use a
small τ to exercise the decay path.

**Multiply-accumulate.** `cwts_mac` has 25 lanes. Iteration 0 multiplies bins
0–24 and iteration 1 bins 25–48, with the 25th lane of iteration 1 forced to
zero. Each iteration runs its stages one after the other, one cycle each:

```
1 weight read + lane select | 2 operand regs | 3,4 multiply (2 stages) |
5 shift right by 12 (truncate) | 6..10 adder tree, 5 levels | 11 accumulate
```

That gives the published 2 × 11 cycles. The way the 11 cycles are split is
this design's own; the publication only gives the count. All products are
truncated, and all sums wrap around in 24 bits, as the default `<W,I>`
fixed-point type behaves. Nothing saturates.

**Memories.**
* `cell_memory` is one RAM per PE holding 15 cells × 256 entries. An entry is
  26 bits: local x and y (4 bits each), polarity, and the low 17 bits of the
  timestamp. Each cell is a ring buffer. Slots `0 .. fill−1` are valid, and
  when the cell is full a new event overwrites the oldest one. The OVERFLOW
  register counts these overwrites. The depth of 256 is this design's choice:
  the publication only says the memory size can be raised for the
  application. N-CARS samples hold up to about 18 000 events per 100 ms, or
  about 150 per cell on average, so only unusually busy cells overflow.
* `svm_weight_mem` holds the weights in 25 banks, one per MAC lane. Bank `b`,
  word `g·2 + i` holds bin `i·25 + b` of weight group
  `g = (cell·2 + pol)·NUM_CLASSES + k`.
* `partial_sum_mem` keeps S and Count in registers, so the temporal reset
  clears them in a single cycle.

**Temporal reset.** Every Δt the processor writes `1` to each PE's CTRL
register. The PE applies the reset the next time it is idle, between events:
it empties all cell memories (their fill levels go to zero) and clears all
partial sums and counts. The publication says this reset happens every Δt.
That it comes from the processor over AXI-Lite is this design's choice. Even
without a reset, the spatial filter ignores events older than Δt. The
timestamps kept in memory are 17 bits wide and ages are taken modulo 2^17
µs, so the reset must come at least every 131 ms.

## Programming model

Each PE has a 64 KiB window at byte address `PE · 0x10000` on the AXI-Lite
port. Registers are 32 bits wide.

| offset | access | content |
|---|---|---|
| `0x0000` | W | CTRL: bit 0 = 1 requests a temporal reset |
| `0x0004` | R | STATUS: bit 0 busy, bit 1 reset pending |
| `0x0008` | R | events processed since power-up |
| `0x000C` | R | cell-memory overwrites since power-up |
| `0x0010` | R | `[15:0]` cells in this PE, `[31:16]` classes |
| `0x1000 + 4·(c·NUM_CLASSES + k)` | R | partial sum of local cell `c`, class `k` (sign-extended `<24,12>`) |
| `0x2000 + 4·c` | R | Count of local cell `c` |
| `0x8000 + 4·w` | W | weight with flat index `w = ((c·2 + pol)·NUM_CLASSES + k)·49 + z` |

Global cell `l` is local cell `l / NUM_PE` of PE `l mod NUM_PE`. Addresses
past the last PE return DECERR. The processor is expected to:

1. Load all weights once. With the defaults that is 120 × 2 × 49 = 11 760
   writes.
2. For each sample: send its events through the DMA, then poll EVENTS on
   every PE until the total equals the number of events sent in the frame.
3. Read every S and Count. Compute `score[k] = Σ S/Count` over the cells
   with a nonzero count, add the bias, and pick the class.
4. Write CTRL = 1 to every PE before the next sample.

Step 3 is the "normalisation and boundary decision" of the publication, which
runs on the processor and is not RTL here.

## Parameters

| parameter | default | origin |
|---|---|---|
| `FRAME_M`, `FRAME_N` | 120, 100 | published |
| `CELL_K` | 10 | published |
| `RHO` | 3 | published |
| `DELTA_T_US` | 100 000 | published (100 ms) |
| `TAU_US` | 10^9 | published (10^6 ms) |
| `NUM_PE` | 8 | published |
| `TOTAL_W` | 24 (integer bits fixed at 12) | published; 19–23 are the other precisions the publication compares |
| `MAC_ITERS` | 2 (gives 11 cycles per iteration) | published |
| `MEM_DEPTH` | 256 events per cell | own choice |
| `NUM_CLASSES` | 1 (binary car / background) | own choice |
| `FIFO_DEPTH` | 16 | own choice |

Limits of the fixed formats: coordinates are at most 127, so
`FRAME_M, FRAME_N ≤ 128`; `CELL_K ≤ 16`; `DELTA_T_US < 2^17`. The cycle count
of an iteration is `6 + clog2(LANES)`, which is 11 only when `LANES` is 17–32.

## How far it can be trusted

Every block has a self-checking testbench. Each testbench compares the
block's outputs with values computed independently in the testbench.
`tb/hats_ref_pkg.sv` is a bit-exact software model of the whole algorithm:
ring buffers, kernel, truncation and wrap-around. Both end-to-end testbenches
check every partial sum and count against it:

* `tb_hats_top` uses a reduced configuration: a 40 x 30 frame, 4 PEs, 2
  classes, 8-entry cell memories, Δt = 1 ms and τ = 4 ms. It streams three
  windows of 400 events and checks that these all occur at least once: FIFO
  back-pressure, cell-memory overflow, expired events, kernel decay, temporal
  reset, out-of-frame events and the AXI-Lite decode error.
* `tb_hats_top_full` runs every parameter at its default. It loads all 11 760
  weights and streams two 100 ms windows, with a temporal reset after each.
  The first has 3000 events and the second 18 000, which is the largest
  N-CARS sample size. The events are clustered, so a few cells get many
  events. The first window takes about 77 000 cycles, about 3.9 Mevents/s
  at 100 MHz. The second takes about 975 000 cycles, about 1.8 Mevents/s,
  because busy cells hold up to 256 events and each scan reads all of
  them. The publication reports 2.94 Mevents/s on N-CARS. These are random
  events, not N-CARS samples, so the numbers are not directly comparable.
* `tb_hats_pe` also checks the per-event period `F + 3 + 23·NUM_CLASSES`.
  `tb_cwts_mac` checks the 22-cycle MAC latency.

Not checked here:

* Timing closure at 100 MHz.
* FPGA resource use. The publication's table (192 DSPs, 98 BRAMs for 8 PEs)
  comes from an HLS build, and this RTL was not synthesised for a Zynq.
* Classification accuracy on real N-CARS data. No dataset or trained weights
  are included, and the testbenches use random weights.

Where this design departs from the publication, or fills a gap it leaves:

* The per-event schedule (a sequential memory scan, then the MAC) is this
  design's own. The published PE was written in HLS, and its schedule is not
  given.
* Cell memories are bounded (256 events) and overwrite their oldest entry
  when full.
* The timestamp travels in TUSER rather than inside the 24-bit AER word.
* The published option of coarser 10 or 100 µs timestamps is not built. The
  memory keeps 1 µs timestamps.
* The published PE reaches its larger memories through a memory port to
  BRAMs outside the HLS core, which the publication calls a shared BRAM
  architecture. Here the cell memory, weight memory and partial-sum memory
  are arrays inside each PE. They map to block RAM in the same way, and the
  function is the same.
* The AER bit layout, the cell-to-PE assignment, the AXI-Lite register map
  and the FIFO depth are not published. This design chooses them.
* Normalisation by the cell counts and the final decision are left to
  software, as in the publication. That software is not included.

## Simulating

All files are plain SystemVerilog-2017. Packages must come first, and
`-Wno-fatal` keeps lint warnings from stopping the build:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/hats_pkg.sv tb/hats_ref_pkg.sv rtl/*.sv tb/tb_hats_top.sv \
    --top-module tb_hats_top
./obj_dir/Vtb_hats_top
```

Replace `tb_hats_top` with any testbench in `tb/`. Every testbench prints one
line, `TB_RESULT checks=N failures=M`, and has a watchdog. The end-to-end
bodies live in `tb/hats_top_test.svh`, shared by the reduced and the
full-size testbench. `tb/axil_bfm.svh` holds the AXI-Lite master tasks.

## Files

`rtl/`: `hats_pkg` (types, defaults, register map), `axis_event_router`,
`axis_event_fifo`, `axil_interconnect`, `hats_pe`, `cell_memory`,
`spatial_filter`, `time_surface`, `svm_weight_mem`, `cwts_mac`,
`partial_sum_mem`, `pe_axil_regs`, `hats_top`.
`tb/`: one `tb_<module>.sv` per module, plus `tb_hats_top_full.sv`,
`hats_ref_pkg.sv`, `hats_top_test.svh` and `axil_bfm.svh`.
