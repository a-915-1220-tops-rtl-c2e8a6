# EBBI processor: in-memory restoration and region proposal for event-camera frames

A neuromorphic vision sensor (NVS) reports pixel changes as address events.
Accumulated over a frame period they form an *event-based binary image*
(EBBI): mostly black, with moving objects drawn as clusters of white pixels,
scattered noise pixels, and objects broken into fragments where smooth
surfaces (a car window) fire no events. Before a tracker can use such a frame
it needs two things: the noise removed and the holes filled (*image
restoration*, IR), and a short list of bounding boxes around the objects
(*region proposal*, RP).

This design does both inside the frame memory. The 320 x 240 frame is held in
an array of hybrid SRAM/DRAM cells. Each cell can

* store a bit statically (SRAM mode) or as charge on a capacitor (DRAM mode);
* share charge with its four neighbours through two diffusion transistors
  gated by a global *diffusion enable* DE. The array is then a 2-D RC network:
  an isolated '1' spreads out and falls below the inverter threshold, a '0'
  surrounded by '1's is pulled above it. Re-digitising the cells afterwards
  denoises the frame and fills small holes in one global, parallel step;
* drive a current onto a row line PL_H or a column line PL_V when the
  orthogonal line is pulled up. A floating line collects the current of every
  '1' cell on it, and a sense amplifier compares it with a reference, so one
  step projects the whole frame (or any band of it) onto an axis.

A digital controller turns those projections into boxes with an iterative
search and then cleans the list up. This repository gives synthesizable RTL
for the digital part and cycle-level behavioural models for the mixed-signal
parts (the cell array and the projection detectors), so the whole chip can be
simulated with Verilator.

## Block diagram

```
 sensor ──AER handshake──► aer_decoder ──► async_fifo (128 x 32) ──► cram_controller
   (aer_clk domain)          x, y            clock crossing             │  modes CLEAR/WRITE/IR/RP
                                                                        │  iss_engine + run_extractor
                                                                        │  rp_update
                                   row_decoder ◄── write/read address ──┤
                                   col_decoder ◄──                      │
                                         │                              │ PU/PD per line, SW, DE
                                         ▼                              ▼
                                   cram_array (320 x 240 + dummy ring, behavioural)
                                         │ PL_H levels (240), PL_V levels (320)
                                         ▼
                          proj_detector x 240 (rows), x 320 (columns) ──► detections
```

`ebbi_processor` is the top level. All files are in `rtl/`, one module or
package per file; `cram_pkg` holds the sizes, the box type `box_t`, the mode
enum `mode_e`, the configuration record `cfg_t` and the line codes.

## The cell array model (`cram_array`)

The real array is analog; the model keeps what matters to the digital side
and reduces it to fixed point, one step per clock.

* **Voltage.** Each cell holds an 8-bit voltage (0 = GND, 255 = VDD); the
  stored bit is the top bit. A ring of dummy cells surrounds the array so that
  edge cells see the same surroundings as the centre; the dummies are cleared
  with the array, never written, and diffuse like the others. The outer edge
  of the ring exchanges no charge.
* **SRAM mode** (`sw_en` = 1, the latch switch closed): every cell is restored
  to 0 or 255 each clock (threshold 128). Writes and row reads happen only
  here.
* **Diffusion** (`sw_en` = 0, `de` = 1): each clock every cell moves by
  `alpha * (N + S + E + W - 4 * self)` with `alpha = (de_amp + 1) / 16`,
  rounded down. `de_amp` stands for the DE pulse *amplitude* (how strongly the
  diffusion transistors conduct), the number of clocks with DE high for the
  pulse *width*, and the controller can issue several pulses. With `de_amp` =
  3 and a 1-clock pulse, a lone pixel drops from 255 to 0, a hole inside a
  solid area rises to 255, an edge pixel keeps 191 and a convex corner falls to
  127 and is lost: noise disappears, boxes keep their extent.
* **Re-digitisation.** When the switch closes again the first inverter reads
  every cell against half VDD.
* **Projection.** Each line has a pull-up and a pull-down device, set by a
  2-bit code `{PU, PD}`: pull-down `11`, pull-up `00`, floating `10` (PU drives
  a PMOS). A floating line gains, each clock, one unit per '1' cell whose
  orthogonal line is pulled up, saturating at 255, i.e.
  `V_PL = t_proj * (I_cell / C_PL) * sum(data)` with one unit per cell and
  clock. A pulled-down line is at 0, a pulled-up one at 255.

`proj_detector` models the sense amplifiers: the 4-bit Vref code `k` stands
for the level `16 k`, and a line is detected when its level is above that. With
`t_proj` = 4, code 0 detects any line with at least one '1' cell, code 1 needs
five, and so on. The outputs are registered.

## Region proposal, phase 1: iterative and selective search (`iss_engine`)

The search alternates between the two axes:

1. Project the whole frame onto x (all rows pulled up, all columns floating).
   Every run of consecutive detected columns is a box spanning all rows.
2. For every box of the previous iteration, project onto the other axis: the
   lines of the box's range on the driving axis are pulled up, the lines of
   its range on the sensed axis float, everything else is pulled down. Every
   run of detected lines becomes a child box: the run on the sensed axis, the
   parent's range on the other.
3. Stop when an iteration finds as many boxes as the one before it (or finds
   none, or `MAX_ITER` = 8 iterations have run). The last list is the result.

Two objects that share columns but not rows are merged by step 1 and split
apart by step 2; a third iteration then trims each to its own columns.

**Projection schedule.** One projection takes `t_proj + 4` clocks, 8 at the
default `t_proj` = 4:

| cycle   | state   | lines                                                   |
|---------|---------|---------------------------------------------------------|
| 1       | PREP    | all pulled down; fetch the box                          |
| 2       | RESET   | all pulled down (line levels cleared)                   |
| 3 .. 6  | PROJ    | driving lines of the box pulled up, sensed lines float  |
| 7       | SENSE   | driving lines pulled down, sensed lines hold; SAs latch |
| 8       | EXTRACT | detections go to the run extractor, first run appended  |

**Run extraction** (`run_extractor`) returns the lowest run of a detection
vector in one clock without scanning: with `low = r & -r`, `r + low` clears
the lowest run and carries into the bit above it, so the run is
`r & ~(r + low)`, its start is the index of `low` and its stop the index of
the carry minus one. Further runs come out one per clock *while the next
projection is already running*, into a second list bank (the two banks swap
every iteration). If a projection yields more than 8 runs the extractor is
still busy when the next projection reaches EXTRACT, and that projection
waits (`stall`). At the end of an iteration the stop test is made in the
EXTRACT cycle of the last box when no run is pending, else as soon as the
extractor drains.

**Timing.** With N objects that each split no further after the first
projection, the search is one projection plus N projections: exactly
**8N + 8 cycles**. An empty frame costs 8 cycles. Boxes that need more
iterations or many runs per projection cost more.

Lists hold `MAX_OBJ` = 16 boxes; a run that finds its list full is dropped and
`overflow` is set.

## Region proposal, phase 2: update (`rp_update`)

The search can report a noise cluster as a box and an object as several
fragments. The update walks the box list once:

* a box whose area (width x height) is not above `size_min` is dropped;
* the first surviving box is kept;
* a later box is compared with every kept box at once. The gap on one axis is
  the number of empty lines between the two intervals (0 if they overlap). If
  both gaps are below `slot` for some kept box, the new box is merged into the
  first such box (the kept box becomes the union); otherwise it is kept.

It takes 2 cycles per box plus 1. With the controller's hand-over cycles the
whole RP command takes **10N + 12 cycles** (`rp_cycles`) for N boxes found in
the minimum search time.

## Controller and operating modes (`cram_controller`)

Commands use a valid/ready handshake (`cmd_valid`, `cmd`, `cmd_ready`); a
frame is normally processed as CLEAR, WRITE, IR, RP. The output `mode`
shows the last command accepted.

| mode  | what happens                                                                                     |
|-------|--------------------------------------------------------------------------------------------------|
| CLEAR | one clock of global clear                                                                        |
| WRITE | one event per clock from the FIFO, written as a '1' at (x, y); stays active until the next command |
| IR    | `de_pulses` times: switch open (1 clock), DE high for `de_width` clocks, switch closed (1 clock)   |
| RP    | search, then update; `rp_done` pulses at the end with `rois[0 .. roi_cnt-1]` valid                 |

While WRITE is active a new command is accepted only when the FIFO is empty,
so a frame is always complete before it is processed. Outside RP all
projection lines are pulled down; the latch switch is closed except during a
diffusion pulse.

Configuration (`cfg_t`, held steady by the user):

| field       | bits | meaning                                         |
|-------------|------|-------------------------------------------------|
| `de_width`  | 8    | DE pulse width in clocks                        |
| `de_pulses` | 4    | number of DE pulses                             |
| `de_amp`    | 2    | DE amplitude code (diffusion strength)          |
| `vref`      | 4    | Vref DAC code of the sense amplifiers           |
| `t_proj`    | 4    | projection time in clocks (8-cycle projection at 4) |
| `size_min`  | 16   | largest area treated as noise                   |
| `slot`      | 8    | merge when both gaps are below this             |

## Event input (`aer_decoder`, `async_fifo`)

The sensor uses a four-phase handshake with active-low request and
acknowledge and a bundled 17-bit address `{y[7:0], x[8:0]}`. The decoder runs
on the sensor's clock, synchronises the request, writes `{15'b0, y, x}` into
the FIFO and acknowledges; it holds the acknowledge back while the FIFO is
full, which stalls the sensor. The FIFO is 128 x 32 bits, dual-clock, with
Gray-coded pointers and show-ahead read data. An event reaches the controller
about three `sys_clk` cycles after its acknowledge, so a command that closes a
frame should wait that long after the last event.

The image can be read back 32 bits at a time (`rd_en`, `rd_row`, `rd_word`;
`rd_data` on the next clock), mainly for testing.

## Where this RTL departs from the chip, and how far to trust it

Taken from the chip: the array size, the 128 x 32 FIFO, the cell's operating
modes (storage, diffusion, projection), the pull-up/pull-down codes, the
4-bit Vref, the three IR knobs (pulse width, amplitude, count), the four
command modes, the search and its stop rule, the update's noise, first-object,
gap and merge steps, and the 8N + 8 / 10N + 12 cycle counts.

Chosen here, because nothing more specific was available:

* the whole analog behaviour: 8-bit voltages, the explicit diffusion step and
  its `alpha`, half-VDD thresholds, no leakage, no mismatch, no dependence of
  diffusion speed on position beyond the array boundary, a linear DAC;
* the 8-cycle projection schedule, the pipelined run extraction and its stall,
  the two list banks, `MAX_OBJ` = 16 and `MAX_ITER` = 8;
* area as the size measure, one `slot` for both axes, merging into the
  lowest-numbered qualifying box, merging only once per box;
* DRAM mode only as a hold state (switch open, DE low) with no leakage:
  writes and reads always use SRAM mode;
* the AER protocol details and word format, the FIFO design, the command
  handshake, the IR pulse framing and the read-out port.

The cell array and the detectors are behavioural: they are written as
ordinary clocked SystemVerilog and simulate fast, but they stand for a
mixed-signal macro, not for logic to be synthesized. Everything else is
synthesizable RTL. Power, energy efficiency and supply scaling are outside
the model.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. They need only Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/cram_pkg.sv \
          tb/tb_ebbi_processor.sv --top-module tb_ebbi_processor -o sim
obj_dir/sim
```

| testbench            | what it shows                                                              |
|----------------------|----------------------------------------------------------------------------|
| `tb_row_decoder`, `tb_col_decoder` | exhaustive decode, word read-out                              |
| `tb_aer_decoder`     | handshake, address split, backpressure while the FIFO is full              |
| `tb_async_fifo`      | fill to exactly 128, random streaming across unrelated clocks              |
| `tb_cram_array`      | write/read, projection levels, diffusion against an integer reference, noise removal and hole filling |
| `tb_proj_detector`   | SA threshold for all Vref codes                                            |
| `tb_run_extractor`   | runs of random vectors against a bit scan                                  |
| `tb_iss_engine`      | search results against a software search; 8N + 8 cycles for N = 0..7; a third iteration; stall; overflow |
| `tb_rp_update`       | random lists against a software model of the update; 2N + 1 cycles         |
| `tb_cram_controller` | all four modes on a 48 x 32 array; write hold; DE cycle count; 10N + 12    |
| `tb_ebbi_processor`  | the full 320 x 240 chip from AER events to regions, three frames; counts FIFO backpressure, write hold, DE pulses, extractor stalls, list overflow, merging, noise removal and a third search iteration |

Three further testbenches run the evaluations the chip was measured with,
all on the full 320 x 240 processor:

| testbench            | what it shows                                                              |
|----------------------|----------------------------------------------------------------------------|
| `tb_exec_time`       | proposal time for N = 0..7 separable objects: exactly 8N + 8 search cycles and 10N + 12 in total; stacked objects take longer |
| `tb_diffusion_speed` | a 4 x 4 blob of ones in an empty frame vanishes after 25 DE cycles at the centre and 29 in the corner |
| `tb_traffic_f1`      | synthetic traffic frames (vehicles split by an event-free window, plus noise): F1 at IoU 0.3/0.5/0.7 is 0.667/0.667/0.000 for the search alone and 1.000 with the update; F1 stays 1.000 over three DE amplitudes times three DE widths |

The frames in `tb_traffic_f1` are generated by the test, so its scores say
that the update does what it is meant to, not what accuracy the chip reaches
on recorded traffic. The mapping of the chip's three resistance and three
diffusion-time settings onto `de_amp` 1..3 and `de_width` 1..3 is this
design's own.

The full-size end-to-end test runs in well under a minute; `tb_traffic_f1`
takes about as long as all the others together. Smaller arrays
are obtained through the `W`, `H` and `NOBJ` parameters of the lower blocks;
the top level always uses the sizes in `cram_pkg`.
