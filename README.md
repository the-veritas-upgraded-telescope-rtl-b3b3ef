# A pattern trigger for a 499-pixel Cherenkov telescope camera

An imaging atmospheric Cherenkov telescope sees a gamma-ray air shower as a
compact flash, a few nanoseconds long, that lights a small group of adjacent
camera pixels. Night-sky light also makes single pixels fire, but at random
times and in random places. Each pixel's discriminator (the "L1" trigger) gives
a 13 ns pulse when its photomultiplier pulse crosses a threshold. The
telescope-level trigger ("L2", or pattern trigger) keeps only events in which
**a pixel and at least two of its neighbours fire together**. The narrower the
time window for "together", the fewer accidental night-sky coincidences get
through, and the lower the discriminator thresholds can be set. That in turn
lowers the telescope's energy threshold.

The trigger described here is the FPGA-based L2 crate of the VERITAS
telescopes. It has two parts:

* **L1.5 region processors** (three boards). Each board first gives every
  pixel signal its own programmable delay, so that all pixels of the camera
  arrive aligned to a fraction of a nanosecond. It then evaluates the 3-fold
  neighbour rule. A programmable minimum overlap, called **detune**, sets the
  coincidence gate width.
* **An L2 telescope processor.** It ORs the three boards into one telescope
  trigger for the array-level (L3) trigger. It also carries a prescaler, two
  TDCs used to measure pixel timing during alignment, and a unit that computes
  image moments of the hit pattern.

A control register file gives software access to every setting and read-back
value.

The SystemVerilog in `rtl/` implements all of the digital functions above. The
parts with no logic of their own are left out and show up as the top's ports:
the discriminators, the ECL-to-LVDS input cards, the pixel distribution
backplane, the clock source and the fibre link to a future topological trigger.

## Time base: a clockless trigger written as clocked RTL

The real coincidence logic is asynchronous. L1 levels travel through FPGA delay
elements and gates and are never sampled, so the trigger reacts as soon as the
pulses overlap. Clocked RTL cannot express that, so this design models it in
discrete time:

* one clock cycle (a **tick**) stands for **one 72 ps delay step**, the
  alignment step of the L1.5 FPGAs;
* a 13 ns L1 pulse is **180 ticks** long;
* the delay range of about 10 ns is **139 settings** (0 to 138 ticks, that is
  0 to 9.94 ns).

Every latency quoted below is in ticks. The model is functionally exact at
72 ps resolution. It is not a proposal to clock an FPGA at 13.9 GHz: a hardware
build would implement `pixel_delay` with delay primitives and `coinc_cell` with
asynchronous logic, and would keep only the control, monitoring and L2
functions clocked.

## Camera geometry and the three regions (`l2trig_pkg`)

The design needs a camera map, and none is published. The package builds one
from a hexagonal grid in axial coordinates (q, r):

* pixel 0 is the centre;
* rings 1 to 12 are complete, giving 1 + 3·12·13 = 469 pixels;
* the remaining 30 pixels sit on ring 13, five centred on each of its six sides.
  These are the ring-13 positions closest to the centre.

Numbering runs ring by ring. Within a ring it goes side by side, starting at the
corner (−k, +k). The neighbour directions 0 to 5 are (+1,0), (+1,−1), (0,−1),
(−1,0), (−1,+1) and (0,+1). All of this is computed by constant functions
(`pix_q`, `pix_r`, `pix_index`, `nbr_index`) at elaboration time, so no table
files are needed. The same functions serve smaller cameras: `NPIX = 37` gives
three full rings, which the faster testbenches use.

**Regions.** The camera is split into three 120° sectors, with boundaries along
the grid axes at 0°, 120° and 240° (`pix_sector`). Each L1.5 board **owns** the
pixels of its sector. It **receives** those pixels plus every pixel adjacent to
one of them (`in_region`). This one-pixel overlap band is copied to two boards,
and the centre pixel to all three. As a result, every cell whose centre a board
owns is complete on that board, and no 3-fold pattern can fall into a gap
between boards. A pixel in the band is also the centre of a cell on each board
that receives it. That cell may lack neighbours that the board does not
receive, but the owning board always has the complete cell. With 499 pixels the
boards receive 193, 191 and 191 pixels.

## The coincidence cell and detune (`coinc_cell`)

Each received pixel is the centre of one cell: itself and up to six neighbours.
The cell's condition is

    coinc = centre AND (at least 2 of the 6 neighbours)

Any two neighbours count; they need not be adjacent to each other. A run
counter counts the consecutive ticks for which `coinc` has held. The cell fires
once the overlap has lasted **detune + 1** ticks:

    trig(t+1) = coinc(t) AND run(t) >= detune       run = ticks coinc already held

Two pulses of width W = 180 ticks, offset by Δ, overlap for W − Δ ticks, so the
cell fires when Δ ≤ W − detune − 1. Raising detune therefore narrows the widest
time difference accepted, which is the coincidence gate:

| gate     | ticks | detune |
|----------|-------|--------|
| ~9 ns    | 125   | 54     |
| 8 ns     | 111   | 68     |
| 5 ns     | 69    | 110    |
| 3 ns     | 41    | 138    |

detune is 8 bits wide, so all of these fit. The counter is only the model's way
of measuring overlap. The published trigger describes detune only as an extra
overlap requirement.

## Pixel delay and alignment (`pixel_delay`, TDCs)

Each pixel passes through `pixel_delay`: the L1 level is ANDed with the pixel
enable, then goes through a 139-stage shift register and a tap multiplexer. The
output is `din & en` from 1 + delay ticks earlier. Settings above 138 clamp to
138.

To align the camera, operators flash the camera with an LED calibration
flasher. They then time 3-fold coincidence sets that contain the pixel under
test against two fixed reference sets, one in each of the other two regions.
The delay is adjusted until the pixel sits at the mean of the references. The
hardware support for this is as follows:

* each L1.5 board has a **monitor** output: the coincidence of a programmable
  pixel (`mon_pix`) with a programmable set of its neighbours (`mon_mask`),
  without detune, registered one tick after the delay outputs;
* the L2 board has **two TDCs**. Each time-stamps the first rising edge of its
  start and of its stop input after it is armed, and reports stop − start as a
  signed number of ticks. Start and stop are each chosen from the three board
  monitors or the ORed trigger (`A_TDCSEL`).

The alignment algorithm itself (which patterns, how many repeats, the
averaging) is run in software and is not part of the RTL.

## L1.5 region processor (`l15_region_processor`)

`l15_region_processor` takes the whole camera bus `l1_in`. Only the bits of its
received pixels are used, which models the backplane routing. It instantiates
one `pixel_delay` and one `coinc_cell` per received pixel. Its outputs are:

* `trig`: the registered OR of all cell triggers, the board's trigger bit;
* `mon`: the timing monitor described above;
* `hit`: the aligned L1 levels of the pixels the board owns, zero elsewhere.
  The L2 board ORs the three `hit` vectors into the camera image.

## L2 telescope processor (`l2_telescope_processor`)

* **OR and edge.** Each rising edge of the OR of the three board bits is one
  telescope trigger.
* **Prescaler** (`prescaler`). It passes the N-th, 2N-th, … trigger; N = 0 or 1
  passes all. Prescaling is used for single-telescope muon runs.
* **Output.** Each passed trigger drives `l3_trig` high for `OUT_TICKS` = 139
  ticks (10 ns). Triggers that arrive during the pulse are ignored. A 16-bit
  counter counts the passed triggers.
* **Image moments** (`image_moments`). Each passed trigger captures the camera
  hit pattern. The unit then walks the pixels one per tick and accumulates n,
  Σx, Σy, Σx², Σy² and Σxy, with x = 2q + r (half pixel pitches) and y = r
  (rows). The results are ready NPIX + 1 ticks later. They are meant for a
  topological (image-shape) trigger; the design brings them out as ports,
  because the link to such a processor is not defined.
* **Rate monitor** (`l1_rate_monitor`, instantiated in the top). It counts the
  rising edges of each enabled pixel over a gate of `gate_len` ticks, latches
  the counts at the end of the gate and restarts. The reset gate is 1 ms.

## Control registers (`ctrl_regs`)

A simple synchronous bus stands in for the VME slave logic:

* `wr` writes at the clock edge;
* `rd` returns data with `rvalid` one cycle later;
* an assertion forbids a read and a write in the same cycle.

Word addresses, defined in `l2trig_pkg`:

| address | register |
|---|---|
| 0x000 + p | pixel p: bit 0 enable, bits 15:8 delay (ticks) |
| 0x200 + p | pixel p L1 count in the last gate (read only) |
| 0x400 | detune |
| 0x401 | prescale factor |
| 0x402 | TDC k: start select bits [8k+1:8k], stop select bits [8k+5:8k+4]; 0..2 = board monitor, 3 = ORed trigger |
| 0x403 | write bit 0 = 1: arm both TDCs |
| 0x404 | rate gate length (ticks) |
| 0x405 | bits 15:0 telescope trigger count, bit 16 moments busy |
| 0x408 + k | TDC k: bit 31 valid, bit 30 overflow, bits 15:0 signed ticks |
| 0x410 + g | board g monitor: bits 8:0 pixel, bits 21:16 neighbour mask |
| 0x420 + i | moment i (n, Σx, Σy, Σx², Σy², Σxy), sign-extended |

Reset values: all pixels enabled, zero delays, detune 0, prescale 1, both TDC
selects 0, monitors on pixel 0 with an empty mask.

## Latency at the top (`l2_trigger_top`)

With zero delay and detune 0, a 3-fold overlap that starts at `l1_in` in cycle
t makes `l3_trig` high in cycle t + 4. The four ticks are the delay line, the
cell, the board OR and the L2 output register. A pixel delay d and a detune D
add d + D. Reset is asynchronous and active low; there is one clock.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. They need no files. For example:

    verilator --binary --timing --assert rtl/l2trig_pkg.sv -y rtl tb/tb_l2_trigger_top.sv \
        --top-module tb_l2_trigger_top && obj_dir/Vtb_l2_trigger_top

The testbenches:

* **One per module.** Each checks its module against values worked out inside
  the testbench: hand-worked coordinates, a cycle model, or edge counts.
* **`tb_l2_trigger_top`.** Runs the whole crate on a 37-pixel camera and makes
  every mechanism happen at least once:
  * a 3-fold trigger, with its latency and pulse width;
  * rejection of a 2-fold;
  * an 8 ns gate passing, and a 5 ns gate blocking, a 6.5 ns misalignment;
  * a 100-tick misalignment removed by pixel delays;
  * a disabled pixel;
  * an event seen by two boards in the overlap band;
  * prescaling;
  * a TDC measurement of 37 ticks between two regions' monitor sets;
  * image moments;
  * rate read-back.
* **`tb_gate_width_sweep`.** Sets the detune for gates of 9, 8, 5 and 3 ns
  through the register bus. It then finds, on a 7-pixel camera, the largest
  pulse offset that still triggers, which must equal the gate width in ticks.
* **`tb_l2_trigger_top_full`.** Runs the same test on the full 499-pixel camera
  with every parameter at its default. Its C++ build takes about five minutes,
  because there are some 575 delay lines of 139 stages each; the simulation
  itself takes seconds.

## How far this follows the published design

These parts follow the published description:

* the 499-pixel camera and the three regions with copied overlap pixels;
* the cell rule: the centre and two neighbours;
* detune as an extra required overlap;
* per-pixel delays in 72 ps steps up to about 10 ns, and per-pixel enables;
* the OR on the L2 board;
* the two TDCs, used for alignment against reference sets in the other two
  regions;
* the list of image moments;
* the prescaler, the L1 rate monitors and the control of all of these.

These are choices of this design, because no details are published:

* the pixel map and the sector boundaries;
* the discrete-time model, with one tick per 72 ps;
* the run counter that implements detune;
* the monitor outputs and TDC input selection;
* the hit-pattern path to the L2 board;
* the output pulse width;
* the serial moment computation and its coordinate units;
* the rate gate;
* the register map and bus.

These known departures remain:

* **TDC resolution.** The TDCs resolve one tick (72 ps). The published TDCs
  resolve about 50 ps with an FPGA-specific fine interpolator, which is not
  modelled.
* **No VME protocol.** The VME bus protocol is not implemented; only the
  register file behind it is.
* **No separate clock domains.** The L2 board's role as clock source for the
  L1.5 boards is not modelled; everything runs on one clock.
* **Camera edge.** The pixel map is a plausible hexagonal camera, not the
  telescope's actual map. Pixel numbers and edge shape will differ from it.

The designers mention a muon (ring) trigger and a topological trigger that uses
the moments as possible future upgrades. Neither is built here.
