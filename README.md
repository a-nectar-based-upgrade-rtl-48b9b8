# Trigger and readout logic for a NECTAr-based Cherenkov camera

An imaging atmospheric Cherenkov telescope photographs flashes of blue light a
few nanoseconds long. The camera has to decide within a few hundred nanoseconds
whether a flash is worth keeping. If it is, the camera freezes an analogue
memory holding the recent past of every pixel, digitises a short window of it,
and ships the result. This has to happen while the array's central trigger
decides whether other telescopes saw the same shower.

This RTL models the digital side of such a camera. The camera has 960 pixels
in 60 drawers of 16. Each pixel is stored by a NECTAr chip: a 1024-cell
switched-capacitor ring buffer written at 1 GHz and read by a 12-bit ADC. The
camera's dead-time is set by a hold-off of a few microseconds, not by the
hundreds of microseconds that older designs needed. That is the main point of
the design, and most of the RTL exists to make the hold-off, the accept-or-drop
decision and the readout sequence exact.

The top module is `hess1u_camera`. It holds 60 `drawer`s, the
`analog_trigger_board` (a behavioural model of the analogue sector summators)
and `dib_fpga`, the logic of the drawer interface box (DIB) that sits at the
centre of the camera.

## Time base

Every synchronous block runs on one logic clock. Its period is 1.25 ns, the
step at which the drawer FPGA samples the pixel comparators (800 MHz). All
times in the RTL are in these ticks. A few conversions:

| quantity | ticks |
|---|---|
| 1 us | 800 |
| one NECTAr cell conversion (0.1 us) | 80 |
| fixed trigger and FPGA processing time (4 us) | 3200 |
| hold-off for 32 read cells (7.4 us) | 5920 |

The NECTAr write clock (1 GHz, `clk_sca`) is a second, unrelated clock. It
drives only the write pointer of the chip models. The `stop` signal that
freezes the chips crosses into it through a 2-flop synchroniser.

The real DIB runs from a 10 MHz reference disciplined by GPS. Here it shares
the 800 MHz logic clock, which keeps every count exact and the design simple.

## Pixel trigger (drawer FPGA)

Each pixel's analogue board compares the pulse with a threshold P. The result,
the L0 signal, enters the drawer FPGA:

1. `l0_shaper` synchronises L0 (2 flops) and passes it through a programmable
   delay *d* (0–15 ticks) and a stretch *l* (0–15 ticks). The output at
   tick *t* is the OR of the input over ticks *t*−2−*d*−*l* … *t*−2−*d*.
   The delay lines up pixels with different cable and transit times.
2. `drawer_trigger` splits the 16 shaped signals into two half drawers. Pixel
   *p* sits at row *p*/4, column *p* mod 4, and columns 0–1 form the left half.
   Per half, the block computes one of three values, chosen by the drawer's
   mode register:
   * **majority** (`half_drawer_majority`): the number of active pixels. This
     is the normal camera trigger.
   * **pseudo-sum** (`pseudo_sum`): the summed time over threshold in the last
     5 ns (4 samples). One pixel contributes at most 4 counts.
   * **next neighbour** (`nn_logic`): full scale on both lines while some
     pixel fires together with at least two of its edge neighbours. The
     neighbours come from a table computed at elaboration.
3. The value is clipped to 7 and sent as a 3-bit level (`pam_level`). It
   stands for the pulse-amplitude-modulated LVDS line, which has 8 levels of
   33 mV each.

The logic also counts rising edges of each shaped L0. These are the per-pixel
rate counters, readable over the bus.

## Sector trigger and the sector map

The 120 half-drawer levels are added in 38 overlapping sectors of 64 pixels.
Each sector sum is compared with a common threshold Q. Because Q is set by a
DAC of 0.76 mV per count, Q = 110 (83.6 mV) means "at least 3 active pixels".
`analog_trigger_board` does this arithmetic exactly, in microvolts:
`sum × 33000 > Q × 760`.

The camera description does not give the sector map, only these facts:

* there are 38 sectors of 64 pixels;
* sectors overlap horizontally by half a drawer and vertically by one drawer;
* a half-drawer line feeds up to 4 sectors.

This design uses the following map, which satisfies all three facts. It is
computed by `sector_mask()` in `hess_pkg`.

* The 60 drawers sit in an 8-row × 9-column grid. An L-shaped group of
  3 positions is missing at each corner, so rows hold 5, 7, 9, 9, 9, 9, 7, 5
  drawers.
* A candidate sector is 2 drawer rows by 4 half-drawer columns: 8
  half-drawer slots of 8 pixels, 64 pixels when all are populated.
* Candidates start at every drawer row and at half-columns 0, 3, 6, 9, 12
  and 14.
* A candidate is kept if at least 4 of its 8 slots hold a drawer.

The result is exactly 38 sectors, with no half drawer in more than 4.
`tb_hess_pkg` checks the counts and the overlap rule. If the real map is
known, replacing `sector_mask()` is the only change needed.

The DIB ORs the 38 comparator outputs. The rising edge of that OR is the
camera's level-1 trigger (L1).

## Trigger control, hold-off and the command lines

`dib_trigger_ctrl` implements this protocol. On an L1 that arrives outside the
hold-off:

* **stop** goes to all drawers on the shared readout-control line. Every
  drawer freezes its NECTAr chips and reads its region of interest.
* **active** goes to the array's central trigger.
* the hold-off timer starts.

The hold-off is t_b = 4 µs + (n + n/16) × 0.1 µs, where n is the number of
NECTAr cells read: 16 stale cells plus the ROI length. For the normal 16-sample
ROI, n = 32 and t_b = 7.4 µs (5920 ticks). The camera description prints this
formula with the unit "ns". The numbers only make sense in microseconds: the
measured dead-time is about 7.2 µs. The RTL uses µs.

An L1 inside the hold-off sends **busy** to the central trigger and nothing to
the drawers. An **accept** from the central trigger inside the hold-off is
forwarded once to the drawers. Later accepts and those outside the hold-off
are ignored. The source can be switched from L1 to the SPE light pulser's
trigger input for calibration (`src_spe`).

Both links carry commands as pulse lengths (`pulse_len_encoder` and
`pulse_len_decoder`):

| code k | pulse (high) | drawer line | fibre to/from central trigger |
|---|---|---|---|
| 0 | 8 ticks | stop | active |
| 1 | 16 ticks | accept | busy |
| 2 | 24 ticks | – | accept |

Each pulse is followed by at least 8 low ticks. The decoder accepts ±2 ticks
and flags other lengths as errors; the drawer counts those errors. The
encoding idea ("length-encoded stop") is from the camera description. The
actual lengths are this design's.

## NECTAr chip model and the region of interest

`nectar_chip` is a behavioural model of one chip, with two channels (high and
low gain). The analogue input arrives as the 12-bit code it will convert to.
The chip works like this:

* While running, it writes one cell per 1 GHz edge in a circle of 1024 cells.
* **stop** freezes the writing. `rd_start` then latches the read address as
  (last written cell + Nd) mod 1024, so the ROI begins L = 1024 − Nd cells
  before the stop. With the default trigger latency L = 40 ns, Nd = 984.
* Each `rd_conv` converts one cell. The first 16 conversions return stale
  values, from the previous readout. This models the chip version whose first
  16 read cells must be discarded, hence the 16 in n.
* Each of the 16 analogue lines has its own offset DAC. Cell c gets
  `line_dac[c mod 16]` added and is clipped to 0..4095.

`roi_readout` drives the 16 chips of a drawer together:

1. Assert `sca_stop`, wait 4 ticks, then issue `rd_start`.
2. Issue n conversions, one every 80 ticks, with an idle slot after every
   16th. The readout therefore lasts about (n + n/16) × 0.1 µs, the readout
   term of t_b.
3. Drop the 16 stale samples.
4. Store up to 48 ROI samples per channel and gain in the waveform memory.
5. Sum 16 samples from `int_start` into a 16-bit charge (16 × 4095 fits).
6. Release the stop and pulse `done`.

## Keeping or dropping an event, and the drawer FIFO

`event_builder` holds each event for the hold-off time, counted from the stop.
If an accept arrives before the hold-off ends, the event is copied as 16-bit
words into the drawer FIFO (`sync_fifo`, 4096 words). An accept that arrives
during the readout is remembered. If no accept arrives, the event is dropped.

Each kept event is written as:

```
{4'hE, event_number[11:0]}
16 high-gain charges, 16 low-gain charges
waveform mode only: for each ROI sample, 16 high-gain then 16 low-gain samples
```

In waveform mode, an event is 1 + 32 + 32 × ROI words: 1569 for the maximum
ROI of 48. When the FIFO is full, the builder stalls. A stop that arrives while
an event is still being copied out is dropped and counted (`n_lost`).

The drawer's ARM computer reads everything over a 16-bit memory bus
(`drawer_regs`):

| address | register |
|---|---|
| 0x000 | ctrl: [1:0] trigger mode (0 majority, 1 NN, 2 pseudo-sum), [2] waveform mode, [3] clear L0 counters |
| 0x001 | ROI length (reset 16) |
| 0x002 | first integrated sample |
| 0x003 | hold-off in ticks (reset 5920) |
| 0x004 | FIFO data; a read pops one word |
| 0x005 | FIFO word count |
| 0x006–0x009 | accepted, discarded, lost-stop and command-error counters |
| 0x010+p | L0 delay of pixel p |
| 0x020+p | L0 stretch of pixel p |
| 0x030+p | L0 counter of pixel p |
| 0x040+p | Nd of chip p |
| 0x100+16p+k | line DAC k of chip p |

A bus access is one tick with `bus_cs` high. Read data is valid on the
following tick.

## Other DIB functions

* `event_timestamp` counts ticks since the last GPS pulse-per-second edge. It
  keeps a seconds count, loaded from the GPS message and advanced by the
  PPS, and latches both on every trigger. The GPS serial message itself is not
  decoded: its format is not known here, so the seconds arrive on a parallel
  input.
* `interlock` drives the one remote-controlled relay, which opens the front
  lid:
  * An open request in remote mode opens the lid only without an alarm.
  * An alarm closes it. The alarms are power failure, smoke, ventilation
    fault, low air pressure, or strong ambient light with the lid open.
  * Every relay change is preceded by 3 s of air horn.
  * Local mode releases the relay.
  * Drawer power is enabled only without smoke and with ventilation working.

  The sensor names follow the camera's interlock diagram. The exact alarm
  list and the power rule are this design's.

## Module tree

```
hess1u_camera
├── drawer ×60
│   ├── drawer_fpga
│   │   ├── drawer_trigger ── l0_shaper ×16, half_drawer_majority ×2, pseudo_sum ×2, nn_logic
│   │   ├── pulse_len_decoder
│   │   ├── roi_readout
│   │   ├── event_builder
│   │   ├── sync_fifo
│   │   └── drawer_regs
│   └── nectar_chip ×16              (behavioural model)
├── analog_trigger_board            (behavioural model)
└── dib_fpga
    ├── dib_trigger_ctrl ── pulse_len_decoder, pulse_len_encoder ×2
    ├── event_timestamp
    └── interlock
```

`hess_pkg` holds the shared constants, types, the hold-off formula and the
sector map.

Outside the RTL, and brought out as ports, are:

* the PMTs and analogue boards (L0 and the two gain signals);
* the ARM computers (the bus ports);
* the central trigger (the fibre lines);
* the GPS receiver;
* the ventilation and pneumatics controllers (status contacts);
* the calibration light sources (the SPE trigger).

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself through a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_drawer \
    -y rtl rtl/hess_pkg.sv tb/tb_drawer.sv
obj_dir/Vtb_drawer
```

* `tb_camera` runs the whole camera with its 60 drawers. It uses a 64-word
  FIFO, so that a 48-sample waveform event overflows it, and a 50-tick horn.
  It counts each mechanism and fails if any never happened:
  * majority L1 and a sub-threshold pattern that must not fire;
  * busy during hold-off, and the exact hold-off length;
  * accepted and discarded events;
  * NN and pseudo-sum modes, and the SPE trigger source;
  * waveform mode with FIFO stall;
  * timestamps;
  * interlock horn and alarm.
* `tb_camera_full` runs the top with every parameter at its default. One event
  goes from L0 to the data of all 60 drawers, and the 5920-tick hold-off is
  checked. Building it takes a few minutes; the simulation takes seconds.
* The pixel inputs in these tests are constant per pixel. Charges and samples
  are then known exactly wherever the ROI lands in the ring buffer. The
  NECTAr unit test uses a ramp to check the ROI position and the stale cells.

## How far to trust it, and where it departs from the camera

Follows the camera description:

* the 800 MHz L0 sampling with delay and stretch;
* the three drawer trigger algorithms and the 8-level trigger lines;
* 38 sector sums against Q, with 33 mV per level and 0.76 mV per Q count;
* the OR into L1 and the stop/active/busy/accept protocol;
* the hold-off formula;
* the 1024-cell ring buffer with Nd, 16 stale cells and 16 line DACs;
* a 16-sample charge and waveforms of up to 48 samples;
* 0.1 µs per cell;
* the 16-bit drawer bus;
* the interlock's sensors and the horn.

This design's own choices:

* the sector map (see above);
* the pixel-to-half assignment;
* NN = 3 edge-connected pixels;
* the pulse lengths of the commands;
* the register map and event word format;
* the FIFO depth (4096 words);
* one logic clock for drawer and DIB;
* the idle slot as the form of the n/16 readout overhead;
* the rule that an accept outside the hold-off is ignored;
* the alarm list.

Not modelled:

* analogue behaviour: noise, pulse shapes, bandwidth, the NECTAr's real ADC
  timing;
* the GPS serial protocol;
* the drawer's other monitoring and control (PMT currents, high voltage),
  the DIB's front position LEDs, its trigger output to the flat-fielding
  light source and the 10 MHz clock distribution to the
  drawers;
* the central trigger's two-telescope coincidence (80 ns window), which the
  testbenches replace by answering "active" with "accept" on demand;
* the power distribution box firmware;
* the software on the ARM computers and the camera server;
* network transfer, which the camera description names as the actual rate
  limit (about 10 kHz on 1 Gb/s, above 50 kHz on 10 Gb/s).

The logic alone would allow one event per 7.4 µs.
