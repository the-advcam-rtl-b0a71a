# Front-end board trigger and readout logic for a 7987-pixel SiPM Cherenkov camera

The AdvCam is a proposed camera for the Large-Sized Telescopes of the Cherenkov
Telescope Array Observatory. Its focal plane has 7987 hexagonal SiPM pixels in
163 modules of 49 pixels. Every pixel is amplified and digitised continuously at
1 GS/s. No analogue trigger is used: each module's front-end board (FEB) decides
from the digital samples whether something worth keeping has happened. It does
this together with the boards of the six surrounding modules, so that no part of
the camera is blind to a shower that crosses a module border. The board also
keeps the raw samples long enough for a central trigger processor (CTPB) to make
a camera-wide decision. When that decision is positive, the board ships the
samples of the event to the acquisition servers over the network.

This repository gives synthesizable SystemVerilog for the digital part of one
FEB, `advcam_feb`, and testbenches for it. The camera-level idea (flower sums,
neighbour exchange, L1 regions, binary stream, 6 µs buffer, trigger-prompted
transfer) follows the published description of the camera. That description
gives the functions but almost none of the formats, widths or timings. Those
are this design's own choices, and each one is named below and in the header
comment of its file.

## Pixels, flowers and modules

Seven pixels (a central one and its six neighbours) form a *flower*. Seven
flowers form a *super-flower* of 49 pixels, which is one module. In the RTL:

| item | count | numbering in this design |
|---|---|---|
| pixels per module | 49 | pixel `p`, 0..48 |
| flowers per module | 7 | pixels `7f .. 7f+6` form flower `f` |
| neighbouring modules | 6 | `nb_fsum[n]`, n = 0..5 |
| flower sums seen by one board | 49 | source `s`: `s = f` for its own flower `f`, `s = 7(n+1) + f` for flower `f` of neighbour `n` |

The board does not know the hexagonal geometry. Pixel-to-channel wiring fixes
which pixels form a flower. The region masks (below) fix which flowers count as
adjacent. Both are outside the logic.

## Data path of one board

```
 SARs x8 ─► fadc_ti_mux (x49) ─► pix[49] ─┬─► flower_sum ─► fsum_out[7] ─┬─► to the 6 neighbours
                                          │                              ├─► flower_stream ─► flower_bits[7] ─► CTPB
                                          │   nb_fsum[6][7] ────────────►└─► l1_trigger ─► l1_trig ─► CTPB
                                          │                                  {flower_bits, l1_trig} ─► rate_counter
                                          └─► event_buffer (6000 frames) ◄─► readout_ctrl ◄── ctpb_trig
                                                                                  └─► event stream ─► network core
```

The whole board runs on one clock, with one sample of every pixel per clock
(1 GS/s means a 1 GHz clock). That keeps the logic easy to read and check.
A real FPGA would more likely process several samples per clock at a lower
clock rate. That change would widen every datapath by the same factor but
would not change the structure.

Latencies, counted from the clock in which a pixel's sample is taken from its
SAR:

| signal | clock |
|---|---|
| `pix` (sample leaves the mux, is written to the buffer) | +1 |
| `fsum_out` (flower sums, sent to the neighbours) | +2 |
| `flower_bits` | +3 |
| neighbour sums of the same sample must arrive on `nb_fsum` at | +2+NB_LAT |
| `region_sum` | +3+NB_LAT |
| `region_hit`, `l1_trig` | +4+NB_LAT (default +6) |

### Interleaved converter output (`fadc_ti_mux`)

Each pixel's converter has a 6-bit flash stage and eight time-interleaved SAR
ADCs. Each SAR delivers a 12-bit word every eight samples. The mux selects
SAR0, SAR1, ..., SAR7 in turn with a free-running 3-bit phase and registers the
word. The result is one 12-bit sample per clock. `fadc_sync` resets the phase
of all 49 channels to SAR0. The SARs, flash, PLL and output drivers are analogue
or mixed-signal, so their words are inputs of the board (`sar_data`).

### Flower sums (`flower_sum`)

The seven 12-bit samples of a flower are added into a 15-bit sum, which cannot
overflow. No pedestal is subtracted: the front-end is AC-coupled, so the
pedestal is stable and is simply included in the thresholds. The seven sums go
to the six neighbouring boards on `fsum_out`.

## The L1 trigger across module borders (`l1_trigger`)

This is the least obvious part of the design. An L1 *region* is a set of 49
pixels chosen flower by flower. That is, a region is a set of flower sums, and
some of them may come from other modules. Each of the board's seven regions
has a 49-bit mask `region_mask[r]` over the 49 sources listed above. A typical
setting gives region `r` the local flower `r` plus the six flowers around it,
wherever those lie. For a flower at the module edge, three of its neighbours
belong to neighbouring modules. The masks are run-time settings, so any
combination the camera needs can be loaded.

Neighbour sums cross a board-to-board link and arrive later than the board's
own sums. `l1_trigger` therefore delays the local sums by `NB_LAT` clocks
(parameter, default 2). With that delay, every term of a region belongs to the
same sample. The link itself is not part of this design: the board assumes
that the sums of sample `t` from every neighbour arrive exactly `NB_LAT` clocks
after its own. Sums that arrive at any other time put the wrong samples
together.

The region sum (18 bits, saturating) is registered, then compared with
`l1_thr`. A region fires when its sum is strictly greater than the threshold.
`l1_trig` is the OR of the seven decisions and goes to the CTPB.
`region_hit` and `region_sum` are outputs for monitoring.

## Binary stream and rates

`flower_stream` produces one bit per flower per sample: flower sum >
`flower_thr`. This threshold is separate from the L1 threshold. The seven bits
per sample are what the CTPB uses for its second-level (L2) trigger. That
trigger clusters the bits of the whole camera in space and time, and it is not
part of this design.

`rate_counter` counts the rising edges of `l1_trig` and of each flower bit
(`rates[0]` is L1, `rates[1+f]` is flower `f`) over a gate of
`cfg.rate_window` clocks. At the end of each gate the counts are copied to
`rates`, `rate_valid` pulses, and counting starts again. A new gate length
takes effect from the next gate. Counts saturate at 32 bits.

## The 6 µs buffer and event readout

`event_buffer` is a circular memory of 6000 frames. A frame is one sample of
all 49 pixels, 588 bits. One frame is written every clock, so the buffer always
holds the last 6 µs, which bounds the time the CTPB may take to decide. The
frame written in a given clock has timestamp `ts_now`, a 48-bit count of clocks
since reset. It holds the samples taken from the SARs one clock earlier.

`readout_ctrl` answers a trigger on `ctpb_trig`:

1. In the trigger clock `t0` it locks in the window. The window starts
   `cfg.lookback` frames before the frame being written (clamped to 5999) and
   is `cfg.win_len` frames long. The event number goes up by one. While an
   event is being read, further triggers are ignored and counted in
   `n_dropped`.
2. From `t0+2` it offers a header beat (`sof` = 1). The header is an
   `ev_header_t`: event number, timestamp of the first frame and window length,
   placed in the low bits of `data`.
3. From `t0+4` it offers the frames, one per clock when the sink is ready. The
   last one has `eof` = 1. With no back-pressure the last beat is taken in
   `t0+3+win_len`.

The stream is valid/ready (`ev_valid`, `ev_ready`, `ev_beat`). A beat stays
unchanged while it is not accepted, and an assertion checks this. The sink may
stall for as long as it likes, but the buffer goes on overwriting. The
controller tracks the *age* of the next frame to read, in clocks since it was
written. A frame read when its age is more than 6000 has been overwritten.
Such an event still completes. Its last beat then carries `err` = 1, and
`n_overrun` counts it. Because reading starts two clocks after the trigger, the
largest look-back (5999) always loses the first frame. Useful look-backs are
therefore at most 5998 minus the clocks the sink stalls.

Reads go through a two-entry queue in front of the output. This lets the
one-clock read latency of the memory coexist with full-rate streaming and
back-pressure.

## Settings (`feb_cfg_t`)

| field | width | meaning |
|---|---|---|
| `l1_thr` | 18 | L1 region threshold (raw sum, pedestals included) |
| `flower_thr` | 15 | flower threshold of the binary stream |
| `region_mask` | 7 × 49 | flower sources of each L1 region |
| `rate_window` | 32 | rate gate in clocks (0 acts as 1) |
| `lookback` | 13 | readout window start, frames before the trigger |
| `win_len` | 16 | readout window length in frames (0 sends only a header) |

In a camera these would be slow-control registers. How they are written is not
part of this design.

## What is not here

These parts of the camera are analogue, or are taken from elsewhere, or are
described too briefly to design. Where they connect to the board, their
signals are ports:

* SiPMs, the pre-amplifier ASIC (including its NSB slow integrator, its
  analogue summation trigger and its gain-path selection), the converter's
  flash and SAR stages, PLL, LVDS drivers and SPI.
* The board-to-board link (`nb_fsum`, `fsum_out`) and White Rabbit timing. The
  timestamp here simply counts from reset.
* The central trigger processor and its L2 algorithms (`l1_trig`,
  `flower_bits` out, `ctpb_trig` in).
* The RoCEv2 RDMA network core (`ev_*`).
* Slow control, power, and event building in the servers.

## How far to trust it, and where it departs

* Taken from the camera description: 49 pixels in 7 flowers of 7, 6
  neighbours, flower-granular L1 regions that use neighbour sums, a binary
  stream per flower against its own threshold, rate counters, a 6 µs buffer
  (6000 samples at 1 GS/s), a transfer prompted by the CTPB trigger, 12-bit
  samples, and 8 interleaved SARs per channel.
* This design's choices: pixel numbering, sum widths and saturation, strict
  ">" comparisons, raw (pedestal-included) sums, masks as settings, seven
  regions per board, the `NB_LAT` alignment, gate-based rate counting, the
  event format and timing, dropping triggers while busy, overrun flagging,
  and one sample per clock.
* The 9-bit resolution of the 12-channel prototype digitiser board is not
  used; samples are 12 bits as delivered by the converter ASIC.
* Nothing here has been timed against a 1 GHz clock. The region adder (up to 49
  terms per region) is the longest path and would need pipelining for real
  timing closure.

## Files

`rtl/` — `advcam_pkg.sv` (sizes, `frame_t`, `ev_beat_t`, `ev_header_t`,
`feb_cfg_t`), `fadc_ti_mux.sv`, `flower_sum.sv`, `l1_trigger.sv`,
`flower_stream.sv`, `rate_counter.sv`, `event_buffer.sv`, `readout_ctrl.sv`,
and `advcam_feb.sv` (top).

`tb/` — one self-checking testbench per module, `<module>_tb.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.
`advcam_feb_tb` runs the whole board at its default size. It models the
converters, the six neighbours, the CTPB (a fixed 300-clock decision time) and
the network sink. For every clock it recomputes the flower sums, the binary
stream and the L1 decisions from the injected pixel samples, and it checks
every event frame against them. It covers a local trigger, a trigger that needs
a neighbour's flowers, a dropped trigger, random back-pressure, a buffer
overrun, a converter re-synchronisation and the rate gates. `advcam_feb_depth_tb`
also runs at the default size. Its central decision arrives 5.9 µs after the L1
trigger, and the event must still hold the light pulse at the expected frame.
A second event uses the largest look-back and must come out flagged as
overrun. Block testbenches
use smaller buffers (64 or 100 frames) where a buffer is involved.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -y rtl --top-module advcam_feb_tb \
          rtl/advcam_pkg.sv tb/advcam_feb_tb.sv -o sim
./obj_dir/sim
```

Replace `advcam_feb_tb` with any other testbench name to run that one. The
package must come first on the command line. The testbenches initialise
everything they read, so they give the same result under random
initialisation (`+verilator+rand+reset+2`).
