# CLICTD digital logic in SystemVerilog

CLICTD is a monolithic pixel sensor for the tracker of a future linear
collider. Its matrix has 16 columns of 128 pixels; each pixel is 300 um x 30 um
and is split along its long side into eight sub-pixels, each with its own
collection diode, analog front-end and discriminator. Splitting keeps the
drift distance to the nearest diode short, so charge is collected quickly,
while the digital logic is shared: one block per pixel measures time and
charge for the eight discriminators together, and remembers which of them
fired.

This repository holds synthesizable RTL for the digital part of such a chip:
the pixel logic, the column, the periphery that times the frame and reads the
matrix out, and the chip top that ties them together. The analog front-ends,
the sensor itself and the bias circuits are not modelled; the top exchanges
plain digital signals with them.

## What a pixel measures

A frame is the time the shutter is open. During a frame, each pixel records:

| field  | bits | meaning |
|--------|------|---------|
| `hits` | 8    | one flag per sub-pixel: its (unmasked) discriminator was high at least once |
| `toa`  | 8    | Time of Arrival: 10 ns clock cycles from the first hit of any sub-pixel to the end of the frame, saturating at 255 |
| `tot`  | 5    | Time over Threshold, summed over all hits of the frame, in units of the programmable ToT step, saturating at 31 |

ToA and ToT are measured on the OR of the eight masked discriminator outputs,
so two sub-pixels hit by the same particle give one time stamp and one ToT. The
hit time is recovered off-chip as `t_shutter_close - 10 ns * toa`.

In photon-counting mode (`mode = MODE_COUNT`) the same 13 bits `{toa, tot}`
count rising edges of the OR, i.e. separate hits, up to 8191 per frame. This
is the mode for threshold scans, where the number of hits above threshold is
wanted rather than their timing.

Each sub-pixel can be masked: its discriminator is then ignored by the flags,
the OR and the counters. The per-pixel configuration also holds the 3-bit
threshold tuning code of each front-end, which the top drives out on `tune`.

### ToT step

`tot_range` (3 bits) sets the ToT step to `2*(tot_range+1)` cycles of the
100 MHz clock, 20 ns to 160 ns. Five bits then cover 0.64 us to 5.12 us. The
published chip quotes a programmable range of 0.6 us to 4.8 us; this RTL keeps
that factor of 8 between the shortest and the longest range but its end points
are about 7 % higher. The step is a strobe (`tot_tick`) from the periphery; a
pixel adds one to `tot` on every strobe that finds its OR high, so the ToT is
sampled, not measured edge to edge.

### Timing of one frame

All acquisition logic runs on one 100 MHz clock `clk`. The shutter input is
asynchronous and passes two synchroniser flops, so `acq` rises three clock
edges after the shutter. Discriminator outputs are also sampled on `clk` (one
flop per sub-pixel, no synchroniser), and reach the counters one cycle later.
Number the rising clock edges of a frame from 0 (the edge at which
`frame_start` clears the pixel) to `L` (the last edge with `acq` high). A
discriminator that rises between edges `s` and `s+1` is sampled at edge `s+1`
and reaches the counters at edge `s+2`; if it stays high for `w` cycles, the
pixel reports `toa = L - s - 1` and, with a ToT strobe on every cycle,
`tot = w`. The testbenches use these formulas.

## Clock gating in the pixel

Only a few pixels see a particle in a frame, so most pixel counters have
nothing to do most of the time. The ToA/ToT counters sit behind a latch-based
clock gate (`clock_gate`). Its enable is

    frame_start | (acq & (OR of discriminators | any hit flag))

so the counter clock runs for one cycle at the start of the frame to clear the
counters, then stays stopped until the pixel's first hit, then runs until the
frame closes (ToA counts every cycle after the first hit). Outside frames the
counters do not toggle at all. The sampling flops and hit flags (10 flops per
pixel) stay on the free-running clock. The output `clk_active` of the top
shows, per pixel, when its counter clock is enabled.

## Readout and its compression

After the frame the matrix is read out serially on one line at 40 MHz
(`clk_ro`). Every pixel has a readout register (`pixel_ro_sr`) and the
registers of all 2048 pixels form one chain. The trick is that the chain has
a variable length: on `ro_load` each pixel copies its flag (`|hits`) and its
21-bit word. A pixel with a flag of 1 puts its 22 bits into the chain; a pixel
with a flag of 0 bypasses its data flops and occupies one bit. The stream is
therefore

    for each pixel, nearest the periphery first:
        0                         empty pixel
        1, d[0], d[1], ..., d[20] hit pixel, d = {hits[7:0], toa[7:0], tot[4:0]}

Pixel order is column 0 row 0, column 0 row 1, ..., column 0 row 127, column
1 row 0, and so on. A frame costs `2048 + 21*H` bits for `H` hit pixels:
51.2 us when the matrix is empty, 1.13 ms when every pixel is hit.

Because the stream is self-delimiting, the periphery sequencer
(`readout_ctrl`) does not need to know which pixels were hit: it parses the
flags as they pass, counts pixels and stops after the 2048th. From `ro_start`
the controller spends one cycle on `ro_load`, then shifts; the last bit is
shifted `1 + 2048 + 21*H` cycles after `ro_start`, `ro_done` follows one cycle
later, and every bit appears on `ro_data` with `ro_valid` one cycle after it
left the chain. `ro_n_hit` gives `H`.

The readout registers are clocked by `clk_ro` and load the counters of the
100 MHz domain without synchronisers. This is safe only because those values
are frozen once the shutter has closed: start the readout at least four
`clk` cycles after the shutter falls, and do not open the shutter during a
readout.

## Configuration

The configuration registers of all pixels form a second chain on `clk_ro`.
While `cfg_shift` is high one bit enters at `cfg_in` per cycle. Each pixel
holds a 32-bit word (`pix_cfg_t`): bits 7:0 are the sub-pixel masks (1 =
masked), bits `8+3i+2 : 8+3i` the tuning code of sub-pixel `i`. The chain goes
through column 0 row 0 first, so to configure the matrix shift in the word of
column 15 row 127 first, each word MSB first, and the word of column 0 row 0
last: 65,536 bits, 1.64 ms at 40 MHz. Reset clears all words (nothing masked,
tuning code 0).

## Hierarchy

    clictd_top           chip digital part, NCOLS x NROWS (16 x 128)
      acq_ctrl           shutter synchroniser, frame_start, ToT strobe
      clictd_column x16  one column, chains of 128 pixels
        clictd_pixel     one pixel
          pixel_config   masks and tuning codes, configuration chain
          pixel_measure  hit flags, OR, ToA, ToT, counting mode
            clock_gate   latch-based clock gate of the counters
          pixel_ro_sr    compressing readout register
      readout_ctrl       40 MHz readout sequencer
    clictd_pkg           sizes, widths, types (mode, data word, config word)

### Top-level ports

| port | dir | width | use |
|------|-----|-------|-----|
| `clk`, `clk_ro` | in | 1 | 100 MHz acquisition clock, 40 MHz readout/configuration clock |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `shutter` | in | 1 | frame gate, asynchronous |
| `mode` | in | 1 | `MODE_TOA_TOT` or `MODE_COUNT`, keep stable during a frame |
| `tot_range` | in | 3 | ToT step code |
| `disc` | in | `[16][128][8]` | discriminator outputs from the analog front-ends |
| `tune` | out | `[16][128][8][3]` | threshold tuning codes to the front-ends |
| `cfg_shift`, `cfg_in`, `cfg_out` | in/in/out | 1 | configuration chain |
| `ro_start` | in | 1 | start the readout (one `clk_ro` cycle, only while idle) |
| `ro_data`, `ro_valid` | out | 1 | serial data stream |
| `ro_busy`, `ro_done` | out | 1 | readout running, end of readout pulse |
| `ro_n_hit` | out | 16 | number of hit pixels in the frame read |
| `clk_active` | out | `[16][128]` | per-pixel counter clock enabled |

The matrix size is a parameter of the top (`NCOLS`, `NROWS`); the
defaults are the chip's.

## How far this follows the published chip

Taken from the chip's published description: the 16 x 128 matrix of pixels
split into eight sub-pixels; one hit flag per sub-pixel; an 8-bit ToA with
10 ns bins and a 5-bit ToT measured on the OR of the eight discriminators; the
time stamp of the first hit and the ToT summed over all hits of the frame; a
programmable ToT range spanning a factor of 8; sub-pixel masking; a 3-bit
threshold tuning code per front-end; clock gating of the pixel logic; a
serial readout at 40 MHz that sends the frame data only for hit pixels and one
bit for every other pixel; counting of detected photons per pixel for
threshold scans.

Choices made here, where the description gives no detail: the ToA reference
point (end of frame), saturation of all counters, synchronous sampling of the
discriminators, the prescaler steps of the ToT range, the use of the ToA/ToT
bits as the 13-bit photon counter, the layout and bit order of the readout
word, the single chain through all columns and its order, the
start/busy/done handshake of the readout, the configuration chain and word
layout, and the form of the clock-gating cell.

Not included: the sensor and the analog front-ends (level shifter,
amplifier, discriminator, tuning DAC), the power pulsing of the front-ends
between bunch trains, the bias and threshold DACs of the periphery, and the
chip's slow-control interface (the global settings are plain ports here).
No output encoding or framing is added to the serial stream.

## Operating points

* Collider operation: bunch trains of about 156 ns every 20 ms. The 8-bit ToA
  covers 2.55 us, more than a train; a fully hit matrix reads out in 1.13 ms,
  well inside the 20 ms gap.
* X-ray imaging with 4 ms shutters: the per-sub-pixel hit flags are the image;
  ToA and ToT saturate in such long frames and are not used. Summing the flags
  over many frames gives a hit count per 37.5 um x 30 um sub-pixel.
* Threshold and fluorescence scans: photon-counting mode, up to 8191 hits per
  pixel and frame; single sub-pixels are scanned by masking the other seven.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs. With
Verilator 5 (from the repository root):

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/clictd_pkg.sv tb/clictd_top_tb.sv --top-module clictd_top_tb
    ./obj_dir/Vclictd_top_tb

| testbench | checks |
|-----------|--------|
| `clock_gate_tb` | gated clock whole or absent per phase, no glitches when the enable changes while the clock is high |
| `acq_ctrl_tb` | shutter latency, frame start, ToT strobe period for all eight ranges |
| `pixel_config_tb` | word shifting, mask and tuning decode, hold, serial output |
| `pixel_measure_tb` | flags, ToA, ToT and counting against a cycle-level reference, masks, saturation, no counter clock outside frames |
| `pixel_ro_sr_tb` | stream of a chain of six registers, 1 bit per empty pixel |
| `clictd_pixel_tb` | one pixel end to end against closed formulas, overlapping pulses, masks |
| `clictd_column_tb` | a 128-pixel column, configuration and readout chains |
| `readout_ctrl_tb` | stream parsing, stop point, cycle count `1 + N + 21*H`, occupancy 0 to 100 % |
| `clictd_top_tb` | whole chip on a 3 x 8 matrix: configuration, ToA/ToT and counting frames, readout compared bit by bit with a reference model; fails if any mechanism (compression, masking, multi-hit ToT, ToA/ToT saturation, counting, several ToT ranges, clock gating) never occurred |
| `clictd_top_full_tb` | the same at the full 16 x 128 size with default parameters (about a minute) |
| `xray_imaging_tb` | imaging: 40 frames on a 2 x 16 matrix with an absorbing object; the per-sub-pixel sum of decoded hit flags must equal the injected hits and show the object |
| `threshold_scan_tb` | fluorescence threshold scan in counting mode on a 2 x 8 matrix with iron- and copper-like lines; every count is checked and the differentiated occupancy must peak at the line |

The two top-level testbenches share their body, `tb/clictd_top_tb_body.svh`,
which is included by a path relative to the repository root.
