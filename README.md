# XPOL-III digital core: self-triggered region-of-interest readout

A gas pixel detector measures X-ray polarisation by imaging the track of
each photo-electron. Its readout chip, XPOL-III, is a 304 x 352 matrix of
hexagonal pixels at 50 um pitch (107,008 pixels). Each pixel has a charge
amplifier, a shaper and a peak-hold circuit. A typical track covers only a
few hundred pixels, so the chip does not read the whole matrix. It
triggers on its own, finds the small rectangle the track lies in, and sends
only those pixels, one at a time, to a single analog output that an
external ADC digitises. The dead time per event is thus roughly linear in
the number of pixels read:

    T_read = q + m * n_pix

XPOL-III lowers this dead time in three ways:

- It makes the region read smaller. The trigger is sensitive enough that
  the whole track fires, so only a little padding is needed around it.
- It runs the serial readout clock faster.
- It drops fixed waits from the readout sequence.

This repository holds synthesizable SystemVerilog for the digital part of
such a chip: trigger localisation, region-of-interest (ROI) formation,
readout sequencing and pixel selection. The analog parts are outside it.

## Signal flow

```
 mini-cluster        +------------+  ROT  +--------------+  ROI  +-------------------+  x,y  +---------------+
 trigger bits  ----> | rot_finder | ----> | roi_register | ----> | readout_sequencer | ----> | token_decoder | --> col_sel/row_sel
 (176 x 152)         +------------+       +--------------+       +-------------------+       +---------------+     (to pixels)
                        |  trig_any          ^ pad, ext ROI          |  global_track, analog_reset (to pixels)
                        +--------------------|---------------------> |  pix_valid/x/y/pass, busy, done (to back-end)
                                       +-------------+               |
   back-end register port <----------> | config_regs | <-------------+  commands, timing, mode
                                       +-------------+
```

`xpol3_top` wires these five modules together. Shared types, constants and
the register map are in `xpol3_pkg`. Everything runs on one clock, the
serial readout clock that the back-end supplies.

## Mini-clusters and the region of trigger

Trigger decisions are made per **mini-cluster**, a 2 x 2 group of pixels
with its own AC-coupled shaping amplifier and discriminator. There are
152 x 176 of them. The discriminators are analog and not part of this RTL.
Their outputs enter the core as `mc_trig[row][col]`.

The OR of all mini-cluster bits is the global trigger. The **region of
trigger (ROT)** is the smallest rectangle that holds every mini-cluster
that fired. `rot_finder` gets it without storing the 26,752-bit pattern. It
ORs the live bits into one register per mini-cluster column (152 bits) and
one per mini-cluster row (176 bits). The first and last set bits of those
registers are the rectangle's edges. In pixel coordinates:

    xmin = 2 * first column     xmax = 2 * last column + 1
    ymin = 2 * first row        ymax = 2 * last row + 1

X counts columns from the left and Y counts rows from the top. The ROT
therefore always starts on an even pixel and ends on an odd one. Hits are
accumulated from the trigger cycle to the end of the peak-detection window,
because the mini-clusters of one track cross threshold at different times.

Example, a measured 5.9 keV track: the fired mini-clusters span columns
127..130 and rows 145..154. The ROT is then pixel columns 254..261 and rows
290..309. Several testbenches use this case.

## From ROT to region of interest

The ROI is the rectangle actually read out. `roi_register` loads it in one
of two ways.

- **Hybrid mode** (the default, and the mode used for measurements). The
  chip widens the ROT by four paddings held in registers: left, right, top
  and bottom, each 0..63 pixels. The back-end does not have to act. With a
  padding of 3 on every side, the ROT above becomes columns 251..264 and
  rows 287..312, which is 14 x 26 = 364 pixels. Padding values of 2 to 4
  are the useful range. The default after reset is 3. A padded edge that
  would leave the matrix is clipped to it.
- **External mode.** The chip stops after peak detection with every pixel
  held. The back-end reads the ROT, computes any ROI it likes, writes it
  and issues *start*. An external rectangle is clipped to the matrix. If
  its maximum is below its minimum, the maximum is raised to the minimum.

The ROI stays in its register until an explicit **event reset**. Both
readout passes of an event therefore use the same rectangle, with no wait
to recompute or reload it.

A **forced readout** starts the same sequence without a trigger. It reads
an ROI that was loaded beforehand. A noise measurement uses it: it sweeps
overlapping 21 x 21 ROIs over the whole matrix and reads each one many
times.

## The readout sequence

`readout_sequencer` runs one event through these states:

| state      | pixels (`global_track`) | what happens |
|------------|-------------------------|--------------|
| IDLE       | track (1)               | armed; trigger or forced readout starts an event |
| PEAK       | track (1)               | `peak_cycles` cycles of peak detection; ROT accumulates hits |
| LOAD_ROI   | hold (0)                | hybrid mode: ROI = ROT + padding |
| WAIT_ROI   | hold (0)                | one cycle in hybrid mode; in external or forced mode, waits for *start* |
| READ (pass 0) | hold (0)             | one ROI pixel per clock, row by row, from (xmin,ymin) to (xmax,ymax) |
| PED_RST    | track (1)               | `reset_cycles` cycles of `analog_reset` |
| PED_PEAK   | track (1)               | `peak_cycles` cycles of peak-hold with no signal: the pedestal |
| READ (pass 1) | hold (0)             | the same ROI again, giving each pixel's pedestal |
| DONE       | hold (0)                | ROI kept; waits for event reset |

During READ, `pix_valid`, `pix_x`, `pix_y` and `pix_pass` tell the back-end
which pixel is on the analog output in that cycle. `token_decoder` raises
the one-hot `col_sel` and `row_sel` lines. The pixel where the two cross
closes its readout-token switch. The back-end subtracts pass 1 from pass 0,
pixel by pixel. Triggers that arrive while an event is in progress are
ignored: that time is the dead time. An event reset returns to IDLE from
any state, so it can also abort a readout. It clears the ROT and the ROI.

**Timing.** Take a hybrid-mode event with an ROI of N pixels, and count the
cycle in which IDLE sees the trigger as cycle 0. DONE is then entered at
cycle

    2*N + 2*peak_cycles + reset_cycles + 3

With the reset values (16 and 2) this is 2N + 37. In the linear model
above, m is two clock periods per pixel, one per pass. At 7.5 MHz a
200-pixel ROI takes 58 us on the chip side. At 10 MHz, m is 0.2 us per
pixel. Delays in the back-end (ADC, FPGA pedestal subtraction, register
traffic) add to both q and m in a real system. They are not modelled here.

## Register port

The port is a word-addressed, single-cycle interface: `reg_we`, `reg_addr`
(4 bits), `reg_wdata` (32 bits) and a combinational `reg_rdata`.

| addr | name   | access | fields |
|------|--------|--------|--------|
| 0    | MODE   | RW | [0] 0 = hybrid, 1 = external |
| 1    | PAD    | RW | [5:0] left, [13:8] right, [21:16] top, [29:24] bottom (reset 3/3/3/3) |
| 2    | ROI_X  | RW | W: staged external xmin [8:0], xmax [24:16]; R: stored ROI |
| 3    | ROI_Y  | RW | W: staged external ymin [8:0], ymax [24:16]; R: stored ROI |
| 4    | ROT_X  | R  | xmin [8:0], xmax [24:16] |
| 5    | ROT_Y  | R  | ymin [8:0], ymax [24:16] |
| 6    | STATUS | R  | [2:0] state, [3] busy, [4] ROT valid, [5] ROI valid |
| 7    | CMD    | W  | [0] event reset, [1] start, [2] force readout, [3] load staged ROI |
| 8    | TIMING | RW | [15:0] peak cycles (reset 16), [31:16] reset cycles (reset 2) |

A CMD bit gives a one-cycle pulse in the clock cycle after the write.

External-mode event, step by step:

1. A trigger arrives. The controller waits in WAIT_ROI with the pixels
   held.
2. Read ROT_X and ROT_Y.
3. Write ROI_X and ROI_Y.
4. Write CMD = load ROI.
5. Write CMD = start.
6. Wait for `evt_done`.
7. Write CMD = event reset.

## Top-level ports (`xpol3_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | readout clock; asynchronous active-low reset |
| mc_trig | in | [176][152] | mini-cluster discriminator outputs |
| reg_we, reg_addr, reg_wdata / reg_rdata | in / out | 1, 4, 32 / 32 | register port |
| global_track | out | 1 | 1: pixel peak detectors track; 0: hold |
| analog_reset | out | 1 | pixel reset before the pedestal sample |
| col_sel, row_sel | out | 304, 352 | one-hot readout-token selects |
| pix_valid, pix_x, pix_y, pix_pass | out | 1, 9, 9, 1 | pixel on the analog output, and pass (0 signal, 1 pedestal) |
| trig_out | out | 1 | a trigger started an event |
| busy, evt_done | out | 1 | event in progress; both passes finished |

The parameters `N_COLS` (304) and `N_ROWS` (352) size the matrix. Both must
be even, and coordinates are 9 bits, so no dimension may exceed 512.

## What is not in the RTL

Pixel charge amplifier, shaper, peak-hold and readout switch; mini-cluster
shaping amplifier and discriminator; test-charge injection (the `localWrite`
switch onto `Vtest`); the differential output buffer; the external ADC; and
the FPGA that subtracts pedestals, suppresses zeros and ships the data. Of
these, only the ports that the digital core drives or receives exist here.

## How far to trust it

The core follows the published description in its function:

- the 2 x 2 mini-cluster trigger and the ROT as the smallest enclosing
  rectangle, kept in a register;
- hybrid padding, independent on the four sides, or an ROI loaded from
  outside;
- the ROI kept until an explicit reset;
- peak detection started by the chip itself;
- sequential routing of each ROI pixel to the output;
- two reads of the ROI for pedestal subtraction;
- ROIs set from outside for noise scans.

The following points are not documented and are this design's own choices:

- how the rectangle is computed (projections plus first/last search);
- hits accumulated over the peak window;
- clipping at the matrix edges;
- how the pedestal sample for the second pass is taken (reset, then a
  second peak-hold with no signal);
- row-major scan order at one pixel per clock;
- the peak and reset durations and their reset values;
- the whole register port and its map;
- the start handshake in external mode;
- row/column decoding of the readout token.

The hexagonal row offset of the real matrix is ignored: pixels are
addressed as a plain grid. The chip's real control protocol (serial,
probably) and its internal clocking may differ completely.

Parameters are at the chip's real size. A full-size build and every
testbench run in seconds.

## Simulating

All files are SystemVerilog 2017. The package has to come first:

```
verilator --binary --timing --assert -Irtl rtl/xpol3_pkg.sv \
    rtl/config_regs.sv rtl/rot_finder.sv rtl/roi_register.sv \
    rtl/readout_sequencer.sv rtl/token_decoder.sv rtl/xpol3_top.sv \
    tb/tb_xpol3_top.sv --top-module tb_xpol3_top
./obj_dir/Vtb_xpol3_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if the design hangs.

| testbench | what it shows |
|-----------|---------------|
| tb_rot_finder | ROT of the example track, random hit sets against a hit-list reference, accumulation window, clear |
| tb_roi_register | example ROI, random ROTs and paddings against an integer reference, edge clipping, external loads |
| tb_readout_sequencer | scan order of both passes, event length 2N+2P+R+3, dead time, external start, forced readout, abort |
| tb_token_decoder | one-hot selects for every row and column |
| tb_config_regs | reset values, field positions, single-cycle command pulses |
| tb_xpol3_top | full-size end to end: example track, padding 2..5, corner clipping, external mode, forced 21 x 21 reads, abort; counts each mechanism |
| tb_noise_scan | 288 overlapping 21 x 21 forced readouts covering all 107,008 pixels |
| tb_readout_time | ROIs of 64..676 pixels; fits T = 37 + 2 n cycles; prints the times at 6, 7.5 and 10 MHz |

Lint runs clean apart from unused package constants and a note that
`rst_n` is used both as an asynchronous reset and in the assertions'
`disable iff`. That use is intended.
