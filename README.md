# DIAGC: digital instantaneous automatic gain control for a pulse radar

Strong clutter, such as returns from nearby hills, can drive a radar receiver
past its linear range. A saturated receiver creates intermodulation products,
spoils MTI or Doppler clutter cancellation and floods the display with false
detections. Fixed laws such as sensitivity time control (STC) or slow analog
AGC loops cannot reduce gain only where the clutter is.

DIAGC learns where the clutter is at the start of every dwell, one range bin at
a time, and then turns the receiver gain down only in those bins:

* **PRT 1**: the detected IF is digitised and smoothed over 8 range bins. The
  result is stored per range bin in a clutter map.
* **PRT 2**: the new smoothed value of each bin is averaged with the stored one
  and written back. The map now holds a two-PRT average.
* **PRT 3 and later**: the map is read bin by bin. Threshold logic turns each
  value into a 6-bit attenuation code that drives the attenuator inside the
  Pre-IF amplifier. Bins with saturating clutter are attenuated just enough to
  bring them back into the linear region. Weak returns keep full gain.

The cost is two PRTs per dwell that are received without protection. The map is
rebuilt in every dwell, so the scheme follows clutter that changes with time
(weather) as well as fixed ground clutter, at any range, azimuth or elevation.

This repository holds synthesizable SystemVerilog for the digital part: the
logic of the FPGA on the DIAGC card. The analog chain around it is available
only as a simulation model.

## Where the logic sits

```
 from down-converter   +-------------+    coupler     to IF receiver
 ------------------->  | Pre-IF amp  |----(10 dB)----------------------->
                       | 6-bit atten |       |
                       +-------------+    amp (8 dB)
                             ^               |
                             |  A0:A5     detector
                             |               |
                       +-------------------------------+
  dwell, PRT, range -->| diagc_top (FPGA)  <-- D0:D13  |<-- 14-bit ADC,
  clock (RS422 rx)     |                               |    clocked by the
                       +-------------------------------+    range clock
```

A coupler taps off part of the Pre-IF amplifier's output. A small amplifier
and a detector follow the tap, and a 14-bit ADC samples the detector on the
range clock. The range clock is also the FPGA clock, so **one clock cycle is
one range bin**. The FPGA drives a 6-bit attenuation code, A0:A5, back to the
amplifier. One LSB is 0.5 dB, so 63 steps give 31.5 dB. The design uses the
first 32 steps, which is 16 dB.

The gain of the coupled path is set so that the detector's range matches the
16 dB control range. In this design the detector's zero is the point where the
receiver starts to saturate, and ADC full scale is 16 dB above that point.

None of these board parts is in the RTL: the RS422 line receivers, the ADC, the
configuration PROM, the power-on reset circuit, the amplifier and the detector.
The top module's ports are the signals those parts supply or take.

## Modules

| file | role |
|---|---|
| `rtl/diagc_pkg.sv` | widths (ADC 14, attenuation 6, window 8) and `prt_phase_e` |
| `rtl/diagc_timing.sv` | edge detection on dwell and PRT, PRT count, phase, range-bin counter |
| `rtl/moving_avg.sv` | 8-bin running-sum moving average, cleared at each PRT |
| `rtl/dp_bram.sv` | dual-port RAM for the clutter map: port A writes, port B reads |
| `rtl/clutter_map_ctrl.sv` | RAM control: store (PRT 1), average and write back (PRT 2), read ahead (PRT 3 and later) |
| `rtl/threshold_logic.sv` | comparator bank that turns the map value into the attenuation code |
| `rtl/diagc_top.sv` | wires these together and registers A0:A5, gated by `diagc_en` |

### Top-level interface (`diagc_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | range clock (one range bin per cycle) |
| `rst` | in | 1 | power-on reset, synchronous, active high |
| `dwell` | in | 1 | rising edge starts a dwell |
| `prt` | in | 1 | rising edge starts a PRT |
| `adc_data` | in | 14 | detected IF from the ADC (D0:D13) |
| `diagc_en` | in | 1 | DIAGC on (1) or off (0, attenuation held at 0) |
| `cal_offset` | in | log2(NUM_BINS) | read-ahead in range bins; see below |
| `atten` | out | 6 | attenuation code A0:A5, 0.5 dB per LSB |
| `phase` | out | 2 | IDLE / STORE / ACCUM / APPLY, for status |
| `prt_num` | out | 8 | PRT number within the dwell, starting at 1; stops at 255 |

| parameter | default | meaning |
|---|---|---|
| `NUM_BINS` | 2048 | range bins per PRT, and the depth of the map |
| `NUM_STEPS` | 32 | number of thresholds, so the largest code (32 = 16 dB) |
| `THRESH_BASE` | 0 | first threshold, in ADC codes |
| `THRESH_STEP` | 512 | ADC codes between thresholds, i.e. per 0.5 dB |

## Dwell timeline

The design assumes that `dwell` and `prt` are synchronous to the range clock.
Each input is registered once and its rising edge is detected. The edge of
`dwell` sets the PRT count to 0. A PRT edge in the same cycle makes that PRT
number 1. Each later PRT edge adds one to the count. The count selects the
phase:

| PRT in dwell | phase | moving average | map | `atten` |
|---|---|---|---|---|
| before first dwell | IDLE | off | untouched | 0 |
| 1 | STORE | on | map[b] = avg1[b] | 0 |
| 2 | ACCUM | on | map[b] = floor((map[b] + avg2[b]) / 2) | 0 |
| 3, 4, ... | APPLY | off | read only | code(map[b + cal_offset]) |

After a PRT edge the range-bin counter runs from 0 to `NUM_BINS-1` and then
stops, with `bin_valid` low, until the next PRT. A PRT shorter than `NUM_BINS`
bins simply restarts the count. The map has one word per range bin. Every PRT
of a dwell must therefore cover the same bins. With staggered PRTs shorter than
`NUM_BINS`, the far bins of the map would keep values from an older dwell.

## Timing through the pipeline

This is the part that needs care when the design is connected to real
hardware. Take the rising edge of `prt` to be sampled at clock edge *k*.

| cycle | what happens |
|---|---|
| *k*+1 | `prt_start` pulses; phase and PRT number update; the moving average is cleared |
| *k*+2+*b* | range bin *b*: the ADC word present now is taken as bin *b*'s sample |
| next | (PRT 1, 2) the average of bins *b*-7..*b* is ready; it is written to map[*b*], or averaged with the old word and written back |
| *k*+2+*b* | (PRT 3 and later) map[*b* + `cal_offset`] is read |
| +1 | the RAM word is on the RAM output; threshold comparison |
| +2 | the code is registered |
| +3 | the code is on `atten` |

So during range bin *c* of an APPLY PRT, `atten` = code(map[*c* − 3 + `cal_offset`]).

The map word at address *a* averages samples *a*−7..*a*. A trailing window of
8 bins makes the map lag the clutter. The external chain also has delays of its
own: the attenuator switches some time after it gets a code, and the ADC has a
pipeline latency. `cal_offset` is a single read-ahead that corrects for all of
this, and it is found by calibration on the radar. For an attenuator that
switches `S` clocks after a code appears and an ADC with a latency of `L`
clocks, the read-ahead that gives each echo bin *r* the average of echo bins
*r*..*r*+7 is

```
cal_offset = 7 + L + S + 3
```

The testbenches use `L` = 3 and `S` = 1, so `cal_offset` = 14.

**Edges of a clutter patch.** Whatever `cal_offset` is, an 8-bin window cannot
follow a sharp edge. Over 8 bins the code ramps from the level on one side to
the level on the other. For a full-scale step that ramp is 4 codes, or 2 dB,
per range bin. With the alignment above, the leading edge of a flat patch is
fully attenuated. The last 7 bins of the patch average in the weaker bins
beyond it, so they get less attenuation than they need. `tb_bite_sweep` shows
this: for an 80-bin target 2 to 16 dB above saturation, 6 or 7 bins at the
trailing edge still saturate, and none of the rest do. A smaller `cal_offset`
moves the under-attenuated bins to the leading edge.

## Threshold logic

The map value (0..16383) is compared with `NUM_STEPS` thresholds,
`T(k) = THRESH_BASE + k * THRESH_STEP` for k = 0..NUM_STEPS−1. The code is the
number of thresholds that the value exceeds. With the defaults this is

```
code = min(32, ceil(map / 512))
```

512 ADC codes correspond to 0.5 dB, so the whole ADC range spans the 16 dB
control range. A bin that is *x* dB above saturation gets *x* rounded up to the
next 0.5 dB, and never more than 16 dB. Clutter more than 16 dB above
saturation is reduced by 16 dB and still saturates. The mapping assumes that
the detector's output is linear in dB, as a log detector's is. With a detector
whose output is linear in voltage or power, the thresholds need to be spaced
geometrically. `threshold_logic` would then need a different threshold
function; its ports stay the same.

## What comes from the source description and what is this design's own

These follow the published description of the DIAGC card:

* a 14-bit ADC sampled on the range clock, and the range clock as the logic
  clock;
* dwell, PRT and range-clock inputs, and a range-bin number counted from the
  range clock;
* an 8-bin moving average, used only in PRTs 1 and 2;
* store in PRT 1, average with the stored value and write back in PRT 2, read
  and threshold from PRT 3 on, with no writes in later PRTs;
* a dual-port block RAM with writes on port A and reads on port B;
* a 6-bit attenuation control at 31.5 dB full scale, used over about 16 dB, and
  a rate of 2 dB per range bin for the 8-bin average;
* a calibrated correction for the delay between the map read and the gain
  change;
* a DIAGC on/off control.

These are choices made here, where the description gives no detail:

* 2048 range bins. The map takes 28,672 bits, which fits 8 of the 14 4-kbit
  block RAMs of the original FPGA.
* Rising-edge, synchronous dwell and PRT inputs. The count starts at bin 0 two
  clocks after the PRT edge is sampled.
* Clearing the moving-average window at each PRT. Averages that are cut off
  with a floor (truncating) divide.
* The threshold values, and the idea that the detector's range spans the
  control range linearly in dB. This gives 16 dB, not the "about 15 dB"
  mentioned elsewhere for the maximum attenuation.
* The correction applied as a read-ahead of the map address, set at run time
  through `cal_offset`.
* Reads past the last range bin give code 0.
* A register on A0:A5. Code 1 means attenuate. The bit polarity of the real
  attenuator is not known.
* `diagc_en` gating the output while the map keeps being built. If DIAGC is
  switched on in the middle of a dwell, it acts one range clock later, using
  the map that has already been built.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_diagc_timing` | phase and PRT number, the bin counter against edge-based timing, PRTs before the first dwell, PRTs that are short or long, dwell edges alone or together with a PRT edge |
| `tb_moving_avg` | random samples with gaps and clears against a reference sum; the full-scale step |
| `tb_dp_bram` | random reads and writes against a shadow array, same-address collisions, hold while `enb` is low, `rstb` |
| `tb_clutter_map_ctrl` | every write and every APPLY read for random maps and random read-aheads, reads past the end |
| `tb_threshold_logic` | every threshold boundary, random levels, latency, the 2 dB-per-bin ramp |
| `tb_diagc_top` | full-size (2048 bins), closed loop with `rf_rx_model`, four dwells of five PRTs |
| `tb_bite_sweep` | full-size; a fixed 80-bin test target from −4 to +20 dB, DIAGC off and on |

`tb_diagc_top` compares `atten` in every bin of every PRT with a value worked
out from the scene alone. It also checks that no interior bin of a patch within
16 dB saturates from PRT 3 on. It counts each mechanism: STORE, ACCUM and APPLY
phases, saturation before PRT 3 and with DIAGC off, the 2 dB-per-bin ramp, the
largest code, clutter beyond 16 dB, weak returns left alone, DIAGC switched on
in the middle of a dwell, the map rebuilt when the scene moves, and reads past
the last bin. Any mechanism that never happens counts as a failure.

`clutter_map_ctrl` also carries two assertions, checked in every simulation
run with `--assert`: the map is written only in PRTs 1 and 2, and in PRT 2 a
write never meets a read of the same address.

`tb/rf_rx_model.sv` is a behavioural model, not synthesizable, of the
attenuator, the detector and the ADC, in levels of 1/1024 dB relative to the
saturation point. It is a modelling aid. It is not a description of the real
RF hardware.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/diagc_pkg.sv \
    tb/tb_diagc_top.sv --top-module tb_diagc_top -Mdir obj_top
./obj_top/Vtb_diagc_top
```

Swap in the name of any other testbench. Each one runs in well under a second.

## Limits

* Only the FPGA logic is RTL. The receiver, the detector and the ADC exist only
  as a simple model, so the absolute levels in the testbenches are
  illustrative.
* The threshold table, the number of range bins and the alignment of the
  window are assumptions (see above). Expect to change `THRESH_BASE`,
  `THRESH_STEP` and `cal_offset` to fit a real detector and delay.
* The bins at the trailing edge of a patch are under-attenuated by the 8-bin
  ramp, as described under "Edges of a clutter patch".
* The first two PRTs of every dwell are received at full gain. The scheme
  needs them to build the map.
