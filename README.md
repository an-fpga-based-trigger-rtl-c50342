# COTTRI: a drift-chamber trigger with look-up-table hit classification

The COMET Phase-I experiment looks for a single 105 MeV/c electron from
muon-to-electron conversion. Its primary trigger, a four-fold coincidence in
the cylindrical trigger hodoscope (CTH), fires about 91 kHz on background,
mostly low-energy electrons, while the data acquisition can take less than
26 kHz (13 kHz with a safety factor of two). The CDC trigger (COTTRI) brings
the rate down by also looking at the cylindrical drift chamber (CDC). Every
100 ns each wire reports a 2-bit energy code. A look-up table, trained
offline as a gradient-boosted decision tree (GBDT), decides whether the
pattern on a wire and its two neighbours looks like part of a conversion
electron track. The signal-like wires are then counted in the part of the
chamber that a track firing a given CTH counter would cross. A trigger needs
the CTH counter and enough signal-like hits in its area.

This repository holds synthesizable SystemVerilog for that trigger chain,
written from the published description of the system ("An FPGA-based Trigger
System with Online Track Recognition in COMET Phase-I", Nakazawa et al.). The
parts the publication leaves open are filled in here; they are listed in
[Where this RTL makes its own choices](#where-this-rtl-makes-its-own-choices).
The RTL is not the experiment's firmware.

## The chain

```
 CDC wires (48 per readout board)
   | 10-bit ADC samples, 3 per 100 ns
   v
 recbe_frontend  x 90 ---- recbe_compressor x48 : 2-bit energy code per wire
   |                  \--- trigger_number_rx    : trigger recognised at last bit
   | 2-bit codes, one frame per 100 ns                         ^
   v                                                           |
 cottri_fe  x 10 (9 readout boards each)                       |
   long_lived_filter  per wire : 400 ns window, long-lived veto|
   hit_classifier_lut per wire : 6-bit pattern -> signal-like  |
   count per readout board     : 0..48                         |
   |                                                           |
   v                                                           |
 cottri_mb : sum over the active area of each of 48 CTH IDs,   |
             CDC trigger bit = sum > threshold (32)            |
   |                                                           |
   v                                                           |
 central_trigger <- cth_coincidence (4-fold, 48 IDs, two ends) |
   bunch window 700-1200 ns, CTH delayed by 400 ns + pipeline, |
   CTH & CDC per ID (or CDC alone in self-trigger mode),       |
   trigger number -> trigger_number_tx --- serial line --------+
```

`cottri_system` is the top and wires all of this together. The whole design
runs from one 40 MHz clock, as in the real system, where the central trigger
distributes it. Reset is asynchronous and active low everywhere. The
serial links between boards are not modelled: the readout boards, front ends,
merger and central system are connected directly.

## Timing

| quantity | value | where it comes from |
|---|---|---|
| clock | 40 MHz (25 ns) | published |
| energy-code frame | 100 ns = 4 clocks, 3 ADC samples | published |
| integration window | 400 ns = 4 frames | published |
| CTH measurement window | 700-1200 ns after a bunch = clocks 28..47 | published |
| bunch spacing | 1170 ns (about 47 clocks) | published |
| compressor | code 1 clock after the third sample | this RTL |
| front end | hit counts 3 clocks after the frame strobe | this RTL |
| merger | area sums +1, CDC trigger bits +2 clocks | this RTL |
| CTH coincidence | +1 clock | this RTL |
| CTH delay before the CDC/CTH coincidence | 24 clocks (`CTH_DELAY`) | this RTL |
| CTH hit to `trig_out` | 25 clocks = 625 ns | this RTL |
| trigger number on the line | start bit + 32 bits = 33 clocks | 32 bits at 40 MHz published |
| `trig_out` to the readout boards' `trig` | 34 clocks | this RTL |

The published system measured 1.9-2.0 us from a test pulse to the trigger at
the readout board. That figure includes the multi-gigabit links. The
integration time (0.4 us) and the receiving time (0.8 us) bring the total to
3.1-3.2 us, against a 7 us limit. Without links, the logic here adds about
0.2 us on the CDC path.

## The 2-bit energy code (`recbe_compressor`)

Each readout board samples every wire at 30 MHz. Three samples (100 ns) are
summed after the pedestal is subtracted (negative values count as 0). The sum
is then compared with three rising thresholds `th[0..2]`:

| code | meaning | condition |
|---|---|---|
| 0 | no hit / noise | sum < th[0] |
| 1 | small deposit | th[0] <= sum < th[1] |
| 2 | minimum-ionising, signal-like | th[1] <= sum < th[2] |
| 3 | large deposit (protons, heavier) | sum >= th[2] |

The tuned threshold values are not published, so they are inputs. The 30 MHz
ADC domain is represented by a `sample_valid` strobe in the 40 MHz domain:
three strobes per four clocks. Every channel counts its own samples, so all
channels must see the same strobes from reset on.

## The front end (`cottri_fe`)

This is the block where most of the design's physics sits.

**Long-lived filter (`long_lived_filter`).** A low-energy electron curls
along a wire and keeps it hit for a long time. A conversion electron crosses
a cell once; its signal comes within the maximal drift time, about 400 ns.
Each wire keeps its last four codes, a sliding window of 400 ns. The
integrated code is the largest code in the window. If `ll_min_frames` or
more of the four frames carry a hit, the wire is long-lived and is treated as
empty. With the test setting of 3, a wire that is hit for three of four
frames is removed; `ll_min_frames = 0` turns the veto off. Note what the
sliding window does to a long run of hits: the first two frames of the run
are still counted, and so is the tail end once fewer than three hit frames
remain in the window.

**Neighbour pattern and tables (`hit_classifier_lut`).** The table address
is `{center, left, right}`, six bits made of the wire's integrated code and
those of its two neighbours in the same layer. The table holds the GBDT
output with its threshold already applied: one bit, signal-like or not. As in
the published hardware, each 64-entry table is two run-time reloadable 5-input
LUTs (`cfglut5`, the behaviour of the FPGA's CFGLUT5 primitive), selected by
address bit 5. The output is registered, so classification takes one clock.

Every wire has its own table, so the decision can depend on the radial
position. All wires of one layer take their configuration bit from the same
`lut_cfg_di[layer]` line. To load, hold `lut_cfg_ce` high for 64 clocks and
send entry 63 first and entry 0 last. The tables have no reset value; load
them before use.

**Dummy neighbours.** A front end sees only its own sector of the chamber.
Where a neighbour belongs to another front end, the code 2 (signal-like) is
fed in its place. This follows the published design. It makes an edge wire
look like part of a track rather than isolated, so an edge wire is more
likely to pass than a wire in the middle.

**Geometry.** The front end's `N_RECBE x 48` channels are taken to be its
wires, ordered layer by layer. There are 16 layers: CDC layers 1 to 16, since
the innermost layer and the three outermost are left out of the
classification. Each layer holds `N_RECBE*48/16` wires of one azimuthal
sector, 27 for nine readout boards. Channel `c` is wire `c % 27` of layer
`1 + c / 27` and belongs to readout board `c / 48`. The real chamber has a
different number of wires in each layer and an irregular board-to-wire map.
To use the real map, replace the two neighbour indices and the layer index
in the `g_wire` generate loop with a table.

**Counting.** The signal-like flags of each board's 48 wires are summed
(0..48) and sent to the merger.

## The merger (`cottri_mb`)

For each of the 48 CTH IDs, a mask selects the readout boards in its active
area. The masks form a register file written through `mask_we/addr/data`. Mask
bit `f*9 + r` is board `r` of front end `f`. The selected counts are summed,
and the CDC trigger bit of that ID is set when the sum is strictly greater
than `threshold`. The published operating point is 32 hits, which gives
13 kHz with 96 % signal acceptance in simulation. Masking whole boards is
coarser than a per-wire active area, but it matches the front end, which
sends one count per board.

## CTH coincidence (`cth_coincidence`)

Each end of the chamber has a ring of 48 scintillators and a ring of 48
Cherenkov radiators in front of them. CTH ID `i` fires when scintillators
`i` and `i+1` and the Cherenkov counters `i` and `i+1` of one end are all
hit; the two ends are ORed. The published window is 10 ns. Here the inputs
are discriminator flags sampled by the 40 MHz clock, so "coincident" means
"in the same 25 ns clock". `STRETCH` widens each flag if needed. A real
10 ns window needs finer timing than this RTL has.

## The central trigger (`central_trigger`)

* **Bunch window.** CTH triggers count only 700-1200 ns after a proton
  bunch, the quiet part of the bunch cycle. The next bunch comes after
  1170 ns, so the window outlasts it. Two counters therefore measure the
  time since the latest and since the previous `bunch` pulse, and the window
  is open when either is in clocks 28..47.
* **Alignment.** The drift-chamber hits that go with a CTH hit arrive
  during the following 400 ns. The CTH bits are therefore delayed by
  `CTH_DELAY` = 24 clocks before they are ANDed with the CDC trigger bits of
  the same ID. The 24 clocks are 16 for the integration, 5 for the
  front-end/merger pipeline and 3 for the frame phase. If the link latency
  changes, this parameter must change with it.
* **Self-trigger.** With `self_trigger = 1`, the CDC trigger alone fires, on
  the rising edge of "any CDC bit set", with no bunch window. This is the
  mode used for the cosmic-ray test of the real system.
* **Numbering and veto.** Each trigger gets the next 32-bit number and is
  sent out by `trigger_number_tx`. A trigger that comes while the line is
  still busy with the previous number (33 clocks) is dropped and counted in
  `n_vetoed`.

**Trigger line format.** The line idles low, then carries a start bit `1`
followed by the 32-bit number, MSB first, one bit per clock. The receiver on
each readout board (`trigger_number_rx`) raises `trig` only after the last
bit, as the real boards do. The 32 number bits take 0.8 us.

## Where this RTL makes its own choices

Taken from the published system: the 40 MHz clock, the 100 ns frames of
2-bit codes built from three 10-bit samples, the 400 ns integration, the
removal of long-lived wires before classification, the 6-input table per
wire depending on layer, built from two CFGLUT5s and loadable during a run,
the dummy neighbour code 2, the count per readout board, the sum per active
area per CTH counter against a threshold of 32, the four-fold neighbouring
CTH coincidence, the 700-1200 ns window, the CTH/CDC coincidence, the CDC
self-trigger, the 32-bit trigger number at 40 MHz recognised at its last bit,
and the counts: 10 front ends, 8 or 9 readout boards each, 48 CTH counters,
layers 1-16.

Chosen here, because the publication does not say:
- 48 channels per readout board;
- sum-then-threshold compression, with run-time thresholds;
- the long-lived rule (sliding 4-frame window, maximum code, veto at
  `ll_min_frames` hit frames);
- the table address order `{center, left, right}` and the load order;
- the regular sector geometry of a front end;
- per-board active-area masks and the strict `>` comparison (the text says
  "exceeds");
- the CTH pairing of `i` with `i+1`, and coincidence within one clock;
- the window measured from the last two bunches;
- the 24-clock CTH delay;
- the busy veto;
- start-bit framing on the trigger line;
- every front end built with nine board slots (an eight-board front end
  leaves one slot idle);
- all pipeline registers and latencies.

Not included: the DisplayPort links between the boards and the SFP+ link to
data acquisition (multi-gigabit transceivers; no protocol is published), the
Si5326 jitter cleaner, the clock and trigger fan-out boards, the readout
boards' waveform buffer, and the analog discrimination of the CTH
photomultipliers.

## Files

| file | contents |
|---|---|
| `rtl/cottri_pkg.sv` | shared constants and the `ecode_t` energy code |
| `rtl/recbe_compressor.sv` | 2-bit energy code of one wire |
| `rtl/trigger_number_rx.sv` | trigger-number receiver (readout board) |
| `rtl/recbe_frontend.sv` | one readout board's trigger logic: 48 compressors + receiver |
| `rtl/cfglut5.sv` | reloadable 5-input LUT |
| `rtl/hit_classifier_lut.sv` | 6-input classifier table from two `cfglut5` |
| `rtl/long_lived_filter.sv` | integration window and long-lived veto of one wire |
| `rtl/cottri_fe.sv` | front end |
| `rtl/cottri_mb.sv` | merger: active-area sums and CDC trigger |
| `rtl/cth_coincidence.sv` | CTH four-fold coincidence |
| `rtl/trigger_number_tx.sv` | trigger-number transmitter |
| `rtl/central_trigger.sv` | bunch window, coincidence, self-trigger, numbering |
| `rtl/cottri_system.sv` | top level |
| `tb/tb_<module>.sv` | a self-checking testbench for each module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its
own; a watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cottri_pkg.sv rtl/*.sv tb/tb_cottri_fe.sv --top-module tb_cottri_fe
./obj_dir/Vtb_cottri_fe
```

(Verilator warns that the package file is listed twice; the warning is
harmless.) Replace `tb_cottri_fe` with any other testbench name.
`tb_cottri_system` runs the full default configuration: 4320 wires, 10 front
ends, the merger and the central trigger. It takes about three minutes to
build and a few seconds to run.

What the testbenches check, each against a model written independently in
the testbench:
- `tb_recbe_compressor`, `tb_recbe_frontend`: every code and the frame
  strobe timing for random samples.
- `tb_trigger_number_tx`, `tb_trigger_number_rx`: bit order, the 33-clock
  frame, a start while busy being ignored, and `trig` exactly after the last
  bit.
- `tb_cfglut5`, `tb_hit_classifier_lut`: every address of random tables.
- `tb_long_lived_filter`: random bursty streams with several veto settings.
- `tb_cottri_fe`: full-size front end with random per-layer tables and
  random hits; per-wire flags, per-board counts and the 3-clock latency.
- `tb_cottri_mb`: random masks and counts, sums equal to the threshold, and
  latency.
- `tb_cth_coincidence`: random hits, including the wrap-around pair.
- `tb_central_trigger`: the window edges, the 25-clock latency, ID mismatch,
  veto, self-trigger, and the serial frames.
- `tb_cottri_system`: seven end-to-end scenarios: a coincidence trigger
  (checked to the clock, including reception at all 90 boards), window
  rejection, threshold, dummy neighbour, long-lived veto, busy veto and
  self-trigger. Each is counted, and one that never happens is a failure.

Limits of this verification: the tables and thresholds used are test
patterns, not trained GBDT outputs. The physics performance (acceptance and
rate) has therefore not been reproduced. Only the logic that applies a table
and a threshold is tested.

## Changing it

- Front ends with eight boards: `cottri_fe #(.N_RECBE(8))`. The channel
  count must stay a multiple of 16 layers; 384 = 16 x 24 is.
- Different layer coverage: `N_LAYER` on `cottri_fe`, with the table lines
  `lut_cfg_di` to match.
- Different bunch window or integration time: the parameters of
  `central_trigger` (`WIN_START_NS`, `WIN_END_NS`, `CTH_DELAY`) and
  `WIN_FRAMES` of `long_lived_filter`.
- Sizes (word-level): each front end has 432 x (64 table bits + 8 window bits
  + 2) flip-flops, about 32 k. The merger has 48 masks of 90 bits and 48
  adders of 90 inputs each.
