# Two-stage time-stretching TDC

A time-to-digital converter (TDC) that reaches sub-100 ps resolution with
nothing faster than a 100 MHz counter. The trick is analog: a capacitor is
discharged quickly while the input pulse is high and recharged about ten
times more slowly afterwards, so a comparator on the capacitor produces a
pulse about eleven times wider than the input. A counter then measures the
wide pulse. Stretching once by a factor S gives an LSB of T/S (T = 10 ns
clock period). Stretching by S*S in one go would make the conversion take
S*S times the input width. This design therefore stretches twice:

1. The input pulse is stretched by S0 ≈ 11 and counted in whole clock
   periods (N0).
2. The two leftover fractions of a clock period at the start and the end of
   the stretched pulse (the *edge1* and *edge2* residuals) are cut out by
   logic. Each is stretched again (S1, S2 ≈ 11) and counted (N1, N2).

The total stretch is about 120, so the LSB is about T/120 ≈ 83 ps. The
conversion time is the sum of the two stages, not their product: about
300 ns for a 10 ns input.

This RTL is based on the discrete-component prototype published by Y. Chu
and Z. Zhang, "A two-stage time-stretching TDC with discrete components".
In that prototype the stretchers are built from transistors and a capacitor
on a PCB, and the counting and edge detection run in an Intel MAX 10 FPGA.
Here:

* the FPGA part is synthesizable SystemVerilog (`tdc_fpga` and below);
* the analog parts (the stretcher and the on-board pulse generator) are
  behavioural models with picosecond-accurate edges, so the whole board
  (`tdc_board`) can be simulated end to end.

## Signal chain

```
 toa_front_end ──┐
 pulse_generator ┼─► S0 time_stretch_unit ──► counter_edge_detect ──► N0
  external pulse ┘                                │edge1   │edge2
                                                  ▼        ▼
                                   S1 time_stretch_unit  S2 time_stretch_unit
                                                  │        │
                                          width_counter  width_counter
                                                  ▼        ▼
                                                  N1       N2
      N0, N1, N2 ──► tdc_acquisition ──► event ──► width_reconstruct ──► width (ps)
```

`tdc_fpga` contains `toa_front_end` and everything from
`counter_edge_detect` onwards. It has one clock, `clk` at 100 MHz, and an
asynchronous active-low reset `rst_n`. The three sources at the S0 input
are ORed; only one should be active at a time.

## What is measured, and how the three counts combine

The first-stage stretched pulse starts at time t_r and ends at t_f. Let
e1 be the time from t_r to the next rising clock edge, and e2 the time from
t_f to the next rising clock edge. Say K rising clock edges fall inside the
pulse. The first one is at t_r + e1, the last one at t_r + e1 + (K-1)T, and
the next one, at t_f + e2, is KT after the first. So

```
W0 = t_f - t_r = (K-1)*T + T + e1 - e2 .
```

The counter reports **N0 = K - 1**: the whole clock periods between the
first and the last edge inside the pulse. With that convention the
reconstruction is

```
input width = S0^-1( N0*T + T + S1^-1(N1*T) - S2^-1(N2*T) )
```

Here Si^-1 maps the output width of stretcher i back to its input width.
With constant factors this is (N0 T + N1 T/S1 + T − N2 T/S2)/S0.

`width_counter` counts the rising clock edges at which it samples its pulse
high. For N1 and N2 that count, times T, is an unbiased estimate of the
stretched residual. `counter_edge_detect` subtracts one to form N0. Each
second-stage count is off by less than one period. After dividing by S1
and S0, two such errors bound the result error at 2T/(S0*S1) ≈ 165 ps.
The end-to-end tests check this bound.

### The residual pulses (`edge_detect`)

The residuals are made by a shift register of flip-flops clocked by `clk`
and two gates:

```
q      <= {q, pulse}            // EXT_CYCLES+1 flip-flops
edge1   = pulse & ~q[EXT_CYCLES]
edge2   = ~pulse & q[EXT_CYCLES]
```

edge1 rises with the pulse and falls on the (EXT_CYCLES+1)-th rising clock
edge after it. edge2 does the same for the falling edge. Both outputs
combine an asynchronous input with flip-flop outputs on purpose: their
widths carry the sub-period information. They are meant to drive the analog
stretchers directly and must not be used as synchronous signals.

With `EXT_CYCLES = 0` the residuals are exactly "edge to the next clock
edge", 0 to 10 ns wide. A stretcher cannot handle the short end of that
range: below about 1 ns it produces nothing, and below about 5 ns it is
nonlinear. The default `EXT_CYCLES = 1` adds one whole period, so the
second stage sees 10 to 20 ns. The same period is added to both residuals
and cancels in e1 − e2. This is a choice of this design. The prototype
defines the residuals as reaching the next edge. However, its second-stage
calibration curves span 8 to 24 ns, and it recommends adding a clock period
to keep inputs in the linear region.

## Calibration tables (`stretch_lut`)

The real stretchers are not linear enough for one constant factor. Each
one therefore gets a table of calibration points: the output width measured
for input widths IN0 + k*STEP. The default step is 0.5 ns. The S0 table
covers 4 to 30 ns (53 points); the S1/S2 tables cover 4 to 24 ns (41
points). A lookup finds the segment that holds the measured width and
interpolates linearly. The end segments are extended. The segment search is
a comparison against every point, followed by one division; the result is
registered, so a lookup takes one cycle. After reset each table holds the
ideal line out = 11 × in.

Tables are written through the calibration port of `tdc_fpga`:

| signal          | meaning                                             |
|-----------------|-----------------------------------------------------|
| `cal_we_i`      | write strobe                                        |
| `cal_sel_i`     | `LUT_S0`, `LUT_S1` or `LUT_S2`                      |
| `cal_addr_i`    | point index k (`CAL_AW` = 6 bits, up to 64 points)  |
| `cal_out_ps_i`  | measured output width for input IN0+k*STEP, in ps   |

The points must increase with k. `width_reconstruct` looks up S1 and S2 in
parallel, forms W0, then looks up S0. Its result (`width_ps_o`, signed ps)
follows the event by two clock cycles. `EDGE1_CORR_PS` and `EDGE2_CORR_PS`
add a constant to each residual. They correct the fixed delay of the
edge-detection path in real hardware. Their value has to come from
measurement, so they default to 0.

## Conversions, events and dead time (`tdc_acquisition`)

The three counts finish in no fixed order. N1 may be ready before N0.
N2 usually finishes last, because edge2 only starts when the first-stage
pulse ends. For a short first-stage pulse with a long edge1 and a short
edge2, N1 can still be later. The controller waits for all three:

* opens a conversion at the first cycle any counter samples a pulse. A pulse
  may come from anywhere: the on-board generator, the push-button, a hit
  through the TOA front end, or an external source.
* fires the on-board pulse generator when `start_i` is pulsed while idle.
  `trig_o` stays high for `TRIG_CYCLES` (20 cycles = 200 ns) so that the
  generator's RC nodes settle. The conversion opens at once, because the
  stretched pulse starts while the trigger is still high.
* emits one `tdc_event_t` (`ev_o`, `ev_valid_o`) when N0, N1 and N2 are all
  in. The event carries the counts, an overflow flag and `conv_cycles`. That
  field counts the cycles from the first activity to the last count, which
  is the measured dead time.
* closes the conversion with `timeout` set if it is not complete within
  `TIMEOUT_CYCLES` (100 cycles = 1 µs). A timed-out event is reported but not
  reconstructed.

Worked example, 10 ns input, default models:

* S0 turns it into a 99.5 ns pulse, so N0 ≈ 9.
* The residuals are 10 to 20 ns wide and come back 99.5 to 209.5 ns wide.
* edge2's stretched pulse starts when the S0 pulse ends.
* The event therefore leaves roughly 200 to 310 ns after the input. The
  end-to-end test observed up to 28 cycles (280 ns).

## Time of arrival (`toa_front_end`)

In a detector the quantity of interest is usually the arrival time of a
hit, not a pulse width. The TDC measures it by forming a pulse that starts
with the (already discriminated) hit and ends on a clock edge. Ending it on
the very next rising edge would give widths from 0 to 10 ns. That includes
the short widths where a stretcher is least linear; below about 0.94 ns it
gives no output at all. So one extra clock period is added: the pulse ends
on the *second* rising edge after the hit and is 10 to 20 ns wide.
`OFFSET_HALVES = 1` ends it on the falling edge after the first rising edge
instead (5 to 15 ns, shorter dead time, needs a 50 % clock duty cycle). The
result is

```
toa_ps_o = width_ps_o − OFFSET_HALVES · T/2
         = time from the hit to the next rising clock edge (0 … T)
```

`toa_valid_o` pulses with `width_valid_o` only for conversions that a hit
started. The absolute arrival time is that clock edge minus `toa_ps_o`; a
coarse timestamp of the edge is left to the user.

The circuit avoids asynchronous clears. The hit clocks a toggle flip-flop.
Shifted copies of the toggle follow it on the clock, and the pulse is the
XOR of the toggle and the copy two rising edges (or one and a half edges)
later. A hit is accepted only while the front end is armed:

* the acquisition is not busy;
* no pulse is in flight;
* 4 cycles (`HOLDOFF_CYCLES`) have passed since the last hit, which covers
  the delay until the acquisition reports busy.

Other hits are ignored. After reset the output stays masked until the
toggle and its copies agree, because the hit-clocked flip-flop is not
reset by a clock.

## Analog models

`time_stretch_unit` tracks the capacitor voltage in closed form between
input edges:

* slope −I2/C1 while the input is high, down to 0 V;
* while the input is low, recharge at +I1/C1 · (1 − DROOP · V/VDD), up to
  VDD (an exponential approach when DROOP > 0);
* the comparator output (high while the voltage is below VTH) switches at
  the exact crossing time.

With the default DROOP = 0 this is the ideal, piecewise-linear circuit.

With the prototype's values (I1 = 10 mA, I2 = 100 mA, C1 = 470 pF,
VDD = 5 V, VTH = 4.8 V), an input of width w longer than 0.94 ns gives

```
out = 11*w − 10.5 ns,
```

and inputs shorter than 0.94 ns give no output. Above 23.5 ns the
capacitor empties and the gain drops to 1. The real circuit recharges more
slowly near 5 V, which bends its curve. The calibration tables exist to
absorb that bend. The prototype gives no law for it, so DROOP is this
model's own knob: with DROOP = 0.3 the recharge current falls by 30 % at
VDD. A 10 ns input then gives about 127 ns instead of 99.5 ns, and the
gain varies with width, which gives the tables something real to correct.

`JITTER_PS` adds Gaussian noise to the end of each output pulse. Its RMS is
`JITTER_PS × 11`, so `JITTER_PS` is the jitter referred to the input. The
prototype measured about 47 ps for the first stage and up to 120 ps for each
second-stage unit, plus up to 120 ps per edge in the FPGA's edge detection.
`tdc_board` exposes it as `S0_JITTER_PS` and `S12_JITTER_PS`. All jitter
defaults to 0, so the default tests are exact and repeatable. The model has
no comparator delay.

`pulse_generator` models the RC-delay generator. A start step charges two
10 pF nodes, through R2 = 1 kΩ and through the variable R1. One comparator
reports "R2 node above threshold", the other "R1 node still below
threshold", and an AND gate gives their overlap:

```
width = (R1 − R2) · C · ln 2 ≈ 6.93 ps per ohm    (threshold at half of 5 V)
```

For example, R1 ≈ 2.44 kΩ gives 10 ns. The start step is the push-button
(`sw_i`) ORed with the FPGA trigger (`trig_i`). The model assumes the start
level stays high long enough for both nodes to settle; otherwise a spurious
second pulse can appear when it is released.

Both models use real numbers and timing controls, so they are for
simulation only. `tdc_board` wires them to `tdc_fpga`. Its `ext_pulse_i`
injects a pulse of exact width at the S0 input, which is how the testbench
calibrates the tables: it plays the oscilloscope.

## Files

| file | contents |
|------|----------|
| `rtl/tdc_pkg.sv` | clock period, count/ps types, `tdc_event_t`, `lut_sel_e` |
| `rtl/edge_detect.sv` | residual (edge1/edge2) generation |
| `rtl/width_counter.sv` | pulse counter |
| `rtl/counter_edge_detect.sv` | N0 counter + edge detection |
| `rtl/tdc_acquisition.sv` | trigger, event gathering, dead time, timeout |
| `rtl/toa_front_end.sv` | hit → pulse of (time to next edge + offset) |
| `rtl/stretch_lut.sv` | interpolating calibration table |
| `rtl/width_reconstruct.sv` | counts → input width |
| `rtl/tdc_fpga.sv` | synthesizable top of the digital part |
| `rtl/time_stretch_unit.sv` | stretcher model (simulation only) |
| `rtl/pulse_generator.sv` | RC pulse generator model (simulation only) |
| `rtl/tdc_board.sv` | whole board: models + `tdc_fpga` |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_resolution_scan.sv` | resolution and bias versus width for several calibrations |
| `tb/tb_toa_dead_time.sv` | time of arrival with the half-cycle offset, and its dead time |

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog.
Each compares against values it works out from pulse timestamps or closed
formulas, not from the design. `tb_tdc_board` runs the whole board at its
default parameters:

1. calibration of all three tables;
2. 40 directly injected pulses of 7 to 23 ns;
3. 16 pulses from the on-board generator, fired alternately by the FPGA
   trigger and the push-button;
4. 20 hits on `hit_i`, with the time of arrival checked to ±0.2 ns.

It checks every width to ±0.2 ns and the dead time against its bound. Each
of these mechanisms must occur.

`tb_toa_dead_time` runs the board with the half-cycle TOA offset
(`TOA_OFFSET_HALVES = 1`, 5 to 15 ns pulses) on 60 hits. It checks each
arrival time to ±0.2 ns and the dead time against its bound. The largest
dead time seen is 370 ns. The prototype estimates about 300 ns for this
case, with S0 = 10 and residuals that are not extended by a clock period.

`tb_resolution_scan` measures the whole chain the way the prototype's
performance plots do. Six boards with bent stretchers (DROOP = 0.3) see
the same pulses: 10 to 20 ns in 1 ns steps, 40 random clock phases each.
Their tables are filled differently:

| board | tables | worst bias | RMS over 10–20 ns |
|-------|--------|-----------:|----------:|
| fine   | exact output widths, 0.5 ns input step | 22 ps | 13–52 ps |
| coarse | exact output widths, 2 ns input step (14/11 points) | 16 ps | 13–52 ps |
| raw    | reset contents (ideal gain 11) | 2.7 ns | 17–73 ps |
| cal05  | 0.5 ns step, outputs measured by a 0.5 ns-LSB counter | 23 ps | 12–50 ps |
| cal2   | 0.5 ns step, outputs measured by a 2 ns-LSB counter | 108 ps | 14–52 ps |
| jitter | as fine, stretchers with 47 ps (S0) and 170 ps (S1, S2) jitter | 26 ps | 49–71 ps |

The calibration counter is modelled as counting the edges of a clock with
random phase that fall inside the stretched pulse. The results match the
prototype's findings. A 2 ns calibration step is as good as 0.5 ns. A
coarse calibration counter adds bias but not spread. Without jitter the RMS
is the quantization term alone. It swings with width (13–52 ps) because
the residuals of a given width sample the clock in a fixed pattern. The
jitter board uses the prototype's measured values. The 170 ps combines the
stretching and edge-detection jitter of a second-stage unit in quadrature.
It gives 53 ps at 10 ns. The prototype's budget is 67 ps, and it measured
63 ps at 10 ns and 60–100 ps over 10–20 ns. The model has no other noise
source.

## Simulating

With Verilator 5 (timing support is needed for the models and testbenches):

```
verilator --binary --timing -Irtl -y rtl +libext+.sv \
    rtl/tdc_pkg.sv tb/tb_tdc_board.sv --top-module tb_tdc_board -o sim
./obj_dir/sim
```

Replace `tb_tdc_board` with any other testbench. Each simulates in a few
seconds; `tb_resolution_scan` takes the longest. Lint the synthesizable part with
`verilator --lint-only -Wall -Irtl -y rtl rtl/tdc_pkg.sv rtl/tdc_fpga.sv`.
All modules declare `timeunit 1ns; timeprecision 1ps;`.

## Parameters worth changing

| parameter | where | default | effect |
|-----------|-------|---------|--------|
| `EXT_CYCLES` | `tdc_fpga`, `tdc_board` | 1 | clock periods added to both residuals |
| `TRIG_CYCLES` | `tdc_acquisition` | 20 | length of the generator trigger |
| `TIMEOUT_CYCLES` | `tdc_acquisition` | 100 | conversion timeout (1 µs) |
| `S0_NPTS`, `S12_NPTS`, `S0_IN0_PS`, `S12_IN0_PS`, `LUT_STEP_PS` | `tdc_fpga`, `tdc_board` (`NPTS`, `IN0_PS`, `STEP_PS` in `stretch_lut`) | 53, 41, 4000, 4000, 500 | table geometry; a 2 ns step (14 and 11 points) works nearly as well |
| `CAL_AW` | `tdc_pkg` | 6 | calibration address width; limits tables to 64 points |
| `EDGE1_CORR_PS`, `EDGE2_CORR_PS` | `tdc_fpga` | 0 | constant residual corrections |
| `TOA_OFFSET_HALVES` | `tdc_fpga`, `tdc_board` | 2 | TOA offset in half clock periods (2: 10–20 ns pulses, 1: 5–15 ns) |
| `S_VTH`, `S_I1_MA`, `S_I2_MA`, `S_C1_PF` | `tdc_board` | 4.8, 10, 100, 470 | stretcher components (all three) |
| `S_DROOP` | `tdc_board` | 0.0 | relative fall of the recharge current at VDD (stretcher bend) |
| `S0_JITTER_PS`, `S12_JITTER_PS` | `tdc_board` | 0.0 | input-referred stretcher jitter, RMS |
| `CNT_W` | `tdc_pkg` | 8 | counter width (saturates, flags overflow) |

## How far to trust it, and where it departs from the prototype

* **Follows the prototype:** the two-stage structure, the definition of
  the residuals, the reconstruction formula, the 100 MHz clock,
  table-based calibration with 0.5 ns steps, and the component values of
  the stretcher and pulse generator.
* **Choices of this design:**
  * the gate-level form of the edge detector and its extension by one
    clock period;
  * the N0 = K−1 counting convention, derived from the reconstruction
    formula;
  * the acquisition state machine, event format, trigger length and 1 µs
    timeout;
  * integer-picosecond arithmetic and the one-division interpolation;
  * performing the reconstruction in hardware (the prototype does not say
    where its conversion runs);
  * combining the push-button and FPGA trigger with an OR;
  * the TOA pulse circuit and its arming rule (the prototype describes only
    the added offset, and was itself tested with generated pulses, not
    hits);
  * the linear droop law for the stretchers' bend, and where their jitter
    enters;
  * an assertion in `counter_edge_detect` that the edge detector and the
    counter saw the same samples of the pulse.
* **Not modelled:**
  * metastability of the sampling flip-flops, which a real implementation
    with asynchronous pulses has to live with;
  * comparator delays;
  * the jitter of the edge detection itself (the scan folds it into the
    second-stage jitter);
  * the current-source regulators and the pulse driver, which have no
    logic function;
  * the proposed on-chip calibration TDC for a future ASIC (the scan models
    only its quantization).
* The dead time with the default one-period residual extension reaches
  roughly 310 ns in the worst case for a 10 ns input. That is slightly
  above the ~300 ns of the prototype.
* All tests except one board of `tb_resolution_scan` use noise-free
  models. The resolution they show (quantization only) is not the
  60–100 ps RMS measured on real hardware, where stretcher jitter
  dominates.
