# POM: a single-chip wire-chamber digitizer, in SystemVerilog

A wire in a drift chamber sees a short current pulse whenever a charged particle
passes near it. Reading it out fully takes three measurements:

* the **drift time**: when the pulse crossed a threshold, relative to a common
  reset signal;
* the **time difference between the two ends of the wire**: this gives the
  position along the wire, and needs a resolution of tens of picoseconds;
* the **pulse shape**: the energy deposited, from a few ADC samples around the
  crossing.

POM is a 4-channel prototype digitizer in 65 nm CMOS that does all three on one
chip for the Mu2e straw tracker. Each channel has:

* a preamplifier/shaper;
* discriminators;
* **two 16-bit TDCs that share one ring oscillator**, for the near end and the
  far end of the same wire;
* an **8-bit pipeline ADC** whose samples go into a small pre/post-trigger
  buffer.

A shared digital backend takes commands and declares an event at the first hit.
It then ships the data out serially and halts.

The central idea is the shared oscillator. Both TDCs of a channel count the same
ring, from the same start. Their difference therefore needs no fast clock
distributed along the wire, and the ring's start-up jitter cancels out of it.

This repository holds RTL for the digital parts of the chip. It also holds
behavioural models for the analog parts that the digital parts need in
simulation: the ring oscillator, the ADC stages, the discriminators and the
input multiplexers. Every module has a self-checking testbench. The chip-level
testbench runs complete events through all four channels.

## 1. One channel

```
 NEPA --PRE--+                        +--> discriminator --(STOP1)--> TDC bank 0 --+
             +--> MUX (near) --+------+                                            |
 NEXPA -EXT--+                 |      +--> pipeline ADC --> pre/post buffer -------+--> backend
             |                 |                                                   |
             +--> MUX (far) ---+--> discriminator --> FADO (LVDS out)              |
 FEPA --PRE--+                                                                     |
 FETDC (LVDS in) ---------------------------------------(STOP2)--> TDC bank 1 -----+
```

The near-end multiplexer feeds both the discriminator that stops TDC0 and the
ADC. It chooses either the internal preamplifier (NEPA input) or the receiver
buffer for an external preamplifier (NEXPA input).

The far-end multiplexer feeds a second discriminator whose output leaves the chip
as FADO. On the board, FADO of one channel (possibly on another chip, next to the
far end of the wire) is wired back into FETDC of the channel that reads the near
end, where it stops TDC1. The analog circuits can therefore sit close to each
wire end, and only a digital timing signal crosses the length of the wire. Two
configuration bits switch each TDC and the ADC to dedicated test inputs.

`pom_channel` holds exactly this. The preamplifiers (PRE), receiver buffers (EXT),
LVDS pads and input switches are analog circuits. They are not modelled: their
output voltages enter as ports, and FADO/FETDC are single wires.

**Voltages in simulation.** Analog signals are carried as signed 24-bit integers
in microvolts (`pom_pkg::uv_t`). The ADC has a 1 mV LSB and 8 bits, so its input
range is ±128 mV around mid-code 128.

## 2. The TDC (`tdc`, `ring_osc`, `tdc_counter`, `tdc_hit_register`)

A TDC word is 16 bits: an 11-bit loop count above a 5-bit ring phase. One LSB is
one ring-stage delay, 37 ps. The full range is 2^16 LSB ≈ 2.42 µs, which covers
the ~2 µs drift window.

**Ring and phases.** The ring has 16 differential stages. Their 16 outputs and
their complements give 32 phases per loop, and one loop is 32 × 37 ps ≈ 1.18 ns
(about 850 MHz).

* While `start_n` is low, every stage is held at 0.
* After `start_n` rises, stage *k* first rises (k+1) stage delays later. The
  stages fill with ones from the bottom, then empty again from the bottom.
* With T the number of whole stage delays since start, the stage pattern is
  therefore a twisted-ring (Johnson) code of `T mod 32`.

The decoder in `tdc_hit_register` turns a latched pattern back into a phase:

* with `s[0]` set and *n* ones, the phase is *n*;
* with no ones, the phase is 0;
* otherwise it is 32 − *n*.

**Loop counter.** The 11-bit counter is clocked by the complement of the last
stage. That edge is exactly the wrap of the phase from 31 to 0, so during step T
the counter holds `T / 32`.

**Capturing a stop.** This is the delicate part. The phase and the count must
describe the same instant, but the counter may be switching when the stop
arrives. The bank works in two steps:

1. At the stop's rising edge, the 16 stage outputs are latched (sense amplifiers
   in silicon, flip-flops here).
2. The counter is latched later, at the next rising edge of the last stage. That
   edge falls at phase 16, half a loop away from the counter's own edge, when
   the count is stable:
   * a stop at phase 0–15 meets that edge in the same loop, so the count is
     already right;
   * a stop at phase 16–31 meets it only after the counter has stepped once
     more, so one is subtracted whenever the phase MSB is set.

   The result is `time = {count_latched − phase[4], phase}`. It is valid (`hit`)
   at most about one loop after the stop.

The paper says only that re-synchronization circuits make separate latch
signals for the phase bank and the counter bank, to avoid metastability. The
rule above is this design's.

The rule has one failure mode, and it matches what the paper measured. If supply
noise shifts the stage delays so that the phase latch and the re-timed counter
latch disagree about a stop near phase 16, the result is off by exactly one loop,
32 LSB. The prototype showed rare outliers about 32 counts off, in step with the
50 MHz clock edges. The model has no noise, so it never produces them.

Only the first stop after `start_n` rises is recorded. `start_n` low clears both
banks. That is the only way to re-arm a TDC, and the DAQ drives it as the common
TDC reset.

## 3. The pipeline ADC (`adc_pipeline`, `adc_stage`, `adc_correction`)

The ADC has seven identical 1.5-bit stages. Each stage samples its input and
makes a three-way coarse decision (thresholds ±VREF/4). It subtracts the decided
level (−VREF, 0 or +VREF, through the sub-DAC) and doubles the rest for the next
stage:

```
d = 2 if v > VREF/4;  0 if v < -VREF/4;  else 1
v_next = 2·v − (d−1)·VREF        (limited to ±VREF: amplifier saturation)
```

VREF is 128 mV. Each stage registers its code and residue on the clock, so seven
samples are in flight and one code leaves per clock.

`adc_correction` delays the code of stage *i* by 6 − *i* clocks, so that all
codes of one sample line up, and adds them with one bit of overlap:

```
code = 1 + Σ d_i · 2^(6−i)        = 128 + Σ (d_i − 1) · 2^(6−i)
```

The redundancy is the point of "1.5 bits". A decision that a comparator gets
slightly wrong leaves a residue that the later stages still cover, and the sum
comes out right. The code is within one LSB of `128 + vin/1 mV`, in the range
1..255 (code 0 does not occur). It appears **7 clock edges** after the sample
was taken.

Capacitor mismatch, which caused missing codes in the prototype, is not
modelled. Neither is the offline code-density calibration the prototype needed.

## 4. Catching the waveform (`adc_fifo`)

The ADC converts all the time, and its codes shift through a 10-entry buffer.
The goal is to keep 2 samples from before the threshold crossing and 8 from after
it. Two delays sit between the crossing and the moment the buffer may freeze:

* the backend needs **3 clock edges** to see the crossing. The stop sets a
  catcher flip-flop, two synchronizer flops follow, and the trigger to the
  buffers is registered;
* a code leaves the ADC **7 edges** after its sample.

Let the trigger reach the buffer at edge *t*. The first sample after the crossing
was then taken at edge *x = t − 3*. The buffer shifts another 8 + 7 − 3 = 12
edges and freezes, holding the samples of edges *x−2 … x+7*:

* `samples[0..1]` are baseline;
* `samples[2]` is the first sample after the crossing.

The delays are the parameters `LATENCY` and `TRIG_DELAY` (defaults 7 and 3). If
either side's timing changes, change them together.

## 5. The backend (`pom_backend`, `cmd_rx`, `tmr_config`)

One state machine serves all four channels.

| state   | what happens | leaves on |
|---------|--------------|-----------|
| IDLE    | nothing recorded | ARM |
| ARMED   | sample buffers run; stop catchers enabled | first near-end stop of an enabled channel → trigger all buffers; DISARM → IDLE |
| CAPTURE | wait until every buffer has frozen | all `done` |
| SEND    | 4 packets out on TXOUT, TXDR high | last bit |
| HALT    | further hits ignored | ARM |

One event has one trigger, common to all channels. Every channel's TDC words and
samples are sent, whether or not that channel was hit. Like the prototype, the
backend halts after one hit: there is no double-hit readout.

**Commands** come in on `rxin`, which idles low. A frame is a start bit `1` and 16
bits, MSB first, one bit per clock: `{op[3:0], arg[11:0]}`.

| op | name | arg |
|----|------|-----|
| 1..4 | WRCFG0..3 | configuration word of channel 0..3 |
| 8 | ARM | – |
| 9 | DISARM | – |

**Packet** (per channel, 120 bits, MSB first, one bit per clock on `txout`, with
`txdr` high for every packet bit; channels 0..3 back to back):

| bits | field |
|------|-------|
| 119:116 | `4'hA` marker |
| 115:114 | channel number |
| 113 / 112 | TDC0 / TDC1 hit flags |
| 111:96 | TDC0 (near end) |
| 95:80 | TDC1 (far end) |
| 79:0 | samples 0..9, 8 bits each, oldest first |

At the 50 MHz clock an event takes 3 + 12 clocks of capture and 480 bits of
transmission, about 10 µs.

**Configuration** (12 bits per channel, `pom_pkg::chan_cfg_t`, MSB first):

| field | bits | use |
|-------|------|-----|
| `en` | 11 | this channel's near-end stop can start an event |
| `adc_test` | 10 | ADC converts `adc_test_v` |
| `tdc_test` | 9 | TDC stops come from `test_stop` |
| `far_ext` | 8 | far MUX: 1 = receiver buffer, 0 = far preamplifier |
| `near_ext` | 7 | near MUX: 1 = receiver buffer, 0 = near preamplifier |
| `spare` | 6 | – |
| `pz_sel` | 5:2 | preamplifier pole-zero setting (to the analog preamplifier) |
| `rf_sel` | 1:0 | preamplifier gain setting (to the analog preamplifier) |

Each word is held three times and read through a bitwise majority vote. A single
upset in one copy does not reach the chip. There is no scrubbing, so upsets in
two copies of the same bit do.

## 6. What follows the paper and what does not

**Taken from the paper:**

* 4 channels per chip;
* two TDCs per channel on one 16-stage / 32-phase ring, with an 11-bit loop
  counter, 16-bit words, and about 37 ps per LSB;
* two hit-register banks, with separate latching for phase and counter;
* a 7-stage 1.5-bit pipeline ADC: 8 bits, 1 mV LSB, converting continuously;
* 2 pre-trigger and 8 post-trigger samples;
* the discriminator, which is high while the signal is above an external
  threshold;
* the PRE/EXT multiplexers, and the FADO/FETDC far-end path;
* test inputs for the TDCs and the ADC;
* a backend that halts after one hit, answers DAQ commands, and sends data
  serially on the pins TXOUT and TXDR;
* triple-redundant configuration registers;
* the 50 MHz operation clock.

**Choices of this design** (the paper does not give them):

* how the ring is held at start;
* which phase clocks the counter, and the re-timing/correction rule;
* the phase decoder;
* decision levels and one-clock-per-stage timing in the ADC, and the correction
  adder form;
* the buffer as a shift register, and its trigger alignment;
* the stop catchers;
* backend states, command frame and opcodes;
* packet format and TXDR/TXOUT protocol;
* configuration layout and reset values;
* a common trigger for all channels;
* wrap-around of the TDC counter.

**Departures and limits:**

* analog behaviour is idealised: no ring phase noise, no comparator noise or
  time walk, no ADC capacitor mismatch, no clock crosstalk. The paper's
  measured imperfections (32-count TDC outliers, missing ADC codes,
  discriminator noise) therefore do not appear in simulation;
* the preamplifier, receiver buffer, LVDS drivers/receivers, input switches,
  pads and supplies are not modelled;
* the 5-bit phase is binary coded here. The paper does not say how the chip
  encodes it;
* the stage delay is 37 ps: the simulated and measured value. The paper also
  quotes a design target of 35 ps;
* the paper says the counter banks capture "at the stop's leading edge", through
  re-synchronization circuits. Here that edge is the next mid-loop ring edge
  after the stop, as described in section 2;
* the ADC runs at the 50 MHz operation clock. The paper gives 65 MS/s as the
  converter's maximum rate; at 65 MHz the model's timing is the same in clocks.

## 7. Files and parameters

| module | role | kind |
|--------|------|------|
| `pom_pkg` | shared types, sizes, configuration struct, opcodes | package |
| `pom_top` | 4 channels + backend | RTL (instantiates the models) |
| `pom_channel` | one channel | RTL |
| `tdc` | dual TDC | RTL around the ring model |
| `ring_osc` | 16-stage ring | behavioural (`#` delays) |
| `tdc_counter` | 11-bit loop counter | RTL |
| `tdc_hit_register` | one capture bank | RTL (stop- and ring-clocked) |
| `adc_pipeline` | 8-bit ADC | behavioural stages + RTL correction |
| `adc_stage` | one 1.5-bit stage | behavioural (integer µV arithmetic) |
| `adc_correction` | alignment and overlap adder | RTL |
| `adc_fifo` | pre/post-trigger buffer | RTL |
| `discriminator`, `analog_mux` | front-end comparators and multiplexers | behavioural |
| `pom_backend` | state machine, serializer | RTL |
| `cmd_rx` | command receiver | RTL |
| `tmr_config` | triple-redundant register | RTL |

Main parameters:

| parameter | default |
|-----------|---------|
| `NCH` | 4 |
| `ring_osc.STAGES` | 16 |
| `STAGE_DELAY_PS` | 37 |
| `tdc_counter.WIDTH` | 11 |
| `adc_pipeline.STAGES` | 7 |
| `VREF_UV` | 128000 |
| `adc_fifo.PRE` / `POST` | 2 / 8 |
| `adc_fifo.LATENCY` / `TRIG_DELAY` | 7 / 3 |

All defaults are the paper's numbers where it gives one. Nothing is scaled down.

Clock domains:

* `clk`, the 50 MHz clock of the ADC, sample buffers and backend;
* the ring phases, which clock the counter and the re-timed counter latch;
* each stop signal, which clocks its phase latch and its catcher.

Only hit flags and stop catchers cross into `clk`, through two-flop
synchronizers. TDC words are read many clocks after they have settled.

## 8. Simulating

Every file carries `` `timescale 1ps/1ps ``. The testbenches need Verilator's
timing support. For example, the chip-level test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl \
    rtl/pom_pkg.sv rtl/pom_top.sv tb/tb_pom_top.sv --top-module tb_pom_top
./obj_dir/Vtb_pom_top
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog. `tb_pom_top` runs the whole chip at its default size in a few seconds.
It models the board wiring of both example configurations: FADO1→FETDC0 for an
internal-preamplifier wire on channels 0/1, and FADO3→FETDC2 for an
external-preamplifier wire on channels 2/3. It runs five events:

* internal input, with stops in both halves of the ring loop;
* external input, with the ADC saturated;
* a stop 2 µs after start;
* test-input mode.

Each event's packets are checked against times and voltages worked out in the
testbench. The test also checks that hits on a disabled channel, hits while
disarmed and hits during readout are ignored. It counts each of these mechanisms
and fails if one never happened.

The unit testbenches check:

* `tb_ring_osc`: the stage pattern at every step;
* `tb_tdc_hit_register`: an ideal ring generated in the testbench, stops at
  every phase of the first loops, random stops, and the 2^16 wrap;
* `tb_tdc`: the real ring, pairs of stops and their difference;
* `tb_adc_stage`, `tb_adc_correction`, `tb_adc_pipeline`: the stage equations, the
  overlap sum, ±1 LSB accuracy, and no missing code on a ramp;
* `tb_adc_fifo`: the exact sample window and freeze timing;
* `tb_tmr_config`: single upsets are masked and double upsets win the vote;
* `tb_cmd_rx` and `tb_pom_backend`: frames, the state machine, and bit-exact
  packets;
* `tb_pom_channel`: one channel in both input modes and with both test inputs.

To change the design:

* the TDC range is `tdc_counter.WIDTH` (also `pom_pkg::TDC_CNT_W`);
* the sample window is `ADC_PRE`/`ADC_POST` in `pom_pkg`; the packet length
  follows from them;
* a faster or slower ADC model needs `ADC_LAT` to follow;
* a different backend synchronizer needs `adc_fifo.TRIG_DELAY` to follow.
