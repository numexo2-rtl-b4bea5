# NUMEXO2 digital processing in SystemVerilog

NUMEXO2 is a 16-channel digitizer for nuclear physics detectors (germanium
crystals, silicon, SiPMs, ionisation chambers). Each channel is sampled by a
14-bit ADC at 200 MS/s. The samples are not stored. They flow through
processing that keeps only the physics: an energy (pulse height), a time stamp
and a time of flight per event. The data shrinks about a thousandfold. The
boards also join a global trigger and time-stamp tree (GTS) that time-aligns
thousands of channels.

This RTL models the processing FPGA of the board. It covers:

- per-channel triggering with a digital constant-fraction discriminator;
- trapezoidal energy shaping with pile-up detection;
- sub-nanosecond time-of-flight measurement against a common STOP signal;
- the alternative energy modes (TAC and charge integration);
- the per-channel and global FIFOs, frame building, and the strobe/acknowledge
  link to the second FPGA;
- the 48-bit time stamp bookkeeping, the counting scales, and the automatic
  search of the ADC input-delay taps;
- an analog demultiplexing mode that reads 2048 channels of multiplexing
  front-end ASICs (GASSIPLEX type) through the 16 ADCs.

The chips around it, the vendor primitives and the second FPGA are outside the
design. Their signals are ports of `numexo2_top`.

Everything is written for one 100 MHz clock `clk` with a synchronous,
active-high `rst`. The only exception is the STOP sampler, which also uses four
400 MHz phases.

## Data flow

```
                    +-------------------- trigger path ---------------------+
 s0,s1 (2x14 bit)   | trigger_filter      trigger_dcfd          cfd_interp   |
 per 10 ns ---> E --+-> 3 x lp_iir --F--> S = F - a F[n-1] --> dichotomy --+ |
 (mean of the pair) |                     LE threshold / dCFD   10 x 50 ns  | |
                    |                          | trig                       | |
                    |  trapezoid -> circ_delay (PRE_DELAY) -> energy_calc --+-+--> energy record
                    |  (k, m, alpha)            |             DV / DNV     |
                    |  raw E (TAC) -------------+                          |
                    |  charge_integrator (200 MS/s) -----------------------+
                    |                                                        
 STOP --> stop_oversampler (4 x 400 MHz, DDR) -> 32-bit pattern -> tof_unit ---> timing record
                                                     +-> stop_dnl_hist (32-code density, DNL)
                                                                             
 16 x dsp_channel --> readout (2 FIFOs/channel, round robin, global FIFO, framing)
                  --> link_tx (DATA_STROBE / ACK_LINK, BUSY) --> second FPGA
 trig_req --------> gts_timestamp (48-bit time stamp, request to the GTS tree)
 disc_trig, DV, DNV --> scalers (48-bit)
 ADC test pattern --> delay_calib (one per channel, 32 taps)
 16 x ADC + gx_clk/gx_hold --> gassiplex_demux (threshold, 280-byte blocks) --> link_tx
```

`numexo2_pkg` holds the shared widths, the per-channel configuration record
`ch_cfg_t`, the record types and the two mode enums.

## Samples

Each channel delivers two samples per 10 ns clock, `s0` (earlier) and `s1`.
The energy and trigger paths run at 100 MS/s on their mean `E`. The charge
integrator uses both samples. The paper does not say how the 200 MS/s stream
is brought down to 100 MS/s. Averaging is this design's choice; it halves the
noise of a plain decimation.

## Trigger

Three first-order low-pass stages, `F[n] = a E[n] + b F[n-1]`, with
(a, b) = (0.2, 0.8), (0.3, 0.7) and (0.4, 0.6), suppress the high frequencies
that the differentiator would amplify. The coefficients are Q1.15 and rounded
to nearest (`lp_iir`). The published equation has a minus sign in front of
`b`. That contradicts the low-pass description and the unit DC gain given by
a + b = 1, so the plus sign is used.

The differentiator `S[n] = F[n] - alpha F[n-1]` removes the preamplifier's
exponential tail. `alpha` is the per-sample decay, Q1.15. A DC baseline B
leaves a constant `(1 - alpha) B` in S, so set the threshold relative to it.

Two trigger modes are available:

- **Leading edge** (`cfd_en = 0`): the request comes on the clock where S first
  reaches the threshold.
- **Constant fraction** (`cfd_en = 1`): S crossing the threshold arms the
  discriminator for 32 clocks. The request then comes at the negative-to-positive
  zero crossing of `dCFD[n] = S[n-D] - f S[n]`. D is 1..15 samples and f is
  given in tenths. The comparison is done as `10 S[n-D] - 10f S[n]`, which
  needs no division. D must exceed the rise of S: with a short D the crossing
  comes before the threshold is reached, and small pulses are lost.

A request is one clock long and is followed by a 50 ns dead time. Requests are
suppressed while:

- BUSY is high;
- the channel's FIFOs are almost full;
- in gate mode, TRIG_IN is low;
- a calibration event is pending.

The two dCFD values around the crossing go to `cfd_interp`. It halves the
10 ns interval ten times, one step per 50 ns, so it always answers after
500 ns. Its result `Tstart` is in 1/1024 of a period.

## Energy: trapezoid, windows and pile-up

`trapezoid` is the recursive trapezoidal shaper with pole-zero correction.
Each of the four taps x[n], x[n-k], x[n-k-m] and x[n-2k-m] is corrected by
alpha (Q0.16). Three circular buffers (`circ_delay`, block RAM) provide the
delays. The tap combination is integrated twice. A step of height A on an
exponential tail with decay alpha becomes a trapezoid with:

- a rise of k samples;
- a flat top of m samples;
- a height of k·A, times 2^16 inside the filter.

The multiplications are 32 bits wide. The two running sums are 48 bits, which
leaves headroom for alpha = 0.9998 and k, m up to 1024 (10.24 µs each).

**The trigger is late.** The trigger path includes three filters, the
differentiator and the CFD delay D. It recognises a pulse 10 to 25 clocks
after the energy path has started to respond to it. The energy stream is
therefore delayed by `PRE_DELAY` = 24 clocks before `energy_calc`. In the
delayed stream the trigger comes first, so the baseline taken just before it
is still clean.

`energy_calc` keeps one moving sum over N = 2^log2n samples (`moving_sum`, a
recursive sum with one subtraction). It then works as follows:

- At the trigger it latches the sum: that is the baseline, the N samples
  before the trigger.
- `q` clocks after the trigger it latches the sum again: that is the flat top.
- It gives out `((flat - baseline) >> log2n) >> e_shift`, clipped to 0..65535.
- The event lasts max(k+m, q+N) clocks. A second trigger inside it marks the
  event DNV (pile-up); otherwise it is DV.

**How to choose q.** Choose it so that the window [q, q+N) lies in the flat
top of the delayed trapezoid. For a pulse that starts at clock 0, the trigger
comes at clock d. In the delayed stream the flat top spans roughly
[k + rise + PRE_DELAY - d, k + m + PRE_DELAY - d). For example:

- Pulses with a 40 ns rise, 0.98 decay per sample, CFD with D = 6 and
  f = 0.5: d is about 16. With k = 20 and m = 16, q = 36 and N = 4 fit.
- The same pulses with a leading-edge trigger: d is about 7, and q = 45 fits.

The trigger mode changes d, so q must change with it.

**TAC mode** (`emode = EMODE_TAC`) bypasses the trapezoid. The same windows
act on the raw stream and give the height of a flat-topped TAC pulse, with
k + m setting the event length.

**Charge mode** (`emode = EMODE_CHARGE`) has `charge_integrator` add both
samples of each clock for `win` clocks from the trigger. It subtracts a
16-clock pre-trigger baseline and shifts the result by `e_shift`. The record
is written at the end of the energy event, so `win` must not exceed
max(k+m, q+N).

## Time of flight

The STOP input is sampled by eight flip-flops: four 400 MHz phases (0°, 45°,
90°, 135°) on both edges, one sample every 312.5 ps. Each 10 ns period then
yields a 32-bit pattern, with bit 31 the earliest sample (`stop_oversampler`).
STOP is active low, so the measured edge is the first one-to-zero transition.
The pattern taken at a clock edge describes the interval from 15 ns to 5 ns
before that edge. The constant is common to all channels.

`tof_unit` starts at the event start and counts whole periods `Tperiod` until
a pattern shows the edge at position `Tstop` (0..31). When `Tstart` arrives it
writes `ns_x32 = (1024 - Tstart) + 1024 Tperiod + 32 Tstop`. That is the
published Ns = 32(1024 - Tstart)/1024 + 32 Tperiod + Tstop, scaled by 32 to
avoid the division. The unit is 10 ns / 1024, so ns_x32 / 102.4 gives
nanoseconds. The range is 64 periods (640 ns, for the published 600 ns). Each
start gives exactly one timing record. It is marked `ok = 0` if no STOP came in
range or if a new start cut the measurement short.

The DNL of the sampler is measured by code density (`stop_dnl_hist`). A STOP
that is not correlated with the clock falls with equal probability on each of
the 32 steps. Counting how often each Tstop value occurs therefore gives the
width of each step. A step with a short phase gap collects fewer hits, and a
missing code shows as an empty bin. The histogram takes the shared STOP
pattern and uses the same edge rule as `tof_unit`. It has 32 saturating
24-bit counters and a total. It is cleared and gated from outside and read one
bin at a time (`dnl_clear`, `dnl_enable`, `dnl_addr`, `dnl_count`,
`dnl_total`). DNL(i) = 32 count(i) / total - 1. The published design also uses
this measurement to correct the phase relationships of the clock manager. How
it does so is not described, so no correction is built here.

## External inputs: BUSY, gate and calibration events

- **BUSY** from the receiving FPGA (two-flop synchronised) stops new trigger
  requests and, through `link_tx`, new words.
- **TRIG_IN** is synchronised once for all channels. Its role is set by
  `trigin_mode`:
  - `TRIGIN_GATE`: requests are processed only while TRIG_IN is high.
  - `TRIGIN_CALIB`: each rising edge makes every channel write a calibration
    record, with energy 60000, DNV, and the time stamp of the edge. The record
    is written as soon as the channel is between events. These records check
    that all channels share one time base.
  - `TRIGIN_OFF`: TRIG_IN is ignored.

## Readout and link

Each channel writes its energy record and its timing record into two FIFOs
(depth 8). A round-robin arbiter moves complete pairs into the global FIFO
(depth 32), so every channel is served whatever its rate. A channel's
almost-full flag (7 of 8 entries) blocks its triggers, so records are not lost.
`ch_overflow` latches if a write is ever refused. The framer sends each event
as eight 16-bit words:

| word | contents |
|------|----------|
| 0 | `4'hA`, channel[3:0], module_id[7:0] |
| 1 | 13 zeros, calib, dv, tof_ok |
| 2-4 | time stamp [47:32], [31:16], [15:0] |
| 5 | energy |
| 6 | 8 zeros, ns_x32[23:16] |
| 7 | ns_x32[15:0] |

This layout stands in for the published frame format, whose structure is not
given.

`link_tx` moves each word with a four-phase handshake, in the style of VME
DS/DTACK:

1. The data is set up one clock ahead.
2. DATA_STROBE rises.
3. The transmitter waits for ACK_LINK (two-flop synchronised).
4. It drops the strobe and waits for ACK_LINK to fall.

An assertion checks that the data stays stable while the strobe is high. With
an immediate acknowledge a word takes about 7 clocks. A frame therefore takes
about 0.56 µs, well above the 200 kframes/s the board has to sustain.

## Time stamps, counting scales, delay calibration

- **`gts_timestamp`** keeps the 48-bit, 10 ns time stamp. It can be loaded from
  the GTS root. Channels that start an event in the same clock are merged into
  one request; the tree accepts one request per board. The request's channel
  mask and time stamp are kept in a FIFO until the decision comes back, since
  decisions return in order. They are then given out with the accept/reject
  flag. A request that finds the FIFO full is reported as lost. The GTS link
  protocol itself is not part of the design. The event frames are not
  filtered by the decision here: the receiving FPGA, which holds the GTS leaf,
  discards the data of rejected events.
- **`scalers`** holds 48-bit per-channel counters of trigger requests, DV
  events and DNV events, for example to measure the fraction of valid energies
  at high rate.
- **`delay_calib`** runs while the ADCs send a fixed test pattern. It steps the
  input delay through 32 taps. At each tap it waits 16 clocks and then compares
  16 words of both samples. The pass/fail bits form a 32-bit word (bit i =
  tap i). The chosen tap is the middle of the longest run of passes: the lower
  middle for even runs, and the lowest run on ties. The delay is left on that
  tap.

## Analog demultiplexing (GASSIPLEX mode)

Multiplexing front-end ASICs hold the amplitudes of their 128 inputs at an
event. They then send them out as an analog pulse train, one amplitude per
sequencing clock. An external sequencer drives the ASICs and also the board's
`gx_hold` (track and hold) and `gx_clk` inputs.

`gassiplex_demux` does the following:

- It synchronises both sequencing signals.
- A rising `gx_hold` starts an event: the event number is incremented and the
  time stamp kept.
- Each rising `gx_clk` takes one amplitude from every ADC channel,
  `gx_smp_delay` clocks later, once the level has settled.
- It compares the 16 amplitudes of a step with their thresholds, one per clock.
- It writes each value above threshold, with its address
  `adc_channel*128 + index` (0..2047), into a block buffer.

A block is 280 bytes: 12 header words and 64 (address, value) pairs. The
header words are:

- word 0: `4'hB, 4'h0, module_id`;
- words 1-2: the event number;
- words 3-5: the time stamp;
- word 6: the block number;
- word 7: the count;
- word 8: the last-block flag.

A block is sent when it is full or when the train ends with at least one
value. An event therefore yields 1 to 32 blocks; an event with no value above
threshold yields none. Two buffers alternate: one fills while the other is
sent. A value that finds both full is dropped and signalled on `gx_lost`.

The sequencing clock period must leave time for the scan: at least
`gx_smp_delay` + 20 clocks. The link also limits it. Sending one block takes
about 1000 clocks, so a train with many values above threshold needs a slower
sequencing clock to avoid losses. For example, 10 % occupancy needs about 50
clocks per step. With `gx_enable` set, the link carries these
blocks instead of the event frames. The switch waits for the frame or block
in progress to end. Event frames produced meanwhile stay in the FIFOs.

## Configuration (`ch_cfg_t`, per channel)

| field | meaning |
|-------|---------|
| trig_alpha | differentiator decay, Q1.15 |
| threshold | on S, signed |
| cfd_en, cfd_delay, cfd_frac | CFD on/off, D (samples), f (tenths) |
| k, m, trap_alpha | trapezoid rise, flat top (samples), decay Q0.16 |
| q, log2n, e_shift | flat-top delay, N = 2^log2n, output shift |
| emode | trapezoid, TAC or charge |
| win | charge window (clocks) |

## Departures from the published design and open points

- The sign of b in the low-pass equation follows the text, not the equation
  (see Trigger).
- The running sums of the trapezoid are 48 bits; the published filter uses
  32-bit integers.
- The 200-to-100 MS/s reduction, the PRE_DELAY alignment, the CFD arming
  window, the event bookkeeping, the frame layout and the demultiplexing
  block header are this design's own.
- Every channel has its own timing path. The published firmware groups two
  energy channels with one timing channel; how it shares them is not
  described.
- Not built:
  - the correction of the STOP sampler's phases from the measured DNL (the
    measurement itself is built);
  - the register access and inspection outputs;
  - the ADC, PLL, deserialiser, clock-manager and Ethernet/PCIe parts.
- The alignment offset between the STOP pattern and `Tstart` is left as a
  calibration constant. So is the absolute zero of ns_x32.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
with a `TB_RESULT checks=… failures=…` line and has a watchdog. For example,
with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/numexo2_pkg.sv tb/tb_dsp_channel.sv --top-module tb_dsp_channel
obj_dir/Vtb_dsp_channel
```

The reference values come from models written inside the testbenches:

- the filter equations, computed bit-exactly;
- the step height seen by the trapezoid, computed from the pulse shape;
- the handshake rules, the fairness of the arbiter, and the FIFO order.

Inputs are driven 1 time unit after the clock edge. `tb/pulse_gen.sv`
produces preamplifier-like pulses: a linear rise of 4 samples, an exponential
decay, noise and pile-up. `tb/v5_link_rx.sv` plays the receiving FPGA, with a
random acknowledge delay.

`tb_numexo2_top` runs the full 16-channel board with every parameter at its
default: K_MAX = M_MAX = 1024, 16 channels. It goes through these phases:

1. input-delay calibration;
2. normal running above the link capacity (link stalls, FIFO almost-full,
   pile-up, time of flight, GTS accept/reject), with the STOP code density
   histogram collected meanwhile (all 32 codes present, one hit per STOP);
3. BUSY;
4. gate mode;
5. calibration pulses;
6. a switch of half the channels to leading edge and one to charge mode;
7. one demultiplexing event of 16 trains of 128 values, read back as blocks
   and compared value by value;
8. a final comparison of the counting scales with the frames received.

It decodes every frame. It checks each DV energy of an isolated pulse to
within 1.5 % and matches each time stamp to its pulse. It counts every
mechanism and fails if one never happened. It runs in well under a minute.
