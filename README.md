# Online neutron/gamma discrimination with the partial charge-to-peak ratio

Organic and CLLB scintillators answer neutrons and gamma rays with light
pulses of different shapes: a neutron pulse carries relatively more light in
its slow, late component. The classic way to tell them apart, charge
comparison, integrates the tail of each pulse and divides by the integral of
the whole pulse. That needs the whole pulse integrated, and usually needs the
waveform buffered first because the integration limits depend on where the
peak is.

This RTL implements a cheaper ratio that can run on the sample stream as it
arrives, in an FPGA, with no waveform buffer:

    PSD = ( sum of the samples from T1' to T2' clocks after the peak ) / Vpeak

The peak height replaces the full integral as the normalisation (for a given
particle type the pulse area is proportional to the peak), and only a short
window in the tail is summed, where the slow component dominates and before
the noise takes over. The design follows the method described in
"Fast FPGA algorithm for neutron-gamma discrimination" (H. Ye, L. Chen,
G. Jin); this is an independent RTL rendering of it, and where the
publication leaves a point open the choice made here is stated below.

The main configuration, for a 250 MSPS, 14-bit ADC after a shaping
amplifier whose pulses decay in about 1000 ns:

| quantity | value | origin |
|---|---|---|
| sample clock | 250 MHz, one 14-bit sample per clock | publication |
| T1' (window start after peak) | 150 clocks = 600 ns | publication |
| T2' (window end after peak) | 180 clocks = 720 ns | publication |
| Te (pulse length after peak) | 250 clocks = 1000 ns | chosen here from the 1000 ns tail |
| PSD resolution | 1024 channels | publication |
| left shift before division | 7 bits | chosen here |
| trigger threshold V_T | 200 ADC codes | chosen here |

T1', T2', Te and V_T are run-time inputs; the values above are the defaults
in `psd_pkg`.

## Block structure

```
 adc_data ──► pcpr_fsm ──(Q, Vpeak, 1 clock)──► psd_divider ──► evt_* (one event per pulse)
   14 bit     peak search,                      (Q<<7)/Vpeak        │
              window sum,                       11-clock pipeline   ▼
              pulse end                                         psd_histogram ◄── hist_rd_addr / hist_clear
                                                                1024 x 32 bit ──► hist_rd_data
```

| file | contents |
|---|---|
| `rtl/psd_pkg.sv` | widths, defaults, state encoding, `psd_cfg_t`, `pulse_t` |
| `rtl/pcpr_fsm.sv` | the five-state discrimination machine |
| `rtl/psd_divider.sv` | pipelined fixed-point division with clamping |
| `rtl/psd_histogram.sv` | on-chip PSD spectrum |
| `rtl/psd_top.sv` | the three blocks wired together |

Outside the FPGA logic, and not part of this RTL: the detector (CLLB crystal
on a photomultiplier), the analog shaping filter and amplifier, the ADC chip,
and the link that uploads data to a computer. `adc_data` is where the ADC
connects; the event outputs and the spectrum port are where an upload link
would connect.

## The discrimination state machine

This is the heart of the design and the part worth reading carefully. The
difficulty it solves: the integration window is defined relative to the
peak, but the peak is only known for certain once the pulse has stopped
rising, and the design must not store the pulse. The trick is to keep three
registers and to throw away the partial result whenever a new maximum shows
up:

* `vpeak` — the largest sample seen since the trigger,
* `i` — how many samples have passed since that maximum,
* `Q` — the sum of the samples that fell into the window [T1', T2') after
  that maximum.

If a later sample exceeds `vpeak`, the earlier "peak" was not the peak:
`vpeak` takes the new sample and `i` and `Q` restart from zero. Since the
window starts well after the peak (150 clocks), nothing of value is lost by
restarting.

States and what each does with the incoming sample `Vi` (with `d = i+1`,
the distance of `Vi` from the current peak):

| state | register action | next state |
|---|---|---|
| S0 idle | Vpeak=0, i=0, Q=0 | S1 if Vi > V_T, else S0 |
| S1 peak | Vpeak=Vi, i=0, Q=0 | S1 if Vi > Vpeak, else S2 |
| S2 count | i=i+1 | S1 if Vi > Vpeak; S3 if T1' <= d < T2'; S4 if d >= Te; else S2 |
| S3 integrate | i=i+1, Q=Q+Vi | S1 if Vi > Vpeak; S3 if T1' <= d < T2'; else S2 |
| S4 result | hold; `pulse_valid`=1 | S0 |

The machine is Moore-style: the state register names the state the last
sample was assigned to, and that state's action was applied with that
sample. Conditions are tested in the order listed: a rising sample wins over
the window, the window over the end test.

Points where the state diagram of the publication is not explicit, and what
this RTL does:

* **Window edges.** The diagram writes `T1' < i < T2'`; the text says the
  sample is added "between T1' and T2'", and the window width T2'-T1' is
  quoted as a number of clocks. Here the window is half-open, T1' <= d < T2',
  so exactly T2'-T1' samples are summed (30 in the main configuration).
* **Pulse end.** The diagram writes `i == Te`, the text "exceeds Te". Here
  `d >= Te`, which is the same in normal use (T2' <= Te) and safe otherwise.
  Only S2 tests for the end, as in the diagram: if the window reaches the
  end (T2' = Te, one of the scanned settings below), the sample at distance
  Te first takes the machine from S3 back to S2 and the pulse ends one
  sample later. Q is the same either way.
* **Equal samples.** A sample equal to the peak does not restart the peak.
* **S1 leaves on any non-rising sample**, without a window test, so T1' must
  be at least 2. Keep T1' >= 2 and T1' < T2' <= Te.
* The counter `i` is 9 bits and saturates, so Te can be up to 511 clocks;
  `Q` is 23 bits and cannot overflow.

**Timing.** The sample at distance Te from the peak moves the machine to S4;
`pulse_valid` is high for that one clock with `pulse_q` and `pulse_vpeak`.
The sample that arrives while the machine sits in S4 is the only sample per
pulse that is not examined; the next sample is already compared with V_T.
So the dead time per pulse is a single clock, comfortably inside the "three
clocks" quoted for the original implementation, because the division is
done outside the machine (next section).

**Reading the strobes.** `trig`, `repeak` and `pulse_end` decode the
transition that the sample currently on `adc_data` will cause at the next
edge; they are meant for rate counters and debugging.

## The division

`psd_divider` computes `floor((Q << 7) / Vpeak)`. The shift plays the role
of a fixed-point scale: Q/Vpeak for a real pulse is a small number (the
window sits in the tail, where the signal is a few percent of the peak), and
shifting before the integer division spreads it over the 1024 channels.
With the test pulses used here, gamma-like pulses land around channel 30 and
neutron-like ones around 90; for a detector whose PSD values fall
elsewhere, change `PSD_SHIFT` in `psd_pkg` (or the `SHIFT` parameter).

The divider is a restoring divider unrolled into one pipeline stage per
quotient bit, preceded by an input stage that forms the shifted dividend and
detects overflow (`Q<<7 >= Vpeak<<10`). An overflowing quotient, or a zero
peak (which the state machine never produces, since Vpeak > V_T), is clamped
to channel 1023 and flagged on `evt_sat`. Latency is 11 clocks, throughput
one division per clock, so the divider never stalls the stream.

## The PSD spectrum

`psd_histogram` keeps one 32-bit counter per PSD channel. Each event
increments its channel by a read-modify-write in one clock; counters
saturate at all-ones. The spectrum is read through `hist_rd_addr` /
`hist_rd_data` with one clock of latency. Clearing cannot happen in one
clock for a memory, so a clear (requested with `hist_clear`, and started
automatically after reset) walks through the 1024 channels, one per clock,
with `hist_busy` high. Events that arrive during the walk are not counted;
`hist_dropped` marks each of them. Wait for `hist_busy` to fall after reset
before starting a measurement.

The memory is written as an array with an asynchronous read inside the
increment; an FPGA tool maps it to distributed RAM or registers. For block
RAM, split the increment into a read stage and a write stage with a bypass
for back-to-back events on the same channel.

## Top-level interface

`psd_top` has no parameters; sizes come from `psd_pkg`.

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | sample clock (250 MHz) |
| `rst_n` | in | 1 | synchronous, active low |
| `cfg` | in | `psd_cfg_t` | `vt`, `t1`, `t2`, `te`; hold stable during a pulse |
| `adc_data` | in | 14 | unsigned sample, baseline at 0 |
| `evt_valid` | out | 1 | one event per pulse |
| `evt_psd` | out | 10 | PSD channel |
| `evt_vpeak` | out | 14 | pulse height (for an energy cut) |
| `evt_sat` | out | 1 | PSD was clamped |
| `hist_clear` | in | 1 | start a spectrum clear |
| `hist_busy` | out | 1 | clear running |
| `hist_dropped` | out | 1 | this event was not counted |
| `hist_rd_addr` / `hist_rd_data` | in / out | 10 / 32 | spectrum read, 1 clock latency |
| `state`, `trig`, `repeak`, `pulse_end` | out | | state machine status |

An event appears 11 clocks after the clock in which the state machine shows
S4, i.e. Te + 11 clocks after the peak sample.

The ADC data must be unsigned with the baseline at code 0. A real ADC
delivers an offset or two's-complement code with a baseline somewhere above
zero; baseline subtraction (and any inversion of negative-going pulses) has
to happen before `adc_data` and is not part of this design.

The energy threshold of the measurement is applied through V_T, in ADC
codes; converting keV to codes needs the detector's calibration.

## How far it can be trusted

Each block has a self-checking testbench in `tb/`. The expected values are
computed independently of the RTL:

* `psd_tb_pkg` generates pulses as a sum of a fast (15 clock) and a slow
  (60 clock) exponential with noise; the slow fraction is 0.30 for
  neutron-like and 0.10 for gamma-like pulses. Its reference does not step
  a state machine: it defines the peak as the first running maximum after
  the trigger that no sample exceeds for Te samples, sums the window after
  it directly from the sample array, and computes the PSD in 64-bit integer
  arithmetic.
* `pcpr_fsm_tb` checks Q, Vpeak and the clock of every result, with the
  main window and two short ones, including pile-up, plateaus and
  sub-threshold pulses.
* `psd_divider_tb` checks quotient, clamping and the 11-clock latency on
  random operands, back to back.
* `psd_histogram_tb` checks counting, read-back, the clear walk and its
  length, dropped events and saturation (on a 16-channel, 3-bit instance).
* `psd_top_tb` runs the whole core at its default sizes: 200 isolated
  neutron- and gamma-like pulses with the main window, checking every event
  and the whole spectrum, and requiring the neutron-like mean PSD to be
  well above the gamma-like one; then pile-up, clamped PSD, a pulse that
  starts right after the previous result, and a spectrum clear with events
  arriving. Each of these mechanisms is counted and must occur.

* `psd_workload_tb` runs the whole core over the settings the method was
  evaluated with: the nine windows T1' in {100, 150, 200} and T2'-T1' in
  {10, 30, 50} clocks, and three higher thresholds with the 600-720 ns
  window. Besides checking every event, it checks that each integer PSD
  channel is the floor of the real-valued 128 * Q / Vpeak, and estimates a
  figure of merit, FOM = (mean_n - mean_g) / (2.355 (sigma_n + sigma_g)),
  from the integer and from the real-valued PSD values; the two must agree
  within 5 % (they agree within 2 %). The FOM values printed depend on the
  synthetic pulse shapes and noise and say nothing about a real detector.

What has not been verified: behaviour on real detector data, timing closure
at 250 MHz on any FPGA (the divider stages compare 31-bit values, which is
modest; the state machine's window compare and 23-bit accumulate are the
longest paths), and the discrimination quality (figure of merit), which
depends on the detector, the shaping and the chosen window.

## Simulating

All files are plain SystemVerilog; packages must come first. For example,
the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/psd_pkg.sv tb/psd_tb_pkg.sv \
  rtl/pcpr_fsm.sv rtl/psd_divider.sv rtl/psd_histogram.sv rtl/psd_top.sv \
  tb/psd_top_tb.sv --top-module psd_top_tb
./obj_dir/Vpsd_top_tb
```

Each testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog that fails it if it hangs. The block testbenches build the same
way with their own RTL file and `--top-module <block>_tb`.

## Changing it

* Window and threshold: drive `cfg` at run time; the defaults live in
  `psd_pkg` (`T1_DEFAULT`, `T2_DEFAULT`, `TE_DEFAULT`, `VT_DEFAULT`).
* Longer pulses: raise `CNT_W` (Te up to 2**CNT_W - 1); `Q_W` follows.
* PSD scale and resolution: `PSD_SHIFT` and `PSD_W`; the divider pipeline
  gets one stage per PSD bit and the spectrum 2**PSD_W counters.
* Another ADC: `ADC_W`.
