# Digital low level RF for a rapid cycling proton synchrotron

A rapid cycling synchrotron ramps its dipole field from injection to
extraction in about 10 ms, fifty times a second. The RF that accelerates the
beam has to follow the field exactly. In the ring this design targets, the
fundamental (1RF) cavities sweep from 1.3 MHz to 3.1 MHz. The second harmonic
(2RF) cavities sweep from 2.6 MHz to 6.2 MHz. Each cavity must reach a
programmed amplitude and phase at every instant of the sweep while heavy beam
loading pulls on it.

This RTL implements the digital half of that control system:

- **One frequency law generator (FLG) FPGA.** It turns the measured rate of
  change of the dipole field into a frequency word, `F_inc`. It adds the beam
  loop corrections to that word and broadcasts it.
- **Ten local oscillator (LO) FPGAs, one per cavity.** Each synthesises its
  own RF from the broadcast word. It measures its cavity's gap voltage as I/Q
  components and closes two PI loops on them. It can add a feed-forward term
  computed from the measured beam current.

The whole system is `dllrf_top`.

## The frequency word and how it travels

All RF in the system comes from one number, `F_inc`. It is a 17-bit unsigned
phase increment. Every DDS (direct digital synthesiser) in the system adds
`F_inc × FINC_MULT` to a 32-bit phase accumulator every clock.

`FINC_MULT` is 768 in the 250 MHz LO FPGAs and 1600 in the 120 MHz FLG FPGA.
That makes one step of `F_inc` equal to 44.7 Hz in both. So a single word
means the same frequency everywhere:

| Frequency | `F_inc` |
|---|---|
| 1.3 MHz | 29,080 |
| 3.1 MHz | 69,350 |
| Largest 17-bit word (131,071) | 5.86 MHz |

The 2RF cavities do not get their own word. Their LO doubles the accumulated
phase before the phase offset is added.

### Making the word in the FLG

The FLG works in these steps:

1. `bdot_integrator` integrates the 14-bit B-dot sample, less a host-set
   offset, into a 40-bit accumulator. The accumulator is cleared at every
   frame start, so the field is measured from the injection minimum.
2. The top of the integral (`b_field`, 16 bits) indexes the 4096-entry
   frequency law table, `freq_law_lut`. The host writes this table. It turns
   the field into the frequency that keeps the beam on its orbit.
3. `finc_sum` adds four corrections to the law, each multiplied by a signed
   Q4.12 gain register:
   - the trim profile;
   - the beam phase loop;
   - the bunch length loop;
   - the radial loop.

   The result is clamped to 0 … 2^17−1, and a `sat` flag reports clamping.
   The four numbered inputs of the sum follow the order beam phase (1),
   bunch length (2), radial (3) and frequency law (4).

### Trigger-line broadcast

The word reaches the ten LO FPGAs over four shared backplane trigger lines at
20 Mbit/s per line (`trigline_tx` → `trigline_rx`). Each line carries one bit
per 50 ns beat.

A frame on the lines is 8 beats long:

| Beat | Lines carry |
|---|---|
| 0 | `1111`, the start beat |
| 1–5 | the word, 4 bits per beat, least significant nibble first. Bits 19:17 of beat 5 are zero. |
| 6–7 | `0000`, idle |

The lines idle at `0000`, and a data beat can never be followed by `1111`
before the idle beats. So a receiver that has seen two idle beats can take the
next `1111` as a start beat without ambiguity. A new word arrives every
400 ns.

The transmitter makes a beat every 6 clocks at 120 MHz. The receiver is in
another clock domain:

- It synchronises the lines with two flops.
- It waits for idle, then for `1111`.
- It re-checks the start beat at its centre, then samples each data beat
  every 12 LO clocks.

At 250 MHz a beat is really 12.5 LO clocks. Over the six beats the sampling
point drifts 3 clocks early from the centre, which still leaves margin inside
the beat. The FLG clock and the LO clock are not assumed to be related.

A faster 40 MHz rate was used in an earlier version of the system. The
deployed rate of 20 MHz is the default here, set by the `CLK_PER_BIT`
parameters.

## Inside an LO FPGA (`lo_fpga`)

```
trig ─► trigline_rx ─► F_inc ─┬─► dds (out) ───────────────► cos,sin ─┐
                              ├─► dds (delay gv_delay)  ─► cos,sin ─┐ │
                              └─► dds (delay wcm_delay) ─► cos,sin ┐ │ │
adc1 (WCM) ─► adc_decim ─► iq_demod ◄──────────────────────────────┘ │ │
adc0 (gap) ─► adc_decim ─► iq_demod ◄────────────────────────────────┘ │
                              │ I,Q                                    │
     demand profile × scale ─►pi_ctrl (I)  ┐                           │
                    0 ───────►pi_ctrl (Q)  ┼─(+ beam I,Q if FF)─► iq_mod ─► dac0
                                           └─────────────────► iq_mod ─► delay_line ─► dac1
```

**Reference DDS.** The three DDS share the received word, the 2RF doubler
bit, and the phase offset plus the theta profile (`function_gen`, profile 0).
Two of them delay their phase through a `delay_line`, which makes the
"delayed DDS". The delay matches the demodulator's reference to the
round-trip delay through the amplifier, the cavity and the cables. If the
delay is wrong, the I/Q frame rotates by an angle that grows with frequency
during the sweep.

**Demodulation.** `adc_decim` averages pairs of samples and applies a Q4.12
gain. `iq_demod` then forms `2·x·cos` and `2·x·sin`. Each product goes through
two cascaded first-order low-pass sections (`y += (p − y) >> 6`).

With `x = A cos(ωt + φ)`, this gives `I = A cos φ` and `Q = −A sin φ`.
`I·cos + Q·sin` rebuilds `x`. That is why both modulators add their two
products. The output strobe comes three clocks after the input strobe.

**Loops.** The I loop's setpoint is the amplitude demand profile (profile 1)
times a Q4.12 scale. The Q loop's setpoint is zero.

`pi_ctrl` computes `u = sp + Kp·e/256 + Σ Ki·e/4096` on each strobe. Its
integrator is clamped to the 16-bit range, so it cannot wind up.

In open loop (`LO_MODE` bit 0 clear):

- the output is the setpoint;
- the integrator is preloaded with the setpoint.

So closing the loop does not cause a step.

**Pulsed demand.** On frames flagged as pulsed (bit 3) or as TS2 frames
(bit 4), the demand scale comes from `LO_DEMAND_ALT` instead of
`LO_DEMAND_SC`. This is how a parameter can be pulsed at a sub-multiple of
50 Hz.

**Beam feed-forward.** With bit 2 set, the beam I/Q is added to the PI
outputs before modulation. This beam I/Q comes from the wall current monitor
(WCM), demodulated with its own delayed reference.

**Outputs.** `iq_mod` multiplies the drive I/Q with the undelayed cos/sin and
sends the sum to DAC 0, which drives the cavity. A second modulator uses the
PI outputs only. Its output passes through a programmable pipeline delay to
DAC 1, which is the reference for the cavity tuning loop.

The frame flags come from the FLG at 120 MHz. The LO brings them through
two-flop synchronisers. The frame start is the edge of a frame toggle, so it
cannot be missed across the clock domains.

## Inside the FLG FPGA (`flg_fpga`)

Besides the frequency law path, the FLG holds the machine timing and a
digital beam phase detector.

**`frame_timing`** does four things:

- registers the external 50 Hz frame start;
- counts frames modulo 640;
- raises `pulse_frame` every `FLG_PULSE_DIV` frames, so pulsing runs from
  50 Hz down to 50/640 Hz;
- passes the TS2 flag on.

**Digital beam phase detector.** The WCM sample is demodulated against a DDS
that runs on the summed `F_inc` and is delayed by `FLG_WCM_DELAY`.

1. A pipelined 16-stage vectoring `cordic` turns I/Q into phase (2^16 = one
   turn) and magnitude (× 1.647). It has 4 guard bits and a latency of 17
   clocks.
2. `bandpass_filter` removes the static phase and the high frequency noise. It
   is a high-pass (input minus a running mean, shift 10) followed by a
   low-pass (shift 3).

`FLG_MODE` bit 0 selects what input 1 of the F_inc sum takes:

- the digital beam phase signal;
- or the digitised analogue beam phase loop (the default).

**Auxiliary outputs.** Two auxiliary DAC words are provided:

- `aux_flaw`: the summed `F_inc` divided by 4 to fit a signed 16-bit DAC code, one clock
  after the sum. It serves as the frequency law signal for the beam
  intensity monitor.
- `aux_sweep`: the cosine of an undelayed DDS on the summed `F_inc`. It is
  an RF sweep for extraction timing.

The uses come from the published system. The formats are this design's own.

**Trim profile.** `function_gen` plays the host-loaded trim profile from each
frame start, one point every `FLG_STEP` clocks. It holds the last point.

## Virtual oscilloscope

Each FPGA has a `vscope`:

- Four channels, each choosing one of eight internal signals.
- 10,000 points per channel.
- A capture starts at each frame start and takes one point every `decim`
  clocks. `done` is raised at the end.

The host reads the capture through `scope_rd_ch`/`scope_rd_addr`, with one
clock of latency. The published system streams the signals to its controller
instead. In this design a capture buffer stands in for that stream.

The signals that can be selected:

| Select | FLG | LO |
|---|---|---|
| 0 | B-dot | gap volts sample |
| 1 | `b_field` | gap volts I |
| 2 | law `F_inc`/4 | gap volts Q |
| 3 | summed `F_inc`/4 | PI output I |
| 4 | trim | PI output Q |
| 5 | beam I | beam I |
| 6 | beam phase | beam Q |
| 7 | band-passed beam phase | I setpoint |

## Host register bus

Every FPGA has the same write-only bus: `we`, a 16-bit address and 32-bit
data. In the top, the LO bus also has a 4-bit `lo_host_sel`. Address bits
[15:12] choose the region:

| [15:12] | Region |
|---|---|
| 0 | control registers (offset in [7:0]) |
| 1 | profile 0: trim (FLG) or theta phase (LO), 1024 points |
| 2 | profile 1: amplitude demand (LO), 1024 points |
| 3 | frequency law table (FLG), 4096 entries |

The register names and offsets are in `llrf_pkg`. Reset values:

- gains, modes and delays are 0;
- scale registers are 4096 (×1.0);
- step and decimation are 1;
- the pulse divider is 1;
- the scope selects are sources 0–3.

The FLG clamps negative fields to table entry 0. It indexes the table with
`b_field[14:3]`, so the table should be filled for B from 0 to the field at
extraction.

## Timing summary

| Path | Latency |
|---|---|
| B-dot → `b_field` | 1 clock after the accumulator |
| `b_field` → `finc_law` | 1 clock |
| F_inc sum | 1 clock |
| Trigger-line word | 400 ns per word; received about 2 beats + 3 sync clocks after the end of the last data beat |
| DDS phase → cos/sin | 2 clocks + programmed delay |
| `iq_demod` | 3 clocks to the strobe. The filter time constant is about 64 strobes per section, ≈0.5 µs each at 125 MS/s. |
| `pi_ctrl` | 1 strobe |
| `iq_mod` | 2 clocks |
| `cordic` | 17 clocks |

## What follows the published design and what does not

These parts follow the published design:

- **Structure:** one FLG and ten LO FPGAs, and a 17-bit `F_inc` on four
  trigger lines at 20 Mbit/s.
- **FLG data flow:** integrate B-dot, map it through a table, then sum trim
  and loops.
- **LO data flow:** a DDS and delayed DDS, IQ demodulation, separate I and Q
  PI loops with a zero Q setpoint, beam feed-forward added to the PI outputs,
  and a delayed second DAC output.
- **Beam phase chain:** WCM → delayed DDS → IQ demodulation → CORDIC →
  band-pass.
- **The 2RF doubler** with its theta offset.
- **The FLG's auxiliary outputs:** a frequency law signal and an RF sweep.
- **The scope size:** 4 × 10,000 points.
- **The pulsing range:** 1 to 640 frames.

These are this design's own choices, because the source is silent:

- all word widths except 17 and 14;
- the framing on the trigger lines;
- the DDS scale and table size;
- the filters (demodulator low-pass, decimator, band-pass corners);
- the CORDIC size;
- the PI number formats and anti-windup;
- the register map;
- the profile length;
- the capture-buffer scope;
- the decision to clear the integrator at frame start.

The published digital beam phase loop was only planned. Here it is built,
selectable and off by default.

These are not part of this design:

- the ADC, DAC and backplane hardware;
- the real-time controller and PC software;
- the control-system link;
- the analogue cavity loops and tuning loops.

They appear only as ports.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  -y rtl -y tb rtl/llrf_pkg.sv tb/tb_dllrf_top.sv --top-module tb_dllrf_top \
  -Mdir obj -o sim && ./obj/sim
```

`tb_dllrf_top` runs the full system at its default size: ten LOs and
10,000-point scopes. Each LO drives a behavioural cavity, modelled as
20 clocks of delay and a gain of 0.6. Over about 270 µs of machine time the
test does the following:

- loads the frequency law, the profiles and the loop settings;
- ramps B-dot, which sweeps `F_inc`;
- checks that each LO receives the broadcast words and that each closed loop
  settles to its demand;
- checks that the 2RF cavities run at twice the frequency;
- checks pulsed-frame demand switching;
- checks beam feed-forward;
- checks the switch to the digital beam phase loop;
- checks `F_inc` saturation;
- checks scope capture;
- checks the FLG's auxiliary sweep and frequency law outputs.

It counts each of these mechanisms and fails any that never happened. It
runs in well under a second.

`tb_workload_sweep` runs one whole 10 ms acceleration cycle on the same
full system. The law goes linearly from `F_inc` 29,080 to 69,350 over the
table. A constant B-dot fills the table in 10 ms. The test checks:

- the 1RF and 2RF frequencies at the start and the end of the sweep, measured
  from zero crossings at the DACs;
- all ten gap-voltage loops at the start and at the end;
- the 10 ms, 10,000-point scope records of `F_inc` and gap volts.

It takes a few seconds.

Testbenches for single blocks check them against models written
independently in the testbench. The trigger-line pair is tested across the
real 120/250 MHz clock pair.

The loop gains used in the tests (Kp = 16/256, Ki = 8/4096 per strobe) are
chosen for the 20-clock model cavity. A real cavity with its amplifier delay
needs its own tuning.
