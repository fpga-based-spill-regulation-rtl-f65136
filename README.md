# Spill regulation for slow resonant extraction — FPGA fabric in SystemVerilog

Mu2e receives protons from the Fermilab Delivery Ring by third-order
resonant slow extraction: three fast tune quadrupoles push the ring tune
toward the resonance, and the beam leaks out over a spill of a few hundred
milliseconds. The detector wants that leak to be flat, but power-supply
ripple and beam instabilities (a strong 300 Hz modulation in particular)
make it lumpy. The spill regulation system (SRS) attacks this from the
quadrupole side: it plays a stored reference current curve into the
quadrupole supply at 10 kHz, measures the extracted beam bunch by bunch,
and adds a PID correction to the curve in real time. A slow loop outside
the board refines the stored curves from spill to spill.

This repository holds an independent RTL implementation of the FPGA part
of that system, written from Fermilab's published description of the Mu2e
SRS board (an Arria 10 SoC carrier with 14-bit,
125 MSPS ADCs and precision DACs). The block structure, the rates and the
main sizes follow that description; everything it leaves open (widths,
register map, baseline method, filter length, PID number formats,
conditioning rules) is filled in here and listed in
[Where this design departs from, or adds to, the description](#where-this-design-departs-from-or-adds-to-the-description).

## Signal path

```
            RF marker (589 kHz)
                 |
 adc_extr --> bunch_integrator --> moving_average --+
 adc_circ --> bunch_integrator --> moving_average --+--> pid_controller --+ corr
                 |                                   select   (10 kHz)    |
                 +--> dac_diag (raw bunch integral)                       v
 spill_event --> spill_sequencer --> playback_generator --> ref ------> ( + )
 cycle_start                        (10 kHz timer, reads dp_ram            |
                                     of 8 spills x 2048 samples)           v
 abort_in ---------------------------------------------> spill_conditioning --> dac_quad
                                                         slew limit, ramp-down
 spill_logger: intensity + correction per tick, 2048 entries each
 config_regs : Avalon-MM slave (settings, waveform upload, log readback)
```

Everything runs on one clock. The design assumes 125 MHz, the ADC sample
rate, so one ADC sample arrives per clock; all rates below are quoted for
that clock.

| Module | File | Role |
|---|---|---|
| `srs_pkg` | `rtl/srs_pkg.sv` | widths, sizes, register map, `srs_cfg_t`, `cond_state_e` |
| `bunch_integrator` | `rtl/bunch_integrator.sv` | per-bunch windowed sum with baseline subtraction |
| `moving_average` | `rtl/moving_average.sv` | 64-bunch boxcar |
| `pid_controller` | `rtl/pid_controller.sv` | the fast regulation controller |
| `dp_ram` | `rtl/dp_ram.sv` | playback and log memories |
| `spill_sequencer` | `rtl/spill_sequencer.sv` | which of the 8 spills to play |
| `playback_generator` | `rtl/playback_generator.sv` | 10 kHz timer and waveform readout |
| `spill_conditioning` | `rtl/spill_conditioning.sv` | summing node, slew limiter, safe ramp-down |
| `spill_logger` | `rtl/spill_logger.sv` | intensity and correction logs |
| `config_regs` | `rtl/config_regs.sv` | host register file and memory map |
| `srs_top` | `rtl/srs_top.sv` | the wired system |

## Measuring the beam: bunch integration

This is the part whose timing matters most. The ring carries one proton
micro-bunch every 1695 ns (about 212 clocks), roughly 200 ns wide, and the
gap between bunches is empty. An RF marker at 589 kHz, one period per
bunch, comes from the machine. Both beam monitors (the gap monitor on the
circulating beam and the wall current monitor on the extracted beam) are
AC coupled, so the level between bunches is not zero and drifts.

`bunch_integrator` works on a sample counter started by every rising edge
of the marker:

* the marker goes through a two-flop synchronizer and an edge detector; the
  sample counted as 0 is the one present on the third clock edge after the
  marker is seen high at the pin. Put that fixed offset into the delay.
* samples with count in `[trig_delay, trig_delay + win_len)` are summed as
  the signal;
* samples with count in `[base_delay, base_delay + win_len)` — the same
  number of samples, placed in the empty gap — are summed as the baseline;
* when the later window has closed, `integral = signal - baseline` is
  issued with a one-clock `integral_valid`.

Subtracting an equal-length gap window removes any baseline that is
constant across one bunch period, which is what an AC-coupled monitor
gives on this time scale. The reset settings are a 32-sample (256 ns)
window at delay 2 and a baseline window at delay 120, which leaves room
for the 212-clock period. A new marker edge during an integration restarts
it. The sums are 24 bits: windows up to 1024 samples cannot overflow.

The integral is in raw ADC-sum units; no calibration to protons is done.
Every raw extracted-beam integral is also put out on `dac_diag`
(saturated to 16 bits, held until the next bunch) so that it can be
replayed through a fast DAC and compared with the monitor on an
oscilloscope.

## From bunches to the 10 kHz loop

The loop runs at 10 kHz, about 59 bunches per step. Each monitor's
integrals go through `moving_average`, a boxcar over the last 64 bunches
(running sum, circular buffer, divide by shift). The controller simply
takes the latest mean at each 10 kHz tick; that sampling is the
decimation. The average is emptied at the start of each spill, so the
first tick of a spill sees zero and the second a partly filled average.

`CTRL[1]` selects which monitor is regulated: the extracted beam (default)
or the circulating beam.

## Reference playback

The playback memory (`dp_ram`, 8 × 2048 words of 16 bits) holds one
reference curve for each of the eight spills of a Delivery Ring cycle. The
host writes it at any time over the bus.

`spill_sequencer` chooses the curve: `cycle_start` points it at spill 0,
and each `spill_event` that arrives while no spill runs starts the next
one (0, 1, …, 7, 0, …), pulsing `spill_go`. `spill_active` stays high
until the conditioning stage reports that the ramp-down at the end of the
spill is complete. An event during a spill is ignored and reported.

`playback_generator` owns the 10 kHz timer: a down-counter reloaded with
`TICK_PER` (12500 clocks) that issues a one-clock `tick`. `spill_go`
restarts it, so the first tick comes two clocks after `spill_go` and every
spill is played with the same phase. At tick *k* it reads sample *k* of
the selected spill; the sample reaches the summing node two clocks after
the tick. After `SPILL_LEN` samples it holds the last one. It also counts
ticks since the start (`tick_count`), which the timeout uses.

## The fast regulation controller

`pid_controller` runs once per tick:

```
e  = setpoint - intensity
I  = clamp(I + e, ±(2^31-1)/16)
D  = e - e_previous
u  = (kp*e + ki*I + kd*D) >>> 8         kp, ki, kd: signed Q8.8
corr = saturate(u, 16 bits signed)
```

`corr` changes one clock after the tick. The state is cleared at every
spill start and held at zero while feedback is off (`CTRL[0]`). The
setpoint is a register: a constant target intensity per spill. A positive
error (too little beam) gives a positive correction, raising the
quadrupole current and pushing more beam into the resonance; if the
polarity of a real installation is the other way, use negative gains.

## Final conditioning: the last word before the magnet

`spill_conditioning` is where safety lives. Its target is
`ref + corr`, clamped to 0 … 65535. The DAC code never jumps to it: every
`RATE_DIV` clocks (one *update*; reset value 125 clocks = 1 µs) the code
moves toward the target by at most `SLEW_MAX` codes (reset 64). The state
machine:

| State | DAC code | Leaves when |
|---|---|---|
| `COND_IDLE` | held at 0 | `spill_go` → `COND_RUN` |
| `COND_RUN` | follows the target through the slew limiter | abort, or `tick_count ≥ TIMEOUT` → `COND_RAMP` |
| `COND_RAMP` | falls by `RAMP_STEP` per update, ignoring reference and correction | code is 0 → `COND_IDLE`, `spill_done` |

The timeout (reset 2048 ticks = 204.8 ms) is the normal end of a spill;
the abort is the `abort_in` pin (synchronized with two flops) or the host
bit `CTRL[2]`. The clock that enters `COND_RAMP` already takes a ramp
step, so the code never rises after an abort. A change of `RATE_DIV`
takes effect when the running update count expires.

## Logs and the host interface

`spill_logger` writes, one clock after every tick of an active spill, the
smoothed intensity that the PID sampled on that tick and the correction
it computed from it into two 2048-entry memories, from address 0 at each spill start. When full it stops, so the
first 204.8 ms of the spill are kept.

`config_regs` is an Avalon-MM slave for the SoC's lightweight bridge. Word
addresses; bits [15:14] choose the region:

| Address | Region |
|---|---|
| `0x0000–0x00FF` | registers |
| `0x4000–0x7FFF` | playback memory, write only: offset = spill × 2048 + sample |
| `0x8000–0x87FF` | intensity log, read only (sign-extended) |
| `0xC000–0xC7FF` | correction log, read only (sign-extended) |

| Reg | Name | Reset | Meaning |
|---|---|---|---|
| 0x00 | CTRL | 0 | [0] feedback on, [1] regulate circulating beam, [2] soft abort |
| 0x01 | TICK_PER | 12500 | clocks per tick |
| 0x02 | TRIG_DELAY | 2 | samples to signal window |
| 0x03 | WIN_LEN | 32 | window length, samples |
| 0x04 | BASE_DELAY | 120 | samples to baseline window |
| 0x05 | SETPOINT | 0 | target intensity (24 bits) |
| 0x06–0x08 | KP, KI, KD | 0 | signed Q8.8 gains |
| 0x09 | SLEW_MAX | 64 | max DAC step per update |
| 0x0A | RAMP_STEP | 16 | ramp-down step per update |
| 0x0B | RATE_DIV | 125 | clocks per update |
| 0x0C | TIMEOUT | 2048 | spill timeout, ticks |
| 0x0D | SPILL_LEN | 2048 | samples per spill (0 = 2048) |
| 0x0E | STATUS | – | [0] active [1] playing [3:2] state [6:4] spill index [7] log full [8] timed out [9] aborted [10] missed event [11] slew limiter acted [12] waveform played to its end [27:16] log entries |
| 0x0F | INT_EXTR | – | smoothed extracted intensity |
| 0x10 | INT_CIRC | – | smoothed circulating intensity |
| 0x11 | PID_ERR | – | last PID error (setpoint − intensity) |

Writes act on the clock they are presented; `readdatavalid` comes exactly
two clocks after `read`; there is no `waitrequest`. Flags 8–12 of STATUS
are cleared at each spill start.

## Latencies at a glance

| From | To | Clocks |
|---|---|---|
| marker edge at pin | sample counted 0 | 3 |
| last sample of the later window | `integral_valid` | 1 |
| `integral_valid` | moving-average output | 1 |
| `spill_go` | first tick | 2 |
| tick | `corr` | 1 |
| tick | reference at summing node | 2 |
| target change | DAC code | ≤ `RATE_DIV` |
| tick | log write | 1 |
| bus read | `readdatavalid` | 2 |

## Where this design departs from, or adds to, the description

Taken from the description: the block structure of the fabric (two fast
bunch integrators, playback memory for eight spills, playback generator
with a configurable timer, spill sequencer, PID fast regulation controller
summed with the reference, final conditioning with abort/timeout ramp-down
and a slew limiter, spill logger with intensity and correction arrays,
memory-mapped user configuration), the 14-bit 125 MSPS ADCs, the 10 kHz
control and playback rate, the 1695 ns bunch spacing, the trigger-aligned
window after a delay, moving-average smoothing before the 10 kHz
decimation, 2048-entry logs, and the replay of the raw integral through a
DAC.

This design's own choices, because the description does not give them:

* the 125 MHz fabric clock, 16-bit DAC codes, 24-bit integrals, 16-bit
  corrections and 2048 samples per stored spill;
* the baseline method (equal-length window in the gap, subtracted) and
  rising-edge triggering;
* the 64-bunch boxcar and clearing it per spill;
* the PID form, Q8.8 gains, integral clamp and constant setpoint;
* ramping to zero, linear slew and ramp steps, the update divider, the
  timeout in ticks;
* the sequencer protocol (cycle start, spill event, spill done);
* the register map, the bus timing and write-only playback memory;
* logging the smoothed intensity at 10 kHz (the published log plot is
  described as raw integrated pulses; the raw per-bunch value is available
  on `dac_diag` instead);
* logging intensity and correction only: the description also speaks of
  an error waveform from which future profiles are to be derived. With a
  constant setpoint the error at each tick is the setpoint minus the
  logged intensity, so the host can rebuild it; there is no third log;
* one quadrupole output: the system drives three tune quadrupoles, but
  the architecture shows a single quadrupole curve, and how the three share
  it is not stated.

Not built: the ARM processor and its Linux/Redis/ACNET software, the ADC
and DAC chips and their serial links, the slow regulation loop (software,
off the board), and the harmonic (300 Hz) correction, median filter and
machine-learning controller, which are described only as future work.

## Simulation

Each block has a self-checking testbench in `tb/` that computes its
expected values independently and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/srs_pkg.sv $(ls rtl/*.sv | grep -v srs_pkg) \
    tb/tb_srs_top.sv --top-module tb_srs_top -o sim && obj_dir/sim
```

(replace `tb_srs_top` with any testbench). The package must come first.
`-Wno-fatal` keeps the remaining lint warnings, unused parameters and
signals mostly, from stopping the build. Every testbench has a watchdog.

* `tb_bunch_integrator`, `tb_moving_average`, `tb_pid_controller`,
  `tb_dp_ram`, `tb_spill_sequencer`, `tb_playback_generator`,
  `tb_spill_conditioning`, `tb_spill_logger`, `tb_config_regs`: unit tests
  against reference models (exact sums, a 64-bit PID, a clock-by-clock
  conditioning model, and so on), including the strobe timing.
* `tb_srs_top`: the whole system at reduced size (32-sample spills and
  logs, 4-bunch average, tick every 424 clocks). It plays spills that
  exercise open-loop playback, closed-loop correction, the slew limiter,
  the abort pin, the soft abort, the timeout, a missed spill event, a full
  log, the regulated-monitor switch, baseline removal, the diagnostic
  replay and the spill-index wrap, counts each, and fails if one never
  happens.
* `tb_srs_full`: one complete spill with every parameter at its default:
  a logarithmic reference curve of 2048 samples, bunch intensities varying
  at random by ±50 %, the PID on, 2048 ticks at exactly 12500 clocks, every logged correction checked against a PID
  computed from the logged intensities, the DAC code checked at every
  tick, ending in timeout and ramp-down (about 26 million clocks; a few
  seconds in Verilator).

* `tb_spill_regulation`: the full-size system closed around a crude beam
  model in which extracted intensity grows with the quadrupole code and
  carries a ±30 % 300 Hz modulation. One spill is played open loop on a
  reference curve 20 % short of the setpoint, one with the PID on: the
  feedback must bring the mean logged intensity to within 2 % of the
  setpoint (typically about 0.05 %) through a correction of about
  +2000 codes. The 300 Hz amplitude is printed for both; this PID, tuned
  for the slow error, does not remove it, as on the real machine.

Apart from `tb_spill_regulation`, the beam in the testbenches is a synthetic monitor signal (a constant or
wandering baseline plus one pulse per bunch); it does not model how
the beam responds to the quadrupole current, so the loop is tested as
arithmetic, not for regulation quality.
