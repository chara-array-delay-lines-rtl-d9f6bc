# Real-time controller for an interferometer delay-line cart

A long-baseline optical interferometer combines starlight from telescopes
that sit far apart. Before the beams can interfere, their optical paths must
match to a small fraction of a wavelength. Because the Earth turns, the
geometric path difference changes all the time, at up to several mm/s. A
delay line makes up the difference. It is a cart that carries a cat's-eye
retro-reflector along a rail, tens of metres long. The cart's optical path
must follow a computed trajectory to a few nanometres, while also taking
small corrections from a fringe tracker that measures the remaining
atmospheric error.

This repository holds the RTL for the controller of one such cart. It
provides:

- a time base shared across the array;
- a laser phase meter that measures the cart's optical path;
- a target generator that turns a "baseline solution" (position, velocity
  and reference time) plus fringe-tracker offsets into a commanded position
  for every servo cycle;
- four nested servo loops, one per actuator;
- a telemetry stream.

The structure, rates and signs follow the published description of the
upgraded CHARA Array delay lines: a DE2-115 FPGA board running the fast
loop, plus a Linux computer running the slower loops. All word formats,
fixed-point scalings, framing and error handling are this design's own
choices. Where it departs from the published system, the section *Departures
from the published system* says so.

```
 16 MHz ─┐         ┌───────────────┐  tick (25 us since midnight)
  1 Hz  ─┴────────►│master_timebase├───────────────┐
 sync_req/tick ───►└───────────────┘               ▼
                   ┌──────────────┐ loop_stb ┌──────────────┐ t_loop
                   │loop_scheduler├─────────►│tick_quantizer├──────┐
                   └──────┬───────┘ 5 kHz    └──────────────┘      ▼
                          │ 1 kHz / 100 Hz                 ┌────────────────┐
 baseline (t0,p0,v) ──────┼───────────────────────────────►│target_generator│
 fringe-tracker offset ───┼───────────────────────────────►└───────┬────────┘
                          │                                  target│ vel
 2 MHz ref ─┐  ┌─────────────────────┐ laser position              ▼
 2 MHz meas ┴─►│metrology_phase_meter├────────────────────►┌─────────────┐ PZT code
               └─────────────────────┘                     │  pzt_servo  ├────────►
                                       laser error, PZT pos└──────┬──────┘
                                            ┌─────────────────────┘
                                            ▼
                                      ┌──────────┐ VC1 code
                                      │vc1_servo ├────────────────────────────────►
                                      └────┬─────┘
                     eddy sensor 1 ───►┌──────────┐ VC2 code
                                       │vc2_servo ├─────────────────────────────────►
                                       └──────────┘
                     eddy sensor 2 ───►┌─────────────┐ step rate
                     velocity ────────►│stepper_servo├──────────────────────────────►
                                       └─────────────┘
        all of the above ─────────────►┌────────────────┐ byte stream
                                       │telemetry_framer├──────────────────────────►
                                       └────────────────┘
```

The top level is `ople_delay_line_ctrl`. It has no parameters. Everything
runs on one 100 MHz system clock with a synchronous active-low reset.

## The cart and its four actuators

The optical path is moved by four actuators in series. Each has more range
and less speed than the one before it:

| actuator | range (optical path) | loop | rate | sensor it closes on |
|---|---|---|---|---|
| PZT behind the secondary mirror | ±32 µm | `pzt_servo` | 5 kHz | laser metrology (target − measured) |
| voice coil 1, moves the optics cart | 6 mm | `vc1_servo` | 1 kHz | the PZT's own position, to keep the PZT centred |
| voice coil 2, moves the optics cart against the motor cart | 12 mm | `vc2_servo` | 1 kHz | eddy current sensor 1, to keep voice coil 1 centred |
| stepper motor, moves the motor cart on the rail | whole rail | `stepper_servo` | 100 Hz | eddy current sensor 2, to keep voice coil 2 centred |

Only the PZT loop sees the laser directly. Each slower loop "offloads" the
loop inside it: it moves its own stage so that the faster stage can return
to the middle of its range. Because the stages add up to the same optical
path, the inner loop then has to take back exactly what the outer loop
moved. This is why the loops must be separated in speed. In the end-to-end
test bench, voice coil 1 corrects about 16 % of the PZT offset per
millisecond, voice coil 2 about 1 % of voice coil 1's per millisecond, and
the stepper about 0.5 % of voice coil 2's per millisecond. With loops of
similar speed the cascade rings.

Two feedforward paths keep the slow loops from lagging:

- **VC1 feedforward.** The laser error, scaled by `kff` and low-passed, is
  added to the voice-coil-1 error. This lets VC1 react to a target move
  before the PZT has absorbed it.
- **VC2 and stepper feedforward.** VC2 gets `kff` × VC1's drive. The stepper
  gets `kff` × the baseline-solution velocity. The motor therefore runs at
  the sidereal rate without a standing error on sensor 2.

### Signs

The signs at each summing junction are those printed on the published servo
diagram:

```
PZT:      e      = target − laser                          → lag filter → P
VC1:      vc1Err = pzt_target − pzt_pos + LP(kff·e)        → PID
VC2:      vc2Err = eddy1 − eddy1_target                     → PID + kff·vc1_dac
Stepper:  err    = eddy2           (target omitted)         → PD  + kff·velocity
```

All gains are signed. The actuator's direction is therefore set by the sign
of the gain, not by the RTL. For example, in the test bench's plant a
positive VC1 code lengthens the path, so VC1 needs negative `ki` and `kff`.

### The PZT loop

`pzt_servo` runs on every 5 kHz loop:

```
I  ← I + e − I/2^leak_shift        (leak_shift = 0: pure integrator)
y  = e + I/2^lag_shift             (lag compensation)
u  = kp·y / 256                    (kp unsigned Q8.8)
```

`u` is the commanded optical path of the PZT in pm, clamped to ±32 µm.
While the output is clamped, the integrator holds (`sat` = 1). `pzt_dac`
carries the same value as a 16-bit offset-binary code for a 0–120 V
amplifier (32768 = centre, 1 LSB = 1.024 nm).

If the cart is in slew mode, or the metrology signal is lost, the loop
opens. The PZT is then parked at its centre and the integrator cleared.

### The slower loops

`vc1_servo`, `vc2_servo` and `stepper_servo` wrap a shared `pid_ctrl`:

```
I ← I + e                        (frozen while the output is clamped)
D ← D + ((e − e_prev) − D)/2^d_shift
u = (kp·e + ki·I + kd·D)/2^24 + ff,   clamped to ±lim
```

Gains are 32-bit signed with 24 fraction bits. The errors here are in pm
and the outputs are ±32767 DAC codes, so gains well below one are the
normal case. For the stepper, the integral input is tied to zero.

## Time: the 25 µs tick and the round-to-8 fix

Every controller in the array keeps the same clock: the number of 25 µs
ticks since midnight UTC. `master_timebase` derives it from the array's
16 MHz master clock, which it divides by 400. A day is 3 456 000 000 ticks,
which fits in 32 bits.

To set the clock, the supervisor pulses `sync_req` with the tick value the
next 1 Hz edge should carry. At that edge the count is loaded, the divider
restarts, and `synced` goes high.

After that, each 1 Hz edge must find exactly 40 000 ticks since the
previous one. If it does not, the sticky `pps_err` flag is set until the
next sync. The published system found a loss of synchronisation only
through its effect on tracking, so this check is this design's own
addition.

The 5 kHz loop is timed by the FPGA's own 100 MHz clock, not by the tick.
Each loop should see the tick advance by 8 (200 µs / 25 µs). Because the
two oscillators are independent, now and then a loop sees 7 or 9 instead.
The target position is p0 + v·(t − t0), so a one-tick error in t is a
position spike of v·25 µs: 0.2 µm at 8 mm/s. This is the target-spike
problem the published system met.

Its fix is reproduced in `tick_quantizer`: the sampled tick is rounded to
the nearest multiple of 8, as `(t + 4) & ~7`. `round_en = 0` gives the raw
value. `jitter_cnt` counts loops whose raw step was not 8, so the slips
stay visible.

## Measuring the path: the heterodyne phase meter

The metrology laser (1.319 µm) produces two 2 MHz beat signals, squared up
before they reach the FPGA:

- a *reference*;
- a *measurement*, whose phase advances one full cycle for every 1.319 µm
  of optical path.

A moving cart therefore shifts the measurement frequency by its velocity
divided by 1.319 µm, for example 15 kHz at 20 mm/s.

`metrology_phase_meter` synchronises both signals to the 100 MHz clock and
keeps two counters:

- `N` = measurement rising edges − reference rising edges. This is the
  whole number of cycles of path change, and it is signed.
- `d` = system clocks since the last reference edge, from 0 to 49. One
  2 MHz period is 50 clocks.

At every measurement edge the path is `count = 50·N − d` in units of 1/50
cycle, which is 26.38 nm. `home` stores the current count as zero, so
`pos_pm = (count − home)·26380` is an absolute, unwrapped path until the
next homing.

The result updates about 2 million times a second, 2 cycles after each
measurement edge. The resolution is 26 nm per sample. A servo loop sample
sees the most recent value.

If no measurement edge arrives for 200 clocks (2 µs, four beat periods),
`met_valid` drops and the PZT loop opens. Edges lost during the outage
shift the count by whole fringes, so after a loss of signal the supervisor
must home the cart again.

This method assumes the reference period is exactly 50 system clocks,
meaning that both derive from the same master oscillator. It also assumes
the Doppler shift stays well below 2 MHz. Both hold comfortably for a
delay-line cart.

## The target

`target_generator` holds:

- the current baseline solution `{t0, p0, v}`, with v in pm per tick;
- the fringe-tracker offset currently applied.

At every 5 kHz loop it computes

```
target = p0 + v·(t_loop − t0) + off_applied
```

using a 65-bit product. The target is therefore a smooth ramp, not a
1 kHz staircase.

Commands can arrive in any cycle. They are latched and take effect only at
the next 1 kHz update, so the average wait is 0.5 ms.

A new offset request is not applied in one jump. At each 1 kHz update the
applied offset moves toward the request by at most 0.5 µm, so a 5 µm
command takes 10 ms. This keeps the actuators in their linear range and
bounds overshoot. `off_clip_cnt` counts updates whose step was limited.

## Modes

| `cfg.mode` | PZT loop | carts |
|---|---|---|
| `MODE_TRACK` | closed on the laser | VC1 centres the PZT; VC2 and stepper offload |
| `MODE_SLEW` | open, PZT parked at centre | VC1 follows the laser error through its feedforward path only; VC2 and stepper offload as usual |

Slew mode is meant for large moves, where the laser error is far beyond the
PZT's ±32 µm.

## One 5 kHz loop, cycle by cycle

| cycle after `loop_stb` | event |
|---|---|
| +1 | `t_valid`: tick sampled and rounded (`tick_quantizer`) |
| +3 | `target_upd`: target evaluated; on a 1 kHz loop, new commands taken |
| +4 | `pzt_upd`: laser error, PZT command and PZT code registered |
| +5 | VC1 output (1 kHz loops only) |
| +6 | VC2 output (1 kHz loops only); stepper output (100 Hz loops only) |
| +5 or +7 | telemetry record captured (5 kHz mode: +5; 1 kHz mode: +7) |

The 1 kHz and 100 Hz flags from `loop_scheduler` travel along this
pipeline with the loop that carries them. Every 100 Hz loop is also a
1 kHz loop, and every 1 kHz loop is also a 5 kHz loop.

## Telemetry stream

`telemetry_framer` sends one record per 1 kHz loop. With `cfg.tlm_fast`
set, it sends one per 5 kHz loop instead. It uses a valid/ready byte
interface, and a byte moves when `tx_valid && tx_ready`.

Frame layout: `0xA5`, then 35 record bytes (most significant first), then
a checksum byte, which is the 8-bit sum of the 35 record bytes.
`tx_last` marks the checksum byte.

| field | bits | content |
|---|---|---|
| seq | 16 | running sample number, advanced on every sample (sent or dropped) |
| t | 32 | loop time in ticks (rounded if `round_en`) |
| target | 48 | target path, pm |
| laser | 48 | measured path, pm |
| err | 32 | laser error, pm, clamped to 32 bits |
| pzt | 32 | PZT command, pm |
| vc1, vc2 | 16 + 16 | voice-coil DAC codes |
| step_rate | 32 | stepper rate command |
| flags | 8 | pps_err, synced, met_valid, pzt_sat, vc1_sat, vc2_sat, step_sat, tracking |

A frame takes 37 cycles when the link is ready. If the link is stalled when
the next sample comes, that sample is dropped and `drop_cnt` counts it. The
receiver sees the drop as a gap in `seq`.

## Configuration (`cdl_pkg::ctrl_cfg_t`)

| field | meaning |
|---|---|
| `mode` | `MODE_TRACK` / `MODE_SLEW` |
| `round_en` | round the loop time to 8 ticks |
| `tlm_fast` | telemetry at 5 kHz instead of 1 kHz |
| `pzt_kp`, `pzt_lag_shift`, `pzt_leak_shift` | PZT loop gain (Q8.8) and lag filter |
| `pzt_target` | PZT position VC1 keeps it at, pm (normally 0) |
| `eddy1_target` | eddy sensor 1 set-point for VC2 |
| `vc1`, `vc2`, `stp` | `servo_gains_t`: kp, ki, kd, d_shift, kff, ff_shift (gains Q7.24) |

Units used throughout:

| quantity | format |
|---|---|
| positions | signed 48-bit pm; 92 m of delay is 9.2·10^13 pm, inside ±2^47 |
| velocities | signed 32-bit pm per 25 µs tick; 20 mm/s is 500 000 |
| times | unsigned 32-bit ticks |

## Departures from the published system

- **Where the loops run.** The voice-coil and stepper loops run in software
  on a Linux computer in the published system. Here they are logic in the
  same clock domain as the PZT loop. The published design also runs the
  fast loop as firmware on a soft processor, where this design uses
  dedicated logic.
- **Fringe counting.** One passage of the published description has fringe
  counting done on a separate counter card; another has it done in the
  FPGA. This design does it in the FPGA.
- **The PZT loop's name.** The published text calls the PZT loop a PID,
  then says it uses proportional control with lag compensation. The servo
  diagram shows "lag filter → P". This design follows the diagram.
- **The stepper loop's form.** The diagram labels the stepper loop PID; the
  text calls it PD. This design follows the text.
- **PZT position feedback.** The PZT position used by VC1 is the commanded
  PZT position, because no PZT position sensor is described.
- **This design's additions.** The 1 Hz consistency check (`pps_err`), the
  loss-of-signal detector, the telemetry framing and the anti-windup rules
  are this design's own.
- **Off-chip parts.** Ethernet/UDP links, ADC/DAC cards, amplifiers, the
  motion controller and the laser optics are outside this design. Their
  signals are ports of the top level.
- **Gains.** No gain values are published. The gains in the end-to-end test
  bench are tuned to its simple plant model only.

## Verification

Each block has a self-checking test bench in `tb/`, named `tb_<module>`. It
prints `TB_RESULT checks=N failures=M`.

| test bench | what it checks |
|---|---|
| `tb_master_timebase` | tick spacing, sync at the 1 Hz edge, error flag on a short/long second and its clearing, midnight wrap (with a 20-tick "second" to keep it short) |
| `tb_loop_scheduler` | strobe periods and coincidences over 155 loops |
| `tb_tick_quantizer` | rounding and jitter counting against a model |
| `tb_metrology_phase_meter` | a real-valued heterodyne model: homing, static positions inside a fringe, ±100/150 µm ramps at 0.2 m/s, loss of signal |
| `tb_target_generator` | a 64-bit model of the target, the 0.5 µm staircase, command latency |
| `tb_pzt_servo` | the loop equations, saturation and anti-windup, and a closed loop settling a 5 µm step |
| `tb_pid_ctrl` | random gains and errors against a model, windup limits |
| `tb_vc1_servo`, `tb_vc2_servo`, `tb_stepper_servo` | each loop's error, feedforward and clamp against a model |
| `tb_telemetry_framer` | every frame decoded under a random `tx_ready`: sync, checksum, `tx_last`, record, sequence, drop count |
| `tb_ople_delay_line_ctrl` | whole controller at its default size, closed around a plant model (below) |

The end-to-end bench runs the top level at its defaults. It closes the
loops around a model cart:

- **Actuators.** PZT, VC1 and VC2 follow their commands with a 1 µs lag
  and a 0.2 m/s slew limit. The stepper integrates its rate.
- **Metrology.** The measurement square wave is computed from the summed
  optical path.
- **Master clock.** It runs 0.4 % slow, so tick slips really happen.

The scenario covers:

- homing and clock sync;
- a slew toward a moving baseline solution;
- a switch to tracking with a 40 µm target jump, which saturates the PZT;
- an early 1 Hz edge, which is flagged;
- a 2 µm fringe-tracker offset, carried out in 0.5 µm steps;
- a re-sync, which clears the flag;
- 5 kHz telemetry with the link stalled, which drops records; for 2 ms of
  this the round-to-8 fix is also switched off, so raw loop times are recorded;
- 15 ms of settled tracking;
- a loss of the metrology signal.

Every telemetry frame is decoded. Its target is checked exactly against
p0 + v·(t − t0) + offset. Settled tracking must keep the laser error within
0.3 µm and the PZT within 5 µm of centre, and the stepper must run near the
sidereal rate. Each mechanism is counted, and one that never occurs is a
failure. The run covers about 52 ms of controller time and takes about 25 s
in Verilator.

To run any bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/cdl_pkg.sv tb/tb_ople_delay_line_ctrl.sv --top-module tb_ople_delay_line_ctrl
./obj_dir/Vtb_ople_delay_line_ctrl
```

### Limits and what to trust

**Exactly modelled.** The arithmetic (fixed-point formats, clamps, rounding)
is checked bit-exactly against independent models.

**Representative only.** The control behaviour is shown only against a
simple plant. Real voice coils are force actuators with resonances, and
the gains here are not meant for hardware.

**Not modelled.**

- The 100 MHz clock domain is assumed to be the only one. The 16 MHz, 1 Hz
  and metrology inputs are asynchronous and go through two-flop
  synchronisers.
- No clock-domain crossing to a network core is modelled.

## Files

| file | contents |
|---|---|
| `rtl/cdl_pkg.sv` | constants, units, configuration and telemetry types |
| `rtl/master_timebase.sv` | 25 µs tick of the day, 1 Hz sync, clock check |
| `rtl/loop_scheduler.sv` | 5 kHz / 1 kHz / 100 Hz strobes |
| `rtl/tick_quantizer.sv` | loop time stamp, round-to-8, jitter count |
| `rtl/metrology_phase_meter.sv` | heterodyne phase meter |
| `rtl/target_generator.sv` | baseline solution + offset → target |
| `rtl/pzt_servo.sv` | 5 kHz PZT loop |
| `rtl/pid_ctrl.sv` | shared PID |
| `rtl/vc1_servo.sv`, `rtl/vc2_servo.sv`, `rtl/stepper_servo.sv` | offload loops |
| `rtl/telemetry_framer.sv` | telemetry byte stream |
| `rtl/ople_delay_line_ctrl.sv` | top level |
| `tb/tb_*.sv` | test benches |
