# Multi-station material testing controller (FPGA RTL)

A materials testing machine pushes, pulls, bends or shakes a specimen with
one or more actuators while sensors record force and displacement. The
controller in this repository is the FPGA part of such a machine. It runs
up to 16 independent *test stations* side by side. In each station, every
control-loop period (10 µs, i.e. 100 kHz):

1. the load sensor is read through an ADC, and the displacement encoder is
   read continuously;
2. the next point of the test profile (the *set point*) is computed;
3. the actuator command is worked out. In **open loop** the set point itself
   is sent. In **closed loop** a PID controller acts on the set point and
   on the measured *process variable*;
4. the command goes to the actuator interface: a serial DAC (servo-hydraulic
   and servo-electric drives), a PWM output (DC motors) or step/direction
   pulses (stepper motors);
5. a result record goes to the host CPU.

A host CPU configures the stations over a stream link. It can also stream
set points of its own, and it receives the result records over DMA.

The architecture follows the paper *FPGA-Based Material Testing Machine
Controller* (Hambardzumyan, Ghasabyan, Tamazyan). The paper gives the block
set, the data flow between the blocks, the test flow chart and the headline
figures: 16 stations, a 100 kHz loop, 32-bit measurements and 64-bit
profiles. It does not describe how any block works inside. Every number
format, interface protocol, register map and algorithm detail below is
this implementation's own choice. The section
[Departures and gaps](#departures-and-gaps) lists where this RTL differs
from the paper.

## Block structure

```
                 cfg stream (32-bit words)        CPU->FPGA stream (64-bit set points, tdest = station)
                        |                                   |
                    cfg_regs ---- per-station + global ---  data_mux (one FIFO per station)
                        |          configuration            |
   loop_timer --tick--> +----------------+------------------+
                        |                |
   gpio pads <-> gpio_driver --inputs--> station[0] ... station[N_ST-1]
                                         |  afe_driver     (ADC)
                                         |  encoder_driver (A/B/Z)
                                         |  wf_gen  --set point, process variable-->  pid_ctrl
                                         |  dac_driver / pwm_driver / stepper_driver
                                         |  result record
                                         v
                                     dma_logger --> FPGA->CPU stream (6 x 64-bit beats per record)
```

`mtc_top` contains all of these. The ADCs, DACs, encoders, the pad tristate
buffers and the CPU-side FIFO/DMA engines are outside the FPGA logic, so
their signals are ports of `mtc_top`.

## One loop period inside a station

Hardware costs most of its timing here. `station` is a small state machine
that goes through the steps of the test flow once per tick of `loop_timer`:

| state  | what happens | cycles (defaults) |
|--------|--------------|-------------------|
| IDLE   | wait for the tick; the tick also starts the ADC conversion | 1 |
| ACQ    | `afe_driver`: `cnv` high for `ADC_CONV` cycles, then 32 bits clocked in at clk/4 | 64 + 128 + 1 |
| CHECK  | decide whether the test starts, continues or ends (see below); step the waveform generator | 1 |
| WF     | `wf_gen` pipeline: table read, wave shaping, multiply-add | 3 |
| CTRL   | closed loop only: `pid_ctrl` pipeline | 3 |
| OUT    | load DAC, PWM and stepper with the new command `u` | 1 |
| LOG    | hand the record to `dma_logger` | 1 |

From tick to new actuator value this takes about 205 cycles, about 2 µs at
100 MHz. The DAC frame adds 66 cycles (16 bits at clk/4). This fits
comfortably in the 1000-cycle period. If a tick comes before the previous
point has finished, the tick is skipped. The skip is counted (`overruns`)
and flagged in the next record. This happens only if `LOOP_DIV` is set
below about 210 cycles.

**Test start and end.** A test starts on a rising edge of the station's
`run` bit. At that point the waveform phase, frequency and amplitude are
reloaded and the PID integrator and stored error are cleared. The test
ends when `run` goes low, or when any GPIO input selected by the station's
`estop_mask` is high (an e-stop button or a limit switch). The command is
then forced to zero, and `run` must go low and high again before the next
test. Acquisition and logging continue while no test runs, so the CPU
always sees the sensor readings.

All stations share one tick, so they sample and update in step. Each
station has its own profile, gains and actuator, and one station's e-stop
does not affect the others.

## Number formats

| name | format | used for |
|------|--------|----------|
| `fix64_t` | signed Q32.32 | set point, process variable, control value `u`, limits, profile offset/amplitude/ramp rate |
| `sample_t` | signed 32-bit integer | raw ADC sample, encoder count |
| `gain_t` | signed Q16.16 | Kp, Ki, Kd, Kff |

The integer part of a Q32.32 value is in *raw counts*. A set point of
`1000.0` means "1000 ADC counts" when the loop is closed on the load cell,
or "1000 encoder counts" when it is closed on the encoder. The process
variable is the raw sample with 32 zero fraction bits appended. The actuator
drivers use only the integer part of `u`. The DAC takes it as a signed DAC
code, the PWM driver as a duty in clock cycles, and the stepper driver as a
frequency tuning word. Any scaling to engineering units is done in the
gains, on the CPU side.

## Set point generation (`wf_gen`)

Each point is one of the following:

| profile | point *k* |
|---------|-----------|
| HOLD | `offset` |
| RAMP | moves from the present set point toward `offset` by `ramp_rate` per point, then stays there |
| SINE | `offset + A_k * sin(2π φ_k / 2^32)` |
| SQUARE | `offset ± A_k` (sign of the sine above) |
| TRIANGLE | `offset + A_k * tri(φ_k)`, a triangle that rises from 0 to +1 at a quarter period, in phase with the sine |
| STREAM | the next 64-bit word from the CPU stream. If none is waiting, the last point is held and an underrun is flagged |

The phase is `φ_{k+1} = φ_k + f_k`, with `f_{k+1} = f_k + freq_step` and
`A_{k+1} = A_k + amp_step`. A non-zero `freq_step` gives a sweep sine. A
non-zero `amp_step` gives a tapered sine. The start values are `φ_0 = 0`,
`f_0 = freq_inc` and `A_0 = amplitude`. One period has `2^32 / freq_inc`
points. At 100 kHz a 1 Hz sine therefore needs `freq_inc = 42950`.

The sine comes from a quarter-wave table of `2^ROM_AW` entries (1024 by
default) with 31-bit magnitudes. Entry *i* holds
`floor((2^31 − 1) · sin((i + ½)·π / 2^(ROM_AW+1)))`. The table is computed
at elaboration, so no data file is needed. The other three quadrants are
read by mirroring the address and negating the value. The half-step offset
makes all four quadrants exactly symmetric. With no interpolation, the
largest error is about `A · π / 2^(ROM_AW+1)`, which is 0.15 % of the
amplitude at the default size. The table value (Q1.31) is multiplied by the
64-bit amplitude into a 96-bit product, which is shifted back to Q32.32.

`wf_gen` also captures the process variable at the same step: the AFE
sample or the encoder position, selected by `pv_sel`. The set point and the
measurement used by the PID therefore always belong to the same loop point.

## Control law (`pid_ctrl`)

```
e_k = r_k − y_k
I_k = I_{k−1} + Ki·e_k                          (only if not pushing further into a limit)
u_k = clamp( Kp·e_k + I_k + Kd·(e_k − e_{k−1}) + Kff·r_k ,  out_min, out_max )
```

The gains are per sample, so `Ki` already contains the loop period. When
the unclamped sum is above `out_max`, the integrator is updated only if
this period's increment `Ki·e` is not positive, and the mirror rule
applies at `out_min`. The integrator therefore does not wind up while the actuator
is saturated. Each product is a 64×32-bit multiply, shifted right by 16.
Every intermediate result saturates to the Q32.32 range instead of
wrapping. The three pipeline stages are: error and difference; the four
products; then the sum, clamp and integrator update. Record flag 5 shows
that the output was clamped.

## Actuator interfaces

* **DAC** (`dac_driver`): `clamp(int(u), −2^(B−1), 2^(B−1)−1)` is
  converted to offset binary (0 is full negative, `2^(B−1)` is zero, B = 16
  by default). It is sent MSB first with `cs_n` low. `sclk` idles low, and
  the DAC takes each bit on the rising edge. The rising edge of `cs_n`
  updates the DAC output.
* **PWM** (`pwm_driver`): sign and magnitude. `dir` is the sign of `u`.
  The pulse is `min(|int(u)|, period)` clock cycles high in every period of
  `pwm_period` cycles. A new value takes effect only at the start of a
  period.
* **Stepper** (`stepper_driver`): `|int(u)|` is added every clock to a
  32-bit accumulator, and every carry gives one step pulse `STEP_PULSE`
  cycles wide. The step rate is therefore `|int(u)| · f_clk / 2^32`. The
  direction is the sign of `u` and changes only between pulses. Steps are
  counted in `position` and reported in the record. The stepper is enabled
  per station (`step_en`) and only while a test runs.

## Sensor interfaces

* **ADC / AFE** (`afe_driver`): a conversion is started by holding `cnv`
  high for `ADC_CONV` cycles. The 32 result bits are then read MSB first.
  The converter changes `sdo` after each falling `sclk` edge, and the
  driver samples it at the rising edge. The bits are read as two's
  complement.
* **Encoder** (`encoder_driver`): A, B and index pass through two-flop
  synchronisers. The decoder counts every edge (4× decoding). A step in
  which both A and B change at once is illegal: it is counted and does not
  move the position, and record flag 6 shows it. The index edge captures
  the position.
* **GPIO** (`gpio_driver`): 32 bidirectional pins, each with an output
  value and a direction bit. Inputs are synchronised, then debounced: a new
  level is accepted only after `DEBOUNCE` stable cycles. The debounced
  inputs go to every station (for e-stops and limit switches) and into
  every record.

## CPU interfaces

### Configuration stream (`cfg_*`, 32-bit)

The CPU sends pairs of words: an address word, then a data word. `tlast`
closes a packet and resets the pairing, so a packet cut short cannot shift
later writes. Address bits [15:8] select the station (0xFF selects the
global registers). Bits [7:0] select the register. Writes to unknown
addresses are ignored and counted in `cfg_bad_writes`.

| reg | station register | | reg | global register |
|-----|-----|-|-----|-----|
| 0x00 | CTRL: [0] run, [1] closed loop, [2] PV from encoder, [6:4] profile, [8] DAC en, [9] PWM en, [10] stepper en | | 0x00 | GPIO output values |
| 0x01/02 | offset lo/hi | | 0x01 | GPIO directions (1 = output) |
| 0x03/04 | amplitude lo/hi | | 0x02 | loop divider (cycles per loop period) |
| 0x05/06 | amplitude step lo/hi | | 0x03 | [0] acquisition / loop enable |
| 0x07 | phase increment | | | |
| 0x08 | phase-increment step | | | |
| 0x09/0A | ramp rate lo/hi | | | |
| 0x0B–0x0E | Kp, Ki, Kd, Kff | | | |
| 0x0F/10, 0x11/12 | output min, output max (lo/hi) | | | |
| 0x13 | PWM period | | | |
| 0x14 | e-stop input mask | | | |

Profile codes: 0 hold, 1 ramp, 2 sine, 3 square, 4 triangle, 5 stream.
After reset every station is stopped, its limits are fully open, and DAC
and PWM are enabled. The loop divider is `LOOP_DIV` and the loop is off.

### Set point stream (`dmai_*`, 64-bit)

Each beat is one Q32.32 set point, and `tdest` names the station. The beat
is queued in that station's FIFO (`MUX_DEPTH` entries). A full FIFO holds
`tready` low, so the DMA waits. The station takes one point per loop
period while its profile is STREAM.

### Result stream (`dmao_*`, 64-bit)

Each station sends one record per loop period, 6 beats long, with `tlast`
on the last beat:

| beat | content |
|------|---------|
| 0 | `{8'hA5, station, flags[15:0], sequence[31:0]}` |
| 1 | set point |
| 2 | process variable |
| 3 | control value `u` |
| 4 | `{ADC sample, encoder position}` |
| 5 | `{GPIO inputs, stepper position}` |

Flags: [0] test active, [1] closed loop, [2] e-stop input high, [3] loop
overrun, [4] stream underrun, [5] PID clamped, [6] encoder error seen,
[15] earlier records of this station were dropped.

`dma_logger` holds one record per station and serves the stations round
robin. At the default size the records take 96 of every 1000 cycles. If
the CPU side stalls and a station produces a new record before its last
one was sent, the older record is replaced. The station's `dropped`
counter then increases and flag 15 is set on the record that is sent. The
control loops never wait for the host.

## Parameters of `mtc_top`

| parameter | default | meaning |
|-----------|---------|---------|
| `N_ST` | 16 | number of stations (the paper's maximum) |
| `N_GPIO` | 32 | general-purpose pins |
| `LOOP_DIV` | 1000 | reset value of the loop divider: 100 kHz from an assumed 100 MHz clock |
| `ROM_AW` | 10 | log2 of the quarter-wave sine table size |
| `ADC_BITS` | 32 | ADC word width (the paper's measurement resolution) |
| `ADC_CONV` | 64 | cycles with `cnv` high |
| `DAC_BITS` | 16 | DAC word width |
| `SCLK_HALF` | 2 | half period of the ADC / DAC serial clocks, in clock cycles |
| `STEP_PULSE` | 8 | stepper pulse width in cycles |
| `DEBOUNCE` | 16 | GPIO debounce time in cycles |
| `MUX_DEPTH` | 16 | set point FIFO depth per station |

The defaults synthesise to about 10 k word-level cells, 49 k flip-flop
bits and 512 kbit of sine tables (16 tables of 1024 × 31 bits, one per
station). The tables are read-only and identical. An implementation short
of block RAM could share one dual-port table between two stations.

## Departures and gaps

* **Fixed point instead of double precision.** The paper's waveform module
  is "64-bit double precision". Here all 64-bit quantities are Q32.32 fixed
  point. The resolution is 2^-32 counts and the range is ±2^31 counts,
  which covers a 32-bit sensor. The datapath stays to single-cycle adders
  and multipliers.
* **Point rate.** The paper notes that neighbouring waveform points can be
  nanoseconds apart. Here one point is produced per loop period, since the
  generator is stepped by the station state machine. The loop divider can
  be set down to about 210 cycles before ticks overrun.
* **Profiles not built.** Random-sine is named in the paper but not
  defined, so it is not implemented.
* **Control algorithms not built.** Fuzzy-logic control and the adaptive
  amplitude and mean control algorithms are only named in the paper. Only
  PID with feed-forward is built.
* **Assumed external parts.** The ADC, DAC and encoder interfaces are
  generic serial and quadrature interfaces, because no parts are named.
  Adapting to a specific converter means changing `afe_driver` or
  `dac_driver`. The clock frequency (100 MHz) is assumed too.
* **Per-station I/O count.** Each station has one ADC channel, one encoder
  and one set of actuator outputs, like the per-actuator paths of the
  paper's system diagram. A station with several sensors would need more
  `afe_driver` instances and a wider process-variable select.
* **End of test.** The flow chart ends the test when the start/continue
  decision is negative. Here that decision is made from the run bit and
  the e-stop inputs, and the command is then forced to zero. A real
  machine may need a controlled ramp-down instead.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `adc_model` and `dac_model` are
behavioural models of the converters, for simulation only. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
          rtl/mtc_pkg.sv tb/tb_mtc_top.sv --top-module tb_mtc_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|-----------|----------------|
| `tb_cfg_regs` | register decoding, unknown addresses, re-alignment on `tlast` |
| `tb_wf_gen` | every profile against a real-arithmetic model; sweep, taper, ramp, stream, underrun; 3-cycle latency |
| `tb_pid_ctrl` | 400 points against a wide-integer reference PID, including clamping, anti-windup and clear |
| `tb_afe_driver` | random and extreme ADC words, conversion pulse length, clock count, latency |
| `tb_encoder_driver` | forward, backward and random quadrature motion, illegal steps, index capture |
| `tb_gpio_driver` | output path, glitch rejection, debounce latency |
| `tb_pwm_driver` | duty and direction for both signs, clamping, most negative value |
| `tb_dac_driver` | offset-binary code through the DAC model, clamping, frame length, transfer time |
| `tb_stepper_driver` | step rate against `ftw · cycles / 2^32`, direction, pulse width, position |
| `tb_data_mux` | routing and order under random back-pressure, stalls, bad destinations |
| `tb_dma_logger` | every beat of every record, round robin, overflow rule |
| `tb_station` | open loop, closed loop on the ADC and on the encoder, stream, e-stop, restart, overruns |
| `tb_mtc_top` | 3 stations end to end, configured only through the stream: open-loop sine, PI loop around a plant model, streamed set points, e-stop, dropped records, overruns, clamping, bad configuration write |
| `tb_mtc_top_full` | default size (16 stations, 100 kHz): one record per station per period, no drops, DAC levels, P-loop operating points |

The testbenches rely only on two-state behaviour: every register that is
read is reset, and they pass from random initial values.
