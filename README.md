# Digital repetition-rate lock for pulsed lasers: FPGA datapath in SystemVerilog

A mode-locked laser emits pulses at a repetition rate f_x of tens of MHz. Here that rate
is locked to an atomic clock entirely in the digital domain. The only analog blocks are
a front end and the actuator (a piezo on the laser cavity). This repository holds the
FPGA part of that system, the *digital frequency locking module*. It measures how far
the laser is from its target with sub-µHz resolution, filters that measurement, runs a
PID controller and writes the result to a 20-bit DAC. It also reports a lock flag,
streams every measurement to a PC, and passes PC commands on to the PLL chips of the
front end.

The whole design rests on two ideas:

1. **Error amplification before sampling.** An analog/PLL front end, outside this RTL,
   multiplies the laser rate by m and mixes it with `m·f0 − f_r`. Here f0 is the
   nominal laser rate and f_r the atomic-clock frequency (10 MHz). What comes out is a
   sine at `f_e = f_r + m·Δf`, where Δf = f_x − f0. The laser's error is multiplied by
   m, yet the signal sits at the same low frequency as the reference, so one ADC clock
   can sample both.
2. **A two-arm digital phase detector (DMTD) plus counter-based unwrapping.** Both
   sampled channels are mixed with the *same* numerically controlled oscillator (NCO),
   and their phases are subtracted. The NCO's own phase noise cancels. The phase is then
   unwrapped with a turn counter, so a period's mean frequency needs only two stored
   phases and one counter, whatever the period length.

```
           ┌──────────────────────── dmtd ─────────────────────────┐
adc_ref ──►│ x·cos, x·sin → LPF → LPF → atan2  = θ1 ─┐             │
           │            ▲ nco (sin, cos)              (−)─► θ = θ1−θ2├─► freq_extract ─► iir_lpf ─► pid_ctrl ─► dac_spi ─► DAC
adc_err ──►│ x·cos, x·sin → LPF → LPF → atan2  = θ2 ─┘             │        │                      ▲ offset
           └───────────────────────────────────────────────────────┘        └─► lock_detect ─► locked
register bus ◄─► ctrl_regs ─► configuration of everything above;  ─► pll_spi ─► CFG / CFM PLL chips
                          └─► measurement stream (tx_valid, tx_data)
```

All logic runs on one clock: the ADC sample clock, 100 MHz on the reference hardware.

## Number formats

| Quantity | Format | Unit |
|---|---|---|
| ADC sample | signed 16 bit | |
| Phase θ | signed 24 bit | 2^24 = one turn (2π); range [−π, π) |
| Frequency | signed 48 bit | Fs / 2^48 = 0.355 µHz at Fs = 100 MHz (1 Hz = 2 814 750 LSB) |
| NCO tuning word | unsigned 32 bit | f_NCO = ftw · Fs / 2^32 |
| Filter coefficient α | unsigned Q1.24 | 2^24 = 1.0 (filter bypassed) |
| DAC code | unsigned 20 bit | |

The measured quantity is **f_r − f_e**, the slope of θ = θ_ref − θ_err. With
f_e = f_r + m·Δf this equals −m·Δf. A laser that runs 1 Hz fast reads as −m Hz.

## The DMTD phase detector (`dmtd`, `dmtd_arm`, `nco`, `iir_lpf`, `cordic_atan2`)

Take a channel x = A·sin(2π f t + φ). Multiplying it by the NCO's cos and sin and
low-pass filtering gives:

* I ≈ (A/2)·sin(2π(f − f_NCO)t + φ − φ_NCO)
* Q ≈ (A/2)·cos(same)

So `atan2(I, Q)` is the phase of the beat between the channel and the NCO. The two arms
see the same φ_NCO, so the NCO drops out of θ1 − θ2 completely. Only the phase
difference between the two inputs remains, and it advances at f_r − f_e. Choose f_NCO
a little away from 10 MHz, for example 9.9 MHz, so that each arm's beat is slow (here
100 kHz). The sum-frequency product at about 20 MHz is then far above the filter corner.

* **`nco`**: a 32-bit phase accumulator drives a 16-stage pipelined CORDIC in rotation
  mode. There is no sine ROM. Angles outside ±π/2 are first rotated by π. The
  amplitude is 32000 of a full 16-bit scale. The output follows the accumulator by
  ITER+2 = 18 clocks.
* **`dmtd_arm`**: two 16×16 multipliers. The products are scaled to 24 bits and
  registered. Each of I and Q then goes through two cascaded single-pole filters
  (α = 1/32 after reset, a −3 dB corner near 500 kHz at 100 MS/s). A 20-iteration
  vectoring CORDIC follows. For Q < 0 the vector is first negated and π is added, so the
  result covers all four quadrants with about 2^−20 turn of angle error.
* **`dmtd`**: one NCO feeding two arms, and the subtraction. The subtraction wraps
  naturally in 24-bit two's complement. `valid_o` rises 26 + 1024 clocks after reset.
  The first 26 clocks fill the pipeline. The next 1024 (parameter `SETTLE`) let the I/Q
  filters charge up from zero. Until they have, I and Q are near zero and their
  arctangent jumps around, and unwrapping would count such jumps as turns. With the
  reset coefficient the start-up error has decayed by e^−32 at that point. If you set a
  much smaller `IQ_ALPHA`, increase `SETTLE` to match.

## Frequency extraction by counter-based unwrapping (`freq_extract`, `seq_div`)

The mean frequency over P sample intervals is the unwrapped phase advance divided by P:

```
f = (θ(end) − θ(start) + CNT · 2^24) / P        [turns/sample · 2^24]
```

CNT counts how often θ wrapped in between. From one sample to the next the phase moves
far less than half a turn, so any step of more than half a turn is a wrap. A step below
−½ turn means θ went past +π and reappeared at −π, so CNT + 1. A step of at least +½
turn is the opposite wrap, so CNT − 1. The block stores only the start phase, the
previous phase and CNT, and no memory grows with P.

At the last sample of a period the phase advance (a 57-bit signed number) is converted
to magnitude and shifted left by 24. An 81-bit restoring divider then divides it by P
one bit per clock. The quotient is already in Fs/2^48 units. The sign is put back and
the result is saturated to 48 bits. A result appears 83 clocks after the period's last
sample. The last sample of one period is the first of the next, so periods follow each
other with no gap and no sample is lost.

* P is a register (`REG_PERIOD`). After reset it is 1000 samples, a 100 kHz measurement
  rate.
* P is limited to at least 85 samples so the divider is always free when a period ends.
* The largest P is 2^32 − 1 samples (43 s at 100 MS/s). CNT is 32 bits wide.

## Feedback: filter, PID, DAC

* **`iir_lpf` on the frequency**: y += α(x − y), once per measurement. For a corner
  f_c at a measurement rate f_m, use α ≈ 1 − exp(−2π f_c / f_m). For example, 300 Hz at
  100 kHz gives α = 0.0187, about 313 500. The reset value α = 1.0 bypasses the filter.
* **`pid_ctrl`**:
  * e = f − f_offset, saturated to 48 bits. The offset is the set point. Changing it
    moves the locked laser to a different frequency, anywhere within the actuator range.
  * The integrator is I += e, clamped to ±`integ_limit`.
  * The output is u = bias + ((kp·e + ki·I + kd·(e − e_prev)) >>> gain_shift), clamped
    to 0 … 2^20 − 1.
  * `sat_o` marks a clamped output.
  * With the loop disabled (`REG_CONTROL` bit 0 = 0), the state is cleared and the DAC
    sits at `dac_bias`. This is the free-running mode. Enabling the loop starts from a
    clean integrator.
  * Use positive gains when a larger DAC code raises the laser rate, because the
    measured value falls as the laser speeds up.
* **`dac_spi`**: every `REG_DAC_DIV` clocks (100 after reset, 1 MS/s) the current code is
  sent as a 24-bit SPI mode-0 frame, `{4'b0001, code[19:0]}`, MSB first, with
  sclk = clk/2. A frame takes 48 clocks, so the divider is raised to at least 50.

## Lock detector (`lock_detect`)

Each raw (unfiltered) measurement is tested against |f − f_offset| ≤ `lock_thresh`. A run
counter counts consecutive passes. `locked` rises when the run reaches `lock_hold`
(10 after reset) and drops at the first failing measurement.

## Control registers and PLL commands (`ctrl_regs`, `pll_spi`)

The PC link is a plain synchronous bus with 32-bit words at 8-bit word addresses 0x00–0x17.
A write takes effect at the clock edge. Read data comes back one clock after `rd_en`,
with `rd_valid`.

| Addr | Name | Access | Contents |
|---|---|---|---|
| 00 | ID | R | 0x444C4D01 |
| 01 | NCO_FTW | RW | NCO tuning word |
| 02 | IQ_ALPHA | RW | DMTD I/Q filter α [24:0] (reset 1/32) |
| 03 | PERIOD | RW | measurement period P in samples (reset 1000) |
| 04 | F_ALPHA | RW | frequency filter α [24:0] (reset 1.0 = bypass) |
| 05/06 | OFFSET_LO/HI | RW | set point, 48-bit signed (HI holds bits 47:32) |
| 07/08/09 | KP/KI/KD | RW | signed 24-bit gains |
| 0A | GAIN_SHIFT | RW | right shift of the PID sum [5:0] |
| 0B/0C | ILIM_LO/HI | RW | integrator clamp, 63 bits |
| 0D | CONTROL | RW | bit 0: loop enable |
| 0E | DAC_BIAS | RW | DAC code with the loop open / PID centre (reset 0x80000) |
| 0F | DAC_DIV | RW | clocks per DAC update (reset 100) |
| 10/11 | LOCK_TH_LO/HI | RW | lock window, 47 bits |
| 12 | LOCK_HOLD | RW | consecutive in-window periods to declare lock |
| 13 | PLL_CMD | W | [25:24] chip (0 CFG, 1 CFM0, 2 CFM1), [23:0] frame; the write sends it |
| 14 | STATUS | R | bit 0 locked, bit 1 PLL port busy |
| 15/16 | FREQ_LO/HI | R | last measured frequency (HI sign-extended) |
| 17 | DAC_CODE | R | current DAC code |

* Every measurement is also pushed out as one 64-bit word `{15'b0, locked, f[47:0]}`,
  with `tx_valid` high for one clock.
* `pll_spi` sends each PLL command as a 24-bit SPI frame at clk/10. Only the addressed
  chip's select is driven low. A command that arrives while a frame is still going out is
  dropped and counted. The PLL register contents, which set the multiplication factor m
  and the mixing frequency, are composed on the PC. This block only carries them.

## Timing summary

| Path | Latency |
|---|---|
| ADC sample → θ | 26 clocks (`valid_o` after reset: 1050 clocks) |
| End of period → `freq_o` | 83 clocks |
| Frequency filter, PID | 1 + 2 clocks |
| PID output → DAC | at the next DAC update (≤ `DAC_DIV` clocks), then 48 clocks of frame |

At P = 1000 the loop therefore acts on each measurement about 1.1 µs after its period
ends. That is well inside the 10 µs period.

## Where this design is its own

The overall architecture follows the published description of the system:

* the DMTD with one shared NCO, I/Q mixing, low-pass filtering and arctangent;
* the subtraction θ1 − θ2;
* counter-based unwrapping with the end-point formula;
* LPF → PID with an offset set point → DAC;
* a lock detector fed from the frequency measurement;
* PC-configurable multiplication factor, PLL output frequency, measurement period,
  offset, filter and PID parameters and DAC rate.

These points are choices of this implementation:

* **Clocking.** One clock domain at the ADC rate. On the reference hardware the FPGA
  gets a separate 125 MHz clock, and an implementation using it would need a
  clock-domain crossing at the ADC interface.
* **Widths and arithmetic.** All word widths, and the CORDIC for both the NCO and the
  arctangent, are choices of this implementation. So are the single-pole IIR filters,
  two sections per I/Q path, and the sequential divider. The divider is why the shortest
  period is 850 ns, where the published system claims periods down to nanoseconds.
* **Start-up hold-off.** The phase detector withholds its output for 1024 samples after
  reset while the I/Q filters settle.
* **PID form.** Parallel form, shift-scaled gains, a clamped integrator, and a loop
  enable that clears its state.
* **Lock criterion.** A window plus a run length.
* **Interfaces.** The register map, the bus, the stream word and both SPI frame formats
  are all choices of this implementation. The DAC frame `{4'b0001, code}` fits common
  20-bit SPI DACs but should be checked against the part actually used. The network
  MAC/PHY is not included; the bus is where it would connect.
* **Sign convention.** The published text says θ1 belongs to the reference channel, and
  that is followed here, so the output is f_r − f_e. One of its block diagrams labels
  the arms the other way round.
* **Two loops on one board.** The reference board can lock two lasers. One instance of
  `dflm_top` is one loop; a second loop is a second instance.

## Sizing against the published experiments

| Experiment | Needs | This design |
|---|---|---|
| Noise floor, 10 MHz in both channels, 100 kHz measurement rate | P = 1000 | default |
| VCO lock: m = 100, ±100 Hz tuning, 300 Hz filter, 100 kHz feedback | ±10 kHz = 2.8·10^10 LSB | 48-bit range ±1.4·10^14 |
| Laser lock: 50 MHz, m = 20, ±400 Hz, 500 Hz filter, 1 kHz feedback | P = 100 000, up to 8 turns per period | P ≤ 2^32 − 1, CNT 32 bit |

The resolution of 0.36 µHz sits well below the 7.7 µHz RMS that was measured on the
locked VCO.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_nco` | sin/cos against 32000·sin/cos of a model accumulator at several tuning words, latency 18, orthogonality, ftw = 0 |
| `tb_cordic_atan2` | atan2 of random vectors of random magnitude in all quadrants, latency 22 |
| `tb_iir_lpf` | bit-exact against an integer model with random coefficients; bypass, DC settling, attenuation at Fs/2 |
| `tb_dmtd_arm` | phase of a sine at a known offset from the NCO, around the circle; phase slope for ±Fs/1000 detuning |
| `tb_dmtd` | fill latency; θ1 − θ2 for known phase offsets; unchanged when the NCO is retuned; slope equals f_ref − f_err |
| `tb_freq_extract` | frequency of a synthetic phase with random rate and jitter, many wraps in both directions, against the true unwrapped phase; one result per period; minimum period |
| `tb_pid_ctrl` | hand-worked P, I, D, clamp and open-loop cases, then random gains and inputs against a model, result exactly two clocks later |
| `tb_lock_detect` | window and run counter against a model with random inputs |
| `tb_dac_spi` | frames decoded from the pins, update interval, minimum divider |
| `tb_pll_spi` | frames and chip selects, dropped commands while busy |
| `tb_ctrl_regs` | every register, the PLL command pulse, status, stream, read timing |
| `tb_dflm_top` | the whole module in a closed loop, at the default parameters (below) |
| `tb_workloads` | the published noise-floor, VCO and laser operating points (below) |

`tb_dflm_top` models the plant. A 10 MHz reference feeds one ADC channel. A VCO with
±100 Hz tuning across the DAC range, 37 Hz off at mid code, goes through an ideal ×100
error amplifier to the other channel. The DAC pins are decoded to steer the VCO. The
test runs these phases:

1. Free run, which measures −3700 Hz as expected.
2. Lock enable: locked within about 20 periods, mean error a few mHz, DAC code within a
   few LSB of the analytic value.
3. An offset switch to +1776 Hz, followed correctly.
4. An out-of-range offset, which saturates the PID and drops the lock.
5. A return, which relocks.
6. Loop disable.

It also sends a PLL command and reads back registers. It counts each mechanism (wraps
in both directions, lock and unlock, saturation, offset and mode switches, PLL frame,
DAC frames, stream words) and fails if any of them never happened. It runs in about
10 s of wall time.

`tb_workloads` runs the three published operating points on the same module, each
after a reset and configured only through registers:

| Scenario | Settings | Result in simulation |
|---|---|---|
| Noise floor | one 10 MHz source into both channels, P = 1000, 100 Hz filter | mean 0.6 mHz, scatter 0.29 Hz raw and 1.3 mHz after the filter (at f_e) |
| VCO lock | m = 100, ±100 Hz VCO 37 Hz off, P = 1000, 300 Hz filter | locks after 123 periods (1.2 ms), residual < 10 mHz, follows a 710 Hz offset switch |
| Laser lock | m = 20, ±400 Hz piezo, laser 150 Hz off, P = 100 000 (1 kHz), 500 Hz filter | locks after 14 periods (14 ms), residual < 1 mHz at f_e |

The ADC noise in these models is only a few LSB and the sources are ideal, so these
figures show the arithmetic of the loop. They do not predict the stability of real
hardware.

To run a testbench with plain Verilator:

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/lock_pkg.sv tb/tb_dflm_top.sv \
          --top-module tb_dflm_top -o sim
./obj_dir/sim
```

The package `rtl/lock_pkg.sv` must come first. `-y rtl -y tb` lets Verilator find every
other module by its file name.

## Files

* `rtl/lock_pkg.sv`: widths, configuration record, register map, CORDIC angle table.
* `rtl/nco.sv`, `rtl/cordic_atan2.sv`, `rtl/iir_lpf.sv`, `rtl/dmtd_arm.sv`,
  `rtl/dmtd.sv`: the phase detector.
* `rtl/freq_extract.sv`, `rtl/seq_div.sv`: unwrapping and averaging.
* `rtl/pid_ctrl.sv`, `rtl/lock_detect.sv`: the controller and the lock flag.
* `rtl/spi_tx.sv`, `rtl/dac_spi.sv`, `rtl/pll_spi.sv`: the serial ports.
* `rtl/ctrl_regs.sv`: the registers and the stream.
* `rtl/dflm_top.sv`: the top level.
* `tb/`: one testbench per block, as listed above.

The CORDIC table is ATAN_TAB[i] = round(atan(2^−i) / (2π) · 2^24), for i = 0 … 23.
