# FPGA peak lock for a diode laser

This is synthesizable SystemVerilog for a digital laser frequency lock. It
holds an external-cavity diode laser on the peak of a saturated-absorption
line, for example the rubidium D2 crossover used in laser cooling. It takes the
lock-in/PID loop of the published FPGA lock by Jørgensen et al. (Aarhus
University, "A simple laser locking system based on a field-programmable gate
array") and writes it as plain RTL. That system was programmed in LabVIEW on a
National Instruments myRIO board. Its dataflow is the source here. Its bit
widths, number formats and host interface were not published, so this design
fills them in. The sections below say which parts are which.

## The idea: lock to a peak with the derivative

A peak has no sign at its top. The laser is therefore dithered: its current is
modulated with a small sine at `f_m` (4 kHz by default). The photodiode signal
then carries a component at `f_m` whose size and sign follow the slope of the
line at the laser's present frequency. Multiplying the signal with a copy of
the modulation (phase `theta`) and low-pass filtering the product leaves a
slowly varying value proportional to

    delta * cos(theta) - phi * sin(theta)

where `delta` is the derivative of the absorption line. With the right
`theta`, this is the derivative: zero on the peak, and of opposite sign on
either side of it. That value is the **error signal**. A PID controller drives
the piezo of the laser grating so that the error signal stays at zero.

The loop has two modes:

* **scan**: a second, slow sine sweeps the piezo across a range of
  frequencies, so the operator can see the spectrum and pick a line;
* **lock**: the PID output drives the piezo.

A **step switch** adds a fixed value to the piezo signal. This knocks the
locked laser off the line on purpose, so the loop's step response can be
measured.

## Dataflow

```
 AI (12 bit) -> adc_upconvert -> spec ----------------------.
                                                             x  mixer -> gain -> lowpass_filter -> err
 sine_gen (modulation) -> phase_shifter -> gain (ref) ------'                                      |
          |                                                                                          v
          '-> gain (mod) -> dac_downconvert -> AO2 (current driver)                           pid_controller
                                                                                                     |
 sine_gen (scan) -> gain (scan) -> + offset -> [scan/lock] <----------------------------------------'
                                                   |
                                                   +-> [step on/off] (adds step_size) -> dac_downconvert -> AO1 (piezo)
 err -> dac_downconvert -> audio_out (error monitor)
 {spec, err, piezo} -> monitor_fifo -> host
 host_regs: every setting above, written by the host
```

`laser_lock_top` wires all of it. The blocks follow the published dataflow
diagram: two sine generators, a phase block, five gain blocks, the
multiplier, the low-pass filter, the PID loop, an offset adder, the scan/lock
switch, a step adder and the step on/off switch. The published system also
sends the error signal to the board's AC-coupled audio output so it can be
watched on an oscilloscope; here that is `audio_out`.

## One loop iteration

Everything runs off one clock (40 MHz assumed) and a strobe from
`sample_timer` every `LOOP_TICKS` = 318 cycles. That gives 7.95 µs per
iteration, about 125.8 kHz. This is the loop time and sample rate of the
original system. The 40 MHz clock is the frequency that makes those two
numbers agree.

Inside one iteration the samples ripple through a valid-tagged register chain.
Latencies are counted in cycles after the strobe:

| cycle | what becomes valid                                          |
|------:|-------------------------------------------------------------|
| 1     | spectroscopy sample (`adc_upconvert`)                       |
| 2     | modulation, phase-shifted reference and scan sines          |
| 3     | the three gains after the generators                        |
| 4     | 32-bit product (`mixer`)                                    |
| 5     | scaled product (mixer gain)                                 |
| 8     | error signal (two filter sections + output rounding)        |
| 9     | PID output                                                  |
| 10    | piezo value (offset, scan/lock, step)                       |
| 11    | all converter codes; `dac_update` pulses                    |

The whole iteration uses 11 of the 318 cycles. The AO1 and AO2 outputs are
updated in the same cycle. The spectroscopy sample read at the start of an
iteration therefore shows the modulation written one iteration before. At
4 kHz that delay is 11.4° of phase, which `theta` can take out.

## Number formats

The datapath carries 16-bit signed samples (`sample_t`). The converters are
12 bits wide. On the way in, the code is moved to the top of the 16-bit word
(×16). On the way out, it is rounded to the nearest 12-bit code and
saturated. Both converters use two's complement codes. That is an assumption:
the real board's converter formats belong to its vendor interface.

| signal / setting           | format                                                      |
|----------------------------|-------------------------------------------------------------|
| generator frequency word   | 32 bits, `f = fcw * f_s / 2^32` (4 kHz: 136 579 960)        |
| demodulation phase `theta` | 32 bits, 2^32 = one full turn                               |
| sine amplitude             | ±32767 (table of 1024 points per period, quarter stored)    |
| gain                       | 16-bit signed multiplier × 2^shift, shift signed 6 bits     |
| product                    | 32 bits, full precision                                     |
| PID `kp`, `ki`, `kd`       | signed 32 bits, 20 fractional bits; `ki`, `kd` per sample   |
| PID output range           | 16-bit `out_high`, `out_low`                                |

Each gain block computes `saturate(in * mult * 2^shift)`. The mixer's gain
defaults to 2^-15, which brings the 32-bit product back to the 16-bit range.

## The low-pass filter

The error filter is a 4th-order Butterworth low-pass with a 500 Hz cut-off.
Both figures follow the original system. It strips the product of the terms at
`f_m` and `2 f_m`. It is built as two second-order sections in direct form I.
Each section is the bilinear transform of one analog Butterworth pole pair:

    K = tan(pi * fc / fs)
    1/Q_k = 2 sin((2k-1) pi / 8),   k = 1, 2
    a1 = 2 (K^2 - 1) / (1 + K/Q + K^2)
    a2 = (1 - K/Q + K^2) / (1 + K/Q + K^2)
    b0 = b2 = (1 + a1 + a2) / 4,   b1 = 2 b0

Choosing `b0` this way makes the gain at DC exactly one in fixed point. The
filter computes these coefficients itself at elaboration, in Q30 integer
arithmetic with Taylor series for sin and cos. Changing `FC_HZ`,
`LOOP_TICKS` or `CLK_HZ` therefore retunes it without any external tool.

The cut-off is only 0.4 % of the sample rate, so `b0` is about 1.5e-4.
Samples therefore pass between the sections with 16 extra fractional bits
(40-bit words). The test matches a floating-point model of the same filter to
within 4 LSB. At 4 kHz the attenuation is beyond 60 dB.

## PID, scan/lock and step

`pid_controller` computes, once per iteration:

    I  <- clamp(I + ki*e, out_low, out_high)
    u   = clamp(kp*e + I + kd*(e - e_prev), out_low, out_high)

The output range comes from the original operator interface, which has
"output high/low" settings. Clamping the integrator to the same range is this
design's own choice. It prevents wind-up: once the error changes sign, the
output leaves the limit at once.

In scan mode the controller is held. Its integrator is loaded with the
current scan value (offset + scaled scan sine). When the operator switches to
lock, the piezo therefore starts where the scan left it and does not jump.
This preload is also this design's own choice. In practice the operator
narrows the scan around the chosen line and then switches to lock.

The piezo path matches the dataflow diagram. The scaled scan sine plus
`scan_offset` goes into one input of the scan/lock switch, and the PID output
into the other. The step switch then takes either the switch output or the
switch output plus `step_size`. All additions saturate.

## Host interface

`host_regs` holds every setting as a 32-bit register on a simple synchronous
bus (`host_wr_en/addr/data`, combinational `host_rd_addr` → `host_rd_data`).
The full map is in the header of `rtl/host_regs.sv`:

* address 0 holds the control bits (mode, step switch, monitor);
* addresses 1-13 hold the settings;
* addresses 16-19 read back the live spectroscopy, error and piezo signals
  and the monitor status.

The original system presents these settings on a LabVIEW front panel over
USB. The bus and the map are this design's stand-in for that link.

`monitor_fifo` carries the three signals to the host. Each iteration it pushes
one 48-bit record `{spec, err, piezo}` into a 1024-entry buffer, which the
host drains through a valid/ready port. The loop never waits. When the buffer
is full, new records are dropped and counted. A slow host therefore loses
data but never disturbs the lock. A continuous trace, such as the 5 s trace
at 125 kHz used for a noise spectrum, requires the host to read at the sample
rate: 125.8 k records/s, or 6 Mbit/s.

Reset puts the lock in scan mode with the monitor off, a 4 kHz modulation, a
4 Hz scan and unit gains. The PID coefficients start at zero and the output
range at full scale.

## Setting it up

The gains that work depend on the optics. The end-to-end test below uses a
model in which the modulation moves the laser by ±0.2 of the line half-width.
In that model the error signal's slope at the peak is about 7 error LSB per
piezo LSB (113 per AO1 code). `kp` = 0.02 and `ki` = 0.0008 per sample then give a loop
bandwidth of roughly 100 Hz. The step response then settles in about 5 ms.
The 500 Hz error filter inside the loop adds phase lag and keeps the usable bandwidth well below its cut-off.
A P gain of 0.3 makes this model loop ring.

The order of steps:

1. In scan mode, set the scan gain and offset so the line lies within the
   sweep.
2. Adjust `theta` for the largest error signal. Its starting point is
   `theta = -f_m / f_s` of a turn, which cancels the one-iteration delay
   between AO2 and AI.
3. Narrow the scan around the line.
4. Switch to lock.

## Behaviour over the evaluated settings

Three testbenches run the design at its default parameters over the settings
the original system was characterised with. All use the same laser model.

* `tb_mod_freq_sweep` runs the modulation at 2, 4, 5, 10, 15 and 20 kHz. It
  parks the laser 4 codes either side of the line and measures the error
  slope. With `theta` set as above, the slope stays within 0.2 % of its 4 kHz
  value across the range. So the digital chain adds no frequency dependence;
  the optimum near 4-5 kHz reported for the real system comes from the
  optics and drivers. The error signal's residual ripple is about 10 % at
  2 kHz, which is only four times the filter cut-off, and below 1 % from
  4 kHz up.
* `tb_mod_amp_sweep` keeps 4 kHz and sets the modulation amplitude from
  1/16 of full scale to full scale with `MOD_GAIN`. In this testbench the
  model's coupling makes full scale equal to one half width of the line. Up
  to 1/4 of full scale the slope grows in proportion to the amplitude, within
  8 %. At full scale the slope per unit amplitude has fallen to 35 % of its
  small-signal value, because the modulation is then as wide as the line.
* `tb_p_sweep` locks the laser, applies a step of one half width, and
  measures the step response for P from 0.0155 to 0.0296 with I fixed. Every
  value settles in 5.1-5.9 ms without overshoot. At P = 0.3 the loop rings.
  In this model the response time is governed by the I term. The real
  system's fall of response time with P, down to 10 ms at the best P, is a
  property of its laser and is not reproduced.

## Files

`rtl/` holds one module per file:

* `laser_lock_pkg` (types, widths, `lock_ctrl_t`)
* `sample_timer`
* `sine_lut`, `sine_gen`, `phase_shifter`
* `gain_stage`, `adc_upconvert`, `dac_downconvert`
* `mixer`, `biquad`, `lowpass_filter`
* `pid_controller`, `piezo_select`
* `host_regs`, `monitor_fifo`
* `laser_lock_top`

Top-level parameters: `LOOP_TICKS` (318), `CLK_HZ` (40 000 000),
`FILTER_ORDER` (4, even), `FILTER_FC_HZ` (500), `MON_DEPTH` (1024).

`tb/` holds one self-checking testbench per module, plus the three sweeps
above. Each prints `TB_RESULT checks=N failures=M`. It also holds
`laser_spectroscopy_model`, a behavioural model of the converters, the laser
and a single Lorentzian absorption line.

`tb_laser_lock_top` runs the whole design at its default parameters, closed
around that model:

* it checks the 4 kHz modulation and the scan;
* it switches to lock and checks that the laser sits on the peak;
* it fires the step switch both ways and times the recovery;
* it ramps a slow drift of 30 codes into the line position and checks that
  the lock follows it within 3 codes;
* it drives the PID into its output limit, 30 codes below the lock point,
  and checks that the laser falls off the line and is caught again once the
  limit is lifted;
* it checks the monitor records;
* it stalls the host until records drop;
* it checks the audio output and the return to scan.

It needs about 4.5 million clock cycles and finishes in about 10 s.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/laser_lock_pkg.sv tb/tb_laser_lock_top.sv --top-module tb_laser_lock_top
    ./obj_dir/Vtb_laser_lock_top

## What is and is not here

The following follows the original system: the dataflow, the 12-bit
converters around a 16-bit datapath, the 4 kHz modulation, the 4th-order
500 Hz Butterworth filter, the P/I/D terms, the scan and lock modes, the step
switch, the 318-tick loop, the audio monitor of the error signal, and the
transfer of three signals to the host.

The following is this design's own choice: the NCO and its sine table, the
phase block working on the phase word, the gain format, all fixed-point
formats, the filter structure, the PID's integrator clamp and preload, the
register bus and map, and the monitor FIFO with its drop policy.

Not here:

* the converters, drivers, laser and optics (outside the FPGA);
* the host software and its display, including the host-side sample buffer;
* the PID autotune offered by the original user interface, which was never
  described.

The PID in the original user interface is set as a gain with integral and
derivative *times*, in the manner of LabVIEW's PID. This design uses plain
per-sample `kp`, `ki`, `kd` coefficients. Convert with `ki = kp*T/Ti` and
`kd = kp*Td/T` (T = 7.95 µs).
