# Real-time RF cavity simulator: FPGA model firmware

Testing an LLRF (low-level RF) control system on a real superconducting
cavity is risky, because a controller bug can damage expensive hardware.
This firmware stands in for the cavity. It receives the RF drive that the
LLRF system sends to its klystron, after down-conversion to an IF. It then
computes, sample by sample, what the high-power amplifier, the circulator
and waveguide, and the cavity would do with that drive. It returns the
resulting signals through vector-modulator DACs: amplifier forward and
reflected, cavity forward and reflected, and the cavity probe. The LLRF
loop is closed through a simulation instead of a cavity.

The design targets the 704.42 MHz elliptical cavities of a proton linac. It
runs at a 117.4 MHz sample clock with an IF of 25.16 MHz (LO 729.58 MHz).
The model includes:

- Lorentz-force detuning.
- Piezo tuner drive and a simulated piezo sensor.
- Microphonics.
- Beam loading.
- Amplifier compression.
- Power-supply ripple.
- Neighbouring passband (pi-) modes.

A fixed delay constrains the model. The cables of a real installation delay
the signal by about 400 ns. The analog front ends and data converters of
the simulator already use about 250 ns of that. The digital model must
answer in fewer than 18 clocks. This implementation takes 16.

## Signal flow

```
 adc_drive ─ noniq_demod ─┐                       ┌─ vm_buffer x7 ─ dac_vm_i/q[0..6]
 adc_ref   ─ noniq_demod ─┼─ input mux ─ amp_cav_model ─┤
                          │   ^ pid_ctrl (probe)  └─ daq (7 channels, host read-back)
 sync_in ─ sync_gen ─ trig (beam, PSU ripple, AWG, DAQ) ─ sync_out
 host bus ─ cs_regs ─ parameters + table writes
```

Inside `amp_cav_model`, the signal passes through these stages in order:

1. **Amplifier.** `amplifier_model` adds compression and PSU ripple, then a
   low-pass filter. `modulator_gen` plays the ripple waveform.
2. **Circulator.** `circulator` is a 2x2 complex scattering matrix.
3. **Beam.** `beam_current` adds the beam to the cavity's forward wave.
4. **Cavity.** `cavity_model` holds one filter per mode, and the probe is
   their sum.

The cavity's reflected wave is the probe minus the cavity drive. It goes
back into the circulator. `detuning_calc` turns three inputs into the
detuning angle that rotates every cavity filter:

- the probe amplitude, for Lorentz force;
- the two piezo ADCs;
- the microphonics generator.

## The cavity filter

A cavity mode near resonance is a first-order low-pass in complex
baseband: Z(s) = R_L / (1 + s·2Q_L/ω0). The bilinear transform gives

    Z(z) = R_L (1 + z^-1) / ((K+1) + (1-K) z^-1),   K = 4 Q_L / (ω0 T)

This is a single-pole IIR with y[n] = b(x[n] + x[n-1]) + a·y[n-1],
a = (K-1)/(K+1) and b = R_L/(K+1). `tunable_iir` implements it in
transposed direct form II, so only one complex state register is needed.

Detuning by Δω shifts the pole to a·e^{jΔωT}. The filter realises this by
rotating the state register by the angle ΔωT every sample:

- s_i' = cos·s_i − sin·s_q
- s_q' = sin·s_i + cos·s_q

The rotation is applied before the state is used again. The coefficients a
and b therefore stay fixed as the detuning changes, and the detuning can
move every clock.

Each pi-mode is one more such filter with its own a, b and a fixed
frequency offset added to the common detuning. The probe is the saturated
sum of the filter outputs.

At the default Q_L = 7·10^5, K = 74272, so a = 1 − 2.7·10^-5. Two choices
keep the filter stable and accurate that close to the unit circle:

- The coefficient is a 32-bit Q2.30 value.
- The state carries 41 fraction bits, 24 bits more than the 18-bit samples.

The testbench for this block compares the steady state with the exact
transfer function, both on and off resonance.

### Why the rotation needs a fast sine and cosine

The detuning angle is a new 32-bit value every clock. It must be turned into
cos and sin within the latency budget. A table of 2^32 entries is
impossible. A CORDIC would need about 32 stages.

`sincos_taylor` instead does two things:

- It looks up cos and sin of the top 8 bits of the phase in a 256-entry
  table. The table is computed at elaboration with `$cos` and `$sin`.
- It corrects for the remaining 24 bits, an angle d < 2π/256, with the
  Taylor series: sin d ≈ d − d³/6 and cos d ≈ 1 − d²/2 + d⁴/24.

The two results are combined with the angle-sum formulas. This takes 5
pipeline stages. The worst-case error is a few LSB of a Q2.30 result. The
sin/cos path runs in parallel with the data path and does not add to the
loop latency.

## Demodulation of the IF

The IF is 3/14 of the sample clock: 25.16 MHz = 117.4 MHz · 3/14. Fourteen
consecutive samples therefore span exactly three IF periods. `noniq_demod`
works as follows:

1. It multiplies each ADC sample by cos and −sin of 2π·3k/14. These values
   come from a 14-entry table.
2. It sums the last 14 products with a running sum: add the newest product,
   subtract the one 14 samples old.
3. It scales the sum by 2/14.

This is a moving-average non-IQ demodulator. It rejects the 2·IF image and
all harmonics that are not multiples of 14. Its latency is 3 clocks.

## Amplifier, circulator, beam

**Amplifier.** `mag_estimator` approximates |x| as 15/16·max + 15/32·min of
|I| and |Q|. The error is within ±7 %. The top 10 bits of the magnitude
address a gain table and a phase table of 1024 entries each. These produce
the AM/AM and AM/PM curves; the host loads any curve.

PSU ripple is a waveform r played from its own table:

- the gain becomes g·(1 + k_A·r), with k_A = 5/4 by default;
- the phase is shifted by k_P·r.

The k_A default comes from klystron perveance: output power scales with
V^(5/2), so amplitude scales with V^(5/4). The signal is then low-pass
filtered to model the amplifier bandwidth. By default the filter is about
a 1.7 MHz pole with unity DC gain. Finally `iq_rotator` rotates the signal by
the table phase plus the ripple phase.

**Circulator.** `circulator` computes two outputs from a 2x2 complex
matrix:

- cav_fwd = s21·amp_fwd + s22·cav_refl
- amp_refl = s11·amp_fwd + s12·cav_refl

Directivity, insertion loss and waveguide phase are all in the matrix. It
resets to an ideal circulator: s21 = 1 and all other terms 0.

**Beam.** `beam_current` is a pulse started by the trigger. It is the RF
reference rotated by the beam phase and scaled by a 1024-entry profile
table, with a programmable hold of div+1 clocks per entry. The beam is added
to the cavity's forward wave, so it loads the cavity like a current source.

## Detuning

    detune = mech( k_lfd·|probe|² + k_pz·(piezo1 + piezo2) + k_mic·mic ) + det_const
    mode m angle = detune + mode_offset[m]

`mech_iir` is a real biquad that stands in for the cavity's mechanical
response. It runs on a strobe every mech_dec+1 clocks, so that
low-frequency mechanical modes get usable coefficients. Its output, before
det_const is added, drives the simulated piezo-sensor DAC. `microphonics_gen`
plays a 1024-entry table at a rate set by a 32-bit phase step.

Every detuning quantity is a 32-bit phase word per sample. One LSB is
117.4 MHz / 2^32 = 0.027 Hz, and the range is ±58.7 MHz.

## Latency budget

| stage | clocks |
|---|---|
| IF demodulator | 3 |
| amplifier: magnitude, table, gain and ripple, low-pass, rotation | 9 |
| circulator | 1 |
| cavity: angle register, filter, mode sum | 2 |
| vector-modulator DAC register | 1 |
| **ADC sample to probe DAC code** | **16** (136 ns, budget 18) |

The sin/cos pipelines of the amplifier phase and the detuning run beside
the data, which is delayed to match.

The loop from cavity reflected back through the circulator contains one
register. That register is what keeps the circulator–cavity loop
synthesizable. The cavity reflected wave is probe − drive, with the drive
delayed by the cavity's 2 clocks.

## Number formats

- IQ samples: signed 18-bit Q1.17, where ±1.0 is full scale. This matches
  the width of a DSP multiplier port.
- Filter and matrix coefficients:
  - Q2.30, 32 bits, for filter coefficients.
  - Q2.16, 18 bits, for gains, circulator entries and k_A / k_P.
- Phase and detuning: 32 bits per turn.
- DAC codes: the top 16 bits of a sample plus a per-channel signed offset
  for carrier-leak trimming, saturated.

## Host interface and register map

The top has a simple synchronous bus: `host_wr`, `host_rd`, 16-bit
`host_addr`, 32-bit data, and read data one clock later. An embedded
processor or bridge is expected to drive it.

`host_addr[15:12]` selects the region. Table entries are at
`host_addr[9:0]`.

| region | content |
|---|---|
| 0 | registers (`host_addr[6:0]`) |
| 1 | amplifier gain table, Q2.16 |
| 2 | amplifier phase table, turn/2^16 |
| 3 | PSU ripple waveform, Q1.17 |
| 4 | beam profile, Q1.17 |
| 5 | microphonics waveform, Q1.17 |
| 6 | AWG: I in [31:16], Q in [15:0] |
| 7 | DAQ read-back of the channel selected by `DAQ_CH`: I in [31:16], Q in [15:0] |

Registers, by index. The exact bit fields are in `rtl/cs_pkg.sv`.

| idx | name | meaning |
|---|---|---|
| 0 | CTRL | bits below |
| 1 | SYNC_PER | local trigger period in clocks, 0 = off (default 1,000,000) |
| 2, 3 | AMP_A, AMP_B | amplifier low-pass a, b |
| 4, 5 | MOD_KA, MOD_KP | ripple to gain and ripple to phase |
| 6, 7 | MOD_DIV, MOD_LEN | ripple playback: clocks per entry − 1, last entry |
| 8–11 | S11, S12, S21, S22 | circulator matrix, I/Q in Q2.14 |
| 12–14 | BEAM_PH, BEAM_DIV, BEAM_LEN | beam phase, hold, last entry |
| 15–18 | K_LFD, K_PZ, K_MIC, DET_CONST | detuning terms |
| 19–24 | MECH_B0..A2, MECH_DEC | mechanical biquad and its rate |
| 25 | MIC_STEP | microphonics phase step |
| 26–29 | PID_SP, PID_KP, PID_KI, PID_KD | internal controller; gains in Q4.14 |
| 30, 31 | AWG_DIV, AWG_LEN | AWG playback |
| 32 | DAQ_DIV | DAQ decimation |
| 33–39 | VM_OFF[0..6] | DAC offsets |
| 40–47 | MODE_A[m] | cavity a per mode |
| 48–55 | MODE_B[m] | cavity b per mode |
| 56–63 | MODE_OFF[m] | cavity mode offset per mode |
| 64 | STATUS | read-only, bits below |
| 65 | DAQ_CH | DAQ read-back channel |

CTRL bits:

| bit | meaning |
|---|---|
| [0] | model input from the PID instead of the RF drive |
| [1] | AUX output from the PID instead of the AWG |
| [2] | trigger from Sync In instead of the local counter |
| [3] | AWG loops |
| [4] | arm DAQ |

STATUS bits:

| bit | meaning |
|---|---|
| [0] | DAQ done |
| [1] | DAQ busy |
| [2] | beam on |
| [3] | AWG running |

Reset gives a working cavity:

- mode 0 at Q_L = 7·10^5 with unity gain at resonance (a = 0x3fff8f0e,
  b = 0x3879);
- the other modes at zero gain;
- ideal circulator and unity mechanical filter;
- k_A = 1.25.

The amplifier tables, however, start at zero. The host must load the gain
table (for example 0x10000 everywhere for a linear amplifier) before any
RF comes out.

To program a mode with loaded Q_L, shunt impedance scale R and offset f_m:

- K = 4·Q_L·117.4e6 / (2π·704.42e6)
- MODE_A = round((K−1)/(K+1)·2^30)
- MODE_B = round(R/(K+1)·2^30)
- MODE_OFF = round(f_m/117.4e6·2^32)

Vector-modulator channel order:

| channel | signal |
|---|---|
| 0 | AUX (AWG or PID) |
| 1 | amplifier input |
| 2 | amplifier reflected |
| 3 | amplifier forward |
| 4 | cavity forward |
| 5 | cavity reflected |
| 6 | cavity probe |

The DAQ records the same seven channels: 1024 samples each, starting at
the first trigger after arming.

## Stand-alone operation

With CTRL[0] set, `pid_ctrl` closes the loop inside the FPGA. It is a
complex PI(D) on the probe, with setpoint and gains from registers and a
clamped integrator. The simulator then runs without an external LLRF
system.

The AWG on channel 0 can drive the RF input of another channel or of the
simulator itself for filling and decay tests. It plays 1024 IQ entries,
one-shot or looping, started by the trigger.

## Departures from the original system, and what is left out

- Widths, Q formats, table depths, register map, host bus and the PID
  structure are this design's own. The original firmware does not publish
  them.
- The DAQ buffer is on-chip: 7 × 1024 samples. The original system records
  into external DDR4 through a memory controller. That path, the soft
  processor, the Ethernet/USB/Flash interfaces and the data-converter
  interface firmware (SPI, serialisation) are outside this RTL. Their place
  is the host bus and the plain ADC/DAC sample ports.
- The amplifier low-pass is one complex pole, and the mechanical model is
  one biquad. The original only calls them an IIR filter. Several
  mechanical modes need several biquads, which this design does not
  provide.
- The magnitude estimator's α = 15/16 and β = 15/32 are a standard choice
  and are not taken from the original.
- The circulator–cavity loop contains one register, as described above.
- The analog front ends are out of scope: down-conversion, LO and clock
  synthesis, reference PLL/DDS, the piezo high-voltage stage and the
  vector modulators. So are the data converters themselves.

## Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`.
Each compares the module with values computed independently in the
testbench: exact transfer functions, floating-point sin/cos, and expected
table playback. Each prints `TB_RESULT checks=N failures=M`, and each has a
watchdog.

Latencies are checked:

- sin/cos: 5 clocks.
- demodulator: 3.
- amplifier: 9.
- cavity: 2.
- model: 12.
- ADC to DAC: 16.

`tb_cavity_simulator_top` runs the top at its default parameters through
the host bus. It loads the tables, drives IF tones into the ADCs, and then
exercises and counts each mechanism:

- latency below 18 clocks;
- filling to the drive level;
- half-bandwidth detuning (probe / √2);
- Lorentz-force compensation of that detuning;
- piezo and microphonics on the sensor DAC;
- beam loading;
- PSU ripple (+12.5 % for +10 % ripple);
- compression;
- a second mode;
- PID closed loop;
- external sync;
- AWG;
- DAQ capture and read-back.

To keep the run short, it lowers the loaded Q to about 1900 through the
mode registers. The whole test runs in about 15 s.

Simulate with Verilator 5, from the repository root:

    verilator --binary --timing -y rtl -y tb rtl/cs_pkg.sv tb/tb_cavity_simulator_top.sv \
              --top tb_cavity_simulator_top -o sim && obj_dir/sim

Replace the testbench name to run any other test. The package must come
first on the command line. All state that is read is reset, so the design
also simulates correctly in a two-state simulator. Nothing reads files;
all tables are either loaded over the host bus or computed during
elaboration.
