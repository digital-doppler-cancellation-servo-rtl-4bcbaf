# Digital Doppler-cancellation servo for fiber links

An optical fiber a few tens of metres long is enough to spoil an ultra-stable
laser: vibrations and temperature changes stretch it, and the light that comes
out carries the resulting phase noise. The classic cure is Doppler
cancellation. Part of the light is sent back through the fiber and beaten
against light that never left the lab, in a heterodyne Michelson
interferometer. An acousto-optic modulator (AOM) at the fiber input shifts
the light by f_m ≈ 110 MHz. The light passes it twice, so the beatnote
sits near 2·f_m = 220 MHz. Its phase is twice the round-trip phase of the
fiber plus twice the phase the AOM adds. A phase-locked loop (PLL) holds
that beatnote against a reference by steering the AOM drive. This keeps
the one-way phase at the far end still.

This repository holds the digital half of such a servo. It is written for a
small FPGA board with a 14-bit, 125 MS/s ADC and two 14-bit, 125 MS/s DAC
channels. Analog mixers, phase detectors and VCOs are replaced by
numerically controlled oscillators (NCOs), a digital quadrature mixer, an
FIR filter and a proportional-integral (PI) filter. All of them run at one
sample per 125 MHz clock.

## The loop

```
             demodulation NCO (20 MHz, or 30 MHz when undersampling)
                    | cos, sin (16 b)
 ADC 14 b --> [reg] --> [x] mixer --I 14 b--> FIR 25 taps --32 b--> dyn shift --14 b--> PI --32 b--+
                         |                                                                          |
                         +--Q 14 b--> FIR 25 taps --32 b--> (monitor only)                          |
                                                                                                    v
                                              centre word (55 MHz) -----------------------------> [+]
                                                                                                    | 40 b
                                                                          DAC ch 1 <-- DDS <--------+
                                                                  reference word --> DDS --> DAC ch 2
```

1. **Input.** The RF front end brings the 220 MHz beatnote to the ADC in
   one of two ways. An analog mixer with a 200 MHz reference can bring it
   down to 20 MHz. Or the ADC can sample it directly, with its
   anti-aliasing filter bypassed (see *Undersampling* below).
2. **Mixer.** The complex mixer multiplies each sample by cos and sin of
   the demodulation NCO. This NCO is the loop's phase reference.
3. **FIR and phase detector.** The FIR removes the sum-frequency term
   (40 MHz or 60 MHz). What is left is the baseband vector
   (A/2)·e^{jψ}, where ψ is the beatnote phase relative to the NCO. The
   phase detector simply takes the real part, I ∝ cos ψ. The loop drives I
   to zero, so it settles at ψ = ±90°. Near that point I is proportional
   to the phase offset. Which of the two quadrature points is stable
   depends on the sign of the gains, and the loop finds it by itself. A
   CORDIC arctangent would widen the linear range but gains nothing on a
   short link, so none is built. The Q path is filtered only so that it
   can be watched.
4. **Dynamic shifter.** It picks 14 consecutive bits out of the 32-bit FIR
   word, or, for a very weak signal, shifts the word up and fills zeros in
   at the bottom.
5. **PI filter and bias adder.** The PI filter turns the error into a
   frequency correction. That correction is added to the centre tuning
   word of the channel-1 DDS, 55 MHz. That is below the DAC's 62.5 MHz
   Nyquist limit, and twice it is the AOM's 110 MHz.
6. **Output.** Off chip, the 55 MHz output is frequency-doubled to 110 MHz
   and drives the AOM. A phase step δ at the DDS therefore becomes 2δ at
   the AOM and 4δ on the beatnote (doubler, then double pass). This factor
   of 4 is part of the loop gain.

Channel 2 is an independent DDS, typically at 20 MHz or 55 MHz. Comparing
it with the optical measurements shows how much noise the digital
electronics themselves add.

## Numbers and scaling

The hardest part to get right is the fixed-point scaling, because it sets
the loop gain. Every stage keeps a known scale.

| stage | output | scale |
|---|---|---|
| ADC | signed 14 b | a beatnote of amplitude A codes |
| NCO | signed 16 b | ±32767 (the table never holds −32768) |
| mixer | signed 14 b | floor(x·lo / 2^15); baseband I = (A/2)·cos ψ, no overflow possible |
| FIR | signed 32 b | default taps sum to 32766, so DC gain ≈ 2^15; output saturates at ±2^31 |
| dyn shift | signed 14 b | FIR word · 2^−n, n = −13…18 |
| PI | signed 32 b | u = kp·e + (I >> 8),  I += ki·e |
| bias adder | 40 b | centre word + u·2^8 (one u LSB = 29 mHz) |
| NCO/DDS | 40 b phase | f = ftw·125 MHz / 2^40 (0.11 mHz steps) |

The error gain near lock is K_d ≈ (A/2)·2^15 / 2^n error LSBs per radian.
For A = 6000 and n = 14 this is about 6000 LSB/rad.

The crossover of the proportional loop, in radians per sample, is:

ω_c ≈ 4 · 2π · kp · 2^8 · K_d / 2^40

In hertz this is f_c ≈ 4 · kp · 2^8 · K_d · 125 MHz / 2^40, about 0.7 kHz
per unit of kp. So kp = 28 gives about 20 kHz, kp = 56 about 39 kHz and
kp = 100 about 70 kHz. Lock bandwidths of 40–70 kHz are typical for such a
link. The loop delay caps the bandwidth at roughly 100 kHz, and most of that
delay is outside the FPGA: about 1 µs comes from the analog chain and the
AOM, and 176 ns from this RTL. At 70 kHz, 1.18 µs of delay costs about
30° of phase, which leaves a margin of about 60°. The lock tests use the
conservative kp = 28; `tb_servo_bandwidth` measures the loop at kp = 56
and 100.

An integral gain of ki = 1 puts the PI zero near 3 kHz. It removes the
steady phase offset that a constant Doppler shift would otherwise leave.

### Choosing n

The shifter keeps bits [n+13 : n] of the FIR word. A larger n keeps a large
open-loop beat signal inside 14 bits, which is useful when you only want to
watch it. A smaller n gives full resolution to the tiny error left once the
loop is locked. The selection is a plain bit slice: if the discarded high
bits are not all copies of the sign, the value wraps. The shifter then
raises an overflow flag, which is kept sticky in the status register. With
A = 6000, n = 12 overflows in open loop and n = 14 does not. n can be
changed while the loop runs, but the loop gain changes by a factor of 2 for
each step.

n is signed. A negative n adds −n zero bits below the FIR word's LSB, so
the output is {in[13+n : 0], −n zeros}. That is only useful when the FIR
word is smaller than 14 bits, for example with a very weak beatnote or
scaled-down taps. Values above 18 act as 18, and values below −13 act as
−13, since adding more bits would leave only zeros. The overflow flag works
the same way in both directions.

### FIR taps

The taps can be rewritten at run time. They reset to a 25-tap
Hamming-windowed sinc:

h[k] = round(32768 · w[k]·s[k] / Σ w·s)
s[k] = sinc(2·4.5/125·(k−12))
w[k] = 0.54 − 0.46·cos(2πk/24)

This filter is 3 dB down at 4.0 MHz and at least 46 dB down from 14 MHz up
to Nyquist. The 4 MHz cutoff and the 40 dB target come from the original
servo; the tap values are this design's own. The filter is in transposed
form. An input sample affects the output two clocks later, and the taps
are symmetric, so the peak of the impulse response comes 14 clocks
(112 ns) after the input. The published filter was quoted at 136 ns at
most.

## Undersampling

Clocked at 125 MHz, the ADC sees a 220 MHz tone in its second Nyquist zone.
The tone aliases to 2·125 − 220 = 30 MHz, with its phase inverted. To use
this, the analog anti-aliasing filter in front of the ADC is bypassed and
the demodulation NCO is set to 30 MHz. Nothing else in the RTL changes: the
phase inversion only moves the loop to the other quadrature point. This
removes the analog mixer and its synthesiser from the loop. It assumes the
beatnote frequency is known and pure.

## Register map

The processor uses a simple synchronous port:

- `wr_en` with `wr_addr`/`wr_data` writes on the clock edge.
- `rd_addr` is sampled every clock, and `rd_data` follows one clock later.
- Unmapped addresses read as 0.

40-bit words are written low half first. Writing the high half updates all
40 bits in one clock.

| addr | name | content | reset |
|---|---|---|---|
| 0x00 | CTRL | bit 0: loop enable (0 clears the integrator and the correction) | 0 |
| 0x01/0x02 | DEMOD_LO/HI | demodulation NCO word | 20 MHz (175921860444) |
| 0x03/0x04 | BIAS_LO/HI | channel-1 centre word | 55 MHz (483785116221) |
| 0x05/0x06 | CH2_LO/HI | channel-2 DDS word | 20 MHz |
| 0x07 | SHIFT | signed n, −13…18 (values outside act as the nearer limit) | 12 |
| 0x08 | KP | signed 16-bit proportional gain | 0 |
| 0x09 | KI | signed 16-bit integral gain | 0 |
| 0x0A | STATUS | sticky: bit 0 shifter overflow, bit 1 PI clamp, bit 2 FIR clip; any write clears | 0 |
| 0x20–0x38 | COEF0–24 | FIR taps, signed 16 bit, shared by the I and Q filters | Hamming sinc |

Tuning words are round(f / 125 MHz · 2^40). For example, 30 MHz is
263882790666.

## Timing

Every block accepts a sample on every clock; there is no valid or ready
handshake. Here are the register stages from ADC pin to DAC word:

| stage | clocks |
|---|---|
| ADC input register | 1 |
| mixer | 1 |
| FIR | 2, plus a group delay of 12 samples |
| shifter | 1 |
| PI | 2 |
| bias adder | 1 |
| NCO table | 1 |
| DAC register | 1 |

The total is 22 clocks, or 176 ns.

All registers that hold state use an asynchronous active-low reset. The NCO
output registers and the mixer have no reset; they are valid one clock
after reset is released.

## Files

| file | what it is |
|---|---|
| `rtl/servo_pkg.sv` | widths, types, default tuning words and taps, register addresses |
| `rtl/nco.sv` | 40-bit accumulator and 4096 × 16-bit sine table, giving sin and cos |
| `rtl/iq_mixer.sv` | complex mixer |
| `rtl/fir_filter.sv` | 25-tap FIR with writable taps |
| `rtl/dyn_shift.sv` | 32 → 14-bit shifter with overflow flag |
| `rtl/pi_loop_filter.sv` | PI filter with anti-windup clamp and enable |
| `rtl/ftw_adder.sv` | centre word + scaled correction |
| `rtl/dds.sv` | NCO plus rounding to the 14-bit DAC word |
| `rtl/servo_regs.sv` | register file |
| `rtl/doppler_servo_top.sv` | the whole servo |

The top's ports are plain signals: ADC in, two DAC outputs, the register
port, and monitoring outputs. The monitors are filtered I and Q, the error,
the corrected channel-1 word and the channel-1 phase.

The ADC and DAC chip interfaces, the processor bus bridge and the clocking
are board-specific and are not included. The top expects signed samples
that are already in the 125 MHz clock domain.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. To run one with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/servo_pkg.sv tb/tb_doppler_servo_top.sv --top-module tb_doppler_servo_top
./obj_dir/Vtb_doppler_servo_top
```

Replace the testbench name to run another one. Each testbench compares its
block with a model written from the definitions above: the sine table, the
floor-divided mixer products, a direct convolution, the bit slice, the PI
equations, and so on. Where a timing is claimed, the testbench checks it
too: the FIR latency, the NCO and DDS output frequencies counted over
1 ms, and the one-clock register read-back.

The three system tests close the loop through `tb/link_plant.sv`, a
behavioural model of everything outside the FPGA:

- It multiplies the channel-1 DDS phase deviation by 4.
- It delays it by 1 µs (125 clocks).
- It adds a fiber Doppler shift and a sinusoidal vibration.
- It produces the ADC samples of the resulting beatnote.

A `cut_i` input breaks the actuator path, to show integrator wind-up. Two
run-time inputs add a further phase tone of chosen amplitude and frequency,
for measuring the loop gain.

- **`tb_doppler_servo_top`** tests the 20 MHz configuration at full size.
  The beatnote has a 5 kHz Doppler shift and a 1 rad / 500 Hz vibration.
  The test checks:
  - overflow at n = 12 and none at n = 14;
  - locking with the link phase held to under 1 mrad peak-to-peak, against
    about 22 rad in open loop;
  - a DDS correction equal to −¼ of the mean disturbance frequency, to
    better than 2 %;
  - that the loop stays locked when n is lowered from 14 to 13 for finer
    error resolution, and when the taps are halved on the fly;
  - that the correction returns to zero when the loop is opened;
  - with a single unit tap and n = −1, that the error is twice the
    filtered I, so one LSB is added;
  - that the PI clamp engages when the actuator path is cut.

  It also counts that each of these mechanisms actually happened.
- **`tb_servo_undersampling`** feeds a 220 MHz beatnote sampled at 125 MS/s.
  The processor retunes the demodulation NCO to 30 MHz, and the test checks
  lock and Doppler cancellation in the same way.
- **`tb_servo_bandwidth`** measures the open-loop gain L(f) of the locked
  servo. It adds a 0.05 rad phase tone, steps it from 10 kHz to 200 kHz,
  and compares the correction the DDS applied with the phase that remained.
  For the 20 MHz configuration at kp = 56 it finds a crossover of 39.1 kHz
  with 73° of phase margin. For the undersampled configuration at kp = 100
  it finds 69.8 kHz with 60°. In both, the phase of L gives a total loop
  delay of 1.17 µs: the model's 1 µs plus the RTL latency. The test checks
  the crossover against the formula above to within 25 %. It also checks
  that the phase margin exceeds 45° and that the delay lies between 1.0 and
  1.3 µs.

All three run in well under a second.

## How far to trust it, and where it departs from the original servo

The following follow the servo as published:

- the signal chain and its order;
- the 14-bit converters at 125 MS/s;
- a 40-bit accumulator with a 4096-entry, 16-bit sine table;
- a 14-bit mixer output;
- 25 FIR taps of 16 bits, with a 32-bit output, a 4 MHz cutoff and
  40 dB of rejection above 14 MHz;
- the shifter's choice of 14 bits out of 32, with 0 to 18 LSBs removed, or
  LSBs added;
- a PI loop filter;
- a 55 MHz centre frequency for the channel-1 DDS;
- a second, free DDS on channel 2;
- demodulation at 20 MHz, or at 30 MHz when undersampling.

The following are this design's own choices, because the original
description does not give them:

- the tap values;
- the mixer's truncating shift;
- the transposed FIR structure and its output saturation;
- the PI gain widths, the 8 fractional integrator bits, the clamps and the
  enable behaviour;
- the 2^8 scaling of the correction;
- the rounding from 16 to 14 bits at the DAC;
- the register port, register map and reset values;
- the signed encoding of n and the limit of 13 added LSBs;
- the overflow and clamp status flags;
- using I rather than Q as the "real part";
- filtering Q for monitoring.

Departures and open points:

- The original text mentions both a "12-bit DAC resolution", to match the
  4096-entry table, and 14-bit DACs. The table has 4096 entries and the
  DAC word is 14 bits.
- No CORDIC phase detector is included. For much longer links, where the
  phase offset can leave the linear range, the real-part detector would
  need replacing.
- Only the mathematical behaviour is verified. Phase noise, clock jitter,
  spurs from phase truncation in the NCO and the converters' analog
  behaviour are not modelled.
