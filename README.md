# Twin-notch IIR filter for speech recorded through a studio wall

A studio wall insulates poorly at two frequencies. At its **mass-spring resonance**
(315 Hz for the wall this design targets) the wall vibrates easily. At its
**coincidence frequency** (2500 Hz) the bending wave in the wall matches the
airborne wave, so noise passes with little loss. The usual remedy is acoustic
treatment of the wall. This design removes the two leaking components from the
recorded signal instead. It uses a small fixed-point digital filter: two
second-order IIR notch filters in series, running on 8-bit samples at 7.4 kHz.

The hardware is built so that it needs **no multipliers**. Each section
multiplies by only three constants, and each of those products comes from a
256-entry lookup table addressed by the 8-bit sample. The logic that remains is
five sample registers and one five-input adder per section.

The RTL follows the structure of the filter in M. I. A. Abdalla, *"Treatment the
Effects of Studio Wall Resonance and Coincidence Phenomena for Recording Noisy
Speech Via FPGA Digital Filter"*. That publication gives the coefficients, the
word widths and the block diagram. It does not give the number alignment, the
rounding, the overflow behaviour or the interface timing, so those are choices
made here. Each such choice is listed under "Choices and departures" below.

## 1. How a notch is placed

A second-order section has the transfer function

    H(z) = (1 + a1 z^-1 + z^-2) / (1 + b1 z^-1 + b2 z^-2)

- **Zeros.** Two zeros sit on the unit circle at angle ±θ, where
  θ = 360° · f_notch / f_s. On the circle the gain at f_notch is exactly zero.
  This gives a0 = a2 = 1 and a1 = −2 cos θ.
- **Poles.** Two poles sit at the same angles, at radius r = 0.99 just inside
  the circle. Close to the notch they cancel the zeros, so the notch is narrow
  and the gain elsewhere stays near 1. This gives b1 = −2 r cos θ and
  b2 = r² = 0.9801.

With f_s = 7400 Hz:

| section | notch | θ | a1 | b1 | b2 |
|---|---|---|---|---|---|
| 1 | 315 Hz (wall resonance) | ±15.324° | −1.92889404296875 | −1.90960693359375 | 0.980072021484375 |
| 2 | 2500 Hz (coincidence) | ±121.62° | +1.04861450195312 | +1.03811645507812 | 0.980072021484375 |

These are the quantised values. Each is an integer divided by 2^15; the
integers are in `filter_pkg.sv`:

| | section 1 | section 2 |
|---|---|---|
| a1 | −63206 | 34361 |
| b1 | −62574 | 34017 |
| b2 | 32115 | 32115 |

The design uses 1 integer bit and 15 fraction bits of magnitude. Because the
sign ends up inside the lookup tables, no hardware ever holds a coefficient as
a 17-bit two's-complement word. b2 = 32115/2^15 is 0.9801 truncated, not
rounded.

Setting a0 = a2 = 1 raises the passband gain slightly above 1 (about 1.02 in
simulation). That is harmless for audio, and it removes two of the five
multiplications.

## 2. One section: registers, three tables, one adder

Each section computes

    y[n] = x[n] + a1·x[n-1] + x[n-2] − b1·y[n-1] − b2·y[n-2]

It is built as a direct-form-I structure (`iir_section.sv`):

```
 in_sample ─►[x0]─►[x1]─►[x2]
              │     │      │
              │   LUT(a1)  │
          <<6 │     │      │ <<6
              ▼     ▼      ▼
           ┌────────────────────────┐
           │ adder5: 5 x 16 bit,    │──► out_acc (y[n], 16 bit)
           │ saturating             │
           └────────────────────────┘
                 ▲         ▲        │ round to 8 bit, clamp
             LUT(−b2)  LUT(−b1)     ▼
                 │         │     out_sample
               [y2] ◄──── [y1] ◄────┘
```

**Number formats**
- Samples are 8-bit two's-complement.
- The accumulator word is 16 bits with 6 fraction bits, so it spans ±512
  sample steps. That leaves a factor of 4 of headroom above the 8-bit input.
- x[n] and x[n-2] have a coefficient of 1. They enter the adder shifted left
  by 6 bits, with no multiplier.

**Lookup-table multiplier** (`lut_multiplier.sv`)
- The 8-bit sample is the table address.
- Entry s holds round(C·s / 2^9), saturated to 16 bits. This is the product
  C·s already aligned to the accumulator (2^9 = 2^15 / 2^6).
- The table is computed at elaboration from the coefficient parameter, so one
  module serves all three products. A section holds 3 × 256 × 16 bits of
  table.
- The read is combinational, which models a table in an external asynchronous
  ROM. In an FPGA build it can equally be a distributed or block ROM.

**Feedback path**
- The two feedback tables hold −b1 and −b2, so the adder only ever adds.
- These tables are addressed by 8-bit samples, like the input table. So y[n]
  is rounded (half-up, saturating) to an 8-bit sample before it enters the
  y[n-1] register. The same 8-bit sample is the section output.

**Adder** (`adder5.sv`)
- It sums the five terms exactly in 19 bits, then clamps the result to 16 bits.
- `overflow` goes high whenever the clamp acts.

### The cost of 8-bit feedback

This limit is the least obvious property of the design. The poles sit at radius
0.99, so the recursion amplifies anything injected into its feedback near the
notch frequency by roughly 1 / (2(1−r) sin θ). That is about 190 for the
315 Hz section.

The rounding error of the 8-bit y[n-1] and y[n-2] is injected at exactly that
point. It leaves a small residue around the notch frequency that does not
settle to zero. Measured in simulation with 30-step interfering tones:

- at 315 Hz the tone drops about 7.4× (−17 dB);
- at 2500 Hz it drops about 23× (−27 dB);
- with an isolated 100-step tone, both notches leave about 4.7–5 steps RMS
  (−23 dB).

Evaluating H(z) in floating point with the same quantised coefficients gives
−64 dB at 315 Hz and −108 dB at 2500 Hz. The sweep testbench prints the measured response:

| f | gain |
|---|---|
| 222–2442 Hz, away from the notches | +0.1 to +0.3 dB |
| 296 Hz | −1.1 dB |
| 315 Hz | −23.2 dB |
| 2500 Hz | −23.0 dB |
| 2516 Hz | −1.6 dB |

A wider feedback word would deepen the notch, but the feedback tables would
then need far more than 256 entries. If deeper rejection is needed, that is
the first thing to change.

### Overflow

The worst-case sum of the five terms is about 56,000 in 16-bit units, well
beyond ±32767. This happens only for near-full-scale input that changes sign
every two samples (energy at f_s/4), which a real recording should never hold.
The adder saturates in that case and reports `overflow`.

When the final 8-bit rounding clamps, `clip` goes high. Clipping is more
common: for example, a full-scale DC input times the ~1.01 DC gain of
section 2 clips.

## 3. Interface and timing

`notch_filter_top.sv` chains the two sections. Section 1's 8-bit output sample
is section 2's input.

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active-low; clears both delay lines |
| `in_valid` | in | 1 | a sample is offered this cycle |
| `in_sample` | in | 8 | x[n], signed |
| `out_valid` | out | 1 | one-cycle pulse, exactly 2 clocks after `in_valid` |
| `out_y` | out | 16 | y[n] of section 2, 6 fraction bits |
| `out_sample` | out | 8 | y[n] rounded to an 8-bit sample |
| `overflow` | out | 1 | an adder saturated, in either section, for this output |
| `clip` | out | 1 | an 8-bit rounding clamped, in either section, for this output |
| `y1_acc` | out | 16 | the 16-bit output of section 1 (one clock after `in_valid`) |

A section shifts all five registers on the edge where `in_valid` is high. Its
new y[n] is then combinational from those registers. The outputs stay stable
until the next accepted sample.

`in_valid` may be high on every clock, so the filter takes one sample per
clock. At the intended 7.4 kHz audio rate, any clock above 7.4 kHz will do.
The longest path per section is: one table read, the five-input add, the clamp
and the rounding. The two sections are separated by section 2's input
register.

Each `iir_section` asserts that `out_valid` follows `in_valid` by exactly one
clock.

## 4. Choices and departures

- **Sign of the feedback terms.** The time-domain equation printed with the
  original design reads `+ b1 y[n-1] + b2 y[n-2]`, while its transfer function
  has denominator `1 + b1 z^-1 + b2 z^-2`. With the given b1 and b2 the `+`
  form has a pole at z ≈ −2.33 and is unstable. This RTL follows the transfer
  function and subtracts the feedback terms.
- **Not specified in the original, chosen here:**
  - the 6 accumulator fraction bits;
  - half-up rounding of table entries and of y[n];
  - saturation in the adder and the 8-bit requantiser;
  - how the 16-bit y[n] becomes an 8-bit table address;
  - the `in_valid`/`out_valid` strobes;
  - the synchronous reset;
  - the status outputs.
- **Resource figures are not comparable.** The original FPGA build reports
  198 flip-flops per section and 377 for the cascade. This RTL has 41
  flip-flop bits per section and 84 in total. Its tables are 6 × 256 × 16 bits
  of ROM, which the original kept in an external memory. What filled the
  original's additional flip-flops is not described.
- **Not included:** the microphone, the 7.4 kHz converter and the recording
  computer. The top's `in_valid`/`in_sample` and `out_*` ports are where they
  would connect.

## 5. Files

| file | contents |
|---|---|
| `rtl/filter_pkg.sv` | widths, fixed-point formats, the six coefficient integers, `sample_t`/`acc_t` |
| `rtl/lut_multiplier.sv` | constant-coefficient multiply by 256-entry table |
| `rtl/adder5.sv` | five-input saturating adder |
| `rtl/iir_section.sv` | one notch section (registers, three tables, adder, requantiser) |
| `rtl/notch_filter_top.sv` | the 315 Hz + 2500 Hz cascade |
| `tb/tb_lut_multiplier.sv` | all 256 addresses of four tables against a floating-point product |
| `tb/tb_adder5.sv` | random and extreme operands, both saturation directions |
| `tb/tb_iir_section.sv` | both section configurations (315 Hz and 2500 Hz) bit-exact against a model; latency; saturation; notch depth |
| `tb/tb_notch_filter_top.sv` | end-to-end test of the cascade at default parameters (see below) |
| `tb/tb_frequency_response.sv` | tone sweep of the cascade over f/fs = 0.03 to 0.35, printing the gain in dB |

Each testbench holds its own reference model. The model computes each product
in floating point and rounds it, rather than reusing the RTL's table
construction. Each testbench ends by printing
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog if the
design hangs.

The end-to-end test covers:

- full-rate and gapped input;
- an f_s/4 full-scale square wave that forces adder saturation and clipping;
- a reset in mid-stream;
- pure tones at 315, 1000 and 2500 Hz;
- a noisy-speech stand-in: voice-band tones at 180, 720, 1260 and 1800 Hz plus
  interferers at 315 and 2500 Hz. It checks each component with a DFT.

It counts every one of these mechanisms and fails if one never occurred.

## 6. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/filter_pkg.sv tb/tb_notch_filter_top.sv --top-module tb_notch_filter_top
./obj_dir/Vtb_notch_filter_top
```

Substitute any other testbench name for `tb_notch_filter_top`. Every test runs
in well under a second.

## 7. Retuning

To move a notch to frequency f at sample rate f_s with pole radius r:

- θ = 2π f / f_s
- A1 = round(−2 cos θ · 2^15)
- B1 = round(−2 r cos θ · 2^15)
- B2 = round(r² · 2^15)

Pass the three integers as the `A1_S*`, `B1_S*` and `B2_S*` parameters of
`notch_filter_top`, or as `A1`, `B1`, `B2` of `iir_section`. Keep |coefficient|
< 2: the 16-bit table word and the headroom analysis above assume it.

A pole radius closer to 1 makes the notch narrower. It also raises the
feedback noise gain described in section 2.
