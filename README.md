# A 24-bit IIR feedback controller for force-microscope cantilevers

A force-microscope cantilever is a mechanical resonator with a very high
quality factor (Q around 10,000 at about 8 kHz in the example below). Left
alone it rings for seconds, so it is run under feedback. An interferometer
measures the tip position, and a controller computes the force to apply from
the recent history of that position. A small coil then applies the force. The
optimal controller for such a resonator is a low-order linear filter, in this
case of third order once phase-lead compensation is added. In discrete time
it becomes a ratio of two cubic polynomials in z⁻¹.

This RTL is that controller as FPGA logic, as it sits between a dual 12-bit
ADC and a 14-bit DAC running from a 64 MHz clock. A host computer loads the
control law into registers as integer coefficients. It can change the law,
the input selection and the sampling rate while the loop runs.

```
           +--------+    +-------+    +---------+    +---------+    +---------+
 RX  --+-->|        |    |       |    |         |    |         |    |  DAC    |
 (12b)     |  MUX + |--->|  ÷ N  |--->| biquad0 |--->| biquad1 |--->| limiter |--> TX (14b)
 Ref --+-->| adder  |    |       |    |         |    |         |    |  + ZOH  |
 (12b)     +--------+    +-------+  | +---------+    +---------+  | +---------+
              ^ mux_sel     ^ N     |      ^ coeffs     ^ coeffs  |
              |             |       v tap_sum                     v tap_filter
           +--------------------------------------------------+
           |       control_regs  (host strobe/addr/data)      |
           +--------------------------------------------------+
```

The order of the stages, the two acquisition points and all the word lengths
follow the published controller. These are: 12-bit inputs, 14-bit output,
24-bit signals and coefficients, and intermediate sums up to 50 bits. Where
the published description is silent, this design makes its own choices,
noted below and in each file's header. Those gaps are the bit placement, the
register map, the way a0 is used, the decimator circuit and the rounding.

## The stages

**Input multiplexer and adder (`input_mux`).** Each of the two inputs, RX
(cantilever position) and Ref (a calibration reference), has its own switch
into one adder. The four settings are therefore *none*, *RX*, *Ref* and
*RX + Ref*, all of which calibration procedures use. Bit 0 of the setting
closes the RX switch and bit 1 the Ref switch. The stage also widens each
ADC code to the 24-bit word (next section) and registers the sum every clock.

**Rate divider (`decimator`).** The filters do not run at 64 MHz. A
coefficient word of fixed length places the poles less precisely as the
sampling rate grows relative to the resonance. For an 8 kHz cantilever,
dividing by N = 128 (a 500 kHz filter rate) works well with 24-bit
coefficients, and 128 is the reset value. The divider is a down-counter. Every
N clocks it takes the current sample and raises a one-clock strobe that
drives the rest of the path. It does no averaging: the input is simply
sampled. N = 0 or 1 runs the filters at the full 64 MHz.

**Second-order sections (`biquad`).** Each section evaluates

```
a0·y(n) = b0·x(n) + b1·x(n-1) + b2·x(n-2) − a1·y(n-1) − a2·y(n-2)
```

in direct form I, with two previous inputs and two previous outputs as state.
All five 24×24 products are formed in parallel and summed in a 50-bit
accumulator. The result is registered one clock after the input strobe, so a
section can accept a new sample on every clock. `cantilever_controller`
chains `NUM_SECTIONS` of them (default 2). Two are enough for the third-order
optimal controller. Adding sections raises the order, which the published
design names as its way to extend.

**DAC limiter (`dac_limiter`).** The 24-bit result is scaled to the 14-bit DAC
word and clamped to the DAC range, never wrapped. A converter that wraps
would turn a large positive force command into a large negative one, which
destabilises the loop. The code is held between samples, which is the
zero-order hold in front of the DAC.

**Register file (`control_regs`).** This holds the multiplexer setting, N, and
six coefficients per section. It is written through a strobe, a 7-bit address
and a 32-bit word, which is what the USB interface of the board delivers.

## Number formats (the part to get right)

All signals are two's complement.

| point | width | meaning of one LSB |
|---|---|---|
| ADC code | 12 | 1 V / 2048 (the ADC spans ±1 V) |
| signal word (mux out, taps, filter state) | 24 | ADC LSB / 256 |
| coefficient | 24 | 2⁻²² (so ±2 is the coefficient range) |
| accumulator | 50 | product of the two above |
| DAC code | 14 | 1 V / 8192 (the DAC spans ±1 V) |

*Input placement.* An ADC code is sign-extended and shifted left by 8
(`IN_SHIFT`). This leaves 8 fraction bits below the ADC's LSB, so the
filter's rounding noise stays far below the converter's. It also leaves 4
bits of headroom above the ADC range for the internal gain of a resonant
section. The published design found a 16-bit path too narrow, with a linear
range of only about 0.1–0.5 V. At 24 bits both margins are wide.

*Output placement.* The filter word is shifted right by 6 (`OUT_SHIFT`) and
clamped to [−8192, 8191]. One ADC step is 4 DAC steps for the same voltage,
so with these shifts a filter of gain 1 puts out the input voltage. The
published limit is written y_out = max(min(y, C_da), 0) for an offset-binary
DAC. This is the same clamp: inverting the MSB of `dac_tx` gives the
offset-binary code with C_da = 16383.

*Coefficient convention.* The sections divide by a0, and a0 must be ±2²². The
hardware reads only the sign of a0: the sum is shifted right by 22 (floor),
then negated when a0 is negative. The published coefficient sets use
a0 = −4194304 = −2²². To load a section whose normalised form (a0 = 1) is
b′₀..b′₂, a′₁, a′₂, write:

```
a0 = −2^22,  a1 = round(−a′1·2^22),  a2 = round(−a′2·2^22),
bk = round(−b′k·2^22)
```

With a0 = +2²² all signs are reversed. The negative form flips the sign of
each section, so a cascade of two sections keeps the sign of the control law.
Split the overall gain between the sections so that neither b ever needs
more than 24 bits.

*Overflow.* The 50-bit accumulator wraps, as fixed-width hardware does. Five
full-scale 48-bit products can exceed it, but no stable section with
realistic signals gets near that. The 24-bit section output saturates.

### Worked example: the published 8 kHz controller

The published control law for an 8 kHz cantilever at 500 kHz is

```
b = 7.026189e-5, 1.027999e-4, −5.927540e-5, −9.181339e-5
a = 1, −2.848528, 2.708790, −0.8588522
```

It factors into a resonant pair of poles and one real pole. As integers:

| | b0 | b1 | b2 | a0 | a1 | a2 |
|---|---|---|---|---|---|---|
| section 0 | 35158 | 2293 | −32865 | −4194304 | 8339278 | −4187298 |
| section 1 | 35158 | **+49146** | 0 | −4194304 | 3608314 | 0 |

The published integer table prints section 1's b1 as −49146. With that sign
the cascade does not reproduce the published cubic: its b1 becomes −9.4e-5
instead of +1.03e-4, and the gain at 8 kHz drops to 0.24. With +49146 the
cascade matches the cubic to 0.1% across 7.7–8.3 kHz, and its 8 kHz gain of
1.397 matches the published "about 1.4". The testbenches use +49146.

Simulated with a 0.1 V sine on RX at 500 kHz, the design gives the
following. "Measured" is tap_filter over tap_sum after settling, over 5000
samples:

| f (Hz) | gain, measured | gain, from the cubic | phase, measured (°) |
|---|---|---|---|
| 7700 | 0.3034 | 0.3035 | 9.59 |
| 7800 | 0.4417 | 0.4417 | 3.75 |
| 7900 | 0.7735 | 0.7735 | −11.45 |
| 8000 | 1.3967 | 1.3969 | −67.68 |
| 8100 | 0.7738 | 0.7738 | −124.20 |
| 8200 | 0.4400 | 0.4400 | −139.49 |
| 8300 | 0.3012 | 0.3012 | −145.41 |

The published description states a lag of about 80° at resonance for this
controller. The digital law alone gives 68°. The rest comes from the analog
parts and the sampling delay, which this RTL does not contain.

## Closing the loop: damping a cantilever

`cantilever_loop_tb` closes the loop around a behavioural model of a
single-mode cantilever (8347 Hz, Q = 10,000). For each target controlled
quality factor, Q_cl = 75, 100, 200, 300 and 400, it designs a control law
the way a host would and loads it. The steps are:

1. The optimal controller for a resonator has two complex poles and one real
   zero: H(s) = K (s + z) / (s² + (ω_oc/Q_oc) s + ω_oc²). Its four numbers
   follow in closed form from the cantilever's ω_n and Q and two design
   parameters. α sets the allowed control effort, and α ≈ 1/Q_cl − 1/Q. β
   sets the estimator quality and is taken as 4α; it should be larger than
   α but of similar size. The exact form printed for α, (1/Q)[1 − √…], comes
   out negative, so the approximation is used.
2. The law is mapped to z with the bilinear transform, prewarped so that the
   discrete response matches at ω_oc. This gives section 0.
3. A first-order phase-lead stage, (1 + ητs)/(√η (1 + τs)), centred on ω_oc,
   gives section 1. It makes up the 6° or so of lag from sampling and the
   zero-order hold. The published coefficient table has the same shape: a
   second-order section followed by a first-order one.
4. Everything is scaled by 2²² with a0 = −2²². A factor of 32 of gain is
   moved from section 1 to section 0, so that section 0's small b
   coefficients keep enough bits.

The cantilever starts 0.4 V out and rings down. The Q is taken from the
decay of the peak amplitude between 1.5 and 2.5 decay times, after the
faster estimator poles have died out:

| target Q_cl | 75 | 100 | 200 | 300 | 400 | loop open |
|---|---|---|---|---|---|---|
| measured Q | 75.4 | 100.5 | 201.0 | 301.7 | 402.1 | 9950 |

The coupling between DAC volts and force is normalised (0.01). A real set-up
must pick the interferometer, pre-amplifier, current-amplifier and coil gains
so that both converters are well filled. Here the largest DAC code seen is
2721 of 8191.

## Timing

* Clock: 64 MHz, the ADC sample clock. All registers reset synchronously on
  `rst`.
* ADC code → multiplexer register: 1 clock. Multiplexer → divider sample:
  1 clock, then up to N−1 clocks of waiting for the next strobe.
* Each section: 1 clock. Limiter: 1 clock.
* `tap_valid` rises once per filter sample, four clocks after the ADC code it
  carries. `tap_sum` and `tap_filter` belong to the same sample, because
  `tap_sum` is delayed to line up with the filter output. `dac_tx` follows
  one clock later.
* At N = 128 a step on RX therefore reaches the DAC within 128 + 5 clocks,
  about 2 µs. This is the latency measured on the published controller with
  a square wave: "about 2 usec, similar to the sampling interval".
* Register writes take effect one clock after the strobe. The coefficients
  are not double-buffered. A sample taken while a six-word set is being
  written can meet a mix of old and new words. At 500 kHz the write of one
  set takes a few clocks of a 128-clock period.

## Register map

| address | field | reset |
|---|---|---|
| 0 | `[1:0]` multiplexer: 0 none, 1 RX, 2 Ref, 3 RX+Ref | 0 |
| 1 | `[15:0]` N | 128 |
| 2 + 6s + k | `[23:0]` coefficient k of section s, k = b0, b1, b2, a0, a1, a2 | b = 0, a0 = −2²², a1 = a2 = 0 |

Other addresses are ignored. After reset the output is zero until a filter
is loaded.

## What is outside this RTL

The top module `cantilever_controller` brings these out as ports:

* the codec: the ADCs, the DAC and their programmable gain amplifiers (the
  PGA gains are set over the codec's own control port, not by this logic);
* the USB interface, which issues the register writes and streams the two
  taps to the host;
* the host software, which factors the control law into sections and scales
  it to integers.

## Departures and open points

* **Where the 'sum' tap is taken.** The published signal-path drawing places
  it after the divider; the text calls it the multiplexer output. It is taken
  after the divider, at the filter rate.
* **Decimator.** The divider only samples; it has no anti-alias filter. The
  published design does not say what its divider does beyond dividing the
  rate.
* **Multipliers.** The sections use ten parallel 24×24 multipliers so that
  even N = 1 works. The published FPGA (an Altera Cyclone EP1C12 without
  hardware multipliers) fits the whole controller in 2,765 logic elements.
  That suggests the original shared or serialised its multipliers. At
  N = 128 one shared multiplier per section would do, but this design does
  not have one.
* **One signal path.** The board has room for a second, independent path;
  only one is built.
* **Heterodyne control** of radio-frequency cantilevers is a different block
  diagram, offered only as a future direction. It is not included.
* **Coefficient sign.** See the worked example above.

## Files and simulation

`rtl/`: `cc_pkg.sv` (widths, `mux_sel_t`, `biquad_coeffs_t`, register map),
`input_mux.sv`, `decimator.sv`, `biquad.sv`, `dac_limiter.sv`,
`control_regs.sv`, `cantilever_controller.sv` (top).

`tb/`: one self-checking testbench per module, plus `tb_ref_pkg.sv`, an
integer reference model of the arithmetic. Each testbench prints
`TB_RESULT checks=N failures=M`.
`cantilever_controller_tb` runs the top at its default parameters and
checks every sample of `tap_sum`, `tap_filter` and `dac_tx` exactly against
the model. It covers all four multiplexer settings, DAC limiting both ways,
N = 4, 1 and 128, a coefficient change while running, the 7700–8300 Hz sweep
above and 20 latency steps. Each of these mechanisms must occur, or the test
fails. It runs in about 15 s. `cantilever_loop_tb` (about 6 s) is the
closed-loop test described above.

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cc_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/cantilever_controller_tb.sv \
  --top-module cantilever_controller_tb -o sim
./obj_dir/sim
```

For a unit test, replace `rtl/*.sv` and the testbench with the module and its
`_tb` file. The sources are plain SystemVerilog-2017 and lint clean under
`verilator --lint-only -Wall`, except for unused package constants and the
unused top byte of the 32-bit register word.
