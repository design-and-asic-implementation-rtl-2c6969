# Digital up- and down-converter for power-line carrier audio

This is synthesizable SystemVerilog for the two sample-rate converters of a
power-line carrier (PLCC) audio link, following the DUC/DDC pair described by
N. S. Bhat in "Design and ASIC implementation of DUC/DDC for communication
systems".

- The **transmitter (DUC)** takes 14-bit audio (300 Hz to 4 kHz) sampled at
  64 kHz. It raises the sample rate by 20, to 1280 kHz, and places the audio on
  a carrier that can be set anywhere from 200 to 500 kHz. The result goes to a
  DAC that drives the power line.
- The **receiver (DDC)** takes 14-bit ADC samples of such a carrier at
  1280 kHz. It mixes them down with its own carrier and lowers the rate by 20,
  back to 64 kHz.

Both run from a single 64 MHz master clock. The filters need no multipliers
for the rate change, because a CIC filter does it. The few multiplications
they do need share one multiplier per filter, time-multiplexed at 64 MHz while
the samples arrive at a much slower rate. That time-multiplexing, and the
clocking it rests on, is the least obvious part of the design and is described
first.

## Clocks, strobes and the MAC window

The design has three rates:

| rate     | derived as  | used by                                              |
|----------|-------------|------------------------------------------------------|
| 64 MHz   | master      | every flip-flop; one multiply-accumulate per cycle   |
| 1280 kHz | 64 MHz / 50 | carrier-side samples, CIC integrators                |
| 64 kHz   | 64 MHz / 1000 | audio-side samples, CIC combs                      |

`clock_gen` builds the 64 kHz and 1280 kHz clocks from two counters that start
together at reset. Both clocks have a 50 % duty cycle and are brought out as
ports. Every rising edge of the 64 kHz clock falls on a rising edge of the
1280 kHz clock, 20 of which make one 64 kHz period. No logic is clocked by the
divided clocks. Instead, for each rate `clock_gen` emits a `rate_t` bundle of
three strobes. Each strobe is one master cycle wide:

- `tick`: the slow clock has just risen. Sample registers load.
- `ctrl`: the slow clock has just fallen. MAC filters shift in their input,
  clear their accumulator and start.
- `fd`: the next rising edge, in the same cycle as `tick`. MAC filters copy
  the sum to their output.

This is the MAC synchronisation the original design uses with its `ctrl` and
`fd` signals. A filter's input comes from a stage that updates on the rising
edge. The filter takes that value half a period later, on the falling edge,
and its result appears on the next rising edge. Each filter is therefore one
sample clock of latency, the same as a plain register stage. The shift
register is written on `ctrl` and read only in the 24 cycles after it, so the
two never race. At 1280 kHz that window is half of a 50-cycle period: 25 master cycles,
one to clear and 24 to multiply-accumulate the 24 taps. This is why the
master clock is 64 MHz: 1280 kHz x (24 + 1) x 2. At 64 kHz the window is 500
cycles, and the MAC simply idles once it has finished. Assertions in `mac_fir`
check that the MAC is never busy on `ctrl` or `fd`.

```
master  |_|^|_|^|_|^|_|^|_|^|_|^|_|^ ... (50 per 1280 kHz period)
clk1280k ^^^^^^^^^^^^^^^^^|______________________________|^^^^
tick/fd  ^ (count 0)                                      ^ (count 50 = 0)
ctrl                      ^ (count 25)
MAC                       [shift+clr][tap0][tap1] ... [tap23]
```

**Start-up.** After reset the 64 kHz clock first rises after 500 master
cycles. `ready` goes high on that cycle and stays high. Before it, no strobe is
emitted and nothing is captured, so a converter's output stays zero. Reset is
synchronous and active high, and it clears every register.

## The transmitter chain (`duc`)

```
adc_in --[reg]--(x)--[highpass]--[compensation]--[CIC comb x5]-- 64 kHz
                 |                                     |
          DDS @ 20 kHz                      zero-stuff by 20
                                                       |
duc_out <--[highpass]--(x)--[CIC integrator x5]------- 1280 kHz
                        |
          DDS @ carrier_khz (200..500 kHz)
```

The audio is first mixed with a constant 20 kHz carrier. A highpass filter
keeps the upper band, 20 kHz + audio. This way, the filters that follow do not
need a steep transition at DC, and so need fewer taps. A 24-tap compensation
filter pre-corrects the droop of the CIC filter. The CIC interpolator then
does the whole rate change of 20. Finally, the signal is mixed onto the
programmable carrier and highpass-filtered.

Latency, once `ready` is high: 9 ticks of 64 kHz plus 7 ticks of 1280 kHz.
The 64 kHz ticks are input register, mixer, highpass, compensation and five
combs. The 1280 kHz ticks are five integrators, mixer and highpass.

## The receiver chain (`ddc`)

```
adc_in --[reg]--(x)--[highpass]--[compensation]--[CIC integrator x5]-- 1280 kHz
                 |                                      |
        DDS @ carrier_khz                      keep 1 in 20
                                                        |
ddc_out <-------------------------[CIC comb x5]--------- 64 kHz
```

Latency, once `ready` is high: 9 ticks of 1280 kHz plus 5 ticks of 64 kHz.
The 1280 kHz ticks are register, mixer, highpass, compensation and five
integrators. The 64 kHz ticks are the five combs.

The receiver has a single real mixer, not an I/Q pair. So the level of the
recovered audio depends on the phase between the transmitter's carrier and
the receiver's carrier, and it can cancel completely. One example: feed the
DUC straight back into the DDC, both at 320 kHz. The two carriers are then
exactly in quadrature (320 kHz is a quarter of the sample rate) and the
output is silent. At other carriers the same loop works.

## Building blocks

| module       | what it does |
|--------------|--------------|
| `clock_gen`  | The /1000 and /50 dividers, the `rate_t` strobes and `ready`. |
| `freq_cont`  | Registers a carrier setting in kHz and turns it into the DDS phase step, `floor(f * 256 / fs)`. At fs = 1280 kHz: 200 to 500 kHz is step 40 to 100, with 5 kHz resolution. The DUC's 20 kHz constant carrier is this block at fs = 64 kHz, step 80. |
| `dds`        | An 8-bit phase accumulator addresses a 256 x 8-bit two's complement sine table. A step of 21 at 1280 kHz gives 105 kHz, about 12 table steps per period. |
| `mixer`      | One registered signed 14 x 8 multiply per tick. `p` is the full 22-bit product; `y = p >>> 7` is the same product back at sample scale. |
| `mac_fir`    | The 24-tap FIR described above. The `FILTER` parameter selects its coefficient set. |
| `cic_interp` | Five pipelined combs at 64 kHz, then zero-stuffing by 20, then five pipelined integrators at 1280 kHz. |
| `cic_decim`  | Five pipelined integrators at 1280 kHz, then every 20th value goes into five pipelined combs at 64 kHz. |
| `duc`, `ddc` | The two chains above, each with its own `clock_gen`. |
| `duc_ddc_top`| Both chains side by side on one clock and reset. |

`duc_ddc_pkg` holds the shared sizes, the `rate_t` struct, the coefficient
selector enum, a saturation function, and both constant tables. The tables
are written as case constructs.

### Number formats

| signal                        | format |
|-------------------------------|--------|
| ADC input, all samples, outputs | 14-bit two's complement |
| sine table                    | 8-bit two's complement, `round(127 sin(2 pi k / 256))`, Q1.7 |
| filter coefficients           | 16-bit two's complement, Q1.15 |
| MAC accumulator               | 36 bits; output `sat14(acc >>> 15)`, truncating |
| CIC registers                 | 44 bits, wrapping |
| CIC interpolator output       | `sat14(integ >>> 18)`; DC gain 20^4 / 2^18 = 0.61 |
| CIC decimator output          | `sat14(comb >>> 22)`; DC gain 20^5 / 2^22 = 0.76 |
| carrier setting               | 14-bit unsigned, kHz |

In a CIC filter the integrators wrap freely, and the combs undo the wrap, as
long as the final result fits in 44 bits. Five stages at a rate change of 20
need about 36 bits.

### Coefficient tables

The source gives the filter types but no coefficient values. The tables in
`duc_ddc_pkg` were designed for this RTL and quantised to Q1.15:

- **Highpass filters.** 23-tap Hamming-windowed sinc highpasses, plus a 24th
  tap of zero. A symmetric filter of even length cannot pass the Nyquist
  frequency. The cutoffs are:
  - 20 kHz at 64 kHz (DUC, after the 20 kHz mixer)
  - 150 kHz at 1280 kHz (DUC output)
  - 15 kHz at 1280 kHz (DDC)
- **Compensation filters.** 24-tap frequency-sampling filters. Their gain
  follows H(24 kHz) / H(f) from 0 to 24 kHz, where
  H(f) = |sin(pi f R / 1280 kHz) / (R sin(pi f / 1280 kHz))|^5 is the droop of
  the CIC filter. Above 24 kHz the gain falls to zero. At 64 kHz this gives a
  useful correction. At 1280 kHz, 24 taps are too few to shape a 24 kHz band,
  so the DDC's compensation filter acts mostly as a mild lowpass.

To use other filters, replace the numbers in `fir_coef`. The MAC engine, its
timing and the 24-tap length stay as they are.

## What follows the source and what is this design's own

These follow the original description:

- the block order of both chains, including the 20 kHz intermediate carrier
- the rate change of 20 done entirely in the CIC filters
- the divide-by-1000 and divide-by-50 clocks, the 500-cycle start-up hold,
  and the `ctrl`/`fd` MAC timing with 24 coefficients at 64 MHz
- the 256 x 8-bit sine table and the 14-bit data and 16-bit coefficient
  widths
- the 44-bit CIC registers and the five-stage CIC filters
- the case-construct tables and the synchronous reset
- input and frequency-setting registers at the input rate, and output
  registers at the output rate
- the stage-by-stage latencies

These are this design's own choices:

- **Strobes instead of divided clocks.** The datapath uses strobes on one
  clock instead of flops clocked by the divided clocks. The sample timing is
  the same, and there is one clock tree.
- **Coefficients and scaling.** The coefficient values, and the scaling
  between stages, are this design's own.
- **Carrier setting in kHz.** The carrier setting is read as kHz. The
  original waveforms show the setting as 14'h0140 (320), a value inside the
  carrier band.
- **ADC code format.** The ADC codes are taken as two's complement. The ADC is
  specified only as "14 bits, 0 to 5 V".
- **DDC highpass cutoff.** The DDC's highpass has a low cutoff. The source
  says the DDC highpass keeps the upper band (carrier + signal), but the CIC
  decimator that follows it is a lowpass and would then remove the signal. So
  here the highpass only removes DC and keeps the difference band.
- **Fixed DUC output highpass.** The DUC's output highpass has one fixed
  cutoff for the whole carrier range, so it passes both sidebands.
- **Product width.** The mixer's product is 22 bits; the original waveform
  shows a 36-bit bus.
- **Where the source contradicts itself.** One mixer waveform labels the
  carrier mixer's input as coming from the "final highpass filter". The block
  diagram and the latency list put that mixer right after the CIC filter, and
  the highpass after the mixer; this design uses that order. The MAC
  description once gives the filter rates the wrong way round: 64 kHz for the
  DDC and 1280 kHz for the DUC. This design follows the latency lists
  instead. There, the DDC filters run at 1280 kHz. The first two DUC filters
  run at 64 kHz and the last at 1280 kHz. The CIC decimator is once
  described as going "from 64 KHz to 1280 KHz". It actually runs from
  1280 kHz down to 64 kHz.

Not part of the RTL:

- the ADCs, the DAC and the 64 MHz clock source, which appear as ports
- the 0.9 V / 1.08 V level-shifter wrapper and its power domains
- scan insertion
- tool-inserted clock gating

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

- **`tb_clock_gen`** works out every strobe and clock level from a cycle
  count. It also checks 20 edges of 1280 kHz per 64 kHz period, the 500-cycle
  start-up, and a mid-run reset.
- **`tb_freq_cont`** checks random settings, plus the known steps: 320 kHz to
  64, 105 kHz to 21, 200 kHz to 40, 500 kHz to 100, and 20 kHz at 64 kHz to 80.
- **`tb_dds`** checks the phase and the sine against a real-valued sine, and
  the 105 kHz period of 12 to 13 ticks.
- **`tb_mixer`** checks exact products and the scaling.
- **`tb_mac_fir`** runs all five coefficient sets at the 1280 kHz window and
  one at 64 kHz. Outputs must be bit-exact against a convolution computed in
  the testbench. Saturation is exercised, and each MAC must take exactly 24
  cycles.
- **`tb_cic_interp` and `tb_cic_decim`** compare bit-exactly against integer
  models. They also check the DC gains and the pipeline latency (five ticks
  per section), and the decimator test makes the integrators wrap.
- **`tb_duc` and `tb_ddc`** compare each chain, after every master cycle,
  with a cycle-accurate reference model (`tb/duc_model.sv`,
  `tb/ddc_model.sv`). The models use plain integer arithmetic and a
  real-valued sine, and have one register per stage of the latency lists
  above. Both tests also check every stage's latency on the internal
  registers. After each tick, a stage must hold the function of what the
  stage before it held just before that tick. That gives 9 + 7 ticks for the
  DUC and 9 + 5 for the DDC. Both tests also retune the carrier, reset in
  mid-run, and check the start-up hold. `tb_ddc` checks that a 24 kHz tone comes out: 75 sign changes
  in 100 samples.
- **`tb_duc_ddc_top`** runs the whole design at its default sizes. The DUC
  output is looped into the DDC, a 4 kHz tone is sent on 400 kHz, retuned to
  250 kHz, and reset once. Both outputs are checked against the models, and
  the recovered 24 kHz tone is checked. It counts each mechanism and fails if
  one never happens: start-up hold, MAC windows at both rates, rates of 20 up
  and down, retune and reset.

Verilator 5 is enough to run any of them; for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/duc_ddc_pkg.sv tb/tb_duc_ddc_top.sv --top-module tb_duc_ddc_top
./obj_dir/Vtb_duc_ddc_top
```

The full end-to-end run covers 200 audio samples, about 200,000 master cycles,
and takes a few seconds.
