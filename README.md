# A 64-channel binary front end for multi-anode photomultipliers

In a ring-imaging Cherenkov detector, each photon lands on one pixel of a
photodetector, and a pixel almost never sees two photons in one event. So a
pixel does not need its pulse height digitised. One bit, "this pixel was hit",
is enough, and it keeps the data volume small. The chip modelled here does
this for 64 pixels at once:

- Each of its 64 inputs has its own amplifier, shaper and discriminator.
- Each channel has its own digital output, so every channel reports in
  parallel.
- The chip triggers itself. A charge above threshold produces an output pulse
  of about 100 ns with no outside trigger, and the readout electronics after
  the chip can time-stamp it.
- A serial bitstream configures the chip. It sets each channel's threshold
  trim, the channel mask and which channels take part in calibration. It also
  sets the chip-wide mode bits.

The RTL describes the digital part of such a chip as synthesizable
SystemVerilog. The analog part (charge amplifier, shaper and comparator) is
given as small behavioural models with integer voltages. Together they make a
full 64-channel model that can be simulated.

## Signal path of one channel

```
charge_e[i] ─► analog_front_end ─► discriminator ─► polarity mux ─► disable ─► monostable ─► out[i]
cal charge ──►  (model)            (model)          (neg_thr)       (mask,       (100 ns)     │
                                   threshold_uv,                    mode)                     └► & test_on2 ─► fast-OR (64)
                                   trim[3:0]
```

| Stage | Module | Nature | What it does here |
|---|---|---|---|
| Preamp + shaper (with high pass filter and pole-zero cancellation in the chip) | `analog_front_end` | behavioural model | Converts the input charge to a peak voltage: 5 mV per 27,000 electrons. The response is linear up to 220 fC (1,373,000 e⁻) and flat above that. When selected, it adds the calibration charge. |
| Comparator + 4-bit trim DAC | `discriminator` | behavioural model | High while the peak voltage is above `threshold_uv + (trim − 8) × 500 µV`. |
| Polarity mux | `channel_digital` | logic | Passes the comparator output, or its inverse when `neg_thr` is set. |
| Channel disable | `channel_digital` | logic | Blocks the trigger when the channel is masked, or when the current mode does not use it. |
| Monostable | `monostable` | logic | Each rising edge gives a pulse of exactly 10 clock cycles. An edge that arrives during a pulse is ignored. |
| Fast-OR | `fast_or` | logic | ORs the 64 pulses, each gated by the chip-wide `test_on2` bit. |
| Slow control | `slow_control` | logic | Holds the shift register and its shadow copy, and sets the mode of operation. |

`va_mapmt` is the top level. It holds one `slow_control`, 64 copies of the
channel chain and one `fast_or`. `va_pkg` holds the shared types.

In the chip, the threshold comes from an 8-bit DAC outside the chip, so here
it arrives as a voltage (`threshold_uv`, in signed microvolts). Each channel's
input is a charge in signed electrons. It is held for as many cycles as the
shaper output would stay above threshold.

## Modes of operation and the configuration bitstream

The chip has three modes:

| Mode | When | Which channels can fire |
|---|---|---|
| `MODE_INIT` | `init` is high, and from reset until the first pattern is loaded | none |
| `MODE_CALIB` | after loading, with `cal_mode = 1` | unmasked channels with `cal_sel = 1`. While `cal_pulse` is high, their front ends receive `cal_charge_e` on top of their input. |
| `MODE_NORMAL` | after loading, with `cal_mode = 0` | every unmasked channel |

**Shifting.** While `init` is high, each clock cycle with `sc_shift` high
does two things:

- It moves the 387-bit shift register up one place and takes `sc_din` into
  bit 0.
- The bit that drops out of the top appears on `sc_dout`. Chips can therefore
  be daisy-chained, or the previous pattern read back while a new one is
  shifted in.

The working configuration does not change while shifting. The first clock
edge that sees `init` low copies the whole register into it at once. The
channels therefore never see a half-loaded pattern.

The word is the packed struct `va_pkg::cfg_t`. It is shifted in top bit first:

| Bits (in `cfg_t`) | Field | Meaning |
|---|---|---|
| 386 | `glob.cal_mode` | 1 = calibration mode, 0 = normal mode |
| 385 | `glob.neg_thr` | 1 = fire on the inverted comparator output |
| 384 | `glob.test_on2` | 1 = channels drive the fast-OR |
| 6·i+5 … 6·i+2 | `ch[i].trim` | trim DAC code. 8 adds no offset; each step adds 500 µV. |
| 6·i+1 | `ch[i].disable_ch` | 1 = channel masked |
| 6·i | `ch[i].cal_sel` | 1 = channel takes part in calibration |

The first bit sent is `cal_mode`. Channel 63 comes next, and channel 0's six
bits are sent last. Reset clears every bit and puts the chip in `MODE_INIT`.

**Polarity.** `neg_thr` is the select of the polarity mux. For negative
signals, set the threshold below the baseline (for example −5 mV) and set
`neg_thr`. At rest the comparator output is then high and its inverse is low.
A negative pulse pulls the comparator low, and the inverse rises and fires
the monostable. If `neg_thr` is set with a threshold above the baseline, every
channel fires as soon as it is enabled. Set the threshold and the polarity
together.

## Timing

The digital section runs on one clock, `clk`, assumed to be 100 MHz. Take a
charge that puts the comparator above threshold in cycle *t*. Then:

- `out[i]` is high in cycles *t*+1 to *t*+10, which is 100 ns.
- `fast_or` follows the channel outputs combinationally.
- A new edge can start a pulse in the first cycle after the pulse ends.

A channel can therefore take one hit every 110 ns, about 9 MHz. The peak rate
expected in the detector is about 3 MHz per channel, and collisions are
132 ns apart.

`mode` and the configuration change one cycle after `init` falls.

## How far the model follows the chip

These parts follow the published description:

- 64 channels with 64 parallel binary outputs.
- A common threshold set by an external DAC, and a 4-bit trim DAC in each
  channel.
- An output pulse of about 100 ns from a monostable.
- A channel mask set during initialization.
- Three modes: initialization, calibration of selected channels, and normal.
- A fast-OR that can be enabled.
- The order of the channel's stages: comparator, polarity mux (`Neg_thr`),
  disable gate, monostable, then output and gated fast-OR (`Test_on2`).
- The front-end gain and linear range used in the model. The 5 mV threshold
  corresponds to 27,000 electrons, and the linear range reaches 220 fC.

These parts are this design's own choices, because the description does not
give them:

- The clocked, non-retriggerable monostable. The chip's monostable is analog,
  and a bias sets its width.
- The 100 MHz clock.
- The whole serial protocol: `init`, `sc_shift`, the shadow copy, `sc_dout`,
  the bit order and the field layout.
- The trim DAC coding and its 500 µV step.
- Keeping `neg_thr` and `test_on2` as configuration bits rather than pins.
- The all-zero reset.
- Silencing channels not selected for calibration while in calibration mode.

Two published numbers disagree slightly. A 220 fC linear range at 5 mV per
27,000 e⁻ gives a ratio of 50.9 between the onset of saturation and the
threshold. The published ratio is 52. The model uses 220 fC.

These parts are not modelled:

- Noise. The charge-scan test injects it at the inputs instead.
- Pulse shapes.
- The high pass filter and pole-zero cancellation.
- Cross talk between neighbouring channels.
- The analog monitor channel.
- The current-mode output stage.
- The bias voltages.

Studies of cross talk against tube gain therefore cannot be repeated with
this model. The sibling chip for hybrid photodiodes adds a
3× gain stage, which is not included either.

`monostable` requires its trigger to be synchronous to `clk`, and the
behavioural front end in this model provides that. A silicon version with a
truly asynchronous discriminator would need a synchroniser or an analog
one-shot.

## Files

| File | Contents |
|---|---|
| `rtl/va_pkg.sv` | `N_CH`, `TRIM_BITS`, `mode_e`, `ch_cfg_t`, `glob_cfg_t`, `cfg_t`, `CFG_BITS` |
| `rtl/va_mapmt.sv` | top level |
| `rtl/slow_control.sv` | serial configuration and mode |
| `rtl/channel_digital.sv` | polarity mux, disable, monostable, fast-OR term |
| `rtl/monostable.sv` | clocked one-shot, `PULSE_CYCLES` = 10 |
| `rtl/fast_or.sv` | N-input OR |
| `rtl/analog_front_end.sv` | behavioural charge-to-voltage model |
| `rtl/discriminator.sv` | behavioural comparator with trim DAC |
| `tb/<module>_tb.sv` | one self-checking testbench per module; `va_mapmt_tb` is the end-to-end test |
| `tb/charge_scan_tb.sv` | threshold and noise scan of the whole chip in calibration mode |

## Simulation

Every testbench checks itself. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`, and each has a
watchdog. To build and run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/va_pkg.sv tb/va_mapmt_tb.sv --top-module va_mapmt_tb -Mdir obj_top -o sim
./obj_top/sim
```

Replace `va_mapmt_tb` with any other `*_tb` to run that module's own test.

`va_mapmt_tb` runs the whole chip at its default size of 64 channels. A
reference model in the testbench gets its results independently from the
configuration the testbench shifted in. Every cycle it predicts all 64
outputs, the fast-OR and the mode. The test goes through these phases:

1. Inputs while the chip is still unconfigured.
2. Normal mode with random trims and masked channels.
3. A charge scan around each channel's trimmed threshold.
4. A 3 MHz hit train, and a second hit inside a running pulse.
5. Inputs above the linear range, against a threshold the saturated output
   cannot reach.
6. Random traffic on all channels.
7. The fast-OR switched off, and the previous pattern read back from `sc_dout`.
8. Calibration mode with a subset of channels.
9. Negative polarity.

The test counts how often each of these mechanisms happened, and counts a
failure for any that never did. It takes well under a second.

`charge_scan_tb` repeats the bench measurement used to find a channel's
threshold and noise, in calibration mode, for four selected channels:

- The calibration charge steps from 14,000 to 52,000 e⁻ in steps of 500 e⁻.
- Each step has 300 pulses. The testbench adds 2,000 e⁻ rms Gaussian noise to
  each channel's input at every pulse, because the model has no noise of its
  own.
- It turns the counted hits into efficiency curves.

The test checks:

- The 50 % point is at 27,000 e⁻ for trim code 8, and at 37,800 e⁻ for trim
  code 12.
- The 16 %–84 % half-width gives back the injected noise.
- Unselected channels stay silent.

It runs in about a second.

The module tests:

| Testbench | What it checks |
|---|---|
| `monostable_tb` | the exact 10-cycle width, a held trigger, the ignored retrigger, a 3 MHz train and random triggers |
| `channel_digital_tb` | each control input alone, then random mixes, against a reference model |
| `slow_control_tb` | random patterns, idle shift cycles, the field layout, the mode after loading, and read-back |
| `fast_or_tb` | each channel alone, each channel missing, and random patterns |
| `analog_front_end_tb` | the operating points, saturation, calibration injection and random charges |
| `discriminator_tb` | every trim code at and just above its threshold, and random values |

## Changing the design

- **Output pulse width:** `PULSE_CYCLES` on `va_mapmt`, or change the clock
  period to match.
- **Channel count and trim width:** `N_CH` and `TRIM_BITS` in `va_pkg`. The
  configuration word and the bitstream length follow from these.
- **Gain, saturation and trim step:** the parameters of `analog_front_end`
  and `discriminator`.
- **Bitstream layout:** change the field order inside the `cfg_t` structs.
  `slow_control` needs no edit, since it only shifts and copies `CFG_BITS`
  bits.
