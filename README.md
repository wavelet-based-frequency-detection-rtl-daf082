# Wavelet tone detector: a 6 kHz detector built from a complex Morlet correlator

This design tells whether an analog input carries energy near 6 kHz, and how
much, and shows the answer on eight LEDs as a bar graph. It does not use an
oscillator and mixer. It correlates the sampled input with a *complex Morlet
wavelet*: a 6 kHz cosine and sine, both shaped by a Gaussian window and stored as
constants. The two correlations give the in-phase and quadrature parts of the
input near 6 kHz, much like the I/Q output of a software radio. Their squared
magnitude is large only while the recent input holds a tone close to 6 kHz.

The hardware is small and sequential:

```
 BTN1 ─ debouncer ─┬─► system reset ─► delayed_pulse_gen ─► adc_ctrl: program amplifier gain (-1)
                   │
 BTN2 ─ debouncer ─┴─► pulse_gen (one pulse per 500 clocks = 20 kHz)
                              │ each pulse
                              ├─► adc_ctrl: ADCON + 34-bit SPI read ─► sample (14 bit, channel A)
                              └─► wavelet_filter: shift sample into 133 taps
                                       re = Σ tap·cos-coef,  im = Σ tap·sin-coef  (33 bit)
                                       resp = re² + im²                             (50 bit)
                                                 └─► led_ctrl: 8 thresholds on resp[49:32] ─► LED[7:0]
```

Everything runs from one 10 MHz clock. On the original board a vendor clock
manager derives it from a 50 MHz oscillator by dividing by five; that primitive
is not part of this RTL, so the top-level `clk` input is that 10 MHz clock.

## The wavelet and what it detects

The coefficients come from the complex Morlet function

    w(t) = exp(i·2π·f·t) · exp(−t² / (2·(W/f)²)),   f = 6000 Hz, W = 4

sampled at 20 ksps over 133 points centred on the middle one
(t = (n − 66)/20000 s). Each point is multiplied by a normalisation K and by
8191, then truncated toward zero to a 14-bit integer:

    COEF_RE[n] = trunc(8191 · K · g[n] · cos(2π·6000·t[n]))
    COEF_IM[n] = trunc(8191 · K · g[n] · sin(2π·6000·t[n]))
    g[n] = exp(−t[n]² / (2·(4/6000)²)),   K = 1 / (2π · Σ g[n])

The tables are in `rtl/wavelet_pkg.sv`. The largest coefficient is 39. Only
samples 31 to 101 are non-zero, because the Gaussian tails truncate to zero.
The Gaussian width W and the normalisation K are this implementation's choices,
because the source design states neither. They were chosen to reproduce its
published behaviour:

* a full-scale 6 kHz tone gives a peak response of 2.63·10¹³;
* the response falls to half at about ±200 Hz;
* the weakest LED goes out near 5.6 kHz and 6.4 kHz;
* all eight LEDs light only within about ±60 Hz of 6 kHz.

The window is a Gaussian with σ = W/f = 0.67 ms, so the frequency response is a
Gaussian too, with σ_f = f/(2πW) ≈ 240 Hz in amplitude. The magnitude squared
therefore falls as exp(−Δf²/σ_f²). This trade-off is built in: a longer wavelet
gives a narrower band, but it needs more taps and responds more slowly. The
response to a tone settles within the 133-sample window (6.65 ms).

Because the coefficients are complex, the magnitude does not depend on the
phase of the input. A steady 6 kHz tone gives an almost constant `resp`, not one
that rises and falls at 12 kHz. That is why the LEDs can use a plain threshold.

### Arithmetic widths

The samples and coefficients are 14-bit signed. The real and imaginary sums are
33-bit signed. The response is 50-bit signed (it is never negative). These are
the original widths. With these coefficients the widths are far larger than
needed: Σ|COEF_RE| = 803, so |re| ≤ 8192·803 < 2²³, and re² + im² < 2⁴⁷.
`wavelet_filter` computes this bound at elaboration time. It stops with an error
if a new coefficient set could overflow the widths.

### Filter structure

`wavelet_filter` is a direct-form FIR, fully parallel, as in the original:

* Every `sample_en` moves the tap array up one place and puts the new sample into
  tap 0.
* All 133 taps are multiplied by both coefficient arrays and summed in one
  combinational step.
* The sums are registered one cycle after the shift. The response and the
  matching `re`/`im` are registered one cycle later, so `resp_valid` is high two
  cycles after `sample_en`.
* Since the coefficients are constants, synthesis turns most products into
  shift-and-add logic, and the zero coefficients drop out.

One sample comes every 500 cycles, so this parallel form uses less than 1% of
its time. A serial multiply-accumulate over 133 cycles would also fit, but that
is not the structure of the original.

## Thresholds and the 18-bit compare

`RESP_MAX` is the response to a full-scale 6 kHz cosine (amplitude 8191), taken
as the maximum over start phases: 26,309,800,558,864. The range 0…RESP_MAX is cut
into eight equal parts. The threshold for LED k−1 sits in the middle of part k:

    T_k = k·RESP_MAX/8 − RESP_MAX/16,   k = 1…8

LED k−1 is on while the response is strictly above T_k. The comparison uses only
bits 49…32 of the response and of each threshold, which makes it an 18-bit
compare. The original design narrowed the compare in this way. The dropped bits
are worth less than 1/6000 of RESP_MAX, so they never change the display in
practice. The original text says once that 34 bits were dropped from the
thresholds and once that bits 49…32 are compared. This RTL drops 32 bits on both
sides, because dropping 34 from only one side would compare numbers of different
weights.

## Talking to the amplifier and the ADC

The analog front end is an inverting programmable-gain amplifier followed by a
two-channel 14-bit ADC. The two devices share one SPI clock and data lines. The
amplifier has its own chip select (AMPCS). The ADC starts a conversion on a
pulse of ADCON. `adc_ctrl` drives both:

* **SPI clock.** SCK runs at half the system clock (5 MHz). It is low whenever
  no transfer is in progress.
* **Gain command.** `prog_gain` starts it.
  1. AMPCS goes low.
  2. The 8-bit word `GAIN_CMD = 0x01` goes out MSB first. MOSI changes while SCK
     is low, and the amplifier samples it on the rising edge. The low nibble sets
     channel A to gain −1.
  3. SCK returns to zero.
  4. One cycle later AMPCS is released.

  With gain −1 the ADC window of 0.4 V to 2.9 V around 1.65 V maps onto the full
  code range, inverted: 0.4 V reads 0x1FFF (8191) and 2.9 V reads 0x2000 (−8192).
* **Read.** `start_read` starts it.
  1. ADCON is high for one cycle.
  2. 34 SCK cycles follow.
  3. The ADC sends 2 idle bits, 14 bits of channel A, 2 idle bits, 14 bits of
     channel B and 2 idle bits, MSB first.
  4. MISO is shifted into a 34-bit register on each falling SCK edge. Shifting
     takes the place of indexing by a bit counter, which had lost bits at this
     clock rate in the original design.
  5. After the last bit, channel A is register bits 31…18 and channel B is bits
     15…2.

  From `start_read` to `sample_valid` takes 70 cycles.

**Sample latency.** The ADC returns the conversion of the *previous* ADCON, and
the filter shifts in the last completed read on each pulse. So the sample that
enters the filter on pulse p was converted on pulse p−2, 100 µs earlier. A fixed
delay does not matter for a detector. The end-to-end test checks this exact
alignment.

Only channel A is used. Channel B is read and available on `adc_ctrl`'s ports,
but the top level leaves it unconnected.

## Control: buttons, reset and start

* **BTN 1** is the system reset. After it is released (and at power-up),
  `delayed_pulse_gen` waits three cycles (300 ns), then gives one pulse that
  makes `adc_ctrl` program the gain. A `done` flag stops it from pulsing again
  until the next reset.
* **BTN 2** starts sampling. `pulse_gen` is a two-state machine, IDLE and RUN.
  Once started it stays in RUN until reset and gives a one-cycle pulse every 500
  cycles.
* **Debouncing.** Each button has a two-flip-flop debouncer that samples the
  button every 10 ms. Its output changes only when two successive samples agree.
  It gives a clean level, not a one-shot pulse.
* **Power-on reset.** Nothing else resets the system at power-up, so the top
  level adds a four-cycle reset. It comes from flip-flops with configuration
  initial values and is OR-ed with BTN 1. On an FPGA this relies on the
  flip-flops' configured initial state.

## Files

| file | module | role |
|---|---|---|
| `rtl/wavelet_pkg.sv` | package | widths, types, coefficient tables, RESP_MAX, overflow bound helper |
| `rtl/debouncer.sv` | `debouncer` | two-flip-flop button debouncer |
| `rtl/delayed_pulse_gen.sv` | `delayed_pulse_gen` | gain-programming trigger after reset |
| `rtl/pulse_gen.sv` | `pulse_gen` | 20 kHz sample pulse, IDLE/RUN FSM |
| `rtl/adc_ctrl.sv` | `adc_ctrl` | SPI master for amplifier gain and ADC frames |
| `rtl/wavelet_filter.sv` | `wavelet_filter` | 133-tap complex correlator and magnitude squared |
| `rtl/led_ctrl.sv` | `led_ctrl` | eight-threshold LED bar |
| `rtl/wavelet_detector_top.sv` | `wavelet_detector_top` | top level |
| `tb/preamp_adc_model.sv` | `preamp_adc_model` | behavioural model of the amplifier and ADC on the SPI pins |
| `tb/tb_*.sv` | | self-checking testbenches |

The top level's parameters are `CLK_HZ` (10 MHz), `SAMPLE_HZ` (20 kHz),
`DEBOUNCE_HZ` (100 Hz, the debouncer's sampling rate), `GAIN_DELAY` (3) and
`GAIN_CMD` (0x01). `pulse_gen`'s period is `CLK_HZ/SAMPLE_HZ`.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and ends. A watchdog ends
it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/wavelet_pkg.sv tb/tb_wavelet_detector_top.sv \
    --top-module tb_wavelet_detector_top
./obj_dir/Vtb_wavelet_detector_top
```

Replace the testbench name to run the others. Each testbench runs in a few
seconds or less.

| testbench | what it establishes |
|---|---|
| `tb_debouncer` | one output edge per bouncing press/release; single-cycle glitches at every phase are ignored |
| `tb_delayed_pulse_gen` | exactly one pulse, 3 cycles after reset release, `done` set with it |
| `tb_pulse_gen` | no pulse in IDLE; pulses exactly 500 cycles apart, one cycle wide; reset returns to IDLE |
| `tb_adc_ctrl` | gain word 0x01 in 8 bits with SCK low at chip-select release; 34 SCK per frame; 70-cycle read latency; both channels equal the model's previous conversion; 2.9 V → 0x2000, 0.4 V → 0x1FFF; a read requested during gain programming is served afterwards |
| `tb_wavelet_filter` | every `re`, `im`, `resp` equals a 64-bit reference over random and extreme inputs; 2-cycle latency; 6 kHz reaches RESP_MAX, 5.8 kHz about half, 5 and 7 kHz less than RESP_MAX/16 |
| `tb_led_ctrl` | LEDs at, just below and just above every threshold slice, and over random responses; the display is always a bar |
| `tb_wavelet_chirp` | a 1–10 kHz chirp over 10 s (200,000 samples): the peak of 2.63·10¹³ comes at 5.56 s, where the chirp passes 6 kHz; quiet away from the band |
| `tb_wavelet_sweep` | LED count for steady tones from 5.40 to 6.80 kHz in 20 Hz steps, quantised as the ADC would quantise a 1.25 V input: none at or outside 5.5/6.5 kHz, 8 at 6 kHz, rising and falling monotonically and symmetric within one LED |
| `tb_wavelet_detector_top` | whole design at default parameters with the device model: power-up gain programming, BTN 1 reset and re-programming, BTN 2 start, tones at 5.5–6.6 kHz; each filter input is checked against the ADC code, each response against a reference, each LED pattern against the expected bar |

Results of the end-to-end run: the peak LED count is 0, 4, 7, 8, 7, 4 and 0 for
tones of 5.5, 5.8, 5.9, 6.0, 6.1, 6.2 and 6.6 kHz at 1.25 V amplitude. The finer
sweep lights at least one LED from 5.60 kHz to 6.40 kHz, and all eight from
5.94 kHz to 6.06 kHz. The count changes by one LED about every 40 Hz in
between.

The amplifier/ADC model converts with
`code = clip(floor(−G·(Vin − 1.65 V)/1.25 V·8192), −8192, 8191)`. It drives each
frame bit after the rising SCK edge, and it maps gain codes 0…7 to gains 0, −1,
−2, −5, −10, −20, −50 and −100. These details come from general knowledge of the
parts. The source design gives only the window, the inversion and the end codes.

## Departures and choices

These follow the original: the block structure, 10 MHz clock, 20 ksps, 133 taps,
14/33/50-bit widths, x8191 truncated coefficients, the threshold rule, the 49…32
compare, gain 0x01, the 34-bit frame, falling-edge capture, SCK return to zero,
the three-cycle gain delay and the 500-count pulse generator.

These are this implementation's own:

* Morlet width W = 4 and normalisation K, and with them RESP_MAX (see above).
* 32 rather than 34 bits dropped from the thresholds.
* The LED logic is its own module, instantiated beside the filter as in the
  architecture diagram. The original's final build had moved it inside the
  wavelet module to work around a problem with its 50-bit compare.
* Pipeline registers in the filter, a one-cycle ADCON, and holding a request
  that arrives during a transfer.
* The power-on reset, BTN 1 resetting every block, and `pulse_gen` staying in RUN.
* The debouncer's 10 ms sampling period.
* Mapping the SPI pins to SCK, MOSI, MISO and AMP_SHDN, with AMP_SHDN held low.

Not included:

* The clock manager (a vendor primitive).
* The analog amplifier and ADC, which exist only as a testbench model.
* The on-chip logic analyser used to debug the original.

On the original board the SPI lines are shared with other devices, such as a DAC
and flash memory. Those devices' chip selects must be held inactive by the board
constraints or extra top-level outputs, which this RTL does not drive.

## Changing it

* **Another frequency or wavelet width.** Recompute the two tables from the
  formula above, set `NUM_TAPS` to the new length and recompute `RESP_MAX` with
  the same full-scale-tone rule. The elaboration check reports any coefficient
  set that could overflow the 33/50-bit widths.
* **Lower frequencies.** These need proportionally longer wavelets. At 20 ksps a
  1 kHz detector with the same relative bandwidth needs about 800 taps per
  table, six times the current size.
* **Sample rate.** Set `SAMPLE_HZ` on the top level; the coefficients must be
  regenerated for the new rate.
* **Another gain.** Set `GAIN_CMD`, and scale the thresholds if the input level
  changes.
