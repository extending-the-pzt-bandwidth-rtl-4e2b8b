# Resonance-cancelling PZT lock controller with a 24th-order time-multiplexed IIR filter

A piezo-driven mirror is the usual path-length actuator in an optical interferometer. It is
lossless, but its mechanical resonances (tens of kHz) add sharp phase lags. Those lags limit the
gain, and so the bandwidth, of a plain integral lock. This controller places an approximate
inverse of the measured PZT response, F ≈ 1/G, in the fast path of the loop. F cancels up to
twelve resonances, so the loop sees a much flatter actuator. A slow integral branch runs in
parallel and holds the lock point at DC. The filter is a cascade of twelve second-order IIR
sections (24th order). It adds only 13 clocks (104 ns at 125 MHz), which an FIR filter of
comparable frequency resolution could not do.

The same logic also identifies the plant. In identification mode a maximal-length pseudo-random
sequence (M-sequence) drives the PZT, and the controller streams pairs of (noise bit, detector
sample) to a host. The host cross-correlates them to get the impulse response and fits the
zeros and poles. The filter coefficients are then loaded back through the register bank.

The design follows the controller of the paper "Extending the PZT bandwidth of an optical
interferometer by suppressing resonance using a high dimensional IIR filter implemented on an
FPGA" (Okada et al.), which ran on a Zynq-7010 board with 14-bit 125 MS/s converters. The RTL
is SystemVerilog (IEEE 1800-2017), synthesizable, with one module per file in `rtl/`.
Self-checking testbenches are in `tb/`.

## Signal chain

```
            +-----------------------------------------------------------------+
 adc[13:0] -+-> input_stage -> e -+-> cic_decimator -> iir_cascade (F) -> lowpass1 -+
 (125 MS/s) |   (offset, k)       |   (/4, 31.25 MS/s)  12 sections              |
            |                     |                                  mseq_gen ---+-> fast_dac_out -> dac_fast[13:0]
            |                     |                                  (WN, 5 MHz)     (mode mux, sync reg) (125 MS/s)
            |                     +-> integrator -----------------------------------> dac_slow[15:0] (1 MS/s)
            +-> sysid_capture (y, u at each chip) --------------------------------> cap_valid / cap_data
                ctrl_regs <-> bus_* (processor): gains, mode, coefficients, status
```

The two DAC outputs are summed in analog outside the chip. A low-pass on the slow DAC and the
summing amplifier form the PZT drive. Those parts, the converters and the processor are not
part of this RTL.

| module | what it does |
|---|---|
| `pzt_pkg` | widths, fixed-point formats, the `cfg_t` settings struct, `mul_round` and `clip_round` |
| `input_stage` | `e = sat(sat14(adc + offset) * k)`, 2 clocks |
| `cic_decimator` | CIC decimator, R = 4, N = 2, M = 1, gain removed by a 4-bit shift |
| `iir_sos_tdm` | one physical second-order section time-shared by 4 sections |
| `iir_cascade` | 3 `iir_sos_tdm` modules in series, plus an output register: the filter F |
| `lowpass1` | first-order smoother after F, `y += (x - y) >>> shift` |
| `integrator` | saturating integral branch, 16-bit output every 125 clocks |
| `mseq_gen` | 23-stage LFSR white-noise source, one chip per 25 clocks (5 MHz) |
| `sysid_capture` | streams `{u, 0, y}` at each chip until 4,000,000 words have gone out |
| `fast_dac_out` | control / identification multiplexer, rounding to 14 bits, output register |
| `ctrl_regs` | register bank for the processor |
| `pzt_controller` | top level |

## The time-multiplexed second-order section

This is the part that needs the most explanation.

### One section

Each section computes

    y(n) = b0·x(n) + b1·x(n-1) + b2·x(n-2) + a0·y(n-1) + a1·y(n-2)

Here `b*` are the feed-forward coefficients and `a*` the feedback ones, and feedback terms are
added. With poles at r·e^{±jθ}, this gives a0 = 2r·cos θ and a1 = −r².

The RTL uses a transposed structure. Two state words hold the partly summed feed-forward
products: `r2 = b2·x(n-1)` and `q = b1·x(n-1) + b2·x(n-2)`. Two more hold the feedback
products: `ra = a1·y(n-1)` and `w = a0·y(n-1) + a1·y(n-2)`. The output is then

    t = R(b0·x) + q + w,     y = Q(clip(t))

so only one multiplier lies between the input and the output register. The feedback products
are taken from the registered, already rounded output y.

### Number formats

Formats are written as integer bits (sign included) / fractional bits.

| word | format | width |
|---|---|---|
| coefficients | 3/22, range [−4, 4) | 25 |
| products and sums inside a section | 6/36 | 42 |
| section input and output | sign + 25 fractional bits, range [−1, 1) | 26 |

- `R()`: each 26×25 product is rounded half up to 36 fractional bits.
- `clip()`: the 42-bit sum is clipped to [−1, 1).
- `Q()`: the clipped sum is rounded half up to 25 fractional bits, saturating at +1 − 2⁻²⁵.

Products cannot overflow the 6 integer bits: |x| < 1 and |c| < 4, so each product stays below 4
and the sum of five stays below 20. These formats come from the rounding and clipping legend
of the paper's section diagram. The 26-bit input/output word is an interpretation, explained under
"Departures and interpretations".

### Sharing one datapath among four sections

Each section needs five 36×25-bit products, and one product takes two DSP slices. That makes
10 slices per section, so twelve separate sections would need 120 slices, more than the
target FPGA has (80). Instead, each `iir_sos_tdm` has one section datapath and four banks of
coefficients and states.

The filter runs at a quarter of the clock: one sample every 4 clocks, 31.25 MS/s. A sample
entering with `x_valid` goes through the banks in order:

| clock | slot | input |
|---|---|---|
| 0 | 0 | `x` |
| 1 | 1 | registered output of slot 0 |
| 2 | 2 | registered output of slot 1 |
| 3 | 3 | registered output of slot 2 |

`y_valid` rises after clock 3 and starts the next module. Each section step costs one clock
(8 ns), so the rate reduction adds no latency: 12 sections take 12 clocks. One more output
register gives 13 clocks (104 ns).

The feedback-state update for a slot happens one clock after that slot ran, from the
registered `y`. The same slot is not used again until 4 clocks later, so there is no hazard.
This is why `NSEC` must be at least 2 and `x_valid` may come at most once every `NSEC`
clocks. An early `x_valid` is dropped, raises `overrun` and fires a warning assertion.

The CIC decimator produces exactly this 1-in-4 strobe, which is why its ratio is tied to
`NSEC` in the top level.

### Loading coefficients

Coefficient `i` (0..4 = b0, b1, b2, a0, a1) of section `s` (0..11) lives in module `s / 4`,
slot `s % 4`. The states hold products, not past samples. So after coefficients change, the
old states no longer match them: clear the filter (`iir_clr`) after loading. A clear zeroes
every state, drops the samples in flight and zeroes the output register. The testbenches do
the same.

## Other blocks

- **Input stage.** The 14-bit ADC word is read as a fraction with 13 fractional bits. The
  offset is added with saturation. The loop gain k is 18 bits with 12 fractional bits (reset
  value 1.0). Its product with the 14-bit sum has exactly 25 fractional bits and is saturated
  to [−1, 1). Both controller branches use this `e`.
- **CIC decimator.** It has two integrators at 125 MHz, a decimation by 4 and two combs. The
  gain of 16 is removed by a 4-bit shift. Its response is the 7-tap kernel [1 2 3 4 3 2 1]/16,
  sampled every 4th clock. The newest input reaches the output 3 clocks later. Integrators
  wrap in two's complement, which is exact for a CIC.
- **Low-pass.** `y += (x - y) >>> shift` runs every 125 MHz clock on the held filter output.
  The time constant is 2^shift clocks, and shift = 0 is a one-clock pass-through.
- **Integrator.** `acc += e·ki` runs at 125 MHz into a 50-bit saturating accumulator that
  holds a fraction in [−1, 1). `ki` has 24 fractional bits. The top 16 bits are published
  every 125 clocks with `dac_slow_stb`. `int_hold` freezes the accumulator and `int_clr`
  empties it. The branch runs in both modes, which keeps the lock during identification.
- **M-sequence.** The LFSR is x²³ + x¹⁸ + 1, with period 8,388,607. That is longer than one
  4,000,000-sample record, so no chip pattern repeats within a record. A 1 drives `+wn_amp`
  and a 0 drives `−wn_amp`.
- **Capture.** After a start pulse, each chip strobe produces one word `{u, 1'b0, y[13:0]}`,
  with y taken straight from the ADC input. After `NSAMP` words, `done` is set. The stream has
  no back-pressure, so the host link must take one word every 25 clocks. The host then
  computes h(k) = Σ y(m)·u(m−k). The reference measurement averages 200 sets of 20,000
  samples, for about 10 Hz resolution, then Fourier-transforms and fits the result.

## Register map (`ctrl_regs`)

Writes take one clock (`bus_we`, `bus_addr`, `bus_wdata`). `bus_rdata` returns the register at
`bus_addr` one clock later.

| address | contents |
|---|---|
| 0x00 | offset [13:0], signed |
| 0x01 | k [17:0], 12 fractional bits, reset 0x1000 (1.0) |
| 0x02 | ki [17:0], 24 fractional bits |
| 0x03 | low-pass shift [3:0] |
| 0x04 | [0] identification mode, [1] integrator hold, [2] integrator clear, [3] filter clear; writing [4] = 1 pulses "start capture" |
| 0x05 | white-noise amplitude [12:0] |
| 0x06 | read: [0] capture busy, [1] capture done; sticky events [8] filter clip, [9] filter overrun, [10] integrator saturated, [11] input saturated, [12] fast DAC saturated. Write 1 to a sticky bit to clear it. |
| 0x80 + 8·s + i | coefficient i of section s, [24:0] |

## Timing

All logic runs on one 125 MHz clock with a synchronous, active-high reset.

| path | clocks |
|---|---|
| input stage | 2 |
| CIC (newest sample to output) | 3 |
| wait for the next decimation strobe | 0–3 |
| filter F, sections | 12 |
| filter F, output register | 1 |
| low-pass | 1 |
| DAC output register | 1 |
| **ADC port to `dac_fast`** | **20 to 23** (measured in the end-to-end test) |

The converters' own pipelines (7 clocks ADC, 3 clocks DAC on the reference board) and the
analog front end come on top of this.

## Departures and interpretations

- **Coefficient names.** The section diagram calls the feed-forward coefficients b and the
  feedback coefficients a. The text's filter equation uses the opposite letters. The RTL
  follows the diagram.
- **Internal word width.** The text speaks of 36-bit internal signals, while the diagram
  prints 6/36. The RTL reads 36 as the fractional width and uses 42-bit words.
- **Section input/output word.** A "0 integer bits" signal format cannot hold a sign bit. The
  RTL therefore uses a sign bit plus 25 fractional bits (26-bit words).
- **Rounding.** Rounding is half up throughout. The exact rounding mode is not given.
- **Own choices.** These are not specified by the source design, so they are this design's
  own: CIC order and delay, low-pass structure, integrator rate and gain format, LFSR length
  and taps, register map and bus, capture word layout, reset behaviour, and the clear
  semantics.
- **Multipliers.** Products are written as generic multiplications. Splitting each one over
  two DSP slices is left to synthesis.
- **Dead band of low-frequency sections.** This is an observed consequence of the formats,
  not a change. Each section feeds back its output after rounding to 25 fractional bits. A
  narrow pole pair at low frequency has 1 − a0 − a1 close to zero. Once its input has died
  away, such a section can hold a constant output of up to 0.5 LSB / (1 − a0 − a1). For a
  3 kHz-wide pole pair at 21.6 kHz this is about 8·10⁻⁴ of full scale. The constant is small
  against a loop error signal, and the integrator path removes it. Keeping more fractional
  bits in the fed-back word would shrink it.

## Verification

Each testbench checks its module against a model written independently, and prints
`TB_RESULT checks=N failures=M`.

- `tb_iir_sos_tdm` and `tb_iir_cascade` compare every output against a direct-form integer
  model of the same recurrence (`tb/iir_ref_pkg.sv`). They also check the exact latencies (4
  and 13 clocks), the clip counts (equal to the model's), overrun, clear, and the routing of
  coefficients to sections.
- `tb_cic_decimator` checks every output against the convolution with [1 2 3 4 3 2 1]/16, and
  the spacing of the strobes.
- `tb_pzt_controller` runs the whole controller end to end, with a 2,000-sample record:
  - it programs the 60 coefficients over the bus;
  - it compares every new `dac_fast` value bit for bit against a chain of models (input
    stage, CIC convolution, twelve reference sections, rounding), and every `dac_slow` update
    against an integrator model;
  - it measures the latency;
  - it makes each mechanism happen and counts it: filter clipping, DAC saturation, input
    saturation, integrator saturation, integrator hold, low-pass smoothing, the switch into
    identification mode and back, coefficient loading, and a complete capture record.
- `tb_pzt_full` is the same sequence with every parameter at its default, including the full
  4,000,000-sample record (about 10⁸ clocks, two minutes of simulation).
- `tb_inverse_filter_workload` loads a 24th-order cancelling filter into the full-size
  cascade:
  - it assumes twelve plant resonances (20 to 240 kHz, 1 kHz wide), with an anti-resonance
    8 % above each;
  - it measures the gain at all 24 zero and pole frequencies with a sine and a lock-in;
  - the measured gain must be within 2 % of the response of the quantised coefficients (it
    is within 0.2 %), with no clipping;
  - the quantised response must be within 10 % of the unquantised design (it is within 4 %,
    worst at 20 kHz);
  - the constant left after an impulse must be inside the dead band described above.
- `tb_sysid_workload` runs one identification set through the whole controller:
  - a plant, modelled as a short impulse response on the 5 MHz chip grid, feeds `dac_fast`
    back into `adc`;
  - a 20,000-sample record is cross-correlated with the M-sequence;
  - each recovered tap must be within 0.03 of the plant's.
- `tb_closed_loop_workload` runs both controller branches against plant models:
  - **integral lock.** A unit-gain plant is driven by the slow DAC. The loop must null a
    DC step of 0.3 to within 3 ADC LSB. The residual of a 500 Hz disturbance must match
    the sensitivity of an integrator loop with crossover ki·125 MHz (measured 0.1024,
    predicted 0.1024);
  - **resonance cancellation.** A 100 kHz resonance, 3 kHz wide, is driven by the fast DAC.
    With F passing the signal through, the measured |FG| at 100 kHz is 33.3. With one
    section loaded to cancel the resonance, it is 0.500, as predicted for the smooth
    ω0²/(s + ω0)² that remains. Both are within 5 % of the prediction.

Not covered: a closed loop through the real interferometer, whose optics, analog front end and non-minimum-phase PZT response have no model here, and the host-side analysis (fitting and filter design).

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/pzt_pkg.sv tb/iir_ref_pkg.sv \
  tb/tb_pzt_controller.sv --top-module tb_pzt_controller
./obj_dir/Vtb_pzt_controller
```

For another testbench, replace the file and top name. The block testbenches take seconds.

The sizes are parameters whose defaults are the reference numbers:

- `NMOD`, `NSEC` on `pzt_controller` and `iir_cascade`: sections = NMOD × NSEC. Latency is
  NMOD·NSEC + 1 clocks and the sample rate is 125 MHz / NSEC.
- `NSAMP` on `pzt_controller`: the record length.

The word formats are in `pzt_pkg`.
