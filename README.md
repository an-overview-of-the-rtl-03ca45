# A multirate decimation filter for a sigma-delta audio ADC

An oversampling sigma-delta modulator digitises audio at 6.144 MHz, 128 times
the 48 kHz output rate. It trades word length for rate: each sample is a short
word full of noise that the modulator has pushed out of the audio band. The
decimation filter brings the stream down to the output rate. It removes the
out-of-band noise before that noise can alias, and turns the short words into
long PCM words. This RTL does that in four stages:

| stage | ratio | rate in → out | what it contributes |
|---|---|---|---|
| CIC filter, N = 5, M = 1 | 16:1 | 6.144 MHz → 384 kHz | cheap, multiplier-free bulk filtering and word growth |
| first half-band FIR, order 4 | 2:1 | 384 → 192 kHz | further anti-alias filtering |
| droop correction FIR, order 8 | 2:1 | 192 → 96 kHz | cancels the CIC's pass-band sag |
| second half-band FIR, order 40 | 2:1 | 96 → 48 kHz | the sharp band edge at the output rate |

Most of the hardware runs at the highest rate, and that is where most of the
design effort goes. At that rate the filter is a Cascaded Integrator-Comb
(CIC, Hogenauer) filter: it needs only adders and registers. Three techniques
make it fast:

* **Pruning (truncation).** The integrator registers get narrower towards the
  output.
* **A modified carry look-ahead adder (MCLA)** does every addition.
* **Pipelining.** There is a register after every adder.

The CIC exists in two forms: `cic_truncated` (pruned widths, unpipelined) and
`cic_pipelined` (full 25-bit width, pipelined). The top level uses the
pipelined form by default.

## The CIC filter

### Transfer function and word growth

A CIC decimator is N integrators `1/(1 - z^-1)` at the input rate, a
down-sampler by R, and N combs `1 - z^-M` at the output rate. By the noble
identity, this equals the FIR filter

    H(z) = ((1 - z^-RM) / (1 - z^-1))^N = (1 + z^-1 + ... + z^-(RM-1))^N

followed by the down-sampler. With N = 5, M = 1 and R = 16 the filter is a
76-tap FIR whose taps are all integers and sum to 16^5 = 2^20. An input word of
B_IN bits therefore needs B_IN + 20 bits at the output. With B_IN = 5 that gives
the 25-bit register used throughout.

### Why the integrators may overflow

Each integrator on its own is unstable: a constant input ramps it without
bound. The registers are allowed to wrap modulo 2^25. The combs then take
differences of these wrapped values. Modular addition and subtraction are
exact, so the final result is correct whenever the true output fits in 25 bits.
Every CIC result therefore fits, because the gain is exactly 2^20. No
saturation logic is needed inside the CIC. The testbenches feed long
full-scale runs, which wrap the integrators thousands of times.

### Pruned form (`cic_truncated`)

The integrators are 25, 22, 20, 18 and 16 bits wide, and the combs are 16 bits.
Every register stays MSB-aligned to the 25-bit word. When a stage is narrower
than the one before it, it simply drops the previous stage's low bits:

* bits 24..3 feed integrator 2
* bits 24..5 feed integrator 3
* bits 24..7 feed integrator 4
* bits 24..9 feed integrator 5

The top bits, and with them the wrap-around argument, stay exact. Only
truncation noise enters.

The output is bits 24..9 of the full-precision result, plus this noise. The
worst case for these widths is 1182 output LSBs. It is the sum over the four
truncation points of the dropped LSB weight times the larger of the positive
and negative tap sums of the filter from that point to the output. The noise
is zero-mean in the steady state, because the comb section removes DC. Random
stimulus shows errors of a couple of hundred LSBs at most.

In this form the integrator's register sits in the feedback loop, and the
stage output is the adder output. The five integrators are therefore one
combinational chain of five adders, and so are the five combs.

### Pipelined form (`cic_pipelined`)

All stages are 25 bits wide. Each integrator's register is in the forward path
and is its output: `acc <= acc + x`. Each comb has a register after its
subtractor. So no path holds more than one 25-bit adder. The integrators need
no pipeline registers beyond their own state.

The registers advance only on sample strobes: input strobes for the
integrators, decimated strobes for the combs. Each one adds a *sample* of delay
rather than a clock of latency:

* each integrator stage adds one input-rate delay, `z^-1 / (1 - z^-1)`;
* each comb after the first adds one decimated sample.

Let `y_full[n]` be the full-precision FIR output above, with `x[0]` the first
input after reset. Then output number m (m = 0, 1, 2, ...) of the pipelined
filter is exactly

    cic_out[m] = y_full[16 m - 54]

The pipelining shifts the decimation phase by 5 input samples and delays the
result by 4 output samples. It does not change the filter. The unpipelined
`cic_truncated` output m belongs to input sample 16m + 15.

In both forms `out_valid` rises on the clock edge after the edge that takes
the 16th input sample of the group.

### Input word

The modulator's output format is not fixed by the design this RTL implements.
`B_IN = 5` (two's complement, -16..15) is chosen so that B_IN + N·log2(R) equals
the 25-bit register width. A single-bit modulator would be fed as ±1 values.
The registers could then shrink by four bits, but the RTL keeps the 25-bit
configuration.

## The modified carry look-ahead adder

A full carry look-ahead adder over 25 bits would need very wide gates. The
MCLA limits look-ahead to groups of four bits:

* `pfa` (partial full adder) forms each bit's generate `g = a&b`, propagate
  `p = a^b` and sum `s = p ^ c`.
* `cll_2` computes the four carries of a group, and its carry-out, from g, p
  and the group carry-in in two gate levels.
* `mcla_4` is four PFAs plus one CLL. Groups pass carries to each other, so
  the carry ripples only from group to group.

The 25-bit adder is put together as follows:

    bits 15..0   MCLA_16_1 (four 4-bit groups)          -> Co4
    bits 19..16  4 PFA + CLL                             -> Co5
    bits 23..20  4 PFA + CLL                             -> Co6
    bit  24      SPFA (sum only; the carry out of a wrap-around adder is unused)

`mcla_adder #(WIDTH)` builds other widths by the same rule, for the pruned
stages at 22, 20, 18 and 16 bits:

1. MCLA_16_1 for the low 16 bits;
2. as many whole 4-bit groups as fit below the MSB;
3. PFAs rippling into an SPFA for the remaining bits.

A carry-in pin lets the combs subtract as `x + ~d + 1`. The adder is written
as explicit gate equations, so a synthesis tool maps the given structure
rather than its own adder.

## The FIR stages

All three FIR stages decimate by two. Each keeps a delay line of ORDER+1
samples. It shifts one sample in per input strobe, and on every second input
(inputs 1, 3, 5, ... after reset) it evaluates the whole sum in parallel on
the following clock. Each stage:

* exploits the coefficient symmetry by adding the two samples that share a
  coefficient before multiplying;
* rounds half up from 17 fractional bits;
* saturates to 25 bits and pulses a `sat` flag when it does.

Saturation is needed here, unlike in the CIC: filters with negative taps
overshoot on full-scale steps.

**Half-band filters (`halfband_decim`).** A half-band low-pass filter has its
cut-off at a quarter of the input rate. Every tap at an even distance from the
centre is zero, and the centre tap is exactly 0.5. The module therefore
multiplies only the taps at distances 1, 3, 5, ..., and takes the centre tap
as a shift. Together with computing only the kept outputs, that is roughly half
the work of a general filter of the same order.

* First half-band filter (order 4): only the ±1 taps survive, giving
  `{0.25, 0.5, 0.25}`.
* Second half-band filter (order 40): its outermost taps (±20) are at an even
  distance and hence zero. The ten odd-distance taps come from a
  Kaiser-windowed (β = 4.5) half-band sinc, `h[k] = 0.5·sinc(k/2)·w[k]`. They
  are rounded to 17 fractional bits, and the ±1 pair is adjusted so that the
  taps sum to exactly 1.

**Droop correction (`droop_fir`).** The CIC's response
`|sin(16πf/fs) / (16 sin(πf/fs))|^5` sags by 0.2 dB at 20 kHz, and the first
half-band filter adds another 0.23 dB. The order-8 droop filter's pass band is
the inverse of that sag: +0.42 dB at 20 kHz relative to DC. Its nine symmetric
taps `{1201, 215, -17683, 35314, 92978, ...}/2^17` are a weighted
least-squares fit with these targets:

* `1 / (CIC × HB1)` over 0–20 kHz;
* zero from 76 kHz to 96 kHz (the band that folds onto 0–20 kHz in its 2:1
  decimation);
* unity gain at DC.

The coefficients live in `decim_pkg`. They are this design's own, because the
design description gives only the filter orders.

With these coefficients the whole chain is flat to 0.035 dB peak-to-peak over
0–20 kHz. The second half-band filter rejects 28–48 kHz by 50 dB. A ripple
below 0.0002 dB, a figure quoted for the original design, would need other
coefficients, probably longer ones. The order-40 filter's transition band is
what limits both numbers.

## Interfaces and timing

The whole chain runs on one clock of at least 6.144 MHz, with an asynchronous
active-low reset `rst_n` that clears every register.

| port of `decimator_top` | dir | width | meaning |
|---|---|---|---|
| `sd_valid`, `sd_data` | in | 1, 5 | one modulator word per strobe; the strobe may be high every clock |
| `cic_valid`, `cic_data` | out | 1, 25 | CIC output, one per 16 inputs |
| `pcm_valid`, `pcm_data` | out | 1, 25 | 48 kHz output, one per 128 inputs |
| `sat[2:0]` | out | 3 | saturation pulses of HB1, droop and HB2 |

Each stage adds one clock between its input strobe and its output strobe:

* the CIC: its down-sampler register, then its output;
* each FIR: the register that takes the input, then its computation.

A PCM word therefore appears 7 clocks after the edge that takes the 128th
input of its group. There is no back-pressure: a stream filter cannot stall
its source.

`CIC_MODE` (a `decim_pkg::cic_mode_e`) selects the CIC:

* `CIC_PIPELINED`: the default, with 25-bit output.
* `CIC_TRUNCATED`: its 16-bit result is placed in the top bits of the 25-bit
  word, so both modes keep the same scale.

The sigma-delta modulator itself is analog and is not part of the RTL.

## How far this follows the original design

Taken from the original design:

* the rates and ratios 16-2-2-2 and the stage order;
* the CIC parameters N = 5, M = 1, R = 16;
* the pruned widths 25/22/20/18/16 with 16-bit combs;
* the 25-bit pipelined variant, with its register placement;
* the MCLA's partition into MCLA_16_1, two 4-bit PFA/CLL groups and an SPFA;
* the FIR orders 4, 8 and 40, and the half-band property.

This design's own choices:

* the 5-bit input word;
* every FIR coefficient;
* all FIR word widths, rounding and saturation;
* the valid-strobe interface and reset;
* the way the MCLA generalises to other widths;
* the inside of MCLA_16_1 (four chained 4-bit groups);
* the carry-in pin;
* the sample-strobed pipelining.

Two points in the original are inconsistent, and the RTL picks one reading of
each:

* The pipelined CIC is called *truncated* but drawn with 25 bits in every
  stage. The RTL uses 25 bits.
* The formula for the output MSB position would give a 6-bit input for a
  25-bit MSB. The RTL takes 25 bits as the register width and so uses a 5-bit
  input.

The figures quoted for the original were speed on an FPGA (MCLA 220 MHz,
pipelined CIC 163 MHz against 107 MHz) and SNR from a system model (145 dB).
Neither was measured here.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
Its references are computed independently of the RTL structure.

| testbench | what it establishes |
|---|---|
| `tb_mcla_adder` | sums at widths 25/22/20/18/16 against `a+b+ci mod 2^W`: carry chains across every group boundary, and random operands |
| `tb_cic_pipelined` | bit-exact against the 76-tap direct convolution at `16m-54`; output rate; 1-clock strobe latency; integrator wrap-around; gaps in the input strobe |
| `tb_cic_truncated` | bit-exact against a word-level model of the pruned arithmetic; stays within the 1182-LSB truncation bound of full precision; rate and latency |
| `tb_halfband_decim` | both half-band filters against direct-form convolution; unity DC gain; saturation high and low |
| `tb_droop_fir` | against direct-form convolution; unity DC gain; pass-band lift at 20 kHz; saturation |
| `tb_decimator_top` | both CIC modes end to end (sine, then full-scale steps); every CIC and PCM word; 7-clock latency; counts wrap-arounds, strobe gaps and saturations, and fails if any never happens |
| `tb_decimator_top_full` | default configuration, a 5 ms dithered 1 kHz tone; bit-exact PCM, and the fitted tone amplitude within 1% of the input's |
| `tb_decimator_snr` | default configuration fed by a behavioural third-order sigma-delta modulator (`tb/sd_modulator_model.sv`); bit-exact PCM, tone amplitude, and an SNR of at least 120 dB over 0–24 kHz; also the pruned-CIC chain, bit-exact, with its SNR reported |

`tb/decim_ref_pkg.sv` holds the stream-level reference model that the two
chain-level tests share.

In the tone test the SNR it prints (about 48 dB) reflects the stimulus, not
the filter. The stimulus is a 5-bit rounded sine with white dither, not the
noise-shaped output of a real modulator.

The SNR test gives a realistic input instead. Its modulator model is the
simplest third-order loop: error feedback with noise transfer function
`(1 - z^-1)^3` and a 5-bit quantiser. It is not a model of a particular analog
design. With a 1 kHz tone at -4.1 dBFS the chain reaches 135.3 dB SNR over
0–24 kHz. The remaining noise (1.3 output LSB rms) is above the 0.29 LSB that
output rounding alone would leave. Most of it is shaped modulator noise that
the droop filter's modest stop band (about -14 dB above 76 kHz) and the short
first half-band filter let alias into the audio band. The original design
reported 145 dB with its own coefficients. Longer or better-optimised FIR
stages are where that gap would be closed.

The same test runs a second chain with the pruned CIC. It reaches only about
68 dB. With a 5-bit input, the truncation noise of the 22/20/18/16-bit stages
lands in the audio band. The 16-bit comb word caps the result near 98 dB in
any case. So the pruned widths suit a narrower input word or a lower
resolution target. This is also why the pipelined 25-bit filter is the
default.

To run a test with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/decim_pkg.sv tb/decim_ref_pkg.sv tb/tb_decimator_top_full.sv \
        --top-module tb_decimator_top_full
    ./obj_dir/Vtb_decimator_top_full

The same command works for every testbench; substitute its name. All run in
well under a second.

## Changing it

* New coefficients go in `decim_pkg` as integers with 17 fractional bits.
  Half-band filters list only the odd-distance taps; the droop filter lists
  the first half of its taps plus the centre. Keep the sums at 2^17 for unity
  gain. The FIR testbenches check the DC gain and read the coefficients from
  the package.
* `halfband_decim` takes any `ORDER` with `NODD = (ORDER/2+1)/2` coefficients.
  `droop_fir` takes any even `ORDER` with `ORDER/2+1` coefficients.
* A different CIC ratio changes `R`. The register width must then grow to
  `B_IN + 5·log2(R)`, and the pruned widths need to be recomputed.
