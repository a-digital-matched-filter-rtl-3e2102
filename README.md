# A digital matched filter for reverse-time chaos

A reverse-time chaotic oscillator is a damped RLC tank driven by a random
binary symbol sequence s_n = ±1, one symbol per oscillation period. Its output
has a closed-form solution: it is a sum of copies of one fixed waveform, the
*basis pulse* u_g(t), each shifted to its symbol's start time and weighted by
the symbol:

    u(t) = Σ_n  s_n · u_g(t − n)        (time in oscillator periods)

The waveform looks chaotic, but it is linear in the symbols. A receiver can
therefore detect it with an ordinary linear matched filter whose impulse
response is the basis pulse reversed in time. Each transmitted symbol then
shows as a positive or negative peak of the filter output. Simple threshold
logic on that output rebuilds the symbol sequence.

This repository holds synthesizable SystemVerilog for such a receiver:

* a 100-tap direct-form FIR filter matched to the basis pulse. Its multipliers
  are replaced by shift-and-add networks: each constant coefficient is written
  as a sum of signed powers of two (SOPOT);
* a post-processor that uses three thresholds (high, midpoint, low) to turn
  the filter output into the recovered symbol stream.

The filter's architecture follows the published description of this receiver
(J. P. Bailey, A. N. Beal, R. N. Dean, M. C. Hamilton, *A Digital Matched
Filter for Reverse Time Chaos*):

* direct form;
* SOPOT weights;
* 100 coefficients spanning a pulse of 3 periods;
* 10-bit input;
* 32-bit internal arithmetic.

Where that description is silent or inconsistent, this code makes its own
choices. They are marked below and at the top of each source file.

## The basis pulse and where the coefficients come from

Every coefficient comes from the basis pulse. With damping β = ln 2 and
ω = 2π (one period per time unit), the pulse is the tank's response to one
symbol period of forcing:

    u_g(t) = 0                                               t < 0
    u_g(t) = 1 − e^(−βt) · (cos ωt + (β/ω) sin ωt)           0 ≤ t < 1
    u_g(t) = (e^β − 1) · e^(−βt) · (cos ωt + (β/ω) sin ωt)   t ≥ 1

* During the first period the tank is driven, and the pulse rises to its
  maximum 1 + e^(−β/2) ≈ 1.707 at t = 0.5.
* After the forcing ends, the pulse rings down with an envelope that halves
  every period (e^(−β) = 1/2).
* Scaled to a peak of 1, the pulse reads 0.29 at t = 1, −0.21 at t = 1.5 and
  0.15 at t = 2.

The published formula prints the pulse in a different form: a factor
(1 − e^(−βt))/(ω² + β²) in front of the bracket. That form is negative at
t = 0.5, while the published plot of the pulse has its maximum there. The form
above matches the plot and the standard solution, so it is the one used here.

The matched filter is the pulse reversed over its length T = 3 periods:
h(t) = u_g(3 − t). Beyond 3 periods the pulse has decayed to 1/8 of its
ringing amplitude. A longer filter has been found to give no better bit error
rate.

**Sampling and quantisation.**

* The N = 100 taps are spread evenly over the 3-period pulse, so the sample
  spacing is 3/100 period (33.3 samples per oscillator period).
* Tap k holds the coefficient

      f[k] = round( 127 · u_g((N − k) · T/N) / 1.707 ),   k = 0 … 99

  so f[0] = u_g(3) is the oldest part of the pulse and f[99] = u_g(0.03) is
  its start.
* The coefficients are signed 8-bit values. The largest is 127, at
  k = 83 and 84 (t ≈ 0.5).
* Some sample values: f[0] = 9, f[41] = 0, f[48] = −24, f[88] = 106,
  f[99] = 1. The sum of |f[k]| is 3306.

None of this is stored as a table. The package `rtmf_pkg` evaluates the
formula with `$exp`, `$cos` and `$sin` in constant functions while the design
is elaborated. Changing `N_TAPS`, `PULSE_LEN` or `COEF_W` recomputes every
coefficient.

**SOPOT decomposition.** Each integer coefficient is rewritten in canonical
signed-digit form. This is a SOPOT representation f = Σ a_i·2^i with
a_i ∈ {−1, 0, +1}, where no two adjacent digits are non-zero. It is exact,
and it uses the fewest non-zero terms: at most 4 for an 8-bit value. For
example, 127 = 2^7 − 2^0 and 106 = 2^7 − 2^5 + 2^3 + 2^1. `rtmf_pkg::csd_pos`
and `csd_neg` return the bit masks of the +1 and −1 digits. Each weight adds
or subtracts one left-shifted copy of the sample per non-zero digit.

The original work generated its SOPOT terms with an offline script, based on a
published decomposition algorithm that is not reproduced here. The terms it
produced may differ from the canonical form. The product values cannot differ,
because both forms represent the same integer coefficient exactly.

## Filter datapath

    x[n] ──┬──[z⁻¹]──┬──[z⁻¹]── … ──[z⁻¹]──┐
           │         │                     │
         f[0]      f[1]                f[N−1]      (shift-and-add weights)
           │         │                     │
           └───────(+)──────(+)── … ─────(+)──[reg]── y[n]

* `tap_delay_line`: 99 registers in series, one per sample clock. Tap 0 is the
  undelayed input, so the newest sample reaches f[0] in the same cycle.
* `sopot_weight`: one instance per tap. It is combinational, with `COEF` as a
  parameter. Taps whose coefficient rounds to 0 synthesise to nothing.
* Adder chain: a running sum from f[0] to f[N−1], exactly as drawn in the
  filter's block diagram. No pipeline registers are inserted.
* Output register: y[n] is registered once. It appears on `y_out` /
  `mf_out` after the clock edge that samples x[n].

**Widths.** Samples are 10-bit two's complement. All sums are 32 bits. The
worst case is 512 × 3306 = 1 692 672, which needs 22 bits, so the 32-bit path
has ample headroom and never overflows. With inputs near full scale the filter
output reaches a few times 10^5 to 10^6.

**Throughput.** One sample per clock; there is no stall or handshake. The
published design runs at 180 MHz. The unpipelined chain of 100 adders is the
critical path, and its speed has not been analysed here. A transposed or
pipelined form would be the usual remedy. It was not applied, so that the
structure stays the direct form described.

## Recovering the symbols

The filter output peaks once per symbol, about N samples after that symbol's
pulse starts. A +1 symbol gives a positive peak and a −1 symbol a negative
one. Between peaks the output rings, and one excursion past a threshold can
last many samples. `sn_reconstruct` separates events with a midpoint level:

1. If the output changes side of `thr_mid` between two consecutive samples,
   the detector is **armed**. The sides are "y ≥ thr_mid" and
   "y < thr_mid".
2. The first sample of an armed detector that is above `thr_high` gives a
   decision **+1**; the first below `thr_low` gives **−1**. Either one
   disarms the detector. Every other sample gives decision **0**.
3. The recovered symbol `s_rec` is the last non-zero decision. `s_valid`
   rises with the first decision.

A +1 decision may follow a +1 decision: a new symbol with the same value,
detected after a midpoint crossing. The detector starts armed after reset.
The comparisons are strict, so a value equal to a threshold does not fire.

The thresholds are inputs because they depend on the signal level at the
receiver; the original work set them by inspecting the filter output. The
testbenches use ±30 % of the filter's response to one full pulse, with the
midpoint at 0. In a floating-point model of the same chain, any setting
from 20 % to 40 % gave no symbol errors, both without noise and at an SNR
of 0 dB per sample.

The recovered sequence is the transmitted one delayed by the filter. At
33.3 samples per period that delay is about 75–90 samples: the decision fires
as the output passes the high or low threshold, slightly before the peak.

## Top level: `rtmf_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | sample clock, one sample per cycle (180 MHz in the original) |
| `rst_n` | in | 1 | synchronous, active-low reset: clears the delay line, the output register and the detector |
| `adc_data` | in | 10 | signed sample of the received waveform, from an external ADC |
| `thr_high`, `thr_mid`, `thr_low` | in | 32 | signed thresholds of the symbol recovery |
| `mf_out` | out | 32 | matched filter output y[n], one clock after x[n] |
| `decision` | out | 2 | `rtmf_pkg::decision_e`: 2'b01 = +1, 2'b11 = −1, 2'b00 = none; one clock after `mf_out` |
| `s_rec` | out | 1 | recovered symbol (1 = +1, 0 = −1), same timing as `decision` |
| `s_valid` | out | 1 | high once the first symbol has been decided |

Parameters (all modules share the names):

| parameter | default | meaning |
|---|---|---|
| `N_TAPS` | 100 | number of FIR taps (from the published design) |
| `PULSE_LEN` | 3.0 | pulse length covered by the taps, in oscillator periods (published) |
| `IN_W` | 10 | input sample width (published) |
| `ACC_W` | 32 | width of products, sums and output (published) |
| `COEF_W` | 8 | coefficient width; the peak coefficient is 2^(COEF_W−1) − 1 (own choice) |

`N_TAPS / PULSE_LEN` sets the number of samples per oscillator period. It must
match the ratio of the sample clock to the transmitter's symbol rate.

Not part of the RTL:

* the transmitter (an analog RLC tank with a digital symbol source);
* the ADC.

The testbenches model the transmitter from the closed-form solution above.

## Where this design departs from, or fills in, the published one

* **Basis pulse formula:** the form given above is used, not the misprinted
  one (see the first section).
* **Tap spacing:** the original states a 180 MHz clock for a 1.8 MHz
  oscillator with 100 coefficients. That is 100 samples per period, which
  could cover only a 1-period pulse. The same work selects a 3-period pulse
  as best. Here the 100 taps cover 3 periods, so a 1.8 MHz transmitter would
  need a 60 MHz sample clock. Both numbers are parameters.
* **Pulse length:** the text compares lengths of 3 to 5 periods and picks 3.
  The accompanying plot is labelled 2, 3 and 4 and shows its lowest curve
  under "2". This design follows the text and the plotted matched filter
  response, which spans 3 periods.
* **Coefficient width** (8 bits), rounding and normalisation are own choices.
  No coefficient word length was published.
* **SOPOT algorithm:** canonical signed digits, computed during elaboration.
* **Registered output**, **synchronous reset** and **signed input format** are
  own choices.
* **Symbol recovery in hardware:** the original describes the threshold
  post-processing but simulated only the filter in HDL. The arming rule is
  from the description. These details are this design's: what counts as a
  crossing, the initial state, strict comparisons, and repeated same-sign
  decisions.
* **No timing closure** at 180 MHz is claimed (see Throughput).

## Verification

Every testbench checks its results against values computed independently of
the RTL. `tb_ref_pkg` builds the pulse from 2^(−t) instead of e^(−βt) with
β = ln 2. Each testbench ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | what it shows |
|---|---|
| `tb_tap_delay_line` | every tap equals the input k clocks ago, over 1000 random samples; reset clears mid-stream |
| `tb_sopot_weight` | ten coefficients (0, ±1, 127, −128, ±85, …) against true multiplication for extreme and random samples; canonical forms have at most 4 terms |
| `tb_fir_matched_filter` | impulse response equals the coefficient list, with exactly one clock of latency; spot coefficient values; 3000 random samples and a worst-case full-scale pattern against direct convolution |
| `tb_sn_reconstruct` | directed sequence for each rule (first excursion, no crossing, repeat after crossing, values equal to thresholds), then 400 random oscillation segments under symmetric and asymmetric thresholds against a reference model |
| `tb_rtmf_top` | end to end at the default size, every output checked against convolution and a reference model of the threshold rule (see below) |
| `tb_ber_sweep` | symbol error rate against Eb/N0 from −4 to 10 dB, 3000 symbols per point (see below) |
| `tb_pulse_length` | error rate of 100-, 133- and 167-tap filters (3, 4, 5 periods) on the same waveform (see below) |

`tb_rtmf_top` runs five scenes:

* **A.** Pulses +1, +1, −1 among small random samples. The output peaks
  exactly N samples after the first pulse starts, and the scene yields
  exactly two +1 decisions and one −1 decision.
* **E.** One pulse in noise of equal power (SNR 0 dB). The peak stays in
  place.
* **B.** The noise-free chaotic waveform, 200 symbols. Error rate 0.
* **C.** The chaotic waveform at SNR 0 dB per sample. Error rate 0.
* **D.** A reduced-amplitude waveform with a clipping burst.

It counts each mechanism (+1 and −1 decisions, excursions ignored for lack of
a crossing, repeated symbols, clipped inputs) and fails if any of them never
occurs.

`tb_ber_sweep` measured these error rates (Eb = signal energy per symbol,
N0/2 = noise variance per sample, noise clipped at the 10-bit range):

| Eb/N0 (dB) | −4 | −2 | 0 | 2 | 4 | 6 | 8 | 10 |
|---|---|---|---|---|---|---|---|---|
| error rate | 0.23 | 0.16 | 0.099 | 0.056 | 0.019 | 0.0077 | 0.0017 | 0 (of 2980) |

This agrees with the published trend: about 10^−1 at 0 dB, falling to about
10^−3 near 8 dB. The exact numbers depend on the thresholds and the random
seed.

`tb_pulse_length` runs three receivers side by side on the same noisy
waveform. Their filters have 100, 133 and 167 taps at the same sample
spacing, covering 3, 4 and 5 periods of the pulse. With 1975 symbols per
point their error rates agree within the statistical spread: about 0.099 at
0 dB, 0.04 at 3 dB, 0.007 at 6 dB and 0.001 to 0.0015 at 9 dB. So longer
filters bring no gain, which supports the choice of 3 periods. The clear
advantage of the shortest pulse in the published comparison is not seen
here. That comparison may have used a different quantisation or different
thresholds.

Each block was also run against a deliberately broken copy of its module,
and its testbench failed. The faults were: a sign error in the SOPOT
subtraction, a skipped delay stage, coefficients not time-reversed, the
midpoint rule removed, and two thresholds swapped at the top.

## Simulating

With Verilator 5 (the testbenches use delays, so `--timing` is needed):

    verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/rtmf_pkg.sv tb/tb_ref_pkg.sv tb/tb_rtmf_top.sv \
        --top-module tb_rtmf_top -o sim
    ./obj_dir/sim

Replace `tb_rtmf_top` with any other testbench name. `rtmf_pkg.sv` and
`tb_ref_pkg.sv` must come first because other files import them. Every
testbench runs in seconds.

To lint the RTL:

    verilator --lint-only -Wall -y rtl +libext+.sv rtl/rtmf_pkg.sv rtl/rtmf_top.sv

## Files

* `rtl/rtmf_pkg.sv`: constants, the decision type, the pulse formula, the
  coefficient function and the canonical signed-digit masks.
* `rtl/tap_delay_line.sv`, `rtl/sopot_weight.sv`, `rtl/fir_matched_filter.sv`:
  the filter.
* `rtl/sn_reconstruct.sv`: the symbol recovery.
* `rtl/rtmf_top.sv`: the receiver top level.
* `tb/tb_ref_pkg.sv`: the testbenches' own pulse and coefficient model, and a
  Gaussian noise source.
* `tb/tb_*.sv`: the testbenches listed above.
