# Schottky tune measurement backend for a ramping proton synchrotron

A transverse Schottky pickup sees the betatron motion of the beam as weak
sidebands beside each revolution harmonic n f0, at (n - q) f0 and (n + q) f0,
where q is the fractional betatron tune. In a fast-ramping machine such as a
proton-therapy synchrotron, f0 climbs from 4 MHz to 7.5 MHz in about 0.35 s,
the tune itself may drift or jump, and the sidebands sit 10-20 dB below the
noise. A single long FFT cannot be used (the lines move while it integrates)
and the highest peak in a short spectrum is often noise.

This design measures q once per short window (1 ms is the intended setting)
and does three things to survive the low signal-to-noise ratio:

1. **Spectral conditioning.** The window is split into FFT batches whose power
   spectra are averaged, the average is smoothed with a Gaussian whose width
   is matched to the sideband width, and every sideband that falls inside the
   pickup band is moved onto one common tune axis q in [0, 0.5). Once on the
   tune axis, spectra taken at different f0 can be compared and averaged.
2. **Two independent tune estimators.** One keeps an exponential moving
   average (EMA) of the tune-axis spectrum over windows and takes its global
   maximum. The other, a weighted linear combination (WLC), looks at all
   local maxima of the current spectrum and picks the one that best balances
   "close to where the tune was" against "tall". Each estimate passes an
   online median filter that removes single-window outliers.
3. **Adaptive fusion.** A scalar Kalman filter fuses the two estimates,
   weighting each by the inverse of its recent squared innovation. It leans
   on whichever estimator is currently behaving. A final check flags results
   taken at an f0 where no sideband can fall in the pickup band. It also
   moves the time stamp back by the pipeline latency.

Everything runs in one clock domain at the ADC rate. The defaults assume a
250 MS/s ADC and a 34.5-37.5 MHz pickup band (3 MHz around 36 MHz).

## Signal chain

```
 ADC 250 MS/s ─► polyphase_decimator ─► pingpong_buffer ─► stft_psd ─► gauss_smooth ─► tune_mapper ─┐
   16 bit        band-pass, ÷40           2 × 8192          batches of    N_f-tap         sidebands  │
                 6.25 MS/s                samples           1024-pt FFT   Gaussian        → q axis   │
                                                            (fft_core)                               │
           ┌─────────────────────────────────────────────────────────────────────────────────────────┘
           │  P_t (512 tune bins, q = j/1024)
           ├─► ema_peak ─► median_filter ─► q_ema ─┬─────────────────────────┐
           │                                       ▼                         ▼
           └─► wlc_select (local maxima, q_ref) ─► median_filter ─► q_wlc ─► kalman_fusion ─► post_proc ─► tune_q,
                     ▲                                   │                   (seq_div)         (seq_div)    unreliable,
                     └──────── previous q_wlc ───────────┘                                                   tune_ts
```

The window length N_t given to `pingpong_buffer` is either the input
`cfg_win_len` or, with `cfg_win_auto` set, the value chosen by
`window_select` from the f0 rate (see below).

`tune_top` wires the chain. A window ("frame") enters `stft_psd` only when
the ping-pong buffer holds a complete window and the previous frame has left
`post_proc`, so one frame at a time is in the spectral chain. An assertion in
`tune_top` states this rule. At the default sizes a frame takes about
54,000 clocks at f0 = 7.5 MHz (slightly more at 4 MHz, where more harmonics
cross the band). A 1 ms window is 250,000 clocks, so the chain is idle most
of the time. If the windows are made shorter than the processing time, the
buffer drops samples and raises the sticky `overflow` output.

### Number formats

| quantity | format | notes |
|---|---|---|
| ADC and decimated samples | signed 16 bit | `sample_t` |
| power spectra | unsigned 48 bit | `psd_t`, arbitrary scale |
| frequencies (f0, band edges) | unsigned Q16.16 in **STFT bins** | one bin = decimated rate / 1024 = 6103.5 Hz |
| tunes | unsigned Q0.16 | `tune_t`, 0x10000 would be 1.0 |
| factors (alpha, w, k, weights) | Q1.16 in 17 bits | `frac16_t`, 0x10000 = 1.0 |
| Kalman variances | unsigned Q0.32 in 40 bits | squared tune units |

Frequencies are given in bins, not Hz. This makes the aliasing arithmetic in
the mapper a plain modulo. To configure f0 = 7.5 MHz, write
`cfg_f0 = round(7.5e6 / 6103.515625 * 65536)`; the band edges are written
the same way.

## Acquisition: band-pass sampling and the ping-pong buffer

The pickup band is narrow and far from DC. Rather than mixing it down, the
ADC oversamples it, a band-pass FIR removes everything outside the band, and
the result is decimated to a *bandpass-sampling* rate. That rate is a low
rate at which the band folds onto baseband without overlapping itself. For a
band [f_L, f_H] the allowed rates are 2 f_H/(m+1) <= f_BP <= 2 f_L/m with
m = floor(f_L / (f_H - f_L)). For 34.5-37.5 MHz this gives m = 11 and
6.25-6.27 MS/s, so D = 40 from 250 MS/s lands exactly on 6.25 MS/s.
Oversampling also lowers the quantisation-noise density in the band by the
oversampling ratio.

`polyphase_decimator` computes only every D-th output of a 160-tap filter. It
uses the transposed polyphase form. Each input sample is multiplied by the
TAPS/D = 4 coefficients of its phase and added into four running
accumulators, one per output that is still open. When the last sample of an
output arrives, accumulator 0 is emitted and the rest shift down. The
coefficients are a Hamming-windowed band-pass sinc, 36 MHz centre and 3 MHz
width, computed at elaboration from real parameters `FC_NORM` and `BW_NORM`.
Retuning to another pickup band means changing those two parameters, and D if
the sampling rate must change.

`pingpong_buffer` holds two banks of 8192 samples, enough for a 1 ms window
at 6.25 MS/s (6250 samples). The writer fills one bank with `win_len` samples,
stamps it with the running sample count at its first sample, marks it full
and moves to the other bank. The reader sees `frame_ready`, reads with one
cycle latency and returns the bank with `frame_release`. Frames are handed
over in the order they were filled.

## Window length: `window_select`

A window is only as good as the stability of f0 during it: while f0 moves,
every sideband moves with it and its power is spread over several bins. The
rule used here is to let f0 change by at most a tolerable amount during a
window, 10 kHz by default. At the fastest expected ramp of 10 MHz/s this
gives 1 ms. When f0 moves more slowly a longer window is allowed, which
means more averaged batches and less noise.

`window_select` samples f0 and a running count of decimated samples each
time a frame starts. From two successive samples it gets the rate and sets

    N_t = tol * dt / |df0|

with a 56-bit sequential divider (56 clocks, once per frame). The result is
limited to [1024, `cfg_win_len`]: at least one FFT batch, and at most the
length the operator allows. A constant f0 gives the upper limit. The new
length applies from the next frame the buffer starts. With
`cfg_f0_tol` = 10 kHz (`round(10e3 / 6103.515625 * 65536)` = 107374) and f0
at 10 MHz/s the block chooses 6250 samples, i.e. 1 ms. "Recent" means the
last two frames; there is no further smoothing of the rate. The control
room can still fix the length by clearing `cfg_win_auto`.

## Averaged spectrum: `stft_psd` and `fft_core`

A window of N_t samples is cut into ceil(N_t / 1024) batches. The last batch
is zero-padded, so a 6250-sample window gives 7 batches. Each batch goes
through `fft_core`, an in-place radix-2 decimation-in-time FFT. The core
loads samples at bit-reversed addresses, performs one butterfly per clock and
uses Q1.14 twiddles generated at elaboration. It applies no scaling between
stages, and its 28-bit data words leave room for that growth. A 1024-point
transform takes 5120 clocks. The power |X_k|^2 >> 8 of the bins below the
folding frequency (k < 512) is accumulated, and after the last batch it is
multiplied by round(65536 / batches) >> 16. The averaged spectrum streams out
one bin per clock. No window function is applied.

## Gaussian smoothing: `gauss_smooth`

The Schottky sideband of a coasting or bunched beam is spread over N_T bins.
N_T is set by the momentum spread, and in a bunched beam also by the
synchrotron satellites. The smoothing kernel has

    N_f = max(3, 2 floor(N_T / 2) + 1),   sigma = (N_f - 1) / 3

so it is always odd and about as wide as the line it is looking for. The
coefficients are computed at elaboration in Q1.16. Rounding is absorbed in
the centre tap, so the gain is exactly one. N_T is a parameter (`NT`,
default 5) because it depends on beam parameters, not on the data. The block
is a streaming shift-register convolution with zero padding at both ends of
the spectrum.

## Mapping sidebands onto the tune axis: `tune_mapper`

This is the least obvious part of the design. After band-pass sampling, a
component at frequency F appears in the 1024-bin spectrum at

    r = F mod 1024            (F in bins)
    r' = r            if r <= 512
    r' = 1024 - r     if r > 512     (an inverted, mirror-image alias)

For every tune bin j (q_j = j / 1024, 512 bins covering [0, 0.5)) the mapper
walks the harmonics n = 1, 2, ... For each of the two sidebands
F = (n - q_j) f0 and F = (n + q_j) f0 that lies inside [band_lo, band_hi], it
takes the linearly interpolated spectrum value at r'. The walk stops when the
lower sideband of harmonic n is already above the band (or after `NMAX` = 16
harmonics). P_t[j] is the *mean* of the values found, computed as the sum
times a reciprocal from a small table.

With a 3 MHz band usually only one sideband is visible, and the mapping then
mainly removes the f0 dependence. With a wider band several sidebands are
averaged; the signal stays the same, the noise variance drops and the SNR
improves. A plain sum would give the same SNR but an uneven noise floor. It
would be higher near q = 0 or 0.5, where both sidebands of one harmonic fall
in the band. In a stretch with no signal the peak search would then drift
towards those tunes, as a noise-only stretch of a ramp simulation shows with
summing. Upright and inverted aliases are both handled by the mirror
step, so the output is always in tune order.

The block first stores the 512 input bins. It then spends one clock setting
up q_j f0 and one clock per visited sideband, so a tune bin costs
1 + 2 × (harmonics visited) clocks. f0 and the band edges are sampled per
frame, so f0 can follow the ramp window by window.

Tunes above one half fold onto the same axis (q and 1 - q give the same pair
of sideband frequencies). The machine's actual fractional tune, q or 1 - q,
is supplied to the post-processing as `cfg_above_half`.

## Enhanced peak detection

**EMA tune (`ema_peak`).** Per tune bin, EMA_t = EMA_{t-1} + alpha (P_t - EMA_{t-1}).
The first spectrum after reset or `cfg_clear` initialises the average. The
raw EMA tune is the bin of the global maximum inside the analysed region
[`cfg_reg_lo`, `cfg_reg_hi`]; on a tie the lowest bin wins. The EMA keeps
the noise floor down and follows slow tune changes, but lags behind jumps.

**Median filters (`median_filter`, used twice).** Each keeps the last N = 5
values and outputs their median, found by rank counting in one clock. A
single bad window cannot move the output. After a clear the window is filled
with the first value.

**WLC tune (`wlc_select`).** While P_t streams past, every local maximum
(P[j] > P[j-1] and P[j] >= P[j+1], region edges counting as lower
neighbours) is stored with its position q_i and height a_i. When the
filtered EMA tune is ready, the block forms a reference

    q_ref = w q_ema + (1 - w) q_wlc(previous window)

and gives each maximum a confidence

    conf_i = k (1 - d_i / d_max) + (1 - k) a_i / a_max,   d_i = |q_i - q_ref|

where d_max and a_max are the largest distance and height among the maxima.
The maximum with the highest confidence is the WLC tune. Multiplying through
by d_max a_max gives the form that is compared, k (d_max - d_i) a_max +
(1 - k) a_i d_max, so no divider is needed. With k near 1 the estimator
tracks the reference; with k near 0 it becomes a plain highest-peak search.
Selection takes 2 + 2 × (number of maxima) clocks. For the first window the
filtered EMA tune stands in for the previous WLC tune.

## Adaptive fusion: `kalman_fusion`

The filtered EMA tune z1 and the filtered WLC tune z2 are fused by a scalar
Kalman filter with a constant-state model. Per window:

    predict    x' = x,  P' = P + Q
    adapt      R_i = alpha (z_i - x')^2 + (1 - alpha) R_i          i = 1, 2
    fuse       w1 = R2 / (R1 + R2),  w2 = 1 - w1
               z_f = w1 z1 + w2 z2,  R_f = R1 R2 / (R1 + R2) = w1 R1
    update     K = P' / (P' + R_f),  x = x' + K (z_f - x'),  P = (1 - K) P'
    adapt Q    Q = alpha (z_f - x')^2 + (1 - alpha) Q

An estimator that has recently disagreed with the prediction gets a large R
and loses weight. The weight w1 of the EMA tune is brought out as `w_ema`.
The two divisions share one 56-bit sequential divider (`seq_div`); an update
takes about 120 clocks. The first pair after a clear only initialises
x = z1, P = P0, R1 = R2 = R0, Q = Q0. Those initial values are parameters,
and R is floored at `RMIN` so the weights stay defined.

## Reliability flag and latency compensation: `post_proc`

A narrow pickup cannot see the tune at every f0 of the ramp. `post_proc`
finds the harmonic nearest the band centre, n = round(f_c / f0), with the
same sequential divider design. It flags the result as unreliable when
neither (n - q) f0 nor (n + q) f0 lies in the band, with q replaced by 1 - q
when `cfg_above_half` is set. The time stamp of the window (decimated sample
count at its first sample) is moved back by `cfg_lat_comp`. This removes the
delay that the EMA and the median filters add.

The rule is implemented as stated, and it looks only at the harmonic
nearest the band centre. A sideband of a neighbouring harmonic that does
fall in the band is not considered. For example, with a machine tune of 0.68
at f0 = 7.4 MHz, the sideband (4 + 0.68) f0 = 34.6 MHz is inside the band,
but n = round(36 / 7.4) = 5 and the result is flagged. A published example of where this flag
switches over the 4-7.5 MHz ramp for a tune of 0.68 is not reproduced by
this rule alone. The tick positions there (about 4.78, 5.44, 6.3 and
7.49 MHz) do not coincide with the f0 at which these sidebands enter or
leave a 34.5-37.5 MHz band. The source of those positions is unknown, so
treat the flag's exact switching points as unverified against that example.

## Top-level interface (`tune_top`)

| port | dir | meaning |
|---|---|---|
| `adc_valid`, `adc_data[15:0]` | in | ADC samples, signed |
| `cfg_win_len[13:0]` | in | STFT window N_t in decimated samples (6250 = 1 ms); upper limit in automatic mode |
| `cfg_win_auto` | in | window length chosen by `window_select` |
| `cfg_f0_tol[31:0]` | in | tolerable f0 change per window, Q16.16 bins |
| `cfg_f0`, `cfg_band_lo`, `cfg_band_hi` | in | Q16.16 bins, sampled at the start of each frame |
| `cfg_alpha_ema`, `cfg_w_ref`, `cfg_k_wlc`, `cfg_alpha_kf` | in | Q1.16 factors |
| `cfg_reg_lo`, `cfg_reg_hi` | in | tune-bin region searched by EMA and WLC |
| `cfg_above_half` | in | machine tune fraction is 1 - q |
| `cfg_lat_comp[31:0]` | in | latency compensation in decimated samples |
| `cfg_clear` | in | restart EMA, medians, WLC history and Kalman state |
| `tune_valid`, `tune_q`, `tune_unreliable`, `tune_ts` | out | one result per window |
| `q_ema`, `q_wlc`, `w_ema` | out | the two filtered estimates and the EMA weight |
| `q_ref`, `wlc_npeaks[9:0]` | out | WLC reference tune and number of local maxima in the last window |
| `tune_harmonic[15:0]` | out | harmonic n used by the reliability check |
| `overflow` | out | sticky: windows arrived faster than they were processed |

Parameters: `D` = 40, `TAPS` = 160, `DEPTH` = 8192, `NB` = 1024,
`NQ` = 512, `NT` = 5, `MEDN` = 5.

## Where this RTL departs from, or goes beyond, the published description

The published description defines the algorithm, not the hardware. Every
width, handshake, memory organisation, number format and the frame
sequencing above is this design's own choice. In particular:

* The ADC rate (250 MS/s), D, the FIR length and window, the FFT length
  (1024) and the tune-axis resolution (512 bins, about 0.001 tune units) are
  chosen here.
* The batch spectra are not interpolated before averaging. The description
  allows this "when higher precision is required"; here interpolation happens
  only when sidebands are read out in the mapper (linear).
* The median window (5), alpha, w and k have no published values. They are
  run-time inputs, except the median length, which is a parameter.
* The Kalman filter uses exponential smoothing for R1, R2 and Q exactly as in
  its equations. The "residual history window" mentioned for its
  initialisation is not built.
* Not built: the analog pickup and ADC; the link that supplies f0 and the
  window size; and the exclusion of the coherent part of the sideband,
  whose fitting procedure is not described.
* The automatic window length follows the stated tolerance (10 kHz of f0
  change per window, hence 1 ms at 10 MHz/s). Using only the last two
  frames as the "recent" f0 history, and the limits, are choices made here.
* The 160-tap band-pass filter has soft edges at 250 MS/s. It is -1.7 dB at
  36 MHz, -3 to -4 dB at 35.1 and 37 MHz, and -6 dB at the band edges
  (34.5, 37.5 MHz). Its stopband is -35 dB at 32.3 MHz and below -45 dB
  from 40 MHz up. Sidebands near the band edges therefore arrive weaker.
* The evaluation settings with an 8 MHz wide band around 36 MHz need a
  16 MS/s bandpass rate, which 250 MS/s / D cannot produce. A 2 MHz band at
  39 MHz fits 6.25 MS/s but needs `FC_NORM` = 39/250 and `BW_NORM` = 2/250.
  The defaults target the 3 MHz pickup.

## Simulation

Every block has a self-checking testbench in `tb/` that compares against a
floating-point or bit-exact model computed in the testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Run one with plain
Verilator, for example:

```
verilator --binary --timing -Irtl -Itb rtl/tune_pkg.sv rtl/*.sv tb/tb_tune_top.sv \
          --top-module tb_tune_top -Mdir obj && obj/Vtb_tune_top
```

| testbench | what it checks |
|---|---|
| `tb_polyphase_decimator` | bit-exact against a direct-form FIR, output rate, passband gain, stopband rejection |
| `tb_pingpong_buffer` | bank alternation, data, lengths, time stamps, drop and overflow when the reader stalls |
| `tb_fft_core` | every bin against a floating-point DFT; transform time N/2 log2 N clocks |
| `tb_stft_psd` | averaged power per bin for whole and zero-padded batch counts |
| `tb_gauss_smooth` | kernel against the Gaussian, the N_f rule, exact convolution |
| `tb_tune_mapper` | every tune bin against a floating-point mapping model, upright and inverted aliases |
| `tb_ema_peak` | EMA per bin, reported tune, rejection of a one-window spike |
| `tb_median_filter` | median against sorting, outliers, clear |
| `tb_wlc_select` | hand-made peak choice for two k values, 40 random cases against a model |
| `tb_kalman_fusion` | state and weight against a floating-point filter, outlier down-weighting, tune jump |
| `tb_post_proc` | flag and harmonic over a 4-7.5 MHz sweep for q = 0.32 and 0.68, time stamps |
| `tb_window_select` | window length against tol * dt / abs(df0) with clamping, 1 ms at 10 MHz/s |
| `tb_tune_top` | whole chain at default sizes, see below |
| `tb_tune_scenarios` | whole chain, 150 windows at -20 dB: contamination, signal loss, tune jump |
| `tb_tune_ramp` | whole chain, 90 windows of an f0 ramp at -10 dB, reliability flag |

`tb_tune_top` runs the complete design with every parameter at its default.
It feeds a 35.1 MHz line (the lower sideband of harmonic 5 for f0 = 7.5 MHz,
q = 0.32) in strong broadband noise, in 1 ms windows. For one window a
stronger interfering line is added at the position of q = 0.2. The fused,
EMA and WLC tunes must all end within two tune bins of 0.32 and be flagged
reliable, with time stamps exactly one window apart. Switching
`cfg_above_half` must flag the result unreliable, and 64-sample windows must
cause an overflow. Finally the window length is made automatic while f0
rises at 20 MHz/s, twice the fastest ramp; after two transitional windows
every window must be 3125 +- 30 samples (10 kHz / 20 MHz/s = 0.5 ms). It counts, and requires at least once: use of both
buffer banks, a zero-padded batch, multi-batch averaging, an inverted
sideband, a WLC choice among several maxima, a median output that differs
from its newest input, the Kalman update, both flag values, and processing
that finishes within one window time. It simulates about 4.5 million clocks
in about five seconds.

`tb_tune_scenarios` and `tb_tune_ramp` measure accuracy rather than
mechanisms, also at the default sizes. Each takes 30-40 s. The sideband is
modelled as 8 lines with random phases spread over +-15 kHz, in uniform white
noise. SNR means sideband power over the noise power that falls in the
3 MHz band. Settings are alpha_EMA = 0.3, w = 0.8, k = 0.7 and Kalman
alpha = 0.2. None of these has a published value. With w = k = 0.5 the WLC
path could keep following its own previous value after a signal loss, and
the filter then trusted it, which delayed recovery past 50 windows.

* **Scenarios** (f0 = 7.5 MHz, q = 0.32, -20 dB). Steady state: about 90 %
  of windows are within +-0.001 and all within +-0.01. After two windows of
  four-fold noise, after ten windows without any sideband, and after a tune
  jump to 0.30, the result is back within +-0.01 well inside 50 windows
  (1 ms each). Typical recovery is 13, 10 and 1-9 windows.
* **Ramp** (f0 rising 0.01 MHz per ms from 6.9 to 7.5 MHz, q = 0.32,
  -10 dB). The tune is held while the upper sideband is in the band. Results
  are flagged unreliable when it leaves. The tune is re-acquired from the
  lower sideband once that enters, and every flag matches the rule. At
  -20 dB the moving sideband was not found until the ramp stopped. During
  the ramp a line moves by about 9 bins per 1 ms window, which spreads its
  power.
