# Mel and Bark filter banks on 13 band-pass FIR filters

The ear resolves frequency unevenly. It is almost linear below about
0.5–1 kHz and close to logarithmic above that. Speech front ends copy this
with a *filter bank*: band-pass filters that are narrow at low frequencies
and widen as the frequency rises. The two common spacings are the **Mel**
scale, `mel(f) = 2595·log10(1 + f/700)`, and the **Bark** (critical-band)
scale. The Bark scale puts more weight on low frequencies.

This RTL builds both banks in the same way:

* thirteen linear-phase band-pass FIR filters, 201 taps each, with their
  band edges taken from a fixed table;
* Bartlett (triangular) windows for the Mel bank and Hamming windows for
  the Bark bank;
* a tree of twelve adders that sums the thirteen filter outputs into one
  30-bit result;
* a small direct digital synthesizer (DDS) that supplies an 8-bit sine
  tone as the test input.

A top level runs the two banks side by side on the same tone, so their
outputs can be compared sample by sample.

The structure follows the FPGA design published in "A comparative study of
performance of FPGA based Mel filter bank & Bark filter bank" (Ghosh,
Sarkar Debnath, Bose). That publication built each filter with a vendor FIR
generator and gave only the filter specifications. Everything inside the
filters here (coefficient design, quantization, the multiply-accumulate
engine, handshakes and latencies) is this implementation's own. Those points
are marked as such below.

## Signal path

```
            ck_en, rst (shared by everything)
                 |
  sample_strobe --tick (1 per 500 clk)--> sine_wave (DDS) --wave_out[7:0]--+
                                                                            |
        +---------------------------------------------------------------- --+
        |   (nd = tick delayed one clock)
        v
  fir_mac #1  <-coef-- band_coef_rom #1 ---+
  fir_mac #2  <-coef-- band_coef_rom #2    |  13 filters, one multiplier each,
   ...                                     |  all in lock step
  fir_mac #13 <-coef-- band_coef_rom #13 --+
        | dout[25:0] x 13, rdy
        v
  adder_tree (12 x fa_add) ---> final_sum[29:0], sum_valid
```

`filter_bank` is one such bank. Its `BANK` parameter selects Mel or Bark
and its `ARCH` parameter selects one of three band tables. `mel_bark_top`
instantiates one bank of each kind.

## Frequencies and rates

| quantity | value | origin |
|---|---|---|
| system clock | 50 MHz | original design |
| filter input sample rate | 100 kHz, i.e. one sample every 500 clocks | original design (FIR generator setting) |
| taps per filter | 201 | original design |
| input width | 8 bits, signed | original design |
| final sum width | 30 bits, signed | original design |
| coefficient width | 16 bits, signed | own choice |
| width of one filter output | 26 bits, signed | own choice: four adder levels then give exactly 30 bits |
| default test tone | 1 kHz, full scale ±127 | own choice |

The original band tables print their cut-offs under a "kHz" heading. Read
as kHz, most bands would lie far above the 50 kHz Nyquist limit of a
100 kHz sample rate. The Mel and Bark scales are also audio-range scales.
The numbers are therefore used as **Hz**. Band table 1 of each bank is the
default:

| band | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| Mel, Hz  | 50–250 | 250–450 | 450–650 | 650–850 | 850–1062 | 1058–1358 | 1350–1750 | 1742–2262 | 2256–2956 | 2948–3758 | 3750–4700 | 4692–5962 | 5960–7625 |
| Bark, Hz | 50–200 | 200–350 | 350–500 | 500–650 | 650–900 | 900–1300 | 1300–1900 | 1900–2750 | 2750–3900 | 3900–5400 | 5400–7400 | 7400–9900 | 9900–12900 |

Tables 2 and 3 (`ARCH = 2, 3`) change the spectral range. Mel table 2 spans
150–5490 Hz and table 3 spans 10–11990 Hz. Bark table 2 spans 150–7500 Hz
and table 3 spans 10–16010 Hz. All six tables are in `rtl/fb_pkg.sv`.

Some bandwidths printed in the original tables do not match the cut-offs,
for example Mel table 2 band 12 (3545–3845 Hz, printed as 1250 Hz wide).
In those cases the lower and upper cut-offs are used, as given.

## Coefficient design (`band_coef_rom`, `fb_pkg`)

This is the part the original leaves to external tools: filter-design
software writes a coefficient file, and the FIR generator quantizes it.
Here the coefficients are computed while the design elaborates, using
SystemVerilog constant functions with `real` arithmetic. No data files are
needed.

For band `b`, with cut-offs `f1 < f2` given as fractions of the 100 kHz
sample rate, `N = 201` and `M = (N-1)/2 = 100`:

```
h[m]  = 2·f2·sinc(2·f2·m) − 2·f1·sinc(2·f1·m)         ideal band-pass, m = n − M
w[n]  = 1 − |2n/(N−1) − 1|                            Mel:  Bartlett, zero end taps
w[n]  = 0.54 − 0.46·cos(2πn/(N−1))                    Bark: Hamming
c[n]  = round( g · w[n] · h[n−M] )                    round half away from zero
g     = min( 32767 / max|w·h| ,  ((2^25 − 1)/128 − N) / Σ|w·h| )
```

The gain `g` is the largest value that meets two limits:

1. every coefficient fits in 16 signed bits;
2. `Σ|c| · 128 < 2^25`, so that no 8-bit input sequence can drive a filter
   output beyond 26 signed bits. The `− N` term covers the worst case of
   rounding.

The second limit is almost always the one that binds. It is what makes the
adder tree overflow-proof by construction.

Each filter has its own gain `g`. The bank sum is therefore not a sum of
filters with equal passband gain. This matches per-filter quantization in a
filter generator, but it means the 30-bit output is not a calibrated
spectrum level.

The coefficients are symmetric, so every filter is linear-phase with a
group delay of 100 samples.

Resolution limits: with 201 taps at 100 kHz, the transition band of a
Bartlett or Hamming filter is a few kHz wide. The narrow low bands (for
example 50–250 Hz) therefore act more like low-pass filters than true
band-pass filters. This follows from the original filter length and
sample rate, not from this implementation.

## The FIR engine (`fir_mac`)

There are 500 clocks per input sample and only 201 taps, so each filter
uses **one multiplier**, reused serially. This matches the 13 DSP slices
reported for the 13-filter Mel bank in the original.

State:

* an `N_TAPS`-deep circular sample buffer (one block RAM);
* a write pointer `wr_ptr`;
* a tap counter;
* a full-precision accumulator.

Filter memory is separate: `coef_addr`/`coef` connect to a synchronous
coefficient memory with one clock of read latency (`band_coef_rom`).

```
S_CLEAR   after reset: writes 0 to all N_TAPS buffer words (N_TAPS clocks, rfd = 0)
S_IDLE    rfd = 1; on nd: buf[wr_ptr] <= din, rd_ptr <= wr_ptr, advance wr_ptr
S_RUN     for tap k = 0..N-1: coef_addr = k, read buf[rd_ptr], rd_ptr <- rd_ptr-1 (mod N)
pipeline  stage 1: coefficient and sample registered
          stage 2: product registered
          stage 3: acc = (k==0 ? p : acc + p); after the last tap, dout <= sat(acc), rdy pulse
```

This computes `dout(n) = Σ_k c[k]·x(n−k)`, and samples from before the
last reset count as zero.

Timing, counted in enabled clocks:

* `rdy` rises `N_TAPS + 2` clocks after the edge that accepts `nd`
  (203 clocks by default);
* `rfd` is low for `N_TAPS` clocks after each accepted sample, so samples
  may be offered at most every `N_TAPS + 1` clocks;
* offering `nd` while `rfd` is low is a protocol error, and an assertion
  flags it.

The output saturates to `OUT_W` bits. With coefficients from
`band_coef_rom` this never happens. It is there so that `fir_mac` stays
well defined with any coefficient set.

## Summing tree (`adder_tree`, `fa_add`)

Twelve two-input adders ("FA" nodes) are connected as in the original block
diagram:

```
level 1:  (1+2)   (3+4)   (5+6)   (7+8)   (9+10)   (11+12)        27 bits
level 2:  (1..4)          (5..8)          (9..12)                  28 bits
level 3:  (1..8)                          (9..12)+13               29 bits
level 4:  final = (1..8) + (9..13)                                 30 bits
```

Each node adds one bit of width and has an output register. Filter 13 joins
at level 3, so it first passes through two registers. Every partial sum
therefore comes from the same set of filter outputs. The tree has a latency
of 4 clocks.

## Timing of one sample

Counted in enabled clocks (`ck_en` high), from reset release:

| clock | event |
|---|---|
| 0–200 | every filter clears its sample buffer |
| 500 (then every 500) | `sample_strobe` ticks and `sine_wave` registers the next tone sample |
| tick + 1 | all 13 filters accept that sample (`nd`) |
| tick + 204 | the filters' `rdy` pulse and outputs |
| tick + 208 | `final_sum` updates and `sum_valid` pulses for one clock |

In short, there is one sum per input sample, and each sum appears
`N_TAPS + 7` clocks after its sample tick. When `ck_en` is low the whole
bank freezes, exactly as if the clock had stopped. `rst` is synchronous and
active high. The original designs run with reset held low and clock enable
held high.

## Top-level interface (`mel_bark_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `ck` | in | 1 | 50 MHz clock |
| `ck_en` | in | 1 | clock enable for both banks |
| `rst` | in | 1 | synchronous reset, active high |
| `mel_final_sum` | out | 30 | Mel bank sum, signed |
| `mel_sum_valid` | out | 1 | one-clock strobe per new Mel sum |
| `bark_final_sum` | out | 30 | Bark bank sum, signed |
| `bark_sum_valid` | out | 1 | one-clock strobe per new Bark sum (coincides with the Mel strobe) |
| `wave_out` | out | 8 | the tone sample being filtered |

Parameters:

* `MEL_ARCH` and `BARK_ARCH` (1–3) select the band tables;
* `N_TAPS` sets the filter length;
* `SAMPLE_PERIOD` (clocks per sample, at least `N_TAPS + 2`) sets the
  sample timing;
* `SINE_TUNING` is the DDS phase step per sample. The tone frequency is
  `SINE_TUNING · 100 kHz / 2^32`, and `fb_pkg::tuning_word(f_hz, 100000)`
  computes the step from a frequency.

Size after generic synthesis, for the whole top with default parameters:

* 26 multipliers;
* about 3,900 flip-flops;
* about 152 kbit of memory. Each filter holds 201×8 bits of samples and
  201×16 bits of coefficients; each DDS holds a 256×8-bit sine table.

## Where this departs from the original, and what is missing

* **Units of the band tables:** the tables say kHz, and they are used as Hz
  (see above).
* **Clock:** the original text and its filter settings give 50 MHz. Its
  simulation waveforms print a 10 ns clock period, which is 100 MHz.
  50 MHz is used here, because it fixes the 500 clocks per sample.
* **Coefficients:** the original coefficient files are not published.
  Window-method band-pass filters with the stated windows, lengths and
  cut-offs are designed here instead. The one visible excerpt of an original
  coefficient file (a first Mel filter starting `0000, 0054, 00af, 0110, …`)
  is not reproduced: the quantization scale differs, although it too starts
  with a zero tap.
* **FIR implementation:** the original used a vendor FIR generator. A
  plain serial multiply-accumulate filter is used here. The original Bark
  bank reports 11 DSP slices for 13 filters, which a one-multiplier-per-filter
  structure does not explain. Here both banks use 13 multipliers.
* **Adder nodes:** the original calls them full adders and says nothing of
  their width or registers. Here they are registered word adders with one
  bit of growth.
* **Own additions:** the sample-rate strobe, the `nd/rfd/rdy` handshakes,
  `sum_valid` and the `wave_out` port are this implementation's additions.
* **Not included:** the on-chip logic analyzer used to watch the hardware,
  the FPGA-specific primitives, and the speech-recognition accuracy study
  that the original reports for the two banks. None of these is part of the
  filter function.
* **Two banks in one top:** the original builds each bank as its own FPGA
  design. Here they share one top.

## Verification

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference models
are in `tb/fb_ref_pkg.sv`. They recompute the DDS table and every
quantized coefficient from the formulas above, in code that does not share
functions with the RTL. Only the band tables are shared.

| testbench | what it checks |
|---|---|
| `tb_sine_wave` | Two tuning words, random `enable`, and reset. Every output sample is compared with the reference table. |
| `tb_band_coef_rom` | All 78 filters: 13 bands × 3 tables × 2 banks. Checks: an exact match with the reference coefficients, symmetry, the 16-bit limit, the 26-bit output bound, the read latency and hold with `ce` low, and that the gain at the band centre is above the gain 25 kHz away. |
| `tb_fir_mac` | Random coefficients at 201, 9 and 5 taps. Checks: each output against a direct convolution, the latency of `N_TAPS + 2`, the reset clear time, and saturation (which must occur). |
| `tb_fa_add` | Random and extreme operands, clock enable, and reset. |
| `tb_adder_tree` | A new random set of 13 inputs every clock, including extremes. Each sum must equal the total of the set entered four enabled clocks earlier. |
| `tb_filter_bank` | All six configurations (Mel and Bark, tables 1–3), each on its own tone. Checks: every final sum against the reference convolution, latency `N_TAPS + 7`, the period of 500 clocks, random `ck_en` stalls, and a reset in mid-run. |
| `tb_mel_bark_top` | Both banks at default parameters for 1200 µs of 50 MHz operation, with stalls and one reset. Checks: every Mel and Bark sum, the tone samples, coinciding strobes, and that the two banks' sums differ. It then holds `ck_en` low for 2000 clocks, and both sums must freeze, as when the clock is stopped. |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fb_pkg.sv tb/fb_ref_pkg.sv tb/tb_mel_bark_top.sv \
    --top-module tb_mel_bark_top -o sim
./obj_dir/sim
```

Replace the last file and the top-module name with another testbench to
run it. Every testbench runs in seconds, including the full-size
end-to-end run.

## Changing the design

* **Another band layout or filter count per table:** edit the tables in
  `fb_pkg`. The tree in `adder_tree` is wired for exactly 13 bands, as
  drawn in the original.
* **Longer filters:** raise `N_TAPS`. `SAMPLE_PERIOD` must stay at least
  `N_TAPS + 2`. For a much longer filter, widen `FIR_OUT_W` or accept the
  lower coefficient gain that the 26-bit bound then imposes.
* **Feeding real audio instead of the tone:** replace `sine_wave` in
  `filter_bank` with a sample input. The filters accept any 8-bit signed
  stream at one sample per `SAMPLE_PERIOD` clocks.
