# Joint interferer classification and ML detection for a 2x2 MU-MIMO receiver

In downlink multi-user MIMO two users are scheduled on the same OFDM tones. A
handset with two antennas can estimate both users' effective channels from the
pilots, but it is not told the constellation of the co-scheduled user. That
constellation matters: a maximum-likelihood detector that jointly detects its
own symbol and the interferer's must know which set of interferer symbols to
search.

This RTL implements a receiver that decides the interferer's constellation
itself, among {absent, 4-QAM, 16-QAM, 64-QAM}, by maximum likelihood over a
span of N tones, and then produces max-log-MAP bit LLRs for its own symbol
with the interferer jointly detected. The key observation behind the
architecture is that classification and LLR generation use the same Euclidean
distances, so one ML detector core serves both, plus a small accumulator and
a few buffers.

## The two decisions

For tone i, with received vector y (2x1), channel columns h1 (own user) and h2
(co-scheduled user), noise covariance sigma^2 I and symbol pair x = (x1, x2):

    d(x) = |y - h1 x1 - h2 x2|^2 / sigma^2

**Classification.** With the max-log approximation the ML choice of the
interferer constellation M_I is

    M_I-hat = argmin over M_I of  [ N ln|M_I|  +  sum over the N tones of  min over (x1, x2) of d(x) ]

where x1 ranges over the own constellation M_S and x2 over M_I (x2 = 0 when
the interferer is absent, |M_I| = 1). The first term penalises larger
constellations, which always fit the data at least as well.

**LLRs.** With M_I-hat fixed, bit j of x1 gets

    LLR(b_j) = min{ d(x) : b_j = -1, x2 in M_I-hat }  -  min{ d(x) : b_j = +1, x2 in M_I-hat }

Both need, for each x1 and each hypothesis, the distance minimised over x2.
That list, one entry per x1, is what the detector core produces.

## Architecture

```
              y, h1, h2, 1/sigma^2          M_S
                       |                     |
              +--------v---------------------v--+
 hypothesis ->|         ml_mimo_detector        |   one x1 per clock
 M_I          +-------+-----------------+-------+
                      | list entries    | list minimum
                      v                 v
              demux (select M_I)     constellation_estimator
        +--------+--------+--------+--------+    sum over N tones
        | absent | 4-QAM  | 16-QAM | 64-QAM |    + bias (mux by M_I)
        | buffer | buffer | buffer | buffer |    4 totals -> min
        +--------+--------+--------+--------+          |
              mux (select M_I-hat) <-------------------+ M_I-hat
                      |
              +-------v--------+
              | llr_processing |---> LLRs, hard decisions
              +----------------+
```

* `ml_mimo_detector` — for one tone and one hypothesis, sweeps all x1 of M_S
  and outputs min over x2 of d(x), the minimising x2, and the minimum of the
  list.
* `distance_buffer_bank` — four buffers of 64 entries (|M_S| of the largest
  constellation), one per hypothesis, behind a write demultiplexer steered by
  the current hypothesis and in front of a read multiplexer steered by the
  estimate. Helper `distance_buffer` is one of them.
* `constellation_estimator` — one adder accumulating each hypothesis' tone
  minimum, a second adder adding that hypothesis' bias term from a four-way
  constant multiplexer at the last tone, four total registers and a minimum.
* `llr_processing` — reads the selected buffer and forms the LLRs and the hard
  decision.
* `mumimo_receiver` — the top: wiring plus the mode controller.
* `mumimo_pkg` — types, number formats and constellation tables.

### Modes

The interferer's constellation stays fixed over a subframe, so it only needs
to be classified once (for example on one OFDM symbol of 12 tones of a
resource block). Every tone comes with a mode:

* **Classification** (`MODE_CLASSIFY`). The detector runs the four hypotheses
  back to back (absent, 4-, 16-, 64-QAM). Each list goes into its buffer and
  its minimum into the estimator. After N consecutive classification tones the
  estimator decides, the estimate is latched, and the LLRs of that last tone
  are produced straight from the buffer of the winning hypothesis; no
  distance is computed twice.
* **Detection** (`MODE_DETECT`). Ordinary joint ML detection: the detector
  runs only the latched hypothesis and every tone yields LLRs.

A detection tone in the middle of a span restarts the span count. Before the
first classification the latched estimate is "absent", i.e. plain
single-user ML detection.

**Limitation kept on purpose.** The buffers hold one tone (|M_S| entries
each), as in the architecture this RTL follows. So within a classification
span only the span's last tone gets LLRs; the first N - 1 tones must be
presented again in detection mode once the estimate exists. For a 12-tone span
at 64-QAM that costs 11 x 134 extra clocks per resource block. Deeper buffers
(N x |M_S| entries per hypothesis) would remove this at the cost of memory.

## Inside the detector: slicing instead of searching

Searching all x2 for every x1 would cost up to 64 x 64 distance evaluations
per tone. The detector instead finds the best x2 for a given x1 in closed
form. With r = y - h1 x1, z = h2^H r and P = |h2|^2,

    |r - h2 x2|^2 = |r|^2 - 2 Re(conj(x2) z) + P |x2|^2

which splits into independent in-phase and quadrature terms. For a square QAM
with levels a = s x {±1, ±3, ...} (s the unit-energy scale) the best level in
each dimension is the one whose decision region contains z / P. The boundaries
between neighbouring levels are at s x k for even k, so the slicer compares
Re z and Im z with P x s x k. No division is needed, and because the
comparison is exact integer arithmetic, the result is the exact minimum over
the quantised constellation, not an approximation. The distance of the
chosen x2 is then computed exactly and scaled by 1/sigma^2. One x1 is handled
per clock, so a list costs |M_S| clocks and a tone in detection mode needs
|M_S| distance evaluations; a classification tone needs 4 |M_S|.

Internal precision: the residual keeps 24 fraction bits (36 bits wide), h2^H r
36 fraction bits (56 bits), the squared norm 48 fraction bits (80 bits). Only
the final metric is rounded (floor) and saturated.

## Number formats and symbol mapping

| quantity | format |
|---|---|
| y, h1, h2 components | signed 16 bit, 12 fraction bits (range ±8) |
| constellation levels | signed Q3.12; scales round(4096/sqrt(2)) = 2896, round(4096/sqrt(10)) = 1295, round(4096/sqrt(42)) = 632 |
| 1/sigma^2 | unsigned 16 bit, 8 fraction bits |
| distance d | unsigned 24 bit, 8 fraction bits, saturating at 2^24 - 1 |
| span totals | unsigned 32 bit (`ACC_W`) |
| LLR | signed 25 bit, same unit as d, not clipped |

A symbol index k carries bit b_j in k[j]. Levels follow the LTE (36.211)
mapping: b0 and b1 are the in-phase and quadrature signs, b2/b3 the next
magnitude bits, b4/b5 the last (64-QAM magnitudes 3, 1, 5, 7 for
(b2, b4) = 00, 01, 10, 11). Bit value 0 stands for b = +1, so a positive LLR
favours a 0.

**Bias terms.** The default bias per tone is round(256 ln|M_I|) = 0, 355,
710, 1065 for absent, 4-, 16-, 64-QAM: the N ln|M_I| of the decision rule in
the 8-fraction-bit metric unit. The architecture drawing this design follows
labels its bias inputs 0, 2N, 4N, 8N instead, which matches neither natural
nor binary logarithms for 64-QAM. Those values are available with
`BIAS_PER_TONE = '{0, 512, 1024, 2048}`, and the estimator's testbench runs
both sets. The metric's scale matters here: the bias only balances the
distances if d really is divided by sigma^2, so 1/sigma^2 must be supplied
correctly.

## Top-level interface (`mumimo_receiver`)

| port | dir | meaning |
|---|---|---|
| `tone_valid`, `tone_ready` | in, out | a tone is taken when both are high; hold `tone_valid` until taken |
| `tone` (`tone_t`) | in | y[2], h1[2], h2[2] (complex Q3.12), `inv_nv` = 1/sigma^2 |
| `tone_mode` | in | `MODE_CLASSIFY` or `MODE_DETECT` |
| `ms` | in | own constellation (4-, 16- or 64-QAM) |
| `llr_valid` | out | one-clock pulse per LLR vector, no back-pressure |
| `llr[6]` | out | LLRs of b0..b5, zero above log2 |M_S| |
| `x1_hat`, `x2_hat` | out | hard decisions (minimum-distance pair) |
| `llr_mi` | out | hypothesis the LLRs were computed under |
| `mi_hat_valid`, `mi_hat` | out | end of a classification span and the estimate |
| `metric[4]` | out | the four span totals |

Parameters: `N_TONES` (span, default 12), `BIAS_PER_TONE`, `ACC_W`. Reset is
asynchronous, active low.

Timing with P = |M_S|, counted in clock edges from the edge that takes a tone:

| tone | `mi_hat_valid` | `llr_valid` | `tone_ready` again |
|---|---|---|---|
| detection | – | 2P + 5 | 2P + 6 |
| classification, not last of span | – | – | 4P + 12 |
| classification, last of span | 4P + 13 | 5P + 16 | 5P + 17 |

For 64-QAM that is 134 clocks per detected tone and 268 per classification
tone. An LTE resource block over a subframe (140 data tones, one 12-tone
classification symbol) takes about 20,400 clocks, plus about 1,500 to re-run
the first 11 classification tones for their LLRs. The RTL is not pipelined
across tones: the detector idles while LLRs are formed. Overlapping the two
would need a second set of buffers.

## What follows the algorithm and what is this design's own

Taken from the algorithm and its architecture: the metric d(x) with
R = sigma^2 I; the decision rule with the N ln|M_I| bias; the hypothesis set
including "absent"; the detector run once per hypothesis with M_I as an input;
the four per-hypothesis buffers of |M_S| entries with their demultiplexer and
multiplexer; the accumulate / add-bias / four-registers / minimum structure;
the LLR formula; the split into a classification mode and a normal detection
mode; N = 12 as the default span.

Chosen here: all number formats; the slicing detector and its one-x1-per-clock
sweep; the LTE bit mapping and unit-energy scales; the per-hypothesis words of
the accumulator register (the hypotheses of a tone are interleaved); the
tone-by-tone sequencing and handshakes; LLRs only for a span's last tone;
tie-breaking toward the smaller constellation; the reset estimate "absent";
the hard-decision outputs.

Not part of this RTL: channel and noise estimation (h1, h2 and 1/sigma^2 are
inputs), the turbo decoder that consumes the LLRs, and the linear receivers
(covariance-based IRC, MMSE-IRC, null projection) that the receiver is
compared against.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT` line. The
reference model (`tb/mumimo_ref_pkg.sv`) is written independently of the RTL:
its constellation points come from explicit level tables, its inner
minimisation is an exhaustive search over all x2, and its arithmetic uses
128-bit integers.

* `ml_mimo_detector_tb` — every combination of M_S and hypothesis on random
  tones: each entry against exhaustive search, the reported x2 must attain the
  distance, list minimum, one entry per clock, saturation.
* `distance_buffer_bank_tb` — all four buffers written and read back through
  the selectors, isolation between buffers, read-before-write.
* `constellation_estimator_tb` — random spans in both hypothesis orders,
  totals and decisions against a model, both bias sets, each hypothesis
  winning, ties.
* `llr_processing_tb` — LLRs against a direct max-log evaluation for all
  three constellations, ties, hard decisions, latency.
* `mumimo_receiver_tb` — the whole receiver at default parameters: every M_S
  with every true interferer state, classification spans followed by
  detection, detection before any classification, an interrupted span, tones
  held back by `tone_ready`. Checks every LLR vector, the totals, the
  estimate, all latencies in the table above and the number of distances per
  tone, and requires each mechanism (span end, both mode switches,
  interruption, stall, LLRs from both modes, each of the four estimates) to
  occur.
* `classify_workload_tb` — the classification experiment: Rayleigh channels
  with CN(0,1) entries independent from tone to tone, both users at equal
  power, Gaussian noise at 0, 10 and 20 dB per-antenna SNR, own constellation
  4- or 64-QAM, interferer 4-, 16- or 64-QAM, spans of N = 1, 12 and 24 (three
  receivers built with different `N_TONES`). Every estimate and total must
  match the model. It prints the rate of correct classification; with 12
  spans per point (40 for N = 1), N = 12 and 24 classify every span correctly
  at 20 dB, and N = 1 is right 30–40 times out of 40. At 0 dB a 16- or 64-QAM
  interferer is mostly taken for a smaller constellation. These are small
  samples, meant as a sanity check, not as error-rate curves.

To run one with plain Verilator, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
    rtl/mumimo_pkg.sv tb/mumimo_ref_pkg.sv tb/mumimo_receiver_tb.sv \
    --top-module mumimo_receiver_tb -o sim
./obj_dir/sim
```

Replace the testbench file and top module name for the others. All of them
finish in well under a minute; the workload testbench takes about 40 seconds.

## Changing the design

* Span length: `N_TONES` on `mumimo_receiver` (the bias totals and span
  counter follow). Spans longer than 255 tones need a wider `ACC_W`.
* Bias terms: `BIAS_PER_TONE`, in units of 1/256 of a distance.
* Precision: `SAMPLE_W/SAMPLE_F`, `DIST_W/DIST_F` and the inverse-noise format
  live in `mumimo_pkg`. The detector's internal widths (`R_W`, `Z_W`, `E_W`)
  are sized for 16-bit inputs and must grow with them.
* Bit mapping: `pam_odd`, `pam_bits`, `mod_point` and `mod_index` in
  `mumimo_pkg`. The reference model has its own tables in
  `tb/mumimo_ref_pkg.sv`, so change both.
