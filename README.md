# GuardRider: an adaptive Reed-Solomon backscatter link over intermittent WiFi

A WiFi backscatter tag has no transmitter of its own. It toggles an antenna
switch and so reflects, or does not reflect, the WiFi signal that an access
point happens to be sending. Its bits are only visible while that signal is
present. Real WiFi traffic keeps stopping: there are inter-frame spaces,
back-off and idle gaps. Every such silent period wipes out a burst of the
tag's bits.

GuardRider turns those bursts into something a code can repair:

* The tag cuts its frame into m-bit symbols and protects them with a
  Reed-Solomon code RS(n, k), n = 2^m - 1. A silent period destroys a few
  consecutive bits, which touch only a few symbols. RS corrects any
  t = (n - k)/2 wrong symbols per codeword.
* The receiver measures the traffic that excites the tag. It records how
  long the WiFi channel stays busy ("on") and silent ("off"). It fits a
  Pareto distribution to each set of durations and turns their means into a
  two-state Markov model of the link. From that model it computes the
  probability p_s that a tag symbol falls into a silent period.
* From p_s the receiver picks the code with the highest rate k/n whose
  codeword failure probability stays below a threshold (10^-3). It sends the
  choice (m, k) back to the tag, which uses it for the following frames.

This repository holds synthesizable SystemVerilog for the tag's whole
digital transmit chain and for both digital chains of the receiver. It also
includes self-checking testbenches for every block and for the assembled
system.

## System overview

```
                         TAG (guardrider_tag)
 payload --> framer --> symbol_packer --> rs_encoder --> tx_serializer --> upsampler --+
  bytes     [len|data|CRC]  m-bit symbols  RS(n,k)       preamble + NRZ    bit hold     AND --> switch_ctrl
                                                                  frequency_shifter ----+     (RF switch)
                               ^ active_code (m,k)                  delta_f square wave
                               |
 RECEIVER, legacy channel      |                 RECEIVER, tag channel
 I/Q --> power_detector        |                 I/Q --> power_detector --> matched_filter
     --> onoff_measure         |                     --> demodulator (preamble sync, adaptive threshold)
     --> pareto_mle (on runs)  |                     --> rx_symbolizer --> rs_decoder --> rx_deframer
     --> pareto_mle (off runs) |                                                          --> payload, CRC ok
     --> markov_params         |
     --> heuristic_search -----+ (found code loaded into active_code)
```

`guardrider` (rtl/guardrider.sv) is the top. It joins the tag and both
receiver branches. The register `active_code` is shared by the tag's encoder
and the receiver's decoder, and models the feedback path of the chosen code.
Everything runs on one clock. The two sample streams arrive with their own
valid strobes.

Default top-level parameters:

| parameter     | default | meaning |
|---------------|---------|---------|
| `MAX_PAYLOAD` | 108     | largest payload in bytes (a frame carries 3..108) |
| `UPSAMPLE`    | 400     | clock cycles per transmitted bit (200 MHz clock, 500 kb/s) |
| `HALF_PERIOD` | 2       | half period of the frequency-shift square wave (50 MHz at 200 MHz) |
| `SPB`         | 10      | receiver samples per bit (5 MHz sampling of 500 kb/s) |
| `IQW`         | 16      | I/Q sample width |

Some of these values are not part of the original description: the
200 MHz clock, the 500 kb/s bit rate and SPB = 10. They are this design's
working point. The values that are specified are the 3..108-byte payload,
the 50 MHz frequency shift, the 5 MHz receiver sampling and the code family
m = 3..7.

## The code family and its arithmetic (gr_pkg, rs_encoder, rs_decoder)

Codes are RS(n, k) over GF(2^m) with m = 3..7 (n = 7 ... 127). k is odd, so
n - k = 2t is even. A symbol travels in a 7-bit `sym_t` field, and only its
low m bits are used. Each field is built on a fixed primitive polynomial:

| m | polynomial      |
|---|-----------------|
| 3 | x^3 + x + 1     |
| 4 | x^4 + x + 1     |
| 5 | x^5 + x^2 + 1   |
| 6 | x^6 + x + 1     |
| 7 | x^7 + x^3 + 1   |

The generator polynomial has roots alpha^1 ... alpha^(n-k). With these
choices the RS(7,3) message {1,5,7} encodes to {1,5,7,6,3,4,2}. That is the
worked example the code family was specified with, and the encoder and
decoder testbenches both check it.

Every operation in the package is a function of m. One piece of hardware
therefore serves all five fields: `gf_mul` (shift and add, reduced by the
selected polynomial), `gf_mul_alpha` and `gf_inv` (a^(2^m - 2) by square and
multiply).

**Encoder.** The code can change from one frame to the next, so the encoder
cannot use fixed generator coefficients. On the first codeword after a code
change it builds g(x) = prod (x - alpha^i) in hardware, one root per cycle
(n - k cycles, flagged by `busy_build`). After that it runs the usual
systematic LFSR division. The k data symbols pass through unchanged and are
followed by the n - k parity symbols, one symbol per cycle.

**Decoder.** There is one codeword in flight at a time. The steps are:

| step   | cycles | what happens |
|--------|--------|--------------|
| RECV   | n      | store the word; all 2t syndromes S_j updated in parallel by Horner's rule |
| BM     | n - k  | one Berlekamp-Massey iteration per cycle gives the error locator Lambda(x) |
| OMEGA  | n - k  | error evaluator Omega = S * Lambda mod x^(n-k), one coefficient per cycle |
| CHIEN  | n      | test every position, correct it in place |
| OUT    | k      | the corrected data symbols |

In the CHIEN step, position i has X^-1 = alpha^(i+1). A position is an
error location when Lambda(X^-1) = 0. Its value is
e = Omega(X^-1) * X^-1 / Lambda_odd(X^-1). Lambda_odd is the sum of the odd
terms, which is the formal derivative in characteristic 2.

A codeword is flagged (`m_fail`) when the number of roots found differs
from deg Lambda, or when deg Lambda > t. Its symbols are still passed on,
and the frame CRC then rejects the frame.

The table of powers alpha^j is rebuilt in 127 cycles whenever the code
changes. The decoder does this while idle, so it is ready before the next
frame's first symbol arrives.

**Timing budget.** The receive chain has no back-pressure, because samples
arrive at a fixed rate. After the last symbol of a codeword the decoder is
busy for 2(n - k) + n + k + 1 cycles. That must be shorter than one symbol
period, which is m * SPB samples. At the defaults (40 clocks per sample) the
worst case is RS(127,1): 381 cycles against 2800, so it is met for every
code. If the budget is ever broken, `rx_overrun` counts the symbols lost.

## The frame on the air (framer, symbol_packer, tx_serializer, upsampler, frequency_shifter)

```
[ length: 1 byte ][ payload: 3..108 bytes ][ CRC-16: 2 bytes ]
```

* **Length and CRC.** The length byte is the payload byte count. The CRC is
  CRC-16/CCITT (0x1021, initial value 0xFFFF, MSB first) over the length byte
  and the payload, sent high byte first. The framer collects the payload in a
  108-byte buffer because the length must go out first. A payload outside
  3..108 bytes is dropped with a `drop` pulse.
* **Symbols.** The frame's bits are cut MSB-first into m-bit symbols. The
  last block is padded with zero symbols to a multiple of k. The packer
  latches (m, k) at the first byte of a frame, so a code change never splits
  a frame.
* **Preamble and NRZ.** The serializer sends the 36-bit preamble
  `101010101010101010101010 110100100011` first (left bit first). It then
  sends each coded symbol MSB-first as NRZ bits, where 1 means reflect.
* **Upsampling and frequency shift.** The upsampler holds each bit for
  `UPSAMPLE` clocks. The frequency shifter produces a square wave with a half
  period of `HALF_PERIOD` clocks while a frame is on the air.
  `switch_ctrl = bit AND square wave`. Reflecting at delta_f moves the tag's
  copy of the WiFi signal delta_f away from the carrier, so the receiver sees
  the tag on a clean adjacent channel with on-off keying.

Air time of a frame = (36 + (number of codewords) * n * m) * UPSAMPLE clocks.

## Choosing the code (onoff_measure, pareto_mle, markov_params, heuristic_search)

This is the part that is hardest to follow. Read it together with
rtl/heuristic_search.sv.

1. **Measurement.** Each legacy-channel sample is on when its magnitude
   sqrt(I^2 + Q^2) is at least `on_thresh`. `onoff_measure` emits the length
   of every completed run, in samples, tagged on or off. The first run after
   enabling is dropped, because its start was not seen.
2. **Pareto fit.** Each set of durations x_1..x_N gets the maximum-likelihood
   estimates
   `x_m = min x_i`,
   `lambda = N / (sum ln x_i - N ln x_m)`,
   `mean = lambda x_m / (lambda - 1)`.
   `pareto_mle` keeps a running sum of log2(x_i): `log2_unit` computes it by
   iterative squaring, with 16 fractional bits. The block converts the sum to
   natural logs and computes both quotients with one 64-bit sequential
   divider. The mean uses the equivalent form x_m N / (N - Lsum), where
   Lsum = sum ln(x_i / x_m). When lambda <= 1 the mean is infinite: it is
   reported as all ones, with `mean_ok` low. Outputs are lambda in Q8.16 and
   the mean in Q.8 samples.
3. **Markov model.** `alpha = R / mean_on` is the probability per symbol of
   leaving the on state, and `beta = R / mean_off` that of leaving the off
   state. `p_s = alpha / (alpha + beta)` is the long-run fraction of symbols
   that fall in an off period. The rate R cancels in p_s. It only matters for
   alpha and beta, which the top reports. Outputs are Q2.30, clamped to 1.
4. **Search.** For each n, the probability that a codeword loses more than
   t symbols is the binomial tail
   `p_e(t) = sum_{i>t} C(n,i) p_s^i (1-p_s)^(n-i)`.
   The block keeps, for each n, the largest k = n - 2t with
   p_e(t) <= p_e^th. Among the five candidates the highest k/n wins; a tie
   keeps the shorter n.

   The hardware needs no binomial coefficients and no division. It builds
   the distribution of lost symbols one symbol at a time:
   `q_s(i) = q_{s-1}(i)(1-p) + q_{s-1}(i-1) p`,
   in Q2.30 with one multiply pair per cycle. It then sums the tail from
   i = n downward and records the smallest t that meets the threshold. A
   whole search takes about 11,000 cycles. If no code qualifies, `found`
   stays low, RS(127,1) is reported, and the top keeps its current code.

Three points in the source description of this algorithm are inconsistent,
and this design resolves them as follows:

* The printed tail formula has p_s^(n-i) as its second factor. The RTL uses
  the binomial (1 - p_s)^(n-i).
* One sentence names the on and off sample sets the other way round from
  the definition of the transition probabilities. The RTL follows the
  definitions: alpha leaves the on state and uses the on mean.
* The pseudo-code computes beta from the wrong mean, and it does not reset
  the candidate k between values of n. The RTL uses mean_off and resets k
  for every n.

In the top, `est_start` finishes both fits. When both are done the Markov
block starts, and when it is done the search starts. When the search finds a
code, `active_code` is loaded and `est_done` pulses. `code_set`/`code_in`
load a code directly.

## Receiving a frame (power_detector, matched_filter, demodulator, rx_symbolizer, rs_decoder, rx_deframer)

* **Matched filter.** The power sequence passes through a boxcar of one bit
  period (`SPB` samples), which is the filter matched to NRZ pulses. Its
  output peaks at each bit end.
* **Preamble search.** At every sample, the demodulator correlates the
  filter output at the 36 bit-end positions of a preamble ending now with
  +1/-1 weights. The preamble has equal numbers of ones and zeros, so a
  constant power offset cancels. Once the correlation has passed
  `corr_thresh`, the first sample at which it falls marks the peak. The
  preamble's side lobes reach about 56% of the peak, so `corr_thresh` should
  be about 60-70% of the expected peak, 18 * SPB * (P_one - P_zero).
* **Adaptive threshold.** At the peak, P_th = (minimum over the preamble's
  '1' bit samples + maximum over its '0' bit samples) / 2. The threshold
  therefore follows the received power, which in backscatter varies widely
  from tag to tag and from place to place.
* **Decisions.** From the peak on, the output is sampled once per bit period
  at the bit ends, and bit = (y >= P_th).
* **Frame control.** When the demodulator locks, the top clears the
  symbolizer, decoder and deframer. The deframer reads the length byte,
  outputs the payload, and compares the CRC. Its `frame_done` then stops the
  demodulator, which goes back to searching. `rx_rs_fail` reports that some
  codeword of the frame was not correctable. `rx_corrected` is the number of
  symbols repaired in the frame.

## Departures from the original description, and limits

* **Symbol synchronizer not built.** The original receiver follows the
  demodulator with a symbol synchronizer: an interpolation filter, a
  zero-crossing timing error detector and modulo-1 interpolation control.
  Its loop constants are not specified, so it is not built. This design keeps
  the sampling phase found at the preamble peak for the whole frame. That
  holds while tag and receiver clocks do not drift by a noticeable part of a
  bit over one frame. At 10 samples per bit, a drift of half a bit over a
  1548-bit frame is about 0.03%.
* **Detection.** Frame detection is the preamble cross-correlation against
  `corr_thresh`. There is no separate autocorrelation detector.
* **Feedback link.** The feedback of (m, k) to the tag is a shared register.
  How the index travels over the air is not modelled. A change takes effect
  at the next frame the tag starts. It must not be made while a frame is
  being received.
* **Not included.** The RF switch and antenna (an analog SPDT part driven by
  `switch_ctrl`) and the radio front ends that deliver I/Q samples are
  outside the design.
* **This design's own choices.** All fixed-point formats, the CRC
  polynomial, the field polynomials for m = 4..7, the clock, bit rate and
  samples per bit, and all handshakes are this design's choices.
* **Size.** A generic yosys synthesis of the top gives about 70,000 cells
  and 21,000 flip-flop bits. Most of that is the RS decoder's parallel
  syndrome, locator and Chien registers for t up to 63.

## Assertions and lint notes

Handshake rules are written as concurrent assertions:

* output held stable while stalled (framer);
* `m_last` only on a codeword boundary, and legal codes only (rs_encoder).

Each assertion is disabled during reset with `disable iff (!rst_n)`, while
the same flops use `rst_n` as an asynchronous reset. Verilator therefore
reports `rst_n` as used both synchronously and asynchronously
(SYNCASYNCNET). This is expected and harmless.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. With
verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl rtl/gr_pkg.sv tb/tb_guardrider.sv \
          --top-module tb_guardrider -o sim && ./obj_dir/sim
```

Replace the testbench name for any other test. The testbenches need no
input files; all stimulus is generated with `$urandom`.

| testbench | what it checks |
|-----------|----------------|
| tb_framer, tb_symbol_packer, tb_tx_serializer, tb_upsampler, tb_frequency_shifter | frame format and CRC, symbol packing and padding, preamble/NRZ order, bit hold time, square-wave period |
| tb_rs_encoder | the RS(7,3) example, all m, random codes against a table-based reference, RS(127,1), throughput |
| tb_rs_decoder | the RS(7,3) example, 0..t random and burst errors for several codes, beyond-t words flagged, latency, one-cycle input strobes |
| tb_guardrider_tag | the whole tag chain against a reference bit stream for several codes; air time; switch only during '1' bits at the square-wave rate; rebuild on a code change; drop |
| tb_power_detector, tb_matched_filter, tb_onoff_measure | magnitude against a real-valued root, boxcar sums, run lengths |
| tb_pareto_mle | Pareto samples by inverse CDF; lambda and mean within 1% of floating-point MLE |
| tb_markov_params, tb_heuristic_search | alpha, beta, p_s; chosen code against a floating-point binomial search |
| tb_demodulator | lock, bits and threshold for random powers, noise and start offsets; no lock on noise |
| tb_guardrider | end to end through a channel model with short bits (80 clocks, 4 samples per bit) |
| tb_guardrider_full | end to end at the default parameters (400 clocks per bit, 10 samples per bit) |
| tb_guardrider_codes | at the default parameters: RS(63,45), RS(63,29), RS(63,13) and RS(127,101), each with silent periods of 20, 40 and 60 us; every frame must be repaired and delivered |

The two end-to-end tests drive the tag's `switch_ctrl` through a simple
channel. Every SMP clocks the model forms one tag-channel I/Q sample: the
switch duty over the interval (doubled to remove the square wave), times an
excitation gate, plus noise. Dropping the gate for a few bits models a WiFi
silent period. The legacy channel is driven with on/off traffic whose run
lengths are drawn from Pareto distributions.

The tests count each mechanism and fail if any of them never happened:

* preamble lock on every frame;
* clean frames delivered byte-exact, including a 108-byte one;
* a short silence repaired by RS, with corrections reported and the CRC good;
* a long silence beyond t, where the decoder flags the codeword and the CRC
  fails;
* a 2-byte payload dropped by the tag;
* a code loaded directly (RS(15,7));
* traffic estimation choosing a new code, which makes the tag rebuild its
  generator and the next frames decode with the new code.

The full-size test covers one frame of each kind and an estimation run. It
runs in a few seconds of simulator time.
