# CeMux: a correlation-enhanced stochastic mux adder and FIR filter

Stochastic computing represents a number as the fraction of 1s in a stream of bits. In
the bipolar format used here, a stream whose bits are 1 with probability P stands for
the value 2P - 1 in [-1, 1]. Negation is then a single inverter. A weighted sum is a
multiplexer tree: each cycle the tree passes on the bit of one input, and input i is
chosen in a fraction |w_i| / sum|w| of the cycles. That makes a large weighted adder,
such as an FIR filter with a hundred taps, very cheap. The cost is accuracy. In a
conventional mux adder the error hardly falls as the number of inputs grows, because
the select lines come from independent random sources. The number of times each input
is sampled then fluctuates, and so do the input bits that happen to be sampled.

CeMux (correlation-enhanced multiplexer, from Baker and Hayes) removes most of that
error with three measures. None of them adds hardware:

* **Precise sampling.** A single N-bit counter drives all N levels of select lines of
  a height-N tree. In 2^N cycles every select word occurs exactly once. An input wired
  to q tree slots is therefore sampled exactly q times, with no random variation.
* **Full correlation.** All input streams come from one shared random number source.
  Inputs with negative weights compare against the *inverted* source value, and their
  streams are then inverted again to apply the sign. After this second inversion every
  stream that enters the tree is maximally positively correlated with every other
  stream. A badly timed selection can then no longer pick mostly 0s or mostly 1s.
* **A low-discrepancy source.** The shared source is a bit-reversed counter (the first
  Sobol dimension). Each input stream therefore spreads its 1s evenly over the frame.

This repository holds synthesizable SystemVerilog for the CeMux weighted adder. It
also holds the complete stochastic FIR filter built from it, set up as the 100-tap,
10-bit ECG lowpass filter that was the design's main application.

## Number formats and one frame of computation

All values are N-bit unsigned *probabilities* s, standing for the bipolar value
2s/2^N - 1. The default is N = 10, so the streams are 1024 bits long. The code 0 stands
for -1, 2^(N-1) for 0, and 2^N - 1 for 1 - 2^(1-N); exactly +1 cannot be represented.

One output takes one *frame* of 2^N cycles. At cycle t of the frame (t = 0 .. 2^N-1):

| stage | value at cycle t | module |
|---|---|---|
| data source | r = bit-reverse(t) | `cemux_sobol_rns` |
| comparators | x_i = (r < p_i) for w_i >= 0, (~r < p_i) for w_i < 0 | `cemux_pcc_array` (+ `cemux_comparator`) |
| sign | y_i = x_i, or ~x_i for w_i < 0 | `cemux_sign_inverter_array` |
| select | sel = t | `cemux_precise_sampler` |
| tree | z = y of the input that owns slot sel | `cemux_hw_mux_tree` |
| estimator | count += z ? +1 : -1 | `cemux_output_estimator` |

Both counters start at 0 with the frame and advance together. An assertion in
`cemux_adder` checks that the data source is always the bit reversal of the select
word. After the frame, `count / 2^N` estimates

    z = sum_i sign(w_i) * (q_i / 2^N) * (2 p_i / 2^N - 1)

where q_i / 2^N is weight i normalised by sum|w| and quantised to N bits. The result is
deterministic: a given set of inputs always gives the same count. The testbenches use
this and compare the hardware against a bit-exact model written from the equations
above.

## The hardwired tree

The weights are fixed at elaboration and built into the wiring. A height-N tree has
2^N *slots*, and slot s is selected when the select word equals s. The MSB of the
select word steers the root, and a 0 on any select line picks the lower half. Input i
owns q_i slots, where the q_i sum to 2^N.

A full tree would need 2^N - 1 muxes, but most of them would have the same input on
both sides. The slots are therefore laid out as a discrete distribution generating
(Knuth-Yao) tree. Input i gets one *leaf* at level k for every 1 in bit 2^-k of
q_i / 2^N. A leaf at level k is an aligned block of 2^(N-k) consecutive slots, so it is
a whole subtree and collapses to a wire. Only nodes whose slots belong to more than one
input remain as muxes. Their number is (total count of 1 bits in all q_i) - 1, which
grows linearly in N. The default 100-tap filter needs 145 muxes, where a full tree
would need 1023.

The leaves are handed out level by level, biggest first, and within a level in input
order. This keeps every block aligned. Example: weights 7/16, 4/16, 4/16, 1/16 with
N = 4 (binary 0.0111, 0.0100, 0.0100, 0.0001):

| level | leaves (slots) |
|---|---|
| 2 | y1: 0-3, y2: 4-7, y3: 8-11 |
| 3 | y1: 12-13 |
| 4 | y1: 14, y4: 15 |

The result has six leaves and five muxes. With four equal weights the counter produces
y1 y1 y1 y1 y2 y2 y2 y2 ... : the output is made of runs, one input at a time. Because
each input stream is low-discrepancy, any run of consecutive bits of one stream is
already a good sample of its value.

`cemux_hw_mux_tree` does this at elaboration. A constant function builds the slot→input
map. A generate loop then walks the heap-numbered nodes of the full tree and makes each
node a leaf (wire), a mux, or removed. Removed nodes are tied to 0 and read by nothing;
lint reports them as unused bits.

## Weights and the default filter

`cemux_pkg::quantize(a, m, n)` turns integer weight magnitudes into q_i that sum to
2^n:

1. Round t_i = 2^n a_i / sum(a) to the nearest integer, with halves going up.
2. While the sum is too large, decrement the q_i with the largest q_i - t_i.
3. While the sum is too small, increment the q_i with the largest t_i - q_i.

Ties go to the lowest index. All of this is exact integer arithmetic.

The default coefficients come from `cemux_pkg::lowpass_coef`. They are an M-tap
Hamming-windowed sinc lowpass with cutoff 0.1π rad/sample:
h_k = (0.54 - 0.46 cos(2πk/(M-1))) · sin(0.1π x)/(πx), with x = k - (M-1)/2. The
package evaluates them during elaboration, using its own Taylor-series sin/cos. The
signs go to the `NEG` parameter and the quantised magnitudes to `Q`. For M = 100, 40
taps are negative. To use your own filter, pass `Q` and `NEG` to `cemux_fir` or
`cemux_adder`. A `Q` that does not sum to 2^N is an elaboration error.

## Interfaces and timing

`cemux_adder` (parameters N, M, Q, NEG):

* A `start` pulse while idle clears the estimator and both counters.
* `busy` is then high for exactly 2^N cycles.
* `done` pulses 2^N + 1 cycles after `start`. `estimate` (signed, N+2 bits, N
  fractional) holds from then until the next start.
* The inputs `p` must stay stable while `busy` is high. A `start` while busy is
  ignored.

`cemux_fir` (the top; parameters N = 10, M = 100, Q, NEG):

* A tap line `cemux_delay_line` feeds the adder. It is an M × N shift register that
  resets to the value 0.
* A sample is taken on a clock edge with `in_valid && in_ready`. That same edge shifts
  the tap line and starts a frame.
* `in_ready` is low while a frame runs, so a sample offered then waits.
* `out_valid` pulses 2^N + 1 cycles after the sample was taken, with
  `out_estimate` = filter output / sum|h_k|.
* At the 360 samples/s of an ECG front end, the clock must run at 360 × 1025 ≈
  369 kHz or faster.

## Measured accuracy

These results are from the testbenches, with 10-bit precision unless stated.

| experiment | result |
|---|---|
| random weights in (-1,1), random inputs, 1000 frames; RMSE × √1024 | M=8: 0.10, 16: 0.14, 32: 0.19, 64: 0.23, 128: 0.28, 256: 0.35 |
| ECG-like waveform + noise, default lowpass, RMSE vs. ideal filter | M=25: 3.3e-3, 50: 4.9e-3, 100: 5.2e-3, 150: 6.2e-3, 250: 7.5e-3 |
| M = 150, stream length 64 / 256 / 1024 | 3.8e-2 / 1.9e-2 / 6.2e-3 |

The published CeMux figures are similar. They report a normalised RMSE of about 0.1 to
0.4 over the same input range, an ECG RMSE of 4.2e-3 to 6.3e-3 for M = 25..250, and an
RMSE below 2^-4 with 64-bit streams. The ECG numbers here use a synthetic waveform and
this design's own coefficients, so they are comparable but not identical.

## Files

| file | contents |
|---|---|
| `rtl/cemux_pkg.sv` | defaults (N = 10, M = 100), weight vector types, quantisation, default lowpass taps |
| `rtl/cemux_sobol_rns.sv` | bit-reversed counter, the shared data random source |
| `rtl/cemux_comparator.sv`, `rtl/cemux_pcc_array.sv` | comparators, with the shared inverted source for negative weights |
| `rtl/cemux_sign_inverter_array.sv` | sign inversion of negative-weight streams |
| `rtl/cemux_precise_sampler.sv` | select counter |
| `rtl/cemux_hw_mux_tree.sv` | hardwired tree, built as a Knuth-Yao tree |
| `rtl/cemux_output_estimator.sv` | up-down counter |
| `rtl/cemux_adder.sv` | the CeMux adder with frame control |
| `rtl/cemux_delay_line.sv` | FIR tap line |
| `rtl/cemux_fir.sv` | the filter (top) |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/cemux_ref_pkg.sv` | reference models: slot layout, bit-exact frame count, test waveforms, random weights |
| `tb/tb_workload_random_weights.sv`, `tb/tb_random_channel.sv` | random-weight accuracy sweep |
| `tb/tb_workload_ecg.sv`, `tb/tb_ecg_channel.sv` | ECG tap and precision sweeps |

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one, for example the
full-size filter test (300 samples, about 300k cycles, a few seconds):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/cemux_pkg.sv tb/cemux_ref_pkg.sv tb/tb_cemux_fir.sv --top-module tb_cemux_fir
    ./obj_dir/Vtb_cemux_fir

Any other testbench runs the same way with its own file and top name.
`tb_workload_ecg` elaborates 13 filters and takes about a minute to build.

## Where this implementation makes its own choices

The structure follows the published CeMux: one shared bit-reversed-counter source,
comparators, the inverted source and sign inverters for negative weights, a counter on
the select lines with its MSB at the root, a hardwired tree built from the binary
expansions of the weights, and an up-down counter. The following points are this
implementation's own:

* **Estimator width.** The estimator is N + 2 bits wide. The original specifies an
  N-bit up-down counter, but a full frame spans ±2^N.
* **Filter taps.** The original took them from a filter-design tool and did not list
  them. Here they are a Hamming-windowed sinc, computed during elaboration.
* **Slot order within a tree level.** Only the level of each leaf is defined by the
  construction; the order within a level is this implementation's.
* **Rounding in quantisation.** Halves round up and ties go to the lowest index.
* **Frame handshake and reset.** The start/busy/done and valid/ready handshakes, the
  restart of both counters at every frame, reset values (counters 0, taps at value 0),
  and the input encoding as an unsigned probability are all this implementation's
  choices.
* **Tap memory.** The tap line is a plain shift register. The original does not
  describe this memory, since it is the same for every filter it compares.
* **Size limits.** Weights travel as packed vectors sized for at most 256 inputs and
  16-bit precision.

The published lower-area variant (weighted binary generators instead of comparators),
the biased-selector variant with adaptable weights, and the designs CeMux was compared
against are not part of this code.
