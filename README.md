# Stochastic-computing neural network for ligand-based virtual screening

Virtual screening ranks millions of candidate molecules by how likely they are
to act on a drug target. This accelerator does the ranking with a small neural
network. It compares two compounds, a known active ligand and a candidate, and
returns one similarity score. Each compound is described by 12 numbers, its
molecular pairing energies: the six most positive and the six most negative
Coulomb-like energies `K*q_i*q_j/r_ij` over its atom pairs. The network input
is therefore 24 values. The network is `[24]-48-24-1` with ReLU hidden layers.

The hardware does the arithmetic in *stochastic computing* (SC). A number is
carried as a random bit-stream, one bit per clock, and its value is the mean
of that stream. A multiplier is then a single XNOR gate and a ReLU is a single
OR gate. The multiply-accumulate array becomes small enough that twelve whole
networks fit side by side, and each scores its own compound pair.

This RTL follows the accelerator described in *"Stochastic-based Neural Network
hardware acceleration for an efficient ligand-based virtual screening"*
(Frasser, de Benito, Canals, Roca, Ballester, Rosselló). That paper's main
hardware model is "Hw 48": 12-bit SC, the `[48-24-1]` network, 12 copies on an
Intel Arria 10 FPGA at 125 MHz. The paper gives the datapath and its two
random sources. It does not give the timing, the interface, the random-number
polynomials or the normalisation rule. Those are this design's own, and are
listed in [Departures and own choices](#departures-and-own-choices).

## 1. Numbers as bit-streams

All binary values are 12-bit two's complement fractions in `[-1, 1)`. For
example, `0.100` (binary, sign.fraction) is +0.5.

* **Binary to stochastic (BSC, `bsc`)**: `x(t) = (X > R(t))`. This is a signed
  compare of the value with a random number `R(t)` that is uniform over the
  12-bit range. `P(x=1) = (X + 2048)/4096`. Counting a 1 as +1 and a 0 as -1
  (*bipolar* coding), the stream's mean is `X/2048`.
* **Multiply**: `z = XNOR(x, y)`. If `x` and `y` come from *independent* random
  numbers, the mean of `z` is the product of the means.
* **Stochastic to binary**: a signed up/down counter counts +1 for each 1 and
  -1 for each 0. After `N` cycles the count divided by `N` is the stream's value.
  A register samples it at the end of the *evaluation window*.

Correlation changes what a gate computes. If two streams come from the *same*
`R(t)`, they are maximally correlated. An XNOR then gives `1-|x-y|`, an AND
gives `min` and an OR gives `max`. The design uses both cases on purpose:

| streams | source of randomness | gate | result |
|---|---|---|---|
| input/activation × weight | `R_x` vs `R_w` (independent) | XNOR | product |
| neuron output `s(t)` and `zero(t)` | both `R_x` | OR | `max(s, 0)` = ReLU |

## 2. The stochastic neuron (`sc_neuron`)

```
 x_1(t) ─┐
 w_1(t) ─┴XNOR─┐
   ...         ├─ n bits ─► APC ─► window total C ─► shift+saturate ─► [reg] value
 x_n(t) ─┐     │                  (at window end)                         │
 w_n(t) ─┴XNOR─┘                                                          ▼
                                         R_x(t) ─────────────────────► value > R_x ─ s(t) ─┐
                                         zero(t) = (0 > R_x(t)) ──────────────────────────OR── a(t)
```

* **XNOR array**: one gate per input, `prod = ~(x ^ w)`.
* **APC** (`apc`, accumulative parallel counter): every clock it adds
  `2*popcount(prod) - n`, the ones minus the zeros, to a signed accumulator.
  In the last cycle of the window (`win_last`), the total *including that cycle*
  goes to register `q` and the accumulator restarts. With `n = 1` this is
  exactly the up/down counter and register above. The accumulator has
  `$clog2(n*N+1)+1` bits: 19 bits for 49 inputs and `N = 4096`.
* **Normalisation**: `C/N` estimates `Σ w_j x_j`. To put it back on the
  12-bit scale, `value = sat(C >>> (EVAL_LOG2 - SC_BITS + 1 + NORM_SHIFT))`.
  With `N = 4096` and `NORM_SHIFT = 0` this is `C >>> 1`. The result saturates
  to `[-2048, 2047]`, so a sum outside `[-1, 1)` is clipped. `NORM_SHIFT`
  scales a layer's outputs down by `2^NORM_SHIFT`. Training has to use the same
  scale.
* **Output**: during the *next* window, `s(t) = (value > R_x(t))` and
  `a(t) = s(t) | zero(t)`. Because `zero(t)` uses the same `R_x(t)`,
  `a(t) = (max(value, 0) > R_x(t))` holds bit by bit, not only on average.
  The output neuron has no OR gate. Its registered `value` is the score.
* **Bias**: every neuron has one extra input that is tied to a constant-1 stream
  (bipolar +1), so the last weight of each neuron is its bias (`sc_layer`).

**Accuracy.** With a 4096-cycle window, each product's mean has a standard
deviation of about `1/64`. Errors add up across inputs and layers. At 8 bits and
256-cycle windows, the `[4]-3-2-1` test network stays within a mean absolute
error of about 0.09 (on a ±1 scale) of the real-valued network.

## 3. Two random sources for the whole chip

```
LFSR1 ─ R_x(t) ─┬─► zero(t) BSC (input 0)
                ├─► BSC array for the 24 descriptors of each copy
                └─► output comparator of every neuron in every copy
LFSR2 ─ R_w(t) ───► BSC array for all 2401 weights (shared by all copies)
```

LFSRs are the largest SC building block, so only two are used. Inputs, the
zero reference and all activations are correlated with each other. That is
harmless because they are only ever XNORed with weights. Weights are correlated
with each other, and that is harmless for the same reason.

* LFSR1: Fibonacci, `x^12+x^11+x^10+x^4+1`, seed `0x001`.
* LFSR2: `x^12+x^6+x^4+x+1`, seed `0xACE`.

Both are maximal length (period 4095) and their state is `R(t)`, read as
signed. The all-zero value never occurs. A window of 4096 cycles therefore
sees 4095 distinct values plus one repeat. The resulting bias is far below the
SC noise.

## 4. Windows, pipeline and timing

Time is cut into evaluation windows of `N = 2^EVAL_LOG2 = 4096` cycles
(`sc_window_ctrl`). Every APC in the chip closes its window in the same cycle.
A layer's registered value drives the next layer's streams during the following
window. The three neuron layers therefore form a three-stage pipeline, one
window per stage:

| window | active input register | hidden 1 | hidden 2 | output |
|---|---|---|---|---|
| k   | batch A | counts A | –        | –          |
| k+1 | batch B | counts B | counts A | –          |
| k+2 | batch C | counts C | counts B | counts A   |
| k+3 | …       | …        | …        | counts B; **y(A) valid** |

**Input handshake.** A batch (24 descriptors × `N_COPIES`) is taken in any
cycle where `in_valid && in_ready`. It goes into a pending register. At the
next window end it moves into the active register. `in_ready` is low while the
pending register is full. In steady state, one batch is accepted per window.

**Output.** `out_valid` is high for one cycle, together with the new `y`. This
happens one cycle after the window end in which the output neuron finished a
real batch. Windows without a batch still run (bubbles) and raise no
`out_valid`.

**Latency and rate.** The first batch goes in at cycle 0 and comes out at
cycle `4*N` = 16,384, or 131 µs at 125 MHz. The rate is `N_COPIES/N` inferences
per cycle. At 125 MHz with 12 copies that is 366,211 inferences per second.
The published measurement for this configuration is 72,727 per second, about
20,600 cycles per inference per copy. The paper does not say how that time
breaks down, for example host transfers or layers that do not overlap. This RTL
does not try to reproduce it.

## 5. Top-level interface (`sc_vs_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `u[N_COPIES][N_U]` | in | `sc_word_t` | descriptors per copy: `u[c][0..11]` compound 1, `u[c][12..23]` compound 2 (any fixed order used in training) |
| `in_valid` / `in_ready` | in / out | 1 | batch handshake |
| `w1[N_H1][N_U+1]` | in | `sc_word_t` | hidden-1 weights; `w1[i][N_U]` is the bias of neuron i |
| `w2[N_H2][N_H1+1]` | in | `sc_word_t` | hidden-2 weights; last column bias |
| `w3[N_H2+1]` | in | `sc_word_t` | output weights; last entry bias |
| `y[N_COPIES]` | out | `sc_word_t` | score per copy, 12-bit fraction |
| `out_valid` | out | 1 | one-cycle pulse with `y` |

`sc_word_t` is `logic signed [11:0]`, from `sc_pkg`. Weights are plain ports
and must stay stable while inferences are in flight. They are shared by all
copies, so all copies run the same model.

Weights must fit in `[-1, 1)`. Scale them at training time, and match the
layer scaling to `NORM_SHIFT1..3`. A large outlier weight forces a coarse
scale on all the others. The original work names this as one reason the SC
models score lower than the floating-point ones.

## 6. Parameters and network sizes

| parameter | default | meaning |
|---|---|---|
| `N_COPIES` | 12 | parallel networks |
| `N_U` | 24 | inputs (2 × 12 descriptors) |
| `N_H1`, `N_H2` | 48, 24 | hidden layer sizes |
| `EVAL_LOG2` | 12 | window length `2^EVAL_LOG2`; must be ≥ `SC_BITS-1` |
| `NORM_SHIFT1..3` | 0 | extra down-scaling per layer |
| `sc_pkg::SC_BITS` | 12 | word width (package constant) |

The published hardware table evaluates these shapes (copies = how many fitted
the FPGA):

| model | shape | copies | as this RTL |
|---|---|---|---|
| Hw 12 | 12-6-1 | 72 | `N_H1=12, N_H2=6, N_COPIES=72` (simulated) |
| Hw 24 | 24-12-1 | 27 | `N_H1=24, N_H2=12, N_COPIES=27` |
| **Hw 48** | **48-24-1** | **12** | **defaults** (simulated) |
| Hw 64 | 64-32-1 | 7 | `N_H1=64, N_H2=32, N_COPIES=7` |
| Hw 256 | 256-1 | 3 | not supported: one hidden layer only |

A smaller network cannot be run exactly on the default hardware by zeroing
weights. A zero weight is a stream with p = 0.5, so its XNOR products are
random ±1 values that add noise.

## 7. Departures and own choices

These points follow the original description:
* the comparator BSC;
* XNOR multiplication;
* the APC counting ones minus zeros;
* the register loaded at the end of the window;
* the ReLU as OR with a correlated zero stream;
* exactly two LFSRs with the stated roles;
* a binary output from the last neuron;
* 12-bit resolution;
* the Hw 48 shape and 12 copies.

These are this design's own:
* **Window length** of `2^12` cycles.
* **LFSR polynomials and seeds.**
* **Normalisation rule**: shift and saturate. The original only says that the
  outputs are normalised to 12 bits.
* **Bias as a constant-1 input.** The published synapse counts include
  biases, but the hardware neuron is drawn without one.
* **Layer pipelining**, one window per layer.
* **Handshake**: one pending batch, and the `out_valid` pulse.
* **Weights as stable input ports**, with one weight BSC array shared by all
  copies.
* **Throughput**: as computed in section 4, it is about 5× the published
  measurement.

Not included: the FPGA board, the host link, the descriptor computation (done in
software), the software tanh models, and the one-hidden-layer Hw 256 shape.

## 8. Files

| file | content |
|---|---|
| `rtl/sc_pkg.sv` | constants, `sc_word_t`, LFSR taps/seeds, `apc_width()` |
| `rtl/lfsr.sv` | Fibonacci LFSR, state = signed `R(t)` |
| `rtl/bsc.sv`, `rtl/bsc_array.sv` | comparator(s) `X > R` |
| `rtl/apc.sv` | accumulative parallel counter + window register |
| `rtl/sc_neuron.sv` | XNOR array, APC, normalisation, output BSC, ReLU OR |
| `rtl/sc_layer.sv` | neurons sharing inputs, bias input |
| `rtl/sc_ffnn.sv` | input BSC array + hidden 1 + hidden 2 + output neuron |
| `rtl/sc_window_ctrl.sv` | window counter, handshake, valid pipeline |
| `rtl/sc_vs_top.sv` | two LFSRs, zero BSC, weight BSCs, input registers, copies |

## 9. Verification and simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each one has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `lfsr_tb` | both LFSRs against their polynomials, period 4095, every non-zero value once, hold, reset |
| `bsc_tb` | the published 4-bit waveform example (`X=0.000`, `Y=0.100`, the 8 listed `R(t)` values, printed `x`, `y` and correlated XNOR `z`); 5000 random 12-bit compares |
| `bsc_array_tb` | per-element compares; a full sweep of `R` gives mean exactly `X/2048` |
| `apc_tb` | the published up/down-counter trace (`Z = -1 -2 -1 -2 -1 0 1 0`, `Q = 0`); random 7-input windows |
| `sc_neuron_tb` | bit-exact values and output streams, ReLU and linear; ReLU clamping and saturation must occur |
| `sc_layer_tb` | three neurons with bias, including bias-only windows |
| `sc_ffnn_tb` | one reduced network bit-exact per window; mean error against the real-valued network |
| `sc_window_ctrl_tb` | window strobe, handshake, out_valid timing with back-pressure and bubbles |
| `sc_vs_top_tb` | whole chip, 3 copies of `[6]-5-4-1`, 2048-cycle windows, 6 batches |
| `sc_vs_top_full_tb` | whole chip at the default size (12 × `[24]-48-24-1`, 4096-cycle windows), 3 batches |
| `sc_vs_top_hw12_tb` | whole chip as Hw 12 (72 × `[24]-12-6-1`) |

The three whole-chip testbenches share `tb/sc_vs_top_tb_body.svh`. It holds a
cycle-level model written from the equations above: its own LFSRs, compares,
counts, saturation, OR-ReLU, pending register and three-window pipeline. The
model predicts `in_ready` and `out_valid` in every cycle and `y` of every copy,
bit for bit. The first-result latency must be exactly `4*N` cycles. Back-pressure,
bubble windows, overlapping layers, ReLU clamping and saturation must each
happen at least once. No trained weights are available, so the weights are
random, with one neuron driven into saturation on purpose.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/sc_pkg.sv tb/sc_vs_top_full_tb.sv --top-module sc_vs_top_full_tb -o sim
./obj_dir/sim
```

The full-size build takes about a minute and the run a few seconds. The
simulator is two-state: every register the design reads is reset.
