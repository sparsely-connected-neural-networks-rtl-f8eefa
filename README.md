# Sparsely-connected neuron layer with LFSR-generated connection masks

Most of the weights of a deep network sit in its fully-connected layers, and
reading them from memory dominates the energy of an accelerator. A
*sparsely-connected* layer removes a large, fixed fraction of the connections
(50 % to 90 %+) and trains only the remaining weights. The hardware trick that
makes this cheap is that the pattern of removed connections is never stored:
each neuron regenerates its column of the binary connection mask `M` on the
fly with a small linear-feedback shift register (LFSR) and a comparator. The
neuron's weight memory then holds only the weights of the connections that
exist, packed in the order the inputs arrive, so it shrinks by the sparsity
factor while the neuron still takes one input per clock and finishes in `N`
cycles, exactly like a conventional multiply-accumulate neuron.

This repository holds synthesizable SystemVerilog for that neuron and for a
layer of such neurons working in parallel, with self-checking testbenches.
The default configuration is a 1024-input, 1024-neuron layer with binarized
weights and a sparsity threshold `p = 0.9375`, so each neuron keeps 64 of its
1024 weights (one bit each).

## 1. The mask generator (SNG)

A stochastic number generator (`sng`) is an `NB`-bit LFSR (`lfsr`) followed
by the comparison `S >= p`:

* The LFSR state, read as the binary fraction `S = state / 2^NB`, walks
  through all `2^NB - 1` nonzero values in a fixed pseudo-random order.
* The mask bit for input `i` is `1` (connection exists) when `S_i >= p`, and
  `0` (connection removed) otherwise. Over a full period the fraction of 1s is
  therefore `1 - p`: `p` is the fraction of connections removed.
* `p` is carried as the integer code `P = p * 2^NB`, so the comparator is a
  plain unsigned `state >= P`. `P = 0` gives a fully-connected neuron.

**Register convention.** The register is best pictured as cells `c1 .. cNB`
from left to right. Each step it shifts one cell to the right, and the XOR of
its tap cells enters `c1`. Its value is `0.c1 c2 .. cNB`, so `c1` is the most
significant bit; in the RTL `state[NB-1]` is `c1`. The value used for the
first input is the seed itself. For 3 bits with taps `c2, c3` and seed `001`
this gives

    0.125, 0.5, 0.25, 0.625, 0.75, 0.875, 0.375, (0.125 ...)

and seed `101` gives the same cycle starting at 0.625. For other lengths the
taps are those of standard maximal-length polynomials (table in `snn_pkg`).
For the default 10 bits the polynomial is `x^10 + x^7 + 1`: cells 10 and 7
feed cell 1.

**Different neurons, different columns.** Neuron `j` of a layer uses seed
`(j mod (2^NB - 1)) + 1`. All neurons walk the same cycle of values, but from
different starting points, so their mask columns are rotations of one another.
A 10-bit register has only 1023 nonzero seeds, so in the default
1024-neuron layer neurons 0 and 1023 share seed 1 and have identical masks.

## 2. How many weights a neuron stores

The number of weights a neuron must store is the number of 1s its SNG gives
in `N` steps. `snn_pkg::mask_ones` computes this at elaboration time, and it
sets the neuron's memory depth `DEPTH`.

With the usual choice `N = 2^NB`, the LFSR period is `N - 1`. The register
visits every nonzero value once and then shows its seed a second time for
the last input. That gives

    DEPTH = 2^NB - max(P, 1)  +  (SEED >= P ? 1 : 0)

which is exactly `(1 - p) N` when the seed lies below the threshold. For
`N = 1024` and seed 1 the thresholds `p = 0, 0.5, 0.75, 0.875, 0.9375` give
1024, 512, 256, 128 and 64 stored weights. A neuron whose seed is at or
above `P` needs one more word. In the default layer this holds for the 64
neurons with seeds 960 to 1023, which store 65 weights each. For other `N`
(for instance 784 inputs with a 10-bit register) the depth is counted by
stepping the LFSR.

The memory is loaded in connection order. Address `k` holds the weight of the
`k`-th input whose mask bit is 1. To build the contents from a trained dense
column `W[0..N-1]`, step a software copy of the LFSR from the neuron's seed.
Append `W[i]` whenever the value at step `i` is `>= P`.

## 3. The neuron datapath (`sparse_neuron`)

    x_i ──────────────────────────────┐
                                      ▼
    LFSR ─► S_i >= P ─┬─► en ► counter ─► weight_mem ─► (x * w) ─► accumulator (en) ─► ReLU ─► y
                      └─────────────────────────────────────────────────▲

One input arrives per cycle. The mask bit of that input drives two enables:

* **bit = 1:** the accumulator adds `x_i * w[addr]` and the address counter
  moves to the next stored weight;
* **bit = 0:** the counter and the accumulator both hold; the input is skipped.

The memory is read asynchronously, so the weight at the counter's address
meets its input in the same cycle. The loop has no pipeline bubbles, and the
latency is `N` cycles for any `p`.

Weights are applied according to `MODE` (`snn_pkg::weight_mode_e`):

| `MODE`       | stored bits | "multiplier"                                   |
|--------------|-------------|------------------------------------------------|
| `WM_BINARY`  | 1           | mux: `1 -> +x`, `0 -> -x` (default)            |
| `WM_TERNARY` | 2           | mux: `00 -> 0`, `01 -> +x`, `1x -> -x`         |
| `WM_FULL`    | `W_W`       | signed `X_W x W_W` multiplier                  |

The accumulator is `acc_bits(...)` wide, enough that `N` products plus a
bias cannot overflow: 19 bits for 8-bit inputs, binarized weights and
`N = 1024`. ReLU makes the output non-negative, so `y` is one bit narrower.

**Handshake and timing.** Everything is synchronous to `clk`, and the reset
`rst_n` is synchronous and active-low.

1. Load the weights (`w_we/w_addr/w_data`) and the bias (`b_we/b_data`)
   while the neuron is idle.
2. Pulse `start` for one cycle. This reloads the LFSR seed, clears the
   counter, loads the bias into the accumulator and raises `busy`.
3. Present `x` with `x_valid` high, one input per cycle. A cycle with
   `x_valid` low is a stall, and nothing advances.
4. The clock edge that takes the `N`-th input lowers `busy` and raises
   `y_valid`. With no stalls, `y_valid` rises `N` cycles after the first
   input (1024 cycles, or 2.56 us at 400 MHz). `y` and `acc_o` stay valid
   until the next `start`.

A `start` during a pass abandons that pass and begins a new one. An
assertion checks that every stored weight is used exactly once per pass
(the counter is back at 0 after the `N`-th input).

## 4. The layer (`sparse_layer`, top)

The layer is semi-parallel: `M` neurons run in lockstep on one broadcast
input stream, so all `M` outputs of `y = ReLU(W_s x + b)` are ready after `N`
cycles. Weights are written with `w_neuron` and `w_addr`. A write beyond the
selected neuron's `DEPTH` is dropped, so it cannot alias into a short memory.
Biases are written with `b_neuron`. The outputs come out as the array
`y[M]`.

Default size after generic synthesis: about 46 k word-level cells,
69,696 flip-flop bits and 65,600 memory bits. The memory is 1024 neurons of
64 or 65 one-bit words. For comparison, a dense layer of the same size would
store 1,048,576 weight bits.

## 5. Parameters

| module          | parameter | default      | meaning                                        |
|-----------------|-----------|--------------|------------------------------------------------|
| `sparse_layer`  | `N`       | 1024         | inputs per neuron (cycles per pass)            |
|                 | `M`       | 1024         | neurons                                        |
|                 | `NB`      | `$clog2(N)`  | LFSR length, 2..16                             |
|                 | `P`       | 960          | threshold code, `p = P / 2^NB` (0.9375)        |
|                 | `MODE`    | `WM_BINARY`  | weight format                                  |
|                 | `X_W`     | 8            | signed input width                             |
|                 | `W_W`     | 8            | weight width for `WM_FULL`                     |
| `sparse_neuron` | `SEED`    | 1            | LFSR seed (the layer sets it per neuron)       |

`N <= 2^NB` and `P < 2^NB` are required. The sparsity is fixed when the
design is elaborated, because `P` sets the memory depth.

## 6. What is specified and what is chosen here

The source architecture gives:

* the neuron structure: LFSR, `in >= p` comparator, an enabled counter over
  the compressed memory, a multiplier (a multiplexer for binary and ternary
  weights), an enabled accumulator and ReLU;
* the rule that SNG 1s enable both the counter and the accumulator;
* a `log2(N)`-bit LFSR per neuron, each with a different seed;
* a memory depth of `(1-p) N`, and a latency equal to that of a dense neuron;
* the neuron sizes: 1024 inputs and binarized weights;
* the layer example: 1024 x 1024, with neurons in parallel.

This design chose the following:

* the input width (8-bit signed) and the accumulator width;
* the bias preload. The architecture's equation has a bias, but its neuron
  diagram does not;
* the register-file memory with asynchronous read, and the load ports;
* the start/valid handshake, the stall behaviour and the synchronous reset;
* the LFSR taps for lengths other than 3, and the rule for assigning seeds;
* the default `p = 0.9375`;
* the treatment of `N = 2^NB`, where the period is one short: the seed value
  is reused for the last input, and the memory grows by one word when that
  value is a connection.

Known differences from the source:

* **Fraction of 1s.** The source states that the mask is 1 when `S >= p`,
  and also calls `p` the expected value of the stream. The two cannot both
  hold. This design follows the comparison. The fraction of 1s is then
  `1 - p`, which matches the stated memory depth `(1-p) N` and the published
  memory sizes.
* **The 3-bit example.** In the source's worked example, the printed mask
  streams do not follow from the printed LFSR values and `p = 0.57`. The
  printed matrix `M` does not match the streams either. The testbench uses
  the streams the comparison actually gives: `0,0,0,1,1,1,0` and
  `1,1,1,0,0,0,0`.
* **Out of scope.** A dense-neuron baseline, any sequencing of several
  layers, activation buffering between layers, and off-chip weight loading
  are not part of this RTL.

## 7. Files and simulation

`rtl/`: `snn_pkg` (types, LFSR taps, depth and width functions), `lfsr`,
`sng`, `addr_counter`, `weight_mem`, `mac_acc`, `relu`, `sparse_neuron`,
`sparse_layer`.

`tb/`: one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=F` and has a cycle watchdog.

* `lfsr_tb` checks the 3-bit example sequences, and checks the 10-bit
  register step by step against `x^10+x^7+1` with period 1023.
* `sng_tb` checks the example streams and the number of 1s per pass at the
  five thresholds 0, 0.5, 0.75, 0.875 and 0.9375.
* `sparse_neuron_tb` runs five 1024-input neurons at those thresholds. It
  checks their memory depths, their sums and ReLU outputs against an
  independent model, the 1024-cycle latency, stalls, and a full-multiplier
  neuron.
* `sparse_layer_tb` runs the layer end to end at 64 inputs x 8 neurons. It
  counts every mechanism: used and skipped connections, stalls, ReLU clamps,
  restarts and dropped writes.
* `sparse_layer_full_tb` runs the same test on the default 1024 x 1024
  layer.
* `sparse_layer_mnist_tb` runs it on the shape of the first layer of a
  784-512-512-10 MNIST network at 50 % sparsity (784 inputs, `p = 0.5`),
  with 32 of the 512 neurons. Here the memory depths are counted by stepping
  the LFSR, not taken from the closed form.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/snn_pkg.sv tb/sparse_layer_tb.sv --top-module sparse_layer_tb
    ./obj_dir/Vsparse_layer_tb

Verilator finds the other modules through `-Irtl`. The full-size layer takes
several minutes to compile, because every neuron has its own seed and
therefore its own specialised module. It then simulates in a few seconds.
