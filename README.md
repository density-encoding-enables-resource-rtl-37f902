# Density-encoded RVFL classifier in SystemVerilog

A Random Vector Functional Link (RVFL) network is a three-layer classifier.
Its input-to-hidden connections are random and fixed. Only the readout
matrix is trained, by ridge regression, in a single step. A conventional
RVFL computes its hidden layer as `sigmoid(W_in * x + b)`, with
real-valued `W_in`, `x` and `b`. That is a dense multiply-accumulate
followed by a transcendental function.

The density-encoded variant removes all of that arithmetic:

1. Each feature `x_i` in `[0, 1]` is quantized to an integer level
   `v_i = round(x_i * N)` in `[0, N]`, where `N` is the number of hidden
   neurons.
2. The level is read as a thermometer code of length `N`, called the
   density code. Position `j` is `-1` when `j < v_i` and `+1` otherwise.
3. Every feature owns a random bipolar vector, its row of `W_in`, with
   entries in `{-1, +1}`. Hidden neuron `j` multiplies position `j` of every
   feature's code with that feature's weight. In hyperdimensional-computing
   terms this is *binding*. It then adds the `K` products (*bundling*) and
   clips the sum to `[-kappa, kappa]`:

       h_j = clip_kappa( sum_i  F[j][i] * W_in[j][i] ),  F[j][i] = (j < v_i) ? -1 : +1

4. The readout is an integer matrix-vector product, `y = W_out * h`, with
   small integer weights (5 bits here). The predicted class is the largest
   `y_l`.

The hidden input is always an integer in `[-K, K]`, and `h` is an integer in
`[-kappa, kappa]`. Nothing in the datapath is wider than a few bits until
the readout accumulators. The code `F` never has to exist. A hidden neuron
only needs to know, for each feature, whether its own index lies below that
feature's level. If it does, the neuron flips the sign of the weight.

The reported FPGA implementation runs the median network of a 121-dataset
benchmark: `K = 16` features, `N = 512` hidden neurons, `L = 4` classes and
5-bit readout weights. It was about 11 times more energy-efficient and 2.5
times faster than a conventional RVFL. The publication describes the
algorithm and these results, but not the micro-architecture. The schedule,
memories, handshake and number formats below are this design's own choices.
The arithmetic matches the algorithm exactly.

## Worked example

The publication illustrates the hidden layer with `K = 5` and `N = 10`.
This example is the golden vector of several testbenches.

| feature | x     | v = round(10x) |
|---------|-------|----------------|
| 1       | 0.276 | 3              |
| 2       | 0.680 | 7              |
| 3       | 0.955 | 10             |
| 4       | 0.163 | 2              |
| 5       | 0.119 | 1              |

`W_in` (rows are features, columns are hidden neurons 1..10):

    #1  +1 -1 -1 -1 +1 +1 +1 +1 -1 -1
    #2  +1 -1 +1 -1 -1 +1 -1 +1 -1 -1
    #3  -1 +1 +1 +1 +1 -1 -1 -1 +1 +1
    #4  +1 +1 -1 +1 +1 +1 -1 +1 +1 +1
    #5  +1 +1 +1 +1 +1 -1 -1 -1 -1 +1

Neuron inputs:

    -3 +1 -1 +1 +3 +1 +1 +3 -3 -1

After clipping with `kappa = 2`:

    -2 +1 -1 +1 +2 +1 +1 +2 -2 -1

For example, neuron 1 (index `j = 0`) lies below every level. Every code bit
is therefore `-1`, every weight flips sign, and the sum is
`-(1 + 1 - 1 + 1 + 1) = -3`.

## Architecture

```
            x[K] (Q1.8)     kappa
               |              |
   start -> density_quantizer x K   (combinational)
               | v[K]         |
               +--- captured at start ---+
                                         |
   win_mem  --(LANES rows of K bits)--> hidden_neuron x LANES --h[LANES]--+
   (N/LANES words)                        (XOR, popcount, clip)           |
                                                                          v
   wout_mem --(LANES x L weights)----------------------------------> readout_mac
   (N/LANES words)                                                  (L accumulators)
                                                                          |
                                                      argmax -> y[L], cls, done
   rvfl_ctrl: read address, accumulate enable, result capture
```

The hidden neurons are not all built in parallel. `LANES` hidden neurons
(default 8) are evaluated per clock. The network is therefore swept in
`G = N / LANES` groups: 64 groups at the default size. For each group the
controller reads two words in the same cycle:

- one `win_mem` word, holding the `W_in` rows of those `LANES` neurons;
- one `wout_mem` word, holding their `LANES x L` readout weights.

One cycle later, `LANES` copies of `hidden_neuron` produce the activations.
`readout_mac` then adds `h_j * W_out[l][j]` into all `L` accumulators.

### Hidden neuron (`hidden_neuron`)

The most unusual block. Bipolar values are one bit each (`1` means `-1`).
Binding is therefore `(j < v_i) XOR w_bit`, and bundling is
`K - 2 * popcount(bound bits)`. Clipping compares against the run-time
`kappa`.

The comparator `j < v_i` is the whole density code. No `N x K` code matrix
is ever stored. Each neuron takes its own index `j`, which is
`group * LANES + lane`.

### Number formats

| signal              | format                       | range at defaults    |
|---------------------|------------------------------|----------------------|
| feature `x`         | unsigned Q1.8, 9 bits        | 0 .. 1.0 (256)       |
| level `v`           | unsigned, `ceil(log2(N+1))`  | 0 .. 512, 10 bits    |
| `W_in` entry        | 1 bit, 1 = -1                | {-1, +1}             |
| hidden sum          | signed, 6 bits               | -16 .. 16            |
| activation `h`      | signed, 5 bits               | -kappa .. kappa (<=15) |
| `W_out` entry       | signed, 5 bits               | -16 .. 15 (trained: -15 .. 15) |
| output `y`          | signed, 18 bits              | never overflows      |

The 18-bit accumulator holds `N * KAPPA_MAX * 16 = 122880` in magnitude.

Quantization rounds halves up and clamps inputs above 1.0 to `v = N`. It is
computed as `(x_q * N + 128) >> 8`.

`kappa` is a run-time input (0..15), captured with the features at `start`.
This makes the four clipping thresholds of the hyperparameter search
(1, 3, 7, 15) available without a rebuild. A build for one fixed small
`kappa` can set `KAPPA_MAX` lower. For example, `KAPPA_MAX = 3` gives 3-bit
activations, the figure quoted in the publication for `kappa = 3`.

### Memory layout

- `win_mem` word `g`: bits `[p*K +: K]` hold the `W_in` row of neuron
  `g*LANES + p`. Bit `i` of that row belongs to feature `i`.
- `wout_mem` word `g`: bits `[(p*L + l)*WOUT_BITS +: WOUT_BITS]` hold
  `W_out[l][g*LANES + p]`.

Both memories have a synchronous write and a synchronous read with one
cycle of latency. Neither has a reset.

## Interface and timing (`rvfl_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst` | in | clock, synchronous active-high reset |
| `win_we`, `win_waddr`, `win_wdata` | in | write one `W_in` word |
| `wout_we`, `wout_waddr`, `wout_wdata` | in | write one `W_out` word |
| `cfg_ready` | out | high while idle; writes while busy are dropped |
| `start` | in | one-cycle pulse while idle; captures `x` and `kappa` |
| `x[K]`, `kappa` | in | features (Q1.8) and clipping threshold |
| `busy` | out | a pass is in progress |
| `done` | out | one-cycle pulse; `y` and `cls` are valid from here until the next `done` |
| `y[L]`, `cls` | out | output sums and predicted class (lowest index on a tie) |
| `start_dropped` | out | a `start` arrived while busy and was ignored |

A pass takes `N / LANES + 3` cycles from the `start` edge to `done`:

- one cycle captures the features;
- `N / LANES` cycles read the memories;
- one cycle drains the read pipeline;
- one cycle registers the result.

At the defaults that is 67 cycles. A typical use:

1. Load both memories, `N / LANES` words each.
2. Pulse `start` once per feature vector.

`W_in` must be the same random matrix the readout was trained with.
Training happens offline: ridge regression on the clipped activations,
then rounding to integers, optionally refined by a genetic algorithm.
Training is not part of this RTL.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `K` | 16 | median feature count of the benchmark |
| `N` | 512 | median hidden-layer size; also the code length |
| `L` | 4 | median class count |
| `WOUT_BITS` | 5 | readout resolution used in the hardware comparison |
| `KAPPA_MAX` | 15 | largest clipping threshold of the hyperparameter grid |
| `FRAC_BITS` | 8 | this design's choice (feature format) |
| `LANES` | 8 | this design's choice (throughput/area trade-off); must divide `N` |

## Files

| file | content |
|------|---------|
| `rtl/rvfl_pkg.sv` | default sizes, width helper functions |
| `rtl/density_quantizer.sv` | `v = round(x * N)` |
| `rtl/hidden_neuron.sv` | binding, bundling, clipping for one neuron |
| `rtl/win_mem.sv`, `rtl/wout_mem.sv` | weight memories |
| `rtl/readout_mac.sv` | `L` accumulators for `y = W_out h` |
| `rtl/argmax.sv` | class decision |
| `rtl/rvfl_ctrl.sv` | pass sequencer |
| `rtl/rvfl_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_rvfl_top_full` and `tb_rvfl_workloads` |
| `tb/rvfl_size_runner.sv` | testbench helper: loads and checks one build of the top at given sizes |

## Verification

Each testbench compares against values computed independently inside the
testbench. It prints `TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_density_quantizer` checks the example levels, then every input code at
  `N = 10` and `N = 512`.
- `tb_hidden_neuron` checks the example neuron inputs and activations. It
  then runs 4000 random cases at `K = 16`, `N = 512`. These use a reference
  that builds the bipolar code explicitly.
- `tb_win_mem` and `tb_wout_mem` check read-back and the one-cycle read
  latency.
- `tb_readout_mac` checks random and extreme products, plus idle cycles.
- `tb_argmax` checks random values, frequent ties and range extremes.
- `tb_rvfl_ctrl` checks the schedule at 64 and 5 groups: latency, address
  order, accumulate window and ignored starts.
- `tb_rvfl_top` runs the whole design at `K=5, N=10, L=3, LANES=2`:
  - first the worked example;
  - then 60 random passes, checking `y`, `cls` and latency.

  It counts the design's mechanisms and fails if any never occurred:
  clipping at `+kappa` and at `-kappa`, a change of `kappa`, a dropped
  `start`, a dropped weight write, and a tie in the class decision.
- `tb_rvfl_top_full` runs the default-size top (`K=16, N=512, L=4`). It
  loads random weights and runs one pass each with `kappa = 1, 3, 7, 15`,
  checking all outputs and the 67-cycle latency.
- `tb_rvfl_workloads` rebuilds the top at other sizes of the
  hyperparameter grid and checks random passes on each:
  - `N = 50` with 5 lanes;
  - `N = 1500` with 4 lanes;
  - `KAPPA_MAX = 3`, which gives 3-bit activations;
  - `K = 4`, `L = 10` with 10 lanes.

To simulate one of them with Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/rvfl_pkg.sv tb/tb_rvfl_top_full.sv --top-module tb_rvfl_top_full
    ./obj_dir/Vtb_rvfl_top_full

All files pass `verilator --lint-only -Wall`. The only warnings are unused
package constants and unused observation outputs.

## Departures and open points

- **Code direction.** The original text describes the code in two ways:
  - the `v` *leftmost* positions are `-1`;
  - `v` selects the *rightmost* connections.

  This design follows the leftmost reading, which is also what the worked
  example shows: position `j` is `-1` when `j < v`. With the other reading
  the activations are permuted, so a readout trained for one reading does
  not work with the other.
- **Summation direction.** The text calls the sum column-wise in one place
  and row-wise in another. Both describe the sum over features at one
  hidden position, which is what is built.
- **Not specified in the publication, chosen here:**
  - the feature fixed-point format and the rounding of halves;
  - the activation and accumulator widths;
  - the lane-parallel schedule and the memory organisation;
  - the load port and the handshake;
  - reset behaviour;
  - the argmax tie rule.
- **Not built:**
  - generation of `W_in`: it is loaded, so an externally drawn matrix
    can be used;
  - training of `W_out`;
  - the board-level host interface.
- **Not checked.** The energy and speed figures of the original FPGA
  implementation are not reproduced by, and cannot be checked against,
  this RTL.
- **Other network sizes** of the hyperparameter search (`N` from 50 to 1500)
  need a rebuild, because `N` fixes both the hidden layer and the code
  length. `N` must be a multiple of `LANES`.
