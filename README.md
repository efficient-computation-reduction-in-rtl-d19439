# DM-BNN: a Bayesian neural network inference engine with feature decomposition and memorization

## The idea

This RTL implements the DM-BNN inference flow of X. Jia, J. Yang, R. Liu,
X. Wang, S. D. Cotofana and W. Zhao, "Efficient Computation Reduction in
Bayesian Neural Networks Through Feature Decomposition and Memorization"
(called "the reference work" below). The microarchitecture is this
design's own; the last section lists what comes from where.

In a Bayesian neural network (BNN) every weight is a Gaussian
distribution, `w ~ N(mu, sigma^2)`, rather than a single number. Inference
samples `T` concrete networks ("voters") and averages their outputs. Done
naively, each voter of a fully connected layer with `N` inputs and `M`
outputs samples a weight matrix `W_t = H_t * sigma + mu`, where `H_t` holds
`N(0,1)` samples, and then computes `W_t . x`. That costs about `2MNT`
multiplications.

Because `x`, `sigma` and `mu` are the same for all voters, each output can be
split into two parts:

    y_t[i] = sum_j h_t[i][j] * (sigma[i][j] * x[j])  +  sum_j mu[i][j] * x[j]
           = <H_t, beta>_L[i]                         +  eta[i]

Both `beta = sigma (x) x` (an element-wise product, with `x` multiplied into
every row) and `eta = mu . x` are computed once and stored. This is the
*decomposition and memorization* (DM). Each voter then needs only one
row-wise inner product of its raw Gaussian samples with `beta`. No
scale-location transform is needed. The cost drops to about `MN(T+2)`
multiplications.

In a multi-layer network, layer 1 turns one input into `T_1` outputs. DM
needs a single input, so each of those outputs is treated as the input of
its own DM pass of layer 2, and so on down the layers. This is DM-BNN. The
voters form a tree. With `T = 10, 10, 5` on a 784-200-200-10 network there
are 1 + 10 + 100 DM passes and 500 final voters. Layer `l` samples only
`T_l` uncertainty matrices, and all of that layer's inputs share them.

Storing `beta` in full would need an extra `M x N` memory. The
*memory-friendly* scheme works on `R = alpha*M` output rows at a time. It
computes and stores `beta'` for those rows only, runs all voters on them,
and then moves to the next rows. The `beta` memory shrinks to `R x N`.
The default is `alpha = 0.1`, so `R = 20` rows and a 20 x 784 `beta'`
memory.

## Data path

```
            host load port                       seed_base
                 |                                   |
   +-------------+-------------+          +----------v----------+
   | weight_mem  (sigma, mu)   |          | TV x R grng (S)     |
   | one R-wide word per       |          | reseeded per        |
   | (layer, row block, column)|          | (layer, block,      |
   +-------------+-------------+          |  voter, lane)       |
                 | sigma/mu column        +----------+----------+
                 v                                   | h[TV][R]
   +---------------------------+  beta'   +----------v----------+
   | precompute_unit (P)       |--------->| beta_mem  R x N     |
   | beta' = sat(sigma*x >> 6) |          +----------+----------+
   | eta  += mu*x              |                     | beta' column
   +-------------+-------------+          +----------v----------+
          ^      | eta[R]  -------------->| feedforward_unit (F)|
          | x[j] |                        | TV x R MAC lanes    |
   +------+------+--------------+  y      | y = act(z + eta)    |
   | act_buffer                 |<--------+----------+----------+
   | bank 0: input x            | hidden             | last layer
   | bank l: T outputs of layer |                    v
   +----------------------------+         +---------------------+
                                          | vote_unit (V)       |
     dm_bnn_ctrl sequences everything     | mean, class         |
                                          +---------------------+
```

All layers use the same P and F units. The files are:

| module | role |
|---|---|
| `dm_bnn_top` | top level: wiring, host port, results |
| `dm_bnn_ctrl` | state machine: iterations, passes, depth-first tree walk, reseeding |
| `precompute_unit` | P stage: `R` multipliers for `beta'` and `R` MACs for `eta` |
| `beta_mem` | memorized `beta'` of one iteration, `N` words of `R` bytes |
| `grng` | central-limit Gaussian generator, one per voter lane (`TV x R`) |
| `feedforward_unit` | F stage: `TV x R` MAC lanes, adds `eta`, requantizes, ReLU |
| `weight_mem` | sigma and mu of all layers |
| `act_buffer` | input vector and the live voter outputs of each hidden layer, one memory of R-byte words per voter so a whole iteration is stored in one cycle |
| `vote_unit` | sums the last-layer outputs of all voters, mean and class |
| `bnn_pkg` | types, fixed-point formats, shape helpers, seed mixer |

## Schedule

A DM pass of layer `l` runs in `ceil(M_l / R)` iterations. Each iteration
goes through these states:

| state | cycles | what happens |
|---|---|---|
| P_START | 1 | clear `eta` |
| P_RUN | `N_l` | read sigma/mu column `j` and `x[j]`; the P unit takes them one cycle later, and column `j` of `beta'` is written |
| P_DRAIN | 1 | last P column |
| F_SEED | 1 | reseed every generator, clear the F accumulators |
| F_RUN | `N_l` | read `beta'` column `j`; one cycle later every lane adds `h * beta'` |
| F_DRAIN | 1 | last F column |
| WRITE | 1 | store `T_l x R` hidden outputs, or add them to the vote |

So one iteration takes `2*N_l + 5` cycles. Each pass adds one cycle to
choose the next pass. Each inference adds one cycle to finish the vote and
one to leave the start state. At the default size this comes to:

| layer | passes | iterations per pass | cycles |
|---|---|---|---|
| 1 (784 -> 200) | 1 | 10 | 15,731 |
| 2 (200 -> 200) | 10 | 10 | 40,510 |
| 3 (200 -> 10) | 100 | 1 | 40,600 |
| total incl. 2 | | | **96,843** |

The tree is walked depth first. The controller keeps one index per hidden
layer: `idx[l]` says which voter output of layer `l` is the input of the
current pass of layer `l+1`. When a last-layer pass ends, the controller
moves up to the deepest hidden layer that still has unused voters, takes
its next voter, and runs the layers below that again. So `act_buffer`
needs only one set of `T_l` outputs per hidden layer.

**Sharing H across a layer.** `H` is never stored. The generator of voter
`v`, lane `r` is reseeded at the start of every F phase from
`(seed_base, layer, block, v, r)`, mixed by splitmix64. So row `b*R + r` of
`H_lv` is the same sequence every time layer `l` runs, whatever its input.
This matches the DM-BNN dataflow, where each layer has `T_l` uncertainty
matrices shared by all inputs of that layer.

## Numbers

Every stored value is 8-bit two's complement. The bit split is this
design's own choice:

| quantity | fraction bits | note |
|---|---|---|
| sigma, mu | 6 (`W_FRAC`) | |
| x, `beta'`, activations | 4 (`A_FRAC`) | `beta' = sat8((sigma*x) >>> 6)` |
| Gaussian samples h | 4 (`H_FRAC`) | 16 LSB = 1 standard deviation, range +-90 |
| `eta`, `z` accumulators | 10 and 8 | 32-bit (`ACC_W`) |

Output of a voter: `y = sat8(act(((z <<< 2) + eta) >>> 6))`. All shifts
truncate toward minus infinity. Every result saturates to [-128, 127].
`act` is ReLU on hidden layers and the identity on the last layer. The mean
is `sum / 500`, truncated toward zero. `cls` is the index of the largest
sum.

The Gaussian generator draws a 64-bit xorshift state each cycle. It adds
up twelve 4-bit fields of that state and subtracts 90. This is the
Irwin–Hall central-limit approximation, with a standard deviation of about
1.0.

## Using it

1. Reset (`rst_n` low, asynchronous).
2. With `start` low, write every sigma/mu word. For word
   `base(l) + b*N_l + j`, lane `r` is row `b*R + r`, column `j` of layer
   `l`. Here `base(l)` is the sum of `ceil(M_i/R)*N_i` over the layers
   before `l`. Set rows beyond `M_l` to zero. At the default size there are
   10,040 words. Use `w_we`, `w_addr`, `w_sigma[R]` and `w_mu[R]`.
3. Write the input vector one byte at a time (`x_we`, `x_addr`, `x_data`).
   Set `seed_base`.
4. Pulse `start` for one cycle. `busy` stays high while the engine runs.
   `done` rises when `mean[10]` and `cls` are valid. They stay valid until
   the next `start`. Weights can stay in place across inferences.

Parameters of `dm_bnn_top`: `LAYER_N`, `LAYER_M`, `LAYER_T` (three-entry
arrays, default `{784,200,200}`, `{200,200,10}`, `{10,10,5}`), `R` (20),
`TV` (10) and `CLT_TERMS` (12). The network always has three layers
(`NUM_LAYERS` in `bnn_pkg`). Every `T_l` must be at most `TV`, and the last
layer must fit in one iteration (`M_3 <= R`).

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`, and the
top has two:

- `tb_dm_bnn_top` runs a reduced 12-8-6-3 network with `T = 3,2,2`, `R = 4`
  and `TV = 3`, for three inferences.
- `tb_dm_bnn_full` runs one inference at the default size. Simulation takes
  well under a second. Building takes about a minute and a half.

Both compare the engine with a reference model written directly from the
equations. The model draws the `T_l` matrices per layer once and applies DM
pass by pass. The testbenches check the vote sums, the means, the class,
the hidden outputs left in the buffer, and the exact cycle count. They
also count each mechanism and fail if one never occurs: multi-iteration
layers, partial row blocks, reseeding, reuse of `H` for a new input, tree
backtracking, partial voter sets, ReLU clamping and voting.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/bnn_pkg.sv tb/bnn_ref_pkg.sv \
    rtl/*.sv tb/tb_dm_bnn_full.sv --top-module tb_dm_bnn_full
./obj_dir/Vtb_dm_bnn_full
```

Each testbench prints `TB_RESULT checks=N failures=M`. The tests use the
two-state model of Verilator. Everything that is read is reset or written
first.

## What follows the reference work and what does not

Taken from the published method:

- the DM equations
- the pre-compute / feed-forward split
- DM applied to every layer, with `T_l` matrices per layer shared by all of
  that layer's inputs
- the memory-friendly iterations of `alpha*M` rows
- averaging as the vote
- the 784-200-200-10 network with `T = 10, 10, 5` and `alpha = 0.1`
- 8-bit fixed point
- one set of compute hardware shared by all layers

Chosen here, because the published description does not give it:

- the whole microarchitecture: lane counts, memory organisation, the
  schedule and state machine, and the depth-first tree walk
- the fixed-point split, rounding and saturation
- ReLU as the hidden activation
- the class decision by largest mean
- the Gaussian generator: its uniform source, term count and seeding, and
  the regeneration of `H` by reseeding instead of storing it
- the host load interface

Not included:

- the standard-BNN and Hybrid-BNN datapaths, which serve only as
  comparison points
- biases, which the method leaves out of its analysis
- convolution layers; the method would handle these by unfolding them into
  matrix products
- process-specific memory macros; all memories are plain arrays

At an assumed 1 GHz clock, the default schedule of 96,843 cycles would
take about 97 µs. The reference work gives no clock frequency and no
number of compute units, so this agreement is not evidence that its
microarchitecture was the same. The area and energy figures cannot be
compared with this RTL.
