# SMURF: a stochastic finite-state-machine approximator for multivariate functions

SMURF (Stochastic Multivariate Universal-Radix Finite-state machine) evaluates
a nonlinear function of several variables, f(x_1, ..., x_M), with almost no
arithmetic. Every quantity is a probability in [0,1] carried by a random
bitstream. Each input bitstream drives a small saturating up/down counter (a
chain FSM). Together the counters pick, on every clock, one of N^M programmable
"coin flips". The fraction of ones in the result bitstream is the function
value. Changing the N^M coin biases (the *weights*) changes the function:
one block of hardware serves tanh, swish, softmax, a Euclidean norm, and so on.

This repository holds synthesizable SystemVerilog for that approximator in
the configuration that the original SMURF publication (Feng, Shen, Hu, Li,
Wong) builds in hardware: two inputs, 4‑state chains and 16 weights. All sizes
are parameters. It also holds self-checking testbenches, including one that
fits weights for the published workloads and measures the accuracy.

## 1. How a chain of states computes a function

### Stochastic numbers and theta-gates

A value p in [0,1] is encoded as a bitstream whose bits are 1 with probability p.
A *theta-gate* makes such a stream from a fixed-point number. It compares p with a
fresh uniform random word each cycle and outputs `rnd < p`. Averaging L bits
recovers p with a standard deviation of sqrt(p(1-p)/L). At L = 64 that is about 0.06;
this noise floor dominates every error figure below.

### One chain FSM

A chain FSM has states S_0 .. S_{N-1}. On an input bit of 1 it moves one state
right, and on 0 one state left. It stays put at the ends: a 1 in S_{N-1} or a 0 in S_0.
Fed with P(1) = p, the chain settles into a stationary distribution. Detailed
balance across each edge, P(S_{i+1})(1-p) = P(S_i)p, gives

    P(S_i) = t^i / (1 + t + ... + t^{N-1}),     t = p / (1 - p).

For p near 0 the chain sits in S_0, and for p near 1 in S_{N-1}. The middle
states peak in between. These N curves are the basis functions of the
approximator. Two states only give linear curves; from three states on, a
weighted sum of them can bend.

### Many chains and the universal-radix codeword

With M inputs there are M independent chains. Their states i_1 .. i_M,
read as the digits of a base-N number (i_1 least significant), form the
codeword

    s = i_M N^{M-1} + ... + i_2 N + i_1,    0 <= s < N^M.

The chains are independent, so the aggregate state s has probability
P(s) = prod_j P(S_{i_j}; p_j). A CPT (conditional probability table) gate holds
N^M theta-gates with thresholds w_0 .. w_{N^M-1}. Each cycle it outputs the
bit of gate s. The mean output is therefore

    E[y](p_1..p_M) = sum_s w_s * prod_j P(S_{i_j}; p_j).

"Universal radix" refers to the codeword: it is a number whose radix is the
chain length, and the radix may differ per digit. With chain lengths
R_1 .. R_M the codeword is the mixed-radix number
s = i_1 + R_1 (i_2 + R_2 (i_3 + ...)), and the CPT gate holds R_1 R_2 ... R_M
weights. The `RADIX` parameter sets the lengths; by default every chain has N
states.

### Choosing the weights

E[y] is linear in the weights, so fitting a target T(p) is a bounded
least-squares problem. Minimise the integral of (T - E[y])^2 over [0,1]^M
subject to 0 <= w_s <= 1. Written out, minimise w'Hw - 2c'w with

    H[s][s'] = integral of P(s) P(s') dp,      c[s] = integral of T(p) P(s) dp.

On a tensor grid H is the Kronecker product of M copies of one N x N matrix. The
package `tb/smurf_fit_pkg.sv` solves the problem in simulation with accelerated
projected gradient descent (FISTA). Its weights are then quantised to 8 bits
(w * 256, rounded, capped at 255) and written into the weight registers.

The fit checks out against the published 16-entry weight table for the
Euclidean distance (x_1^2 + x_2^2)^{1/2}. Fitting (x_1^2 + x_2^2)^{1/2} / sqrt(2) reproduces
that table to within 0.03 per weight. So that table maps the output range
[0, sqrt 2] onto [0, 1], and outputs should be read the same way. The
published table for the Hartley-transform kernel sin(x_1)(sin x_2 + cos x_2)
could *not* be reproduced by any simple output scaling. It is used here only as
a weight set, and the test checks that the hardware converges to its
steady-state mean, not to the kernel itself.

## 2. Hardware structure

```
             +---------+  state   +----------------+ taps[0..M-1]   +-----------+  xb[M]  +------------+
             | lfsr_rng|--------->| rng_delay_line |--------------->| theta_x   |-------->| smurf_core |
             +---------+ (32 bit) | (shifted copies|                | gates (M) |         | M chain    |
                                  |  of the words) |     px[M] ---->|           |         | FSMs       |
                                  +----------------+                +-----------+         +-----+------+
                                          | taps[M..M+N^M-1]                                   | sel = s
                                          v                                                   v
 cfg_we/addr/wdata --> +-------------+  w[N^M]  +--------------------------------------------------+
                       | weight_regs |--------->| cpt_gate: N^M theta_w gates + N^M:1 MUX        |--> yb
                       +-------------+          +--------------------------------------------------+
                                                                                               |
                                start, stream_len --> +------------+ <--------------------------+
                                                      | sn_decoder |--> busy, done, ones
                                                      +------------+--> fsm_init (to smurf_core)
```

| module | role | default size |
|---|---|---|
| `smurf_pkg` | shared constants (M=2, N=4, W=8), the LFSR feedback, and `ipow`/`idx_w`/radix helpers | – |
| `lfsr_rng` | 32-bit maximal-length LFSR, u(t) = u(t-32) ^ u(t-22) ^ u(t-2) ^ u(t-1), stepped W bits per clock so each word is 8 fresh bits | 32 FF |
| `rng_delay_line` | gives each of the M + N^M theta-gates its own shifted copy of the random sequence (see below) | XOR network + 15 x 8 FF |
| `theta_gate` | comparator `rnd < thr` | 1 comparator |
| `chain_fsm` | N-state saturating chain | 2 FF |
| `smurf_core` | M chains (lengths `RADIX[j]`) plus the mixed-radix codeword `sel` | 4 FF |
| `weight_regs` | N^M W-bit weight registers with one write port | 16 x 8 FF |
| `cpt_gate` | N^M theta_w gates plus the MUX | 16 comparators |
| `sn_decoder` | sequences one evaluation and counts the ones of y_b | 36 FF |
| `smurf_top` | everything above, wired as in the diagram | about 320 FF, 231 word-level cells |

The single RNG, the delayed branches, the theta-gates, the chain FSMs, the
codeword and the CPT gate are the structure the SMURF publication describes.
The LFSR and its polynomial, the 8-bit width, the delay amounts, the weight
write port and the start/done sequencing are choices made here, because the
source does not specify them. The published area breakdown shows the RNG
dominating the silicon (about 1600 of 5295 um^2, against 104 um^2 for the FSMs
and 293 um^2 for the CPT gate). Here, too, the delay line and the weight
registers hold most of the flip-flops.

### Random-number sharing: which delays

All theta-gates draw from one LFSR, each through its own shifted copy of the
word sequence rnd(n). The amounts of shift are not free: they decide
which gates see correlated words, and correlation biases the result.

A plain delay line with one-cycle steps gets this wrong. If theta_x_2 sees the
word theta_x_1 saw one cycle earlier, then with equal inputs chain 2 repeats
chain 1's moves one cycle late. The two chains are then never more than one
state apart, and whole regions of the codeword space are never visited. A
(3,5) mixed-radix test exposed this: two of its 15 codewords never occurred. The
design therefore uses

    theta_x_j (j = 1..M)   : rnd(n + (j-1) * SPACING)
    theta_w_t (t = 0..NW-1): rnd(n + M * SPACING + NW - 1 - t)

The input copies lie `SPACING` = 32 cycles apart, many times the mixing time
of a 4-state chain, so the chains behave as independent. Every weight copy uses
a word that no input gate has used *yet*. The current codeword depends only on
past input bits, so the selected weight bit is independent of it, and the output
mean is unbiased.

Shifting an LFSR sequence *ahead* costs no registers. Each future bit is a
fixed XOR of the present 32 state bits. `rng_delay_line` computes those XOR
masks at elaboration time by running the recurrence symbolically, and builds
one small XOR tree per output bit. The weight copies t > 0 are the first weight
copy delayed t cycles in a register chain: 15 x 8 flip-flops at the defaults,
instead of an XOR tree for each. After reset, weight copy t is valid after t
cycles; the first evaluation starts after that in any normal use.

## 3. Interface and timing of `smurf_top`

Parameters: `M` (inputs, 2), `N` (states per chain, 4), `W` (threshold and
random-word width, 8), `LEN_W` (width of the length and count, 16), `SPACING`
(cycles between the input gates' random copies, 32), `RADIX` (per-chain
lengths, default N for every chain; the weight count is their product, NW).

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_addr`, `cfg_wdata` | in | 1, clog2(NW), W | write weight `cfg_addr` (threshold = round(w * 2^W)) |
| `px[M]` | in | W each | input probabilities; px[j]/2^W is x_{j+1} |
| `start` | in | 1 | begin an evaluation (ignored while busy) |
| `stream_len` | in | LEN_W | bitstream length L (0 is treated as 1) |
| `busy`, `done` | out | 1 | evaluation running / one-cycle result strobe |
| `ones` | out | LEN_W | ones counted in the L output bits; the result is ones/L, held until the next start |
| `yb`, `sel` | out | 1, clog2(NW) | raw output bit and current codeword |

The edge that samples `start` also returns every chain to S_0. The next cycle
makes the first transition, and its output bit is not counted. The following L
cycles each count one bit of y_b, and `done` is high in the cycle after that.
So `done` rises L + 2 clock edges after the start edge: 66 cycles at the usual
L = 64, or 165 ns at the 400 MHz the original implementation runs at. `px` and
the weights must stay stable while `busy` is high.

Probabilities are W-bit fractions, so an input or weight of exactly 1.0 is not
representable; the largest is 255/256.

## 4. Measured accuracy

Mean absolute error over 100 random input points per workload. Weights are
fitted in simulation. "fit" is the error of the ideal steady state against the
target, so it excludes bitstream noise. At defaults (M = 2, N = 4):

| workload | fit | L = 64 | L = 256 | published (L = 64 / 256) |
|---|---|---|---|---|
| tanh(x), x in [0,1] | 0.003 | 0.044 | 0.028 | 0.037 / 0.011 |
| swish(x) | 0.005 | 0.050 | 0.029 | 0.033 / 0.010 |
| e^x1/(e^x1+e^x2) | 0.000 | 0.061 | 0.033 | 0.014 / – |
| (x1^2+x2^2)^{1/2}/sqrt 2 | 0.005 | 0.052 | 0.033 | 0.032 / – |
| 3-input softmax, first output, M=3, N=3 / 4 / 8 | 0.004 / 0.000 / 0.000 | 0.060 / 0.054 / 0.055 | 0.030 / 0.031 / 0.029 | about 0.04 at 64, 0.02 at 256 |

The fits are essentially exact, so the error is bitstream noise. The RTL gets
errors about 1.2 to 3 times the published ones (4 times for the bivariate
softmax, whose published figure is far below the noise floor). The published values at
L = 64 lie below the sqrt(p(1-p)/L) floor of independent pseudo-random bits. That suggests a
lower-discrepancy random source (the source mentions Sobol sequences as an
option), or a measurement that does not restart the chains. This RTL restarts
every chain in S_0 for each evaluation. That adds a start-up bias over the first
few bits, which matters most at L = 64.

## 5. Departures from the source, and what is not here

- **Digit order.** i_1 is the least significant digit of s. The source numbers
  the weights w_0 .. w_{N^M-1} without giving the mapping. Its Euclidean table
  is symmetric and cannot tell the orders apart, and the Hartley table fits
  neither order.
- **Inputs come from theta_x gates.** The inputs enter as fixed-point
  probabilities and are converted inside, as the source's block diagram shows.
  A variant that takes ready-made bitstreams would feed `xb` of `smurf_core`
  directly.
- **One output.** Each instance produces one output. The multi-output softmax
  the source discusses would need one CPT gate (and weight set) per output
  sharing the chains; the source leaves this to future work, and it is not
  built.
- **The CNN** (LeNet-5 with stochastic convolution) that the source uses as an
  application is not described at the hardware level and is not included.
- Reset values, the LFSR seed and polynomial, the handshake and the delay
  spacing are local choices. Each module's header comment says which parts
  follow the source and which are choices made here.

## 6. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/smurf_pkg.sv tb/tb_smurf_top.sv --top-module tb_smurf_top -o sim
./obj_dir/sim
```

For the workload test, add `tb/smurf_fit_pkg.sv` after `rtl/smurf_pkg.sv` and
use `--top-module tb_smurf_workloads`.

| testbench | what it establishes |
|---|---|
| `tb_lfsr_rng` | every word against a bit-serial LFSR model; the mean of the words |
| `tb_rng_delay_line` | every input and weight tap against the logged generator words, at M = 3, NW = 5, SPACING = 5; pairwise independence of the taps |
| `tb_theta_gate` | all 65536 threshold/word pairs |
| `tb_chain_fsm` | cycle-exact against a model; state occupancy against t^i/sum t^k within 0.02 |
| `tb_smurf_core` | M = 3, N = 3 (non-power-of-two radix) and mixed radices (2, 5, 3): digits and codeword against a model; every codeword reached |
| `tb_weight_regs` | random writes, including out-of-range addresses |
| `tb_cpt_gate` | random selects and words; the output mean for each select |
| `tb_sn_decoder` | L + 2 latency, count, hold, start-while-busy, L = 0 and L = 1 |
| `tb_smurf_top` | full design at default parameters: with both published tables, 4096-bit runs match the analytic steady state within 0.04; 64-bit error bounds; L + 2 latency; `ones` equal to the ones observed on `yb`; saturation at both chain ends, chain restart and weight reloads all counted and required |
| `tb_smurf_workloads` | seven instances in parallel: tanh, swish, bivariate softmax and Euclidean at defaults; the 3-input softmax at N = 3, 4 and 8; weights fitted in simulation and the Euclidean fit compared with the published table; a mixed-radix (3, 5) instance against its analytic steady state |

To compute another function, add it to `target()` in `smurf_fit_pkg`,
instantiate `smurf_harness` with its index, and read off the fitted weights
and errors. To use the hardware, write the quantised weights through the
`cfg_*` port once, then issue `start` for each input point.
