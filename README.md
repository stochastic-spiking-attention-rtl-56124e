# Stochastic spiking attention (SSA) block

Spiking transformers carry their queries, keys and values as binary spike trains over `T`
time steps instead of as multi-bit numbers. This block computes the attention of one head
directly on those spike trains using stochastic computing: if two bits are independent samples
with probabilities `a` and `b`, their AND is a sample with probability `a*b`. Every multiplier of
dot-product attention therefore becomes an AND gate. Every scaling and softmax becomes a
*Bernoulli encoder*, a comparator that turns a count back into one random spike.

For each time step `t` and binary matrices `Q`, `K`, `V` of `N` tokens by `D_K` features, the
block produces

```
S(i,j)     ~ Bern( (1/D_K) * sum_dk  Q(i,dk) AND K(j,dk) )        attention score, N x N
Attn(i,dk) ~ Bern( (1/N)   * sum_j   S(i,j)  AND V(j,dk) )        attention output, N x D_K
```

This is a linear attention: the softmax is dropped, and normalisation is a division by `D_K` or
`N`. Both are powers of two, so each division is fixed by the width of a random number and
needs no divider. Averaged over time steps, the output spike rate tends to
`(1/N) * sum_j (QK^T/D_K)(i,j) * V(j,dk)`.

The RTL is written in SystemVerilog (IEEE 1800-2017) and is synthesizable. It is an
implementation of the architecture in Song, Katti, Simeone and Rajendran, "Stochastic Spiking
Attention: Accelerating Attention with Stochastic Computing in Spiking Networks". That
publication gives the structure of the array and of one unit, but not every detail. Where it is
silent, the choices made here are marked as such below and in the header comment of each file.

## The array

```
              K(1,dk) V(1,dk)   K(2,dk) V(2,dk)  ...  K(N,dk) V(N,dk)
                 |      |          |      |              |      |
  Q(1,dk) --> [SAU(1,1)]------[SAU(1,2)]------ ... --[SAU(1,N)] --> N-input adder -> Bernoulli enc -> Attn(1,dk)
  Q(2,dk) --> [SAU(2,1)]------[SAU(2,2)]------ ... --[SAU(2,N)] --> N-input adder -> Bernoulli enc -> Attn(2,dk)
    ...
  Q(N,dk) --> [SAU(N,1)]------[SAU(N,2)]------ ... --[SAU(N,N)] --> N-input adder -> Bernoulli enc -> Attn(N,dk)
```

There are `N x N` stochastic attention units (SAUs). SAU `(i,j)` owns the score `S(i,j)`.
Each clock, one feature column `dk` is broadcast: `Q(i,dk)` along row `i`, and `K(j,dk)` and
`V(j,dk)` down column `j`. So every query meets every key/value pair in the same cycle. The
whole score matrix is formed in parallel in `D_K` cycles, and no intermediate result is ever
written to memory. Each row ends in a population count of its `N` SAU outputs and a Bernoulli
encoder. Row `i` therefore emits `Attn(i,1), Attn(i,2), ...`, one per cycle, and the `N` rows
together deliver `Attn` one column per cycle.

## Inside one SAU

```
 Q(i,dk) --\
            AND --> 8-bit counter --> score register --> Bernoulli encoder --> S(i,j) --\
 K(j,dk) --/        (saturating)      (UINT8)            (rnd_s < score)                 AND --> to row adder
 V(j,dk) ----------------------> D_K-bit shift register (shifts while streaming) -------/
```

* **Query-key product.** For `D_K` cycles the counter counts cycles in which `Q AND K` is 1.
  This is the dot product of row `i` of `Q` with row `j` of `K`.
* **Score.** In the one gap cycle that ends each time step, the count moves into the score
  register and the counter clears. The encoder compares the register with a `log2(D_K)`-bit
  random number `rnd_s`. `rnd_s` is held constant for the whole next time step, so `S(i,j)` is
  one sample, `1` with probability `count/D_K`, and it stays fixed while it is used.
* **Attention-value product.** `S` is available only one time step after its `Q` and `K`
  arrived. So `V` is delayed by exactly one time step in a `D_K`-bit shift register. The
  register shifts only in the `D_K` streaming cycles, not in the gap cycle. Its length therefore
  equals one time step although a step lasts `D_K + 1` clocks. The unit's output is `S AND V`.

## Timing: two time steps in flight

Each time step occupies a *period* of `D_K + 1` clocks: `D_K` streaming cycles (phases
`0..D_K-1`) and one gap cycle (phase `D_K`).

```
period        0                 1                  2            ...      T (drain)
QK^T       step 0           step 1            step 2                    (zeros)
S held     -                S of step 0       S of step 1               S of step T-1
S AND V    -                step 0            step 1                    step T-1
Attn out   -                step 0 (+1 clk)   step 1 (+1 clk)           step T-1 (+1 clk)
```

While the counters build the query-key product of step `t+1`, the same SAUs, using the held
`S` and the delayed `V`, produce the attention-value product of step `t`. A run of `T` steps
therefore needs `T + 1` periods. The last period only drains, and its inputs are forced to zero.
The row encoders are registered (a choice of this design), so `Attn(:,dk)` of step `t` appears one clock after streaming
cycle `dk` of period `t+1`. From the clock that samples `start` to `done`, a run takes
`(T+1)(D_K+1) + 1` clocks. At the defaults that is 716 clocks for `T = 10`. Of these, the
`T (D_K+1) = 650` clocks of streaming correspond to 3.25 us at 200 MHz.

## Random numbers

Every encoder needs a uniform random integer. This design generates them with 16-bit Galois
LFSRs (`x^16 + x^14 + x^13 + x^11 + 1`, period 65535) and shares them as follows:

* one *score* LFSR per row, stepped once per time step (in the gap cycle). Its low
  `log2(D_K)` bits serve all `N` score encoders of that row;
* one *output* LFSR per row, stepped every streaming cycle. Its low `log2(N)` bits feed the row's
  output encoder.

That is `2N` generators instead of `N^2 + N`. Sharing a random number makes the scores of a
row correlated with each other: a low `rnd_s` fires many of them together. Each score still has
exactly the right probability, so every output's expected value is unchanged, but the variance
over a small number of time steps grows. The original architecture uses LFSRs and "a reuse
strategy" whose details are not published. This sharing scheme, the polynomial and the seeds
(`ssa_pkg::lfsr_seed`) are this design's own.

## Interface (`ssa_block`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | begin a run; ignored while `busy` or if `num_steps == 0` |
| `num_steps` | in | 8 | number of time steps `T` of the run |
| `q`, `k`, `v` | in | N | `q[i] = Q(i,dk)`, `k[j] = K(j,dk)`, `v[j] = V(j,dk)` of the current column |
| `in_ready` | out | 1 | the column on `q/k/v` is taken this clock (columns `0..D_K-1`, steps `0..T-1` in order) |
| `busy` | out | 1 | run in progress |
| `attn` | out | N | `attn[i] = Attn(i, attn_col)` of step `attn_step` |
| `attn_valid` | out | 1 | `attn`, `attn_col` and `attn_step` are valid |
| `attn_col` | out | log2(D_K) | output column (0-based) |
| `attn_step` | out | 8 | output time step (0-based) |
| `done` | out | 1 | one-clock pulse after the last output of a run |

There is no back-pressure. Once started, the block consumes one column per streaming cycle and
emits one column per streaming cycle. The source must supply a column every cycle that
`in_ready` is high, and the sink must accept every `attn_valid` column.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `N` (tokens, array is N x N) | 16 | the published target range is 16-128 tokens; 16 is its lower end |
| `DK` (key dimension) | 64 | not published; chosen so that `T(D_K+1)` clocks at 200 MHz for `T = 10` (3.25 us) matches the reported FPGA latency of 3.3 us |
| counter, score register and adder width | 8 (UINT8) | as published |
| `STEP_W` | 8 | own choice (T up to 255) |

`N` and `DK` must be powers of two, with `N <= 256`. At the defaults the block has 256 SAUs and
about 21,000 flip-flops, most of them the 64-bit value shift registers. Everything scales
with `N^2 * D_K`.

Limits of the 8-bit widths: with `D_K = 256`, a count of 256 saturates at 255, so a score that
should fire with certainty fires with probability 255/256. Likewise, a row sum of 256 at
`N = 256` saturates at 255.

## What is published and what is chosen here

These parts follow the published architecture:

* the N x N SAU array and its broadcast of `Q` along rows and `K`/`V` down columns;
* the unit's chain (AND, 8-bit counter, register, Bernoulli encoder, AND with a `D_K`-bit
  value shift register);
* the N-input adder and Bernoulli encoder at the end of each row, with UINT8 widths;
* `D_K` streaming cycles plus one extra cycle per time step, with consecutive steps overlapped;
* LFSR random numbers, and normalisation by comparison with a power-of-two random integer.

These are this design's own choices:

* The score `S` is held for the whole `D_K + 1` cycle period. The published text says it is
  held for `D_K` cycles, which is the part of the period in which it is used.
* The value shift register shifts only in streaming cycles. This is how a `D_K`-bit register
  gives a delay of exactly one time step.
* The counter and row adder saturate at 255 instead of wrapping.
* The row output is registered (one clock of latency).
* The random-number sharing, polynomial and seeds.
* The start/done handshake, the drain period, the valid flags and the reset are all this
  design's own.
* The default sizes `N = 16` and `D_K = 64` (see above). The published work gives a range of `N`
  and no value for `D_K`.

The defaults were simulated. Larger arrays (up to `N = 128`) are written for but were not
simulated here. Since the flip-flop count grows as `N^2 * D_K`, expect long build times at
the top of the range.

## Files

| file | content |
|---|---|
| `rtl/ssa_pkg.sv` | default sizes, LFSR polynomial and seeds, the `sau_ctrl_t` control bundle |
| `rtl/ssa_block.sv` | top: controller, N x N SAUs, per-row LFSRs, adders and output encoders |
| `rtl/ssa_controller.sv` | period/phase sequencer, input-ready and output-valid flags |
| `rtl/sau.sv` | one stochastic attention unit |
| `rtl/v_shift_reg.sv` | the `D_K`-bit value delay line of an SAU |
| `rtl/row_adder.sv` | N-input population count, UINT8 result |
| `rtl/bernoulli_encoder.sv` | comparator `rnd < value` |
| `rtl/lfsr.sv` | 16-bit Galois LFSR |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Each testbench compares the module with a reference written independently from the
equations. Each one prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_ssa_block` runs the full-size block (`N = 16`, `D_K = 64`, no parameter overrides) for
  `T = 4`, `8` and `10` time steps back to back. These are the time-step counts at which the
  spiking models were evaluated. A model built from the two equations above and the LFSR
  polynomial predicts every output bit. All 22,528 output bits match. The testbench also checks
  the output order, the run latency `(T+1)(D_K+1)+1`, and that the output rate matches `sum/N`
  within a binomial bound. It counts the overlap of consecutive steps, the gap cycles and the
  drain period, and fails if any of them never happens. The measured output rates are reported
  next to the ideal, unsampled linear attention.
* `tb_ssa_convergence` checks the stochastic arithmetic. It gives every element of `Q`, `K` and
  `V` a fixed firing probability, draws fresh spikes every step for `T = 250` steps, and
  compares each output's firing rate with the ideal linear attention of those probabilities.
  A typical result is a mean absolute error of about 0.02 at a mean output of about 0.25, with a
  bias below 0.005. Against a permuted reference the error is about 0.05, which shows that the
  outputs follow their own inputs.
* `tb_sau` plays the sequencer for 40 time steps, and checks counter saturation with a
  `D_K = 256` instance.
* `tb_ssa_controller` checks the schedule cycle by cycle for `T = 1, 3, 10`.
* `tb_lfsr` checks the polynomial bit by bit, the enable and the full period.
* `tb_v_shift_reg`, `tb_row_adder` and `tb_bernoulli_encoder` check the small blocks, the latter
  two exhaustively or with saturation cases.

Each testbench was also run against a deliberately broken copy of its module (a wrong
polynomial, `<=` for `<`, OR for AND, a missing enable, and so on), and each reported failures.

To simulate with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/ssa_pkg.sv tb/tb_ssa_block.sv --top-module tb_ssa_block
./obj_dir/Vtb_ssa_block
```

The package must be on the command line before the files that import it. The block takes well
under a second to simulate at its default size.

## What is not here

* **Spike encoding of the inputs.** In a spiking transformer, `Q`, `K` and `V` come from a layer
  that Bernoulli-codes the token embeddings, multiplies them by the projection weights and feeds
  leaky integrate-and-fire neurons. That layer is outside the attention block, and its neuron
  parameters are not published. The block takes `Q`, `K` and `V` as spike inputs instead.
* **Memories and host.** Operand storage (assumed to be on-chip SRAM in the published energy
  estimates) and the FPGA system that hosts the block are not part of this RTL.
* **Model size.** The evaluated ViT-Small model has 6 layers of 8 heads. One `ssa_block` computes
  one head for one time step every `D_K + 1` clocks. Scheduling the heads and layers onto one
  or more blocks is left to the system. Whether a given model's token count fits depends on
  its patch size, which is not published. A head with fewer than `D_K` features can be
  zero-padded, at the cost of scaling its scores by `features/D_K`.
