# Stochastic-computing Sparse Kaczmarz estimator

This is synthesizable SystemVerilog for an estimator that solves linear models
`y = A x + w` entirely with stochastic computing (SC). It follows the
architecture of M. Lunglmayr, D. Wiesinger and W. Haselmayr, *A stochastic
computing architecture for iterative estimation*. Numbers are carried as long
random bit streams, not as binary words. One datapath covers four estimators:

| use of the engine                       | lambda = 0 | lambda > 0      |
|-----------------------------------------|------------|-----------------|
| any matrix `A`, more iterations than rows | Kaczmarz   | Sparse Kaczmarz |
| `A` a convolution matrix, one pass      | NLMS       | Sparse LMS      |

The algorithm, with `v` as an internal vector and `x` as the estimate, is:

```
v = 0
for k = 1..N:
    x = shrink(v, lambda)              # shrink(v,l) = sign(v) * max(|v| - l, 0)
    i = (k - 1) mod m                  # rows of A are reused cyclically
    v = v + a_i * (y_i - a_i^T x) / ||a_i||^2
```

The hardware never stores `x`. In every iteration it makes `x` from `v`
as a stream and uses it at once. In binary, the vector update is a matrix row
times a vector. In SC it becomes gates, small shift registers and counters.
The only binary storage is `v`, the problem data and the final `x`.

## 1. Numbers as two-line bit streams

A value in [-1, 1] is carried as a *two-line bipolar* (TLB) stream, with one
bit on a positive line `p` and one on a negative line `n` each clock. Over
`L` clocks the value is `(ones(p) - ones(n)) / L`. The type `sc_pkg::tlb_t`
is one clock of such a stream. The format has three useful properties:

* Negation is free: swap the two lines (`sc_pkg::tlb_neg`).
* A clock with a one on both lines is worth zero. A *cancellation* circuit
  (`sc_cancel`: `p' = p & !n`, `n' = n & !p`) removes such pairs. This does
  not change the value and gives the stream its least variance.
* Values are regenerated from memory so that one line is all-zero (see
  `sc_d2s`). The shrink function below depends on this.

Stored values are signed integers of `W+1` bits. An integer `c` stands for
`c / (2^W - 1)`. At `W = 16` this matches the 16-bit maximum-length LFSRs
that generate the streams, and `L = 2^16 - 2` clocks per iteration (one clock
less than the LFSR period).

## 2. The shrink function from two stochastic maxima

Shrink is the non-linear part of Sparse Kaczmarz, and the hardest part of
this design to follow. It is built from the stochastic maximum `sc_max`.

**The maximum circuit.** `sc_max` takes two unipolar streams `A` and `B`.
An `M`-cell bidirectional shift register tracks how far the ones of `A` have
run ahead of the ones of `B`:

* The register only moves in clocks where `A != B`.
* On `A=1, B=0` a one is shifted in at the left end.
* On `A=0, B=1` a zero is shifted in at the right end.

The register therefore holds a thermometer code of the running excess of `A`
over `B`, clamped to 0..M. The output is `C = B`, except in a clock with
`A=1, B=0`. There `C` is the right-end cell, which is one only when the
register is full. Two properties follow:

1. **Every one of `B` reaches `C`.**
2. A lone one of `A` passes only after `A` has been ahead by `M` ones.
   - If `P_A > P_B`, the register stays full, the excess ones of `A` pass,
     and `C` carries `P_A`.
   - If `P_A < P_B`, the register stays near empty. A one of `A` leaks only
     when the register happens to be full. This is a birth-death chain with
     ratio `r = P_A(1-P_B) / (P_B(1-P_A))`. The leak rate is
     `P_e = r^M / (sum_{j=0..M} r^j) * P_A (1 - P_B)`.
     For `P_B = 0.5`, `P_e` is largest as `P_A -> 0.5`. There `r -> 1`
     and the formula tends to `0.25 / (M+1)`. The published closed form
     gives `0.25 / M`, which is a slightly looser bound.

**Shrink.** `sc_shrink` gives each line of the input stream to input `A` of
its own maximum block. The lambda stream goes to both `B` inputs. One of the
input lines is all-zero, so there are two cases:

* `|v| < lambda`: both blocks output (about) the lambda stream. The
  following cancellation turns these equal streams into two all-zero lines.
  The result is zero.
* `|v| > lambda`: the block on the active line outputs `|v|`. The block on
  the zero line outputs exactly the lambda stream. The TLB difference of the
  two lines is then `|v| - lambda`, with the sign of `v`.

No comparison or branch is needed. The error that matters most is a false
non-zero where the answer is zero. Its per-bit probability is the leak rate
above, at most `0.25 / (M+1)`. For the default `M = 10` this is 0.0227;
the testbench measures 0.0222.

`sc_shrink_cancel` puts `N_DIM` shrink lanes side by side, each followed by a
cancellation circuit. It also has a `bypass` input that sends `v` straight to
the cancellation. This gives `x = v`, the lambda = 0 mode. The top level
selects the bypass whenever the stored lambda is zero. Running a maximum
against an all-zero `B` would otherwise drop the first `M` ones of each
stream.

## 3. One iteration through the datapath

```
 v store --D/S--> v_s --+--> shrink & cancel --x_s--> scalar product <-- a_s <--D/S-- A row i
                        |                                  |
                        |                         -(line swap)
                        |                                  v
                        |         y_i --D/S--> non-scaled adder --> x (mult) <-- 1/||a_i||^2 --D/S
                        |                                                |
                        |                                         delay (10 FFs)
                        |                                                v
                        +--> non-scaled adder (per lane) <-- mult by a_s[j]
                                     |
                                   S/D counter --> v^(k+1) --(update clock)--> v store
 final iteration:  x_s --S/D counters--> x_out = x^(N)
```

All `2n + 3` stream generators run in parallel. For `L` clocks every element
of the datapath handles one bit per clock:

1. `v^(k)` streams pass the shrink and cancellation block and become `x^(k)`.
2. `sc_scalar_product` forms `a_i^T x^(k)`. The result is negated by swapping
   its lines and added to `y_i` (`sc_add`), giving `y_i - a_i^T x^(k)`.
3. This is multiplied by the `1/||a_i||^2` stream (`sc_mult`).
4. The result is delayed by 10 clocks (`sc_delay`). The `a_i` streams are
   used a second time in the next step. Without the delay, the same `a_i`
   bits would meet both factors and the product would be biased.
5. The delayed stream is multiplied by each `a_ij`. Each product is added to
   the `v_j` stream, and a counter (`sc_s2d`) accumulates the sum.
6. After `L` clocks, each counter holds `L * v_j^(k+1)`, close to the stored
   form of `v_j^(k+1)`. One UPDATE clock copies the counters into the
   `v` store.
7. During iteration `N`, a second set of counters also accumulates the
   `x^(N)` streams. After the run, `x_out` holds the estimate.

The path from the `v` store to the counters is combinational, apart from the
state registers of the maximum blocks and the adders and the 10-stage
delay. There is no other pipelining.

## 4. Arithmetic blocks

**Multiplier (`sc_mult`).** Each clock, the positive line collects the
like-signed bit pairs and the negative line the unlike-signed ones. A
cancellation removes the clock where all four input bits are one. The output
bit is then exactly `(ap-an)(bp-bn)`, so for independent streams the mean is
the product.

**Non-scaled adder (`sc_add`) and scalar product (`sc_scalar_product`).**
Both use the same core, `sc_carry_core`:

* Each clock it receives the number of positive ones and negative ones on
  its inputs.
* It adds their difference to a stored carry.
* It outputs one unit of the right sign, because a TLB stream can carry at
  most one unit per clock.
* It keeps the rest as carry.

The carry lives in two thermometer-coded shift registers of `DEPTH = 20`
cells, one for positive and one for negative carries. Opposite carries
cancel, so at most one of the two registers is non-empty.

The sum is exact while the true running sum stays within `DEPTH` units of
what has been output. If the value of a sum leaves [-1, 1], the carry
saturates, further units are lost, and `overflow` (the top's `carry_ovf`)
flags the clock.

**Converters.**

* `sc_d2s` compares `|c|` with the state `r` of its own 16-bit LFSR
  (`r` runs through 1..65535) and puts the result on the line chosen by the
  sign of `c`. Over a full LFSR period this gives exactly `|c|` ones. Each
  generator is seeded at a different phase (`sc_pkg::lfsr_seed`). The
  polynomial is `x^16 + x^15 + x^13 + x^4 + 1`.
* `sc_s2d` is a signed up/down counter.

## 5. Sequencing, memory and host interface

`sk_ctrl` runs a start-to-done run:

1. One INIT clock clears `v`, the `x` counters and all stream state.
2. Iteration `k` streams for `L` clocks using row `(k-1) mod m`.
3. One UPDATE clock stores `v^(k+1)` and clears the maximum, carry and delay
   registers for the next iteration.

A run of `N` iterations takes `1 + N (L + 1)` clocks from the clock after
`start` to `done`. At the defaults that is 65,535 clocks per iteration.

`sk_problem_mem` holds `A` (m x n), `y`, `1/||a_i||^2` and lambda as `W+1`-bit
words. The host loads it one word per clock through
`wr_en / wr_sel / wr_row / wr_col / wr_data`. The table is chosen by
`sc_pkg::wr_sel_e`, and writes are ignored while the engine is busy. The
engine does not compute `1/||a_i||^2`: the host supplies it with the row.
After `done`, the host reads `x_out[j]` and `v_out[j]`. Both use the stored
scale `c / (2^W - 1)`.

**Ranges.** Every stream value must lie in [-1, 1]. This includes `a_ij`,
`y_i`, `a_i^T x` and `y_i - a_i^T x`. It also requires `||a_i||^2 >= 1`, so
that its reciprocal fits. Sparse problems are run with `lambda = 0.5`. To
estimate with some other `lambda'`, scale the measurements by `0.5/lambda'`;
the result comes out scaled by the same factor. Because `v = x + 0.5 sign(x)`
for non-zero entries, `|x|` must stay below 0.5.

## 6. Parameters (defaults)

| parameter | default | meaning |
|-----------|---------|---------|
| `N_DIM` | 16 | unknowns `n` (lanes) |
| `M_ROWS` | 10 | measurements `m` (rows of `A`) |
| `W` | 16 | LFSR width; stored values have `W+1` bits |
| `L` | 65534 | clocks per iteration (`2^W - 2`) |
| `M_MAX` | 10 | cells of each maximum block's shift register |
| `DEPTH` | 20 | cells of each positive / negative carry register |
| `DELAY` | 10 | decorrelation delay |
| `num_iter` (port) | - | iterations `N`, 16 bits; 0 is taken as 1 |

Each LFSR width from 4 to 20 has a tap set in `sc_pkg::lfsr_taps`. When you
change `W`, set `L = 2^W - 2`.

## 7. What is from the published architecture and what is not

These parts follow the published architecture:

* the TLB format and the cancellation circuit;
* the maximum circuit: its register, enable, shift directions and output
  multiplexer, checked against its leak-rate formula;
* the two-maximum shrink;
* the shrink-and-cancellation block;
* the dataflow of one iteration;
* the 10-flip-flop delay;
* carry registers of 20 and maximum blocks of 10 cells;
* LFSR stream generation with `L = 2^16 - 2`;
* `n = 16`, `m = 10`.

These are this design's own choices:

* **Adder, scalar product and multiplier.** The architecture takes them from
  earlier work. Only their register lengths are given, so their inner rules
  here are the simplest that do the job (section 4). The earlier work calls
  its scalar product "sequential-shift"; this version counts the product
  ones directly.
* **Converters.** One LFSR per stream, with a fixed polynomial and seeding
  rule. The architecture also mentions memristor-based analog storage. This
  design uses digital counters instead.
* **Sequencing.** The INIT and UPDATE clocks, and clearing all stream state
  between iterations. This discards up to 10 delayed bits and any pending
  carry at the end of each iteration, a bias of about `10/L`.
* **Control.** The bypass mux for lambda = 0, the memory layout and host
  port, and `N` as a run-time input. The architecture gives no `N`.
* **Sign in the block diagram.** The diagram marks the adder after the
  scalar product with `+`, but the algorithm needs `y_i - a_i^T x`. The
  negation is done by swapping the scalar product's lines.

**Size.** The architecture reports an FPGA implementation of about 388
combinational functions and 169 flip-flops. This RTL is far larger:

* the maximum blocks alone hold `16 x 2 x 10` flip-flops;
* the 16 update adders add `16 x 2 x 20` carry cells;
* there are 35 LFSRs;
* there are 32 counters of 17 bits.

The reported figure cannot include all of these, so those numbers are not
reproduced here.

## 8. Accuracy and verification

Each block has a self-checking testbench in `tb/`:

* exhaustive tests for the cancellation circuit and the multiplier;
* clock-exact comparison with reference models for the maximum, the delay,
  the counters, the memory and the controller;
* bit-level accounting of units in and out for the adder and the scalar
  product, including the clock of first carry overflow.

`tb_sc_max` also measures the leak rate of the maximum with `M = 10`:

* at `P_A = 0.4`, `P_B = 0.5` it measures about 0.00120, against 0.00117
  from the birth-death formula of section 2;
* at `P_A = P_B = 0.5`, the worst case, it measures 0.0222, against
  `0.25/(M+1) = 0.0227` and the looser bound `0.25/M = 0.025`.

`tb_sc_shrink_mstudy` repeats this for shrink plus cancellation at
`M = 5, 10, 15, 20, 30`, averaged over `|v|` evenly spread below lambda =
0.5:

| M  | mean error, measured | mean error, formula |
|----|----------------------|---------------------|
| 5  | 0.0055               | 0.0055              |
| 10 | 0.0016               | 0.0017              |
| 15 | 0.00066              | 0.00077             |
| 20 | 0.00034              | 0.00044             |
| 30 | 0.00013              | 0.00019             |

For long registers the measurement falls below the formula. Each point
starts from a cleared register, and the formula describes the steady state.

Two testbenches run the whole engine. Each checks every iteration against
one floating-point Sparse Kaczmarz step, started from the `v^(k)` the
hardware stored.

* **`tb_sc_sk_top`** uses a reduced size: n = 8, m = 4, W = 12. It has three
  runs:
  - a sparse run;
  - a lambda = 0 run through the bypass;
  - a deliberate overflow run.
  It also checks that each mechanism occurs: shrink to zero, shrink
  passing, cancellation, bypass, carry overflow, row wrap-around and the
  iteration update.
* **`tb_sc_sk_full`** uses every default parameter. The problem is
  compressive sampling: 16 unknowns, 10 random measurements, 30 dB SNR and
  200 iterations. It runs three cases with 1, 2 and 3 non-zero unknowns;
  each takes about 13.1 million clocks. The `x^(k)` streams are checked
  within 0.035, `v^(k+1)` within 0.02 and the final `x` within 0.06.
  Results:

  | non-zeros | max error `x^(k)` | max error `v^(k+1)` | RMSE, SC | RMSE, floating point |
  |-----------|-------------------|---------------------|----------|----------------------|
  | 1         | 0.0215            | 0.0027              | 0.0010   | 0.0005               |
  | 2         | 0.0232            | 0.0076              | 0.104    | 0.098                |
  | 3         | 0.0232            | 0.0096              | 0.0102   | 0.0060               |

  The `x^(k)` error is the shrink's worst case at a zero entry; the RMSE is
  taken against the true `x`. With two non-zeros this draw is hard for
  10 measurements in floating point as well.

A third testbench, **`tb_sc_sk_lms`**, uses the engine as an adaptive
filter. Its rows are shifted input samples (a convolution matrix), and every
row is used once (N = m). With lambda = 0 this is NLMS, with lambda = 0.5
Sparse LMS. It identifies an 8-tap system with 2 non-zero taps from 40
samples (W = 12) and checks each step and the final taps against floating
point.

Over 1000 random cases per sparsity, the published design reaches an RMSE
between that of 9-bit and 10-bit fixed-point arithmetic.
**`tb_sc_sk_rmse`** gives a smaller version of that comparison at the
default size. It runs two more random cases for each of 1, 2 and 3
non-zeros and averages the RMSE. The same problems are also solved in
floating point and with a simple fixed-point model, in which every value,
product and sum is rounded to B bits:

| non-zeros | SC     | floating point | 8 bit  | 9 bit  | 10 bit | 12 bit |
|-----------|--------|----------------|--------|--------|--------|--------|
| 1         | 0.0013 | 0.0005         | 0.0037 | 0.0010 | 0.0010 | 0.0006 |
| 2         | 0.0272 | 0.0236         | 0.0280 | 0.0233 | 0.0247 | 0.0239 |
| 3         | 0.0400 | 0.0358         | 0.0472 | 0.0363 | 0.0390 | 0.0360 |

Here the SC engine lands between the 8-bit and 9-bit models. The fixed-point
model is not the published fixed-point design, and six cases are too few to
separate neighbouring bit widths. The testbench only checks that the SC
RMSE stays within 0.02 of floating point.

## 9. Files and simulation

`rtl/`: `sc_pkg` (types, defaults, LFSR taps and seeds), `sc_lfsr`,
`sc_d2s`, `sc_s2d`, `sc_cancel`, `sc_max`, `sc_shrink`, `sc_shrink_cancel`,
`sc_mult`, `sc_carry_core`, `sc_add`, `sc_scalar_product`, `sc_delay`,
`sk_problem_mem`, `sk_ctrl` and the top level `sc_sk_top`.
`tb/`: `tb_<module>` for each block, plus `tb_sc_sk_full` (defaults),
`tb_sc_sk_lms` (adaptive filter), `tb_sc_sk_rmse` (accuracy over several
cases) and `tb_sc_shrink_mstudy` (shrink error against `M`).

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/sc_pkg.sv tb/tb_sc_sk_full.sv \
          --top-module tb_sc_sk_full -y rtl -Mdir obj_full
obj_full/Vtb_sc_sk_full
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. The
two runs at full size (`tb_sc_sk_full`, `tb_sc_sk_rmse`) take about two minutes
each; the others take seconds.
