# A dynamic sparse attention accelerator in SystemVerilog

Self-attention costs O(l²) in the sequence length l. For long sequences most of
the l × l attention weights are close to zero, but *which* ones matter changes
from input to input and from head to head, so a fixed sparsity pattern (local
windows, fixed global tokens) throws away connections that matter. Dynamic
Sparse Attention (DSA) predicts the important positions for every input with a
cheap approximation. It then computes exact attention only at those positions.

This RTL implements that idea as a single-head attention accelerator with two
compute arrays:

* a **low-precision array** that estimates all l × l scores in INT4 from a
  low-rank, randomly projected version of the input and keeps the TOPK
  largest of every row. This is the mask M.
* a **high-precision array** of row-parallel processing elements (PEs). They
  compute the exact scores only at the kept positions (SDDMM, a sampled
  dense-dense product), a softmax over those positions only, and the output
  rows from the kept weights (SpMM, a sparse-dense product).

The default sizes are those of the Long-Range-Arena text classification
setup for which the method was evaluated. That setup uses a sequence of 2000
tokens, a model width of 256 and a 64-wide head. The prediction dimension is
k = 0.25 · 256 = 64, and 90 % of every attention row is dropped (200 of 2000
columns kept).

## Data flow

```
            +--> linear_unit:  Q = X W_Q, K = X W_K, V = X W_V        (FX16)
 X (L x D) -+
            +--> pred_proj:    Q~ = q(q(X P) W~_Q),  K~ = q(q(X P) W~_K)   (INT4)
                                                  |
   lp_array (NPE lanes):  s~_ij = q~_i . k~_j,  topk_select per lane  -> mask M
                                                  |
   reorder_sched:  which column each PE visits in each step
                                                  |
   hp_pe x NPE:   SDDMM  s_ij = q_i . k_j / sqrt(DK)     (only j in M_i)
                  sparse_softmax over the kept s_ij
                  SpMM   z_i = sum_j a_ij v_j             (same j, same order)
                                                  |
                                              Z (L x DK)
```

`dsa_accel` holds every buffer (X, Q, K, V, Q~, K~, Z) and sequences the run.

## Number formats

| data | format |
|---|---|
| X, weights W_Q/W_K/W_V, Q, K, V, scores s, Z | 16-bit signed, 8 fraction bits (Q8.8) |
| quantised XP, W~_Q, W~_K, Q~, K~ | LP_BITS-bit signed integers (INT4) |
| P | ternary, 2-bit code: 01 = +1, 11 = −1, 00 = 0 |
| exp values and probabilities a_ij | unsigned Q0.15 (32768 = 1.0) |

Every requantisation is an arithmetic right shift (floor) followed by
saturation. The two prediction-path shifts are runtime inputs:

* `shift_xp` sets the scale of X P. It also absorbs the constant √(3/k) of
  the random projection.
* `shift_qk` sets the scale of the W~ products.

Both should be chosen so that the INT4 values use their range without
saturating too often. The method defines the prediction only up to scale,
so only the ranking of the scores matters.

## The prediction path and the mask

`pred_proj` multiplies a token row by P without a multiplier, because each
entry only adds, subtracts or skips one feature. It then applies the two
small K × K INT4 matrices. The output is one INT4 row each of Q~ and K~ per
token, 2K cycles per token.

`lp_array` processes a group of NPE rows at once. Every cycle it reads one
row k~_j and broadcasts it to all lanes. Each lane multiplies it with its own
q~_i and pushes the score into its `topk_select` unit. After L cycles each
lane holds the TOPK columns with the largest scores.

`topk_select` is a sorted register list. On each insertion every entry
compares itself with the new score in parallel:

* entries that are greater or equal stay where they are;
* the first smaller entry takes the new score;
* the entries below it move down one place.

On equal scores the earlier column wins. The unit needs no sorting network
and no counting.

Every row keeps exactly TOPK columns. This constraint is the load-balancing
scheme: every PE in a group has the same amount of work, so no PE waits for
another. A fixed score threshold would not give that guarantee, and it is
not implemented.

## Compute reordering (reorder_sched)

The NPE PEs work on NPE neighbouring rows at the same time. When several PEs
need the same column j in the same step, one read of K row j (in SDDMM) or
V row j (in SpMM) serves all of them. Important columns cluster: some tokens
are important to almost every row, and neighbouring rows look at similar
places. Visiting each row's columns from left to right wastes much of that
sharing. Visiting them in a coordinated order recovers it.

The scheduler holds one pending bit per (PE, column). In each step:

1. every PE's lowest pending column is a candidate;
2. each candidate gets one vote for every PE that has it pending;
3. the candidate with the most votes wins (on ties, the candidate of the
   lowest-numbered PE);
4. every PE with the winner pending takes it, and the other PEs take their
   own lowest pending column.

`fetch_count` is the number of distinct columns handed out in the step, which
is the number of K rows (or V rows) read. With `reorder_en = 0` every PE just
takes its lowest pending column. That is the plain row-parallel order, kept
for comparison.

Worked example: four PEs whose rows keep the columns {0,1,2}, {1,2,3},
{1,4,5} and {2,3,4}.

| step | left to right | fetches | reordered | fetches |
|---|---|---|---|---|
| 1 | 0, 1, 1, 2 | 3 | 1, 1, 1, 2 | 2 |
| 2 | 1, 2, 4, 3 | 4 | 2, 2, 4, 3 | 3 |
| 3 | 2, 3, 5, 4 | 4 | 0, 3, 5, 4 | 4 |
| total | | 11 | | 9 |

The greedy rule is this design's own. A better schedule exists for this
example (7 fetches), but the rule needs only NPE priority encoders and NPE²
bit lookups per step.

Each PE stores its scores in the order it received the columns. SpMM replays
that same order. Two things follow:

* the V-row sharing of SpMM is exactly the K-column sharing of SDDMM;
* the probabilities are never reshuffled, and each Z row comes out whole,
  in normal feature order.

## Sparse softmax (sparse_softmax)

Only the kept scores are ever stored. A dropped position has a weight of
exactly zero. This is the limit of adding −c to masked scores before a full
softmax. For the TOPK stored scores s_j of a row:

* m = max s_j, tracked while the scores arrive;
* e_j = 2^(−y) with y = (m − s_j)·369/256 (369/256 ≈ log₂e). The integer
  part of y is a right shift. The top 4 fraction bits index a 16-entry table
  round(32768·2^(−f/16)). Any e_j below 2^−16 is 0;
* r = ⌊2³⁰ / Σ e_j⌋, one division per row;
* a_j = (e_j · r) >> 15, in Q0.15.

The testbench finds the probabilities within 0.02 of the real softmax, and
each row sums to 1 within 64/32768.

## Schedule and timing

After `start`:

1. **PROJ** – for each of the L tokens, `linear_unit` produces one Q/K/V
   column per cycle while `pred_proj` produces Q~/K~. Each token takes
   2K + 3 cycles.
2. For each group of NPE rows:
   * **PRED** – `lp_array` selects the masks. This takes L + 2 cycles.
   * **LOAD** – the masks are copied into the scheduler, TOPK cycles. In the
     last LOAD cycle the low-precision array starts on the next group.
   * **SDDMM** (TOPK + 1 cycles), **softmax** (TOPK + 3 cycles), **SpMM**
     (TOPK cycles), **write-back** (1 cycle).

The two arrays therefore form a two-stage pipeline at group granularity. With
A = 3·TOPK + 5, a run takes

    L(2K+3) + (L+3) + TOPK + (L/NPE − 1)·(A + max(1, L+2−A) + TOPK) + A  cycles.

At the default sizes this is 1 363 606 cycles. The prediction stage (2002
cycles per group) is the slower one. The testbenches check this count
exactly at both extremes: one case is bound by the prediction stage, the
other by the attention stage.

Statistics outputs:

* `stat_cycles` – cycles of the run;
* `stat_k_fetch` / `stat_v_fetch` – K rows and V rows read in the sparse
  phases;
* `stat_shared` – steps in which PEs shared a read.

In the full-size test (random data, 2000 tokens), reordering cut the K/V row
reads from 393 226 to 326 723, a factor of 1.20. Steps with a shared read rose
from 6 524 to 60 551. With random weights there is less column locality than
in trained attention, so these numbers are not the method's reported
reductions.

## Using the top level

| port | use |
|---|---|
| `wr_en, wr_sel, wr_row, wr_col, wr_data` | write one element. `wr_sel` (`dsa_pkg::mem_sel_e`) selects X (row = token, column = feature), W_Q/W_K/W_V (row = feature, column = head dim), P (row = feature, column = k, 2-bit code in the low bits), or W~_Q/W~_K (row and column = k, INT4 in the low bits). |
| `shift_xp, shift_qk, reorder_en` | configuration, held stable during a run |
| `start` / `busy`, `done` | one-cycle start; `done` pulses at the end |
| `z_rd_row, z_rd_col` → `z_rd_data` | combinational read of Z (Q8.8) |

`rst_n` is an active-low asynchronous reset. The buffers are arrays with
combinational reads and synchronous writes. They are not reset, and they hold
meaningful data only after they have been written.

Parameters of `dsa_accel` (defaults in brackets): `L` [2000], `D` [256], `DK`
[64], `K` [64], `LP_BITS` [4], `NPE` [4], `TOPK` [200], `SCALE_SHIFT` [3] =
log₂√DK. `L` must be a multiple of `NPE`.

At the default sizes the buffers come to about 17.4 Mbit: X is 8.2 Mbit,
Q/K/V/Z are 8.2 Mbit together, and Q~/K~ are 1 Mbit.

## Where this differs from the method as published

The method describes the hardware at the level of functions and
trade-offs. The following points are this implementation's own:

* **Fixed point.** The number formats, the rounding, the exponent
  approximation and where the quantisation steps sit are all own choices.
* **Precision split.** A "coupled" array of precision-configurable PEs is
  discussed as an alternative. It is not built: this design uses two separate
  arrays.
* **Mask selection.** Masks come from top-k only. Prediction by a tuned
  threshold is not built, because it breaks the equal-work-per-row property.
* **Scheduling.** The reordering rule and the pipeline granularity (one row
  group) are own choices. The projection phase for all tokens runs before any
  prediction, because every mask needs every K~ row.
* **Scope.** There is one head per run, and the sequence length is fixed at
  elaboration. Other heads, other layers and the feed-forward layers are
  outside this design. So are the vector-structured sparsity formats (1×4,
  1×8), which exist for GPU kernels, not for this array.
* **Model parameters.** Training of W~_Q/W~_K and the choice of P happen
  offline. The weights are loaded through the host port.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block
with a reference model written independently in the testbench and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_topk_select` | kept list against stable descending selection, with many ties |
| `tb_reorder_sched` | the worked example above in both modes (11 and 9 fetches), random rows against a model of the greedy rule, each column visited exactly once, all PEs finishing together |
| `tb_sparse_softmax` | bit-exact probabilities, closeness to the real softmax, row sums, latency |
| `tb_linear_unit`, `tb_pred_proj` | bit-exact projections and quantisation, latency |
| `tb_lp_array` | masks of every lane, latency L + 1 |
| `tb_hp_pe` | a full row in random column order; SpMM order equals SDDMM order |
| `tb_dsa_accel` | end to end at L = 32: every Z element in both scheduling modes, exact cycle count, and coverage of columns dropped, fetches shared, reordering saving fetches, and prediction overlapping attention |
| `tb_dsa_accel_full` | the same at the default sizes (L = 2000) |
| `tb_dsa_image` | the same at image-classification sizes: 1024 tokens, 8-wide heads, k = 16, TOPK = 102 |
| `tb_dsa_text99` | the default sizes at 99 % sparsity (TOPK = 20) |
| `tb_dsa_int2` | a reduced configuration (L = 64) with the prediction path at INT2 (`LP_BITS` = 2) |

To run one with Verilator:

    verilator --binary --timing --assert -Wno-fatal rtl/dsa_pkg.sv rtl/*.sv \
        tb/tb_dsa_accel.sv --top-module tb_dsa_accel
    ./obj_dir/Vtb_dsa_accel

The random data in the tests checks the hardware against its arithmetic
specification. It does not check the accuracy of the method itself: the
approximation weights are random, not trained, so the predicted masks are not
meant to match the true top-k of Q Kᵀ.
