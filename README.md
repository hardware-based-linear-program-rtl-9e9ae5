# ADMM-LP decoder for quasi-cyclic LDPC codes

This is a hardware decoder for LDPC codes that does not pass beliefs the
way min-sum decoders do. Instead it solves the linear-programming
relaxation of maximum-likelihood decoding. The relaxation is penalised so
that it prefers integral answers. It is solved with the alternating
direction method of multipliers (ADMM).

- Each variable is a real number in [-1/2, 1/2], the centred version of a
  bit.
- Each parity check keeps a local copy z_j of the variables it touches.
  That copy must lie in the *parity polytope*, the convex hull of the
  even-weight binary vectors (again centred).
- Each check also keeps a vector of Lagrange multipliers λ_j, its *check
  state*.

One iteration has two halves:

- **Variable update.** For each variable i of degree d_v:
  - t = (sum of the d_v messages m from its checks) − γ_i;
  - s = t + α·sign(t);
  - x_i = clip(s / d_v, −1/2, +1/2).
- **Check update.** For each check j:
  - v = x_N(j) + λ_j;
  - z = Π(v), the Euclidean projection onto the parity polytope;
  - λ_j ← v − z;
  - the message to the variables is m = 2z − v.

γ_i is the channel LLR and α the penalty (0.1 in the reference setup, 0
for plain LP decoding). The hard decision of x_i is the decoded bit.
Decoding runs a fixed number of iterations (60 by default). It can stop
early when the hard decisions satisfy every check.

The RTL is synthesizable SystemVerilog-2017 and needs no vendor
primitives. By default it is built for a (3,6)-regular rate-1/2 code of
length 1002. It can also be built for a length-155 Tanner code and the
length-672 IEEE 802.11ad (WiGig) rate-13/16 code.

## Quasi-cyclic structure and the partially-parallel schedule

The parity-check matrix is an R × S array of P × P tiles. Each tile is
either all-zero or a cyclically shifted identity with shift sh. For tile
(r,k), check r·P+j is connected to variable k·P+((j+sh) mod P).

| code | R × S | P | n | checks per variable | variables per check |
|---|---|---|---|---|---|
| (3,6) regular (default) | 3 × 6 | 167 | 1002 | 3 | 6 |
| Tanner | 3 × 5 | 31 | 155 | 3 | 5 |
| IEEE 802.11ad | 3 × 16 | 42 | 672 | 1–3 | 14–16 |

The shift tables are in `admm_pkg.sv`. A code is chosen with the
`CODE` parameter of the top (`CODE_ENSEMBLE`, `CODE_TANNER`,
`CODE_WIGIG`).

The decoder has S variable-node units, one per macro-column, and R
check-node units, one per macro-row. The key property of the circulant
structure: at a given offset a, the S variables k·P+a (one per
macro-column) never share a check. Likewise the R checks r·P+j never
share a variable. So one offset can be processed in parallel across all
columns, or all rows, every cycle. One iteration is then:

1. **Variable phase.** For a = 0 … P−1, one offset per cycle:
   - read LLR bank k and the check-to-variable banks of column k at a;
   - compute x for all S columns;
   - write the estimate memory at a and the variable-to-check banks
     (see below).
2. **Check phase.** For j = 0 … P−1:
   - read the variable-to-check banks and check-state banks of row r
     at j;
   - compute the projections for all R rows;
   - write the new λ to the check-state banks at j and the messages to
     the check-to-variable banks.

The two phases do not overlap. Each waits for its pipeline to drain.

### Where the shifts go

Every non-zero tile has its own message bank of depth P, one for each
direction. All address arithmetic is on the write side, so each reader
uses the plain loop offset:

- The **variable-to-check** bank of tile (r,k) is kept in check order.
  Variable offset a is written at (a − sh) mod P, so check offset j reads
  the variable (j + sh) mod P.
- The **check-to-variable** bank is kept in variable order. Check offset
  j writes at (j + sh) mod P.
- The **check-state** bank is used only by check nodes and needs no
  shift.
- An all-zero tile has no bank. It reads as 0 and is left out of the node
  it would feed.

Each shift is an elaboration-time constant, so each write address is one
adder and a wrap-around compare.

### Timing

One iteration takes 2P + 2 + L_VN + L_CN cycles:

- L_VN and L_CN are the deepest variable- and check-node pipelines.
- The +2 is the synchronous memory read at the start of each phase.
- `done` comes iterations × that + 2 cycles after `start`.

| code | L_VN | L_CN | cycles/iteration | reference implementation |
|---|---|---|---|---|
| (3,6) | 5 | 25 | 366 | 440 |
| Tanner | 5 | 25 | 94 | 137 |
| 802.11ad | 5 | 32 | 123 | 189 |

The reference implementation's pipelines were deeper, and their stage
counts are not known. Its reported clock rates were 221–237 MHz for a
Stratix V FPGA. No clock rate has been measured for this RTL.

## Fixed-point formats

All numbers are signed two's complement. Qi.f means i integer bits and f
fraction bits, plus the sign bit.

| quantity | format | width |
|---|---|---|
| LLR γ, estimate written out | Q0.7 | 8 |
| penalty α (unsigned) | 0.7 | 8 |
| t (variable sum) / s (penalised) | Q4.7 / Q5.7 | 12 / 13 |
| x, variable-to-check message | Q0.9 | 10 |
| m, λ (check-to-variable, check state) | Q2.7 | 10 |
| v = x + λ in the check node | Q3.9 | 13 |
| z, polytope projection output | Q0.12 | 13 |
| simplex input / ρ | Q4.9 | 14 |
| simplex output | Q0.13 | 14 |
| reciprocals 1/d | Q0.24 | 25 |

Scaling γ by a constant does not change the LP solution, so the LLRs are
scaled into [−1, 1). The LLR is log P(y|0)/P(y|1): positive means bit 0.
An estimate ≥ 0 decodes to bit 1.

Precision is dropped in only two ways:

- fraction bits are removed by rounding to nearest, ties away from zero;
- integer bits are removed by saturation.

Truncation is never used: it biases every message the same way and pulls
the decoder towards low-weight words.

## Variable node (`variable_node`)

- A pipelined adder tree sums the d_v messages and −γ.
- The next stage adds +α, −α or nothing, by the sign of t.
- The normalisation by d_v is an arithmetic shift when d_v is a power of
  two. Otherwise it is a multiply by round(2²⁴/d_v).
- The result is clipped to ±1/2 and rounded twice: to Q0.9 for the
  messages and to Q0.7 for the estimate memory.
- Latency is ceil(log2(d_v+1)) + 3 cycles, with one result per cycle.

## Check node and the parity-polytope projection

`check_node` forms v = x + (λ << 2): λ is zero-extended to 9 fraction
bits. It passes v to `pp_projection` and keeps v in a delay line. It then
computes λ' = v − z and m = 2z − v, rounds both to 7 fraction bits and
saturates them to Q2.7. `sat_event` marks a saturated output. Latency is
L_PP + 2.

The projection (`pp_projection`) is the hard part of the design. It
avoids any data-dependent iteration. The idea:

1. **Facet identification** (`facet_id`). The facet of the polytope
   nearest to v is picked by the odd-weight vertex of the cube closest to
   v:
   - f_i = 1 where v_i ≥ 0;
   - if f has even weight, the bit at the smallest |v_i| is flipped (ties
     go to the lowest index).

   The arg-min is a pipelined comparison tree.
2. **Similarity transform.** ṽ_i = v_i, negated where f_i = 1. This maps
   the chosen facet onto the face of a simplex.
3. **Membership test.** If Σ clip(ṽ, ±1/2) ≥ 1 − d/2, then clip(v) is
   already inside the polytope and is the answer.
4. **Simplex projection** (`simplex_projection`) of ṽ, then the inverse
   transform: negate where f_i = 1, and round Q0.13 to Q0.12.

The membership test and the simplex projection run one after the other
in the pipeline: the membership adder tree first, then the simplex. While
the simplex runs, the decision bit, f and clip(v) wait in delay lines.
The reference design orders them the same way, because running them side
by side needs padding that depends on the check degree. A final
multiplexer selects the clipped input or the simplex result. Both are
computed for every input. `out_inside` and `out_flipped` report which path was taken and
whether a flip was made.

### Simplex projection

This projects onto {w : Σ(w_i + 1/2) = 1, w_i ≥ −1/2}. The answer is
w_i = max(v_i − u* − 1/2, −1/2) for a single common shift u*. The shift
is found from the sorted vector:

1. `sorting_network`: ρ = v sorted in descending order.
2. `prefix_sum`: the partial sums (ρ_1 + … + ρ_i) − 1. The −1 is fed in
   as a constant bias on the first operand.
3. Normalise to u_i = partial sum / i, a shift for powers of two and
   otherwise a multiply by a 25-bit reciprocal.
4. Compare ρ_i > u_i for every i. `priority_encoder` picks the largest i
   for which this holds, and u* = u_i at that i.
5. Shift and clip, saturated to Q0.13.

Latency is L(L+1)/2 + L + 4 with L = ceil(log2 d): 13 cycles for d = 6.

## Control (`decoder_controller`) and termination

The controller has five states: idle, then for each phase an "issue"
state and a "drain" state.

- In an issue state it puts offsets 0 … P−1 on the shared read address.
- It counts returning results to produce the write offset.
- When the last result of a phase has returned, it moves to the next
  phase.
- `first_iter` is high during the first iteration. Then λ and m are
  forced to zero at the node inputs, so no memory has to be cleared
  between frames.

**Early stop.** During the check phase the hard decisions of the
variable-to-check messages are XOR-ed per row. Any odd result (a failed
check) is remembered. If `early_term_en` is set and no check failed, the
decoder stops after that iteration. These are the estimates from the
variable phase that has just finished. Otherwise it stops after
`MAX_ITER` iterations.

## Top-level interface (`admm_decoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, synchronous active-low reset |
| `llr_we`, `llr_addr`, `llr_data[S]` | in | load one offset: `llr_data[k]` is γ of variable k·P+`llr_addr` (Q0.7) |
| `alpha` | in | penalty, unsigned Q0.7 (13 ≈ 0.1, 0 = plain LP decoding) |
| `early_term_en` | in | allow the early stop |
| `start` | in | one-cycle pulse to begin decoding |
| `busy`, `done` | out | decoding; one-cycle pulse at the end |
| `iters`, `early_stop` | out | iterations run, whether it stopped early |
| `est_addr`, `est_data[S]` | in/out | read the Q0.7 estimates, one cycle after the address |

To decode a frame:

1. Load the LLRs while idle, P cycles.
2. Pulse `start`.
3. Wait for `done`.
4. Read the estimates, P cycles.

There is no double buffering, so loading and decoding do not overlap.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

- The arithmetic blocks are compared with double-precision models in
  `tb_ref_pkg.sv`, within 1–2 LSB. These cover the variable node, check
  node, polytope projection and simplex.
- The structural blocks are compared exactly with simple models. These
  cover the sorter, prefix sum, facet identification, memories and
  controller.
- The latencies are checked as well.

`tb_admm_decoder` runs the top at its default size. It sends random
codewords of the (3,6) code, generated from a GF(2) row reduction of H,
through BPSK/AWGN and compares the decoded words bit by bit:

- noiseless: exactly 1 iteration;
- 3 dB with α = 0.1 and with α = 0: all decoded;
- 3 dB with the early stop off: 60 iterations;
- 0 dB and random LLRs: termination only.

It checks every cycle count. It also counts the early stops, the runs to
the iteration limit, and the projections that took each path.
`tb_admm_codes` does the same for the Tanner and 802.11ad builds.

Run any testbench with plain Verilator, for example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
      rtl/admm_pkg.sv tb/tb_ref_pkg.sv tb/tb_admm_decoder.sv --top-module tb_admm_decoder
    obj_dir/Vtb_admm_decoder

The full-size run takes about 20 s to build and under a second to
simulate.

## Departures from the reference design, and choices made here

- **Sorting network.** The reference used delay-optimal networks from
  Knuth. This RTL uses a bitonic network padded to a power of two. It
  gives the same result with more compare-swap cells and 6 layers instead
  of 5 for d = 6.
- **Prefix sum.** This RTL uses a Sklansky tree, with the same minimum
  depth as Ladner–Fischer but about (d/2)·log d adders instead of a linear
  number.
- **Pipeline depths** are this design's own, so cycles per iteration are
  lower than the reference's (366 vs 440 for the (3,6) code). Clock rate
  has not been measured.
- **Circulant orientation** (check j ↔ variable j+sh) and all rounding
  tie rules are this design's own.
- **Tiles must be single shifted identities.** Sums of several shifted
  identities in one tile are not supported. None of the three codes needs
  them.
- **Initialisation.** λ and m are forced to zero in the first iteration
  instead of clearing memories.
- **Early stop.** It is optional, and it is tested on the estimates of
  the iteration just finished.
- **Saturation in the full decoder.** Saturation of λ and m to ±4 was
  never reached in full-decoder runs, including noisy and random inputs.
  It is exercised only in the check-node testbench.
- **Test environment.** The on-FPGA Gaussian noise generator and the
  host/PCI test platform are not part of this RTL. The testbenches
  generate noise themselves.
