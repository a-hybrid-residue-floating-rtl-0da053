# HRFNA: a hybrid residue / floating-point arithmetic unit

Floating-point hardware spends most of its area and latency on three jobs:
lining up exponents before an add, propagating carries across wide
mantissas, and normalizing and rounding after every operation. This design
avoids all three on its main path. It keeps the significand of a number as a
residue vector. That is a set of small remainders modulo a few pairwise
coprime moduli, and adding or multiplying them is carry-free and
channel-independent. Beside the residue vector sits one power-of-two
exponent. Nothing is rounded while numbers are multiplied and accumulated.
Rounding happens only on rare, explicit events: when a value grows close to
the range limit of the residue system, or when two exponents have to be made
equal. Each such event is one pass through a pipelined Chinese-Remainder
(CRT) engine that reconstructs the integer, shifts it and encodes it back.

The unit described here runs multiplies, synchronised adds and
multiply-accumulates (MACs) into eight hybrid accumulators at one operation
per clock. A side path watches the magnitude of every accumulator and asks
for a normalization when one gets too large.

## Number format

A hybrid number is a pair `(r, f)`:

* `r = (r_1 .. r_5)` is a residue vector. `r_i = N mod m_i` for the moduli
  `m = {8191, 8192, 8193, 8189, 8185}`. They are pairwise coprime, and their
  product `M = 36 848 463 146 932 592 640` is just under `2^65`.
* `f` is a 10-bit signed exponent, so it ranges over −512..511.
* The value is `N * 2^f`. `N` is the unique integer with those residues,
  read as signed in `[-M/2, M/2)`. About 64 bits of magnitude are therefore
  available before anything has to be rounded.

Residues are 14-bit words (`res_t`). A residue vector is `rvec_t`, and the
pair is the packed struct `hnum_t` (80 bits). All widths and all constants
derived from the moduli live in `hrfna_pkg`. The derived constants are
`M`, `M_i = M/m_i`, `|M_i^-1|_{m_i}`, the Barrett constants, the powers of two
modulo `m_i`, and the fixed-point reciprocals. They are computed at
elaboration by constant functions, so the tables follow any change of
`MODULI`.

Products are exact: `(r_X ⊙ r_Y, f_X + f_Y)`. Sums with equal exponents are
exact: `(r_X ⊕ r_Y, f)`. Rounding happens in only two places, and both are
a floor (`N ← ⌊N / 2^s⌋`, `f ← f + s`):

* threshold normalization, with a fixed step `s = 16`;
* exponent synchronisation, which shifts the operand with the lower
  exponent by the exponent difference.

Each of these events loses less than one unit of the new exponent, so the
error of a long accumulation is bounded by (number of events) × 2^(final
exponent).

## Operations and the main pipeline

`hrfna_top` takes one operation per cycle on a valid/ready stream:

| `in_op`   | effect |
|-----------|--------|
| `OP_MUL`  | `Z = X ⊗ Y`, streamed out |
| `OP_ADD`  | `Z = X ⊕ Y`; if `f_X ≠ f_Y` the lower operand is scaled first |
| `OP_MAC`  | `A[a] ← A[a] + X ⊗ Y` |
| `OP_LOAD` | `A[a] ← X` (sets the accumulator's exponent) |
| `OP_READ` | reconstruct `A[a]` by CRT and emit it, with its exact integer on `out_n` |

A dot product is `LOAD`, a stream of `MAC`s, then `READ`. A matrix product
uses the eight accumulators as eight output elements.

The operation passes through these stages:

```
 in ─► S0 ─► residue_pipeline  (5 × mod_arith_channel, 2 cycles) ─┐
            exponent_pipeline (f_X+f_Y or f_X, 2 cycles) ───────┴─► stage A ─► out / acc_array
```

* **S0** registers the operands.
* The **residue pipeline** has one `mod_arith_channel` per modulus.
  * A channel adds with one adder and one conditional subtract.
  * It multiplies with a 14×14 product and a Barrett reduction. The Barrett
    reduction uses `μ = ⌊2^32/m⌋` and two correction subtracts.
  * Add and multiply both take two cycles, so all channels stay aligned.
* The **exponent pipeline** has the same two-cycle depth.
  * It computes `f_X + f_Y`, saturating at the ends of the range. A
    saturation sets the sticky output `exp_ovf`.
  * Combinationally, it also tells S0 whether an add needs synchronisation,
    which operand is lower, and by how much.
* **Stage A** retires the operation. A MUL or ADD leaves the unit three
  cycles after it was accepted. A MAC adds into `acc_array`, and a LOAD
  writes it.

No normalization logic sits on this path. The MAC rate test in the end-to-end
testbench checks that 2048 back-to-back MACs are accepted in 2048 cycles.

## Watching the magnitude without reconstructing

Residues do not show how large a number is. Finding out exactly would take a
full CRT reconstruction, which is far too expensive to do for every
accumulator on every cycle. `interval_eval` produces a cheap interval that is
guaranteed to contain `|N|/M`. It works as follows.

1. By the CRT, `N/M ≡ Σ y_i / m_i (mod 1)`, with `y_i = |r_i · M_i^-1|_{m_i}`.
   Stage 1 computes each `y_i` with a 14×14 product and a Barrett
   reduction.
2. Stage 2 approximates each term from below in 32-bit fixed point:
   `t_i = (y_i · ⌊2^46/m_i⌋) >> 14`. Each `t_i` is at most 2 units of
   `2^-32` low. So the true fraction lies in `[S, S + 2K − 1]·2^-32`, where
   `S = Σ t_i mod 2^32`.
3. The fraction is folded into a magnitude, because `N` is signed.
   * A fraction below ½ means a positive `N`, and `|N|/M` is the fraction.
   * A fraction above ½ means a negative `N`, and `|N|/M` is one minus the
     fraction.
   * An interval that wraps through 0 becomes `[0, upper]`.
   * An interval that straddles ½ is widened to reach ½.
4. Both ends are turned into a small float (6-bit exponent, 24-bit
   mantissa). The upper end is rounded up and the lower end down, so the
   interval only ever grows.

`magnitude_monitor` feeds all eight accumulators through eight such units
every cycle.

* `fp_max_tree` picks the largest upper bound and its index. It is a binary
  tree of float comparators with one register level per tree level; ties go
  to the lower index.
* A last comparator tests that upper bound against `τ/M`, with `τ = 2^60`.
  The constant is rounded down, so the test can fire early but never late.
* The path is a free-running 6-cycle pipeline (2 + 3 + 1) that raises `req`
  and `req_idx`.
* When the unit rewrites an accumulator (load or normalization result), it
  pulses `flush`. This drops the six cycles of stale estimates, so that one
  crossing cannot cause two normalizations.

The gap between `τ = 2^60` and `M/2 ≈ 2^64` is what makes a late answer
safe. At the operand sizes of the testbench (products below `2^48`), tens of
thousands of products fit between the threshold and overflow. The monitor's
latency plus a normalization job is under twenty cycles.

## The normalization engine

`crt_normalizer` takes `(r, f, sh, tag)` and returns, six cycles later,
`N = CRT(r)`, `⌊N/2^sh⌋`, the residues of that result, `f + sh`, and the same
tag. It accepts a new job every cycle. The stages:

1. `y_i = |r_i · M_i^-1|_{m_i}`.
2. `T = Σ y_i · M_i`, which is below `5M`.
3. `T` is reduced modulo `M` by comparing it with the multiples of `M` and
   subtracting. The result is then read as signed.
4. An arithmetic right shift by `sh` (this is the floor), and `f + sh`.
5. The shifted value is taken modulo `M` (adding `M` if it is negative) and
   cut into five 13-bit chunks `c_j`. Each channel forms
   `Σ c_j · |2^{13j}|_{m_i}`.
6. A Barrett reduction per channel gives the new residues.

The same engine serves four purposes:

* threshold normalization, with `sh = s`;
* scaling an ADD operand, with `sh = Δ`;
* scaling a MAC product or an accumulator, with `sh = Δ`;
* read-out, with `sh = 0`.

Shifts are 7 bits wide. An exponent difference above 127 is clamped to 127.
For `|N| < 2^65` that shift gives the same integer as the full one
(0 or −1).

## Scheduling the engine: streamed and exclusive jobs

This is the subtle part of the design. A dot product whose accumulator has
just been normalized has a higher exponent than each new product. Following
the rule "scale the lower exponent up to the higher one", every later
product must go through the CRT engine before it can be added. If each of
those stalled the pipeline, a long dot product would run about seven times
slower after its first normalization. The unit therefore uses two kinds of
engine job.

**Streamed jobs** are used for a MAC whose product exponent is below the
accumulator exponent.

* Stage A retires the MAC at once. The product goes into the engine tagged
  `{1, accumulator index}`, with `sh = f_A − f_P`.
* Six cycles later the scaled product arrives at exactly `f_A`. It is added
  through the second accumulate port of `acc_array`.
* That port may hit the same entry as a direct accumulate in the same cycle;
  both terms are then added.
* A counter keeps track of how many streamed jobs are in flight.
* Nothing stalls. The 64k-element dot product in the testbench takes 65,570
  cycles, including two normalizations and the start-up synchronisation.

**Exclusive jobs** either change an accumulator's exponent or need its
complete value:

* threshold normalization;
* scaling an accumulator up to a higher product exponent;
* read-out;
* scaling an ADD operand held in S0.

An exclusive job starts only when the engine has no streamed job in flight.
From its request until its result is written back, the whole pipeline is
frozen (`in_ready` low). The freeze lasts at least 1 + 6 cycles. If two
exclusive jobs are wanted at once, stage A wins, then the monitor, then S0.

Three rules keep the streamed results correct:

* An accumulator's exponent changes only through an exclusive job or a
  LOAD. Exclusive jobs wait until no streamed job is in flight. A LOAD also
  waits in stage A while any streamed job is in flight. So a streamed
  product always lands on the exponent it was aligned to. An assertion in
  `hrfna_top` checks this.
* A pending monitor request freezes the pipeline too. In-flight products
  then drain, and a steady stream of mismatched products cannot starve a
  normalization.
* A READ is exclusive, so it waits for every outstanding contribution.

The freeze stops S0, both pipelines and stage A together. The monitor and
the engine keep running.

## Outputs and events

* `out_valid` pulses for each MUL and ADD result, at stage A.
* It also pulses for each READ, when its job ends. `out_n` then carries the
  exact signed integer and `out_z` the stored `(r, f)`.
* `evt_norm` pulses once for every threshold normalization.
* `evt_sync` pulses once for every exponent synchronisation, streamed
  returns included.
* `evt_stall` is high while `in_valid` is waiting on a low `in_ready`.
* `exp_ovf` is sticky.

## Parameters

| where | name | default | meaning |
|-------|------|---------|---------|
| `hrfna_pkg` | `K`, `MODULI` | 5, {8191, 8192, 8193, 8189, 8185} | modulus set (must be pairwise coprime, each below 2^14) |
| `hrfna_pkg` | `EW` | 10 | exponent width |
| `hrfna_pkg` | `FW`, `MANT_W` | 32, 24 | interval fraction bits, float mantissa bits |
| `hrfna_top` | `NACC` | 8 | number of accumulators (power of two) |
| `hrfna_top` | `TAU_LOG2` | 60 | threshold τ = 2^TAU_LOG2 |
| `hrfna_top` | `SCALE_S` | 16 | normalization step s |

If you change the moduli, keep `NW`, `UW` and `NCH` consistent with the new
`M`. The interval evaluation needs `2^GW` above the largest modulus.

## Where this RTL departs from, or fills in, the description it follows

* The underlying description names the blocks, the operations and the
  normalization steps. It gives no moduli, widths, threshold, step size,
  latencies or interfaces. Every number above is this design's choice.
* The number `N` is read as signed. The CRT gives a value in `[0, M)`, but
  `⌊N/2^s⌋` and a threshold on `|N|` only make sense for signed values.
* The synchronised addition is residue-wise addition. One formula in the
  source writes it with a product sign, which is taken to be a slip.
* The magnitude monitor watches the eight accumulators only. Results of MUL
  and ADD leave the unit at once and are not monitored. Their range is
  bounded by the operands: a product of two values below `2^32` fits.
* MAC synchronisation scales the lower exponent up in both directions. A
  product is scaled in a stream; an accumulator is scaled by a blocking job.
* Accumulators live in flip-flops, because the monitor reads all of them
  every cycle.
* The source aims at a 300 MHz clock on a Zynq UltraScale+ device. This RTL
  has not been through timing closure. The deepest logic is likely the
  Barrett reductions, the five-term CRT sum and its reduction in the
  normalizer, and the 8-wide comparator tree.
* The read-out gives the exact integer and the exponent. A conversion to
  IEEE-754 at the boundary of the unit is not built. Nor is a memory system
  that would stream matrices in.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
arithmetic done independently in the testbench, with wide integers and
brute-force residue decoding from `hrfna_tb_pkg`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what is checked |
|-----------|-----------------|
| `tb_mod_arith_channel` | random add/mul results and two-cycle latency, per modulus |
| `tb_residue_pipeline` | all channels, valid alignment, behaviour with `en` low |
| `tb_exponent_pipeline` | sums, saturation and `ovf`, synchronisation decision |
| `tb_interval_eval` | interval contains \|N\|/M and is tight, for random and extreme N |
| `tb_fp_max_tree` | maximum, index, tie rule, latency |
| `tb_magnitude_monitor` | request and index against a model, flush behaviour |
| `tb_crt_normalizer` | N, ⌊N/2^s⌋, re-encoded residues, exponent, tag, latency 6 |
| `tb_acc_array` | both accumulate ports (also on the same entry), writes, reads |
| `tb_hrfna_top` | end to end at default parameters, see below |
| `tb_workload_matmul` | 64×64 and 128×128 matrix products at default parameters |

`tb_hrfna_top` runs the unit at its default size. Its phases are:

* MUL, including latency and exponent saturation;
* ADD with and without synchronisation;
* an exact 8×8 matrix product;
* the one-MAC-per-cycle rate test;
* three dot products of 1k, 16k and 64k elements.

The dot products use an accumulator exponent below the product exponent, so
every kind of synchronisation and the threshold normalization all happen.
Their checks are:

* Each READ must lie within the error bound given above.
* Each dot product's MAC stream must take at most its length plus a small
  allowance for normalizations.
* The testbench counts each mechanism: MUL, ADD bypass, ADD sync, MAC,
  accumulator sync, streamed product sync, normalization, stall, read and
  exponent overflow. A mechanism that never happened is a failure.

The whole run takes under a second.

`tb_workload_matmul` multiplies random 64×64 and 128×128 matrices. The
elements have 24-bit integers and exponents −2..0. Each block of eight output
elements is LOAD, MACs, READ. Every element must be within its error bound.
The RMS of the error relative to `Σ|a·b|` must be below 2·10⁻⁶; it comes out
near 10⁻¹⁴. The cycle count must stay near one MAC per cycle: 2,097,152
MACs take 2,260,812 cycles, the difference being the LOADs and READs. It
runs for about a minute.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl \
  rtl/hrfna_pkg.sv tb/hrfna_tb_pkg.sv tb/tb_hrfna_top.sv --top-module tb_hrfna_top
./obj_dir/Vtb_hrfna_top
```

Replace the testbench file and `--top-module` to run another block. All RTL
is plain synthesizable SystemVerilog-2017 with packages and packed structs.
