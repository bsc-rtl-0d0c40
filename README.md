# Block-based stochastic multiply-accumulate (BSC)

Stochastic computing encodes a number as the share of `1`s in a bitstream. A
multiplier then needs only one gate per bit, which makes it attractive for
very low-power inference. The cost is latency: an n-bit stream takes n cycles,
and precision grows only with n. A second problem is the adder. OR-gate
adders miscount when streams are correlated. Adders that split positive and
negative terms saturate once several inputs are summed.

Block-based stochastic computing (BSC) attacks both problems in three steps:

1. **Block division.** Every n-bit operand stream is cut into k blocks of
   d = n/k bits. The k blocks are processed side by side, so the arithmetic
   takes d cycles instead of n.
2. **Accumulator-based adder in every block.** Each block adds its inputs
   with counters, not OR gates. Correlation between inputs therefore does not
   matter. Positive and negative terms are counted into one running signed
   total, so they do not saturate separately.
3. **Output revision (OUR) across blocks.** Each block settles its own output
   alone, so the blocks together can hold a few `1`s too many or too few.
   While the result streams out, a revision stage adds or removes `1`s until
   the count is exactly right. This makes the addition deterministic and
   costs no extra output cycles.

This repository holds synthesizable SystemVerilog for one BSC
multiply-accumulate unit (MAC), plus self-checking testbenches. At its default
size the MAC forms the dot product of two 16-element vectors. It uses 64-bit
streams in k = 4 blocks of d = 16 bits.

## Number format: sign-magnitude streams

Each value in [-1, 1] is a **sign bit** plus a **unipolar magnitude stream**.
The sign bit is 1 for positive and 0 for negative. The magnitude stream holds
|v|·n ones. At the MAC's ports a magnitude is a binary integer `mag` in
0..n and stands for mag/n.

Multiplication works lane by lane (`sm_mult`):

* product sign = XNOR of the operand signs, so equal signs give a positive
  product;
* product magnitude bit = AND of the operand magnitude bits.

AND only multiplies when the two streams are uncorrelated. The operand
streams come from a Sobol low-discrepancy sequence (`sobol_sng`). Activations
(`x`) use Sobol dimension 0 and weights (`w`) use dimension 1. Over all n
positions each dimension visits every value 0..n-1 exactly once. The
comparator stream `mag > point` therefore holds exactly `mag` ones. For
magnitudes that are multiples of n/8, the AND of the two dimensions gives
exactly x·w·n ones.

How the Sobol points are computed: idx is written in binary, and the point is
the XOR of the direction numbers v_b for every bit b of idx that is set.

* Dimension 0 uses v_b = 2^(w-b), which is plain bit reversal.
* Dimension 1 uses v_b = m_b·2^(w-b), with m_1 = 1 and
  m_b = m_(b-1) XOR 2·m_(b-1). This gives m = 1, 3, 5, 15, 17, 51, …

Here w = log2 n.

The generator takes the bit position as an input; it does not step through
the sequence. So the k blocks can each ask for their own position of the same
stream in the same cycle.

## Stage 1: block division (`block_divider`)

Block j owns the contiguous stream positions j·d … j·d+d-1. In intra-block
cycle c (0 … d-1), the divider hands bit j·d+c of every operand to block j,
for all blocks at once. The streams are never stored. For each operand and
each block, a Sobol comparator produces the needed bit from the operand's
registered binary magnitude. With two operands per lane, that makes 2·k·N
comparators.

## Stage 2: the accumulator-based adder (`acc_adder`)

This is the hardest part to follow, and the reason BSC needs the other two
stages.

In each of its d cycles, the adder of one block receives one product bit and
one product sign from each of the N lanes. It keeps four counters:

| counter | counts |
|---|---|
| A_p | `1`s received so far from positive products |
| A_n | `1`s received so far from negative products |
| A_op | `1`s emitted so far on the candidate positive output S_op |
| A_on | `1`s emitted so far on the candidate negative output S_on |

Two parallel counters (`par_counter`) add the new `1`s of the cycle to A_p
and A_n. Then both candidate outputs are decided:

    S_op[t] = (A_p − A_n) > A_op        A_op += S_op[t]
    S_on[t] = (A_n − A_p) > A_on        A_on += S_on[t]

These comparisons use A_p and A_n after this cycle's update and A_op and A_on
before it. Each candidate emits a `1` whenever it is behind the running signed
total. Its `1`s therefore end up spread evenly over the block, which keeps the
output well-behaved as an input to the next multiplier.

The sign of the block's sum is only known at the end: `sign = A_p > A_n`.
Until then both candidate streams must be kept. This design keeps them in two
d-bit shift registers. After the last cycle, the adder presents the chosen
stream (`tout`, oldest bit in bit 0), its count `ao` (A_op or A_on) and A_p
and A_n. Because nothing can leave the adder before its sign is known, the
d intra-block cycles are pipeline stalls.

Worked example (5 inputs, d = 4). The positive inputs are 1101, 1000 and 0110.
The negative inputs are 0100 and 1011.

| cycle | 1 | 2 | 3 | 4 |
|---|---|---|---|---|
| A_p | 2 | 4 | 5 | 6 |
| A_n | 1 | 2 | 3 | 4 |
| A_p−A_n | 1 | 2 | 2 | 2 |
| S_op | 1 | 1 | 0 | 0 |

The final sign is 1 because 6 > 4, so the output is `1100` = +2/4. That is the
exact sum 3/4 + 1/4 + 2/4 − 1/4 − 3/4.

The adder is exact only if the timing of the `1`s cooperates. Take a block
whose positive `1`s come late and whose negative `1`s come early. The running
difference stays negative until the last cycle, and there is no room left to
emit the `1`s it then owes. For example, positive 0111, 0001, 0011 and
negative 1000, 1110 give `0001` where 2/4 is correct. In the opposite pattern
(positive early, negative late), the output emits `1`s the later negative
terms would have cancelled. The same inputs reordered give `1110`. A block can
also pick a local sign that disagrees with the sign of the whole sum.

## Stage 3: output revision (`our_unit`)

In the cycle after the blocks finish (the revision cycle), OUR registers:

* Ψ = |ΣA_p − ΣA_n|, the exact number of `1`s the result should hold;
* Φ = ΣA_o, the number of `1`s the blocks actually produced;
* the global sign, ΣA_p > ΣA_n;
* the n-bit temporal output, which is the blocks' chosen streams in order
  (block 0 first).

In each of the next n cycles it emits one bit t of the temporal output.
Φ serves as a running counter while it does so:

* if Ψ > Φ and t is 0, it emits 1 and increments Φ (**fill**);
* if Ψ < Φ and t is 1, it emits 0 and decrements Φ (**remove**);
* otherwise it passes t through.

The output therefore always holds exactly min(Ψ, n) ones. A sum with
|Σ| > 1 saturates at all ones. Example with two blocks that both hit the
late-positive case above: each has A_p = 6, A_n = 4 and output 0001. Then
Ψ = 12 − 8 = 4 and Φ = 2. The first two zeros are filled, and the result is
`1101 0001` = +4/8.

Revision decides bits in stream order, greedily. So the fills and removals
gather near the front of the stream whenever the blocks are far off.

## Timing of one operation (`bsc_ctrl`)

| phase | cycles | what happens |
|---|---|---|
| load | 1 | `start` seen while `ready`; operands registered, adders cleared |
| ACC | d | intra-block cycles, `stall` high |
| REV | 1 | OUR registers Ψ, Φ, sign, temporal output |
| OUT | n | one result bit per cycle, `out_valid` high, `done` on the last |

Counting from the load cycle to the last result bit, both included, one
operation takes d + n + 2 cycles, d of them stalls. For n = 64:

| k / d | 1/64 | 2/32 | 4/16 | 8/8 | 16/4 | 32/2 | 64/1 |
|---|---|---|---|---|---|---|---|
| cycles | 130 | 98 | 82 | 74 | 70 | 68 | 67 |
| stalls | 64 | 32 | 16 | 8 | 4 | 2 | 1 |

These are the figures the method's authors report for their own
implementation. The RTL reproduces them, and `tb_bsc_ctrl` and
`tb_wl_block_sweep` check them. Their worked example runs the adder and the
revision alone in d + 1 + n cycles. This RTL reconciles the two by treating
the remaining cycle as the operand-load cycle. One operation runs at a time:
the next `start` is accepted when `ready` returns, after the last result bit.

## Choosing k and d

The number of blocks is a design-time choice. It is not a run-time mode.

* **Lower bound on d, for accuracy.** A block's local sign should agree with
  the global sign. Treat the positive and negative parts of a block as two
  random d-bit streams of values p and q. The probability that the one with
  more `1`s is the one with the larger value is

      P(p ≥ q) = Σ_{i=0..d} C(d,i) p^i (1−p)^(d−i) · Σ_{j=0..i} C(d,j) q^j (1−q)^(d−j).

  Averaged over p, q ∈ {0, 0.1, …, 1}, this first exceeds 90 % at d = 12.
* **Upper bound on k, for power.** Power grows roughly linearly with k.

For 64-bit streams, k = 4 and d = 16 satisfy both bounds. These are the
defaults. `bsc_pkg::min_block_len()` evaluates the accuracy bound at
elaboration, and `bsc_mac` keeps the result as `D_MIN`: 12 bits for its
`THETA_PCT` = 90. A MAC built with shorter blocks still computes correctly,
because revision repairs the count, but its simulation prints a warning.
`tb_wl_block_rule` checks the probabilities: 0.6317 for p = 0.2 and q = 0.3
at d = 12, an average of 90.28 % at d = 12 and 89.86 % at d = 11.

`K` is a parameter of `bsc_mac` and may be any divisor of `BITLEN`.

## Module `bsc_mac`: parameters and ports

| parameter | default | meaning |
|---|---|---|
| `N` | 16 | vector length (lanes) |
| `BITLEN` | 64 | stream length n, a power of two |
| `K` | 4 | number of blocks k (d = BITLEN/K) |
| `THETA_PCT` | 90 | threshold of the block-length rule, in percent |

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `start` / `ready` | in / out | 1 | begin an operation when ready |
| `x_sign[N]`, `w_sign[N]` | in | 1 | operand signs, 1 = positive |
| `x_mag[N]`, `w_mag[N]` | in | log2(n)+1 | magnitudes 0..n (value mag/n) |
| `stall` | out | 1 | intra-block cycle |
| `out_valid`, `out_bit` | out | 1 | serial result magnitude stream |
| `out_sign` | out | 1 | result sign, valid with `out_valid` |
| `out_fill`, `out_remove` | out | 1 | this output bit was changed by revision |
| `out_psi` | out | log2(N·n+1) | Ψ, the exact \|Σ\|·n |
| `blk_sign[K]` | out | 1 | local sign chosen by each block |
| `done` | out | 1 | last result bit |

The result's value is (out_sign ? +1 : −1) · (ones in the stream)/n.

## Files

| file | contents |
|---|---|
| `rtl/bsc_pkg.sv` | phase enum, Sobol point function, block-length rule |
| `rtl/sobol_sng.sv` | Sobol comparator generator |
| `rtl/block_divider.sv` | stage 1 |
| `rtl/sm_mult.sv` | XNOR/AND multiplier lanes |
| `rtl/par_counter.sv` | parallel counter |
| `rtl/acc_adder.sv` | stage 2, one block |
| `rtl/our_unit.sv` | stage 3 |
| `rtl/bsc_ctrl.sv` | phase sequencer |
| `rtl/bsc_mac.sv` | top level |
| `tb/bsc_ref_pkg.sv` | integer reference models (Sobol, adder, revision, MAC) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_wl_*.sv` | workloads: adder sizes, 16×16 GEMM, block-count sweep, block-length rule |

## Verification

Every testbench compares against values computed separately from the RTL.
Each ends with a line `TB_RESULT checks=N failures=M` and has a cycle
watchdog.

* Unit tests replay the hand-worked examples above bit for bit: the 5-input
  adder, both error cases, and the two-block fill example. They also run
  random inputs against `bsc_ref_pkg` at the default size.
* `tb_bsc_mac` runs 300 dot products at the default parameters from four
  operand distributions. For each one it checks every output bit, the sign,
  Ψ, the blocks' local signs, the 82-cycle latency and the 16 stalls. It also
  requires that each mechanism occurs at least once: fill, remove, no
  revision, saturation, both result signs, a block sign that disagrees with
  the global sign, and stalls.
* `tb_wl_adder` uses the MAC as an adder, with all weights +1, for 2, 4, 8,
  16 and 32 inputs. It drives the default 16-lane MAC and a 32-lane instance
  (`N = 32`) with the same inputs. The result must hold exactly min(|Σ|, n)
  ones and match the reference bit for bit. Measured mean absolute errors
  against the exact sum of uniform inputs in [-1, 1] are about 0.04, 0.26,
  0.49, 1.23 and 1.68. All of that error comes from sums that leave [-1, 1].
* `tb_wl_gemm` computes a 16×16 by 16×16 matrix product as 256 dot products,
  once for each stream length 8, 16, 32, 64 and 128. Blocks are 16 bits long,
  or one block when the stream is shorter, so k = 1, 1, 2, 4, 8. The mean
  absolute errors are about 0.45, 0.40, 0.37, 0.36 and 0.36, mostly from
  saturation and, at short lengths, from quantisation. The 8-bit instance has
  8-bit blocks, below the block-length rule, and prints the rule's warning.
* `tb_wl_block_sweep` runs the same dot products with k = 1 … 64 and checks
  the cycle table above.
* `tb_wl_block_rule` checks the block-length rule values given earlier. It
  also checks that the default MAC meets the rule. Verilator folds the rule's
  floating-point loops at compile time, so this testbench takes about half a
  minute to build.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/bsc_pkg.sv tb/bsc_ref_pkg.sv tb/tb_bsc_mac.sv --top-module tb_bsc_mac
    ./obj_dir/Vtb_bsc_mac

Substitute any other testbench name. Verilator finds the other modules on
the include path by file name.

## Where this RTL departs from, or adds to, the published method

* **Operand interface and stream generation.** The method starts from
  bitstreams and only says they come from a Sobol generator. The binary
  sign/magnitude ports, the index-addressed comparator generator and the use
  of two Sobol dimensions are choices of this RTL.
* **Load cycle.** The published cycle counts (d + n + 2) are one cycle longer
  than the adder-plus-revision example (d + 1 + n). Here the extra cycle is
  the operand-load cycle. The source does not say which cycle it is.
* **Storage.** Both candidate streams of each block (2·d flip-flops) and the
  n-bit temporal output are held in registers. How they are held is not
  specified.
* **Ties.** When A_p = A_n, the local or global sign is 0 and the negative
  candidate is chosen. The value is then zero anyway, so the result count is
  unaffected. Tie behaviour is not specified.
* **Accuracy does not depend on k.** With exact revision the number of output
  `1`s is min(Ψ, n) whatever k is; only their positions change. The
  block-count sweep therefore shows the same error for every k. The published
  exploration reports errors that vary with k (about 0.30–0.37 for this MAC).
  Those figures come from a software model whose stream generation and
  rounding are not described, and this RTL does not reproduce them.
* **No overlap between operations.** The published design talks about
  pipeline stalls but does not define how consecutive operations overlap.
  Here the next operation starts only after the last result bit.
* **Not built.** Nothing maps longer dot products onto the 16-lane MAC: the
  published 784-input MNIST perceptron, or a 32-input adder. Nothing builds
  activation functions or layer sequencing either; the method does not
  describe them. The power side of the block-count rule (stay below a
  binary implementation's power) is not modelled.
