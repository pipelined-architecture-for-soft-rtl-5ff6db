# Pipelined soft-decision IPA decoder for Reed-Muller codes

Reed-Muller codes RM(m,r) are short block codes (length n = 2^m) that can be
decoded close to maximum likelihood by recursive projection-aggregation
(RPA). RPA is awkward in hardware because it nests iterations inside each
level of recursion. Iterative projection-aggregation (IPA) keeps iterations
only at the outermost level. For second-order codes, one IPA iteration is
then a flat data flow:

1. **Projection.** For every i in 1..n-1, fold the n input LLRs into n/2 LLRs
   by pairing coordinate z with z XOR i. The two LLRs of each pair are
   combined with the min-sum rule: magnitude is the smaller |LLR|, sign is
   the product of the signs. The folded vector is a noisy first-order
   codeword.
2. **First-order decoding (FOD).** Decode each folded vector exactly, with a
   fast Hadamard transform (FHT) and an argmax.
3. **Aggregation.** Each decoded bit says whether the two LLRs of its pair
   should agree or disagree. Each coordinate therefore gets a vote from every
   projection: its partner's LLR, negated where the decoded bit is 1. The new
   LLR of a coordinate is the mean of its votes.

After NMAX iterations, the sign of each LLR is the decoded bit.

This RTL implements the pipelined architecture for that algorithm. P
processing units (PUs) each handle one projection per clock cycle, so P sets
the trade between area and speed: P = 1 is fully sequential and P = n is
fully parallel. The pipeline accepts a new codeword every n/P cycles and
never stalls. NMAX copies of the iteration hardware are chained.

Default configuration (`sd_ipa_decoder` with no parameters): RM(7,2)
(n = 128, k = 29), P = 4 PUs, 5-bit LLRs in Q(3:2) format (value = integer/4),
NMAX = 2 iterations. Latency is 92 cycles and a codeword can enter every 32
cycles.

## Files

| module | role |
|---|---|
| `ipa_pkg` | default sizes; index functions for the projection pairs; latency and depth formulas |
| `sd_ipa_decoder` | top: NMAX chained iterations plus the hard-decision (sign bit) output |
| `ipa_iteration` | one iteration: input register, P PUs, register array, control unit, tree divider, output register |
| `ipa_pu` | processing unit: projection, then FOD, then pre-aggregation |
| `ipa_projection` | crossbars for the PU's projections, a multiplexer, n/2 min-sum units |
| `ipa_fod` | first-order decoder: pipelined FHT, argmax tree, RM(m-1,1) encoder (GenMtx) |
| `ipa_preagg` | Extension and ReArrangement networks, then conditional negation (TwosComp) |
| `ipa_tree_divider` | averaging tree of add-then-halve nodes: parallel register levels, then shift-register levels |
| `ipa_reg_array` | holds each input vector until its pre-aggregation is finished |
| `ipa_control` | projection state machine, aggregation state machine, EnGen |
| `ipa_engen` | cascaded modulo-2 counters that enable the divider's shift registers |

Each of these has a self-checking testbench `tb/tb_<module>.sv`.
`tb/tb_ipa_ref_pkg.sv` holds the reference model the testbenches share.

## Interface and timing

`sd_ipa_decoder #(M, P, W, NMAX)`:

- `valid_in` (1 cycle) together with `llr_in[0:n-1]`, W-bit two's complement.
  A positive LLR favours bit 0.
- `valid_out` (1 cycle). `codeword[n-1:0]` is valid while `valid_out` is high
  and stays unchanged until the next result.
- Pulses on `valid_in` must be at least n/P cycles apart. An assertion in
  `ipa_control` checks this. There is no back-pressure.
- Reset is synchronous and active low (`rst_n`). It clears the valid bits
  and the counters; data registers are not reset.

The latency of one iteration is

    t = (t_proj + t_FOD + t_PreAgg) + (n/P - 1) + m + 2

with t_proj = t_PreAgg = 1. The "+2" is the input and output registers, and
m is the cycles spent in the divider. t_FOD is 4 when the projected length
n/2 is at least 64, and 3 otherwise. The total latency is NMAX · t. For
RM(7,2) this gives 156, 92 and 60 cycles for P = 2, 4 and 8. The testbenches
check the latency cycle-exactly.

## Projection numbering: the central trick

Every crossbar in the design is a fixed wiring derived from one rule. For
projection i, let h be the position of the highest set bit of i. The n/2
pairs are numbered p = 0..n/2-1. Pair p holds

    ja = p with a 0 inserted at bit position h,   jb = ja XOR i.

This is exactly the order produced by the recursive "Reorder" procedure:

- If i lies in the lower half of the current block, split the block in two
  and recurse into each half.
- Otherwise, pair j with j XOR i.

The map from p to its pair is linear over GF(2). An RM(m,2) codeword
therefore folds into a first-order codeword in p-order, which is the order
the FOD needs.

The networks in a PU all use this rule:

- **ROC** (projection): output 2p takes `L[ja]` and output 2p+1 takes
  `L[jb]`.
- **Extension** (pre-aggregation): coordinate z takes decoded bit
  `y[pair_of(z,i)]`. To find the pair, z XOR i is used when bit h of z is
  set, and then bit h is removed.
- **ReArrangement** (pre-aggregation): swapping the two members of every pair
  is simply `L_e[z] = L[z XOR i]`.

PU j holds only the networks for projections i with i mod P = j, selected by
a group counter g (i = g·P + j). Projection 0 does not exist in the
algorithm. It is a dummy whose ROC, Extension and ReArrangement outputs are
all zero. It makes the vote count n instead of n-1, so the mean can be taken
by halving m times.

## First-order decoder

`ipa_fod` computes ω = H·L over the 2^K projected LLRs (K = m-1) with K
butterfly stages, each one bit wider than the last. Nothing saturates, and
the final width is W+K (11 bits at the defaults). Pipeline registers sit:

- after the FHT (for K ≥ 6 the FHT is split over two register stages);
- after the argmax, which holds β and the sign λ of ω(β);
- after the encoder, which holds y(j) = λ XOR parity(β AND j).

The argmax is a binary comparator tree in which the lower index wins on a
tie.

## The tree divider and EnGen

The average of n numbers equals the average of the two half-averages. So n
votes are averaged by m levels of `(a + b) >>> 1`, using a one-bit-wider add
and an arithmetic shift (floor). The result always fits back into W bits.
The P votes of one group arrive together:

- **Levels 0..p-1** (P = 2^p) are plain registers, each one cycle after the
  previous level.
- **Levels p..m-1** each have a two-entry shift register. Level l shifts in
  its input when `sr_en[l-p]` is high, and its output is the average of its
  two entries.

`ipa_engen` makes these enables. Its first enable is the pre-aggregation
valid delayed by p cycles. Counter l raises the next level's enable for one
cycle after every second enable it sees. Its last output marks the result as
complete. The final node is combinational into the iteration's output
register. So the divider costs exactly m cycles after the last group.

Floor rounding and the zero dummy vote make the average slightly biased
compared with an exact divide by n-1. The reference model reproduces this bit
for bit.

## Why a register array and two state machines

While projections of codeword k+1 enter a PU, the pre-aggregation stage of
the same PU is still finishing codeword k: the stages are 1 + t_FOD cycles
apart. Two things follow:

- **Register array.** The pre-aggregation must read its LLRs from a store,
  not from the input register. `ipa_reg_array` writes every arriving vector
  at a write counter. The aggregation side releases it (read counter + 1)
  after its last group. The depth is D = ceil(t_agg/(n/P)) + 1, where t_agg
  = 1 + t_proj + t_FOD. D is 2 at the defaults and 7 for a fully parallel
  RM(7,2).
- **Two selectors.** The projection selector and the pre-aggregation
  selector differ. `ipa_control` runs a projection counter, started by
  `valid_in`, and an aggregation counter, advanced by the FOD valid, side by
  side. An assertion in `ipa_pu` checks that the aggregation counter always
  names the projection that the FOD has just finished.

## Verification

Every testbench compares against `tb_ipa_ref_pkg`, which is written
differently from the RTL:

- pairs are found by walking the Reorder recursion;
- the FOD is brute-force correlation with all 2^(K+1) first-order codewords;
- the mean is an explicit recursive tree.

`tb_sd_ipa_decoder` runs the default configuration end to end:

- 40 random RM(7,2) codewords over a simulated AWGN channel with σ = 1.0
  (about 3 dB Eb/N0), quantised to Q(3:2);
- frames fed at full rate, then with random gaps.

It checks each decoded word bit for bit against two reference iterations. It
also checks the latency (92 cycles) and that output spacing equals input
spacing. It counts how often the architecture's mechanisms occur and fails
if any never happens:

- two vectors in one register array;
- both iterations busy at once;
- the dummy projection;
- register-array wrap-around;
- channel errors being corrected.

In a typical run all 40 frames had channel bit errors and all 40 decoded
correctly.

To simulate with plain Verilator, for example the full decoder:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
      --top-module tb_sd_ipa_decoder rtl/ipa_pkg.sv tb/tb_ipa_ref_pkg.sv \
      tb/tb_sd_ipa_decoder.sv && obj_dir/Vtb_sd_ipa_decoder

Each testbench ends with a line `TB_RESULT checks=N failures=F`.

## Relation to the published architecture

What follows the published description:

- the PU structure (projection with reordering crossbars and min-sum; FOD
  made of FHT, argmax and GenMtx; pre-aggregation made of Extension,
  ReArrangement and TwosComp);
- the per-PU split of crossbars by i mod P;
- the dummy all-zero projection 0;
- the tree divider, with parallel registers for the first log2(P) levels and
  EnGen-driven shift registers after them;
- the register array and its depth formula;
- the two control state machines;
- NMAX chained iterations without early stopping;
- the sign-bit hard decision;
- the Q(3:2) width, the one-bit FHT growth per stage, and the latency
  formula. The RTL meets the formula exactly and so reproduces the published
  cycle counts for RM(7,2).

Choices made here where the description is silent:

- the 2- or 4-stage split of the FOD;
- argmax tie-breaking;
- clipping to ±(2^(W-1)-1) after min-sum, and when negating the most
  negative value;
- floor rounding in the divider;
- the reset scheme;
- the input rule of one pulse per n/P cycles, with no back-pressure;
- taking t_agg in the depth formula as including the input register.

One printed crossbar example gives its last output pair as (n/2+1, n/2).
The reordering rule gives (n/2-1, n/2), and the rule is followed here.

Not implemented: the third-order extension, which decodes RM(m,3) by a
further projection level around an embedded second-order decoder. This
includes the configuration with several second-order decoders in parallel.
As a result, the RM(6,3) results cannot be run on this RTL.
