# Path-metric automorphism ensemble decoder for the polar code P(128,60)

Short polar codes decoded by successive cancellation (SC) are fast and cheap, but
they fall well short of maximum-likelihood (ML) error rates. List decoding (SCL)
closes that gap, but its cost grows quickly with the list size. An *automorphism
ensemble* decoder (AED) works differently. It runs M plain SC-type decoders side by
side. Each decoder sees the received frame reordered by a different automorphism
of the code, that is, a permutation of code-bit positions that maps code words onto
code words. Each reordering presents a different noise pattern to the decoder, so
the M decoders often return different code words. The ensemble keeps the most
likely one.

This RTL implements such an ensemble for P(128,60), and has two notable features:

* **Fully unrolled, pipelined Fast-SSC decoders.** Each constituent decoder is a
  tree of hardwired operators. It accepts a new 128-LLR frame every clock cycle.
  The latency does not depend on M: a code word comes out 11 cycles after its frame
  went in (10 cycles of decoding, 1 of selection).
* **Selection by path metric.** The classic way to choose among candidates
  correlates each candidate with the received LLRs. That approach has to keep every
  frame's LLRs in a buffer for the whole decoding latency. Here, each decoder
  instead accumulates a *path metric* (PM) while it decodes. The PM is a cost that
  grows whenever the decoder overrules the sign of an LLR. The selection unit just
  picks the candidate with the smallest PM, so no LLR buffer is needed.

At the default M = 4, the design decodes one 128-bit frame per cycle. At about
500 MHz that is 64 Gbit/s.

```
             y (128 x 6-bit LLRs)
   +-----------+-----------+-----------+
   v           v           v           v
 pi_0        pi_1        pi_2        pi_3         fixed wiring
 Fast-SSC    Fast-SSC    Fast-SSC    Fast-SSC     10 pipeline stages each
  | x'  PM    | x'  PM    | x'  PM    | x'  PM
 pi_0^-1     pi_1^-1     pi_2^-1     pi_3^-1      fixed wiring
   +-----------+-----+-----+-----------+
                     v
              min-PM selection                    1 register stage
                     v
             x-hat, PM, lane index
```

## The code

The code has N = 128 and K = 60. Its information set is defined by a single
generator, the index 27. Index j carries information exactly when j dominates 27 in
the partial order of polar codes. Concretely, for every bit position t,
`popcount(j >> t) >= popcount(27 >> t)`. Equivalently, j can be reached from 27 by
setting zero bits to one and by moving one bits to more significant positions. This
gives exactly 60 indices. The frozen mask is the complement:

```
information mask (bit i = 1: information) = 128'hfffefee8_fee8e800_fee8e800_e8000000
```

`aed_pkg::info_mask()` computes this mask at elaboration from `I_MIN = 27`. Nothing
is tabulated.

Fast-SSC prunes the SC decoding tree. A subtree is not traversed further when it
has one of these known forms:

| node | frozen pattern in the subtree | decision | PM increment |
|---|---|---|---|
| Rate-0 | all frozen | all zeros | sum of \|alpha_j\| over negative alpha_j |
| Rate-1 | none frozen | hard decision per LLR | 0 |
| REP | all but the last frozen | every bit = sign(sum alpha_j) | sum of \|alpha_j\| where sign(alpha_j) differs from the decision |
| SPC | only the first frozen | hard decisions; if their parity is odd, flip the least reliable bit | \|alpha_jmin\| if the parity was odd, else 0 |

Signs follow the usual rule: a negative LLR means bit 1, and zero or positive means
bit 0. For this code the pruned tree has 20 leaves, all of them Rate-0, REP or SPC:

```
[0,16) R0   [16,24) R0  [24,28) REP [28,32) SPC  [32,40) R0  [40,44) REP [44,48) SPC
[48,52) REP [52,56) SPC [56,64) SPC8 [64,72) R0  [72,76) REP [76,80) SPC [80,84) REP
[84,88) SPC [88,96) SPC8 [96,100) REP [100,104) SPC [104,112) SPC8 [112,128) SPC16
```

The PM always grows; it never shrinks. Each increment is what ML decoding of that
node costs, measured as the sum of |LLR| over the positions where the chosen bits
disagree with the signs of the LLRs. Summed over a whole frame, the PM is the
min-sum approximation of the SC path metric. A lower PM means a more likely code
word.

## Decoder tree and pipeline (`fssc_node`, `fssc_decoder`)

`fssc_node` builds the whole pruned tree by instantiating itself. The node's size
`NS` and its frozen pattern `FROZEN` are parameters. From them the node elaborates
into one of these forms:

* a leaf: `fssc_rate0`, `fssc_rep`, `fssc_spc`, or inline sign bits for Rate-1;
* a split node:
  * `alpha_l[i] = f(a[i], b[i])` feeds the left child;
  * `alpha_r[i] = g(a[i], b[i], beta_l[i])` feeds the right child;
  * `beta = {beta_r, beta_l ^ beta_r}` is the node's result.

  Here `a` and `b` are the lower and upper halves of the input LLRs. `f` is the
  min-sum function `sign(a) sign(b) min(|a|,|b|)`. `g` is `b + a`, or `b - a` when
  the left partial-sum bit is 1. Both results saturate to +-31.

The PM is threaded through the leaves in decoding order. It enters a split node,
passes through its left subtree, then through its right subtree, and leaves the
node. A PM therefore moves through the pipeline together with its frame.

**Where the registers are.** The rule is fixed by `REG_SIZE` (default 8):

1. A Rate-0 subtree costs no cycle. Its result is known to be zero, so the g
   function of its right sibling can start at once.
2. Any other subtree of size `REG_SIZE` or smaller is evaluated combinationally in
   a single cycle. So is any larger special node. Its `beta` and PM are then
   registered.
3. A larger split node takes the sum of its children's latencies. It holds its
   input LLRs in a delay line for as many cycles as the left child takes, so that
   `g` sees them together with `beta_l`. It also delays `beta_l` by the right
   child's latency before the final XOR.

The latency rule lives in `aed_pkg::node_lat()`, which every node evaluates for its
children. For P(128,60) this gives 10 stages: `[24,32)`, `[40,48)`, `[48,56)`,
`[56,64)`, `[72,80)`, `[80,88)`, `[88,96)`, `[96,104)`, `[104,112)`, `[112,128)`.
The four Rate-0 leaves take no stage. With the selection register, the total is 11
cycles. The first stage also contains the f/g chain from the root down to `[24,32)`,
and is the longest combinational path. If timing requires a different balance, set
`REG_SIZE` (4 gives more, shorter stages). Or edit `node_lat()` together with the
`STAGE` condition in `fssc_node`: both must express the same rule.

`fssc_decoder` puts the root node at the channel input with PM = 0. It carries the
valid flag down a shift register as long as the tree's latency. Its output is the
code word estimate, which is the root's partial sum. It is not the vector of
information bits.

## Automorphisms and lanes (`aed_lane`, `aed_pkg`)

For this code, the usable automorphisms are the block lower triangular affine maps
`z' = A z + b`. Here z is the 7-bit binary index of a code position, and A is an
invertible 7x7 binary matrix. A has a 3x3 diagonal block on bits 0..2 and a 4x4
diagonal block on bits 3..6, and is zero above them. This orientation matters.
Using the LSB-first bit order with those blocks maps code words onto code words.
The mirrored orientations do not. `tb_aed_pkg` checks this for every entry of the
list.

Lane m works as follows:

1. It sends `y'[pi_m(i)] = y[i]` into its decoder.
2. It maps the result back with `x[i] = x'[pi_m(i)]`.

Both maps are `assign` statements generated from `aed_pkg::blta_map()`. They cost
no logic and no clock cycle.

`aed_pkg::BLTA_A` lists 16 matrices, each stored as seven 7-bit rows. Lane m uses
entry m, so an ensemble of size M uses a prefix of one fixed list. Entry 0 is the
identity, so lane 0 is a plain Fast-SSC decoder. The other entries were chosen
offline by a greedy procedure:

1. Draw a batch of noisy frames (600 frames at Eb/N0 = 3 dB).
2. Repeatedly add the candidate matrix that correctly decodes the most frames that
   the lanes chosen so far all miss.

The candidates were 40 random block-triangular matrices. After five picks that
batch was fully covered, so entries 5..15 are further random candidates and are not
ranked. All entries use b = 0. A translation b, and any lower-triangular part of A,
do not change the result of SC decoding, so only the upper parts of the diagonal
blocks make the lanes differ. Replacing the list with a better-optimised one is a
matter of editing `BLTA_A`. The testbenches take their permutations from it too.

## Selection (`pm_select`)

The selection unit is a linear chain of M-1 comparators, followed by one register
for the code word, its PM and the index of the winning lane. On a tie, the lower
lane index wins.

## Top level (`aed_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active low; clears the valid flags only |
| `valid_i` | in | 1 | `y_i` holds a frame; may be 1 in every cycle |
| `y_i` | in | 128 x 6 | channel LLRs, two's complement, positive favours 0, keep within +-31 |
| `valid_o` | out | 1 | result valid, exactly 11 cycles after the frame was sampled |
| `x_o` | out | 128 | estimated code word |
| `pm_o` | out | 12 | its path metric |
| `sel_o` | out | 4 | lane that produced it |

Parameters:

* `M`: the ensemble size, 1 to 16, default 4.
* `REG_SIZE`: see the pipeline section, default 8.

The pipeline has no back-pressure. A result is produced for every accepted frame,
11 cycles later. Only the valid flags are reset, and data registers may hold
anything until the first frame arrives. The package holds the number formats:

* LLRs are 6 bits, `LLR_W`. Every f/g result saturates to +-31.
* Path metrics are 12 bits, `PM_W`, and saturate. For this code the largest
  possible PM is below 128 x 31 < 4096, so a PM never actually saturates.

## How far this follows the published architecture

These parts follow the published architecture:

* the overall structure: M independent decoders between fixed permutations, and a
  minimum-PM selection with no LLR memory;
* the code and its automorphism group;
* the Fast-SSC node types, the f/g functions and the PM formulas of every node type;
* one frame per cycle and 11 cycles of latency.

These are choices made here where the published description is silent:

* the word widths, and saturation of LLRs to a symmetric range;
* the tie rules: the lowest index wins in the SPC minimum search and in the
  selection;
* reset and valid handling, and the extra `pm_o` and `sel_o` outputs;
* the bit order of the automorphism index and the direction of the permutation;
* the concrete list of automorphisms, selected by the same greedy data-driven method
  on a small batch;
* the placement of the pipeline registers. The original decoders come from a
  generator framework whose register placement is not given. The `REG_SIZE` rule
  merely reproduces the 11-cycle total.

Nothing here says anything about clock frequency, area or power. The reference
implementation was placed and routed in a 12 nm FinFET process at about 500 MHz.
Whether this RTL's first, longest stage would meet that clock is not known.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. They compare against `tb/fssc_ref_pkg.sv`, a
behavioural model written without the RTL's recursion. It computes the information
set by closing {27} under the two elementary moves, builds a polar encoder, and
runs Fast-SSC as an iterative walk over the leaves with per-stage LLR and
partial-sum arrays. Test frames are random information words, polar encoded and
sent over BPSK/AWGN at 1.5-4.5 dB, then quantised to 6-bit LLRs (1 LSB = 1 LLR
unit).

| testbench | what it establishes |
|---|---|
| `tb_aed_pkg` | frozen mask = closure of {27}, K = 60; all 16 maps are bijections and automorphisms; f and g over all input pairs |
| `tb_fssc_rate0`, `tb_fssc_rep`, `tb_fssc_spc` | decisions and PM, including PM saturation, against the node equations |
| `tb_fssc_node` | a 16-bit tree with all four node kinds at three register settings: latencies 3, 1 and 0 |
| `tb_fssc_decoder` | full decoder against the reference, bit-exact with PM, latency 10, back-to-back frames |
| `tb_aed_lane` | permute, decode and unpermute for entry 3; its results differ from the identity lane on about 1 frame in 6 |
| `tb_pm_select` | minimum selection with frequent ties, 1-cycle latency |
| `tb_aed_decoder` | the whole design at its defaults (see below) |
| `tb_aed_workloads` | AED-2 and AED-16 side by side on the same frames, bit-exact, latency 11 for both |

`tb_aed_decoder` runs 1500 frames through the design at its default parameters. It
counts a failure unless each of these happens at least once:

* a lane other than the identity lane wins;
* the ensemble corrects a frame that plain Fast-SSC gets wrong;
* a PM tie occurs;
* each of the Rate-0, REP and SPC node kinds adds to a PM;
* a burst of at least 8 frames arrives in consecutive cycles.

In a typical run, plain Fast-SSC (lane 0) makes 201 frame errors and the
four-lane ensemble makes 53. The testbench also applies the classic correlation
rule to the same four candidates: it picks the one that maximises
`sum_i y_i (1 - 2 x_i)`. That rule also gives 53 errors, and it chose the same
candidate as the path metric in all 1500 frames. The test fails if the path
metric does worse than the correlation rule by more than 1% of the frames. The
correlation rule is computed only in the testbench; the design has no LLR buffer.

Running a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/aed_pkg.sv tb/fssc_ref_pkg.sv tb/tb_aed_decoder.sv --top-module tb_aed_decoder
./obj_dir/Vtb_aed_decoder
```

Replace the last file and the top-module name to run another testbench. Building
the full design takes a minute or two. Building `tb_aed_workloads`, which elaborates
2 + 16 decoders, takes several minutes. With an AED-8 instance (`M = 8`) added to it,
one run on 600 frames at 2, 3 and 4 dB gave 30 frame errors for AED-2, 9 for AED-8
and 2 for AED-16, all bit-exact against the reference.

## Files

| file | content |
|---|---|
| `rtl/aed_pkg.sv` | code constants, information set, f/g, node classification and latency rule, automorphism list and map |
| `rtl/fssc_rate0.sv`, `rtl/fssc_rep.sv`, `rtl/fssc_spc.sv` | special leaf nodes with PM |
| `rtl/fssc_node.sv` | recursive tree node, register placement |
| `rtl/pipe_delay.sv` | delay line used by split nodes |
| `rtl/fssc_decoder.sv` | one constituent decoder with valid pipeline |
| `rtl/aed_lane.sv` | permutation, decoder, inverse permutation |
| `rtl/pm_select.sv` | minimum-PM selection |
| `rtl/aed_decoder.sv` | top level |
| `tb/fssc_ref_pkg.sv` | reference models, channel model |
| `tb/tb_*.sv` | testbenches listed above |
