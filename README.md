# SCAL: a pipelined successive-cancellation automorphism list decoder for polar codes

A successive-cancellation list (SCL) decoder for polar codes usually starts with a
single decoding path. The list fills up only when the first information bits are
reached and each path splits in two. Successive cancellation automorphism list
(SCAL) decoding, proposed in "Successive Cancellation Automorphism List Decoding of
Polar Codes" (Johannsen, Kestel, Geiselhart, Vogt, ten Brink, Wehn), starts
with a full list instead. Path *l* gets the channel LLRs reordered by a different
automorphism π_l of the code: a permutation that maps every code word onto a
code word. Each permuted copy is a separate, equally valid noise realisation of the
same transmission. From the first bit on, the L copies compete in the sorting steps
of the list decoder, together with the candidates that path splitting creates.
At the end, the best path is mapped back through the inverse of the permutation
it came from.

This repository holds synthesizable SystemVerilog for such a decoder. It is built
as an unrolled, fully pipelined tree that takes one 128-LLR frame per clock
cycle. The defaults are the main configuration of the original work: the code
P(128,60) with minimal information set {27}, list size L = 8, 6-bit LLRs and
8-bit path metrics. The RTL is an independent implementation. The sections
below say where it follows that work and where it makes its own choices.

## The code and its automorphisms

The code is a *decreasing* polar code of length N = 2^n. Index j is an
information bit if j dominates the minimal information index 27 in the partial
order of decreasing monomial codes. To compare j with 27, write both in binary
and list the positions of their ones, highest first. j dominates 27 if it has
at least as many ones and its k-th highest one is at or above the k-th highest
one of 27 (binary 0011011) for every k. For n = 7 this gives K = 60 information
bits. `scal_pkg::info_mask` evaluates the rule at elaboration time, so the RTL
stores no frozen-bit table. Encoding is x = u·G_N with G_N = [1 0; 1 1]^{⊗n},
without bit reversal.

The automorphisms used are affine maps of the bit index: z' = A·z + b over
GF(2), where z is the 7-bit binary index (z0 = LSB). For this code the group of
usable A is block lower triangular with block profile (3,4):

```
      z0 z1 z2 | z3 z4 z5 z6
z0'  [  A11    |     0      ]
z1'  [ (3x3)   |            ]
z2'  [         |            ]
z3'  [  A21    |    A22     ]
 .   [ (4x3)   |   (4x4)    ]
```

Path l reads `alpha[l][i] = llr[sigma_l(i)]`, with `sigma_l(i) = A_l·z(i) + b_l`.
The final stage writes `x[sigma_o(i)] = beta[i]` for the winning origin o. The
original designers chose their permutations from different equivalence classes
of the automorphism group with a greedy method, and did not publish the list.
`scal_pkg::DEFAULT_PERM_A` therefore holds eight maps of this design's own
choosing:
- entry 0 is the identity;
- entries 1 to 7 are random invertible matrices with a non-identity A11 and A22;
- every b is 0.

All eight were checked to map code words to code words. To use other maps,
override `PERM_A` / `PERM_B` on `scal_decoder`. Each map is pure wiring, fixed
at elaboration time.

## Block map

```
llr_i[128] ──► perm_in ──► L permuted LLR vectors, PM = 0 for all paths
                             │
                             ▼
                   scal_node (root, 128 leaves) ── recursive, unrolled factor tree
                     f_stage ─► left subtree ─┐
                     delay_line ─► path_reorder ─► g_stage ─► right subtree ─┐
                     delay_line(beta_l, origin) ─► path_reorder ─► h: [β_l⊕β_r, β_r]
                             │
                             ▼  L paths: partial sums (code word estimates), PMs, origins
                      final_select: argmin PM, inverse permutation of its origin
                             │
                             ▼
                         x_o[128], pm_o, origin_o
```

| module | role |
|---|---|
| `scal_pkg` | formats, code construction, default automorphisms, tree classification and latency functions |
| `perm_in` | L automorphism-permuted copies of the channel LLRs, one per path; clamps −32 to −31 |
| `scal_node` | one node of the factor tree; picks its own type and instantiates its subtree |
| `f_stage`, `g_stage` | min-sum f and g for all L paths of a node, one register each |
| `leaf_rate0` | frozen subtree: zero partial sums, PM update, no splitting |
| `leaf_rep` | repetition subtree or single information bit: split every path, PM update, Sort & Select |
| `sort_select` | keeps the L smallest of 2L path metrics, sorted |
| `delay_line` | circular-buffer delay memory that holds a node's data until its child answers |
| `path_reorder` | message exchange: copies held per-path data to the surviving paths |
| `final_select` | final choice of the best path and inverse permutation |
| `scal_decoder` | top level, valid pipeline |

## The unrolled factor tree

This is the part that needs the most care when reading or changing the RTL.

**Node types.** SC decoding walks a binary tree whose leaves are the N bits
u_0 … u_{N−1}. Here the whole walk is laid out in hardware. `scal_node`
covers leaves OFF … OFF+2^S−1 and decides at elaboration time what it is:

- all leaves frozen: `leaf_rate0`;
- only the last leaf is an information bit: `leaf_rep`, a repetition node (S = 0 is a plain information bit);
- anything else: a split node with an f stage, a left subtree, a g stage, a right subtree and the h combination.

For P(128,60) the tree has 63 split nodes, 4 rate-0 leaves (three of size 8 and
one of size 16) and 60 repetition leaves (44 of size 1, 10 of size 2 and 6 of
size 4). That is 60 Sort & Select steps in total.

**Pipelining and timing.** Every f stage, g stage and leaf has one output
register. The h combination is an XOR of registered values and adds no cycle.
A subtree therefore takes `2 × (split nodes) + (leaves)` cycles; see
`scal_pkg::node_latency`. For the default code that is 190 cycles. The input
permutation register and the output register add one cycle each, so
`scal_decoder.LATENCY` = 192. Every stage accepts new data every cycle, so the
decoder takes one frame per cycle. Its throughput is N·f: 64 Gbit/s at
500 MHz.

**What a split node holds, and for how long.** The node receives L LLR vectors
[a | b] at cycle t. The left child gets f(a, b) at t+1 and answers at t+1+LL.
The g stage needs the original a and b at that moment, so they wait LL+1 cycles in
a `delay_line`. The left child's partial sums and path indices are needed once
more, after the right child (latency LR) has answered. They wait LR+1 cycles in
a second delay line. These delay lines are most of the storage: about 0.9 Mbit
at the default size. The root's LLR delay line alone holds 8 × 128 × 6 bits
per stage. In a plain SCL decoder the root holds a single vector; with SCAL it
holds L different ones.

**Message exchange.** Every `leaf_rep` sorts the list. Its output path k may
continue any input path p = perm[k]; pruned paths vanish and a surviving path
may appear twice. Everything the ancestors hold for the list must follow that
reordering. When the held LLRs leave their delay line, `path_reorder` picks
path perm_l[k] for slot k before the g stage. Likewise, the held left partial
sums and path indices are picked by the right child's perm_r before h. The
node reports the composed index held_perm[perm_r[k]] upward. At the root, this
index is the number of the input permutation that a final path descends from:
its *origin*.

**Rate-0 leaves** still update the PM of every path. Because all L paths are
live from the start, the PMs already tell the permuted copies apart before the
first information bit: in a plain SCL decoder, frozen bits before the first
split change nothing.

## Path metrics, sorting and the final choice

- LLRs are 6-bit two's complement. Every f/g result and the channel input are
  clamped to ±31, so |LLR| always fits.
- The path metric (PM) is an 8-bit unsigned cost that saturates at 255. A bit
  decision adds |α| when it disagrees with the hard decision of α, where α ≥ 0
  decides 0. A rate-0 leaf adds the magnitudes of all its negative LLRs. A
  repetition leaf forms candidate 2l (all zeros) and candidate 2l+1 (all ones)
  for each path l.
- `sort_select` ranks the 2L candidates by comparing every pair. A candidate's
  rank is the number of candidates with a smaller PM, or an equal PM and a lower
  index. The candidate with rank k goes to slot k, so ties keep the lower index.
  The sorter is combinational and sits in front of the leaf register.
- `final_select` takes the path with the smallest PM. After the last
  information bit, that is list entry 0. Its root partial sums are the
  permuted code word estimate, and the stage undoes that path's permutation.
- The PM is not renormalised. Paths whose PM reaches 255 can no longer be told
  apart by the sorter. Such paths are already far worse than the best one, so
  this mostly affects frames that are decoded wrongly anyway. The size of that
  effect on the error rate has not been measured.

A useful invariant for checking: with min-sum f and g, the final PM of a path
equals the correlation discrepancy of its code word with the channel LLRs,
Σ|llr_i| over x_i ≠ hard(llr_i). The invariant holds as long as no clamping
touched the path. The end-to-end testbench uses it.

## Interface of `scal_decoder`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `rst_n` | in | 1 | asynchronous active-low reset: valid pipeline and delay-line pointers |
| `valid_i` | in | 1 | `llr_i` holds a frame this cycle |
| `llr_i` | in | 128 × 6 | channel LLRs, `llr_i[i]` for code bit x_i, positive = 0 more likely |
| `valid_o` | out | 1 | result of the frame given LATENCY cycles earlier |
| `x_o` | out | 128 | decoded code word |
| `pm_o` | out | 8 | its path metric |
| `origin_o` | out | 3 | index of the input permutation the winner descends from |
| `path_o` | out | 3 | list position of the winner |
| `list_origin_o` | out | 8 × 3 | origin of every path in the final list |

There is no back-pressure: the decoder accepts a frame every cycle, and gaps
(`valid_i` low) simply travel through. The information bits are x_o after the
polar transform (u = x·G_N, since G_N is its own inverse), read at the
information positions.

Parameters: `L` (list size, 2 to 8 with the default permutation table), `NB`
(n = log2 N, at most 7), `IMIN` (minimal information index), `PERM_A`,
`PERM_B`. Other decreasing codes up to length 128 work by changing `NB` and
`IMIN`. The permutations must then be automorphisms of that code.

## How far it matches the original decoder

Same as the original:
- the SCAL principle: L permuted inputs, list decoding with splitting at
  information bits, Sort & Select, final un-permutation;
- the code, the list size and the LLR and PM widths;
- the unrolled, fully pipelined organisation;
- the resulting throughput of one frame per cycle.

Different from the original:
- **Node set.** The original decoder uses optimised node types with
  single-parity-check (SPC) nodes. Their thresholds are S_SPC = {2,2} and
  k_SPC = {2,3} for SCAL-{4,8}. These nodes are defined in separate
  publications and not rebuilt here. This RTL uses only rate-0 and repetition
  nodes and splits bit by bit elsewhere. That is exact SCL behaviour, but it
  takes more Sort & Select steps and more cycles.
- **Latency.** 192 cycles, against 32 cycles (64 ns at 500 MHz) reported for
  SCAL-8. The register placement here is simple (one per f, g and leaf) and not
  timing-driven.
- **Automorphisms.** Own choice of eight BLTA maps, not the published
  selection, so error-rate curves will differ slightly.
- **Saturation, tie-breaking, sorter structure, reset and handshake** are own
  choices.
- **Not covered:** timing closure at 500 MHz, area and power figures, and
  error-rate curves down to 10^-5 or below. None of these can be reproduced by
  RTL simulation.

## Simulation

Every module has a self-checking testbench in `tb/` (the package is exercised through them). Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| `tb_scal_decoder` | full default size: 8 noise-free frames and 240 AWGN frames at 1–4 dB. More permutations survive at 4 dB than at 1 dB. Output is always a code word; noise-free frames decode exactly with PM 0; the PM equals the discrepancy whenever it is below 31; frame error rate at 4 dB ≤ 5 %; latency = LATENCY for every frame, in order, with back-to-back frames and gaps. It also requires that both surviving split paths and fully surviving permutations occur, and that a non-identity permutation wins. |
| `tb_scal_decoder_l4` | the same end-to-end test for the SCAL-4 configuration (`L = 4`, first four default permutations) |
| `tb_scal_node` | an 8-leaf subtree (repetition nodes of 4 and 2 leaves, two single information bits, three split nodes), L = 4, a new list every cycle: code word property, PM identity, sorted PMs, latency 10 |
| `tb_leaf_rep`, `tb_leaf_rate0`, `tb_sort_select` | against a reference that enumerates the candidates and stable-sorts them |
| `tb_f_stage`, `tb_g_stage` | against integer min-sum f and g with clamping |
| `tb_perm_in`, `tb_final_select` | against the affine maps evaluated bit by bit in the testbench |
| `tb_delay_line`, `tb_path_reorder` | delays of 0, 1, 2, 5 and 7; random path indices |

With plain Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
          rtl/scal_pkg.sv tb/tb_scal_decoder.sv --top-module tb_scal_decoder
obj_dir/Vtb_scal_decoder
```

The full-size decoder builds in about a minute, and the testbench then runs in
well under a second. A run prints the measured frame error counts per SNR and
how often each mechanism occurred. It also prints how many distinct input
permutations are left in the final list, on average. For L = 8 (60 frames per
point):

| Eb/N0 | frame errors | distinct permutations in the final list |
|---|---|---|
| 1 dB | 14 / 60 | 4.2 |
| 2 dB | 2 / 60 | 5.7 |
| 3 dB | 0 / 60 | 7.4 |
| 4 dB | 0 / 60 | 7.9 |

At low SNR, path splitting fills the list with descendants of a few
permutations. At high SNR, decoding rarely branches, and almost all L
permuted copies survive to the end. The testbench requires this growth.
60 frames per point are far too few for error-rate curves; the counts only
show that the decoder works.
