# Soft-input soft-output single tree-search sphere decoder

An iterative MIMO receiver passes soft information back and forth between a
MIMO detector and a channel decoder. On each pass the detector gets the
channel decoder's a priori log-likelihood ratios (LLRs) L^A and must return
extrinsic LLRs L^E for every transmitted bit. This RTL computes those LLRs
exactly in the max-log sense. It runs a depth-first sphere decoder that
searches the symbol tree only once (a *single tree search*, STS). All
per-bit counter-hypotheses are collected in that one pass, and the tree is
pruned against them.

Two ideas let the single search work with soft input:

* **Hybrid enumeration.** The a priori term can make a node far from the
  received point the best one, so the usual order (closest point first) is
  no longer correct. At every step the decoder proposes two candidates. One
  is the closest unvisited symbol in the channel sense. The other is the
  unvisited symbol whose bits agree best with the a priori signs. The
  candidate with the lower total partial metric wins.
* **Adapted pruning bound.** A sibling is visited only while a lower bound on
  the metric of every remaining sibling is still inside the search radius.
  That bound is the *sum* of the two candidates' channel and a priori
  metrics, because no unvisited sibling can do better than both at once.

The default build is the 4x4 16-QAM configuration (M_T = 4 antennas,
Q = 4 bits per symbol). It examines exactly one tree node per clock cycle.

## Metrics and number formats

A node s^(i) at tree level i fixes the symbols s_i ... s_{M_T-1}. The root is
level M_T-1 and the leaves are level 0. Its partial metric is

    M_P(s^(i)) = M_P(s^(i+1)) + M_C(s_i) + M_A(s_i)
    M_C(s_i)   = | b_i - R_ii s_i |^2,  b_i = y~_i - sum_{j>i} R_ij s_j
    M_A(s_i)   = sum_b  d_ib |L^A_ib|,  d_ib = 1 if bit b disagrees with sign(L^A_ib)

Here y~ = Q^H y and R is upper triangular with real, positive diagonal, as
produced by a QR decomposition. Both must be scaled so that the metrics
come out already divided by the noise power N0. Symbols are handled as
integer PAM amplitudes (±1, ±3 for 16-QAM) on a square grid. The
constellation's normalisation factor must therefore be folded into R.

Bit labels use "label bit 1 ⇔ x = −1". A positive LLR favours label bit 0.

| quantity | format [int.frac] | width |
|---|---|---|
| y~_i | 6.7 | 13 bit signed |
| R_ij | 4.7 | 11 bit signed |
| L^A, L^E | 9.5 | 14 bit signed |
| M_C, M_A, M_P, λ, N0·L_max | 9.6 | 15 bit unsigned |

In these formats the integer part includes the sign bit. The all-ones
metric means "no hypothesis yet" (infinity), and metric sums saturate one
below it. An L^A value is moved into the metric format by a left shift, and
an L^E value back by an arithmetic right shift. `sd_pkg.sv` holds these
constants and the saturating helpers.

## Counter-hypotheses, clipping and the pruning criteria (`sd_pruning`)

The decoder keeps the MAP metric λ^MAP and the MAP label. It also keeps one
counter-hypothesis metric λ̄_ib per bit: the smallest metric found for a
leaf whose bit i,b differs from the MAP bit. These metrics are stored
*a posteriori*, so the a priori term is included. The extrinsic
counter-hypothesis is Λ̄_ib = λ̄_ib − L^A_ib·x^MAP_ib.

Clipping the output to ±L_max also tightens the search radius. For each bit:

    Λ_clp   = max(λ^MAP − L_max, min(λ^MAP + L_max, Λ̄_ib))
    radius  = Λ_clp + L^A_ib · x^MAP_ib
    L^E_ib  = (Λ_clp − λ^MAP) · x^MAP_ib

A bit with no counter-hypothesis yet counts as Λ̄ = +∞. It therefore sits at
λ^MAP + L_max, and L^E = ±L_max.

The two pruning questions are asked in parallel. There is one comparator
`M ≥ radius_ib` per bit, and the results are AND-combined over a mask; no
maximum search is needed.

* **Step down?** Let the node at level j have metric M_P. Its subtree can
  still improve the counter-hypotheses of the bits at levels below j, and
  of the bits at or above j that differ from the MAP bits. If M_P has
  reached the radius of every bit in that set, the subtree is skipped.
* **Try the next sibling?** The same check is made with the sibling bound
  (M_P of the parent + M_C + M_A of the current candidates). The set here
  is the bits at levels ≤ j, plus the bits above j that differ from the MAP.

A leaf that passes the step-down check is *accepted*.

* If its metric is below λ^MAP, it becomes the new MAP. Each bit whose
  value flips takes min(λ̄, old λ^MAP) as its counter-hypothesis.
* Otherwise, each bit that differs from the MAP takes min(λ̄, M_P).

**Consequence of clipping.** The search radius is clipped. When the MAP
label later changes, a counter-hypothesis that was pruned away under the
old, tighter radius is not recovered. A bit's LLR can then come out larger
in magnitude than the exact max-log value, but never beyond the clip level.
With an effectively unlimited L_max (for example 2000) the result is the
exact max-log LLR. The end-to-end testbench checks exactness in that case.
With tight clipping it checks the one-sided bound and counts the rare
inexact bits (about 1 in 40 vectors at L_max = 256).

## Enumeration

### Vertical steps (`sd_vertical_enum`, channel enumeration)

Stepping down to level i needs the first child. The block does four things:

1. It forms the centre b_i from y~ and the path symbols above. This is a
   complex mat-vec of at most M_T−1 products, kept at 19 bits.
2. It quantises b_i to the nearest grid point. This is the *channel
   candidate*. The slicer compares b_i with thresholds that are multiples of
   R_ii, so it needs no divider.
3. It takes the *a priori candidate*: the symbol whose label matches all
   a priori signs, so its M_A is 0.
4. It keeps the candidate with the lower M_C + M_A. Ties go to the channel
   candidate.

The sibling bound of the new level starts from that child's M_C.

### Horizontal steps (`sd_horizontal_enum`)

This block finds the next sibling among the symbols of the level that are
not yet flagged as enumerated:

* **Channel side.** Each of the 2^{Q/2} grid columns runs a *column zig-zag*
  (`sd_col_zigzag`). This is a masked minimum search over the distance
  between each unflagged row and the quantised imaginary part. The search
  keeps no zig-zag state, so any set of already-enumerated nodes can be
  skipped. A tie-break bit (which side of the quantised point the centre
  lies on) makes the order exact. Each column's best point gets its M_C,
  and a minimum over the columns gives the channel candidate.
* **A priori side.** The a priori metrics of the level are masked by the
  flags and searched for their minimum (`sd_apriori_minsearch`). The flags
  are indexed by constellation position and reordered through the mapper,
  so that the search runs over bit patterns d = label XOR sign(L^A).
  See the next section for how the search avoids a full comparator tree.
* The candidate with the lower M_P wins. Ties go to the channel candidate.
  The bound for the next sibling is M_C(channel cand.) + M_A(a priori cand.).

### A priori metric table (`sd_apriori_metrics`)

When a vector is loaded, the metrics M_A(d) for all 2^Q patterns d of each
antenna are computed once, with the recursion M_A(d) = M_A(d without its
highest set bit) + |L^A| of that bit. That takes 2^Q − Q − 1 adders per
antenna, and the table is then held for the whole search.

### Minimum search without a comparator tree (`sd_apriori_minsearch`)

A full compare-select tree over 2^Q metrics would set the clock period.
The structure of M_A avoids most of it.

Split the 2^Q patterns into 8-tuples that agree in every bit except the
lowest three. Within a tuple, M_A(base + t) = M_A(base) + S(t), where S(t) is
the sum of |L^A| over the bits set in t. The order inside a tuple is
therefore the same for every tuple.

Comparing two members t and u reduces to comparing S over the bits only t
has with S over the bits only u has:

* If one side is empty, the member whose bits are a subset of the other's
  wins; no comparator is needed.
* Otherwise the two sides are two single bits, or one bit against a pair.
  There are exactly six such comparisons: |L^A_0| vs |L^A_1|, |L^A_0| vs
  |L^A_2|, |L^A_1| vs |L^A_2|, and each single bit against the sum of the
  other two.

These six comparators read table entries 1..6 and are shared by all tuples.
Each tuple then picks its smallest unflagged member by one-hot logic on the
six comparator bits and eight flags, followed by an 8:1 multiplexer. For
16-QAM a single compare-select unit then chooses between the two tuple
winners. Ties go to the lowest d.

### Symbol mapping (`sd_symbol_lut`)

Nothing in the datapath assumes a particular bit mapping. A mapper
(label → grid position) and a demapper (position → label) are
run-time-programmable tables of 2^Q entries. At reset they hold a Gray
mapping per dimension. They are written through `lut_we/lut_sel/lut_addr/lut_data`
while the decoder is idle. Both tables must be written consistently.

## Tree traversal (`sd_sts_ctrl`, `sd_mp_history`, `sd_pref_siblings`, `sd_enum_flags`)

In each cycle the controller examines the current node: it runs the two
pruning checks on it. In the same cycle it has both possible successors
ready: the first child (vertical enumeration) and the next sibling
(horizontal enumeration). It then moves:

* **down** to the child, if the node is not a leaf and not pruned. The
  next sibling is then stored in the *preferred-siblings cache* (one entry
  per non-leaf level) if it exists and passes the sibling check, and it is
  flagged as enumerated;
* **sideways** to the next sibling, if the node was not taken down, a
  sibling exists and the sibling check passes;
* **up** otherwise. The move goes to the cached sibling at the nearest
  level above that has a valid entry. The search ends when no entry is
  left.

The *enumerated-nodes flags* hold 2^Q bits per level. A level is cleared,
with its first child flagged, each time it is entered from above.

The *M_P history* stores M_P along the current path. It supplies the
parent's metric, which a child's M_P and the sibling bounds are built on.

Writing a cache entry clears the entry one level below it, because that
entry belonged to a previous parent.

Timing: the inputs are registered in the cycle where `start` is seen while
idle. The next cycle builds the a priori table and clears the flags, the
cache and the counter-hypotheses. The cycle after that forms the first node
of the root level. From then on, one node is examined per cycle. `done` is
a registered one-cycle pulse in the cycle after the last examination, and
the outputs hold until the next `start`. Start to done takes n_en + 3
cycles, where n_en (an output) is the number of examined nodes. The
information throughput at code rate `rate` is therefore

    throughput = rate · Q · M_T / (n_en + 3) · f_clk.

The three set-up cycles are not overlapped with the previous search. With
about a thousand examined nodes per vector in the tests, they cost well
under 1 %.

## Top level (`siso_sts_sd`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | one-cycle pulse while `busy` is low; inputs sampled in that cycle |
| `y_re/y_im[MT]` | in | y~, [6.7] |
| `r_re/r_im[MT][MT]` | in | R (upper triangle used, R_ii real > 0), [4.7] |
| `la[MT][Q]` | in | L^A of bit b of antenna i, [9.5]; all zero gives soft-output-only detection |
| `lmax` | in | clipping level N0·L_max in metric format |
| `lut_*` | in | mapper/demapper write port (ignored while busy) |
| `busy`, `done` | out | search running / one-cycle completion pulse |
| `le[MT][Q]` | out | L^E, [9.5] |
| `map_label[MT]`, `lam_map` | out | MAP labels and MAP metric |
| `n_en` | out | nodes examined by the last search |

Parameters: `MT` (default 4), `Q` (default 4, must be even) and `SOFT_IN`
(default 1; 0 builds a soft-output-only decoder that ignores `la`). The word
lengths are those of the 4x4 16-QAM build. Larger M_T or Q are
synthesizable by parameter, but for 64-QAM or 8 antennas the integer parts
should be widened.

## Where this RTL departs from the published architecture

* The a priori metric table is computed for all antennas in parallel, in
  one extra cycle before the search. The original architecture shares
  2^{Q−1}−1 adders and spreads the table computation over the first
  enumeration steps.
* The soft-input switch (`SOFT_IN = 0`) ties the a priori inputs to zero
  and relies on synthesis to remove the logic that then becomes constant.
  It does not restructure the units. The word lengths are package constants,
  not parameters.
* Tie rules, the infinity encoding, the control states and the LUT write
  port are this design's own.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one compares the
block with an independent behavioural computation, has a watchdog, and ends
by printing `TB_RESULT checks=N failures=M`.

The end-to-end bench, `tb_siso_sts_sd`, runs the top at its default size.
It works as follows:

* It generates 40 random channels and vectors with noise and a priori LLRs
  of several strengths.
* For each vector it computes the exact max-log LLRs by brute force over
  all 65536 leaves, and compares them with the decoder's output and MAP
  labels.
* It checks the n_en + 3 latency and that the search visits fewer nodes
  than a full enumeration (about 1000 of 65536 on average).
* It counts the mechanisms and fails if any never occurred: down, sibling
  and up moves, a priori-chosen children and siblings, leaf updates, MAP
  changes, clipped outputs.
* Half-way it reprograms the LUTs to a natural-binary mapping.

`tb_siso_sts_sd_soft_out` runs the same kind of test on the `SOFT_IN = 0`
build. It drives random `la` values that the decoder must ignore, and
checks that no a priori-chosen node ever appears.

    verilator --binary --top-module tb_siso_sts_sd -Wno-fatal \
        rtl/sd_pkg.sv $(ls rtl/*.sv | grep -v sd_pkg) tb/tb_siso_sts_sd.sv
    ./obj_dir/Vtb_siso_sts_sd

A unit bench is built the same way, with its top module and the files it
needs. The package must come first. Each bench runs in a few seconds after a
build of under a minute.
