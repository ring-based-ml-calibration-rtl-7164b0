# Ring-feature BDT jet calibration with in-situ pileup correction

At the HL-LHC about 200 proton-proton collisions pile up in every bunch
crossing. A first-level jet trigger that sums calorimeter towers inside a fixed
cone (a *primitive jet*) therefore measures the jet's energy plus a pileup
offset that depends on the event. It also sees many jets made only of pileup.
Both effects push trigger thresholds up. The method implemented here corrects
each primitive jet with two small boosted decision tree (BDT) ensembles:

* an **ET regressor** (BDT_ET) estimates the jet's offline-quality transverse
  energy, as if the jet came from the hard scatter;
* a **hard-scatter tagger** (BDT_HS) scores how likely the jet is hard scatter
  (HS) rather than pileup (PU). A table turns that score into a probability
  p_HS.

The calibrated output is their product, `E_T^ML = p_HS * BDT_ET`. The
inputs of both ensembles are energy sums in concentric rings around the jet.
The inner rings hold the jet. The outer rings sample the pileup density
next to it, so the trees learn the pileup subtraction from the jet's own
surroundings. No event-wide pileup estimate is needed.

The RTL implements the real-time inference chain: ring sums, the two
30-tree ensembles, the probability lookup and the product. It is fully
pipelined and accepts one jet per clock. Training is done offline, and the
trained trees and the p_HS table are written into the design through a
configuration bus.

```
 12x12 EM towers ─┐                    ┌─ bdt_engine (BDT_ET, 30 trees) ──── reg ───┐
 12x12 HAD towers ├─ ring_sum ─ 16 ────┤                                            ├─ et_combiner ─ E_T^ML
 jet eta ─────────┘   features         └─ bdt_engine (BDT_HS, 30 trees) ─ phs_lut ──┘   (p_HS x BDT_ET)
        2 cycles                          DEPTH+2 = 10 cycles               1 cycle        1 cycle
```

## Where the jets come from

The design does not find jets. The calorimeter readout and a sliding-window
jet finder already exist in the trigger and are outside this RTL. For every
primitive jet they deliver:

* the EM and HAD tower ET of the 12 x 12 window of 0.1 x 0.1 (eta x phi)
  towers around the jet centre (`em_i[eta][phi]`, `had_i[eta][phi]`, 10-bit
  unsigned);
* the jet eta as a signed code in units of 0.1 (`eta_i`, 8 bits).

The jet centre is taken to lie on the corner shared by the four central
towers, `[5][5]`, `[5][6]`, `[6][5]` and `[6][6]`. Those four towers make up
ring 1.

## Ring features

A tower belongs to a ring when its **centre** lies inside the annulus:

| ring     | dR range        | towers (this RTL) |
|----------|-----------------|-------------------|
| ring 1   | dR < 0.1        | 4                 |
| ring 2   | 0.1 <= dR < 0.2 | 8                 |
| ring 3   | 0.2 <= dR < 0.4 | 40                |
| ring 4   | 0.4 <= dR < 0.6 | 60                |
| ring_jet | dR < 0.4        | 52 (rings 1-3)    |

For each of the five rows, the block forms the EM sum, the HAD sum and their
total. Fifteen ET values plus eta make the 16 features, in this order:

`0 eta | 1-3 ring1 EM/HAD/SUM | 4-6 ring2 | 7-9 ring3 | 10-12 ring4 | 13-15 ring_jet`

(`ringcal_pkg::feat_idx_e`). The eta feature is `eta + 128`, so every feature
is an unsigned 18-bit number. That keeps the tree comparison unsigned.

**Tower-count caveat.** The published description of the method gives the
centre-in-annulus rule, and it also lists the counts 4, 12, 40 and 68 (ring_jet
56). On a square grid with the centre on a tower corner, the rule gives 4, 8,
40 and 60. No circular boundary yields exactly 56 towers for dR < 0.4. The
RTL follows the stated rule. The radii are parameters of `ring_sum` (`R1_SQ`
... `R4_SQ`), given as squared radii in half-tower units (4, 16, 64, 144). For
example, `R2_SQ = 20` moves the four diagonal towers at dR = 0.21 into ring 2
and gives the printed 12. Ring membership is fixed at elaboration, so each
ring sum is a constant adder tree.

## Tree ensembles

Each ensemble (`bdt_engine`) holds 30 trees of depth 8. Those are the sizes of
both trained models. All 30 trees are evaluated in parallel and the score is
the sum of their leaf values.

**One tree (`bdt_tree`).** Nodes are numbered in heap order. Node 1 is the
root. Node *n* compares `feature[sel(n)] >= thr(n)` and goes to 2*n*+1 if
true, 2*n* if false. Leaf *l* is reached as node 256 + *l*. Each of the 8
levels has its own small table ({4-bit feature index, 18-bit threshold}, 2^k
entries at level k). The levels form a pipeline: in every cycle each level
works on a different jet, so one jet enters per clock. The path taken so far
is carried down the pipeline as the node number. A tree that training left
shallower than 8 is stored by copying a node downward (both children get the
same leaf value).

**Feature delay line.** Level k needs the features of the jet that entered k
cycles ago. `bdt_engine` keeps a single 8-stage copy of the 16 features and
every tree reads it. Without this, each of the 30 trees would need its own
copy.

**Boosting weights.** Adaptive boosting weighs each tree's answer. Here the
weight is folded into the leaf values before loading, so the hardware only
adds. The normalisation by the total weight is a constant factor. For BDT_ET
it belongs in the leaf scaling. For BDT_HS the p_HS table absorbs it.

**Score format.** Leaf values are signed 16-bit. The ensemble score is
signed 22-bit. For BDT_ET the score is in tower-ET units.

## From tagger score to p_HS

p_HS is the fraction of hard-scatter jets among the training jets whose
tagger score falls in the same score bin, `N_HS / (N_HS + N_PU)`. `phs_lut`
holds that ratio for 64 equal bins. The bins are 1024 score units wide and
start at -32768. A score outside that range uses the first or the last bin.
The value is an unsigned 9-bit fixed-point number, where 256 means 1.0. The
bin count, bin placement and format are parameters (`NBINS`, `SCORE_MIN`,
`BIN_SHIFT`) and are this design's choice.

## Output

`et_combiner` clamps BDT_ET to 0 ... 65535 (a negative estimate becomes 0).
It multiplies by p_HS and drops the 8 fraction bits, so the result is
`floor(BDT_ET * p_HS / 256)`. The top module outputs E_T^ML. It also outputs
the clamped BDT_ET and p_HS for monitoring. A trigger would compare E_T^ML
with its jet thresholds, just as it would compare a plain cone-jet ET.

## Timing and size

* Throughput: one jet per clock, with no stalls and no back-pressure.
  `in_valid` may have gaps.
* Latency: `DEPTH + 6` = **14 cycles** from `in_valid` to `out_valid`. That
  is 2 (rings) + 8 (tree levels) + 1 (leaf read) + 1 (score sum) + 1 (p_HS
  lookup, while BDT_ET waits one cycle in a register) + 1 (product). At
  240 MHz this is about 58 ns, far inside a first-level trigger budget of
  about 1 us.
* Storage: each tree holds 255 x 22 node bits and 256 x 16 leaf bits, which
  is 9,706 bits. Two ensembles of 30 trees make about 583 kbit, plus a
  576-bit p_HS table. About 4.5 k flip-flops hold the pipeline. The tables
  have one read port per level, so they can map to distributed or block
  RAM.
* Reset (`rst`, synchronous, active high) clears only the valid flags. The
  tables hold whatever they were loaded with.

## Loading the trained models

`cfg_i` (`ringcal_pkg::cfg_wr_t`) performs one write per clock:

| field    | meaning                                                          |
|----------|------------------------------------------------------------------|
| `we`     | write enable                                                     |
| `target` | `CFG_BDT_ET`, `CFG_BDT_HS` or `CFG_PHS`                          |
| `tree`   | tree 0 ... 29 (ignored for `CFG_PHS`)                            |
| `leaf`   | 0: node word, 1: leaf word                                       |
| `addr`   | node 1 ... 255, leaf 0 ... 255, or p_HS bin 0 ... 63             |
| `data`   | node: `{feature[3:0], threshold[17:0]}` (`node_word()`); leaf: signed 16 bits; p_HS: 9 bits |

A full load takes 2 x 30 x 511 + 64 = 30,724 writes. Writes can overlap
running jets, but a jet in flight during a write may see a mix of old and
new contents.

## What follows the method and what is this design's own

The following are taken from the method: the 0.1 x 0.1 tower inputs, the ring
boundaries and the centre rule, the 16 features, two ensembles of 30 trees of
depth 8 on the same inputs, p_HS as a binned HS fraction of the tagger score,
and the product `p_HS * BDT_ET`.

The following are this design's own choices, because the method does not
specify them:

* all word widths and the eta code;
* the 12 x 12 window and its corner-centred geometry;
* the ">=" cut direction;
* folding the boosting weights into the leaves;
* the p_HS binning and the clamping rules;
* the pipelining and the 14-cycle latency;
* reset behaviour and the configuration bus.

The method's description also prints ring tower counts that disagree with its
own membership rule (see above). No trained trees are included. The
testbenches load random trees.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench computes its
expected values independently and ends with a `TB_RESULT checks=N failures=M`
line.

| testbench         | what it checks |
|-------------------|----------------|
| `tb_ring_sum`     | ring sizes (4/8/40/60/52) with a flat window; 200 random windows streamed back to back against a reference that places towers by real-valued distance; 2-cycle latency |
| `tb_bdt_tree`     | a random depth-8 tree against a loop-based tree walk, one jet per clock; latency 9 cycles; reloading a leaf |
| `tb_bdt_engine`   | 30 random trees, 400 cycles with gaps; score = sum of 30 tree walks; latency 10 cycles |
| `tb_phs_lut`      | every bin at its edges and inside; scores below and above the binned range |
| `tb_et_combiner`  | negative, saturating, p_HS = 0 and 1.0 cases plus 300 random pairs |
| `tb_ml_jet_calib` | the full design at its default size: loads 60 random trees and the table, streams 600 hard-scatter-like and pileup-like jets, and checks every output and its 14-cycle latency against a reference model. It fails if any of these never happens: configuration writes to each target, back-to-back jets, gaps, negative BDT_ET, tagger scores below and above the bins, p_HS = 0 and 1.0, and ET in each ring |

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal -Irtl -y rtl \
    rtl/ringcal_pkg.sv tb/tb_ml_jet_calib.sv --top-module tb_ml_jet_calib
./obj_dir/Vtb_ml_jet_calib
```

The full-size end-to-end run takes well under a second. To try other sizes,
change `N_TREES_P` and `DEPTH_P` on `ml_jet_calib`, or the radii and widths in
`ring_sum` and `ringcal_pkg`. The testbenches read their sizes from the
package.

## Files

`rtl/ringcal_pkg.sv` holds the shared widths, the feature enum and the
configuration type. The modules are `ring_sum`, `bdt_tree`, `bdt_engine`,
`phs_lut`, `et_combiner`, and `ml_jet_calib` (the top). The `tb/` folder holds
one testbench for each module.
