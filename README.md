# Tensor-network anomaly trigger in SystemVerilog

A hardware trigger at a particle collider must decide, within a microsecond or so,
whether a collision event is worth keeping. This design makes that decision with an
unsupervised anomaly detector built from a tensor network. The detector was trained
only on ordinary (background) events.

The method works like this:
- Each event is turned into a chain of 19 small vectors, one per reconstructed
  particle. This chain is a matrix product state (MPS).
- A trained linear operator acts on the chain and reduces it to a single vector of
  length 3. The operator is itself a chain of tensors, a spaced matrix product
  operator (SMPO).
- Training pulls the squared norm of that vector towards a fixed target for
  background events. Events whose squared norm lands far from the background median
  are anomalous.

The RTL holds two versions of the model and evaluates both on every event:

| model | structure | bond dimension | weights used | latency |
|---|---|---|---|---|
| SMPO 19→1 | one operator, output leg at the middle site | 4 | 936 | 14 cycles |
| CSMPO 19→7→1 | two operators in cascade, 19 → 7 → 1 sites | 2 and 2 | 456 (360 + 96) | 11 cycles |

Latency counts from event acceptance to the result. All arithmetic is 16-bit fixed
point. Each contraction step is fully unrolled in space. The only sequential parts
of the datapath are the horizontal sweep, which reuses one vector-matrix unit per
wing for all of its steps, and a few register stages.

## 1. From particles to an MPS

### Input slots

The event arrives as 19 particles (`tn_pkg::particle_t`). Each particle has three
fields:

| field | format |
|---|---|
| `pt` | unsigned, 0.25 GeV steps |
| `eta` | signed fixed point, 10 fraction bits |
| `phi` | signed fixed point, 10 fraction bits |

The slot order of the `particles` port is:

| slot | content |
|---|---|
| 0 | missing transverse energy (MET) |
| 1-4 | electrons e0..e3 |
| 5-8 | muons mu0..mu3 |
| 9-18 | jets j0..j9 |

Within each class, particles are ordered by descending pT. A particle that was not
reconstructed is sent as all zeros.

### Site vectors

`event_embed` maps each particle to a 3-vector:

    x0 = pT / pT_ref        pT_ref = 2500 GeV (jets), 800 GeV (muons), 1200 GeV (electrons, MET)
    x1 = (eta + 5) / 10     fixed at 0.5 for MET, whose eta is defined as 0
    x2 = (phi + pi) / (2 pi)

Each division is a multiplication by a reciprocal constant with 24 fraction bits,
followed by truncation. An absent particle becomes (0, 0.5, 0.5), so its site never
has a zero norm.

### Site order

The vectors are then reordered into the site order the model was trained with. This
order comes from a spectral ordering of the particles by mutual information:

    site:  0  1  2  3  4  5  6  7  8   9   10 11 12 13 14 15 16  17  18
           e3 e2 j9 j8 e1 j7 j5 e0 MET mu0 j4 j0 j3 j1 j2 j6 mu1 mu2 mu3

### Normalisation

The MPS is defined with a normalisation:

    X = (x_1 ⊗ ... ⊗ x_19) / Gamma,   Gamma = (prod_i ||x_i||)^(1/19)

`mps_gamma` computes 1/Gamma in the same cycle as the embedding. It works in the log
domain:
- Each squared site norm is exact.
- log2 of a norm comes from the leading-one position plus a mantissa term with a
  quadratic correction.
- The 19 logarithms are summed.
- The sum is multiplied by round(2^20/38). This takes the square root and the 19th
  root in one step.
- 2^x is formed with a quadratic correction as well.

The relative error stays below 1 % (about 0.6 % worst case in the testbench). The
network is linear in X, so the design does not scale the 19 inputs. It multiplies
1/Gamma into the final 3-vector instead, just before the squared norm (`sq_norm`).

## 2. Number formats (`tn_pkg`)

| type | bits | meaning | overflow |
|---|---|---|---|
| `fx_t` | 16, 10 fraction bits, range [-32, 32) | inputs, weights, every intermediate tensor | truncate, wrap |
| `nrm_t` | 16, 8 fraction bits, range [-128, 128) | squared norm, median, threshold, score | truncate, saturate |
| `acc_t` | 38 | exact accumulator of up to 64 products | none |

A contraction always sums exact products and rounds once per output element. There is
no rounding inside a sum.

`*_sat` flags a squared norm that saturated. Such an event is very far from the
background in any case.

## 3. Contraction schedule

Applying the operator to the MPS has three phases.

**Vertical contraction (`vert_contract`)**

Each MPS site is contracted with the operator site above it, over the physical index
of length 3:

    out[p][lm*WL+ls][rm*WR+rs] = sum_i mps[i][lm][rm] * w[i][p][ls][rs]

All sites are done at once in one combinational stage.

The outcome differs by site:
- At sites without an output leg, the result is a plain B x B matrix.
- The two end sites become row and column vectors.
- The output (anchor) site keeps a free leg of length 3.

Bond indices of MPS and operator merge into one composite index, with the MPS bond as
the major part. For the embedded event (MPS bond 1) this changes nothing. In the second
cascade layer it gives 2 x 2 = 4.

**Bidirectional sweep (`bidir_sweep`)**

The left-end vector absorbs the next matrix to its right. At the same time, the
right-end vector absorbs the next matrix to its left. Each step is one clock:

    lenv[r] <- sum_b lenv[b] * M_left[b][r]
    renv[l] <- sum_b M_right[l][b] * renv[b]

The sweep stops when only the anchor site is left between the two environments. The
anchor sits in the middle of the chain, so both wings need the same number of steps:
- 8 steps for 19 sites (anchor at site 9);
- 2 steps for 7 sites (anchor at site 3).

**Merge and norm (`merge3`, `sq_norm`)**

The merge takes two passes of one cycle each:

    rc[p][l] = sum_r T[p][l][r] * renv[r]
    v[p]     = sum_l lenv[l] * rc[p][l]

Then `sq_norm` forms `nrm = sum_p (v[p] * 1/Gamma)^2` and cuts it to `nrm_t`.

**SMPO cycle by cycle** (`smpo_engine`, start in cycle 0)

| cycle | work |
|---|---|
| 0 | vertical contraction of the 19 sites, registered |
| 1-8 | sweep steps 1..8 (the first step is taken on the edge that ends cycle 0) |
| 9-10 | merge passes 1 and 2 |
| 11 | scaling by 1/Gamma and squared norm |
| 12 | `done`; `vec`, `nrm` and `sat` hold the result |

### The cascade and its grouped contraction (`csmpo_engine`, `group_contract`)

The first cascade layer has bond 2. It has an output leg (length 3) only on every third
site: 0, 3, 6, ..., 18. After its vertical contraction, the two sites between
consecutive output sites are plain 2 x 2 matrices A1 and A2. Each group is reduced to
one site of the 7-site intermediate MPS in two clocks:

    chain:  D = A1 · A2                                  (8 MACs)
    absorb: out[p] = D · C[p]    C = output site on the right of the pair

Site 0 has no pair on its left and passes through unchanged. All six groups run in
parallel.

The resulting 7-site MPS has physical dimension 3 and bond 2. The second layer
(bond 2, output at site 3) then evaluates it. This layer is the same `smpo_engine` with
composite bonds 2 x 2 = 4.

Cascade timeline:

| cycle | work |
|---|---|
| 0 | layer-1 vertical contraction |
| 1-2 | chain and absorb |
| 3 | layer-2 vertical contraction |
| 4-5 | two sweep steps |
| 6-7 | merge |
| 8 | norm |
| 9 | `done` |

The second layer starts in cycle 3, so its `done` arrives in cycle 3 + 6 = 9.

The cascade computes the same kind of function as a 19→1 operator of bond 4 with fewer
parameters. In hardware it needs fewer of the large bond-4 operations. That is why its
latency is shorter.

## 4. Anomaly score and trigger (`anomaly_score`)

    score = | nrm - median |      (nrm_t, saturating)
    trig  = score > threshold

`median` and `threshold` are run-time inputs, one pair per model. The median has to be
measured on background events with the quantised model: quantisation shifts it away
from the training target. The threshold sets the background acceptance rate.

## 5. Loading the weights

The trained tensors live in flip-flops (`weight_regfile`), so every contraction unit
can read all of its weights in the same cycle. There is one register file per layer:

| layer code | network | array |
|---|---|---|
| 0 | SMPO | `w[19][3][3][4][4]` |
| 1 | cascade layer 1 | `w[19][3][3][2][2]` |
| 2 | cascade layer 2 | `w[7][3][3][2][2]` |

The arrays are indexed `[site][phys_in][phys_out][left bond][right bond]`.

One element is written per clock through the `wreq` port (`tn_pkg::wreq_t`):

    we | layer[1:0] | site[4:0] | pi[1:0] | po[1:0] | l[1:0] | r[1:0] | data (fx_t)

Index conventions:
- End sites use only index 0 of their open bond.
- Sites without an output leg use only `po = 0`.
- In cascade layer 1, the sites with an output leg are 0, 3, ..., 18.

The other elements are stored but never read, and synthesis removes them. A write
with an out-of-range index is ignored. Reset clears all weights. A full load takes
2736 + 684 + 252 cycles if every element is written. Only the 936 + 456 elements that
are used need to be written.

Do not write weights while an event is in flight. The engines read the weights
combinationally in their first cycle, and layer 2 reads them in cycle 3.

## 6. Top level (`tn_trigger_top`)

    in_valid, in_ready, particles[19]     event handshake
    wreq                                  weight load
    smpo_median, smpo_thresh,
    csmpo_median, csmpo_thresh            calibration (nrm_t)
    smpo_valid,  smpo_nrm,  smpo_score,  smpo_trig,  smpo_sat
    csmpo_valid, csmpo_nrm, csmpo_score, csmpo_trig, csmpo_sat

The handshake and timing work as follows:
- An event is taken on a clock edge where `in_valid` and `in_ready` are both high.
  Call that cycle 0.
- `in_ready` goes low until both models have answered. One event is processed at a
  time.
- Cycle 1: the embedding and 1/Gamma are registered, and both engines start.
- Cycle 11: `csmpo_valid` pulses.
- Cycle 14: `smpo_valid` pulses.
- The other result outputs hold until the next event.

At a 5.5 ns clock, the two results come after 60.5 ns (cascade) and 77 ns (SMPO).

Hierarchy:

    tn_trigger_top
      event_embed          particle scaling and spectral reordering
      mps_gamma            1/Gamma
      smpo_engine          SMPO 19->1
        weight_regfile, 19 x vert_contract, bidir_sweep, merge3, sq_norm
      csmpo_engine         CSMPO 19->7->1
        weight_regfile, 19 x vert_contract, 6 x group_contract,
        smpo_engine (layer 2: 7 sites, composite bond 4)
      2 x anomaly_score

## 7. Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end. The expected values come from
`tb/tb_ref_pkg.sv`. That package is a plain model written loop by loop on whole
tensors, and it reproduces the fixed-point rounding exactly.

`tb_tn_trigger_top` runs the complete design at its real size. It does the following:
- loads random weights into all three layers;
- sends 70 random events, with missing particles and back-to-back requests;
- compares both models bit for bit;
- checks both latencies;
- counts how often each mechanism occurred, and fails if one never did. The
  mechanisms are handshake hold-off, sweep, grouped contraction, saturation, and
  trigger fired and not fired.

Example with plain verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/tn_pkg.sv tb/tb_ref_pkg.sv tb/tb_tn_trigger_top.sv \
        --top-module tb_tn_trigger_top -Mdir obj_top
    obj_top/Vtb_tn_trigger_top +verilator+rand+reset+2

Other blocks work the same way: replace the testbench name. The whole-design test
builds in under a minute and runs in well under a second.

## 8. Where this RTL departs from the published implementation

The published implementation was C++ compiled with a high-level synthesis tool for a
Kintex UltraScale KU115 at a 5.5 ns clock. This RTL keeps its model sizes, its number
formats, its input scaling and site order, and its contraction order. Everything below
is this design's own choice or approximation.

- **Latency.** The published figures are 0.37 µs for the SMPO and 0.33 µs for the
  cascade, that is 60-70 cycles. Here they are 14 and 11 cycles. The published
  schedule is not known, so these cycle counts are not comparable as a like-for-like
  result. They come from fully unrolling each step and registering between steps.
  Whether a 16 x 16 multiply plus a 3- to 4-term adder tree fits in 5.5 ns without
  DSP blocks has not been checked here.
- **Resources.** The published designs use no DSP blocks. This RTL writes
  multiplications as `*` and leaves their mapping to the synthesis tool. About 1030
  (SMPO) and 1000 (cascade) multipliers are instantiated. The sweep reuses one
  vector-matrix unit per wing for all steps.
- **1/Gamma** is approximated in the log domain (error < 1 %). It is applied to the
  output vector, not to the input MPS. The original rounding points of this scaling
  are unknown.
- **Rounding inside contractions.** Each output element is rounded once, after an
  exact sum. The original code may round after each multiply-accumulate.
- **Both models in one top**, one event at a time, no pipelining between events. The
  published work synthesised each model on its own.
- **Weights are loaded at run time.** The published models had them compiled in, and
  the trained values are not published. The testbenches use random weights, so the
  physics performance (ROC curves, signal efficiency at 10^-5 background rate) cannot
  be reproduced with this RTL alone.
- **The alternate cascade 19→2→1** (spacing 18) is not built. The group unit assumes
  two plain sites per group, as in the 19→7→1 cascade.
- **Ordering and sweep steps.** The spectral site order and the input slot order were
  read from the mutual-information plot labels. The sweep step count of the 7-site
  layer (2 per wing) follows the MAC-count tables. The contraction diagram of the
  cascade shows the same 5-site state in two consecutive panels, which would suggest
  otherwise.
