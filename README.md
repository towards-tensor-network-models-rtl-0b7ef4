# Tensor-network jet taggers for a Level-1 trigger FPGA

A jet at the LHC has to be classified as gluon, light quark, W, Z or top within a few
hundred nanoseconds if the decision is to be used by the first trigger level. The design
here does the classification with a *tensor network*. The particles of a jet are taken
as a product state, one small vector per particle. They are contracted with a trained
network of small tensors, and what is left over is one number per class. Every step is a
multiply-accumulate, with no nonlinearity anywhere, so the whole inference maps onto a
fixed-latency pipeline of multipliers and adder trees.

Two network shapes are implemented, each as its own engine:

* **Tree Tensor Network (TTN)**, in `ttn_engine`: a binary tree. Neighbouring particles
  are merged pairwise, layer by layer, up to a root tensor that carries the class index.
* **Matrix Product State (MPS)**, in `mps_engine`: a chain of tensors with the class
  index on the middle one. Two partial results run from the ends of the chain towards the
  middle at the same time.

The top level, `tn_jet_tagger`, holds both engines side by side. The architecture follows
*Towards Tensor Network Models for Low-Latency Jet Tagging on FPGAs* (Coppi et al.).
That work built the TTN in VHDL and the MPS with high-level synthesis, and it publishes
neither one's internals. The RTL here is an independent implementation of the two
algorithms. Wherever the source leaves a detail open, this README says what was chosen.

## What goes in and what comes out

Each jet is reduced off-chip to its N highest-pT particles, zero-padded if it has fewer.
Each particle `i` is then embedded as a 7-entry vector:

    phi(x_i) = [1, pT, Erel, dR, pT^2, Erel^2, dR^2] / C_i

Here `Erel` is the particle's share of the jet energy, `dR` is its distance from the jet
axis, and `C_i` is a normalisation. The embedding is **not** part of the RTL: the
engines receive `phi[N][7]` already in fixed point. On the other side, each engine
delivers a 5-entry score vector (g, q, W, Z, t). The receiver applies softmax (MPS) or
squares the scores (TTN) and takes the argmax.

Numbers are two's-complement **Q2.FB**. A word is `W = FB + 2` bits: a sign bit, one
integer bit and FB fraction bits, so it covers [-2, 2). The defaults are the reduced
precisions that cost little accuracy: FB = 6 (8-bit words) for the TTN and FB = 8
(10-bit words) for the MPS. Setting FB = 14 gives the full-precision 16-bit builds.

## Arithmetic of one contraction

All contractions share one recipe:

1. Form every product exactly. This is `a*v` (2W bits) in `mat_vec_unit` and `w*x*y`
   (3W bits) in `bilinear_unit`.
2. Register the products `N_REG` times. `N_REG` is the number of cycles one multiply
   takes: 1 for the TTN and 3 for the MPS, the values of the reference builds.
3. Sum them in a binary adder tree with a register after every level. The tree is wide
   enough that it never overflows.
4. Return to Q2.FB by an arithmetic right shift (FB for a matrix-vector product, 2·FB
   for a triple product). This rounds toward minus infinity. Then clip to the W-bit
   range.

A contraction therefore takes `N_REG + ceil(log2(terms))` cycles, and it takes a new set
of operands every clock. Every contraction also reports whether it clipped. The engines
delay these flags to the output and OR them, so each jet's scores come with a `clipped`
bit. A set bit means some intermediate value of that jet saturated.

Clipping every intermediate result in this way is how this design reads "quantized
contractions". The source evaluates the models that way in software, but it does not
state the rounding mode.

## The tree engine

With `L = log2(N)` layers, layer 0 is the root. Layer `l` has `2^l` nodes, and each node
is a rank-3 tensor with two child legs of dimension

    D_l = min(d^(2^(L-l-1)), chi)      (d = 7, chi = 10)

Its parent leg has dimension `D_(l-1)`, or 5 classes at the root. In the lowest layer the
children are particles `2j` and `2j+1` (dimension 7). Above that every bond is capped at
chi = 10. For N = 8, 16 and 32 this gives 4460, 10420 and 22340 tensor elements, which
are the model sizes of the reference TTNs.

Each node is one `bilinear_unit`, `z[c] = sum_ab w[a][b][c] x[a] y[b]`. All nodes of a
layer work at once, and the layers follow one another:

| layer            | terms per output | cycles (N_REG = 1) |
|------------------|------------------|--------------------|
| lowest (7 x 7)   | 49               | 1 + 6 = 7          |
| every other      | 100              | 1 + 7 = 8          |

The latency is therefore 7 + 8·(L-1) cycles: 23, 31 and 39 cycles for N = 8, 16 and 32.
At 250 MHz that is 92, 124 and 156 ns, the latencies reported for the VHDL TTN. The
internal structure is this design's own (the original is described only elsewhere), but
it reproduces those figures exactly.

## The chain engine

The chain has N sites. Site `p = N/2` (counting from 0) carries the class leg. Bond `k`
joins sites `k` and `k+1` and has dimension

    Db_k = min(d^(k+1), d^(N-1-k), D)    (D = 10)

so the bonds are 7 at the ends and 10 everywhere else. The resulting sizes, 6678, 12278
and 23478 elements for N = 8, 16 and 32, are the model sizes of the reference MPSs.
(A chain with every bond at 10 would not match them.)

Inference runs in three phases:

1. **Site contraction.** Every site tensor is contracted with its own particle, all N at
   once. This takes `N_REG + 3` cycles. The end sites become vectors, the inner sites
   matrices, and the label site a `Dl x Dr x 5` tensor.
2. **Two chains.** A row vector starts at site 0 and is multiplied through sites 1 …
   p-1. A column vector starts at site N-1, is multiplied through sites N-2 … p+1, and
   is then absorbed into the label tensor, leaving a `Dl x 5` matrix. Each step takes
   `N_REG + ceil(log2 D)` cycles. Because the label sits at N/2, both sides take p-1
   steps and finish together.
3. **Final step.** The left vector times the `Dl x 5` matrix gives the 5 scores.

    LATENCY = (N_REG + 3) + (N/2)·(N_REG + 4)

With N_REG = 3 this is 34, 62 and 118 cycles for N = 8, 16 and 32.

The hardest part of this engine is the **timing of the matrices**. All matrices are
computed in phase 1, but the chain reaches site `k` only some steps later. A new jet
enters every clock, so each matrix waits in a `delay_line` for exactly the number of
chain steps ahead of it: `(k-1)` steps on the left and `(N-2-k)` steps on the right. The
label tensor waits `(N-2-p)` steps. Each step is `N_REG + 4` cycles, the same for every
step: the 7-entry boundary products are padded to the depth of a 10-entry tree. If these
delays are off by one, the chain silently mixes tensors of different jets.

The source's MPS latencies (236, 432 and 708 ns) come from a high-level-synthesis
schedule that is not published. This engine follows the same contraction order but uses
its own schedule, so its latency is lower and is not meant to match.

## Model parameters and how to load them

Each engine stores its tensors in a `weight_store`. This is a register file, read fully
in parallel, because every multiplier needs its own weight in every cycle. The
reference builds used almost no block RAM either. Load it one word per clock with
`w_we / w_addr / w_data` before sending jets; loading takes NPARAM cycles. The word
addresses are:

* **TTN**: nodes are stored root first, then layer 1, and so on, left to right within a
  layer. Element `(a, b, c)` of node `(l, j)` is at
  `offset(l) + j·D_l²·Dp + (a·D_l + b)·Dp + c`, where `offset(l)` is the total size of
  layers 0 … l-1.
* **MPS**: sites are stored in order 0 … N-1. Element `(left l, physical i, right r,
  class c)` of site `k` is at `offset(k) + ((l·7 + i)·Dr + r)·Ck + c`, where `Ck` is 5
  at the label site and 1 elsewhere.

A trained model must be quantised to Q2.FB and written in this order. A model brought into
canonical form (centre at the label site) needs nothing special, since the hardware does
not depend on the gauge. `tn_pkg` holds the shape and offset functions. The testbenches
recompute them independently.

## Top level

`tn_jet_tagger` has one clock (250 MHz target) and a synchronous active-low reset
`rst_n`, which clears only the valid and flag pipelines. Apart from that, each engine
has its own ports, prefixed `ttn_` or `mps_`, because the two use different word widths:

| port                          | dir | meaning                                      |
|-------------------------------|-----|----------------------------------------------|
| `*_w_we, *_w_addr, *_w_data`  | in  | weight load, one word per clock              |
| `*_in_valid`, `*_phi[N][7]`   | in  | one jet per clock                            |
| `*_out_valid`, `*_score[5]`   | out | class scores, LATENCY cycles after the input |
| `*_clipped`                   | out | some contraction of this jet saturated       |

Nothing stalls. The engines have no back-pressure, so a jet goes in each cycle that
`in_valid` is high and comes out a fixed number of cycles later.

Top-level parameters (defaults in brackets): `N` [16], `TTN_CHI` [10], `TTN_FB` [6],
`TTN_N_REG` [1], `MPS_DB` [10], `MPS_FB` [8], `MPS_N_REG` [3]. The source evaluates
N = 8, 16 and 32, with FB = 14 or the reduced precision. Each of those builds is this RTL
with `N` and the FB parameters set accordingly. N = 16 is only the default.

## Departures and choices

* Both engines in one top is an arrangement of convenience. The source builds each model
  as a separate firmware.
* The TTN node structure, with one multiply stage and a registered adder tree, is this
  design's own. It was chosen because it reproduces the published TTN latencies.
* The MPS pipeline, its initiation interval of one jet per clock and its latency are
  this design's own.
* Rounding is floor (arithmetic shift) followed by saturation at every contraction.
* The weight-load port and the `clipped` flag are additions.
* The design makes no attempt to match the published resource use (LUT, DSP, FF),
  because that depends on the synthesis flow. The 32-particle MPS at 16-bit precision,
  for example, needs more DSPs than the target XCVU13P has.

## Files

| file                              | content                                                        |
|-----------------------------------|----------------------------------------------------------------|
| `rtl/tn_pkg.sv`                   | constants, tensor shapes, memory offsets, latency formulas     |
| `rtl/adder_tree.sv`               | pipelined signed adder tree                                    |
| `rtl/delay_line.sv`               | shift register for valid bits, flags and waiting tensors       |
| `rtl/weight_store.sv`             | parameter register file with a write port                      |
| `rtl/mat_vec_unit.sv`             | tensor-vector contraction (MPS steps)                          |
| `rtl/bilinear_unit.sv`            | rank-3 tensor with two vectors (TTN node)                      |
| `rtl/ttn_engine.sv`               | tree engine                                                    |
| `rtl/mps_engine.sv`               | chain engine                                                   |
| `rtl/tn_jet_tagger.sv`            | top level                                                      |
| `tb/tn_ref_pkg.sv`                | bit-exact software reference of both networks                  |
| `tb/tb_*.sv`                      | one self-checking testbench per module, plus the full-size top |

## Verification

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`:

* The unit tests stream random operands through `mat_vec_unit` (N_REG = 3) and
  `bilinear_unit`. They compare each result with an exact product that is floored and
  clipped, check the latency, and make sure both clipping directions occur.
* `tb_ttn_engine` and `tb_mps_engine` run N = 8 models with random tensors. They check
  the element counts (4460 and 6678), the latencies (23 cycles, i.e. 92 ns, and 34
  cycles) and every score and clip flag against the reference, for jets sent both with
  gaps and back to back.
* `tb_tn_jet_tagger_full` runs the top with all defaults (N = 16). It loads both models
  at once, sends 120 jets to both engines and checks all scores, flags and latencies (31
  and 62 cycles). It counts how often each situation occurred: input gaps, back-to-back
  jets, clipped and clean jets in each engine, and both engines busy together. It fails
  if any of these never happened.
* `tb_tn_jet_tagger` is the same test with the top set to N = 8 (latencies 23 and 34
  cycles). It builds in about two minutes instead of six.

The reference in `tb/tn_ref_pkg.sv` contracts the networks with plain loops on 64-bit
integers. It recomputes the shapes and offsets itself and applies the same
floor-and-clip after each contraction. Random tensors test the datapath, not
classification accuracy: no trained model is included.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/tn_pkg.sv tb/tn_ref_pkg.sv tb/tb_tn_jet_tagger_full.sv \
        --top-module tb_tn_jet_tagger_full -j 4 -o sim
    ./obj_dir/sim

The full-size top testbench takes a few minutes to build, because the fully unrolled
N = 16 engines are large, and seconds to run. The N = 8 engine testbenches build in
under two minutes.
