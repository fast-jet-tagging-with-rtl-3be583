# MLP-Mixer jet tagger: fully unrolled RTL

At the LHC the first trigger level must decide on every bunch crossing (one every
25 ns) which collision events to keep, within a few microseconds, on FPGAs with
little room to spare. One useful decision is *jet tagging*: given the particles
that make up a jet, say whether it came from a gluon, a light quark, a W boson,
a Z boson or a top quark.

This RTL is a jet tagger built on the MLP-Mixer architecture. A jet enters as
the `NP` highest-pT particles, ordered by pT and zero padded, each with `NF`
kinematic features. It leaves as five class scores. The network uses only small
dense layers, applied alternately along the feature axis and along the particle
axis. Three properties make it cheap in hardware:

* **Every multiplication is by a constant.** The weights are fixed at build
  time, so each product becomes a few shifted additions and subtractions
  (distributed arithmetic). No DSP multipliers are used.
* **Every value has its own precision.** Each activation has its own integer
  and fraction bit count, following high-granularity quantization. Many
  elements get zero bits and vanish from the hardware.
* **Particle order is fixed by pT.** Particle slot *p* is always the *p*-th
  hardest particle, so slot *p* can get its own precision. The network is
  deliberately not permutation-invariant, and that is what allows trailing,
  soft particles to be kept at few bits or dropped.

Every layer has its own hardware, and nothing is time-multiplexed. The tagger
therefore accepts a new jet on every clock cycle and returns its scores a fixed
14 cycles later (70 ns at 200 MHz).

## The network

```
 x[NP][NF] --> input register --> input quantizer --+--> MLP1 --> MLP2 --> (+) --> MLP3 --> MLP4 --> head --> scores[5]
                                                    |                      ^
                                                    +----- skip (3-cycle delay) ----+
```

| Block | Acts on | Layers (DenseBn = dense layer with batch norm folded in) | Kernel shared by |
|---|---|---|---|
| MLP1 (`feature_mlp`) | each particle's NF features | DenseBn NF->16, ReLU, DenseBn 16->NF, ReLU | all particles |
| MLP2 (`token_mlp`) | each feature's NP particle values | DenseBn NP->NP, ReLU | all features |
| skip (`skip_add`) | element-wise | quantized input + MLP2 output | - |
| MLP3 (`feature_mlp`) | as MLP1, own constants | DenseBn NF->16, ReLU, DenseBn 16->NF, ReLU | all particles |
| MLP4 (`token_pool`) | each feature's NP particle values | DenseBn NP->1, ReLU | all features |
| head (`mlp_head`) | the NF-vector | DenseBn NF->16, ReLU, 16->16, ReLU, 16->16, ReLU, 16->5 | - |

Default size: `NP = 64` particles, `NF = 16` features, 16 hidden units and 5
classes. These are the sizes of the most accurate variant of this
architecture. The 16 features per particle are px, py, pz, E, E/E_jet, pT,
pT/pT_jet, eta, eta - eta_jet, rotated eta, phi, phi - phi_jet, rotated phi,
Delta R to the jet axis, cos theta, and cos of the angle relative to the jet.
The RTL does not depend on this order. The scores come out in the order g, q,
W, Z, t. They are logits: no softmax is applied, because picking the largest
score does not need one.

MLP1, MLP2 and the skip form one mixer stage. MLP3 and MLP4 form the second,
where MLP4 collapses the particle axis instead of mixing it. The feature-axis
kernels are shared by all particles. The hardware is still replicated `NP`
times so that every particle is computed in the same cycle, and each copy keeps
its own activation precisions.

## Arithmetic

### Number formats (`mixer_pkg`)

| Quantity | Container | Fraction bits |
|---|---|---|
| activation (`act_t`) | signed 16 bit | 8 |
| weight | signed 4 bit, -7..7 | 3 |
| dense-layer sum (`acc_t`) | signed 32 bit | 11 |

The 32-bit sum is wider than any layer can reach. The worst case is MLP2 at
128 particles: 128 × 7 × 2^15 < 2^27. No internal overflow is therefore
possible. Synthesis trims the unused upper bits.

### Constant multiplication by canonical signed digits (`dense_bn`)

Each weight *w* is rewritten at elaboration in canonical signed-digit (CSD)
form. That is a sum of ±2^k terms with no two adjacent non-zero digits, so a
4-bit weight needs at most two terms. For example, 7 = 8 − 1 and −6 = −8 + 2.
The package function `csd()` returns two masks per weight, the positive digits
and the negative digits. `dense_bn` keeps them as `POS` and `NEG` constant bit
vectors. An output is then

    y[o] = bias[o] + sum over inputs i, digits k of ( ±(x[i] << k) )

The RTL writes this as a loop that tests constant mask bits. After constant
propagation, only the terms with a set digit remain: one adder or subtractor
per non-zero digit, and nothing at all for a zero weight. Batch normalization
costs nothing, because it has already been folded into the weights and the
bias.

The distributed-arithmetic optimisation this architecture was published with
also searches for repeated two-term subexpressions and shares them between
outputs. That step is **not** done here. Every product is built on its own, and
any sharing is left to the synthesis tool.

### Per-element quantization and pruning (`act_quant`, `input_quant`)

After every DenseBn, each element *e* is quantized to its own format
(`ib` integer bits, `fb` fraction bits, `keep`):

1. ReLU, where the layer has one (all layers except the input and the final
   head layer).
2. Floor to `fb` fraction bits.
3. Saturate to `[0, 2^ib − 2^-fb]` after ReLU, or to `[−2^ib, 2^ib − 2^-fb]`
   for signed values.
4. If `keep = 0` (zero bitwidth), output constant 0.

The format is a constant of each element's hardware, fixed at elaboration from
`mixer_pkg::act_fmt(layer, particle, unit)`. An element with `keep = 0`
disappears, together with every adder that only fed it. The input quantizer is
where this pays most. Each (particle, feature) pair has its own format, and in
the default constants the chance that a pair is dropped grows from 10 % for the
leading particle to 60 % for the last one. This copies the qualitative shape of
trained networks: hard particles and a few features get many bits, soft
particles get few.

Floor rounding and saturation are this design's choices.

### Skip connection

The skip leg is taken after the input quantizer. It is delayed three cycles
(`tensor_delay`) to meet the MLP2 output, and the two are added and saturated
to 16 bits. With the formats in `mixer_pkg`, both legs stay within ±2^5, so
this saturation never fires inside the full tagger. It only guards
`skip_add` when the module is used alone.

## Pipeline and timing

| Cycle | Stage | Module |
|---|---|---|
| 1 | input register | `mlp_mixer_top` |
| 2 | input quantizer | `input_quant` |
| 3-4 | MLP1, one register per DenseBn | `feature_mlp` |
| 5 | MLP2 | `token_mlp` |
| 6 | skip add | `skip_add` |
| 7-8 | MLP3 | `feature_mlp` |
| 9 | MLP4 | `token_pool` |
| 10-13 | head, one register per layer | `mlp_head` |
| 14 | output register | `mlp_mixer_top` |

* **Interface.** Fully parallel: `x[NP][NF]` and `i_valid` in, `scores[5]` and
  `o_valid` out. There is no handshake and no back-pressure. `o_valid` is
  `i_valid` delayed by `LATENCY = 14` cycles, and an assertion in the top
  checks this.
* **Throughput.** Initiation interval 1: a jet may be presented on every
  cycle, back to back. The trigger needs one jet per 25 ns, which is one per 5
  cycles at 200 MHz.
* **Reset.** `rst` is synchronous and active high, and clears only the valid
  bits. Data registers are not reset: their contents are ignored while the
  matching valid bit is low.
* **Clock.** The intended clock is 200 MHz. Timing closure depends on the
  constants. A stage holds one DenseBn (an adder tree of depth about
  log2(inputs × digits)) plus a quantizer. The 14-cycle split is this design's
  own, chosen to match the 14 cycles reported for the 64-particle model.

## The constants

A trained network supplies its weights, biases and quantizer formats. None of
these numbers are published, so `mixer_pkg` generates stand-ins from a fixed
integer hash, `hash4(layer, row, column, kind)`:

* `weight(l, o, i)`: zero with probability 57 %, otherwise ±(1..7) / 8.
* `bias(l, o)`: uniform in [−0.5, +0.5] in steps of 2^-11.
* `act_fmt(l, p, c, np)`: `ib` from 2 to 5 and `fb` from 0 to 6. Hidden
  activations are dropped with probability 15 %, inputs as described above.
  The class scores always use `ib = 6` and `fb = 8`.

The hardware therefore has the shape of a quantized network: sparse weights
of a few bits, per-element precision and pruned elements. Its scores carry no
physics meaning. To deploy a trained network, replace these three functions,
for example with `case` tables over `(layer, row, column)`, and keep the
signatures. Nothing else changes. Weights outside −7..7 need a larger
`W_BITS`, since the CSD digit count equals `W_BITS`.

## Files

| File | Contents |
|---|---|
| `rtl/mixer_pkg.sv` | sizes, formats, layer identifiers, constant functions, `csd()`, `quantize()` |
| `rtl/dense_bn.sv` | one DenseBn layer as CSD shift-add (combinational) |
| `rtl/act_quant.sv` | ReLU plus per-element quantizer (combinational) |
| `rtl/input_quant.sv` | registered input quantizer |
| `rtl/feature_mlp.sv` | MLP1 / MLP3 |
| `rtl/token_mlp.sv` | MLP2 |
| `rtl/skip_add.sv` | residual adder |
| `rtl/tensor_delay.sv` | delay line for the skip leg |
| `rtl/token_pool.sv` | MLP4 |
| `rtl/mlp_head.sv` | classification head |
| `rtl/mlp_mixer_top.sv` | the tagger |
| `tb/mixer_ref_pkg.sv` | reference model used by all testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the full-size and workload tests |
| `tb/mixer_workload_run.sv` | one re-parameterised tagger with its checker |

## Verification

`tb/mixer_ref_pkg.sv` recomputes the network with the same constants but by a
different route. It uses ordinary multiplication instead of CSD shift-add, and
real-valued floor and clamp instead of bit masks. Every testbench compares
every output bit-exactly. Each pipelined testbench also feeds jets back to back
with random gaps and checks that each result arrives exactly at the block's
latency. Every testbench counts how often ReLU clamping, saturation and pruning
happened, and fails if a mechanism it relies on never fired. Each ends by
printing `TB_RESULT checks=N failures=M`.

| Testbench | What it runs |
|---|---|
| `tb_dense_bn` | 16->16 and 8->8 layers, 300 random vectors each |
| `tb_act_quant` | ReLU and signed quantizers, 500 vectors |
| `tb_input_quant`, `tb_feature_mlp`, `tb_token_mlp`, `tb_skip_add`, `tb_token_pool`, `tb_mlp_head` | each stage, 60 jets |
| `tb_mlp_mixer_top` | whole tagger at 8 particles, 80 jets |
| `tb_mlp_mixer_top_full` | whole tagger at the default 64 × 16 size, 40 jets |
| `tb_mixer_workloads` | 16 × 16, 32 × 16, 16 × 3 and 32 × 3 side by side, 20 jets each |

Run one with Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -j 4 --top-module tb_mlp_mixer_top \
        -y rtl -y tb -Irtl -Itb rtl/mixer_pkg.sv tb/mixer_ref_pkg.sv tb/tb_mlp_mixer_top.sv
    ./obj_dir/Vtb_mlp_mixer_top

The full-size model takes a few minutes to compile and well under a second to
run. The workload test takes two to three minutes to compile.

What the tests show, and what they do not:

* **Shown.** The RTL computes exactly the network described by `mixer_pkg`'s
  constants and formats. This holds at every tested size, at one jet per cycle,
  with a fixed 14-cycle latency.
* **Not shown.** Classification accuracy, which would need trained constants.
  Timing closure at 200 MHz and resource use on an FPGA were not checked
  either.

## Departures and open points

* The weights, biases and precisions are placeholders (see above). The
  architecture, layer sizes, ReLU placement, kernel sharing, skip connection
  and the particle-ordered per-element precision follow the published design.
* Subexpression sharing inside the shift-add trees is not implemented.
* The published firmware was generated by a high-level-synthesis flow, which
  schedules its own pipeline. Its latency is 10 to 16 cycles, depending on the
  model. Here the pipeline is hand-placed at 14 cycles.
* MLP2 and MLP4 share one kernel across features, as in the original
  MLP-Mixer. The published description does not say so explicitly.
* Rounding (floor), overflow handling (saturation), the 16-bit container with
  8 fraction bits and the 4-bit weights are this design's choices.
* The selection and pT-ordering of the top-N particles happens upstream and is
  not part of this RTL. The input must arrive sorted and zero padded.

## Other sizes

`NP` and `NF` are parameters of every module, so other configurations are
built by overriding them on `mlp_mixer_top`:

* 16, 32 or 128 particles with 16 features, or with only pT, eta and phi
  (`NF = 3`, where the head starts 3 -> 16).
* Each such build is its own network, with its own constants. A 16-particle
  jet fed zero-padded into the 64-particle build is not the 16-particle model.
* The hardware grows with the particle-mixing layer, as `NF × NP²` constant
  products: 65,536 at 64 × 16, and 262,144 at 128 × 16. The 128 × 16 build
  elaborates but was not simulated. The 128 × 3 build passed the same
  end-to-end check once but is not in the regression, because its simulation
  model is slow to build.
