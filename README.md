# Prive-HD inference engine in SystemVerilog

Hyperdimensional (HD) computing classifies an input by mapping it to a very
long vector (a *hypervector*, here 10,000 dimensions) and comparing that vector
with one stored hypervector per class. The mapping is nearly linear. So a query
hypervector sent to a remote server for classification can be decoded back
into the input. It is just as easy to recover a training sample from two class
models that differ by that sample.

The Prive-HD method blurs what leaves the device. The query is quantized
dimension by dimension to one bit (bipolar, ±1) or to {-1, 0, +1} (ternary).
Chosen dimensions can also be set to zero ("masked"). A full-precision model
still classifies such a query almost as well as the exact one, but a decoder
recovers far less of the input. The method also suggests hardware that
computes the quantized query cheaply: the exact sum over all features is
replaced by small look-up-table (LUT) majorities and adders that lose a little
precision.

This RTL implements that datapath as an inference engine:

* it encodes an input into a quantized, masked query hypervector;
* it streams the query out, one chunk per cycle, for remote inference;
* it also classifies the query itself against on-chip class hypervectors.

## Encoding in a nutshell

An input has `D_IV` features (617 for the speech benchmark used as default).
Each feature has already been mapped to one of `LEVELS` levels (100). The
model holds two sets of random binary hypervectors of `D_HV` bits, where bit
value 0 stands for -1 and 1 for +1:

* a **base** hypervector `B_k` for each feature position `k`;
* a **level** hypervector `L_l` for each level `l`. Neighbouring levels differ
  in `D_HV/(2*LEVELS)` bits, so similar values get similar vectors.

The encoded query is

    H[d] = sum over k of  L[v_k][d] * B_k[d]        (bipolar product = XNOR)

Each dimension `d` is a sum of `D_IV` values of ±1. Quantizing that sum gives
the query element: its sign in bipolar mode, or a three-way decision in
ternary mode.

## Dataflow and timing

The dimensions are processed `P` at a time (`P` = 100 lanes). One group of `P`
dimensions is a *chunk*, so an input takes `N_CHUNK = D_HV/P` = 100 chunks.
Every store is organised so that one read returns the current chunk of *every*
vector it holds (`chunk_memory`):

| store        | vectors         | per read              |
|--------------|-----------------|-----------------------|
| base         | 617             | 617 × 100 bits        |
| level        | 100             | 100 × 100 bits        |
| mask         | 1               | 100 bits              |
| class        | 26              | 26 × 100 × 16 bits    |

An inference runs through a two-stage pipeline. `prive_hd_ctrl` sequences it:

1. `feature_buffer` collects the input from the feature stream, `FPB` = 8
   level indices per beat.
2. Stage 0 issues one chunk read per cycle to all four memories.
3. Stage 1 works on the chunk read the cycle before. `encoder_slice` selects
   each feature's level chunk and XNORs it with the base chunk. It then
   quantizes each of the `P` lanes and applies the mask.
   `similarity_unit` adds the chunk's partial dot products to one
   accumulator per class. The same quantized chunk appears on the `q_*`
   outputs.
4. `argmax_unit` scales each dot product by the class's reciprocal norm and
   keeps the best class. It looks at one class per cycle.

The number of clock edges from the one that takes the last feature beat to the
one that raises `res_valid` is exactly `N_CHUNK + N_CLASS + 3`. At the
defaults that is 129 cycles. The next input can load while the class search
of the previous one runs, but not while it is being encoded (there is one
feature buffer).

## The bipolar quantizer: majority of majorities

The exact bipolar quantizer would count the ones among 617 product bits and
compare the count with half of 617: a wide population count per dimension,
times 100 lanes. `bipolar_quantizer` approximates it in two steps:

1. The bits are cut into groups of six. Each group goes to a 6-input majority
   function, which is one LUT6 on an FPGA. When a group holds three ones and
   three zeros, the LUT outputs a fixed tie bit. That bit is chosen at design
   time, pseudo-randomly per LUT (`prive_pkg::tie_bit(lane, group)`).
2. An ordinary adder tree counts how many of the ⌈617/6⌉ = 103 groups voted +1.
   The lane outputs +1 if more than half did.

Only the first stage uses majority LUTs. Stacking majorities further would
cost more accuracy. The result is not the exact sign. For example, a group at
4:2 counts the same as one at 6:0. HD classification tolerates this. The
reference model in the testbenches checks the approximate function exactly,
group by group, not the exact sign.

Details this design chose:

* The last group of 617 has five inputs, and it votes on those five.
* If the group count is even and exactly half vote +1, the final threshold
  takes one more design-time bit. This cannot happen at 617 features (103
  groups), but it can at other sizes.

## The ternary quantizer: a tree that halves at every level

`ternary_quantizer` sums ternary elements. Each element is a 2-bit code:
00 = 0, 01 = +1, 11 = -1, and 10 is read as 0. The sum is built in two steps:

* **Leaves.** Three elements (six input bits) go to three LUTs. Each LUT gives
  one bit of their exact sum, -3..+3, in 3 bits.
* **Tree.** A binary tree of 3-bit adders follows. Each adder forms the 4-bit
  sum and drops its least-significant bit. So every level keeps 3 bits and
  halves the scale. The drop is an arithmetic shift, which rounds towards
  minus infinity. The leaves are padded with zeros to a power of two.

At 617 inputs there are 206 leaves, padded to 256, so 8 adder levels. The
3-bit result `sum3` is roughly the true sum divided by 256.

Dropping the bit at every level makes `sum3` lean negative. In 2,000 trials
of 617 random ±1 inputs, `sum3` was -1 (72%) or -2 (28%), never 0 or above.
A symmetric input therefore does not give a symmetric tree output, and the
thresholds must absorb the offset. For example, `thr_pos = -1, thr_neg = -2`
gives only ±1, and `thr_pos = 0, thr_neg = -2` turns the most common value,
-1, into 0.

The ternary decision compares `sum3` with two run-time thresholds. The result
is +1 if `sum3 >= thr_pos`, otherwise -1 if `sum3 <= thr_neg`, otherwise 0.
Moving the thresholds apart puts more dimensions at 0. This is how the biased
ternary quantization is tuned (one half zeros, one quarter each ±1): it lowers
the L2 norm of an encoded sample and so the noise that differential privacy
needs. The right thresholds for a given model must be found off line.

In this engine each lane contains both quantizers. `quant_mode` selects which
one drives the lane. In ternary mode the ±1 XNOR products are the ternary
inputs.

## Masking, pruning and the offloaded query

The mask memory holds one bit per dimension, and a set bit forces that query
element to 0. The mask is applied only when `mask_en` was high when the input
was taken. It serves two purposes:

* **Inference privacy.** Nullifying part of the dimensions further hides the
  input in the offloaded query, at small accuracy cost.
* **Model pruning.** Class dimensions that were pruned to zero need no query
  value.

A model trained with fewer dimensions (say 7,000) can run on the 10,000-lane
engine by masking the rest.

The offloaded query leaves on `q_valid / q_chunk / q_data`, `P` 2-bit elements
per cycle for `N_CHUNK` cycles. This stream has no back-pressure: the receiver
must take one chunk per cycle.

## Similarity and class norms

Cosine similarity divides the dot product by both vector norms:

* The query norm is the same for every class and is dropped.
* The class norm is constant for a trained model. The host computes a
  reciprocal `inv_norm[c] ≈ 2^S/||C_c||` once, for any scale `S` shared by all
  classes, and writes it through `norm_*`.

The score is `dot[c] * inv_norm[c]`, a signed value of `ACC_W + NORM_W + 1`
bits. The highest score wins, and on equal scores the lower class index wins.
Class elements are signed `CLASS_W` = 16-bit values. The 32-bit accumulators
cannot overflow at 10,000 dimensions.

## Interface summary (`prive_hd_top`)

| group | signals | notes |
|-------|---------|-------|
| clock/reset | `clk`, `rst_n` | `rst_n` is an asynchronous reset, active low; memory contents are not reset |
| model load | `base_*`, `level_*`, `class_*`, `mask_*`, `norm_*` | one (vector, chunk) word per cycle per store; write only while `busy` is low |
| run config | `quant_mode`, `thr_pos`, `thr_neg`, `mask_en` | sampled when an input is complete; hold them until `busy` rises |
| features | `feat_valid`, `feat_ready`, `feat_data[FPB]` | valid/ready; feature 0 first; level indices ≥ `LEVELS` saturate; an offered beat must stay offered, unchanged (asserted) |
| query out | `q_valid`, `q_chunk`, `q_data[P]` | one chunk per cycle, chunks in order |
| result | `res_valid`, `res_class`, `res_score` | one-cycle pulse |
| status | `busy`, `lut_tie` | `lut_tie` marks a bipolar chunk in which a majority LUT used its tie bit |

The host loads the model before use, one (vector, chunk) word at a time:

* all chunks of the base, level and class hypervectors;
* the mask;
* the reciprocal norms.

At the defaults this takes about 74,500 write cycles.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `D_HV` | 10000 | paper (hypervector dimension) |
| `D_IV` | 617 | paper (speech-recognition features) |
| `LEVELS` | 100 | paper (levels used at 10,000 dimensions) |
| `N_CLASS` | 26 | letters of the speech data set; not stated in the paper |
| `P` | 100 | this design (lanes) |
| `CLASS_W`, `NORM_W`, `ACC_W` | 16, 16, 32 | this design |
| `FPB` | 8 | this design (features per input beat) |

`D_HV` must be a multiple of `P`. The feature count is fixed at elaboration. A
data set with a different number of features needs `D_IV` changed: 784 for
28×28 images, for example. Padding features cannot be neutralised, because
every feature adds a vote. Fewer classes than `N_CLASS` can be handled by
giving the unused classes a zero reciprocal norm, as long as a real class
scores above zero.

## Where this departs from the paper, and what it leaves out

* The paper's FPGA design keeps model and data in off-chip DRAM. Here every
  store is on chip and is loaded through plain write ports.
* The paper's FPGA inference uses only the bipolar quantizer. The ternary tree
  is the paper's structure for ternary encodings. Offering it as a run-time
  mode of the same engine is this design's addition.
* The paper gives no lane count, pipeline stages, element widths, input
  interface, tie rule at the final threshold, rounding of the truncating
  adders or ternary threshold rule. All of these are this design's choices and
  are listed above.
* The paper's architecture borrows the rest of its datapath from earlier work
  that it does not describe. The chunk-serial dot product and the sequential
  class search here are simply the most direct implementation.
* Not in hardware: training, retraining after pruning, choosing which
  dimensions to prune, and adding Gaussian noise for differential privacy. The
  paper does all of these in software. The trained, noised class hypervectors
  are loaded as data.
* The paper reports throughput on its FPGA but no clock frequency, so no
  cycle count here can be compared with it.

## Files

* `rtl/prive_pkg.sv`: shared types, default sizes and the LUT functions.
* `rtl/bipolar_quantizer.sv`, `rtl/ternary_quantizer.sv`: the two per-lane
  quantizers.
* `rtl/encoder_slice.sv`: binding, quantization and masking of `P` lanes.
* `rtl/chunk_memory.sv`: the store used for base, level, mask and class
  vectors.
* `rtl/feature_buffer.sv`, `rtl/similarity_unit.sv`, `rtl/argmax_unit.sv`,
  `rtl/prive_hd_ctrl.sv`: input buffer, dot products, class search and
  sequencer.
* `rtl/prive_hd_top.sv`: the engine.
* `tb/prive_ref_pkg.sv`: integer reference models of both quantizers.
* `tb/prive_hd_env.sv`: random model builder, stimulus and checker for the
  engine.
* `tb/tb_*.sv`: one self-checking testbench per module, plus two end-to-end
  tests:
  * `tb_prive_hd_top` at a reduced size (64 dimensions, 20 features, 5
    levels, 3 classes, 16 inputs);
  * `tb_prive_hd_full` at every default size (4 inputs).

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed number of cycles if something hangs.

## Simulating

Verilator 5 runs everything. List `rtl/prive_pkg.sv` first. For example:

    verilator --binary --timing --assert -Wno-fatal \
        tb/prive_ref_pkg.sv rtl/prive_pkg.sv rtl/*.sv \
        tb/prive_hd_env.sv tb/tb_prive_hd_top.sv --top-module tb_prive_hd_top
    obj_dir/Vtb_prive_hd_top

(The package then appears twice on the command line; Verilator only warns.)

The end-to-end checker counts each mechanism at least once:

* bipolar and ternary runs;
* masked dimensions;
* LUT ties;
* ternary zeros;
* feature back-pressure;
* saturated level indices.

A mechanism that never occurs counts as a failure. The checker also checks
every offloaded query chunk, the class and score of every input, and the
latency.

At full size, Verilator needs about 3.5 minutes to build `tb_prive_hd_full`,
and the simulation takes about 30 seconds. Most of that time goes to loading
the model and to the reference model. The reduced-size test builds in seconds.
