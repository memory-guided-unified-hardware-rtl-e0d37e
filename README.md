# A memory-guided unified accelerator for FEM, spiking and sparse workloads

This RTL puts three kinds of scientific workload on one datapath, which normally needs three separate accelerators:

1. assembly of finite-element (FEM) element matrices in mixed precision;
2. a spiking-network layer computed on binary spike trains;
3. a structured-sparse matrix product.

An element matrix goes through the three stages in turn: it is assembled, turned into spike trains, multiplied by a weight matrix, pruned to a sparsity pattern and multiplied again. Nothing is copied between separate devices along the way.

The main idea is that each stage makes a *configuration decision* for each item it processes, and that the decision is guided by memory:

- **Stage 1** picks four floating-point precisions for each element.
- **Stage 2** picks a spike bit-width and a shape for the spike array for each layer.
- **Stage 3** picks a sparsity pattern for each tensor.

Each decision looks first in a large **long-term memory**. This is an associative table of configurations that worked before, with LRU replacement. If nothing is found there, a fixed rule is used. A small **short-term memory** is a window over the last 100 feedback samples. When its mean falls below 95 % of the expected value, the stage changes its policy.

The design follows the architecture of "Memory-Guided Unified Hardware Accelerator for Mixed-Precision Scientific Computing" (Wang, Zhang, Liu). That paper describes its method mostly at the level of algorithms and learning systems. Everything below that level is this design's own choice: bit widths, handshakes, timing, the rules that stand in for the paper's learned policies, and the way precision is emulated. Each choice is marked as such below and in the opening comment of each file.

## One task, stage by stage

`mgua_top` processes one element per task. A pulse on `start` runs this sequence:

| step | block | what happens | clocks |
|---|---|---|---|
| 1 | `kappa_estimator` | condition number κ of the 3×3 element Jacobian | 1 |
| 2 | `precision_selector` | (u_p, u_m, u_q, u_s) from memory or default | 1 |
| 3 | `fem_array` | A = Σ_s Σ_t B_s C_st B_tᵀ (20×20, 8 quadrature points) | 2·NQ+1 = 17 |
| 4 | `bitwidth_agent`, `parallelism_config` | bit-width b, array shape (M,V,N,S) | 1 |
| 5 | `snn_array` | Y = W × X, X = A scaled to b-bit spike trains | passes (≈250) |
| 6 | `sparsity_analyzer`, `pattern_learner` | pattern ∈ {2:4, 1:4, 1:3, irregular} | 2 |
| 7 | `sparse_engine` | out = Y′ × B_sp on the 4×4 sparse array | 25·(G+7) = 300 / 350 |

With default sizes a whole task takes 551–676 clocks; the spread comes from the chosen shape and pattern. `task_cycles` reports the count.

Two conversions between stages are this design's own choice:

- **FEM result → spike input.** The FEM result A is shifted right arithmetically by `fem_shift` and saturated to the signed b-bit range. `fem_saturated` reports when clipping happened.
- **Spike result → sparse operand.** The spike result Y is shifted right by `snn_shift` and saturated to 16 bits before stage 3.

## The memories and the decisions

### Long-term memory (`ltm_table`)

`ltm_table` is a fully associative table with 10000 entries. Each entry holds a valid bit, a key, a 16-bit data word and a time stamp.

- **Lookup.** A lookup compares all keys in the same clock. A hit that is strobed with `lk_en` refreshes the entry's time stamp.
- **Store.** A store overwrites an entry with the same key. If there is none, it fills the first free entry. If the table is full, it evicts the entry with the oldest time stamp, which gives exact LRU.

Three instances hold precision patterns, array shapes and sparsity patterns. As written, 10000 entries are 10000 parallel comparators. That is faithful to the size but expensive; on an FPGA the table would be a hashed BRAM. Lower `ENTRIES` if you only need the behaviour.

### Short-term memory (`stm_buffer`)

`stm_buffer` is a 100-sample ring buffer that keeps a running sum of its samples. It raises `below` when

    sum·100 < 95 · expected · count

which means "the window mean is below 95 % of expected". This form needs no divider. Samples are unsigned 16-bit values, with full scale meaning 1.0.

### Precision (stage 1)

The key is `{element type, floor(log2 κ)}`. On a miss the selector applies a default:

- **κ < 1024:** bf16 basis tabulation, fp32 geometry, bf16 matrix arithmetic and fp16 storage. The last three are the fixed precisions the paper uses as its ablation baseline; it does not name one for basis tabulation.
- **κ ≥ 1024:** fp64 for all four roles. The paper assumes κ < 1000 for stability and switches ill-conditioned elements to double precision.

The host sends accuracy feedback through the `prec_fb_*` ports. One clock after a feedback sample:

- if the short-term window is below 95 %, every field of the last configuration is promoted one level (fp16 → bf16 → fp32 → fp64) and stored;
- otherwise the last configuration is stored as a success.

### Bit-width (stage 2)

Each of 16 layers has a bit-width, reset to 8. The paper caps spike precision at 8 bits. When a layer reports accuracy at or above the expected value, its bit-width drops by one, but not below 2. When the accuracy window falls below 95 %, the bit-width rises by one.

The paper describes this as a learning agent but gives no rule. The increment/decrement rule here is the simplest one that trades accuracy against time steps.

### Array shape (stage 2)

The key is the layer type. A hit returns the stored shape. A new search happens on a miss, or when the utilization window is below 95 % of `util_expected`. The search enumerates every power-of-two shape with M·V·N·S = 256 and each dimension from 1 to 16. It picks the shape with the fewest passes

    ⌈Co/M⌉·⌈Ci/V⌉·⌈W/N⌉·⌈b/S⌉

taking the first shape found when several tie. After every layer the top feeds the achieved utilization back into the window:

    65536 · active / (passes · 256)

### Pattern (stage 3)

A curriculum stage limits which patterns may be chosen:

| stage | allowed patterns |
|---|---|
| 0 | 2:4, 1:4 |
| 1 | adds 1:3 |
| 2 | adds the irregular format |

The stage advances after 4 successful feedbacks in a row (`sp_fb_ok`); a failure restarts the count. The long-term memory is keyed by the analyzer's characteristics: the three "fits without loss" flags and a 4-bit density bucket. A stored pattern is reused if the current stage allows it.

Otherwise the rule is:

1. the sparsest allowed structured pattern that loses nothing (1:4, then 1:3, then 2:4);
2. else the irregular format, if allowed;
3. else 2:4 with pruning.

The paper uses a trained policy network here; that network is not built.

## Stage 1: precision on an integer datapath

`fem_array` holds B (20×8) and C (8×8) as signed 16-bit integers. It computes T = B·C in 8 clocks using 160 multiply-accumulate cells. It then computes A = T·Bᵀ in 8 clocks using 400 cells. Operands are broadcast rather than skewed.

A floating-point format is emulated by truncating each magnitude to the format's significand width: fp16 11 bits, bf16 8, fp32 24, fp64 53. The four roles are applied as follows:

| role | applied to |
|---|---|
| u_p | B, on load |
| u_m | C, on load |
| u_q | every product and every partial sum |
| u_s | the stored A |

This reproduces the effect that matters here, the loss of low-order bits. It does not model exponent range, overflow, subnormals or round-to-nearest. With fp64 everywhere the result is exact.

`kappa_estimator` computes

    κ₁(J) = ‖J‖₁ · ‖adj J‖₁ / |det J|

in exact integer arithmetic. The result is floored and saturated to 32 bits; a singular J saturates.

## Stage 2: the reconfigurable bit-serial spike array

This block is the least obvious one. A b-bit input x is split into b binary planes; plane k plays the role of time step k. A processing element only gates a weight with a spike bit, so it needs no multiplier. The partial sums of the planes are recombined by shift-add:

    Y = Σ_{k<b-1} 2^k (W × S_k) − 2^{b-1} (W × S_{b-1})

The top plane gets the negative weight because the inputs are two's complement.

The 256 elements form a pool rather than a fixed grid. For a shape `cfg = log2(M,V,N,S)`, element p is read from its index bits as (m, v, n, s), with s in the lowest bits. Each clock performs one pass over an M×V×N×S block of the layer. The passes loop with S innermost, then V, N and M. Elements that fall outside the layer are idle and are not counted in `active`.

The layer is the matrix product of the paper's equation, Output[M×N×S] = Spike[V×N×S] × W[M×V]. In the top the sizes are Co = 20 output channels, Ci = 20 input channels (the rows of A) and W = 20 spatial positions (the columns of A). Convolution loops over kernel height and width are not built.

## Stage 3: compressed format and the 4×4 array

`sparse_compressor` cuts every row of A into groups of m along K. m is 4, or 3 for 1:3, and the last group is zero-padded. Each group is stored as up to 4 lanes of (value, 2-bit index):

- **N:M patterns:** the n largest magnitudes are kept, the earlier one on a tie, and the rest are pruned.
- **Irregular format:** every nonzero of a group of 4 is kept. This makes it lossless for any sparsity.

`sparse_pe` adds Σ_l a[l]·b[idx[l]] to its accumulator each clock. It selects B values from a group of four that arrives from the north, and forwards A east and B south through registers.

`sparse_engine` runs a 4×4 output-stationary array over 5×5 output tiles. Row r and column c are fed r and c clocks late, so PE(r,c) meets group g at clock g+r+c. A tile takes G+6 feed clocks plus one clock to copy and clear, where G = ⌈K/m⌉ is 5 (m = 4) or 7 (m = 3).

## Top-level interface (`mgua_top`)

Pulse `start` while `busy` is low. Hold every data input until `done` pulses. The results and the decisions (`kappa`, `prec_cfg`, `bits`, `par_cfg`, `pattern`, hit/search flags, `cur_stage`, `snn_passes`, `sp_cycles`, `task_cycles`) stay valid until the next `start`.

Data inputs:

| port | shape | meaning |
|---|---|---|
| `jac` | 3×3 × s16 | element Jacobian |
| `elem_type` | 2 bits | 0 tetrahedron, 1 hexahedron |
| `bmat` | 20×8 × s16 | basis tabulation |
| `cmat` | 8×8 × s16 | geometry tensor |
| `layer` | 4 bits | layer index and layer type |
| `wts` | 20×20 × s8 | spike-layer weights |
| `spb` | 20×20 × s16 | sparse-stage B |
| `fem_shift`, `snn_shift` | 6 bits each | stage-to-stage scaling |

Host feedback can arrive at any time while the design is idle:

- `prec_fb_*`: accuracy sample for the last element;
- `bw_fb_*`: accuracy sample for a layer;
- `sp_fb_valid` / `sp_fb_ok`: outcome of the last pattern;
- `util_expected`: the expected utilization.

Everything in the design uses `clk`, with synchronous active-low reset `rst_n`.

## Sizes

All defaults are the paper's numbers where it gives one:

| size | value |
|---|---|
| element matrix | 20×20 |
| quadrature points | 8 |
| spike array | 4·4·4·4 = 256 elements |
| spike precision | at most 8 bits |
| sparse array | 4×4 |
| long-term memory | 10000 entries per table |
| short-term memory | 100 entries per table |

The spike-layer output count and the column count of the sparse B are not given in the paper; both are set to 20 to match the FEM matrix.

How the paper's workloads compare with these sizes:

- **Fits.** A typical FEM element (m = 20, k = 8) fits. A 10000-element mesh is a stream of tasks, about 6.3 M clocks.
- **Does not fit.** Elements with 27 quadrature points need `NQ=27`. Spike trains of 500–1000 time steps are not modelled; the time axis here is the ≤ 8 bit planes. A 10⁶-element sparse tensor would need host tiling into 2500 tasks.
- **Cannot be checked.** The network and dataset benchmarks (MNIST, CIFAR, DVS-Gesture, ImageNet, COCO) are not specified in enough detail to check them against the array.

## How far to trust it, and where it departs from the paper

Every block has a self-checking testbench. Each one compares the block with a reference model written independently in the testbench: integer matrix products, shift-based truncation, queue-based LRU and window models, and brute-force shape search. Where a latency or a count follows from the design, the testbench checks that too.

`tb_mgua_top` runs 16 tasks through the whole design at default sizes. For each task it checks:

- the output tensor;
- κ;
- the pass counts and clock counts;
- the decisions in each scenario.

It also requires every mechanism to happen at least once:

- default and ill-conditioned precision, precision hit and promotion;
- bit-width narrowing and widening;
- shape search, shape hit and low-utilization re-search;
- spike saturation, at 8 bits and at a narrowed bit-width;
- all four patterns, pattern-memory hit and both curriculum advances.

Departures and gaps:

- **Learned policies.** The paper's learned parts are replaced by fixed rules: the bit-width agent, the policy network, the curriculum schedule and the "memory-guided load balancing" of the FEM array. The learning itself, its training, learning-rate schedules and GPU kernels are software and are not here. Parsing the JSON mesh input and exporting the output tensor are host software too.
- **Floating point.** Precision is emulated by significand truncation. There are no real floating-point units.
- **FEM array.** It is a broadcast array, not a skewed systolic one.
- **Spike array.** It computes a matrix-product layer. Convolution windows and a temporal dimension beyond the bit planes are not built.
- **Condition number.** The paper does not say how κ is computed; here it is the 1-norm condition number of the element Jacobian.
- **Fig. 2.** The paper's architecture figure places a "bit-width agent" box in the FEM column. Here it lives in stage 2, as the text describes.
- **Minimum density.** The paper requires at least 10 % density for sparse tensors; this is not enforced.

## Simulating

Use Verilator 5. The package must come first:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/mgua_pkg.sv tb/sparse_ref_pkg.sv rtl/*.sv tb/tb_mgua_top.sv \
        --top-module tb_mgua_top -o sim
    ./obj_dir/sim

Replace `tb_mgua_top` with any `tb_<block>` to test one block. Every testbench ends by printing `TB_RESULT checks=N failures=M`.

With default parameters the end-to-end testbench needs a few minutes to build, mostly C++ compilation of the three 10000-entry tables, and about two seconds to run. To experiment faster, override `LTM_ENTRIES` on `mgua_top`. The module parameters `NB`, `NQ`, `SNN_CO` and `SP_C` resize the datapaths; the testbenches assume the defaults.

## Files

- `rtl/mgua_pkg.sv`: precision, pattern and shape types; `round_sig` significand truncation.
- `rtl/mgua_top.sv`: task controller and stage-to-stage conversion.
- Stage 1: `rtl/kappa_estimator.sv`, `rtl/precision_selector.sv`, `rtl/fem_array.sv`.
- Stage 2: `rtl/bitwidth_agent.sv`, `rtl/parallelism_config.sv`, `rtl/snn_array.sv`.
- Stage 3: `rtl/sparsity_analyzer.sv`, `rtl/pattern_learner.sv`, `rtl/sparse_compressor.sv`, `rtl/sparse_pe.sv`, `rtl/sparse_engine.sv`.
- Memories: `rtl/ltm_table.sv`, `rtl/stm_buffer.sv`.
- `tb/tb_<block>.sv`: one testbench per block. `tb/sparse_ref_pkg.sv` holds the reference pruning shared by the sparse testbenches.
