# CLEANN shield: RTL for a sparse-recovery Trojan detector

A neural Trojan is a backdoor trained into a classifier. The network behaves normally until its input carries a trigger, such as a sticker, a small patch or a faint pattern. It then returns the class the attacker chose. This design is a hardware guard that sits next to such a classifier. It is built on one observation about benign data:

- Benign image patches, and the classifier's internal features of benign images, can be rebuilt accurately from a few atoms of a dictionary learned on benign data.
- Triggered inputs cannot.

The guard therefore runs two sparse-recovery checks. It measures each check's reconstruction error against the statistics of benign errors, and it rejects what falls outside them.

The design follows the architecture described in *CLEANN: Accelerated Trojan Shield for Embedded Neural Networks* (Javaheripi et al.). The RTL, the number format and the cycle-level schedules are this implementation's own; where they go beyond or against that description, it is said below.

## The two analyzers and the verdict

```
 image ──► DCT analyzer ──► image ⊙ (1 − mask) ──► [ classifier front ] ──► features
              │ d_da                                                           │
              ▼                                                                ▼
          decision  ◄──────────────── d_fa ──────────────────────────── feature analyzer
              │                                                                │
              ▼                                                                ▼
     discard / classify                                    denoised features ──► [ classifier back ]
```

**The DCT analyzer** examines the input image in the frequency domain, one P×P patch at a time:

1. It computes the 2-D DCT of every channel of the patch and orders the coefficients in zigzag order.
2. It rebuilds that coefficient vector as a sparse combination of a 1000-atom dictionary.
3. It tests the reconstruction error with an ellipsoidal outlier rule. This gives one bit per patch.

The mask of patch bits is then cleaned with a 3×3 erosion followed by a 3×3 dilation. Erosion removes lone false alarms, and dilation restores the extent of the regions that survive. The masked patches of the image are zeroed before the image goes to the classifier. If any mask bit survives, the analyzer raises its alarm `d_da`.

**The feature analyzer** takes the classifier's penultimate-layer features:

1. It projects them onto a low-rank basis (*reduction*).
2. It rebuilds the result from a 420-atom latent dictionary.
3. It projects the reconstruction back to full width (*restoring*). The restored vector is what the classifier's last layers should use: the denoising removes much of the trigger's effect.
4. It applies the same outlier rule to the reconstruction error, which gives the alarm `d_fa`.

**The verdict** (`decision_agg`) is a fixed order. A DCT alarm discards the sample at once, without waiting for the features. Otherwise a feature alarm discards it, and a sample that passes both is classified. A trigger must therefore evade both analyzers to succeed.

The classifier itself is not part of this RTL. `cleann_top` exposes both of its sides:
- the masked image stream going into the network (`out_*`);
- the feature vector coming back from the network (`feat`, `feat_start`);
- the denoised feature vector going to the network's remaining layers (`feat_out`).

## Numbers

All data are signed 16-bit fixed point, Q4.11: the range is ±16 and one LSB is 2⁻¹¹.

Products and sums are kept in 48-bit accumulators with 22 fraction bits (Q22), and are rounded back to Q4.11 with saturation (`cleann_pkg::rnd`). The distance `mdist` and the two thresholds `d_eps2` and `f_eps2` are Q22 accumulator values. For example, ε² = 5·10⁻⁴ is entered as `2097`, and 3·10⁻³ as `12583`.

Every learned table is entered in Q4.11 through the configuration port: the dictionaries, the means μ, the inverse covariances Σ⁻¹ and the two projection matrices. These tables are computed offline from a few hundred benign samples, by dictionary learning, an SVD of the benign features, and the sample mean and covariance of the benign reconstruction errors. That software step is outside the RTL.

## The matrix-vector engine

Everything heavy in the design is a matrix-vector product:
- the atom scores of sparse recovery;
- the Σ⁻¹ product of the outlier rule;
- the reduction and the restoring.

They all run on one kind of core, `mvm_core`. It is built from P processing elements (`mvm_pe`), and each PE holds SIMD multipliers, a binary adder tree and an accumulator.

The weight matrix is cut into **chunks** of P rows, and each chunk into **partitions** of SIMD columns. In each cycle:
- every PE receives the same SIMD-element slice of the input vector;
- each PE receives the matching SIMD weights of its own row;
- each PE adds one partial dot product into its accumulator.

A chunk therefore takes ⌈COLS/SIMD⌉ cycles. Its P results leave together on `y_data`, two cycles after its last partition.

Weights reach the PEs through a two-bank **ping-pong buffer** (`pingpong_buf`). While the PEs read one chunk from one bank, the next chunk is written into the other. The writer stalls (`w_ready` low) only when both banks are full. With the stream source used here (one tile per cycle) a bank fills exactly as fast as it is consumed, so fetch and compute overlap completely: a product of an R×C matrix takes about (⌈R/P⌉ + 1)·⌈C/SIMD⌉ + 6 cycles.

Every table lives in a `matrix_mem`:
- It is a memory with one P×SIMD tile per word. The host writes it one element at a time through a part-select.
- It streams its tiles to an MVM core, chunk by chunk.
- A second port returns any SIMD-wide piece of one row one cycle after the request. The sparse-recovery core uses it to fetch the atom it chose.
- Positions beyond the matrix edge read as zero, so padding rows and columns never have to be written.

The defaults are P = SIMD = 8, which gives 64 multipliers per core.

## Sparse recovery (`omp_core`)

This is the most involved block. It runs orthogonal matching pursuit (OMP) for λ iterations on a vector x of L elements against a dictionary D of M atoms, which is stored as M rows of L.

It keeps a residual r, which starts at r = x, and an orthonormal basis q₁…q_i of the atoms chosen so far. Iteration i has these steps:

| Step | State(s) | What happens |
|---|---|---|
| 1. Score | `S_PROJ` | The MVM core computes p = D r, all M atom scores, in one pass over the dictionary. While the P scores of each chunk leave the core, a comparator keeps the atom with the largest \|p_j\|. Atoms already chosen are skipped. |
| 2. Fetch | `S_FETCH` | The chosen atom a is read from the dictionary's row port into the working vector ε. |
| 3. Orthogonalise | `S_DOT_QE` / `S_AXPY_QE` | Modified Gram-Schmidt against every stored q_j: first the dot product c = q_j·ε, then the update ε ← ε − c·q_j. Each pass is ⌈L/SIMD⌉ cycles, using SIMD multipliers. |
| 4. Normalise | `S_NORM`, `S_SQRT`, `S_DIV`, `S_SCALE` | Compute ‖ε‖² (`S_NORM`), its integer square root (`isqrt_iter`, 25 cycles), and the reciprocal 2³³/‖ε‖ in Q22 (`udiv_iter`, 49 cycles). Then scale ε into q_i. Only one divide per iteration is needed. |
| 5. Residual update | `S_DOT_QR` / `S_AXPY_QR` | r ← r − q_i (q_i·r). |

Step 5 equals the projection r − QQᵀr of the least-squares update, because r is already orthogonal to q₁…q_{i−1}.

If the chosen atom depends on the ones already chosen, for example a duplicate atom, then ε is zero. q_i is then left at zero and the residual does not change.

After λ iterations the block returns two vectors:
- `resid` = r, the reconstruction error;
- `recon` = x − r.

`recon` is exactly D_Λ v for the least-squares code v, so the code itself is never solved by back-substitution: neither analyzer needs it.

The per-iteration cycle count is:

⌈M/P⌉·⌈L/SIMD⌉ + 3 + (⌈L/SIMD⌉ + 1) + 2i·⌈L/SIMD⌉ + ⌈L/SIMD⌉ + 24 + 48 + 3·⌈L/SIMD⌉ plus a few state cycles.

The first term is the score pass, and it dominates. For the input analyzer at full size (M = 1000, L = 48) it is 750 of about 870 cycles.

## The outlier rule (`outlier_detector`)

For an error vector e of D elements the block computes:
- z = e − μ;
- y = Σ⁻¹z on the MVM core;
- mdist = z·y.

It flags an outlier when mdist ≥ ε². The second product is never a separate pass. As each chunk of y leaves the core, it is rounded to Q4.11, multiplied by the matching P elements of z, and added to the distance. The whole test therefore costs ⌈D/P⌉·⌈D/SIMD⌉ + about 5 cycles.

This is a Chebyshev-style bound. For benign errors with mean μ and covariance Σ, a distance of ε² or more is unlikely, so the threshold sets the false-alarm rate.

## The DCT analyzer in detail

**Image buffer.** The image is streamed in once and stored on chip, C×IMG×IMG pixels in channel-major raster order, because it has to be sent out again after the mask is known.

**DCT and zigzag order.** The DCT (`dct_extract`) is written as the paper frames it: a stride-P group convolution with one group per channel. Each of the P² coefficients of a channel is a P²-term dot product of the patch with a constant basis image. The basis is computed at elaboration from a table of cos(kπ/16), in Q15, with orthonormal scaling, and covers P = 2, 4 and 8. The block produces one coefficient per cycle. The zigzag order is the JPEG one: anti-diagonals u + v = s, traversed in alternating directions.

**Patch loop.** The patches are processed one after another through one DCT → OMP → outlier chain. Each patch writes bit `row*K + col` of `mask_raw`.

**Morphology.** Erosion treats positions outside the K×K mask as set, so a region touching the border is not eaten from that side. Dilation treats them as clear.

**Masking and output.** `upsample_mask` replays the buffered image and zeroes every pixel whose patch bit is set. This is nearest-neighbour upsampling of the mask, multiplied into the image as `image ⊙ (1 − mask)`.

**Interface and handshake.**
1. Pulse `start`, then send C·IMG² pixels on `in_valid`/`in_pix` while `in_ready` is high.
2. The masked image leaves on `out_valid`/`out_pix`, with `out_last` on its final pixel.
3. `da_done` then pulses, with `d_da` and `mask` valid.

## The feature analyzer in detail

The feature analyzer runs four stages:
1. **Reduction:** z = W_red f, an R×FEAT MVM, rounded to Q4.11.
2. **Sparse recovery:** OMP of z with λ = 80.
3. **Restoring:** f̃ = W_res z̃, a FEAT×R MVM on its own core, which gives `feat_out`.
4. **Outlier test:** the outlier rule on the error z − z̃. It runs at the same time as restoring.

To use it, pulse `feat_start` with `feat` valid. `fa_done` pulses with `d_fa` and `feat_out` valid.

## Configuration

All tables are written through one port, `cfg` (type `cleann_pkg::cfg_wr_t`), one element per cycle. Its fields are `we`, a target `tgt`, `row`, `col` and `data`:

| `tgt` | table | row, col |
|---|---|---|
| `CFG_D_DICT` | input dictionary, M×L | atom, coefficient |
| `CFG_D_SIGINV` | input Σ⁻¹, L×L | row, col |
| `CFG_D_MU` | input μ, L | –, index |
| `CFG_F_DICT` | latent dictionary, M×R | atom, element |
| `CFG_F_SIGINV` | latent Σ⁻¹, R×R | row, col |
| `CFG_F_MU` | latent μ, R | –, index |
| `CFG_F_WRED` | reduction W_red, R×FEAT | row, col |
| `CFG_F_WRES` | restoring W_res, FEAT×R | row, col |

The memories are not reset, so every element must be written, zeros included.

## Default size and timing

The defaults are the GTSRB configuration, which is the case the original work evaluated in hardware:

| Part | Setting |
|---|---|
| Images | 3 × 32 × 32 |
| Patches | P = 4, which gives an 8 × 8 mask and L = 48 coefficients per patch |
| Input dictionary | M = 1000 atoms, λ = 5, ε² = 5·10⁻⁴ |
| Latent space | R = 85, latent dictionary of 420 atoms, λ = 80 |
| MVM cores | 8 PEs × 8 lanes |

The penultimate feature width (FEAT = 256) is this design's assumption, because the source gives no width for its GTSRB network.

Measured in simulation for one clean sample:
- About 426 000 cycles from image start to verdict.
- 67 % of those cycles are spent in the input analyzer's sparse recovery and 30 % in the feature analyzer's. This is close to the original work's breakdown of 67.6 % and 26.0 %.

Other configurations are reached through the parameters of `cleann_top`, and two testbenches run the same three-sample scenario at those sizes:

- **MNIST** (`tb_workload_mnist`): 1×28×28 grey images, a 7×7 patch mask, latent size R = 279, a 500-atom latent dictionary and ε² = 2·10⁻³. It takes about 515 000 cycles per clean sample, and the feature analyzer's sparse recovery dominates (82 %).
- **VGGFace** (`tb_workload_vggface`): 8×8 patches with 192 coefficients, R = 520, a 2622-atom latent dictionary and ε² = 10⁻⁴. Every analyzer size is the full one, but the image is cut to 32×32. A full 224×224 image has 784 patches and needs about 12.5 million cycles in the input analyzer alone. A clean sample takes about 2.5 million cycles here, 88 % of them in the feature analyzer's sparse recovery.
- **GTSRB with λ = 50** for the feature dictionary, used for the Firefox trigger, needs only `F_LAM`.

The penultimate widths these testbenches assume (512 and 1024) are placeholders: the source does not give them. Note also that the source's parameter table lists 48 input coefficients for MNIST, which would mean three channels, while its dataset table gives grey images. The MNIST testbench follows the grey images (16 coefficients per patch).

Both the storage and the cycle count of the larger configurations grow with the number of patches and with the size of each dictionary. The VGGFace latent dictionary alone is 2622 × 520 words.

## Where this design departs from the original description

- **Table storage.** Weights are streamed from on-chip memory, not from DRAM. The original text says the ping-pong buffer hides DRAM reads, but it also says all tables fit in on-chip block RAM. The buffer is kept, and here it hides the memory-to-PE transfer.
- **Where the feature error is measured.** The outlier test measures the reconstruction error in the reduced latent space, where sparse recovery produces it. The original block diagram draws the test after restoring, while its text places the test on the sparse-recovery error. Consequently Σ⁻¹ and μ are R-sized.
- **No sparse code.** OMP returns the reconstruction and the residual, not the sparse code (see above).
- **Choices the source leaves open.** The number format, the 3×3 structuring element, the border rule of the morphology, the one-patch-at-a-time schedule, the square-root and divider circuits, and the one-element-per-cycle configuration port are all choices of this design.

## Files and testbenches

`rtl/` holds one module or package per file:

| File | Contents |
|---|---|
| `cleann_pkg` | types, rounding, defaults and the configuration bus |
| `mvm_pe`, `pingpong_buf`, `mvm_core`, `matrix_mem` | the matrix-vector engine |
| `isqrt_iter`, `udiv_iter`, `omp_core` | sparse recovery |
| `outlier_detector` | the outlier rule |
| `dct_extract`, `morph_filter`, `upsample_mask` | DCT-analyzer stages |
| `dct_analyzer`, `feature_analyzer` | the two analyzers |
| `decision_agg` | the verdict |
| `cleann_top` | the whole shield |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each one prints `TB_RESULT checks=N failures=M`, and each has a watchdog:

| Testbench | What it checks |
|---|---|
| `tb_mvm_pe`, `tb_mvm_core`, `tb_pingpong_buf`, `tb_matrix_mem` | random products and their latencies, buffer stalls and overlap, tile order and zero padding |
| `tb_omp_core` | against a floating-point OMP model, with the exact cycle count |
| `tb_outlier_detector` | the distance against a real-valued model, and thresholds just above and just below it |
| `tb_dct_extract` | against a `$cos` reference with an independently generated zigzag, for P = 4 and 8 |
| `tb_morph_filter`, `tb_upsample_mask`, `tb_decision_agg` | exhaustive or random reference comparisons |
| `tb_dct_analyzer`, `tb_feature_analyzer` | reduced-size runs with dictionaries chosen so the exact expected mask, distance and denoised output are known |
| `tb_cleann_top` | everything at the default size (described below) |
| `tb_workload_mnist`, `tb_workload_vggface` | the same end-to-end scenario at other dataset sizes, through the parameterised body `tb_shield_workload` |

`tb_cleann_top` runs at the default size with no parameter overrides. It loads about 137 000 table elements and runs three samples:
- a triggered image, which the DCT analyzer must discard;
- a clean sample, which must be classified;
- a clean image with triggered features, which the feature analyzer must discard.

It counts every mechanism and fails if any never happened. The mechanisms are: the alarms of both analyzers, erosion removing a bit, dilation restoring one, pixel suppression, fetch/compute overlap in the ping-pong buffer, and both kinds of discard plus a classification. It also checks the cycle breakdown quoted above. It takes about 20 s in Verilator.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cleann_pkg.sv tb/tb_cleann_top.sv --top-module tb_cleann_top -o sim
obj_dir/sim
```
