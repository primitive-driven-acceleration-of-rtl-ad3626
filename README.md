# Patch-based hyperdimensional image classifier — inference RTL

This is a streaming accelerator that classifies small grayscale images (MNIST-sized, zero-padded to
32×32) with hyperdimensional computing (HDC). Each image becomes one long bipolar vector, the
*image hypervector* (image HV), with D = 10,000 elements of ±1. The image HV is compared with one
stored prototype per class, and the class whose prototype agrees with it best wins. All arithmetic
is multiply, add, rotate and sign. There is no division and no floating point. The datapath is
parallel in two ways:

* **hypervector parallelism**: every unit handles P_D = 256 elements of a hypervector per cycle;
* **patch parallelism**: P_PATCH = 16 patch processors encode 16 image patches at once.

The RTL is SystemVerilog-2017. All sizes are parameters. The defaults are the main configuration
of the published design: D = 10,000, P_D = 256, P_PATCH = 16, 3×3 patches with stride 3, 256
intensity levels and 10 classes.

## The encoding the hardware computes

The input is an image of raw 8-bit pixels x(i,j). A fixed-point affine quantizer turns each one
into a level ℓ(i,j) = clip(⌊x·(1/s)⌋ + z, 0, 255), where 1/s is a Q8.8 reciprocal scale and z a
signed zero-point. There are two banks of
hypervectors:

* the **base bank** B holds one D-element vector per pixel position (i,j);
* the **level bank** L holds one vector per intensity level.

The encoder works in four steps:

1. **Bind**: the vector of a pixel is the element-wise product p(i,j) = B(i,j) ⊙ L(ℓ(i,j)).
2. **Patch sum and permute**: the image is cut into M×M patches with stride r. With M = r = 3 on
   32×32 this gives a 10×10 grid, so 100 patches, numbered t = row·10 + col. Patch t adds up the
   vectors of its pixels. The sum is then rotated cyclically by t places:
   `h_t[d] = sum[(d − t) mod D]`.
3. **Bundle**: the image sum is S = Σ_t h_t. The image HV is its sign: H[d] = +1 if S[d] ≥ 0,
   else −1.
4. **Classify**: the score of class c is s_c = Σ_d H[d]·C_c[d], the dot product with the bipolar
   class HV C_c. The prediction is argmax_c s_c. Dividing by D would give the cosine similarity,
   but it does not change the argmax and is left out.

The class HVs are trained off-line and loaded into the accelerator. Training bundles the encoded
training images of each class, refines them with similarity-weighted corrections on misclassified
samples, and binarizes the result. The accelerator only runs inference.

## Datapath

```
 host ─img_*─► pixel_quantizer ─► input_buffer ──levels──┐
                      ▲                  │
          pix_addr    │                  ▼
 dataflow_controller ─┘   base_addr / level_addr ──► external bank memory (HBM)
        │ issue record                                   │ P_PATCH × 2 words of P_D elements
        └──── delay_line (1 + RD_LAT) ───────┐           ▼
                                             ▼
                      patch_processor × P_PATCH  (bind, accumulate, rotate)
                                             │ P_PATCH × P_D partial sums
                                             ▼
                      global_adder_tree  (sum over processors and patch groups, sign)
                                             │ P_D bits of H per segment
                                             ▼
 host ──cls_*──► class_hv_buffer ◄──► similarity_engine  (running dot products)
                                             │ N_CLASSES scores
                                             ▼
                                        argmax_unit ──► pred_class, pred_score
```

Hypervectors are processed in **segments** of P_D elements. There are N_SEG = ⌈D/P_D⌉ = 40
segments; the last holds 10000 − 39·256 = 16 real elements and 240 padding lanes.

The 100 patches are spread over the 16 processors in **patch groups**: in group g, processor p
handles patch t = 16g + p. This gives ⌈100/16⌉ = 7 groups. In the last group only 4 processors
have a patch; the other 12 slots are idle and put out zeros.

For every segment, every group and every pixel of the patch, one **issue cycle** fetches one
P_D-element word of B and one of L per processor. The segment is the outermost loop, so the image
HV comes out one segment at a time. The similarity engine uses each segment as soon as it
appears. Nothing D-wide is ever stored on chip, apart from the class HVs.

| Module | What it does |
|---|---|
| `dataflow_controller` | Runs the loops over pass, group and pixel, and computes the pixel position for every processor. |
| `input_buffer` | The 32×32 image of levels, with one read port per processor and a 1-cycle read. |
| `patch_processor` | P_D signed multiply–accumulate lanes, a per-group history and a barrel shifter (next section). |
| `barrel_shifter` | A log-depth element shifter used by the patch processor. |
| `global_adder_tree` | A pipelined binary tree, log2(P_PATCH) levels, that sums the 16 processor outputs lane by lane. A segment accumulator behind it adds up the 7 groups, then the sign is taken. |
| `similarity_engine` | The P_D lanes do XNOR and popcount. Each segment is scored against one class per cycle and added into a score buffer of N_CLASSES entries. |
| `class_hv_buffer` | N_CLASSES × N_SEG words of P_D bits (1 = +1), with a 1-cycle read. |
| `argmax_unit` | A pipelined comparator tree. Ties go to the lowest class index. |
| `hdc_accel_top` | Wires all of the above together and delays the control record so it meets its memory data. |
| `hdc_pkg` | The `issue_t` control record, the `pass_e` pass kinds and the `bank_addr_t` request type. |

## Rotation by the patch ID across segment boundaries

This is the least obvious part of the design.

Segment s of the rotated patch vector covers output elements sP … sP+P−1, where P = P_D. These
come from input elements sP−t … sP−t+P−1. For t > 0 that range spans two aligned memory words:
the last t elements of input segment s−1 and the first P−t elements of segment s.

The processor handles this without unaligned memory reads:

* It reads only aligned words and accumulates input segment s into `acc`.
* It keeps the accumulated input segment s−1 in `hist`. A processor serves 7 patches per segment,
  one per group, so `hist` holds N_GROUPS × P_D entries.
* At the end of a patch, the barrel shifter takes the 2P-element concatenation {acc, hist} and
  selects the P-element window that starts at element P − t: `out[k] = {acc,hist}[P + k − t]`.

This needs t < P_D, so the number of patches must be at most P_D. An elaboration check enforces
this; the paper's 100 ≤ 256 meets it.

Segment 0 is the special case. For k < t its source is element D − t + k near the end of the
vector. Because D = 10000 is not a multiple of 256, those elements lie in the 16 valid lanes of
segment 39 and, for t > 16, also in segment 38. Every image therefore starts with two **warm-up
passes**:

* PASS_WARM0 accumulates segment N_SEG−2 into `hist`.
* PASS_WARM1 accumulates segment N_SEG−1 and stores the last P elements of the vector into `hist`.
  This store is the "tail": the V valid lanes of segment N_SEG−1 preceded by the top P−V lanes of
  segment N_SEG−2. It is fixed wiring, because V = D − (N_SEG−1)·P is a constant.

After that come N_SEG emitting passes for segments 0 … N_SEG−1. The rotation is then exactly the
cyclic rotation modulo D, and the padding lanes never reach a valid output lane. The cost is 2
extra passes out of 42, about 5 %.

## Interfaces and timing

`hdc_accel_top` ports:

* `img_we/img_addr/img_pixel`: write one raw pixel per cycle. The address is i·IMG_W + j. The
  host zero-pads the image. `pixel_quantizer` writes the level into the input buffer one cycle
  later, so `start` may follow the last pixel after one idle cycle.
* `q_inv_scale` (unsigned Q8.8, 1/s) and `q_zero_point` (signed): the quantizer constants. Hold
  them steady while the image loads; 16'h0100 and 0 pass pixels through unchanged.
* `cls_we/cls_class/cls_seg/cls_data`: write one P_D-bit class-HV word per cycle. Bit k of word
  (c,s) is element sP+k of class c; 1 means +1.
* `start`, `busy`, `done`: pulse `start` while idle. `busy` stays high until `done` (= `pred_valid`)
  pulses with `pred_class` and `pred_score`. A `start` while busy is ignored.
* `base_addr[p]`, `level_addr[p]` (`bank_addr_t {row, seg}`) and `base_rdata[p]`,
  `level_rdata[p]`: the bank memory port of processor p. The base row is the pixel position; the
  level row is the pixel level. The word must arrive exactly `RD_LAT` cycles (default 2) after its
  address. There is no flow control: a real HBM port would need a FIFO and a stall.
* `hv_valid/hv_seg_idx/hv_bits`: each image-HV segment as it is completed, for observation.

Bank elements are `BANK_W` = 8-bit signed fixed point. Lanes ≥ D in the last word may hold
anything.

Latency of one image, counted from the `start` cycle to the `pred_valid` cycle:

```
(N_SEG + 2) · N_GROUPS · M²                 issue cycles        42 · 7 · 9 = 2646
+ RD_LAT + log2(P_PATCH) + ceil(log2 N_CLASSES) + N_CLASSES + 5    2 + 4 + 4 + 10 + 5 = 25
                                                                   total 2671 cycles
```

At a 250 MHz clock this is 10.7 µs per image. The published design targets 250 MHz, although its
platform table lists 300–600 MHz for the device. The similarity engine needs N_CLASSES + 1 cycles per
segment. A segment arrives only every N_GROUPS·M² = 63 cycles, so the engine has no backpressure:
an elaboration check requires N_GROUPS·M² ≥ N_CLASSES + 2, and an assertion flags any overrun.

## Relation to the published design

Taken from the paper:

* the block structure: input buffer, device memory for the base and level HVs, an array of patch
  processors with P_D MAC lanes and a barrel shifter for the permutation, a pipelined global adder
  tree, a similarity engine with a per-class score buffer fed segment by segment, a class HV
  buffer, and a pipelined comparator-tree argmax;
* the encoding equations;
* all default sizes.

Choices of this implementation, not specified in the paper:

* Bank elements are 8-bit signed integers. The paper uses real-valued, ℓ2-normalized Gaussian
  vectors, so classification results can differ slightly from a floating-point model.
* Patches are assigned to processors in groups, and the loop order is segment, then group, then
  pixel.
* Permutation uses the per-group history and the two warm-up passes described above.
* The sign step sits at the output of the adder tree.
* The similarity engine walks the classes one per cycle, using XNOR and popcount.
* Argmax ties go to the lowest class index.
* Memory read latency is fixed (RD_LAT = 2), and the image and class-HV load ports are plain
  write ports.
* Pixel quantization is done in the image write path with a fixed-point reciprocal scale and a
  floor, where the published flow uses a real-valued scale in software. Zero-padding is left to
  the host.

Deliberate differences:

* The memory bandwidth that this schedule asks for, 16 processors × 2 words × 2048 bit per cycle,
  is far above what HBM2 delivers at 250 MHz. The paper does not say how the banks are cached or
  reused on chip. This RTL simply assumes a port that can keep up.
* The paper's measured 0.09 ms per image includes the host and runtime. The 2671-cycle figure
  above counts only the datapath.
* Patch size M, stride and D are elaboration parameters. Each ablation configuration (5×5 and 7×7
  patches, D = 5000 and 20000) is a separate build.

Not included: the training procedure, the host, the PCIe/runtime shell, and the HBM stack and its
controller. In simulation, the bank memory is the behavioural model `tb/hbm_model.sv`.

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come from
`tb/hdc_ref_pkg.sv`, which computes the encoding straight from the equations above, with the
rotation taken modulo D element by element. The bank contents are a hash of (bank, row, element),
so no data files are needed.

| Testbench | Sizes | What it covers |
|---|---|---|
| `tb_patch_processor` | P_D=16, D=40 | Every emitted segment against the rotation formula; a patch ID larger than the valid lanes of the last segment; an idle slot; random bubbles. |
| `tb_global_adder_tree` | 5 inputs (padded to 8), 8 lanes | Sums, signs (including zero), segment index and pipeline latency. |
| `tb_similarity_engine` | 5 classes, D=40 | Dot products with random data in the padding lanes; score clearing between images; latency. |
| `tb_argmax_unit` | 10 classes | Streams of scores with many ties. |
| `tb_dataflow_controller` | default sizes | Every issue cycle of two images. |
| `tb_input_buffer`, `tb_class_hv_buffer` | — | Write and read back. |
| `tb_pixel_quantizer` | default widths | Random pixels, scales and zero-points, with clipping at 0 and at 255; valid, address and one-cycle latency. |
| `tb_hdc_accel_top` | 10×10 image, 2×2 patches (25 patches, 4 processors, an idle slot in the last group), P_D=32, D=72 | End to end over five images. Checks image HV, class, score and latency. Counts that warm-up passes, idle slots, boundary-crossing rotations, segment-0 rotations that reach two segments back, masked padding lanes, an ignored `start` and levels clipped by the quantizer all occur. Odd images use a scale other than 1 and a negative zero-point. |
| `tb_hdc_accel_full` | all defaults | One image: all 10,000 image-HV elements, the predicted class with score 10000, and the 2671-cycle latency. |
| `tb_hdc_workloads` | M=5 and M=7 at D=10000; M=3 at D=5000 and 20000 | One image each of the ablation configurations. |

To simulate one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/hdc_pkg.sv tb/hdc_ref_pkg.sv \
          tb/tb_hdc_accel_top.sv --top-module tb_hdc_accel_top -Mdir obj -o sim
./obj/sim
```

Modules are found through `-Irtl -Itb` (one module per file, named after the file). The
full-size testbench builds in about a minute and runs in a few seconds.

To change the design, override the parameters of `hdc_accel_top`: `IMG_H/IMG_W`, `M`, `STRIDE`,
`P_PATCH`, `P_D`, `D`, `BANK_W`, `LEVEL_W`, `N_CLASSES`, `RD_LAT`. The remaining parameters are
derived and should be left alone. Two constraints are checked at elaboration:

* the number of patches must not exceed P_D, and D must exceed P_D;
* N_GROUPS·M² ≥ N_CLASSES + 2.
