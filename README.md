# Point cloud registration on PointNet features, in RTL

Two point clouds of the same object, a *source* and a *template*, differ by an
unknown rigid motion G = [R | t]. Neither accelerator here matches points
between the clouds. Each one runs the same small PointNet on both clouds. The
network turns every point into a 1024-value feature and max-pools those into
one 1024-value global feature per cloud. The pose is then refined until the
two global features agree. There are two cores with two ways to refine:

* **PointLKCore (PointNetLK)** works like Lucas-Kanade image alignment. First it
  builds a 1024 x 6 Jacobian of the template feature by finite differences:
  it perturbs the template along each of the six motion axes and extracts the
  feature again. It inverts that Jacobian once. Each iteration then extracts
  the source feature under the current pose and solves for a twist. It applies
  the twist through the exponential map and stops when the twist is small.
* **ReAgentCore (ReAgent)** treats each step as a classification. An actor
  network reads both features. For each of the three axes it picks one of 11
  discrete step sizes (0 and ±3^k/900, k = 0..4), once for rotation and once
  for translation. The pose is updated by those steps for a fixed number of
  iterations.

Neither core needs point matching. Both spend almost all their time in the
feature extractor, so most of the design is a tiled, pipelined and partly
quantised PointNet. The geometric work (Jacobian, pseudoinverse, exponential
map, pose composition) is small and is done in FP32.

## Number formats

| Quantity | Format |
|---|---|
| point coordinates in memory, poses, twists, Jacobian, J⁺ | IEEE FP32 |
| point coordinates inside PointNet, layer outputs, biases, scales | Q16.16 fixed point |
| activations into quantised layers | 8-bit unsigned lookup codes |
| weights of quantised layers | 8-bit signed codes |

The FP32 helpers live in `pn_pkg`: `fp_mul`, `fp_add`, conversion to and from
Q16.16, and compare. Each is one combinational step with round-to-nearest (ties away
from zero). Denormals flush to zero and overflow saturates. `fp_div` is a
combinational long division. Its only user is the 1/det in the pseudoinverse.

## The tiled PointNet (`pointnet`)

The network is Conv(3,64), then QuantConv(64,128), then QuantConv(128,1024),
then a max over points. Each convolution is followed by batch normalisation
and ReLU. Batch normalisation is expected to be folded into weights and bias
before the parameters are loaded. PointNet's usual T-Net branches are left
out, because registration needs pose-sensitive features.

Points are not processed all at once. The cloud streams in **tiles of B
points** (B = 2 in PointLKCore, 14 in ReAgentCore). The pipeline has eight
stages:

```
point_reader -> rigid_transform -> conv_layer -> quant_layer -> quant_conv
             -> quant_layer -> quant_conv -> maxpool_layer
```

Every stage writes into a two-bank buffer of B rows, so stage s can work on
tile k while stage s+1 reads tile k−1. The controller in `pointnet` keeps one
counter per stage for finished tiles. Stage s may start tile k only when all
three hold:

* it is idle;
* stage s−1 has finished tile k;
* stage s+1 has finished at least tile k−2, so the bank about to be
  overwritten has been read.

The total latency is therefore about (⌈N/B⌉ − 1) · max_s C_s + Σ_s C_s
cycles, where C_s is the per-tile time of stage s.

No stage holds more than B rows, so on-chip buffering does not depend on N.
The last tile may be partial. Rows past N are marked invalid, and
`maxpool_layer` skips them. The global feature starts at the most negative
value and takes a running max each tile.

Each stage has two unroll factors: PP points and PO output channels handled
per cycle. The defaults are the per-layer factors the paper lists for the
two cores:

| Core | B | Transform PP | Conv PP/PO | QuantConv1 PP/PO | QuantConv2 PP/PO | MaxPool PP/PO |
|---|---|---|---|---|---|---|
| PointLK | 2 | 1 | 2/4 | 2/64 | 2/512 | 1/8 |
| ReAgent | 14 | 2 | 7/1 | 14/8 | 14/64 | 1/8 |

### LLT quantisation (`quant_layer`, `quant_conv`)

The second and third convolutions use learnable-lookup-table quantisation.
`quant_layer` sits in front of each quantised convolution. It takes the Q16.16
output of the previous layer, applies ReLU, then scales and offsets the value
with per-layer parameters. It rounds and clamps the result to an index in
0..2295. There are (2⁸ − 1) · K + 1 = 2296 entries with K = 9. A lookup table
of that length then maps the index to an 8-bit code. `quant_conv` multiplies
codes by 8-bit signed weight codes. Its integer accumulator is
8 + 8 + ⌈log₂ m⌉ bits wide, so nothing is lost. At the end it rescales once by
the combined scale s_aw and adds the bias in Q16.16. The `quant_layer` after
the last quantised convolution dequantises only: no lookup, output Q16.16.

The source text disagrees with itself on signedness. One passage makes the
activations signed and the weights unsigned. The parameter description makes
the activation table unsigned, which fits activations that come after a ReLU.
This design follows the second: activations unsigned, weights signed.

### Parameters on chip

All weights, tables, biases and scales sit in on-chip arrays. They are filled
once, before a run, from one parameter image in DDR. Bit 3 of the control
register triggers the load. The image goes out on a 128-bit parameter write
bus (word address plus four 32-bit values). Each layer decodes its own address
range (`BASE` parameter). The per-layer layouts are in the opening comments of
`conv_layer`, `quant_layer`, `quant_conv`, `actor` and `reagent_update`.

## PointLKCore (`pointlk_core`)

**Sequence of one run:**

1. Optionally load the parameters.
2. Read the initial pose G0.
3. Extract the template feature φ_T.
4. Build the Jacobian. Column j comes from the template moved by a small
   motion δG_j^± of step t along axis j (`perturb`). Axes 1–3 rotate about
   x, y, z; axes 4–6 translate. `JAC_MODE` picks the difference rule:
   * 0, central: (φ(δG⁻P) − φ(δG⁺P)) / 2t, which takes 12 extra extractions;
   * 1, forward: (φ_T − φ(δG⁺P)) / t;
   * 2, backward: (φ(δG⁻P) − φ_T) / t.
5. `pinv` computes J⁺ = (JᵀJ)⁻¹Jᵀ. It accumulates the 6x6 matrix JᵀJ one
   Jacobian row per cycle and splits it into 3x3 blocks. It inverts the
   top-left block and the Schur complement by adjugate and determinant, then
   assembles the inverse by the block formula. Last it multiplies by Jᵀ.
6. Iterate:
   * extract φ_S of the source under G_{i−1};
   * compute Δξ = J⁺(φ_S − φ_T);
   * compute G_i = exp(Δξ) · G_{i−1} with `se3_exp`. Rodrigues' formula gives
     R; the SO(3) left Jacobian gives t. Their coefficients come from Taylor
     series in θ².
   * write G_i to `OUT_ADDR + 48·i`;
   * stop when |Δξ|² < ε² or after I_MAX iterations.

**Limitation:** J⁺ assumes both diagonal blocks are invertible. A degenerate
cloud (too few points, or all on a line) gives saturated values, not an error
flag.

## ReAgentCore (`reagent_core`)

ReAgentCore shares the PointNet pipeline with PointLKCore, at B = 14. It
applies the pose as R(p − μ) + μ + t: the source is rotated about its centroid
μ, which the host supplies in registers 11–13. One iteration goes:

1. Extract φ_S.
2. `actor` runs twice on the state (φ_S, φ_T), first with the translation
   network's parameters, then with the rotation network's.
3. `reagent_update` turns the six labels into a new pose:
   R_i = R_x R_y R_z R_{i−1} and t_i = t_{i−1} + steps.

The update's step table holds each step with its sine and cosine, so no
trigonometric unit is needed. The loop always runs exactly I_MAX times.

`actor` is Quant, QuantFC(2048,512), Quant, QuantFC(512,256), Quant, then a
plain FC(256,33). The largest score in each group of 11 outputs is that
axis's label; ties go to the first. Output unrolling is 128, 32 and 2 channels
per cycle. Both networks share one datapath, each layer keeping two parameter
sets.

## Control and memory (`axil_regs`, `gmem_master`, `reg_accel_top`)

Each core has 16 32-bit registers behind AXI-Lite. Its data goes through one
128-bit AXI4 manager port (`gmem_master`). That port issues INCR bursts of up
to 16 beats, splits them at 4 KB boundaries and keeps one transaction in
flight. Points are one 128-bit word each: x, y, z in FP32 in the low three
lanes. A pose is three words, one row [r0 r1 r2 t] per word.

| word | meaning |
|---|---|
| 0 | bit0 start, bit1 done, bit2 idle, bit3 load parameters |
| 1 | N (points, 16 bits used) |
| 2 | I_MAX |
| 3 | parameter image address |
| 4 | source cloud address |
| 5 | template cloud address |
| 6 | G0 address |
| 7 | output pose address |
| 8 | JAC_MODE (PointLK) |
| 9 | step t, FP32 (PointLK) |
| 10 | ε, FP32 (PointLK) |
| 11–13 | μ x, y, z, FP32 (ReAgent) |
| 15 | iterations run (read only) |

`reg_accel_top` puts both cores behind one AXI-Lite port, where address bit 8
selects the core. It shares one AXI4 port through a fixed-priority arbiter.
PointLK goes first. A read grant is held to the last beat, and a write grant
to the response. Only the top is this design's own arrangement: the source
paper builds each core as a separate IP block for a Zynq SoC at 200 MHz. The
host CPU, the DDR and the SoC's HP0/HPM0 ports are not part of the RTL. Their
AXI signals are the top's ports.

## Where this departs from the source design

* Both cores share one top and one memory port. The source builds them
  separately.
* Bit widths of the LLT codes (8/8), the lookup index rounding, register map,
  parameter image layout, burst length and the FP32 unit are all assumptions.
  The source gives none of them.
* The forward-difference Jacobian formula and the squared-norm convergence
  test are this design's choices.
* The actor has no ReLU after its last layer. This follows the block diagram,
  not the text. It only matters for ties among negative scores.
* exp(·) uses truncated Taylor series. Accuracy is better than 1e-6 relative
  for |ω| ≤ 1 rad.
* Batch normalisation is folded offline. No training or parameter generation
  is included.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
`tb/axi_mem_model.sv` is a behavioural DDR that can insert random stalls.
With Verilator 5:

```
verilator --binary --timing -j 8 --top-module tb_pointnet \
    rtl/pn_pkg.sv $(ls rtl/*.sv | grep -v pn_pkg) tb/tb_pointnet.sv -y tb
./obj_dir/Vtb_pointnet
```

The floating-point testbenches convert through `real`, because `shortreal`
is not usable in Verilator 5.

**Which tests cover what:**

* `tb_pointlk_core`, `tb_reagent_core` and `tb_reg_accel_top` use smaller
  layer widths (16/16/32 channels, actor 8/8) so they finish in seconds.
  `tb_reg_accel_top` counts that every mechanism occurs at least once:
  * parameter loads;
  * ε convergence and the I_MAX stop;
  * all three Jacobian modes;
  * partial tiles;
  * pipeline overlap;
  * memory stalls;
  * arbiter contention;
  * 4 KB burst splits.
* `tb_reg_accel_full` runs the top with every parameter at its default (1024
  features, 512/256 actor). It does one PointLK registration (N = 6, two
  iterations, central Jacobian) and one ReAgent registration (N = 15, two
  iterations). N is kept small for simulation time. N itself changes nothing
  in the hardware, which streams tiles.

Reference values in the testbenches are computed independently in `real`
arithmetic, with tolerances for FP32 and Q16.16 rounding.
