# A pipelined F(3×3, 3×3) Winograd convolution engine in SystemVerilog

Most of the work in a convolutional neural network is in 3×3 convolutions. Computed
directly, each output pixel of a 3×3 convolution needs 9 multiplications per input
channel. Winograd's minimal filtering algorithm F(m×m, r×r) computes an m×m block of
outputs from an (m+r−1)×(m+r−1) block of inputs with only (m+r−1)² multiplications.
The price is some extra additions and multiplications by small constants. For m = 3,
r = 3 a 3×3 output tile comes from a 5×5 input tile with 25 multiplications instead
of 81.

This RTL builds a hardware engine for that algorithm, following the architecture of
A. Ahmad and M. A. Pasha, "Towards Design Space Exploration and Optimization of Fast
Algorithms for Convolutional Neural Networks (CNNs) on FPGAs" (DATE 2019). The
architecture rests on one observation. Every processing element (PE) that works on the
same input tile needs the same transformed input tile U. So U is computed **once**, in a
data-transform stage in front of the PEs, and broadcast to all P PEs. The PEs differ
only in their kernels. Every clock, one 5×5 input tile enters the engine, and
P = 28 PEs apply 28 different kernels to it. After accumulation over the input
channels, that gives 28 × 9 results per clock. All arithmetic is IEEE-754 single
precision.

## 1. The algorithm as the hardware computes it

For one input channel, with d a 5×5 input tile and g a 3×3 kernel:

    U = Bᵀ d B          data transform      (shared by all PEs, in hardware)
    V = G g Gᵀ          filter transform    (precomputed outside, loaded into a buffer)
    M = U ⊙ V           25 multiplications  (in each PE)
    Y = Aᵀ M A          inverse transform   (in each PE), Y is 3×3

The matrices use the interpolation points 0, 1, −1, 2 and ∞:

    Aᵀ = [1  1  1  1  0]     Bᵀ = [2 -1 -2  1  0]     G = [ 1/2    0     0  ]
         [0  1 -1  2  0]          [0 -2 -1  1  0]         [-1/2 -1/2  -1/2 ]
         [0  1  1  4  1]          [0  2 -3  1  0]         [-1/6  1/6  -1/6 ]
                                  [0 -1  0  1  0]         [ 1/6  1/3   2/3 ]
                                  [0  2 -1 -2  1]         [  0    0     1  ]

In the source, Aᵀ can be read off the drawing of the 1D engine's inverse stage:
Y0 = m0+m1+m2+m3, Y1 = m1−m2+2m3, Y2 = m1+m2+4m3+m4. Bᵀ and G are not printed there.
They are the unique partners of that Aᵀ for these points, derived by the usual
Toom-Cook construction. The sign of each row of Bᵀ (with the matching row of G) is a
free choice. The signs here put the constants 2×, −2× and −3× into the data
transform, which are the constants the source shows. Because all fractions sit in G,
the data and inverse transforms need only additions and multiplications by 2, 4
and 3.

The output is the *correlation* used by CNNs:
Y[i][j] = Σ_{a,b} d[i+a][j+b] · g[a][b].

### Constant multipliers in floating point

In FP32, multiplying by 2 or 4 is an increment of the exponent (`fp_pow2` in
`wino_pkg`), which is the floating-point form of "a shift". The factor 3 is computed as
x + 2x with one adder, and the minus signs are folded into the following adder by
flipping a sign bit (`fp_neg`). Every `+` and `−` is an `fp32_add`.

## 2. Datapath and pipeline

```
 image buffer ──d (5×5)──► data transform ──U──┬──► PE 0  ──Y0──► accumulation buffer 0 ──►
 (ping-pong)               U = BᵀdB            ├──► PE 1  ──Y1──► accumulation buffer 1 ──►  out_tiles[P]
                           (registered)        ⋮        ⋮                  ⋮
 kernel buffer ──V0..V(P-1), one 25-word tile per PE ─► PE P-1 ──► accumulation buffer P-1 ─►
 (ping-pong)
                  ▲ controller: one read per clock, address pos·C + c, tags first/last channel
```

| clock edge | stage | registers loaded |
|---|---|---|
| 1 | buffer read | image tile d, kernel word (P V-tiles), tag |
| 2 | data transform | U (25 words), V held one clock to meet U |
| 3 | PE: element-wise multiply | m registers of the five 1D engines (25 products) |
| 4 | PE: 1D inverse transform | output registers of the 1D engines (15 values) |
| 5 | PE: 2nd-dimension inverse transform | PE output registers, the 3×3 tile |
| 6 | accumulation | running sum over channels; finished tile copied to `out_tiles` |

The pipeline depth is therefore D_p = 6. A pass of N = positions × C reads takes
N + D_p − 1 clocks from the first read to the last result register. This is the
timing model T_t = (NHWCK/(m²P) + D_p − 1)·t_c of the source. The top-level testbench
checks that count for every pass, and checks that inside a pass a finished tile
position comes out exactly every C clocks. Nothing ever stalls. The engine relies on
double buffering, and on the outside world refilling the idle banks in time.

### The processing element (`wino_pe`)

The 2D algorithm is nested from the 1D algorithm F(3,3), as in the source:

* **Five 1D engines** (`wino_engine_1d`). Engine *i* takes row *i* of U
  (U[5i..5i+4]) and row *i* of V. It multiplies them element-wise with five FP32
  multipliers into its m registers. It then applies Aᵀ (`wino_it_1d`, seven adders)
  and registers three values. Together the five engines produce the 5×3 matrix
  Z = (U ⊙ V)·A, which is Aᵀ applied along the rows.
* **Inverse transform in the second dimension** (`wino_inv_2nd`). It applies Aᵀ down
  each of the three columns of Z, using three more `wino_it_1d`, and registers the
  3×3 tile Y = Aᵀ Z.

A PE has 25 multipliers and 56 adders. With P = 28 the engine has 700 multipliers,
which equals ⌊700 / 25⌋ PEs for a budget of 700 multipliers.

### The data transform (`wino_data_transform`)

The data transform is one register stage. Inside it, combinational logic makes two
passes of the 1D transform `wino_dt_1d`: first down the five columns (T = Bᵀd), then
along the five rows of T (U = TB). Each 1D transform has eleven adders and shares
terms between its outputs:

    u3 = d3 − d1              u0 = (2d0 − 2d2) + u3
    u1 = (d3 − d2) − 2d1      u2 = (d3 + 2d1) − 3d2
    u4 = (2d1 − 2d3) + (d4 − d2)

Ten of these (110 adders) are shared by all PEs. In the reference design this RTL
improves on, the transform sat inside each PE.

### Accumulation over channels (`wino_accum`)

Each PE produces one 3×3 tile per input channel of the current tile position. The
accumulation buffer adds them with nine FP32 adders into a running sum. The tile
tagged `first` starts a new sum (it is added to +0). On the tile tagged `last`, the
finished sum goes to `out_tiles[p]`, and `out_valid` pulses for one clock with the
position in `out_pos`. The next position starts on the very next clock. Channels are
added in order c = 0 … C−1, so the result is bit-for-bit reproducible in software.

## 3. Using the engine (`wino_top`)

### Data layout

* **Image buffer.** One word is one 5×5 input tile (25 × 32 bits, row-major,
  `dtile_t`). Tile positions are cut from the feature map with stride 3, so
  neighbouring tiles overlap by two pixels. The word for tile position `pos`, channel
  `c` goes to address `pos·C + c`. The engine does not cut tiles from a raw feature
  map itself; whoever fills the buffer does that.
* **Kernel buffer.** One word per input channel `c` (address `c`), holding the
  transformed kernels V = G g Gᵀ of all P output channels: `ker_wr_data[p]` is the
  25-word V of kernel p for channel c. V must be computed outside the engine (in
  single precision), as in the source.

### Running a pass

1. Write the tiles and the V words through `img_wr_*` and `ker_wr_*`. Writes always go
   to the bank **not** being read, so this may happen while a previous pass runs.
2. When `busy` is low, pulse `img_swap` and `ker_swap` for one clock. The filled banks
   become the read banks. `img_bank` and `ker_bank` show which bank is read.
3. Set `num_ch` = C (1 … C_MAX) and `num_pos` (number of tile positions,
   num_pos·C ≤ IMG_DEPTH), and pulse `start`.
4. For each tile position in order, `out_valid` pulses with `out_pos` and
   `out_tiles[p]`: the 3×3 outputs of kernel p, row-major. Results of one pass keep
   draining for D_p − 1 clocks after `busy` falls. The next pass may be started in
   that time.

Assertions check that no bank is swapped while the engine is busy, that a pass fits
the buffers, and that all PEs finish in lock step.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `P` | 28 | parallel PEs (the source's F(3×3,3×3) configuration: 700 multipliers) |
| `IMG_DEPTH` | 4096 | tiles per image-buffer bank (this design's choice) |
| `C_MAX` | 512 | channels per kernel-buffer bank; 512 is the largest C in VGG16 (this design's choice) |

m = 3 and r = 3 are fixed by the transforms (`wino_pkg::M_OUT`, `R_K`). The kernel
buffer word is P·800 bits wide (22 400 bits at P = 28). A real FPGA would split it
into many block RAMs.

## 4. Fit to VGG16 and expected speed

At 200 MHz with P = 28, the timing model gives 4.27, 6.12, 10.19, 10.19 and 3.06 ms
for the five convolution groups of VGG16 (configuration D), 33.83 ms in total. These
are the figures the source reports for this configuration. Every VGG16 layer fits the
default buffers:

* C ≤ 512 fits one kernel-buffer bank.
* For C = 512, one image-buffer bank holds 8 tile positions per pass.

The idealised model assumes that H and W are multiples of 3 and K is a multiple of P.
This engine processes whole tiles and whole groups of 28 kernels. For example, 224
pixels need 75 tiles, and 64 kernels need three passes over the same input tiles.
That gives about 39.9 ms in total.

## 5. Floating-point units

`fp32_add` and `fp32_mul` are single-cycle, combinational units that round to
nearest, ties to even:

* **Adder.** Aligns the operands with guard, round and sticky bits, then renormalises
  with a leading-zero count.
* **Multiplier.** Forms the 24×24-bit product and normalises it by at most one place.

Both flush subnormal inputs and results to zero. Infinities and NaNs pass through in
a simple way (canonical NaN). Their results agree bit for bit with correctly rounded
single-precision arithmetic across the normal range. Being single-cycle, they set a
long combinational path. An FPGA implementation at 200 MHz would pipeline them
internally. That deepens each stage without changing the dataflow; only D_p changes.

## 6. Verification

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. The reference values come from `tb/fp_ref_pkg.sv`,
which does double-precision arithmetic and rounds to single precision. It also
computes V = G g Gᵀ.

| testbench | what it shows |
|---|---|
| `tb_fp32_add`, `tb_fp32_mul` | 20 000 random operands and corner cases, bit-exact against correctly rounded results |
| `tb_wino_data_transform` | U = BᵀdB, bit-exact for integer tiles and within 1e-4 relative for random tiles; 1-clock latency |
| `tb_wino_engine_1d` | y = Aᵀ(u⊙v), and agreement with direct 1D correlation; 2-clock latency |
| `tb_wino_inv_2nd` | Y = AᵀZ; 1-clock latency |
| `tb_wino_pe` | one PE against direct 3×3 correlation of random tiles; 3-clock latency, one tile per clock |
| `tb_wino_accum` | channel sums (1 to 9 channels, idle clocks inside a group) bit-exact |
| `tb_wino_pingpong_buf` | bank swap, reading one bank while writing the other |
| `tb_wino_controller` | address sequence, first/last tags, pass length N clocks |
| `tb_wino_top` | whole engine with P = 4 over four passes: overlapped loading, bank swaps, C = 1 and C up to 16, back-to-back passes; every output against direct convolution; T_t = N + D_p − 1 |
| `tb_wino_vgg16_conv5` | a VGG16 conv5-sized input (17×17×512, 25 tile positions) in one pass against 4 kernels (P = 4): 12 800 reads, T_t = 12 805 clocks |
| `tb_wino_top_full` | whole engine at the default sizes (P = 28, 4096/512-deep buffers): a 512-channel pass that fills the image bank and a 64-channel pass |

The engine computes in FP32 along a different path than direct convolution (through
the transforms), so end-to-end results are compared within a relative tolerance. The
tolerance is 1e-4 of ten times the sum of the magnitudes of the products.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/wino_pkg.sv tb/fp_ref_pkg.sv tb/tb_wino_top.sv --top-module tb_wino_top
./obj_dir/Vtb_wino_top
```

The packages must be named first. All other files are found through `-y`. The
small end-to-end test builds in about a minute and a half. The full-size one
(`tb_wino_top_full`) takes about 12 minutes to build with `-j 4`, because Verilator
flattens 28 PEs of about 80 floating-point units each; it then simulates in seconds.

## 7. What follows the source and what is this design's own

Taken from the source:

* F(3×3,3×3) on single-precision floats.
* The data transform computed once and shared by P PEs, with P = 28 for 700
  multipliers.
* PEs nested from five 1D F(3,3) engines (multipliers, m registers, inverse
  transform, output registers) plus an inverse transform in the second dimension.
* Aᵀ and the constant multipliers of the transforms.
* Precomputed filter transforms.
* Double-buffered image and kernel buffers.
* Accumulation over the C channels in output buffers.
* The timing model.

This design's own choices, where the source is silent:

* Bᵀ and G, derived to match the printed Aᵀ and constants. The exact adder trees
  could not be read reliably from the drawings.
* The FP units' insides, flush-to-zero and single-cycle timing.
* The register placement inside the data transform (one stage) and the PE (three
  stages), hence D_p = 6.
* The buffer organisation: one tile per word, one channel of all kernels per word,
  depths 4096 and 512, and the swap handshake.
* The controller and its address order.
* The tag that travels with each tile.
* Synchronous active-low reset of control state only.

Not provided:

* The filter transform hardware. The source precomputes V.
* The logic that cuts overlapping tiles out of a feature map.
* The off-chip memory interface.
* The F(2×2,3×3) and F(4×4,3×3) variants that the source also evaluates. They need
  other transform matrices and other PE sizes.
