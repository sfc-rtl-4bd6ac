# SFC-6(7×7, 3×3): a fast-convolution accelerator that needs only int8 multipliers

Fast convolution algorithms (Winograd, FFT) save multiplications by moving a
tile of the input and the filter into a transform domain, multiplying there
element by element, and transforming back. Winograd's transforms are
ill-conditioned, so its savings disappear once operands are quantized to
int8. FFT is well conditioned but its coefficients are irrational.

*Symbolic Fourier Convolution* (SFC) keeps the Fourier transform but never
evaluates its roots of unity. For a 6-point DFT, every twiddle factor is a
first-degree polynomial in a symbol `s` (with `s² = s − 1`), so the
transform becomes a matrix of 0 and ±1. Multiplying two such polynomials
takes three real multiplications. The DFT result is a *cyclic* convolution.
A few extra *correction* products turn the wrapped outputs into valid linear
outputs. This grows the output tile from 4 to 7 points per dimension.

The variant built here is SFC-6(7×7, 3×3). A 9×9 input tile and a 3×3
filter give a 7×7 output tile using 12×12 = 144 multiplications, against
7·7·9 = 441 for direct convolution. The transforms use only additions and
shifts. The multipliers are int8 × int8.

This RTL implements the accelerator with the organisation of the algorithm's
FPGA evaluation. Each cycle it processes 4 input channels × 4 output
channels × one 7×7 output tile, in a fully pipelined int8 datapath.

## The algorithm as the hardware computes it

For one input channel and one output channel:

    36·Y = A6ᵀ · [ (G · F · Gᵀ) ⊙ (Bᵀ · X · B) ] · A6

| matrix | size | entries | role |
|---|---|---|---|
| `BT` (Bᵀ) | 12×9 | 0, ±1 | input transform |
| `G` | 12×3 | 0, ±1 | filter transform |
| `A6` (6·A) | 12×7 | 0, ±1, ±2, 6 | output transform |

`X` is the 9×9 input tile and `F` the 3×3 filter. `Y` is the 7×7 output,
`Y[r][c] = Σₖ Σₗ X[r+k][c+l]·F[k][l]`. This is a correlation, as CNN layers
use it. The matrices are in `rtl/sfc_pkg.sv`.

**Rows 0–7** form the 6-point symbolic Fourier transform of the middle six
input points (x₁…x₆), taken over frequency 0, the three polynomial-product
terms of frequency 1, the three of frequency 2, and frequency 3. The real
Hermitian-symmetric DFT of 6 points has 6 degrees of freedom. The two
complex frequencies each need 3 products instead of 2, so 8 rows.

**Rows 8–11** are corrections. Row 8 of Bᵀ is `x₀ − x₆`. Paired with
filter row `(1,0,0)`, it adds `(x₀ − x₆)·w₀`. This replaces the wrapped
term of the first output with the true one. Rows 9–11 do the same at the
other end of the tile and for the extra output points that take the tile
from 6 to 7 outputs. In `A6` these rows carry the weight 6. They add
straight into single outputs. The other rows carry the 1/6 of the inverse
DFT, scaled up by 6 here to stay integer.

The 2-D form applies the 1-D matrices along rows and along columns, so the
result carries the factor 6·6 = 36. The hardware does not divide by 36. The
intended use folds the 1/36 into the per-layer dequantization scale.

Note for anyone copying the matrices: the A matrix of SFC-6(7×7, 3×3)
appears in two published places with different rows 2 and 6. Only one
version (the one used here) gives 6× the linear convolution, as a direct
numerical check shows. The other has two transposed entries.

## Datapath

```
                 tile_x[4][9][9] int8                wl_f[3][3] int8 + wl_shw
                        │                                   │
   t0  controller ──────┤ group, first, last                │  (filter load mode)
                        ▼                                   ▼
   t1  4 × sfc_input_transform (BᵀXB, 14-bit)     sfc_filter_transform (GFGᵀ, 12-bit)
                        │                                   ▼
   t2  4 × sfc_freq_quant (→ int8, cfg_shx)       sfc_freq_quant (→ int8, wl_shw)
                        │                                   ▼
                        │      ◄── read group ──    sfc_weight_buffer
                        ▼                          [4 oc][4 ic][128 groups] × 144 int8
   t3  4 × sfc_ewmul: Σ over 4 input lanes of (xq·wq) << (shx+shw)   (4×4×144 multipliers)
                        ▼
   t4  sfc_accumulator: Σ over groups, in the transform domain (32-bit)
                        ▼
   t5  4 × sfc_output_transform (A6ᵀ M A6, 40-bit)  ──►  y[4][7][7], y_valid
```

Every stage is one register stage and takes a new tile every cycle. The
output transform is linear, so partial sums over input channels are
accumulated in the 12×12 transform domain. The output transform then runs
once per output tile rather than once per input-channel group.

### Frequency-wise quantization

Transform-domain values are requantized to int8 with one scale per
frequency. Activations have a 12×12 scale set (`cfg_shx`). Filters have a
12×12 set per output channel (`wl_shw`, kept per output lane in the filter
store). Activation energy concentrates in low frequencies, so per-frequency
scales lose less precision than one scale per tensor.

This design restricts every scale to a power of two, 2^sh with sh in 0…7:

* `sfc_freq_quant` requantizes with an arithmetic right shift by `sh`,
  rounds half up, and saturates to [−128, 127]. `sat_x` and `sat_w` flag
  any clipping.
* `sfc_ewmul` multiplies the int8 operands. It shifts each product left by
  `shx + shw` to bring every frequency back to the common scale, then sums.

The result is exact whenever nothing clips and no bits are shifted out. The
accumulated value then represents `36·Y` in units of the spatial operands'
own scales. With all exponents 0 and operands small enough not to clip
(|xᵗ| ≤ 127 needs |x| ≤ 3, |wᵗ| ≤ 127 needs |f| ≤ 14), the accelerator is
bit-exact with direct integer convolution times 36. The testbenches check
exactly that.

Choosing the exponents is offline calibration work. Arbitrary
(non-power-of-two) scales would need a small multiplier per frequency in
`sfc_ewmul` in place of the shift.

### Widths

| signal | width | reason |
|---|---|---|
| spatial operands | 8 | int8 |
| BᵀXB | 14 | largest row of Bᵀ sums 6 terms; 6·6·128 < 2¹³ |
| GFGᵀ | 12 | largest row of G sums 3 terms; 9·128 < 2¹¹ |
| transform-domain operands | 8 | int8 after requantization |
| products, sums, accumulators | 32 | wraps on overflow |
| outputs | 40 | columns of 6A sum to at most 16 in magnitude; 16² = 2⁸ |

## Operation and control (`sfc_controller`)

A layer is processed one block of 4 output channels at a time:

1. **Load filters.** For each group g (input channels 4g…4g+3), each output
   lane and each input lane, send a 3×3 filter on the `wl_*` port with its
   output channel's exponents. One filter is taken per cycle. It is
   transformed and requantized on chip and written to the filter store two
   cycles later. Up to 128 groups are held, i.e. 512 input channels.
2. **Stream tiles.** Set `cfg_groups` to the number of groups. For each
   output tile position, send the 9×9 input tiles of groups 0, 1, …,
   `cfg_groups − 1` on consecutive handshakes. Neighbouring positions'
   input tiles overlap by two rows or columns. The host cuts them, padding
   included.
3. **Collect.** `y_valid` rises 5 cycles after the last group's tile is
   accepted. `y[o]` is then the 7×7 tile for output lane o, times 36.

The controller counts groups, addresses the filter store and tags the
first and last tile of each output tile. It also arbitrates between the
two modes:

* A filter load is accepted only between output tiles, and only once no
  tile is left in the 5-stage pipeline. While a load waits or runs, tiles
  are held off (`stall`).
* A tile is accepted only after every filter write in flight has reached
  the store.

So a tile never sees a half-loaded filter set. A continuous burst of loads
is accepted one per cycle. `cfg_groups` and `cfg_shx` must not change
while `busy` is high. Both streams use valid/ready handshakes. A transfer
happens on a clock edge where both are high.

### Top-level ports (`sfc_accel`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_groups` | in | 8 | input-channel groups per output tile (1…128) |
| `cfg_shx` | in | 3 × [12][12] | activation scale exponents per frequency |
| `tile_valid` / `tile_ready` | in / out | 1 | tile handshake |
| `tile_x` | in | 8 × [4][9][9] | one input tile of 4 input channels |
| `wl_valid` / `wl_ready` | in / out | 1 | filter-load handshake |
| `wl_oc`, `wl_ic`, `wl_grp` | in | 2, 2, 7 | lane and group of the filter |
| `wl_f` | in | 8 × [3][3] | spatial filter |
| `wl_shw` | in | 3 × [12][12] | filter scale exponents of output lane `wl_oc` |
| `y_valid`, `y` | out | 1, 40 × [4][7][7] | output tiles, 36 × convolution |
| `stall`, `busy` | out | 1 | a tile is held back; work in flight |
| `sat_x`, `sat_w` | out | 1 | clipping in activation / filter requantization |

Parameters: `ICP = 4`, `OCP = 4` (lane counts) and `GROUPS = 128` (filter
store depth). ICP and OCP must be powers of two, because the lane selects
are `$clog2` wide.

## Throughput

One tile per cycle means 4·4·49 outputs, each worth 9 multiply-accumulates,
or 14 112 operations per cycle. At the 200 MHz of the reference FPGA
implementation that is 2.8 TOPS peak. The published 2129 GOPs corresponds
to about 75 % of this peak. The multiplier count is 4·4·144 = 2304 int8
multipliers.

## How this relates to the published design

Follows the algorithm and its FPGA evaluation:

* the SFC-6(7×7, 3×3) matrices
* additions-only transforms
* int8 operands in space and in the transform domain
* per-frequency activation scales and per-(output-channel, frequency)
  filter scales
* 4×4×7×7 parallelism
* a fully pipelined datapath

This design's own choices (the published description is silent on them):

* power-of-two scales with round-half-up and saturation
* filter transform on chip at load time
* a filter store of 128 groups
* group-major tile order and transform-domain accumulation over groups
* valid/ready handshakes and the load/compute arbitration
* all widths past int8
* the register placement (5 stages)
* asynchronous reset of control state only

Known departures and omissions:

* **144, not 132, multipliers per lane pair.** With Hermitian symmetry
  fully exploited, the algorithm needs only 132 products. The 1056-DSP
  figure of the FPGA design assumes this. The reduced matrices are not
  published, so the listed 144-product form is used.
* **No DSP packing.** Two int8 multiplications per DSP slice is a
  vendor-specific mapping left to synthesis.
* **No host side.** Off-chip memory, feature-map tiling, padding and
  output requantization to int8 for the next layer are outside this RTL.
* **Activations enter in the spatial domain.** The accuracy study suggests
  keeping activations in the transform domain in external memory, to avoid
  requantizing twice. Here every tile is transformed on chip.
* **int8 only.** The accuracy study also quantizes the transform domain to
  6 and 4 bits. These values run on the int8 datapath unchanged, but
  without any hardware saving.
* Only the 3×3 kernel variant is built. The 5×5 and 7×7 variants and the
  nested large-kernel scheme need other matrices.

## Files

`rtl/` — one module or package per file:

| file | contents |
|---|---|
| `sfc_pkg.sv` | matrices, tile sizes, widths |
| `sfc_input_transform.sv` | BᵀXB |
| `sfc_filter_transform.sv` | GFGᵀ |
| `sfc_freq_quant.sv` | per-frequency requantizer |
| `sfc_weight_buffer.sv` | transform-domain filter store |
| `sfc_ewmul.sv` | multiplier array of one output lane |
| `sfc_accumulator.sv` | group accumulation |
| `sfc_output_transform.sv` | A6ᵀMA6 |
| `sfc_controller.sv` | sequencing, mode switch, stalls |
| `sfc_accel.sv` | top |

`tb/` — each testbench prints `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_sfc_input_transform` | the 12×12 result against BᵀXB, and end to end against 36× direct correlation; 1-cycle latency |
| `tb_sfc_filter_transform` | the result against GFGᵀ, and end to end against 36× direct correlation; 1-cycle latency |
| `tb_sfc_output_transform` | transform-domain products summed over channels against 36× direct correlation; full-range 32-bit inputs against A6ᵀMA6 |
| `tb_sfc_freq_quant` | rounding, clipping and the `sat` flag against integer division |
| `tb_sfc_weight_buffer` | every lane and group written and read back; scale exponents |
| `tb_sfc_ewmul` | shifted sums of products against 64-bit arithmetic |
| `tb_sfc_accumulator` | first/last tagging and wrapped 32-bit sums |
| `tb_sfc_controller` | every cycle, the handshake rules against a software model |
| `tb_sfc_accel` | end to end at default parameters, in three runs (below) |
| `tb_sfc_vgg_layer` | a 14×14 map with 512 input channels and 4 filters, the shape of VGG-16's last layers, through host-side tiling with padding, against a direct convolution of the whole map |

The three runs of `tb_sfc_accel`:

1. An exact 12-channel run, checked against direct convolution.
2. A full-range run with random exponents, checked against a bit-exact
   model of the quantized datapath.
3. A 512-channel (128-group) run.

It also counts the stalls, mode switches, clipping events and
multi-group accumulations it triggers. `sfc_ref_pkg.sv` holds the
software reference shared by the testbenches.

Simulate with Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sfc_accel \
    rtl/sfc_pkg.sv tb/sfc_ref_pkg.sv rtl/sfc_*.sv tb/tb_sfc_accel.sv -Mdir obj
./obj/Vtb_sfc_accel
```

List `rtl/sfc_pkg.sv` once, ahead of the other files. Leave
`tb/sfc_ref_pkg.sv` out for testbenches that do not import it. Building
the top-level testbenches takes about a minute and a half, because the
multiplier array unrolls into 2304 multiplies. The runs themselves take
well under a second.
