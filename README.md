# Streaming local Laplacian filter units

Local Laplacian filtering (Paris, Hasinoff and Kautz) is an edge-aware way to
enhance or smooth detail and to compress or expand tone. It does not filter the
image directly. It builds an output Laplacian pyramid one coefficient at a time.
For every pixel `g` of the input's Gaussian pyramid, it takes the neighbourhood
of that pixel in the full-resolution image and passes each pixel `i` of it
through a remapping curve centred on `g`. It then builds a small Gaussian and
Laplacian pyramid of the remapped patch and keeps only the one Laplacian
coefficient that sits at `g`'s position. Collapsing the output pyramid gives the
filtered image.

That is one small pyramid per pyramid pixel, so the cost is large. It is also
very regular, which suits hardware. This RTL implements the FPGA side of the
accelerator described in "Accelerating Local Laplacian Filters on FPGAs"
(Khandelwal, Choudhury, Shrivastava, Purini):

* The host builds the Gaussian pyramid. It cuts out the neighbourhood
  ("sub-image") of every pixel and streams it to the FPGA one 32-pixel column
  at a time.
* The FPGA remaps each sub-image, builds its pyramid and returns one 16-bit
  coefficient per sub-image.
* The host collects the coefficients and collapses the pyramid.

The main ideas are these:

1. **No multipliers.** The 3x3 Gaussian is replaced by a power-of-two kernel.
   A filter engine of shifts and adds then handles a whole column per clock.
2. **No arithmetic in the remap.** The remapping curves depend only on
   `|i-g|`, which lies in `0..255`, so they are tables.
3. **Parallel at every level.** The design works on three colour channels at
   once. Within a channel it computes three pyramid levels at once. Within a
   unit, all 32 lanes of a column are processed together and the stages are
   pipelined.

## System organisation

```
 host: Gaussian pyramid, sub-image cutting          host: collapse
        |  9 streams: 256-bit column + g + phase          ^  9 streams: 16-bit coefficient
        v                                                 |
 +------------------------------ llf_accel ---------------------------+
 |  channel R:  lpu DEPTH=1 (L1)   lpu DEPTH=2 (L2)   lpu DEPTH=3 (L3) |
 |  channel G:  lpu L1             lpu L2             lpu L3           |
 |  channel B:  lpu L1             lpu L2             lpu L3           |
 |  cfg port (remap tables, sigma) shared by all nine                  |
 +---------------------------------------------------------------------+
```

The top module `llf_accel` holds nine level processing units (`lpu`). Each
unit has its own input stream and its own output stream. No unit ever waits
for another, and there is no back-pressure anywhere: a unit accepts a column
whenever one is offered.

Unit `Ln` does `n` rounds of filtering and downsampling and produces
coefficients of output level `n-1`:

| Unit | Level | Pixels it serves, relative to level 0 |
|------|-------|---------------------------------------|
| L1   | 0     | 1                                     |
| L2   | 1     | 1/4                                   |
| L3   | 2     | 1/16                                  |

L1 therefore has by far the most work. The host keeps the top Gaussian level
(`G3`) as the residual of the pyramid.

The PCIe link and the memory controllers that would feed the streams are
outside this RTL. The streams are plain ports of `llf_accel`.

## The stream a unit receives

One beat carries one column of the sub-image:

| signal           | width   | meaning |
|------------------|---------|---------|
| `in_valid`       | 1       | a column is present this cycle |
| `in_first`       | 1       | the column is column 0 of a new sub-image |
| `in_pix`         | 32 x 8  | the 32 pixels of the column; bits `8y+7:8y` are row `y`, row 0 on top |
| `in_g`           | 8       | the Gaussian pixel `g` of this sub-image, sampled when `in_first` is high |
| `in_phase`       | 2       | the phase of the pixel of interest (see below), sampled with `in_first` |

A sub-image is 32 x 32 full-resolution pixels, sent as exactly 32 columns.
An assertion in `lpu` checks the length. Columns may
arrive with idle cycles between them. The next sub-image may start on the
cycle after the last column of the previous one. When the unit has seen enough
columns, it pulses `out_valid` once with `out_coef`, a signed 16-bit
coefficient.

## Geometry: which pixel the coefficient belongs to

This part is easy to get wrong when writing the host software.

Every filter in the datapath is a *valid* convolution: `n` lanes or columns in,
`n-2` out. Output `j` is centred on input `j+1`. The downsampler keeps samples
`0, 2, 4, ...`. So sample `q` of level `k+1` lies over sample `2q+1` of
level `k`. The lane counts inside a unit follow from that:

| stage                      | L1 | L2 | L3 |
|----------------------------|----|----|----|
| remapped sub-image (level 0) | 32 | 32 | 32 |
| level 1                    | 15 | 15 | 15 |
| level 2                    |  - |  7 |  7 |
| level 3                    |  - |  - |  3 |
| coarsest level upsampled   | 30 | 14 |  6 |
| after the last filter      | 28 | 12 |  4 |

The pixel of interest is at full-resolution row and column 15. Mapped to level
`n-1` of unit `Ln`, that is index `P` = 15, 7 or 3 (`llf_pkg::level_center`).
`P` is odd, so it lies on a sample of the next coarser level.

The coefficient is

```
L = G_{n-1}[P+ph_r][P+ph_c] - expand(G_n)[P+ph_r][P+ph_c]
```

Here `ph_r = in_phase[0]` and `ph_c = in_phase[1]`. `expand` is the upsampler
followed by the filter.

**Why the phase matters.** A level-`(n-1)` pixel can lie on a coarse sample or
between two coarse samples. Its expanded value is computed differently in the
two cases. The sub-image's own coarse grid must therefore line up with the
image's coarse grid. Take pixel `q` (row or column, counted at level `n-1`):

* set the phase to `q mod 2 == 1 ? 0 : 1`;
* let `j = P + phase`;
* cut the sub-image from full-resolution offset `2^(n-1) * (q - j)` in that
  direction.

With this rule, and the remap set to the identity, the unit's output equals
the ordinary Laplacian pyramid `L_k = G_k - expand(G_{k+1})` of the image,
coefficient for coefficient. The image testbench checks exactly this.
Sub-images that would reach beyond the image border need padding on the host
side. How to pad is the host's choice.

## Level processing unit (`lpu`)

```
in -> R -> [CE -> D] x DEPTH -> U -> CE -> (G_{DEPTH-1} at P) - (result at P) -> out_coef
              ^ the output of the last-but-one D (or of R for DEPTH 1) is also
                tapped for G_{DEPTH-1}
```

The chain of stages follows the paper's block diagram. The final subtraction,
which that diagram does not draw, comes from the definition
`L_l = G_l - upsample(G_{l+1})`.

* Each stage raises a `valid`/`first` pair with its data and never stalls.
* A downsampler emits at most every other cycle. This is what lets the
  upsampler emit two columns (data, then zeros) for each input column.
* A column counter on the level-`(DEPTH-1)` stream picks out `G` at the pixel
  of interest.
* A second counter on the last filter's stream picks out the expanded value
  and produces the output.
* The phase is carried alongside its sub-image from stage to stage. The next
  sub-image can be in the front of the unit while the current one is still in
  the back. This is safe as long as sub-images are 32 columns long.

**Latency**, from the beat of column 0 to `out_valid` with no gaps:

| unit | phase 0 | column phase 1 |
|------|---------|----------------|
| L1   | 23      | 24             |
| L2   | 27      | 30             |
| L3   | 33      | 40             |

The row phase does not change the latency.

**Throughput** is one coefficient per 32 cycles per unit at one column per
clock. The unit is then fully used.

**Activity counters.** `perf_active` counts cycles in which any stage holds a
column. `perf_idle` counts the other cycles, in which the unit waits for data.
`perf_clear` zeroes both. In `tb_lpu`, 16 back-to-back sub-images plus a
60-cycle drain give these active fractions:

| unit | one column per cycle (256 bits/cycle) | one column per 8 cycles (32 bits/cycle) |
|------|----------------------------------------|------------------------------------------|
| L1   | 90.4 %                                 | 56.5 %                                   |
| L2   | 90.7 %                                 | 52.8 %                                   |
| L3   | 91.1 %                                 | 50.6 %                                   |

The paper reports 92.3 % and 44.9 % for L3 at these two bandwidths. Its
definition of "busy" is not given, so the closeness should not be read as a
match.

## Convolution engine (`conv_engine`, `sau`)

The kernel, with scale factor 4, is

```
1/16 1/8 1/16
1/8  1/4 1/8
1/16 1/8 1/16
```

Its middle column is twice its first column. Its third column is half its
middle column. The engine works on a stream of columns and uses this in three
pipeline stages:

* **Stage 1.** A bank of `N-2` shift-and-accumulate units (`sau`) filters the
  incoming column vertically:
  `X1[i] = (X0[i-1]>>4) + (X0[i]>>3) + (X0[i+1]>>4)`.
* **Stage 2.** `X2 = X1 << 1`, taken from the previous column.
* **Stage 3.** `X3 = X2 >> 1`, taken from the column before that.

The output column is `X1 + X2 + X3`. It is the 3x3 filter centred on the middle
one of the last three input columns.

* The stage registers move only on valid beats, so gaps in the stream do no
  harm.
* The history is cleared at `in_first`.
* The first output appears one cycle after the third column of a sub-image.

The shifts truncate, as in the paper's equations. The filter therefore loses a
little brightness: a flat 255 comes out as 244. The testbench reference does
the same.

Each unit has `DEPTH + 1` engines:

* The engines in the Gaussian chain are 8 bits wide.
* The engine after the upsampler is 10 bits wide, because of the x4 gain
  described below.

Across the nine units this is 495 shift-and-accumulate lanes.

## Remap unit (`remap_unit`)

For `d = |i - g|`, the unit does the following:

* If `d <= sigma`, the pixel is detail. The result is `g + sign(i-g) * Td[d]`,
  with `Td[d] = sigma * f_d(d/sigma)`.
* Otherwise the pixel is an edge. The result is `g + sign(i-g) * Te[d]`, with
  `Te[d] = f_e(d - sigma) + sigma`.
* The result is saturated to `0..255`, and `i = g` gives `g`.

`Td`, `Te` and `sigma` are written through the `cfg` port. `cfg` is a
`cfg_wr_t` struct: `we`, `sel` (`CFG_DETAIL`, `CFG_EDGE`, `CFG_SIGMA`), `addr`
(= `d`) and `data`. Tables are only read, never computed, on chip.

Each of the 32 lanes has its own read of the tables. The result is registered,
so the unit adds one cycle of latency. `out_edge` reports which lanes took the
edge branch.

The testbenches use the usual curves on a 0..255 scale:

* `f_d(x) = x^alpha`, so `Td[d] = s * (d/s)^alpha` with `s = 255 * sigma`;
* `f_e(a) = beta * a`, so `Te[d] = beta * (d - s) + s`;
* both are truncated to integers and clipped to 255.

Table entries are 8 bits.

## Downsampler and upsampler

* **`downsampler`** keeps lanes `0, 2, 4, ...` and columns `0, 2, 4, ...` of
  each sub-image. One cycle of latency.
* **`upsampler`** puts input lane `k` on output lane `2k`, multiplied by 4, and
  sets odd lanes to zero. After every data column it emits an all-zero column
  on the next cycle. The input must leave a gap cycle between beats. An
  assertion checks this, and the downsampler in front always satisfies it.

## Departures from the paper and own choices

Followed from the paper:

* 3 channels x 3 units;
* the stage chains of L1, L2 and L3;
* 256-bit input and 16-bit output per unit;
* 8-bit pixels;
* the kernel with scale factor 4 and its three-stage shift structure;
* remap tables indexed by `|i-g|` with the `sigma` threshold;
* zero-insertion upsampling and alternate-sample downsampling;
* active and waiting cycle counts per unit.

Chosen here, because the paper leaves them open:

* **Stream framing.** The `valid`/`first` protocol, `g` and the phase sent with
  column 0, and no back-pressure.
* **Sub-image size.** 32 x 32 with the pixel of interest at 15. The 32 rows
  follow from the 256-bit stream; square is a choice.
* **Phase input.** The paper does not say how pixels between coarse samples
  are handled.
* **Upsampler gain of 4.** The kernel sums to 1. Without the gain, zero
  insertion would leave the expanded image at a quarter of its level. This is
  the usual Burt-Adelson expand step.
* **Final subtraction** `G - expand(G)` inside the unit.
* **Arithmetic details.** Valid (unpadded) filtering, 8-bit table entries,
  saturation of the remapped value, and truncating shifts everywhere.
* **Reset.** Asynchronous active-low `rst_n`. Table contents are not reset.
* **Level naming.** The paper numbers the levels both 1..3 and 0..2. Here
  L1..L3 are the units and 0..2 the output levels they produce.

Known differences:

* **Convolution count.** The paper quotes a peak of 783 3x3 convolutions per
  cycle. This design has 495 filter lanes (165 per channel): L1 30 + 28,
  L2 30 + 13 + 12, L3 30 + 13 + 5 + 4. The paper's count cannot be derived from
  its description.
* **Timing.** The paper's latencies (534 ms for L1 on a 1-megapixel image)
  were measured on its board, with its host link feeding the units. Here each
  unit needs exactly 32 cycles per coefficient when fed at full rate. That is
  0.34 s for the L1 unit on a 1-megapixel image at 100 MHz. No timing or
  resource figure of this RTL has been measured on an FPGA.
* **Not included.** The PCIe interface, the memory controllers, and the host
  software (pyramid construction, sub-image cutting, collapse).
* **Image quality.** The paper compares its output images with a software
  implementation by PSNR. That needs the host's collapse step and a
  floating-point reference, and is not repeated here. The checks here are
  bit-exact against the integer reference model in `tb/llf_ref_pkg.sv`. The
  largest image simulated is 64x64 per channel.
* **No replication.** The paper also explores replicating L1 up to six times.
  The top has no parameter for that.

## Files

`rtl/`:

| file | contents |
|------|----------|
| `llf_pkg.sv` | constants, configuration struct, lane-count and centre functions |
| `sau.sv` | shift-and-accumulate unit |
| `conv_engine.sv` | streaming 3x3 filter |
| `remap_unit.sv` | table-driven detail/edge remap |
| `downsampler.sv` | keep-even downsampler |
| `upsampler.sv` | zero-insertion upsampler with x4 gain |
| `lpu.sv` | one level processing unit; parameter `DEPTH` = 1, 2, 3 |
| `llf_accel.sv` | top: 3 x 3 units |

`tb/`:

| file | what it checks |
|------|----------------|
| `llf_ref_pkg.sv` | reference model on whole arrays: remap, filter, down/upsample, coefficient |
| `tb_sau.sv` | the shift-and-accumulate unit |
| `tb_remap_unit.sv` | the remap unit |
| `tb_conv_engine.sv` | the engine: values and output timing |
| `tb_downsampler.sv` | the downsampler |
| `tb_upsampler.sv` | the upsampler |
| `tb_lpu.sv` | L1, L2, L3 side by side: coefficients, per-phase latency, rate, activity counters |
| `tb_llf_accel.sv` | all nine units at default size under several remap settings and input rates |
| `tb_llf_image.sv` | a 64x64 three-channel image; the host side is modelled in the testbench |

More on the two system-level testbenches:

* **`tb_llf_accel`** runs the nine units concurrently, at mixed input rates,
  with table rewrites between phases. It also counts detail remaps, edge
  remaps, saturations, waiting cycles, back-to-back sub-images, table
  rewrites, all nine units busy in one cycle, and simultaneous outputs. Each
  of these must occur at least once.
* **`tb_llf_image`** streams every pixel of levels 0 to 2 whose sub-image fits
  in the image: 1156, 324 and 100 per channel. With the identity remap, every
  coefficient must equal the ordinary Laplacian pyramid. With detail
  enhancement (alpha 0.25, beta 1) and with tone mapping (alpha 1, beta 0),
  both at sigma 0.2, every coefficient must equal the reference model.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

## Simulating

With Verilator 5, for example for the image test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_llf_image rtl/llf_pkg.sv tb/llf_ref_pkg.sv tb/tb_llf_image.sv
./obj_dir/Vtb_llf_image
```

Replace the top module and file for the other testbenches. The package files
must come first. Every testbench runs in a few seconds. Pixels are 2-state in
this flow, so every register that is read after reset is reset or written
first. The table memories must be loaded before use.

To change the design:

* Stream width, pixel width, filter scale, upsampler gain and the centre
  position are in `llf_pkg`.
* The lane counts and centre indices inside `lpu` are derived from these.
* `lpu #(.DEPTH(4))` would give a fourth level. Its coarsest level would be a
  single lane, so the sub-image would have to grow.
