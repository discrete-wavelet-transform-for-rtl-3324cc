# Haar-wavelet background segmentation for serial-crystallography detector streams

In a serial-crystallography diffraction image the background (scatter from the
liquid jet and the air) is smooth and changes slowly across the detector, while
the signal of interest, the Bragg peaks, is sharp and only a few pixels wide. A
multi-level 2D discrete wavelet transform (DWT) separates the two: after J
levels of decomposition the smooth part ends up in the coarsest approximation
subband LL_J, and the peaks end up in the detail subbands. Setting LL_J to zero
and inverting the transform gives an estimate of the diffraction signal alone;
doing the opposite (keep LL_J, zero every detail) gives the background
estimate. Keeping everything returns the input image, which is useful as a
check. A single global threshold on the diffraction estimate then marks the
peak pixels, which a downstream stage can use for peak finding, hit finding or
zero suppression.

This RTL implements that method in hardware for the readout of the ePixUHR
detector, following the publication *Discrete Wavelet Transform for Serial
X-ray Crystallography Image Segmentation* (Doering et al.). The method
uses the Haar wavelet (the shortest possible filter), J = 4 levels and a
threshold of 170 photons, and those are the defaults here. The detector has
6 readout ASICs of 192 x 168 pixels. Each ASIC sends its image as 8 parallel
streams of 24 columns, so the design is an array of 48 independent cores, each
segmenting a 24 x 168 tile.

The publication gives the algorithm and a resource study of HLS filter cores on
an FPGA, but no RTL. The arithmetic format, the way the inverse transform is
scheduled, the buffering scheme, the handshakes and the handling of odd sizes
are this design's own choices. Each is pointed out below.

## What one core computes

For the 2x2 pixel block `[a b; c d]` (a top-left, d bottom-right), one Haar
analysis level produces

| subband | formula (this RTL) | meaning |
|---|---|---|
| LL | a + b + c + d | approximation (low-pass both ways) |
| H  | a + b - c - d | horizontal detail (the publication's LH): high-pass vertically |
| V  | a - b + c - d | vertical detail (HL): high-pass horizontally |
| D  | a - b - c + d | diagonal detail (HH) |

These are the Haar filters h = [1, 1] and g = [1, -1] with their 1/sqrt(2)
normalisation left out, so all arithmetic is integer and exact. The orthonormal
coefficients are these values divided by 2 at every level. Level j+1 repeats
the step on the LL plane of level j. The inverse step is

    pixel(a) = (LL + H + V + D) / 4,  pixel(b) = (LL + H - V - D) / 4,
    pixel(c) = (LL - H + V - D) / 4,  pixel(d) = (LL - H - V + D) / 4

The sign of H is + in the upper row and - in the lower row. The sign of V is +
in the left column and - in the right column. The sign of D is the product of
the two.

A useful way to read the result: for the Haar wavelet, zeroing LL_J and
reconstructing is the same as subtracting from every pixel the mean of its
2^J x 2^J block (16 x 16 for J = 4). The background estimate is that block
mean. Where a block is padded, the duplicated row or column counts twice in
that mean. The hardware does not use this shortcut. It runs the filter bank,
which keeps every level's detail subbands available in the same data path.

### Odd sizes and tile edges

A 24 x 168 tile shrinks to 12 x 84, 6 x 42, 3 x 21 and finally 2 x 11. Where a
plane has an odd number of rows or columns, the last row or column is paired
with itself (symmetric extension, as the common software wavelet packages do).
For such a pair the differences are zero, and the reconstruction of the real
pixels is still exact.

Each core sees only its own 24 columns. A level-j Haar block covers 2^j x 2^j
pixels. Since 24 is a multiple of 8, the blocks of levels 1 to 3 line up with
the stream boundaries exactly as they would in a transform of the whole
192-column ASIC image. A level-4 block is 16 columns wide, which 24 is not a
multiple of. In each tile, the level-4 blocks cover columns 0-15 and then 16-23
alone, padded as above. A whole-image transform would group the columns
differently. So at J = 4 the background estimate near a stream edge is taken
over a narrower block, and the result differs from a single-image transform
there. The publication states that neighbouring columns must be
shared between partitions, and gives 3 columns per side for a 7 x 7 kernel. That
rule comes from the larger generic kernels of its resource study and is not
implemented here.

## Architecture

```
 dwt_seg_top  (N_ASICS x STREAMS_PER_ASIC = 48 cores, shared cfg_mode / cfg_threshold)
 └─ dwt_seg_core  (one 24 x 168 tile)
      pixel ──► haar_analysis_level 1 ─LL─► level 2 ─LL─► level 3 ─LL─► level 4
                       │ H,V,D              │ H,V,D       │ H,V,D       │ LL,H,V,D
                       ▼                    ▼             ▼             ▼
                 subband_buffer 1     buffer 2      buffer 3      buffer 4   (2 banks each)
                       │                    │             │             │
      reconstruction   ▼                    ▼             ▼             ▼
      sequencer ──► Y4 = 0 or LL4 ─► synth stage 4 ─► stage 3 ─► stage 2 ─► stage 1 ─► threshold_binarizer ─► out
```

### Analysis: `haar_analysis_level`

Each level applies the 2D filter separably. First comes the row pass: the pair
sum s = a + b and difference t = a - b. The row-pass result of an even row is
kept in a line buffer of ceil(W/2) entries. When the row below arrives, the
column pass combines the two: LL = s_top + s_bot, H = s_top - s_bot,
V = t_top + t_bot and D = t_top - t_bot. One coefficient set leaves one cycle
after the pixel that completes its block.

Level 1 takes one pixel per cycle. Level j takes the LL stream of level j-1,
which carries a quarter as many samples, so the chain keeps up with the pixel
rate without stalling. Every level has its own adders. The publication notes
that the lower rate of the deeper levels would allow their arithmetic to be
shared. That is not done here, because the Haar adders are tiny.

Coefficients grow by two bits per level. The core stores all of them at the
width of the last level: PIX_W + 2J = 24 bits.

### Subband storage: `subband_buffer`

The detail subbands of every level must be kept until the whole frame has
been analysed, while LL moves on to the next level. Each level has a buffer
with one word per coefficient position: {H, V, D}, or {LL, H, V, D} at the
last level. Each buffer has two banks. The analysis of frame n+1 fills one bank
while frame n is reconstructed from the other. Reads are synchronous, with a
latency of one cycle, so the buffers map onto block RAM. For the default tile,
one bank of one core holds 1008 + 252 + 63 + 22 = 1345 words.

### Reconstruction: sequencer, `haar_synthesis_stage`, `threshold_binarizer`

This is the least obvious part of the design. The two-tap Haar synthesis filter
means that an output pixel (r, c) depends on exactly one coefficient set per
level: the one at (r >> j, c >> j) in level j. The sign pattern is given by bit
j-1 of r and of c. So instead of rebuilding LL_3, then LL_2 and so on as whole
planes, the core walks the output pixels in raster order, one per cycle. For
each pixel it fetches its J ancestors and applies the J inverse steps to that
pixel alone. The result is identical to the level-by-level inverse transform.
No intermediate plane is stored, and the output comes out at full rate.

Division by 4 at each level is avoided by scaling. The stage for level j
receives Y_j = 4^(J-j) * LL_j and computes

    Y_(j-1) = Y_j + 4^(J-j) * (sH*H_j + sV*V_j + sD*D_j)

This costs one shift and three additions. It starts from Y_J = 0 in diffraction
mode, or from Y_J = LL_J in background mode (the details are then skipped) and
in full mode (nothing is skipped). At
the end, Y_0 equals 4^J times the reconstructed pixel, exactly. `out_pixel` is
therefore a signed fixed-point value with 2J = 8 fraction bits and
PIX_W + 2J + 2 = 26 bits in total.

The buffer reads are staggered so that each coefficient arrives when its pixel
reaches its stage:

| cycle after issue | action |
|---|---|
| 0 | sequencer issues (r, c); level-4 buffer read |
| 1 | Y_4 formed from LL_4 or 0; stage 4 adds level 4; level-3 read |
| 2 | stage 3 adds level 3; level-2 read |
| 3 | stage 2 adds level 2; level-1 read |
| 4 | stage 1 adds level 1 |
| 5 | Y_0 registered by the binariser with its mask bit |
| 6 | `out_valid`, `out_pixel`, `out_mask` |

`threshold_binarizer` compares Y_0 with `cfg_threshold << 2J`. A pixel counts as
diffraction when its value is at least the threshold, in photons. Whether the
comparison includes the threshold value itself is not specified in the
publication.

### Frame flow and timing

- Frames are not delimited by a signal. A core counts TILE_W x TILE_H accepted
  pixels.
- The last level finishes J cycles after the last pixel of a frame. The
  reconstruction starts one cycle later, and the first output pixel appears
  2J + 3 = 11 cycles after the last input pixel was accepted.
- The frame then leaves as 4032 consecutive output pixels, with `out_first` and
  `out_last` marking its ends.
- A bank is released when its last level-1 read is done. When frames arrive
  back to back, frame n+2 finds its bank still being read for a few cycles,
  and `in_ready` drops. From the third frame on, this costs about 8 cycles
  per 4032-pixel frame (0.2%).
- `cfg_mode` is sampled when a frame's reconstruction starts and travels with
  each pixel, so changing it never corrupts a frame in flight.
- `cfg_threshold` is applied pixel by pixel.

### Interface of `dwt_seg_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_mode` | in | 2 | `MODE_SIGNAL` (LL_J zeroed, diffraction estimate), `MODE_BACKGROUND` (details zeroed) or `MODE_FULL` (nothing zeroed; code 3 acts the same) |
| `cfg_threshold` | in | 16 | global threshold in photons (the publication's operating point: 170) |
| `in_valid[s]`, `in_ready[s]` | in / out | 48 | per-stream handshake; a pixel moves when both are high |
| `in_pixel[s]` | in | 48 x 16 | signed pixel, dark-subtracted and gain-corrected, raster order within the 24-column tile |
| `out_valid[s]` | out | 48 | one output pixel; no back-pressure |
| `out_pixel[s]` | out | 48 x 26 | reconstructed pixel, 8 fraction bits |
| `out_mask[s]` | out | 48 | pixel >= threshold |
| `out_first[s]`, `out_last[s]` | out | 48 | first and last pixel of a frame |

The 48 cores are fully independent, so the streams may run out of step. Input
pixels must already be corrected for dark offset and gain. The publication
assumes this is done upstream, and the correction is not part of this RTL.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_ASICS` | 6 | detector: 6 ASICs |
| `STREAMS_PER_ASIC` | 8 | 8 output streams per ASIC |
| `TILE_W` x `TILE_H` | 24 x 168 | one stream of a 192 x 168 ASIC |
| `LEVELS` (J) | 4 | recommended decomposition depth |
| threshold | 170 photons | operating point (`dwt_pkg::DEF_THRESHOLD`), applied through `cfg_threshold` |
| `PIX_W` | 16 | own choice (the FPGA study used float16) |

All sizes follow from these parameters. Other tile sizes and depths work: the
testbenches also use an odd 7 x 5 level and depths 1 to 5.

## Size

Coarse synthesis of the default top (48 cores) gives about 9.39 Mbit of
inferred memory, 34,896 flip-flop bits and 16.8 k word-level cells. One core
has 195,590 memory bits and 727 flip-flop bits. The publication estimates about
260 block RAMs of 36 kb (9.36 Mbit) for the subband storage of the full design,
which is close. The two agree for a simple reason. One bank of one core holds
1323 detail words of 72 bits and 22 top-level words of 96 bits, 97,368 bits in
all, which is about 1.5 times a 4032-pixel image at 16 bits. Two banks therefore
equal the three images of subband data the publication budgets for. There are no multipliers: the Haar filters are additions and
shifts only.

The core takes one pixel per cycle. With back-to-back frames, a frame takes
4040 cycles: 4032 pixels plus the 8-cycle stall. At the 200 MHz clock of the
publication's FPGA study, that is 49.5 kframes/s per core. This is enough for
the ePixUHR at 35 kfps, which allows 5714 cycles per frame; `tb_dwt_seg_core`
measures the period and checks it. It is not enough for the planned 100 kfps
upgrade (2000 cycles per frame), which would need about 404 MHz or two pixels
per cycle.

## Differences from the publication

- **Integer arithmetic.** The publication's HLS cores use float16 or float32.
  Here the filters are integers and the result is exact in fixed point.
- **Haar kernel only.** The resource figures in the publication (5 x 5 and
  7 x 7, conv2D and separable) belong to generic kernels. This design
  implements the Haar (db1) transform that the method selects, so there are no
  multipliers or DSP blocks.
- **No overlap columns between partitions.** See "Odd sizes and tile edges".
- **Per-pixel inverse transform.** This is mathematically the same as the
  level-by-level inverse, but scheduled as a per-pixel pipeline.
- **Frame-level double banking.** The reconstruction of a frame starts only
  after its analysis is complete. The publication says only that the detail
  subbands must be buffered.
- **No arithmetic sharing between levels.**

Not included:

- the detector ASIC;
- the dark and gain correction;
- the peakfinder8 stage that the publication suggests as a second step after
  the DWT pre-selection.

## Files

| file | contents |
|---|---|
| `rtl/dwt_pkg.sv` | defaults, mode enum, size helper functions |
| `rtl/haar_analysis_level.sv` | one analysis level |
| `rtl/subband_buffer.sv` | two-bank coefficient store |
| `rtl/haar_synthesis_stage.sv` | one inverse level, per pixel |
| `rtl/threshold_binarizer.sv` | global threshold |
| `rtl/dwt_seg_core.sv` | one tile: analysis chain, buffers, sequencer, synthesis chain |
| `rtl/dwt_seg_top.sv` | 48-core array |
| `tb/haar_ref_pkg.sv` | floating-point reference model (orthonormal Haar, level by level) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the depth sweep `tb_dwt_seg_depths` |

## Verification

Every testbench checks its module against values computed independently in the
testbench and prints `TB_RESULT checks=N failures=M`:

- **Analysis levels** (`tb_haar_analysis_level`): 7 x 5 and 24 x 168 levels
  are checked block by block against direct sums, including coefficient timing.
- **Subband buffer** (`tb_subband_buffer`): read-back of random words from both
  banks, including concurrent write and read.
- **Synthesis stages** (`tb_haar_synthesis_stage`): each stage is checked by
  reconstructing random 2x2 blocks.
- **Threshold** (`tb_threshold_binarizer`): values on and around the threshold.
- **One core** (`tb_dwt_seg_core`): four synthetic frames at the default size.
  It covers back-to-back frames with input stall, all three modes, input gaps
  and another threshold. Every pixel must match the floating-point model
  exactly. It also checks the 11-cycle latency and contiguous output.
- **Depth sweep** (`tb_dwt_seg_depths`): five cores at the default tile, with
  J = 1 to 5. Each gets one diffraction and one background frame, checked
  against the model.
- **Whole design** (`tb_dwt_seg_top`): the full 48-core top at its default
  parameters. Each stream gets four frames, about 774,000 pixels in all, and
  every pixel is checked against the model. The test counts stalls, frames in
  each of the three modes, above-threshold pixels, input gaps and padded
  levels.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dwt_pkg.sv tb/haar_ref_pkg.sv tb/tb_dwt_seg_top.sv --top-module tb_dwt_seg_top
./obj_dir/Vtb_dwt_seg_top
```

The full-design test takes well under a minute, including the build. The
synthetic images are a smooth ramp-and-bowl background plus random peaks and
noise. They are generated inside the testbenches, so no data files are needed.
