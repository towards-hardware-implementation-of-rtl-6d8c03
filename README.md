# A parallel Color Structure Descriptor extractor

The MPEG-7 Color Structure Descriptor (CSD) describes an image by a
histogram. The histogram does not count pixels. It counts positions of a small
square window, the *structuring element*, that contain a colour. An 8x8 element
is slid over the image. At every position, each colour that occurs inside it
adds one to its bin, however many pixels of that colour the window holds. The
result therefore reflects how colours are spread out in the image, not just how
much of each colour there is. That is why the CSD retrieves images better than
a plain colour histogram.

Done naively, this costs a 64-pixel scan at every position of a frame. The
design here gets around that with two ideas:

1. **Incremental windows.** Per colour, it keeps the number of pixels inside
   the element. When the element moves one column, only the column leaving (-1)
   and the column entering (+1) are touched. A colour is present while its
   count is non-zero.
2. **Ten lanes.** The frame is split over ten block RAMs. Ten structuring
   elements sweep them at the same time, and their ten partial histograms are
   added at the end.

This RTL implements the architecture for 120x80-pixel frames with the
256-bin descriptor. At the default sizes, one frame takes 299,347 clock cycles
from the first pixel in to the last descriptor value out.

## Data path

```
 RGB 24b      HMMD          bin 8b       10 BRAMs (960 x 8b each)
 ───────► rgb2hmmd ───► hmmd_quantizer ───► pixel_demux ──► bram_bank ──┐
          (29 cyc)                         (round robin)               │ same read
                                                                        │ address
                               read_addr_gen ──────────────────────────┘ to all
                                                                        │
            ┌── lane k (x10) ───────────────────────────────────────────┘
            │   lho: count[bin] ±1, presence = count≠0 (256 bits)
            │   cs_histogram: h[m] += presence[m] at each element position
            └──► hist_merge (mux over lanes, sum per bin) ──► bin_quantizer ──► CSD 8b
```

| File | Role |
|---|---|
| `rtl/csd_pkg.sv` | shared types (`rgb_t`, `hmmd_t`, `lho_op_e`), cut points, quantization-level table |
| `rtl/rgb2hmmd.sv` | RGB to HMMD conversion, one pixel per 29 cycles |
| `rtl/seq_divider.sv` | iterative divider used by the converter and the normaliser |
| `rtl/hmmd_quantizer.sv` | HMMD colour to bin index (256 or 128 bins) |
| `rtl/pixel_demux.sv` | spreads the pixel stream over the BRAMs |
| `rtl/bram_bank.sv` | the ten frame memories |
| `rtl/read_addr_gen.sv` | sweeps the structuring element, tags reads +1/-1 |
| `rtl/lho.sv` | local histogram operator: per-colour counts and presence bits |
| `rtl/cs_histogram.sv` | per-lane colour-structure histogram, 17-bit bins |
| `rtl/hist_merge.sv` | sums the lane histograms bin by bin |
| `rtl/bin_quantizer.sv` | normalises the bins to 8-bit values |
| `rtl/csd_top.sv` | the whole extractor and its frame sequencing |

## HMMD conversion

HMMD is the colour space the CSD is defined in. For a pixel (R, G, B):

- Max = max(R,G,B) and Min = min(R,G,B).
- Diff = Max - Min measures how colourful the pixel is.
- Sum = (Max + Min)/2 measures its brightness.
- Hue is the usual hexcone angle in degrees:
  - 0 for greys;
  - 60(G-B)/Diff when red is largest, plus 360 if G < B;
  - 120 + 60(B-R)/Diff when green is largest;
  - 240 + 60(R-G)/Diff otherwise.

`rgb2hmmd` computes these on integers in the following stages:

1. Two comparators give Max and Min.
2. Subtractors form |Max-Min|, |G-B|, |B-R| and |R-G|. The signs are kept.
3. Constant multipliers by 60 (implemented as 64x - 4x).
4. One iterative divider computes the quotient q = 60|x|/Diff (14 cycles).
5. Three adders apply the sector offset and the sign: 360 - q, 120 ± q or 240 ± q.
6. A synch stage releases all five values together.

The arithmetic takes 20 cycles. The synch stage holds the result until cycle
29, the conversion time of the original design. A pixel taken on clock edge k is
available on edge k+29, and the converter accepts the next pixel in that same
cycle. Converting one pixel at a time therefore sets the input rate to one pixel
per 29 cycles, and this dominates the frame time.

Because the quotient is truncated before the offset is applied, Hue differs
by up to one degree from a floating-point evaluation of the same formula.
In the red sector, a pixel such as (255, 0, 1) gives q = 0 and Hue = 360. The
quantizer treats 360 as the same angle as 0.

## Colour quantization

`hmmd_quantizer` splits the HMMD space into five subspaces, using Diff against
the cut points 6, 20, 60 and 110. Inside each subspace, Hue is cut into equal
sectors and Sum into equal slices:

| subspace | Diff range | hue x sum levels (256 bins) | bins | (128 bins) |
|---|---|---|---|---|
| 0 | 0-5 | 1 x 32 | 0-31 | 1 x 16 |
| 1 | 6-19 | 4 x 8 | 32-63 | 4 x 4 |
| 2 | 20-59 | 16 x 4 | 64-127 | 8 x 4 |
| 3 | 60-109 | 16 x 4 | 128-191 | 8 x 4 |
| 4 | 110-255 | 16 x 4 | 192-255 | 8 x 4 |

The bin index is `offset(subspace) + hue_level * sum_levels + sum_level`.
Every level is decided by a comparison with a constant threshold:
`hue >= ceil(360k/H)` and `sum >= 256k/S`. No divider or multiplier is needed.
The parameter `BINS` selects 256 (the default) or 128. The MPEG-7 64- and
32-bin points are not provided. The level counts this design was derived from
do not add up for those two points.

## Frame storage: who holds which pixel

`pixel_demux` sends pixel n of the frame, in raster order, to BRAM `n mod 10`
at address `n div 10`. Each BRAM gets one pixel in turn. Because the width (120)
is a multiple of ten, BRAM k receives image columns k, k+10, ..., k+110 of
every row. Each BRAM therefore holds a 12-column by 80-row **sub-image** that
is subsampled horizontally by ten. Its row-major address is `row*12 + col`.
Ten BRAMs of 960 8-bit words hold exactly one frame (76.8 kbit).

This mapping is the key to reading the rest of the design. **Each lane computes
the colour-structure histogram of its own sub-image**, and the descriptor is the
sum of the ten. An 8x8 element in a lane covers 8 rows and 8 sub-image
columns, and those sub-image columns are 10 pixels apart in the image. No
element position spans two lanes. The result is an approximation of the MPEG-7
CSD, which slides one contiguous 8x8 element over the whole image. The
approximation buys a tenfold parallel sweep. A reference model of exactly this
partitioned descriptor is in `tb/csd_ref_pkg.sv` (`ref_csd`). Use it to compare
the design's output with the standard CSD on your own images.

## Sweeping the structuring element

`read_addr_gen` drives one read address to all ten BRAMs each cycle. Every
BRAM returns the pixel at the same (row, column) of its own sub-image. The
element moves along a strip of 8 rows, one column per step. Columns are read
top to bottom, and then left to right:

- Columns 0-7 are read with tag +1. After column 7, the first position is
  complete and `acc` is raised on that column's last read.
- For each later column j, column j-8 is read with tag -1, then column j with
  tag +1, then `acc` is raised. This gives five positions per strip.
- At the end of the strip, the eight columns still inside are read with tag -1.
  Every count returns to zero, so the next strip starts clean without a clear
  cycle.

Strips start at rows 0 to 72, so every position inside the sub-image is
visited: 73 x 5 = 365 per lane and 3650 in the frame. Each pixel of a strip is
read twice, which gives 2 x 12 x 8 = 192 cycles per strip and 14,016 cycles per
sweep, with no idle cycles.

The BRAM read takes one clock, so the tags are delayed by one clock to meet the
data. The local histogram operator (`lho`) then does one read-modify-write per
clock:

1. It reads `count[bin]` combinationally.
2. It adds ±1.
3. It writes the result back at the clock edge.
4. It sets or clears `presence[bin]` by testing the new count against zero.

`acc` is delayed by one more clock. When `cs_histogram` adds the 256 presence
bits into its 256 17-bit counters, in one cycle, the presence bits already
reflect the last pixel of the position. Assertions in `lho` check that no count
goes below zero or above 64.

## Merging and normalising

`hist_merge` walks the 256 bins. For each bin it steps a multiplexer over the
ten lane counters, one lane per clock, and accumulates them. It then offers the
total on a valid/ready stream.

`bin_quantizer` divides each total by the number of element positions
(`NWIN` = 3650) and scales it to 8 bits:
`value = floor(total * 255 / NWIN)`. A colour present at every position maps
to 255.

The MPEG-7 standard quantizes this normalised amplitude non-linearly. Its
thresholds are not part of this design, so the mapping here is linear. The raw
17-bit totals are output next to the 8-bit values (`csd_hist`). This lets a
different amplitude quantizer be applied outside the core.

## Top level and timing

`csd_top` has these ports:

- **Pixel input:** `pix_valid` / `pix_ready` / `pix_rgb`, one `rgb_t` per
  pixel in raster order.
- **Descriptor output:** `csd_valid`, `csd_bin`, `csd_value` and `csd_hist`,
  bins 0 to 255 in order. `frame_done` is raised with the last bin.

It runs three phases per frame, one after another:

| phase | what happens | cycles at default size |
|---|---|---|
| LOAD | 9600 pixels converted, quantized, stored | 9600 x 29 = 278,400 |
| SCAN | element sweep in all lanes (lane histograms cleared at its start) | 14,016 + 4 |
| OUTPUT | merge and normalise, 256 bins | 256 x 27 ≈ 6,900 |

`pix_ready` is low outside LOAD. No frame is accepted while the previous one
is being swept or read out, and there is no double buffering. At a 112 MHz
clock (8.9 ns period), the 299,347-cycle frame takes 2.7 ms. That is well
within the 40 ms allowed at 25 frames per second. The converter rate is the
limit: a second converter would roughly halve the frame time.

Parameters of `csd_top`, with their defaults:

- `IMG_W` = 120 and `IMG_H` = 80. `IMG_W` must be a multiple of `N_BRAM`.
- `N_BRAM` = 10.
- `SE` = 8.
- `BINS` = 256.
- `HIST_W` = 17.
- `CONV_LATENCY` = 29, at least 20.

Each sub-image must be at least `SE` wide, so `IMG_W >= N_BRAM * SE`. `HIST_W`
must hold `NWIN`; an elaboration-time assertion checks this.

## Where this departs from, or adds to, the original design

Some details the original description leaves open or states inconsistently.
The resolutions chosen here are:

- **Frame memory size.** One passage gives 80 pixels per BRAM. The memory total
  (76.8 kbit) and the 120x80 frame give 960. The design uses 960 words.
- **Address width.** The published BRAM symbol shows 9-bit addresses, which
  reach only 512 words. The address width here is `$clog2(DEPTH)` = 10 bits.
- **Subspace 4 numbering.** The HMMD-slice drawing numbers the first cells of
  subspace 4 as 188-191. The level table puts them at 192-195. The table is
  followed.
- **How the element moves down.** This is not specified. Here it steps one row
  at a time over the whole sub-image.
- **Removing pixels.** The -1 reads for pixels that leave the element and the
  draining at the end of each strip are choices made in this design.
- **Converter latency.** The 29-cycle latency is kept by padding. The
  arithmetic needs 20 cycles.
- **Hue precision.** Hue is an integer with a truncated quotient, as described
  above.
- **Amplitude quantization** is linear instead of the MPEG-7 non-linear table,
  as described above.
- **Image subsampling.** MPEG-7 subsamples large images so that the element
  always has 64 samples. At 120x80 the standard's factor is 1, and no
  subsampling logic is present.
- **Interfaces.** Handshakes, reset (asynchronous, active low), phase
  sequencing and output formats are this design's choices.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
models in `tb/csd_ref_pkg.sv`, which are written from the formulas and not from
the RTL structure. Every testbench prints
`TB_RESULT checks=N failures=M` at the end.

| testbench | what it establishes |
|---|---|
| `rgb2hmmd_tb` | hue, Max, Min, Diff and Sum for 400+ random and corner pixels (including five pixels with known Max/Min/Sum/Diff values); the exact 29-cycle latency |
| `seq_divider_tb` | quotient, remainder and latency for 2000 divisions |
| `hmmd_quantizer_tb` | both operating points over all Diff x Sum combinations and all hues; known cells of the 256-bin map |
| `pixel_demux_tb` | round-robin order, addresses, the `loaded` pulse over two frames |
| `bram_bank_tb` | ten independent read ports, read-during-write behaviour |
| `read_addr_gen_tb` | at every `acc`, the +1/-1 reads leave exactly the expected 8x8 (and 3x3) window; all counts end at zero; sweep length |
| `lho_tb` | presence bits against a reference count under 20,000 random legal updates |
| `cs_histogram_tb` | accumulation and clear |
| `hist_merge_tb` | totals, order, stall behaviour, N_BRAM+1 cycles per bin |
| `bin_quantizer_tb` | normalised values, latency |
| `csd_top_tb` | three 40x10 frames (3x3 element) end to end with a stalling source, through a 256-bin and a 128-bin instance side by side; every bin of both; counts every mechanism (input stalls, hue 360 fold, all subspaces, demux wrap, element positions, pixels leaving, lane drains, merge stalls, saturated bins, frame restarts) and fails if one never happens |
| `csd_top_full_tb` | one 120x80 frame at the default parameters, all 256 bins, and the frame time against the 25 fps budget |

To simulate a testbench with Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/csd_pkg.sv tb/csd_ref_pkg.sv rtl/*.sv tb/csd_top_full_tb.sv \
  --top-module csd_top_full_tb
./obj_dir/Vcsd_top_full_tb
```

`csd_pkg.sv` is listed before the other RTL files because they import it.
Verilator drops the duplicate it also finds in `rtl/*.sv`. If it complains,
list the files explicitly. The full-size frame simulates in under a second.

What the tests do not cover:

- No test compares the output with an independent MPEG-7 software
  implementation. The reference model reproduces this design's partitioned,
  linearly normalised descriptor.
- No timing closure or FPGA resource figures have been obtained for this RTL.
