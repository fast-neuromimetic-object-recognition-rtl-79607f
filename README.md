# HMAX feature extraction in a single-clock FPGA pipeline

HMAX is a four-layer model of the early visual cortex, used for object
recognition:

- **S1**: Gabor filtering at 16 scales and 4 orientations.
- **C1**: local max pooling.
- **S2**: comparison against a dictionary of stored C1 patches.
- **C2**: global min pooling.

It turns a 128 × 128 grayscale image into a vector of 1280 numbers, and a
simple classifier then reads that vector. In software the model costs
seconds per image. This RTL computes the whole vector in about 525,000
clock cycles per image, which is roughly 190 images/s at 100 MHz.

Three ideas make that possible:

1. **Separable Gabor filters.** Each 2-D filter of side d is rebuilt from
   1-D filters applied in two passes, one vertical and one horizontal. This
   cuts the multiply work from d² to 2d per pixel. One small filter bank of
   77 multipliers then does all 64 filters, and each pass costs exactly one
   cycle per pixel.
2. **Streaming pooling.** C1 and C2 compute their max and min on results
   as they arrive. Neither ever stores a full S1 or S2 map.
3. **Per-band ownership flags.** Each of the 8 C1 scale bands has its own
   memory and a flag that hands it between C1 (the writer) and S2 (the
   reader). S1 and C1 can therefore run up to an image ahead of S2. The
   time S2 needs per band varies widely, but only its average rate must
   match S1's.

The pipeline runs on one clock and all stages work at the same time:

```
 pixels ──► input_buffer ──► s1_stage ──► c1_stage ──► c1_band_mem ×8 ──► s2_stage ──► c2_stage ──► results
 (8 bit,     (4 images)      (2 passes   (2Δ×2Δ max,   (flag: C1 or S2     (1280 patch  (running min,
  raster)                     per scale)  stride Δ)      owns the memory)    distances)   1280 × 42 bit)
```

## Indices and sizes

Everything in the RTL is indexed from 0.

| quantity | RTL index | value |
|---|---|---|
| filter size | f = 0..15 | side d = 7 + 2f (7 … 37) |
| scale band | b = 0..7 | filters 2b and 2b+1, pooling stride Δ = 4 + b |
| patch size | k = 0..3 | side s = 4(k+1) C1 units, κ = s² positions, 4 orientations |
| C1 blocks per side | nb(b) | ⌊(W − d(2b+1) + 1) / Δ⌋ = 30, 23, 18, 15, 13, 11, 9, 8 at W = 128 |
| C1 units per side | g(b) | nb (the last row and column are edge units, see C1) |

Widths:

| value | bits |
|---|---|
| pixels | 8 |
| filter coefficients | 16 (signed) |
| first-pass results | 23 (saturated) |
| S1 and C1 values | 16 (unsigned) |
| S2 distances and C2 results | 42 (unsigned) |

Table I of the HMAX parameter set gives the Gabor σ and λ for each size.
The RTL does not use them itself: kernels are loaded values. The testbenches
use them to build realistic kernels.

## S1: Gabor filtering with two 1-D passes

### Factorisation

Let E, O and G be 1-D kernels of length d:

- E is the even Gabor, e^(−x²/2σ²)·cos(2πx/λ);
- O is the odd Gabor, e^(−x²/2σ²)·sin(2πx/λ);
- G is a Gaussian.

Write `Kh` for a kernel applied along x and `Kv` for one applied along y.
The four orientations are then:

```
F0   = Eh · Gv            (carrier along x)
F90  = Gh · Ev            (carrier along y)
F45  = Eh·Ev + Oh·Ov      (cos(a)cos(b) + sin(a)sin(b))
F135 = Eh·Ev − Oh·Ov
```

Only three vertical results are therefore needed: `Gv`, `Ev` and `Ov`. A
fourth stream, the column sum of squared pixels, gives the l2 norm of the
window.

### Pass 1 (vertical)

- `s1_stage` scans the input image column by column, one pixel per cycle,
  so the 1-D shift register of `s1_filter_bank` slides down a column.
- The bank's lanes compute `Gv`, `Ev` and `Ov`.
- The squarer lane computes Σ p² over the window.
- All four are saturated to 23 bits and written to `s1_intermediate_ram`
  at the row of the window's top.

### Pass 2 (horizontal)

- The same bank reads the intermediate RAM row by row:
  - `Eh` on `Gv` gives F0;
  - `Gh` on `Ev` gives F90;
  - `Eh` on `Ev` and `Oh` on `Ov` give F45 and F135;
  - the energy lane sums the column sums over the window.
- Responses come out only where the whole d × d window lies inside the
  image, giving (W − d + 1)² results per filter.

### Filter bank

- Each lane adds mirrored taps before multiplying: x[c+i] + x[c−i] for
  even kernels, x[c+i] − x[c−i] for odd ones.
- A 37-tap filter therefore needs 19 multipliers.
- Four lanes plus one squarer make 77 multipliers.
- Lanes accumulate at full precision (46 bits). Latency is 3 cycles.

### Normalisation (`s1_normalize`)

- Output is |F| / ⌊√energy⌋, saturated to 16 bits, and 0 when the root is 0.
- It uses a restoring square root (14 stages) followed by a restoring
  divider (16 stages), 32 cycles in all.
- The result comes out in step with the response stream, so nothing is
  stored.
- If each 1-D kernel is scaled to an l2 norm of about 255, the 2-D kernel's
  norm is about 2¹⁶ − 1 and the normalised response fits in 16 bits.

### Timing

- Each pass is exactly W² cycles.
- Each filter adds about 40 cycles of pipeline drain.
- An image takes 2 · W² · 16 cycles plus the drains: 524,945 cycles at
  W = 128, measured in simulation.
- S1 releases the input image as soon as the first pass of the largest
  filter is done, and starts the next image right after its last second
  pass.

### Stall

- Before each second pass, S1 waits while the band's flag is high, because
  S2 still owns that band's memory from the previous image.
- It also waits while C1 is busy with its pooling pass.
- The first pass does not wait, so S1 can output results the cycle the
  flag drops. `stall_flag` reports this state.

## C1: pooling on the fly

A C1 unit is the max over a 2Δ × 2Δ window, over both filters of the band.
The windows step by Δ. `c1_stage` builds these windows from Δ × Δ blocks.

- **Grid.** All pooling uses the output grid of the band's larger filter.
  The smaller filter's map is one pixel larger on each side and is shifted
  by one, so that both filters share the same centres.
- **Block max while streaming.** A running max works along each row inside
  a block. A line buffer of nb entries carries the block maxima down the
  rows. When a block's last row arrives, its max goes to the band memory:
  - the first filter of the band writes it;
  - the second filter does a read-modify-write max with it.

  S1 rows and columns beyond the last complete block are ignored.
- **2 × 2 pass.** After the band's last S1 result, C1 makes one in-place
  pass over the band memory. Word (i, j) becomes the max of blocks (i, j),
  (i, j+1), (i+1, j) and (i+1, j+1), for all i, j < nb. Only nb − 1
  windows of 2Δ fit completely. For the last row and column, a neighbour
  that does not exist is replaced by the block itself, so those edge
  units pool over Δ × 2Δ, 2Δ × Δ or Δ × Δ. This keeps the C1 map at nb × nb
  units, the count the published memory and timing formulas use. The pass
  costs 5 cycles per unit, 4,500 cycles for band 0, far less than a
  band's S1 time.
- **Hand-over.** After the pass, C1 pulses `flag_set`, and the band belongs
  to S2. `ready` is low during the pass.

Word layout in the band memory: address i · nb + j, with the four 16-bit
orientations side by side (orientation 0 in the low bits).

## Band memories and flags

`c1_band_mem` holds nb² words and one flag.

- **Flag low:** C1 owns the memory. Its address drives the read port and
  its writes are accepted.
- **Flag high:** S2 owns it and the read port follows S2's address. S2
  clears the flag when it has finished the band.

Both transfers take effect on the next clock edge. Assertions check that:

- C1 never writes while the flag is high;
- the flag is only set while low and only cleared while high.

## S2: distances to 1280 stored patches

The dictionary holds 320 patches of each of the 4 sizes. Each patch is
s × s C1 units × 4 orientations. For a patch P at a location (x, y), S2
computes the squared Euclidean distance:

```
D = Σ_{py,px < s} Σ_{o < 4} (C1[y+py][x+px][o] − P[py][px][o])²
```

### Scan order

- Bands are taken in order, each as soon as its flag is set.
- Within a band, patch sizes are taken in order 4, 8, 12, 16, skipping any
  that do not fit: s must be at most g.
- Within a size, every location with 0 ≤ x, y ≤ g − s is visited in raster
  order.
- At each location, S2 streams the s² positions and, for each position, two
  beats: orientations 0/1, then 2/3.
- On every beat, all 320 patches of the current size are compared with the
  same two C1 values: 640 squared-difference accumulators (`s2_filter_bank`).

### Memory layout

- `s2_patch_mem` word `base(k) + 2·(py·s + px) + pair` holds, for every
  patch, the two coefficients of that position and orientation pair.
- base(k) = 0, 32, 160, 448. There are 960 words of 320 × 2 × 16 bits.

### Timing

- A location costs exactly 2κ cycles.
- A band costs Σ_k (g − s + 1)² · 2κ cycles plus 9 cycles of drain and
  flag handling.
- Band 0 takes 310,208 cycles and all bands together 504,480 per image
  (formula; the band-level count is checked in simulation at 64 × 64).
- S2 therefore keeps up with S1. Bands 0 and 1 take longer than S1's
  65,536-cycle band time, and the later bands make up for it.

### Pipeline

- The C1 read is combinational.
- The patch memory answers one cycle after its address.
- The bank registers the squares and then the sum.
- Each finished location gives an update of 320 distances to C2 (`upd_k`
  = size).

After the last band, S2 pulses `img_done`. It starts band 0 of the next
image only when C2 has finished sending the previous results.

## C2: running minimum and readout

`c2_stage` keeps 4 × 320 minima of 42 bits.

- An update compares all 320 distances of one size with the stored minima
  in one cycle.
- A valid bit per size makes the first update of an image a plain write,
  so no clearing pass is needed.
- On `img_done`, the 1280 results are sent over a valid/ready stream:
  - index k · 320 + p, in increasing order;
  - `c2_last` on the last one;
  - all ones for a size that fitted no band.

## Top level (`hmax_top`)

Parameters:

| parameter | default | meaning |
|---|---|---|
| `IMG_W` | 128 | image side |
| `NUM_FILT` | 16 | filter sizes (must be even; bands = NUM_FILT/2) |
| `NUM_PATCH` | 320 | patches per size |

Ports:

- **Pixel input:** `pix_valid`, `pix_ready` and `pix_data[7:0]`.
  - Images are sent in raster order, row by row.
  - Up to 4 whole images are buffered; `pix_ready` falls when all 4
    slots are full.
- **Kernel load:** `coef_we`, `coef_filt`, `coef_kern` (0 = E, 1 = G,
  2 = O), `coef_idx` (0 = centre … 3 + f = edge) and `coef_data` (signed
  16 bit).
  - Only the half from the centre to the edge is stored, because of
    symmetry.
  - O's centre tap is unused (it is 0 by definition).
- **Patch load:** `patch_we`, `patch_addr` (word address as above),
  `patch_idx` (patch 0..319), `patch_sel` (0 = first, 1 = second
  orientation of the pair) and `patch_data` (16 bit).
  - A full load takes 614,400 writes.
- **Results:** `c2_valid`, `c2_ready`, `c2_idx`, `c2_data[41:0]` and
  `c2_last`.
- **Status:**
  - `band_flags`;
  - `s1_stall` (S1 waiting for a band owned by S2);
  - `s1_busy`;
  - `s2_waiting` (S2 waiting for C1 to finish a band);
  - `img_released`;
  - `images_buffered`.

Load kernels and patches before sending pixels. Neither table may change
while an image is in flight.

### Back-pressure chain

1. A slow result reader holds C2 busy.
2. S2 then waits with band 0 owned.
3. S1 stalls on band 0 of a later image.
4. The input buffer fills and drops `pix_ready`.

Nothing is lost anywhere along the chain.

### Measured (simulation, 128 × 128, all defaults)

- Image period: 524,945 cycles, which is 190.5 images/s at 100 MHz.
- Latency of an image, from its last pixel to its last result: about
  522,000 cycles. S2 finishes each band shortly after C1 hands it over, so
  the last band adds little to S1's own time.

## Where this design departs from its source description

- **Four intermediate buffers, not five.** With the factorisation above,
  three vertical results (`Gv`, `Ev`, `Ov`) and the energy column sums are
  enough. The original description counts one buffer per orientation plus
  one for the norm.
- **Three stored kernels per size (E, G, O).** The original memory count
  lists two 1-D kernels per size. The 45° and 135° filters need O as well.
- **C1 edge units.** The C1 map has nb × nb units per band, as in the
  published size formulas. How the last row and column are pooled is not
  described; here they use the blocks that exist. The published S2 time,
  about 519.6k cycles (193 images/s), uses the unrounded ratio
  (W − d + 1)/Δ. With the integer nb, this design needs 504,480 cycles
  (198 images/s), so S1 stays the slower stage.
- **C2 is a minimum.** The block is drawn as a "global max" in the original
  figure. For distances the minimum is the meaningful choice, and the text
  says so.
- **Own choices.** The following are all this design's own:
  - the kernel values (loaded, not built in);
  - the input and output handshakes;
  - the load ports;
  - the order of positions and orientations inside a patch;
  - the saturation points;
  - the pipeline depths;
  - the rule that S2 waits for C2's readout before a new image.
- **Not included:**
  - the Ethernet link with its receive and transmit buffers (the pixel and
    result streams are the ports instead);
  - the classifier (gentleboost or a linear SVM), which runs on a host
    computer on the C2 vector.
- **Memories.** Memories are plain arrays. Their combinational reads are:
  - the input image;
  - the intermediate buffers;
  - the kernels;
  - the C1 bands.

  The patch memory reads synchronously. A block-RAM mapping would move the
  other reads one cycle earlier in the scan counters.

## Verification

Every module has a self-checking testbench in `tb/`. They print
`TB_RESULT checks=… failures=…` and stop themselves with a watchdog.

`tb/hmax_ref_pkg.sv` is a bit-exact reference model written directly from
the definitions, with no streaming or pipelining:

- separable S1 with the same saturation and integer division;
- C1 as a block max;
- C2 as a brute-force minimum.

It also generates Gabor kernels from the σ and λ table (γ = 0.3).

| testbench | what it shows |
|---|---|
| `tb_input_buffer` | 4-image FIFO, full/empty, no overwrite |
| `tb_s1_coeff_lut`, `tb_s1_intermediate_ram`, `tb_c1_band_mem`, `tb_s2_patch_mem` | memories and ownership rules |
| `tb_s1_filter_bank` | even/odd symmetric FIR and energy window against direct sums |
| `tb_s1_normalize` | root/divide incl. zero, exact squares, saturation; 32-cycle latency |
| `tb_s1_stage` | all S1 outputs of 4 filter sizes (24 × 24), stall on a high flag, C1 back-pressure, image period = 2·N·F + drain |
| `tb_c1_stage` | C1 memory contents of two bands against the model, flag timing |
| `tb_s2_filter_bank`, `tb_s2_stage` | every distance of every location, scan order, band cycle count = Σ 2κ·locations (+9), flag clear, C2 wait |
| `tb_c2_stage` | running minimum, readout order, random ready |
| `tb_hmax_top` | 5 images at 64 × 64 with 4 filter sizes and 3 patches per size; all 60 C2 results match the model; counts S1 stalls, input-buffer-full cycles, S2 waits and C2 back-pressure, and fails if any is zero; image period 32,933 = 2·N·4 + drain |
| `tb_hmax_full` | all defaults (128 × 128, 16 sizes, 1280 patches): full patch load, 2 images, every 32nd patch of each size checked exactly (including patches cut from the first image's C1 output, distance 0); about 1.7 M cycles, under a minute |

Each testbench was also run against a copy of its module with one
deliberate bug, and every one of them failed.

To simulate, for example the end-to-end test:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/hmax_pkg.sv tb/hmax_ref_pkg.sv tb/tb_hmax_top.sv --top-module tb_hmax_top
./obj_dir/Vtb_hmax_top
```

Verilator initialises state randomly with `+verilator+rand+reset+2`. The
testbenches pass with that setting.

## Changing the design

- **Image size.** `IMG_W` sets all counters and memories. The C1 and S2
  geometry follows from `hmax_pkg::band_nb`. Images must be square.
- **Fewer scales.** `NUM_FILT` must be even. The bands are the first
  NUM_FILT/2 of the table.
- **Patch count.** `NUM_PATCH` scales the S2 bank, the patch memory and the
  C2 memory linearly. S2 time does not change, because all patches of a
  size are handled in parallel.
- **Kernel tables.** Kernels are data, not RTL, so changing σ, λ or γ needs
  no RTL change. Keep the product of the two 1-D l2 norms near 2¹⁶ for
  16-bit outputs without saturation.
