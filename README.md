# A streaming fingerprint + iris recogniser in SystemVerilog

This design verifies a person from two traits at once: one fingerprint image and one eye image.
Each trait has its own feature-extraction pipeline and matcher. Each matcher gives a score from
0 to 255. A fusion stage normalises the two scores, takes a weighted sum (0.4 for the
fingerprint, 0.6 for the iris) and accepts the person if the sum is above a threshold.

Everything is built as a pixel pipeline. An image enters one pixel per clock in raster order.
Each stage keeps only the rows it needs in line buffers and starts producing output long before
the frame has ended. Only two parts need a whole frame: the iris unwrapping, which must know
where the pupil is before it can sample the eye image, and the matchers, which compare complete
feature sets.

The defaults are the sizes of two public databases: 296 x 560 fingerprints (FVC2002 DB2) and
320 x 240 eye images (MMU v1). All sizes are parameters.

## Data flow

```
fingerprint pixels
  fp_normalise ──> fp_orientation ──────────────┐ theta
       │                                         v
       └──> fp_image_delay (FIFO) ──> fp_guided_gauss ──> fp_binarise_thin ──> fp_minutiae
                                                                                  │ minutiae
                                         fp_matcher: fp_m1 ─> fp_align ─> fp_polar(cordic) ─> fp_m2 ─> fp_match
                                                                                  │ fp score
eye pixels                                                                        v
  ├──> iris_frame_buffer <──────────── iris_normalise <── pupil centre, radius   fusion ──> accept
  └──> iris_preproc ─> iris_morph ─> iris_pupil                                   ^
                      iris_normalise ─> iris_limbic ─> iris_enhance ─> iris_code   │ iris score
                                   enrol: iris_template ─> iris_db                 │
                                   verify: iris_match (Hamming distance vs iris_db)┘
```

`biometric_top` wires all of this together. It has two modes. In enrolment mode
(`mode_train = 1`) the fingerprint's minutiae become the template. Three iris codes, tagged with
`train_sample` 0, 1 and 2, are combined bit by bit into one template, which is stored under
`person`. In verification mode both traits are matched and a decision comes out on
`decision_valid` / `accept`.

## Shared building blocks

**`line_window`.** Every neighbourhood operation uses this block. It holds KR-1 line buffers
and a KR x KC register window. Taps that fall outside the image are replaced either by the
centre pixel or by a constant. At the end of a frame the block feeds itself dummy pixels until
the last window position has come out. Each frame of W*H inputs therefore gives exactly W*H
outputs, and the next stage never has to know how large the window before it was.

**`gauss_sep`.** A separable Gaussian filter made of two line windows (a column, then a row).
The weights are `exp(-k^2 / 2 sigma^2)`. They are computed at elaboration and rounded so that
they sum exactly to 2^14. A side channel carries any other data (the original pixel, a tag)
through the filter, aligned with the filtered value. This is how "subtract the mean from the
delayed image" is done without a separate delay line.

**`cordic`.** A pipelined vectoring CORDIC that returns the magnitude and angle of (x, y).
Angles are binary: 256 units per turn. Ridge orientations use 128 units per 180 degrees.

Types shared by several modules live in `bio_pkg`: the minutia record (x, y, angle, type), the
polar record (r, theta, o, type), the segment record, and small functions such as angular
distance and integer square root.

## Fingerprint path

1. **Normalisation (`fp_normalise`).** A 9 x 9 window gives the local mean and variance. The
   output is `(I - mean) / std`, scaled by 64. It is then multiplied by the noise-suppression
   factor `M = 1 - exp(-var / 2C^2)` with C = 0.3, and the variance is taken on a 0..1 scale. M
   comes from a 256-entry table computed at elaboration. This factor keeps flat background
   areas, where the variance is close to zero, from being amplified into noise.
2. **Orientation (`fp_orientation`).**
   - Sobel derivatives give the products Gxx, Gyy and Gxy.
   - These products are smoothed with sigma = 1.
   - The doubled-angle vector (Gxx - Gyy, 2 Gxy) is smoothed with sigma = 7.
   - The CORDIC turns the smoothed vector into an angle, and a 90-degree shift gives the ridge
     direction.
   - The pipeline is about 17 rows deep at sigma = 7. `fp_image_delay`, a FIFO, holds the
     normalised pixels until their orientation arrives. It flags overflow or underflow.
3. **Guided Gaussian (`fp_guided_gauss`).** First a small isotropic Gaussian. Then a 17-tap
   line Gaussian (sigma_x = 4) is steered along the local ridge direction.
   - **hwind:** orientations within 45 degrees of horizontal take one pixel per column, at row
     offset `round(k tan theta)`.
   - **vwind:** all other orientations take one pixel per row.
   - The offset tables are computed at elaboration for all 128 orientations. Nearest-neighbour
     sampling replaces interpolation.
4. **Binarisation and thinning (`fp_binarise_thin`).**
   - A fixed threshold turns ridges into 0 and valleys into 1.
   - Three rounds of Zhang-Suen thinning follow. Each round is two 3 x 3 sub-iteration stages,
     placed one after another in the pipeline, so thinning costs latency, not throughput.
   - The number of rounds limits how thick a ridge can be thinned. About six pixels is enough
     after the enhancement.
5. **Minutiae (`fp_minutiae`).**
   - The crossing number is computed on the 8 neighbours of each ridge pixel: 1 means a ridge
     ending, 3 means a bifurcation.
   - To reject false minutiae at the edge of the print, a candidate is kept only if ridge
     pixels exist within 8 pixels to its left, right, top and bottom.
   - Each minutia is emitted with its position, its local orientation and its type.

### Matching (`fp_matcher`)

The matcher works on up to NMAX = 64 minutiae per bank. Bank 0 holds the input and bank 1 the
template, both in `fp_m1`.

- **`fp_align`.** Each minutia gets a "segment": the length and relative angle of the vector to
  its nearest neighbour. The block then looks for the most similar pair of segments, one from
  each bank, with the same minutia type. This pair becomes the reference.
- **`fp_polar`.** Runs every minutia through the CORDIC relative to its bank's reference
  minutia. It stores (r, theta, o) in `fp_m2`: the radial distance, the radial angle and the
  orientation difference.
- **`fp_match`.** Pairs input and template minutiae greedily. Two minutiae match if they have
  the same type, if `|dr| <= 2 + r/8`, and if their angles agree within fixed tolerances. The
  radial tolerance grows with distance from the reference (the "elastic" allowance). Each
  template minutia can be used only once. The score is `255 * 2 * matched / (n_in + n_tp)`.

## Iris path

1. **Frame buffer.** While the eye image streams into `iris_frame_buffer` (320 x 240 x 8
   bits), `iris_preproc` marks the pixels that are darker than their Gaussian mean (sigma = 5).
   `iris_morph` opens this binary image with a 3 x 3 erosion followed by a dilation.
2. **Pupil (`iris_pupil`).**
   - **Labelling.** Connected components are found in a single pass. Each foreground pixel takes
     the label of one of its already-seen neighbours, or a new label.
   - **Merging.** When two labels meet, every entry of the parent table that points at the
     larger label is redirected at once, and the two regions' statistics are added. Because of
     this, any label resolves in one look-up.
   - **Statistics.** Each region keeps its area and its bounding box.
   - **Selection.** After the frame, the largest region whose area is in range, whose bounding
     box is nearly square and which fills at least 5/8 of that box is taken as the pupil. Its
     centre and radius come from the box.
3. **Unwrapping (`iris_normalise`).**
   - For each radius `rp + k` (k = 0..31) and each of 360 one-degree angles, the point
     `(cx + r cos a, cy + r sin a)` is sampled from the frame buffer by bilinear interpolation.
   - Four reads per sample give six cycles per output pixel, so a 360 x 32 image takes about
     69k cycles.
4. **Limbic boundary (`iris_limbic`).** Buffers the unwrapped image and sums each row. The
   boundary is the row (from 4 up) with the largest rise in row sum. It then replays the image
   tagged with row numbers.
5. **Enhancement (`iris_enhance`).**
   - A sigma-4 Gaussian background is subtracted from the pixel, giving d.
   - |d| goes through a power-law table, `255 * (x/255)^0.75`, and is smoothed with sigma 2.
   - The result is clipped to [50, 255] and used as the local contrast c.
   - The output is `128 + 128 d / c`, clipped to 0..255.
6. **Code (`iris_code`).** Each pixel contributes bit planes 1 to 6. Planes 0 and 7 carry
   little iris texture and are dropped. A mask bit is added that is 1 inside the limbic
   boundary. Each word is therefore 7 bits, and one code is 360 x 32 words.
7. **Enrolment (`iris_template`, `iris_db`).** The first two samples are stored. As the third
   streams in, the bitwise majority of the three is written into the database slot of `person`
   (5 slots).
8. **Verification (`iris_match`).** The Hamming distance is counted over the words whose two
   mask bits are both set. The score is `255 * (1 - HD)`.

If no pupil is found, the iris score is 0 at once.

## Fusion (`fusion`)

- Each score is min-max normalised to 0..255 using a range given by a parameter.
- The weighted sum is formed with weights 102/256 (fingerprint) and 154/256 (iris).
- The result is compared with THRESH = 128.
- The scores may arrive in either order. The decision follows the second score by one cycle.

## Where this design departs from its source description

- The line Gaussian has 17 taps (±2 sigma). A wider 25-tap window is also mentioned; the
  shorter one is used.
- Six bit planes (1 to 6) form the iris code. One passage speaks of five.
- Fusion uses the weighted sum rule. A Euclidean combination is also mentioned but not
  detailed.
- Minutia coordinates are 10 bits, not 8, because a 560-row image needs 10.
- The iris code carries a mask bit, and the Hamming distance ignores masked words.
- The majority-bit example matrix that goes with the description has one result cell that
  disagrees with a plain majority (row 4, column 2). The design uses the plain majority.
- These parts are this design's own choices, because the source leaves them open:
  - the thinning round count
  - the border-check distance
  - the alignment pair criterion
  - the match tolerances and score formula
  - the pupil selection thresholds
  - the limbic-row method
  - the number of unwrapped rows (32)
  - the threshold and normalisation ranges
- Not built:
  - scar removal, which is only named
  - the host processor that would load templates and run a large database

## Interfaces and timing

- **Reset.** Active-low and asynchronous (`rst_n`). Memories are not reset.
- **Streams.** A stream is `*_valid` plus data, with no back-pressure. Gaps are allowed.
- **Frame spacing.** A new frame of the same trait must wait until `fp_busy` / `ir_busy` is
  low.
- **Template load.** `fp_tpl_we/addr/data` and `fp_tpl_set_n/n` load a fingerprint template
  from outside. They must not overlap a fingerprint frame.
- **Observation outputs.** `fp_min_valid/fp_min` show each minutia. `pupil_*` and `limbic_row`
  show the iris segmentation. `ir_code_valid` pulses for each code word. `enrol_done` marks a
  stored template.
- **Latency.** Each streaming stage adds a few rows. The fingerprint path is dominated by the
  sigma-7 orientation smoothing (about 30 rows). The matcher takes O(n^2) cycles in the
  minutiae count, which is a few thousand cycles for 64 minutiae.

## Simulating

Every module has a self-checking testbench in `tb/<module>_tb.sv`. Each one ends by printing
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal rtl/bio_pkg.sv -y rtl -y tb \
          tb/iris_pupil_tb.sv --top-module iris_pupil_tb -o sim && obj_dir/sim
```

- **`biometric_top_tb`.** Runs the whole recogniser at reduced sizes: 96 x 96 fingerprints,
  80 x 60 eyes and 90 x 8 unwrapped irises. The images are synthetic: ridge patterns with fault
  lines, and eyes with a textured iris. The test does the following:
  - enrols fingerprint A and three samples of eye E1
  - checks that the genuine pair (A, E1) is accepted
  - checks that an impostor pair (B, E2) is rejected
  - checks that an eye with no pupil is rejected
  - counts every mechanism along the way: minutiae of both types, hwind and vwind, thinning
    deletions, pupil found and missed, enrolment, FIFO overflow, accept and reject
- **`biometric_full_tb`.** The same sequence at the default sizes, with no parameter
  overrides. It runs in under a minute of simulation time.

Both use synthetic images generated inside the testbench. Real database images are not
included. Accuracy on real data (false-accept and false-reject rates) has not been measured
with this RTL.
