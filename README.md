# Deformable-parts-model object detector: RTL design notes

The detector classifies every window of a pyramid level against a root
template and eight deformable parts, for two object classes at once. Pixels
come in as a raster stream. Each 8x8-pixel cell becomes a 13-dimensional
projected HOG feature, with 11 bits per dimension (143 bits in all). That
feature stream is shared by three consumers:

* two SVM classification engines, one per object class, which score root
  windows on the fly;
* a vector-quantization (VQ) path, which keeps an 8-bit code per cell in a
  32 KB feature store.

Roots whose score beats a programmable threshold become candidates. For each
candidate, an engine fetches the codes around it from the store and turns
them back into features through the shared codebook. Its eight part engines
and the deform unit then compute

    score = root + sum over 8 parts of max over (dx,dy) in [-2,2]^2 of
            part(dx,dy) - (a1*dx^2 + a2*dx + a3*dy^2 + a4*dy)

Top module: `dpm_top`. Shared types and constants: `dpm_pkg`.

```
pixels -> filter_bank -> hog_histogram -> hog_normalize -> basis_projection --+
                                                                              |
     +--------------------------- fork (all three must accept) <--------------+
     |                |                          |
 svm_engine 0     svm_engine 1              vq_engine (3 lanes)
     |                |                          |
     |                |                    feature_storage (240x136 codes)
     +--- loaders read codes, de-quantize via cluster_sram (256 centers) ---+
     |                |
   detections     detections
```

## Feature pyramid generation

* **filter_bank** takes one pixel per cycle. It keeps a line buffer of
  1920 pixels.
  * It produces backward differences: gx = p(x,y) − p(x−1,y) and
    gy = p(x,y) − p(x,y−1).
  * Both are zero on the first column and the first row.
* **hog_histogram** assigns each gradient to one of 9 unsigned orientation
  bins of 20°.
  * It folds the gradient into the upper half-plane, then counts how many
    bin boundaries it has passed. Each boundary test is a cross product with
    Q20 cos/sin constants, so there is no arctangent and no divider.
  * The magnitude is |gx|+|gy|.
  * Besides the 9 bins, the cell keeps the gradient energy of its 4 quadrants.
    That gives the 13 raw values that later become the 13 dimensions.
  * One accumulator per cell column is updated by read-modify-write. A cell
    is sent when its last pixel arrives.
* **hog_normalize** divides the 13 raw values by the cell's total bin energy
  N and scales them to 0..1023.
  * It computes one reciprocal per cell, floor(2^24/(N+1)), using a
    25-iteration restoring divider. Then it does 13 multiply-and-shift
    operations.
  * It takes 27 cycles per cell.
* **basis_projection** multiplies the feature by 13 programmable basis
  vectors with 8-bit Q7 coefficients.
  * It computes one dot product per cycle. Each result is shifted right by 7
    and saturated to 11 bits.
  * A cell is out 14 cycles after it is accepted.

The paper runs three histogram/normalize lanes in parallel. This design has
one lane.

## Classification engine (`svm_engine`, two instances)

* **sparse_dot** is the multiply unit that every classifier uses.
  * A weight word is 43 bits: a 13-bit flag mask plus six 5-bit signed
    weights. That is the sparse format; the dense format would be 65 bits.
  * A crossbar routes the feature dimensions whose flags are set to six
    multipliers. Slot s takes the (s+1)-th set flag.
  * An adder sums the six products.
* **root_classifier** scores windows up to 16x16 cells, i.e. a 128x128-pixel
  template.
  * Each arriving feature visits every template cell, one per cycle. It adds
    its partial product into the accumulator of the window that the cell
    belongs to.
  * There is one accumulator row per template row, indexed by window row
    modulo 16.
  * A window's first contribution overwrites its slot. Its last contribution
    emits the score.
* **pruning** passes a root only when score > threshold. It counts kept and
  pruned roots.
* A 16-deep **candidate queue** holds the surviving roots. When the queue is
  full, the root classifier stalls, and with it the shared feature stream.
* The **loader** fetches the codes for each candidate, for all 8 parts.
  * It fetches the (pw+4)×(ph+4) codes around each part anchor.
  * A code is looked up in the cluster SRAM (de-quantization) and written
    into that part engine's local feature SRAM. This is pipelined at one
    feature per cycle.
  * Features outside the root window read as zero.
  * A candidate starts only once the store holds its window's bottom-right
    cell.
  * These two rules mean a candidate never waits for a feature that the
    stalled stream still holds back, so a full queue cannot deadlock the
    engine. The cost is that the search cannot move a part outside the root
    window.
* **part_engine** (×8) holds up to 6x6 weights and a 10x10 local feature
  SRAM. For a given displacement it returns the part score pw·ph+1 cycles
  after start.
* **deform** searches from coarse to fine.
  * It first evaluates the 3x3 grid of displacements with stride 2. It then
    evaluates the 4 axis neighbours of each part's best grid point, clamped
    to ±2.
  * That is 13 evaluations instead of 25. All 8 part engines run in parallel
    at each step.
  * The unit subtracts the quadratic deformation cost (a1..a4, 8-bit signed
    per part), keeps each part's maximum and adds the maxima to the root
    score.
* **Parts-disabled mode**: candidates skip the loader and deform, and are
  reported with their root score.
* An engine-enable bit turns the whole engine off.

A detection (`det_t`) carries: the DPM score, the root score, the window
position, the level, and each part's chosen displacement.

## Vector quantization and feature storage

* **vq_engine** quantizes up to 3 features at a time.
  * It sweeps the 256 codebook centers, one per cycle. Each center is read
    once and broadcast to three L1-distance units. The lowest index wins a
    tie.
  * It searches a partial group when a level ends. It also does so when the
    engines hold the stream, so that stored codes catch up with waiting
    candidates.
* **cluster_sram** holds 256 centers of 143 bits. It has three synchronous
  read ports: one for the VQ engine and one per engine's de-quantizer.
* **feature_storage** holds 240x136 8-bit codes (32,640 bytes). That is a
  whole 1920x1080 level of 240x135 cells, so no ring addressing is needed.
  * It reports the position of the last code written and a level-done flag.
  * It has one read port per engine.

## Top level and programming

* `dpm_top` accepts one pyramid level at a time.
  * `pix_sof` marks the first pixel. `img_w`, `img_h` and `pix_level` must be
    valid at that pixel.
  * A new level's first pixel is held (`pix_ready` low) until the previous
    level has fully drained.
  * The scaled images of the pyramid are made outside the chip.
* The feature fork advances only when both engines and the VQ path accept a
  feature.
* The programming bus writes one word per cycle. It selects a target
  (`cfg_target_e`), an engine and a part, plus an address and up to 143 data
  bits. The targets are:
  * basis vectors;
  * cluster centers;
  * root weights (addressed row×16 + column);
  * root size;
  * threshold;
  * part weights (row×6 + column);
  * part geometry (width, height, anchor);
  * deformation coefficients;
  * enable bits.
* Status outputs: `busy`, plus kept and pruned counts per engine.

## What follows the paper and what does not

These follow the paper:

* the block set and how the blocks connect;
* two engines with 8 parts each;
* the 5x5 search with coarse-to-fine evaluation;
* the deformation-cost form;
* 13-D features of 11 bits each;
* the 43-bit sparse weight word with a 13x6 crossbar;
* 256 cluster centers shared by three VQ engines;
* the 32 KB code store;
* threshold pruning;
* the parts-disable mode.

These are this design's own choices:

* the gradient filter;
* the histogram dimensions and binning constants;
* the normalization rule;
* coefficient widths;
* the L1 distance;
* the root classifier's schedule;
* all queue depths;
* the loader;
* the start and window rules above;
* the programming bus.

Not built:

* the pyramid scaler (the paper gives no method);
* clock generation and pads.

Known departures from the chip:

* **Throughput.** The root classifier spends one cycle per template cell per
  feature. With a 16x16 template a 1920x1080 level took 10.1 M cycles (4.89
  cycles per pixel, about 313 cycles per feature). At 62.5 MHz that is about
  0.2 M features per second. A 12-level pyramid at 30 fps has about 87 K
  features per frame, which needs 2.6 M features per second, or 24 cycles
  per feature. Getting there would take one adder per template column and
  three feature lanes; neither is built.
* **Coarse-to-fine gain.** The search used here does 13 evaluations instead
  of 25, a 1.9x saving. The chip reports 2.2x with a scheme it does not
  describe.
* **Parts near the window border.** Features outside the root window read as
  zero, so a part placed at the window border cannot move out of it.
* **Part resolution.** Parts are evaluated at the root's own level, not at
  twice its resolution.
* **De-quantization.** It is two reads: the code from the feature store, then
  its center from the cluster SRAM.

## Verification

Every block has a self-checking testbench in `tb/`. `tb_ref_pkg` holds the
reference models, written directly from the definitions:

* orientation bins computed with `$atan2`;
* dense dot products;
* real-valued division;
* exhaustive nearest-center search;
* a whole-engine model: root sums, pruning, the coarse-to-fine part search
  and the deformation costs.

* `tb_dpm_top` runs the full chain at reduced buffer sizes on two image sizes.
  * It checks every projected feature against its histogram, every stored code
    against the nearest center, and every detection of both engines
    (including the part displacements) against the engine model.
  * It fails if any of these never happens: a feature-fork stall, detection
    back-pressure, a held level start, a partial VQ group, parts detections
    on both engines, or a root-only detection.
* `tb_dpm_full` runs the top with its default parameters on one 1920x1080
  level, with a 16x16 template with parts on one engine and a 4x4 root-only
  template on the other.
  * It checks feature and code counts, a sample of features and codes, the
    pruning counters, one detection per kept root, and a bound of 6 cycles
    per pixel.
* Cycle checks: the normalizer (26 cycles from acceptance to output, one cell per 27 cycles), the projection latency (14), the
  part-engine latency (pw·ph+1) and the deform evaluation count (13).
