# eSLAM accelerator in SystemVerilog

ORB-SLAM tracks a camera by finding ORB features in every frame and matching
them against the descriptors of a 3D map. On an embedded CPU, two of its five
stages take over 90 % of the time: **feature extraction** (FAST corners,
Harris scores, orientation and BRIEF descriptors over an image pyramid) and
**feature matching** (nearest Hamming distance between binary descriptors).
eSLAM moves those two stages into programmable logic next to an ARM host.
The host keeps pose estimation, pose optimisation and map updating.

Two ideas make extraction cheap in hardware.

* **RS-BRIEF**, a rotationally symmetric BRIEF pattern. The pattern's
  symmetry turns "rotate 512 test locations by the keypoint angle" into "rotate
  a 256-bit word by a multiple of 8 bits".
* **Detect → describe → filter.** Every detected keypoint is described as it
  streams past. A heap then keeps the best 1024. Nothing has to wait for
  detection of the whole frame to finish, and no full-frame buffer is needed.

This repository is a synthesizable RTL implementation of that accelerator:
the ORB Extractor, the Image Resizing unit that builds the pyramid, the
BRIEF Matcher, and the frame controller that sequences them for normal and
key frames. Each block has a self-checking testbench. A software reference
model checks the extractor bit-exactly.

## 1. RS-BRIEF: rotation as a bit rotation

A BRIEF descriptor has 256 bits. Each bit compares the smoothed intensity at
two points S and D near the keypoint: the bit is 1 when I(S) > I(D). Steered
BRIEF rotates all 512 points by the keypoint's angle before sampling.

RS-BRIEF builds its 256 tests differently:

1. Choose 8 seed pairs (S_s, D_s), s = 0..7.
2. Make 32 rotated copies of the seed pairs, at g·11.25°, g = 0..31.
3. Test (g, s) is seed pair s rotated by g steps. It is stored at
   **descriptor bit 8g + s**.

Now rotate the whole pattern by n steps. Test (g, s) becomes test
(g+n mod 32, s). So the steered descriptor is the unsteered one rotated by 8n
bit positions:

    steered[i] = plain[(i + 8n) mod 256]

(the first 8n bits move to the end). The hardware therefore:

* computes one fixed, unrotated pattern (`brief_computing`);
* quantises the orientation to a label n in 0..31 (`orientation_computing`);
* applies a 32-way byte rotation (`brief_rotator`).

It needs no coordinate rotation at run time and no table of 30 rotated
patterns.

**Seed pairs.** The published pattern's seed coordinates are not available.
This design uses its own 8 pairs, all inside radius 13, listed in
`eslam_pkg.sv`. The rotated coordinates are computed once at elaboration:

    x' = round(x·cos θ − y·sin θ),  y' = round(y·cos θ + x·sin θ)

using Q14 cosine and sine constants for the 8 angles of one quadrant. All
rotated points stay inside the radius-15 disc.

**Orientation.** Orientation is the intensity centroid over the disc
dx² + dy² ≤ 15² (709 pixels):

    m10 = Σ dx·I,  m01 = Σ dy·I

with y pointing down the image. The label comes from the quadrant (the signs
of m10 and m01) plus a comparison of |m01|·4096 with |m10|·tan(edge_k). The
values tan(5.625° + k·11.25°), k = 0..7, are Q12 constants. So label n
covers angles within ±5.625° of n·11.25°.

## 2. Frame flow and the normal / key frame pipeline

For each `frame_start` the top level (`eslam_top`) does the following:

1. Clears the heap and extracts pyramid layer 0.
2. While the extractor works on layer l, the Image Resizing unit reads the
   same layer and writes layer l+1. It uses nearest-neighbour downsampling
   by 1.2:

       dst(x, y) = src(⌊6x/5⌋, ⌊6y/5⌋),  size ⌊5w/6⌋ × ⌊5h/6⌋

3. Layer l+1 starts when both units are done. Four layers are used: 640×480,
   533×400, 444×333 and 370×277.
4. After the last layer, the heap is drained. Each feature is written to
   SDRAM and its descriptor is handed to the matcher. `fe_done` then pulses.
5. Matching follows.
   * **Normal frame:** matching starts at once.
   * **Key frame:** the host must first add the new map points. The matcher
     waits for a `map_update_done` pulse (`waiting_map` is high meanwhile).
     The pulse may also arrive during extraction; it is remembered.
6. `fm_done` pulses when the results are in SDRAM.

An assertion in `eslam_top` checks that a key frame never starts matching
before `map_update_done`.

The scale factor 1.2 and the depth of four layers follow from one published
figure: two extra layers add 48 % more pixels. Indeed,
(1 + 1.2⁻² + 1.2⁻⁴ + 1.2⁻⁶) / (1 + 1.2⁻²) = 1.48.

### SDRAM layout (byte addresses, 64-bit words)

| Data | Where | Format |
|---|---|---|
| pyramid layer l | `frame_base + l·PITCH·H_MAX` | rows `PITCH` bytes apart; 8 pixels per word, pixel x in byte x mod 8 |
| feature i | `feat_base + 40·i` | words 0–3: descriptor bits 64w..64w+63; word 4: `{score[52:21], layer[20:19], y[18:10], x[9:0]}` |
| map descriptor j | `map_base + 32·j` | 4 words, same order as the features |
| match of feature i | `res_base + 8·i` | `{distance[18:10], map index[9:0]}`, zero-extended |

The host writes layer 0 and the map. It reads the features and the matches.

Each unit has its own AXI4 master port: 0 extractor, 1 resizer, 2 matcher.
Each port uses single-beat transactions (AxLEN = 0, 64-bit data), with one
transaction outstanding (`axi_master`). Assertions in `axi_master` check
that AR, AW and W are held stable until accepted.

## 3. The ORB Extractor: streaming a layer in 8-column strips

The extractor (`orb_extractor`) never holds a whole layer. It walks the
layer as vertical **strips** of 8 columns. Strip k is columns 8k..8k+7.

### Image Cache and its FSM

The Image Cache (`image_cache`) has three lines, A, B and C. Each line holds
one 8-column strip for the full layer height, one 64-bit word per row. An
FSM runs through these states:

| State | Line being filled | Lines being read (older first) |
|---|---|---|
| PRE_A | A (strip 0) | — |
| PRE_B | B (strip 1) | — |
| S1 | C | A, B |
| S2 | A | B, C |
| S3 | B | C, A |

After PRE_B it cycles S1 → S2 → S3 → S1 → …. In every working state one
line is fetched over AXI while the other two, 16 adjacent columns, are
streamed.

### One row period = 10 cycles

In state j (strips j and j+1 readable), the extractor reads one 16-pixel row
per row period and shifts it into a 7-row × 16-column window register. The
window then holds ten complete 7×7 patches, centred on columns 8j+3 …
8j+12. One patch is evaluated per cycle, so a row period is 10 cycles. Each
patch goes to two places.

**FAST Detection** (`fast_detection`, combinational):

* It uses a segment test on the 16-pixel radius-3 circle: at least 9
  contiguous pixels all brighter than centre + 20, or all darker than
  centre − 20.
* For a keypoint it computes the Harris response over the inner 5×5:

      R = Sxx·Syy − Sxy² − (Sxx + Syy)² / 16

  The gradients are central differences. R is saturated to 32 bits and
  forced to be at least 1, so a score of 0 means "no keypoint".
* The score goes into the **Score Cache** (`score_cache`). This is a ring of
  4 rows × 10 columns: one row is written while the three older rows form the
  NMS window. The row being written is cleared when it is reused.

**Image Smoother** (`image_smoother`, combinational):

* It applies a 7×7 binomial blur [1 6 15 20 15 6 1]/64 along each axis,
  rounded. This is a Gaussian with σ ≈ 1.2.
* Only the 8 centres 8j+4 … 8j+11 are written to the **Smoothened Image
  Cache** (`smoothed_image_cache`). The other two centres belong to
  neighbouring strips.
* That cache holds SLOTS = 2·⌈R/8⌉ + 2 = 6 smoothed strips in rotation. It
  has two read ports with a latency of one cycle.

**NMS** (`nms`) walks the 8 middle columns of the score window two rows
later. A keypoint survives if its score beats all 8 neighbours. Ties: it
must be strictly greater than neighbours that come earlier in raster order,
and at least equal to later ones, so exactly one of two equal corners
survives.

Survivors are dropped if they lie within R + 4 pixels of the layer border,
that is, x or y outside [19, size − 20] for R = 15. Then every pixel of
their radius-15 disc has a valid smoothed value. The rest enter a
**keypoint queue** of 512 entries. If the queue is full, new keypoints are
counted in `kp_dropped` and discarded.

### Describing

The disc of a keypoint in smoothed strip s reaches D = ⌈15/8⌉ = 2 strips
to each side, so it needs strips s − 2 … s + 2. Five slots would hold one
disc. The sixth slot is what lets describing overlap streaming:

* While state j smooths strip j into the slot of strip j − 6, the describe
  engine works on keypoints of strip j − 3. Their discs (strips j − 5 …
  j − 1) are complete and not being overwritten.
* Before state j + 1 may start, every keypoint of strip j − 3 must be done.
  State j + 1 overwrites strip j − 5, the oldest strip those discs use. If
  the engine is behind, the streamer waits.
* In the last state, everything left in the queue is described.

The engine takes the keypoints from the head of the queue one at a time.
For each one:

* **Orientation Computing** (port A of the smoothed cache) reads the 709
  disc pixels, one per cycle.
* **BRIEF Computing** (port B) reads the two pixels of each of the 256
  tests, one per cycle (515 cycles).
* The **BRIEF Rotator** steers the descriptor by the label.
* The feature {score, layer, y, x, descriptor} is offered to the heap.

Orientation and BRIEF run at the same time. A keypoint costs about 727
cycles, so a strip with more than about 6 keypoints (layer 0) keeps the
streamer waiting.

### Heap

The **Heap** (`feature_heap`) keeps the 1024 highest scores seen since the
frame began, across all layers.

* It is a binary heap whose root is the *weakest* kept feature.
* While it is not full, a new feature is appended and sifted up.
* When it is full, a feature stronger than the root replaces the root and
  is sifted down. A weaker feature is refused. Both the evicted and the
  refused features are counted (`heap_dropped`).
* A sift moves a "hole" one level per cycle. Each insertion therefore costs
  at most 11 cycles and needs only one write port on the payload memory.

The heap is read out unsorted when it is drained.

## 4. The BRIEF Matcher

`brief_matcher` holds two descriptor sets in the **Descriptor Cache**
(`descriptor_cache`):

* D_A: up to 1024 descriptors of the current frame. They are written by the
  extractor as it drains its heap.
* D_B: up to 1024 map descriptors. They are loaded from SDRAM when matching
  starts. D_B is read as rows of LANES = 4 descriptors.

For each D_A descriptor the matcher streams all D_B rows through
**Distance Computing** (`distance_computing`): 4 Hamming distances per cycle,
as popcount of XOR. The **Comparator** (`comparator`) keeps the running
minimum; on ties, the lower map index wins. The pair {distance, index}
goes to the **Result Cache** (`result_cache`) and from there to SDRAM.

The compare phase takes n_A·⌈n_B/4⌉ cycles. For 1024 × 1024 that is
262,144 cycles, plus the load and the write-back.

## 5. Parameters

All defaults are the full-size configuration.

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `eslam_top`, `orb_extractor` | `W_MAX`, `H_MAX` | 640, 480 | largest layer |
| | `PITCH` | 640 | row pitch of every layer in SDRAM, in bytes |
| | `NLAYERS` | 4 | pyramid layers |
| | `R` | 15 | radius of the orientation / BRIEF disc |
| | `CAP` | 1024 | features kept per frame (heap size) |
| | `KPQ_DEPTH` | 512 | keypoint queue |
| | `MAP_MAX` | 1024 | map descriptors per matching run |
| | `LANES` | 4 | distances per cycle in the matcher |
| `fast_detection` | `FAST_TH`, `ARC` | 20, 9 | FAST threshold and arc |

Shared constants, types (`feature_t`, `patch_t`, the AXI structs) and the
pattern functions live in `eslam_pkg`.

## 6. Performance

At 100 MHz the full-size test (section 8) measures:

| Phase | Cycles | Time |
|---|---|---|
| extraction of a 640×480 frame, 4 layers, 4214 keypoints | 3.15 M | 31.5 ms |
| matching, 1024 features × 1024 map points | 0.31 M | 3.1 ms |

Streaming alone would take about 0.97 M cycles (10 cycles per row per strip
over all four layers). Describing alone takes about 3.06 M cycles
(4214 × 727). The two overlap, so describing sets the pace.

The published figures are 9.1 ms for extraction and 4.0 ms for matching.
Matching meets its figure. Extraction does not, for three reasons:

* the disc is read one pixel per cycle;
* keypoints are described one at a time.

Two changes would close the gap without changing the block structure:

* a smoothed cache that returns a whole disc row per read, which would
  make orientation about 31 cycles;
* several describe engines.

Both cost memory ports that this implementation does not spend.

## 7. How this RTL relates to the published design

These parts follow the published design:

* the split between host and logic;
* the three units and their connections;
* the blocks inside the extractor and the matcher;
* the three-line Image Cache with its pre-store and rotation;
* the detect-describe-filter order, with describing overlapped with
  streaming;
* the 3×3 NMS;
* the intensity-centroid orientation with 32 labels;
* the RS-BRIEF pattern structure and the bit-rotation rotator;
* a heap keeping the best 1024 features;
* nearest-neighbour pyramid generation while the extractor runs;
* the key-frame rule: matching waits for map updating.

These are choices of this design, because the description stops short of
them:

* **Seeds and test direction.** The 8 seed pairs and the test direction.
* **Descriptor bit order.** Bit 8g + s; bit 0 is the "beginning" that the
  rotator moves to the end.
* **FAST and Harris.** FAST-9 with threshold 20, and Harris k = 1/16.
* **Smoothing kernel.** The binomial 7×7 kernel.
* **NMS ties and borders.** The NMS tie rule and the R + 4 border rule.
* **Orientation table.** The Q12 table of bin-edge tangents.
* **Pyramid.** Scale 1.2 and 4 layers, derived as in section 2.
* **Heap order.** The heap's weakest-at-root order. The published text calls
  it a max-heap, but keeping the *best* N needs the minimum at the root.
* **Memories.** Cache sizes: line depth, 4-row score ring, 6 smoothed
  strips.
* **Describe engine.** A single engine that reads one pixel per cycle per
  port.
* **Queue.** The keypoint queue and its drop-on-full behaviour.
* **SDRAM.** The SDRAM layout and record formats.
* **AXI.** Single-beat AXI with one transaction outstanding per port.
* **Matcher.** Four matcher lanes, the tie rule, and a map of at most 1024
  descriptors per run. A larger map would need several runs, which the
  controller does not do.
* **Handshakes.** The start / done / map_update_done signals.

Other departures from the published design:

* extraction is about 3.5× slower than the published latency (section 6);
* the host processor and the DRAM are not part of the RTL. They appear as
  top-level ports, and a behavioural AXI memory stands in for the DRAM in
  simulation.

## 8. Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one compares
against values worked out independently: brute-force searches,
floating-point references, or shadow arrays. Each has a watchdog and ends by
printing

    TB_RESULT checks=<n> failures=<n>

Two shared files support them:

* `tb/axi_mem_model.sv` models SDRAM behind any number of AXI ports, with
  random handshake delays.
* `tb/orb_ref.svh` is a software model of one layer of extraction, written
  from the algorithm rather than from the RTL. It uses floating-point
  rotation and atan2. For angles that fall on a bin edge it also accepts the
  neighbouring label.

The system-level tests:

| Testbench | What it runs |
|---|---|
| `tb_orb_extractor` | one 80×64 layer against the reference; a second instance with a heap of 4 and a queue of 4 |
| `tb_eslam_top` | two frames at 80×64, normal then key, with a small heap (8) and queue (8) so that the overflow paths are taken. It counts each mechanism: normal frame, key-frame wait, queue overflow, heap full, layers resized; a mechanism that never happens is a failure. It also checks the pyramid, every feature and every match. |
| `tb_eslam_full` | one frame at full size: every parameter at its default, 640×480, 4 layers, 1024 features, 1024 map points. It checks the pyramid, every feature and every match, and prints the cycle counts. It takes about 15 s of wall-clock time with Verilator. |

To simulate a testbench with Verilator 5 (for example the full-size one):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_eslam_full \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/eslam_pkg.sv tb/tb_eslam_full.sv
    ./obj_dir/Vtb_eslam_full

Replace the name for any other testbench, e.g. `tb_image_cache` or
`tb_brief_matcher`. The package must come first on the command line. The
other modules are found through `-y`.

## 9. Files

| File | Block |
|---|---|
| `rtl/eslam_pkg.sv` | widths, types, trigonometric constants, seed pairs, disc and pattern functions |
| `rtl/eslam_top.sv` | frame controller, pyramid sequencing, normal/key frame rule |
| `rtl/orb_extractor.sv` | strip streaming, detection, describing, heap drain |
| `rtl/image_cache.sv`, `score_cache.sv`, `smoothed_image_cache.sv` | the three extractor caches |
| `rtl/fast_detection.sv`, `image_smoother.sv`, `nms.sv` | per-patch datapath |
| `rtl/orientation_computing.sv`, `brief_computing.sv`, `brief_rotator.sv` | descriptor datapath |
| `rtl/feature_heap.sv`, `sync_fifo.sv` | heap and keypoint queue |
| `rtl/image_resizer.sv` | pyramid generation |
| `rtl/brief_matcher.sv`, `descriptor_cache.sv`, `distance_computing.sv`, `comparator.sv`, `result_cache.sv` | matcher |
| `rtl/axi_master.sv` | AXI4 master port |
