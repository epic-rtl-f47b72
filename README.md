# EPIC — redundancy-removing perception hardware for AR glasses

AR glasses that record what their wearer sees, so that questions about it can later
be answered, produce far more video than they can afford to
store or move. Most of that video is redundant in two ways:

- **Over time.** The head moves, but the scene mostly stays the same. A region
  seen a moment ago is seen again from a slightly different viewpoint.
- **In space.** Only part of each frame matters to the user, and the gaze
  shows which part.

EPIC removes both kinds of redundancy while the video is captured, in three
stages:

1. **Frame Bypass Check (in the image sensor).** Each new raw frame is compared
   with the last frame that was sent. If the frame barely differs, it is never
   read out. A counter forces a frame out now and then, so slow changes are
   not missed.
2. **Spatial redundancy detection (SRD).** Each frame that does get through is
   cut into patches. A small saliency network, driven by the gaze, scores each
   patch. Patches whose score is too low are dropped.
3. **Temporal redundancy detection (TRD).** Each remaining patch is compared
   with the patches already kept in an on-chip store, the **DC (Duplication
   Check) buffer**. The comparison does not use raw pixels. Each stored patch
   is first re-projected into the current view, using its stored depth and
   the two camera poses. That way, motion of the glasses does not make the
   same content look new.
   - If a stored patch matches, the new patch is discarded. The stored patch's
     *popularity* goes up by one.
   - If nothing matches, the new patch is stored.
   - When the buffer is full, the least salient and least popular entry is
     evicted to main memory.

This repository holds synthesizable SystemVerilog for the digital parts of
that system:

- the in-sensor Frame Bypass Unit;
- the EPIC accelerator, with its four parts:
  - the reprojection engine;
  - the computation engine;
  - the buffer controller;
  - the 4 MB DC buffer;
- the sequencer that runs the temporal-spatial redundancy check (TSRC) per
  frame and per patch.

Every block has a self-checking testbench. The processing element `systolic_pe` is tested through the array.

The rest of the SoC is left outside and reached through ports:

- the image sensor's analog front end;
- MIPI CSI, the ISP and the network-on-chip;
- the CPU, GPU and DRAM;
- the IMU and eye-tracking sensors;
- the two neural networks (the depth estimator and the saliency CNN).

The networks' weights and layer shapes are not part of this design. Their
matrix products run on the computation engine, which is built here.

```
           raw pixels                         sent frames
 ADC ──► frame_bypass_unit ──────────────────────► (MIPI / ISP / depth + saliency CNNs / patchifier)
                                                                 │ patches: RGB565 + depth + score + cell
                                                                 ▼
                        ┌───────────────────────── epic_accelerator ─────────────────────────┐
 pose U_t, t ─────────► │ tsrc_ctrl ──► pose_unit ──► reproj_engine (point_reproject)         │
                        │    │  ▲              matrix M      │ port B                          │
                        │    ▼  │                            ▼                                 │
                        │ buffer_controller ◄── port A ──► dc_buffer (16 banks x 128 bit)     │ ──► evicted entries
                        │ comp_engine (systolic_array 16x16, nonlinear_unit, 768 KB SRAM)     │ ◄─► host
                        └─────────────────────────────────────────────────────────────────────┘
```

`epic_top` holds one `frame_bypass_unit` and one `epic_accelerator`. No
block between them is built, so the two sides are joined only through the
top's ports.

## Numbers and formats

Some numbers are fixed by the original design description:

- DC buffer: 4 MB, 16 banks, 128-bit words, with 10 banks for RGB, 5 for depth
  and 1 for metadata;
- a 16×16 systolic array;
- 768 KB for weights and activations;
- INT8 networks;
- 1 GHz.

The rest are choices made here:

| Item | Value | Why |
|---|---|---|
| patch | 16×16 pixels | one patch row = 2 RGB words |
| pixel in the DC buffer | RGB565, 16 bit | one RGB patch (512 B) is exactly twice one depth map (256 B), matching the 10 : 5 bank split |
| depth | 8 bit | INT8 depth network |
| entry | 32 RGB words + 16 depth words + 3 metadata words | |
| entries | 5120 | fills all 16 banks exactly: 5120 × 32 words = 10 × 16384 |
| frame | 640×480, 10-bit raw | 1200 patches per frame |
| pose | camera-to-world rotation Q2.14, translation Q8.8 (in depth units) | |
| pixel coordinates | signed, relative to the frame centre (12 bit) | principal point at the centre |

Entry `id` (0…5119) lives at:

- RGB word w (0…31): bank `id % 10`, row `(id / 10)·32 + w`
- depth word w (0…15): bank `10 + id % 5`, row `(id / 5)·16 + w`
- metadata word w (0…2): bank 15, row `3·id + w`

The metadata words hold, from bit 0 of word 0 upwards:

- the pose (192 bits);
- the timestamp t_c (32 bits);
- the cell x and cell y (8 bits each);
- the mean depth (8 bits).

Word 2 holds the popularity P_c in bits 15:0 and the saliency score S_c in
bits 23:16. A popularity update and an eviction scan therefore touch a
single word. All of these constants and the placement functions are in
`epic_pkg`.

## Frame Bypass Unit (`frame_bypass_unit`)

The unit has two frame buffers: one holds the frame being captured, the
other the reference, which is the last frame sent.

**Capture.** Each pixel from the ADC is accepted at one pixel per cycle. It
is written into the capture buffer, and its absolute difference from the
same pixel of the reference is added to a saturating sum.

**Decision.** After the last pixel, the unit decides:

- **First frame after reset, or sum > γ:** the frame is sent. The bypass
  counter c is left unchanged.
- **Otherwise, c+1 > θ:** the frame is sent and c is cleared. This is the
  periodic safeguard.
- **Otherwise:** the frame is skipped and c becomes c+1.

**Sending.** A frame that is sent is streamed out of the capture buffer,
one pixel per cycle, with a valid/ready handshake. After that the two
buffers swap roles. While a frame is streamed out, `adc_ready` is low.

**Timing.** `frame_done` pulses, together with `frame_sent`, `frame_diff`
and `bypass_count`, 2 cycles after the last pixel is accepted.

The design compares raw sensor values. The original description speaks of
an RGB difference, but the comparison happens inside the sensor, before
any colour processing, so raw values are the natural operands here. It also
does not say when the reference is refreshed; here every frame that is sent
becomes the new reference.

## Reprojection (`pose_unit`, `point_reproject`)

A buffered pixel (u, v) with depth d, seen from the stored pose, is
re-projected into the current camera in three steps: lift it to 3-D, apply
the relative rigid transform, and project it again.

All of this is folded into one 3×4 integer matrix M:

```
R = Rt^T · Rc           t = Rt^T · (tc − tt)          (rigid inverse: only a transpose)
M = f · [ K R K^-1 | K t ] · 2^14,   K = diag(f, f, 1)
h = M · [u·d, v·d, d, 1]^T            (u', v') = (h0 / h2, h1 / h2)
```

Multiplying by f removes every division by f from the matrix, and the
factor cancels in the final divide.

**`pose_unit`** builds M from the two poses and the focal length. It takes
one cycle, with a registered output.

**`point_reproject`** is a two-stage pipeline that accepts one point per
cycle:

- stage 1 does the matrix–vector product;
- stage 2 does two signed divisions that truncate toward zero.

`ok` is low when the point is behind the camera (h2 ≤ 0) or lands outside
the coordinate range. The testbenches check both units against a
floating-point model using random poses.

## Reprojection engine (`reproj_engine`)

Re-projecting every stored patch against every new patch, pixel by pixel,
would be far too slow. The engine therefore works in two modes.

**Bounding-box mode (9 cycles).** The four corners of a stored patch are
re-projected at the patch's mean depth. Their minimum and maximum give the
box the patch covers in the current view. The sequencer keeps one box per
entry and rejects any candidate whose box misses the new patch's cell.

**Patch mode (279 cycles).**

1. The 16 depth words of the stored patch are read into a local buffer.
2. The 256 pixels are visited in raster order. Requests that fall into the
   same 128-bit RGB word are merged into a single DC-buffer read, so there is
   one read per 8 pixels.
3. Each pixel is re-projected. When it lands inside the new patch's cell,
   the new patch's pixel at that position is read, and |ΔR|+|ΔG|+|ΔB| is
   added to a sum.
4. The patch **matches** when both of these hold:
   - at least `min_overlap` pixels landed inside the cell;
   - the sum is below τ × (number of pixels that landed), that is, the mean
     per-pixel difference is below τ.

The difference measure, the overlap condition and the use of the mean
depth for the box are choices made here.

## TSRC sequencer (`tsrc_ctrl`)

### Per frame

`frame_start` brings in the timestamp and the pose. Then, for every entry
already in the buffer:

1. its metadata is read;
2. `pose_unit` builds M;
3. the engine computes the entry's box.

This takes about 15 cycles per entry.

### Per patch

Each patch arrives as 256 pixels, each with its depth, together with the
patch's cell coordinates and its saliency score. Then:

1. **Spatial check.** If the score is not above ρ, the patch is dropped
   (`RES_DROPPED`).
2. **Candidate scan.** Otherwise the entries are scanned from newest to
   oldest:
   - an entry whose box misses the cell costs 2 cycles and raises
     `ev_box_skip`;
   - for every other entry, its pose is turned into M again and a full
     patch comparison is run (`ev_full_cmp`).
3. **Match.** The first match sends an increment command to the buffer
   controller and ends the patch (`RES_MATCHED`, with the entry id).
4. **No match.** If nothing matches, the buffer controller allocates a slot,
   evicting an entry if the buffer is full. The patch is then written in 51
   cycles (`RES_INSERTED`):
   - 32 RGB words;
   - 16 depth words;
   - metadata with P = 1 and the patch's score as S_c.

Entries inserted during a frame have no box, so they are not candidates
until the next frame.

## Buffer controller (`buffer_controller`)

The controller keeps an **order list** of entry ids, oldest first. The
sequencer reads it through `ord_pos` → `ord_id`, with one cycle of latency.
It accepts two commands.

**INC** increments the popularity P_c of one entry. It reads the metadata
word, adds one (saturating) and writes it back, in 3 cycles.

**ALLOC** returns a free slot.

- **Buffer not full:** slots are handed out in order, and the command takes
  1 cycle.
- **Buffer full:** the controller evicts an entry first:
  1. It scans word 2 of every entry, oldest first.
  2. It chooses the entry with the lowest (S_c, P_c): lowest score first,
     then lowest popularity. A tie goes to the oldest.
  3. It streams that entry's 51 words out on `ev_*` (valid/ready, `ev_last`
     on the last word) towards main memory.
  4. It removes the entry from the order list by shifting the newer
     positions down, and reuses its slot.

While the controller is busy (`cmd_ready` low), it owns DC-buffer port A.

The original flow chart asks to evict the entry with the lowest saliency
and popularity but does not say how the two combine. The lexicographic
order is a choice made here.

## DC buffer (`dc_buffer`)

The DC buffer has 16 banks of 16384 × 128-bit words. Each bank has two
ports:

- **Port A** reads and writes. It is shared by the buffer controller and
  the sequencer.
- **Port B** only reads, and belongs to the reprojection engine.

Reads return data one cycle later. A read of a word in the cycle it is
written returns the old contents.

## Computation engine (`comp_engine`, `systolic_array`, `nonlinear_unit`)

The depth estimator and the saliency CNN run as series of INT8 matrix tiles.
The 768 KB SRAM is split into two arrays of 24576 × 128-bit words, one for
activations and one for weights. A word holds 16 INT8 values.

One command computes a 16×16 output tile:

`C = nl(A·B)`

- **Inputs.** Activation word `a_addr+k` holds column k of A, and weight
  word `b_addr+k` holds row k of B.
- **Output.** Row i of C goes to activation word `c_addr+i`.
- **`nl`** is the `nonlinear_unit`. It does an arithmetic right shift with
  round-half-up, an optional ReLU, and saturation to INT8.

**Systolic array.** The `systolic_array` is output-stationary: each PE keeps
one C[i][j]. A enters from the left and B from the top, each skewed by its
row or column index. The accumulators are final 2N−1 cycles after the last
input.

**Latency.** A command returns `done` K + 3N + 1 cycles after it is
accepted. The host ports write into both SRAMs and read the activation SRAM
between commands.

The dataflow, the SRAM split and the command format are choices made here.
The original gives only the array size, the names of the engine's parts
and the SRAM size.

## Cycle counts

| Operation | Cycles |
|---|---|
| frame bypass | 1 pixel / cycle in and out; decision 2 cycles after the last pixel |
| box of one entry (frame start) | ≈ 15 (9 in the engine) |
| candidate rejected by its box | 2 |
| full patch comparison | 279 in the engine, plus 5 for metadata and matrix |
| popularity increment | 3 |
| insertion | 51 writes |
| eviction | scan of all entries + 2 per streamed word + order-list shift |
| GEMM tile, reduction length K | K + 3·16 + 1 |

At 1 GHz and 10 frames per second, the budget is 100 M cycles per frame. A
frame of 1200 patches against a full buffer of 5120 entries needs roughly:

- 0.08 M cycles for the boxes;
- 12 M cycles for rejected candidates;
- a few million more for comparisons, insertions and evictions.

This is well inside the budget.

## Capacity

The DC buffer holds 5120 patches. The datasets used to evaluate the method
are 10 FPS clips:

- up to 3 minutes (1800 frames);
- about 10 minutes on average (6000 frames).

Even at the reduction factors reported for them (20× to 100× less memory
than full video), a whole clip keeps about 12,000 to 70,000 patches. That is
more than the buffer holds. The buffer is therefore a working set, and
eviction to main memory is part of normal operation.

The depth network (FastDepth, about 3.9 M INT8 parameters) is larger than
the 768 KB SRAM, so its weights must be streamed in layer by layer. Its
computation, about 60 M multiply-accumulates at 64×64, takes about 0.24 ms
on the 256-MAC array.

## Where this RTL departs from the original description

- The Frame Bypass Unit compares raw sensor values, not RGB values.
- The following are not specified in the original; the values used here are
  listed in the table above:
  - patch size;
  - pixel format;
  - frame size;
  - pose format.
- The saliency network outputs a score per patch. A patch is dropped when
  its score is ≤ ρ; thresholding a saliency map at ρ is described in the
  original.
- Depth arrives with each patch from outside. The depth network itself is
  not built.
- Gaze enters only through the saliency score.
- Candidate filtering by bounding box uses the patch's mean depth and
  compares the box with the new patch's 16×16 cell.
- A match compares the mean RGB565 difference over the overlapping pixels
  with τ, and also needs a minimum overlap.
- The eviction key is lexicographic (S_c, then P_c, then age).
- Patch mode does not read the reprojected pixel into a "write address
  buffer" for later use. The target address indexes the current patch
  directly during the same pass.
- Two parts of the accelerator drawing are reduced:
  - the sequencer and local buffer of the computation engine are reduced to
    one tile command;
  - the "Matrix Inverse" is the transpose-based rigid inverse inside
    `pose_unit`.
- Popularity saturates at 65535.

## Verification

Each block has a testbench in `tb/`. Every testbench:

- compares the module with a model written independently in the testbench;
- checks the cycle counts listed above;
- has a watchdog;
- prints `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_frame_bypass_unit` | small frames; skip, forced send and γ send; output stream contents; `frame_done` timing |
| `tb_systolic_array` | random INT8 matrices, K = 16 and 37, exact latency |
| `tb_nonlinear_unit` | random and corner values against a reference |
| `tb_comp_engine` | full tiles against a reference, latency K+3N+1 |
| `tb_pose_unit`, `tb_point_reproject` | random poses against a floating-point model (`tb_geom_pkg`) |
| `tb_dc_buffer` | all banks, both ports, read-during-write |
| `tb_buffer_controller` | 8 entries; increments, allocation, four evictions with back-pressure, order list |
| `tb_reproj_engine` | identity and shifted views: box, overlap count, difference sum, match rule, latency |
| `tb_tsrc_ctrl`, `tb_epic_accelerator` | three frames on a 64×32 image with a 4-entry buffer; the accelerator test adds a GEMM tile |
| `tb_epic_top` | end to end: all of the above; counts every mechanism and fails if one never occurs |
| `tb_epic_top_full` | the top at its full default size (640×480, 5120 entries, 4 MB): bypass on full frames, insertion, drop, match, GEMM |

The mechanisms that `tb_epic_top` counts are:

- frame skipped;
- frame sent by the counter;
- frame sent by the threshold;
- patch dropped;
- patch inserted;
- match (popularity increment);
- box rejection;
- full comparison;
- eviction;
- GEMM tile.

To run a testbench with Verilator, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_epic_top \
    rtl/epic_pkg.sv tb/tb_geom_pkg.sv tb/tb_epic_top.sv -y rtl -y tb
./obj_dir/Vtb_epic_top +verilator+rand+reset+2
```

The full-size testbench takes under half a minute.
