# Themis: hardware for patch-robust real-time video object detection

A physical adversarial patch is a small, printed, highly textured region, for
example on a T-shirt. It can make a DNN object detector miss or mislabel
whatever it is attached to. Such a patch works by producing a few very strong,
tightly clustered activations in the first layers of the network. That
locality is what this design exploits:

1. **Find** the places where strong first-layer activations cluster (the
   *candidates*).
2. **Occlude** each candidate in turn and run the network again.
3. **Vote** on the labels. Suppose exactly one occluded run disagrees with
   every other run while those all agree with each other. Then that candidate
   was the patch, and the label of that run is the recovered label.
   Otherwise the frame is benign and the majority label is reported.

Doing this on every video frame would cost one extra inference per
candidate. The hardware here cuts that cost in three ways:

- **Key frames.** The full detection runs only on every tenth frame.
- **Warping between key frames.** The other frames reuse the key frame's
  result, moved by the optical flow.
  - In the *accuracy-oriented* (AO) flow, the frame is inferred with the
    warped patch region blanked out.
  - In the *performance-oriented* (PO) flow, the clean key-frame features are
    warped and only the end of the network is run.
- **Computation reuse.** A masked image differs from the original only inside
  the masked region. Only that region is recomputed, layer by layer. The
  unchanged neurons around it are taken from a small buffer filled during
  the original inference: the *masked neuron buffer* (MNB).

The RTL is the logic added to an Eyeriss-like accelerator. The accelerator
itself is not part of it: 2x2 PE arrays of 24x24 PEs, INT8, with a 64 KB
global buffer per array. The added logic is:

- a candidate search unit;
- per PE array, an 8 KB MNB;
- per PE array, a splice unit that feeds masked layers;
- the voting logic;
- a controller that schedules all of the above frame by frame.

The PE arrays, the scalar function unit and DRAM are outside the RTL. So is
the optical-flow computation, which runs as a DNN or in software. The top
module brings out their connections as ports.

## Block overview

```
                    heat stream (layer-1 map)
 accelerator ──────────────────────────────► lisf_search ──► candidates
     ▲   │ cmd/rsp                             (heat_binarizer, lisf_map_buffer,
     │   ▼                                      window_counter, overlap_merge)
 themis_controller ◄───────────────────────────────┘
   │  region_calc (per layer), region_warp (AO),
   │  MNB/GB allocation, descriptors desc[cand][map]
   │
   ├──► voting_logic (L0..Lk → patched?, label)
   │
   └──► per PE array a = 0..3:
          capture stream ─► masked_neuron_buffer (8 KB, padding rings)
          masked reads   ─► feature_splice ─► zero | global_buffer | MNB
          write-back     ─► feature_splice ─► global_buffer (64 KB)
```

| file | role |
|---|---|
| `rtl/themis_pkg.sv` | widths, rectangle/descriptor/command types, ring-address helpers |
| `rtl/heat_binarizer.sv` | heat = channel sum of ReLU(act); binary map with threshold beta·max |
| `rtl/lisf_map_buffer.sv` | H×W-bit map, one row per word, 1 write + 2 read ports |
| `rtl/window_counter.sv` | incremental S×S window count, theta test |
| `rtl/overlap_merge.sv` | >30 % overlapping windows become one candidate |
| `rtl/lisf_search.sv` | the four above, chained |
| `rtl/region_calc.sv` | masked region → affected region and padded area of one layer |
| `rtl/masked_neuron_buffer.sv` | padding-ring store, captured during the original inference |
| `rtl/feature_splice.sv` | input neurons of a masked layer from zero / GB / MNB; write-back |
| `rtl/global_buffer.sv` | 64 KB dual-port buffer of one PE array |
| `rtl/voting_logic.sv` | orphan / majority vote |
| `rtl/region_warp.sv` | moves the kept patch region by the optical flow |
| `rtl/themis_controller.sv` | frame schedule and accelerator commands |
| `rtl/themis_top.sv` | everything above, wired for four PE arrays |

## Finding candidates

The search works on the output of the first layer. By default that is
112×112×32 for a 224×224 input. It runs beside the inference, off its
critical path.

**Heat and threshold.** Each position's *heat* is the sum of its channels
after ReLU. Selecting an exact top-K of the heat values would need a sort.
Instead, a position is *important* when `heat > beta * max(heat)`, with
beta = 0.75. The maximum has to be known first, so the accelerator streams
the first-layer map twice: a max pass, then a binarize pass. Each pass is one
INT8 value per cycle, channel innermost. The binarize pass writes one
112-bit row per image row into the map buffer. beta is a Q0.8 input
(192/256).

**Window count.** An S×S window (S = 26) slides with stride 1. A window is
*important* when more than theta = 0.85 of its neurons are important. In
Q0.8 the test is `count * 256 > 218 * S * S`. The counting is incremental.
The scan keeps one counter per column for the current band of S rows.

- **Moving down one row.** Each column counter changes by the bits of the
  row entering and the row leaving the band. The pair is decoded with a
  2-bit table:

  | entering, leaving | change |
  |---|---|
  | 00 | 0 |
  | 01 | +1 |
  | 10 | −1 |
  | 11 | 0 |

  Both rows come from the map buffer in one cycle through its two read
  ports.
- **Moving right by one column.** The window count adds the entering
  column's counter and subtracts the leaving column's counter.

One window is produced per cycle, so the whole scan takes 3H + (H−S+1)·W + 1
cycles. That is 9,881 cycles at the default size.

**Merging.** Windows that overlap by more than 30 % of their area describe
the same candidate. The test is `(S−|dy|)(S−|dx|)·100 > 30·S·S`. Each new
important window is compared with the first window (the *anchor*) of every
existing candidate. It joins the first candidate it matches, or opens a new
one. Each candidate tracks the range of window positions merged into it. The
reported rectangle is the window at the centre of that range. At most NCAND
(8) candidates are kept; more raise `overflow`.

The candidate rectangles are in first-layer coordinates. The controller
scales them to the input image by the first layer's stride (FIRST_SH = 1,
i.e. ×2).

## Masked regions through the network

Occluding a region of the input changes a growing, then shrinking, region of
every later feature map. Recomputing a layer's changed outputs also needs a
margin of unchanged inputs around them: the *padding ring*. For a layer with
kernel K, stride S and zero padding P, an input region [a, b] (per dimension)
gives:

```
affected outputs   lo = ceil((a + P − K + 1) / S),   hi = floor((b + P) / S)
padded input area  [lo·S − P,  hi·S − P + K − 1]
```

Both are clipped to the map. `region_calc` evaluates this combinationally.
The controller applies it layer after layer. A fully connected layer is a
kernel as large as its input, so its padded area is the whole map.

Take the 224×224 example network: 3×3/2 conv → 112×112×32, 2×2/2 pool →
56×56×32, 3×3/2 conv → 28×28×64, 2×2/2 pool → 14×14×64, fully connected to
10 classes. With a 50×50 masked input, the chain gives these sizes:

| map | masked | padded |
|---|---|---|
| input | 50 | 53 |
| C1 | 26 | 28 |
| P2 | 14 | 17 |
| C3 | 8 | 10 |
| P4 | 5 | 14 |

These are the published sizes of this example. The chain reproduces them
exactly when the region starts at a pixel ≡ 10, 11, 14 or 15 (mod 16), for
example at 154. Other starting positions give sizes that differ by a pixel or
two. The formula is this design's reading of the example; only the sizes are
published.

## Computation reuse: MNB and splice

For each candidate c and map m, the controller writes a descriptor
`desc[c][m]`. It holds:

- the masked region `mrect` and the padded area `prect`;
- where the ring lives in the MNB (`mnb_base`);
- where the recomputed masked features live in the global buffer
  (`gb_base`);
- a `fits` bit.

The channels of a map are spread over the four PE arrays: channel c belongs
to array c mod 4. Each array therefore holds ⌈channels/4⌉ channels of every
ring and masked region. Channel indices on the per-array ports are local,
c div 4.

A candidate goes through three phases:

1. **Capture, during the original inference.** Each PE array offers every
   activation it produces on its `cap_*` stream (valid/ready). The MNB
   writes an activation into the ring of every candidate whose ring contains
   it. The address is `mnb_base + ch·ring_size + ring_offset(y, x)`, where
   `ring_offset` is the raster index inside the ring: the full-width rows
   above the hole, then the left and right strips beside it, then the rows
   below. Rings of different candidates can share neurons. Such an
   activation needs one write per candidate, one per cycle, and `cap_ready`
   drops meanwhile (`cap_stall`). The stream must then hold its item; an
   assertion checks this.
2. **Masked layers.** The PE array requests input neurons with
   (candidate, map, channel, y, x) on `rq_*`. One cycle later `feature_splice`
   returns the value and its source:
   - inside the masked region of the input image: zero, since the image is
     occluded there;
   - inside the masked region of a deeper map: the global buffer, which
     holds the features recomputed by the previous masked layer;
   - in the padding ring: the MNB, reused from the original inference;
   - anywhere else: `SRC_NONE`, because the request is outside the padded
     area.
3. **Write-back.** The PE array returns the recomputed masked features of
   the next map on `wb_*`. They go to
   `gb_base + ch·area + row·width + col` in the global buffer. Results
   outside the masked region, or for the input map, are dropped
   (`wb_drop`). Write-back and GB reads share port B of the global buffer,
   so the PE array must not issue both in one cycle; an assertion checks
   this.

**Allocation.** The controller allocates both buffers first-fit in candidate
order. Masked features use the global buffer from GB_MASK_BASE = 32 KB
upward. A descriptor gets `fits = 1` only if three things hold:

- its ring fits in the MNB;
- its masked features fit in the GB;
- all earlier maps of the same candidate fitted.

A candidate with any entry that does not fit is run with `reuse = 0`, meaning
the accelerator recomputes that masked image in full, and `mnb_overflow` is
set.

**What fits.** A candidate is always one whole search window: 26×26 on the
112×112 map, 52×52 input pixels, since the window size is the largest patch
the search is meant to find. In the 224×224 example network such a candidate
needs 3,673 to 4,817 bytes of each array's 8 KB MNB, depending on where the
window lies. The biggest ring belongs to the fully connected layer, because
its padded area is the entire 14×14×16 per-array map. It also needs 7,800 to
8,824 bytes of masked features in the GB. So one candidate is always fully
reused, two fit only at some positions, and three never do. The mean patch
sizes of the evaluated datasets all lie inside one window:

| dataset | mean patch area | as a square on 224×224 |
|---|---|---|
| MS COCO | 2.81 % | 38×38 |
| FLIC | 1.47 % | 27×27 |
| LSP | 3.60 % | 43×43 |
| T-shirt | 2.01 % | 32×32 |

Patches larger than 52×52 (digital attacks go up to 130×130) span several
windows. Those windows merge into one candidate that keeps a single window,
so such a patch is only partly occluded. Covering it needs S ≥ 65. At that
size a candidate needs about 49 KB of masked features, more than the 32 KB
reserved, and would fall back to full recomputation.

## Voting

`voting_logic` holds L0 (the original label) and L1..Lk (the labels of the k
masked runs). Counting takes one label per cycle. Label Li is compared with
all k+1 labels in parallel, and the number of equal labels is stored as
cnt[i]. The candidate i is the patch when `cnt[i] == 1 && cnt[0] == k`. In
words, Li matches only itself, and L0 agrees with every other label. Since
the orphan differs from L0, this is exactly the rule "one orphan, all others
agree". With k = 1 it reduces to L1 ≠ L0. Otherwise the label with the
largest count wins, ties going to the lowest index (L0 first). The result
appears k + 3 cycles after `start`.

## Frame schedule

`themis_controller` counts frames. Frame 0 and every KEY_INTERVAL-th frame
after it (10 % key frames) are key frames. The controller talks to the
accelerator with one command at a time. A command is `cmd_valid/cmd_ready`
with an `accel_cmd_t`. The accelerator ends it with a one-cycle `rsp_valid`
carrying a label.

Key frame (AO and PO alike):

| step | command / action | what happens |
|---|---|---|
| 1 | `OP_FIRST_LAYER` | layer 1 computed, heat streamed (max pass) |
| 2 | `OP_HEAT_REREAD` | heat streamed again (binarize pass); the window scan starts by itself |
| 3 | region build | waits for the search (it may finish before or after the response), then one descriptor per cycle: `region_calc`, MNB/GB allocation |
| 4 | `OP_COMPLETE` | rest of the original inference; MNBs capture the rings; response = L0 |
| 5 | `OP_MASKED` ×k | candidate i occluded (`mask_rect` in input pixels, `reuse` flag); response = Li |
| 6 | vote | result on `res_*`; a detected patch region is kept |

Non-key frame:

- **AO** (`po_mode = 0`). `region_warp` moves the kept region by the flow
  vector. The vector is rescaled by a power-of-two shift with rounding, and
  the region keeps its size inside the image. The frame is then inferred with
  that region blanked (`OP_FULL_MASKED`). The moved region becomes the kept
  region for the next frame. With no kept patch, the frame is inferred
  unmasked.
- **PO** (`po_mode = 1`). `OP_WARP_FEAT`: the accelerator warps the clean
  key-frame features and runs the network suffix.

`res_valid` reports each frame with:

- `res_key`: whether it was a key frame;
- `res_patched`: a patch was detected (key frame) or occluded (non-key
  frame);
- `res_label`: the label;
- `res_region`: the patch region in input pixels.

At default size the defence's own work per key frame is two heat passes of
112·112·32 = 401,408 cycles each plus the 9,881-cycle scan. Voting takes a
few cycles. The masked inferences dominate, and they are the accelerator's.

## Parameters and defaults

| parameter | default | origin |
|---|---|---|
| IMG_SIZE | 224 | example input size |
| H, W, CH | 112, 112, 32 | first layer of the example |
| S | 26 | first-layer size of a 50×50 masked region; window size is not published |
| beta_q8, theta_q8 (inputs) | 192 (0.75), 218 (0.852) | published beta = 0.75, theta = 0.85 |
| overlap | 30 % | published |
| KEY_INTERVAL | 10 | published 10 % key frames |
| NARRAYS | 4 | 2×2 PE arrays |
| MNB_BYTES | 8192 | published, per array |
| GB_BYTES | 65536 | published, per array |
| GB_MASK_BASE | 32768 | own choice |
| NCAND, NMAPS | 8, 8 | own choice |
| COORD_W, LABEL_W, DATA_W | 8, 8, 8 | INT8 published; the others are own choices |

## Where this design departs from, or adds to, the published description

These are this design's own choices, where the description is silent:

- **Heat definition.** Heat is the channel sum of ReLU activations.
- **Two-pass search.** The map is streamed twice for the adaptive threshold.
- **Window size.** S is not published. The default 26 matches the
  first-layer size of the 50×50 example region. Together with θ = 0.85 it
  flags only patches whose footprint fills at least 576 of the window's 676
  neurons, about 48–52 input pixels if exactly the patch's neurons are
  important. The mean patches of the evaluated datasets (27–43 pixels) need
  a smaller S: roughly S ≤ 1.08 × the footprint side (S ≤ 20 for a 38-pixel
  patch).
- **Merge rule.** Windows are compared against the candidate's first window
  only, and the central window is kept.
- **Candidate limit.** NCAND = 8.
- **Ring layout and addresses.** The MNB ring layout, the GB address layout
  of masked features and the channel-to-array mapping.
- **Capture.** The capture stream and its stall when rings share neurons.
- **Commands and allocation.** The command set, the first-fit allocation and
  the full-recompute fallback.
- **Flow input.** One flow vector per region with power-of-two resizing.
  The flow field itself is computed elsewhere.
- **Vote ties.** Majority ties are broken toward the lowest index.

Left out:

- **Baseline hardware.** The baseline accelerator (PE arrays, SFU, DRAM
  interface) and the optical-flow computation are not here.
- **Detector sizes.** Real detectors such as YOLOv2 at 416×416 exceed the
  8-bit coordinates, the 112×112 search map and the 8 tracked maps. They
  need larger package widths and parameters.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. References are computed
independently inside the testbenches:

- brute-force window counts;
- a full reference of the search (heat, threshold, windows, anchor merge);
- the published region sizes;
- an independent evaluation of the region formula and of the allocation;
- random window streams for the merge, random layers for the region formula
  and random flows for the warp;
- the voting rule on the published cases plus random label sets.

The end-to-end testbenches share `tb/themis_top_env.svh`. It contains a
behavioural accelerator with these behaviours:

- It streams heat maps with hot blobs.
- It offers every activation of every map to the capture ports.
- For every masked inference with reuse, it reads each padded area through
  the splice. It checks the source and data of every neuron: zero, the
  values it wrote back, or the original activations kept by the MNB. It then
  writes back the next map.
- It labels a frame with a patch as adversarial unless the patch centre is
  occluded.

The environment counts each mechanism and fails the test if any never
happened:

- key frames;
- AO warped occlusion;
- PO feature warp;
- detection by vote;
- benign majority;
- MNB capture stall;
- MNB overflow;
- reuse and recompute of masked inferences;
- write-back;
- the three splice sources;
- search overflow.

The end-to-end testbenches are:

- `tb_themis_top`: a 32×32 input with a 16×16×4 first layer, 4×4 window,
  two candidates, a 200-byte MNB and a key frame every third frame.
- `tb_themis_top_full`: the top with every parameter at its default. It runs
  30 frames (3 key frames, ~1 M cycles each) of the 224×224 example network.
  Rings of different candidates do not touch at this size, so it does not
  demand a capture stall; with eight candidate slots it does not overflow
  the search.
- `tb_themis_workload_window`: the same default-size top and network with
  48×48 patches, smaller than the 52×52 window. Each patch must be detected,
  and the region reported must be one whole window that covers it.

To run any testbench with plain Verilator (the package must come first;
`-Wno-fatal` keeps the remaining lint warnings, such as unused bits of shared
structures, from stopping the build):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/themis_pkg.sv \
          $(ls rtl/*.sv | grep -v themis_pkg) tb/tb_themis_top.sv \
          --top-module tb_themis_top
./obj_dir/Vtb_themis_top
```

The full-size test takes about 20 s.
