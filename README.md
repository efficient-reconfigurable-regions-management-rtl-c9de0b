# Adaptive CSD cut detector with relocatable partial bitstreams

A shot cut in a video is an abrupt change of content between two consecutive
frames. This design detects cuts by comparing the MPEG-7 *color structure
descriptor* (CSD) of each frame with that of the previous one: if the
Manhattan distance between the two histograms exceeds a threshold, a cut is
reported. The detector comes in three versions that differ only in the number
of quantized colors (8, 16 or 32). Fewer colors mean a smaller circuit and a
slightly coarser descriptor.

On a partially reconfigurable FPGA the system loads whichever version suits
the moment into a free partition of a reconfigurable region. To avoid storing
one partial bitstream per version *and* per possible partition, only one
bitstream per version is kept, generated for the version's first partition.
It is adapted on the way to the configuration port by rewriting the frame
addresses it contains. The RTL here covers both halves:

* the cut detector itself (`cut_detector`, parameter `N_COLORS` = 8/16/32);
* the bitstream relocation filter (`far_relocator`), which rewrites the frame
  address register (FAR) writes of a Virtex-5 partial bitstream as it streams
  through at one 32-bit word per clock.

`dpr_cut_detect_top` places the two side by side.

## 1. The color structure histogram

The image is made of color indices `0 .. n-1` (quantization is done upstream,
see section 7). An 8×8 *structuring element* is moved over every position
where it lies fully inside the frame. At each position, every color that
occurs in it **at least once** adds one to its bin. The number of pixels of that
color in the window does not matter. So bin `k` counts the element positions
that contain color `k`, and no bin can exceed

    NP = (height − 7) × (width − 7) = 633 × 473 = 299 409   (640 lines of 480 pixels)

which sets the bin counters to 19 bits (2^19 ≥ NP).

The distance between frames `i` and `i−1` is `d = Σ_c |h_i(c) − h_{i−1}(c)|`. A
cut is reported when `d > α`, the threshold input.

## 2. Forming the 8×8 window from a raster stream (`structure_element`)

Pixels arrive in raster order, one per clock at most (`pix_valid`), with `sof`
on the first pixel of a frame. The window is a literal 8×8 array of registers
`Li-Rj` (line 1..8, register 1..8), plus seven line FIFOs:

```
 pix ─► L8-R1 ► L8-R2 ► … ► L8-R8 ─► FIFO 7 ─► L7-R1 ► … ► L7-R8 ─► FIFO 6 ─► … ─► L1-R1 ► … ► L1-R8
```

Each FIFO holds `WIDTH − 8` pixels, so the pixel entering `L(k-1)-R1` is the
one that entered `Lk-R1` exactly one image line earlier. After a pixel at
(row r, column c) has been shifted in, register `Li-Rj` holds pixel
(r − 8 + i, c − j + 1). In the RTL, `win[i-1][j-1]` is register `Li-Rj`.

A row/column counter follows the incoming pixel. `win_valid` is raised for
positions with r ≥ 7 and c ≥ 7. Those are exactly the NP positions whose window
lies in one frame and does not wrap around a line end. `frame_done` marks the
last one. Both, and the window, are registered: they appear one cycle after
the pixel. The FIFOs are circular buffers in memory arrays (7 × 472 × 5 bits
for 32 colors), a natural fit for block RAM. Their contents are not reset,
because no counted position reads a FIFO entry before the current frame has
written it.

## 3. Color detection and histogram update

`color_detection` contains one `color_detector` per color. Each of those
contains eight `line_detector`s, one per window line. A line detector compares
its 8 registers with its color and ORs the results. The color detector ORs the
8 line results. The n-bit presence vector is purely combinational.

`histogram_update` contains n `bin_counter`s. On each cycle with `win_valid`,
counter k adds `present[k]`. `csd_extractor` chains the three blocks. Two cycles after the
last pixel of a frame it pulses `csd_valid` with the finished histogram, and
it clears the counters in that same cycle. The next frame can follow without
a gap: its first counted position is seven lines away.

## 4. Register sets and the distance unit

`csd_register_sets` implements the two register sets: on `load`, set 1 takes
the new histogram (frame i) and set 2 takes the old content of set 1 (frame
i−1).

`distance_calc` is deliberately serial. It has one subtractor, one absolute
value, one adder and one accumulator register, and it sums one bin per clock:

```
start ─► [acc = 0] ─► n cycles: acc += |set1[idx] − set2[idx]| ─► compare acc > α ─► done, distance, detect_en
```

`done` is high `n + 2` cycles after the cycle in which `start` is high. `distance`
and `detect_en` hold their values until the next result. In `cut_detector` the
measurement starts one cycle after the register sets load. So the result comes
`n + 3` cycles after `csd_valid`, which is far shorter than the seven lines
before the next frame's first counted position. An assertion checks that the
unit is idle when a new histogram arrives. No comparison is made for the first frame after reset,
because set 2 is still empty then (`prev_valid`).

## 5. Module versions and partitions

The three versions (`N_COLORS` = 8, 16, 32) are meant to be alternatives
loaded into the same reconfigurable region. The reference floorplan on a
Virtex-5 SX50T is as follows:

| region | size (frames) | partitions | CSD_8 (9 CLB + 1 BRAM frames) | CSD_16 (16 + 1) | CSD_32 (27 + 1) |
|---|---|---|---|---|---|
| PRR1, PRR2 | 27 CLB + 6 BRAM | 3 equal | 1 partition, 3 locations each | 2 partitions, 2 locations each | whole region |
| PRR3 | 18 CLB + 4 BRAM | 2 equal | 1 partition, 2 locations | whole region | does not fit |

This gives 8 possible locations for CSD_8, 5 for CSD_16 and 2 for CSD_32. All
of them are served from one stored bitstream per version (112, 224 and 336 KB).
The partitioning, the proxy-logic pins and the fixed routing between partitions
and static logic are floorplanning constraints. They have no RTL counterpart.
What the RTL provides is the run-time half: relocating a bitstream to one of
these locations.

## 6. Relocating a partial bitstream (`far_relocator`)

A Virtex-5 partial bitstream contains data frames preceded by writes to the
frame address register. The FAR value places the frames:

| bits | 23:21 | 20 | 19:15 | 14:7 | 6:0 |
|---|---|---|---|---|---|
| field | block type | top/bottom | row (clock region) | major column | minor frame |

Moving a module to another compatible partition means changing the
row, major and top/bottom fields of every FAR value and nothing else. The
partitions of one module are built from identical resources. For example, with
`row_offset = 1`, `0x00101400` becomes `0x00109400`.

The filter passes words unchanged until the sync word `0xAA995566`. From then on
it parses configuration packets:

* type-1 header `[31:29]=001`: opcode `[28:27]`, register `[17:13]`, word count `[10:0]`;
* type-2 header `[31:29]=010`: word count `[26:0]` for the register of the preceding type-1 header;
* payload words, which are counted down and skipped.

The first payload word of a type-1 **write** to register 1 (the FAR, header
`0x30002001`) is replaced. Its new value is
`{type, tb ^ flip_half, row + row_offset, major + major_offset, minor}`, with
the additions wrapping modulo the field size. Frame data
(FDRI payload) therefore passes untouched even when it happens to contain the
FAR-write header. A DESYNC command (`0x0000000D` written to register 4)
returns the filter to the unsynchronised state. The relocation target
(`reloc_t`) is an input; which offsets are legal follows from the floorplan.

Throughput is one word per cycle with one cycle of latency and no
back-pressure. At 100 MHz on a 32-bit port that is 400 KB/ms, so the three
bitstreams take 0.28, 0.56 and 0.84 ms. Without partitioning every version
would need the full-region bitstream, i.e. 0.84 ms.

**Limitation: the CRC.** The bitstream's CRC check word is passed unchanged.
Once FAR values change, a device that checks the CRC will reject the relocated
stream unless the CRC word is recomputed, or CRC checking is disabled in the
bitstream. Neither is implemented here, because the method of updating it is
not part of the source description.

## 7. What is assumed beyond the source description

* Pixels enter as color indices. The color space and the quantizer that produce
  them are not specified and not built.
* Frame size: the description gives height 640 and width 480. It is taken
  literally: a line has 480 pixels and a frame has 640 lines.
* Handshakes (`sof`/`pix_valid`, `start`/`done`, `csd_valid`), latencies,
  reset behaviour, the bin-clearing point, the distance width
  (`19 + log2 n` bits) and the level behaviour of `detect_en` are this design's
  choices.
* The distance is computed serially (one bin per cycle), as the
  one-subtractor/one-adder description implies. A drawing with parallel
  subtractors exists as an illustration of the formula only.
* The FAR bit positions, the packet parser and the offset-based relocation
  target are this design's implementation of "identify the FAR writes and
  change them". The CRC is not handled (section 6).
* Picking a representative key frame per shot is left to whatever consumes
  `detect_en`; no key-frame logic is built.
* The top level holds one cut detector. The floorplan has three
  reconfigurable regions, but it is not stated whether several detectors run
  at once. The configuration port (ICAP), the bitstream storage and the system
  manager that chooses versions and partitions are outside the RTL. Their
  signals are top-level ports.

## 8. Interfaces at a glance (`dpr_cut_detect_top`, defaults N_COLORS=32, WIDTH=480, HEIGHT=640)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `sof`, `pix_valid`, `pix` | in | 1, 1, 5 | raster pixel stream (color indices) |
| `threshold` | in | 24 | α |
| `csd` | out | 32 × 19 | histogram of the latest frame |
| `dist_valid`, `distance`, `detect_en` | out | 1, 24, 1 | per-frame result from the second frame on |
| `reloc` | in | 14 | `{flip_half, row_offset[4:0], major_offset[7:0]}` |
| `bs_valid`, `bs_data` | in | 1, 32 | partial bitstream words |
| `cfg_valid`, `cfg_data` | out | 1, 32 | relocated words for the configuration port |
| `cfg_word_count`, `cfg_far_count` | out | 32, 16 | words passed, FAR values rewritten |

Synthesised at the defaults (generic coarse synthesis), the top has about
2 600 word-level cells, 2 400 flip-flops and 16.5 kbit of line-buffer memory.

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against values computed independently. `tb/csd_ref_pkg.sv` computes the CSD
straight from its definition, with no line buffers, and generates synthetic
"scenes" of colored rectangles with small per-frame jitter:

| testbench | what it establishes |
|---|---|
| `tb_color_detector`, `tb_color_detection` | presence bits for random windows |
| `tb_histogram_update` | bins against a software model, incl. clears |
| `tb_structure_element` | window contents at every position, NP valid positions, frame end, with idle cycles |
| `tb_csd_extractor` | histograms of 4 frames against the reference, `csd_valid` timing |
| `tb_csd_register_sets` | set 1 / set 2 shifting, `prev_valid` |
| `tb_distance_calc` | L1 distance, `d > α`, latency n+2 |
| `tb_cut_detector` | 6 frames with one cut (16 colors): distances, detection, latency |
| `tb_far_relocator` | the printed FAR example, random relocations, payload lookalikes, DESYNC, counts |
| `tb_workload_csd_versions` | CSD_8 and CSD_16 at full frame size (640×480), one cut each, exact distances |
| `tb_dpr_cut_detect_top` | **full size**: 4 frames of 640×480 with 32 colors (one cut), and the 112/224/336 KB bitstreams relocated concurrently; reports 0.28/0.56/0.84 ms |

Each prints `TB_RESULT checks=N failures=M`. To run one with plain Verilator:

```sh
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
  rtl/csd_pkg.sv tb/csd_ref_pkg.sv rtl/*.sv tb/tb_cut_detector.sv \
  --top-module tb_cut_detector -Mdir obj && ./obj/Vtb_cut_detector
```

The full-size test takes about 15 s to build and run. To try another version,
change `N_COLORS` (and `WIDTH`/`HEIGHT`) on `cut_detector` or on the top. All
widths follow from the functions in `csd_pkg`.

## 10. Files

`rtl/csd_pkg.sv` holds sizes, the size functions and the FAR and relocation
types. The other files under `rtl/` each hold one module:
`line_fifo`, `structure_element`, `line_detector`, `color_detector`,
`color_detection`, `bin_counter`, `histogram_update`, `csd_extractor`,
`csd_register_sets`, `distance_calc`, `cut_detector`, `far_relocator`,
`dpr_cut_detect_top`.
