# GrateTile: a compressed, tile-addressable feature-map store for CNN accelerators

A CNN accelerator works on a layer one tile at a time. It loads an input
window from external memory, lets the processing elements (PEs) work on it,
and moves on. After ReLU, activations are mostly zero, so compressing the
feature maps in DRAM would save much of the traffic. But a compressed stream
cannot be entered at an arbitrary pixel. Neighbouring windows also overlap by
the convolution's halo. Compression therefore only pays if the map is cut
into pieces that are each compressed on their own, and if every window is an
exact union of pieces. Otherwise a piece that is only partly needed must
still be fetched and decompressed whole.

GrateTile picks those cuts from the layer itself. Output tiles of width `tw`
with stride `s` step through the input by `s*tw`. Every input window of the
layer therefore starts at the same position modulo that step, and it ends at
the same position too. Cutting the map at exactly these two positions, per
axis and periodically, makes every window edge fall on a cut. The cuts come
out uneven, for example 2 and 6 pixels for a 3x3 kernel. Any divisor of the
step works as the period. This design fixes the period at 8, so one setting
serves nearly all layers.

Each 8x8-pixel by 8-channel block, called a *group* (512 16-bit words), is
therefore split into four *subtensors*. Each subtensor is compressed by
itself and stored at a 16-byte cache-line boundary. One 48-bit metadata
record per group finds all four: a line pointer plus the four compressed
sizes.

This repository holds synthesizable SystemVerilog for that memory subsystem:
- the division unit;
- the path that stores an output feature map in this form;
- the path that assembles an input tile from it;
- the on-chip tile buffer;
- self-checking testbenches for every block and for the whole subsystem.

## The division

A layer has kernel size `2k+1`, stride `s` and dilation `d`. The window of
output tile `otx` spans, in input coordinates,

    x_lo = otx*s - k*d        x_hi = (otx + tw - 1)*s + k*d + 1   (exclusive)

Modulo the step `s*tw`, these two edges are `-kd` and `kd - s + 1`. The
division is the set of both:

    G = { g0, g1 } = { -kd mod 8,  kd-s+1 mod 8 }

The period 8 stays valid as long as `s*tw` is a multiple of 8, which holds
for the usual tile widths. `gt_config` computes:

| output | formula | meaning |
|---|---|---|
| `g0` | `-kd mod 8` | where a group starts |
| `g1` | `kd-s+1 mod 8` | where its second segment starts |
| `l0` | `(g1-g0) mod 8` | length of the first segment; 0 becomes 8 (a 1x1 kernel, one uniform segment) |
| `sh` | `(8-g0) mod 8` | shift such that `u = x + sh` is a multiple of 8 at every group start |

Examples:

| layer | G | segments |
|---|---|---|
| 3x3 s1 | {7,1} | 2 and 6 |
| 3x3 s2 | {7,0} | 1 and 7 |
| 5x5 s1 | {6,2} | 4 and 4 |
| 11x11 s4 | {3,2} | 7 and 1 |
| 1x1 s1 | {0,0} | one segment of 8 |

Each axis alternates a segment of `l0` and a segment of `8-l0`. Each
subtensor in group `(gx, gy)` is named `q = {yseg, xseg}`:

| q | rows x columns |
|---|---|
| q0 | l0 x l0 |
| q1 | l0 x (8-l0) |
| q2 | (8-l0) x l0 |
| q3 | (8-l0) x (8-l0) |

A coordinate belongs to group `u/8`. A window edge must have `u mod 8` equal
to 0 or `l0`. The fetch path checks this and reports a window that breaks it
as misaligned (`err`).

Group `(gx, gy)` covers `x = 8*gx - sh ... 8*gx - sh + 7`. The groups along
the left and top edges therefore reach into negative coordinates. Pixels
outside the map are the convolution's zero padding. They are *stored* as
zeros, which compress to almost nothing. A halo window at the border is then
fetched like any other, with no special cases.

## Storage format and metadata

- **Words and lines.** Words are 16 bits. Eight channels form a channel
  group, so one pixel of one channel group is one 128-bit line.
- **Placement.** The four subtensors of a group are stored back to back, in
  order q0, q1, q2, q3. Each starts on a line boundary.
- **Metadata record (48 bits):**

      [47:20]  28-bit line pointer   (32-bit byte address / 16)
      [19:0]   size of q0 | q1 | q2 | q3 in lines, packed from bit 0

- **Size fields.** The field of `q` is `clog2(npix_q + 1)` bits wide, where
  `npix_q` is the subtensor's pixel count.

  | l0 | field widths | total |
  |---|---|---|
  | 2 | 3+4+4+6 | 17 bits |
  | 4 | 5+5+5+5 | 20 bits, the widest case |
  | 1 | 1+3+3+6 | 13 bits |

- **Overhead.** 48 bits of metadata per 512 words is 0.6 %.
- **Raw fallback.** Sizes can stay this narrow because a subtensor never
  takes more lines than its raw form. If bitmask coding would not save at
  least one line, the subtensor is stored raw, one line per pixel. The
  decoder recognises that case by `size == npix`.
- **Record index.** The record of group `(gx, gy)` of channel group `cg` is
  at index `(cg*GY + gy)*GX + gx`, where `GX` and `GY` are the group-grid
  dimensions.

**Locating a subtensor** (`gt_subtensor_addr`) is the two-step rule: take the
record's pointer, then add the sizes of the subtensors stored before `q`. One
28-bit adder and a short chain of 7-bit adders do it in one cycle,
combinationally.

### Bitmask coding

`gt_bitmask_enc` and `gt_bitmask_dec` implement the coding:

- **Chunks.** The pixels of a subtensor are taken in raster order, two at a
  time. That makes a 16-element chunk: element `e` is pixel `e/8`, channel
  `e%8`.
- **Per chunk.** The encoder emits one 16-bit mask word (bit `e` set for a
  non-zero element), then the non-zero words in element order. An odd last
  pixel forms a chunk of its own, with the upper mask byte zero.
- **Packing.** The word stream is packed little-endian into 128-bit lines and
  the last line is zero-padded.
- **Size.** A coded subtensor therefore takes
  `ceil((ceil(npix/2) + nonzeros) / 8)` lines.

The codec is element-serial: one word per cycle, about 19 cycles per pixel
pair when encoding. It was written to be obviously correct, not fast. See
"Departures" below.

## Storing a map: `gt_store`

Each request stores one group. For every subtensor, the store path:

1. reads the subtensor's pixels from the pixel source (a read strobe with
   `(y, x, cg)`; data arrives one cycle later) and counts non-zero words;
2. chooses raw or coded from that count;
3. reads the pixels again and streams them through the encoder to the line
   write channel.

After the fourth subtensor it writes the 48-bit record. A bump allocator
(`next_ptr`) hands out group pointers. `alloc_valid`/`alloc_ptr` load it,
typically once per layer. Counters report how many subtensors went raw and
how many were coded.

## Assembling a tile: `gt_fetch` and `gt_tile_buf`

A fetch request names a window and a range of channel groups. `gt_top` forms
the window from an output tile `(otx, oty, tw, th)` with the formulas above.
The controller walks the window segment by segment: channel group, then row
of segments, then left to right. For each subtensor it:

- finds the group and segment of the subtensor's top-left corner, and flags
  misalignment;
- reads the group's metadata record. The last record read is kept, because a
  window usually holds two or four subtensors of the same group in a row, and
  those reuse it without a memory access;
- computes the line address and size;
- requests exactly that many lines;
- decodes them into the tile buffer at `(c*MAX_H + ty)*MAX_W + tx`.

No line outside the window is ever read, and no line is read twice.

`err` is raised with `done` if the window:
- is misaligned;
- lies outside the stored group grid;
- is larger than the tile buffer.

An oversized window is rejected before anything is read. The other two cases
are found subtensor by subtensor, so the fetch stops at the first subtensor
that breaks the rule. The tile buffer then holds a partial tile and must not
be used.

Per-fetch counters report subtensors, metadata reads, metadata reuses, lines
read and raw subtensors. The line read channel must return data in request
order. All lines of one subtensor are requested without waiting for data, so
up to 64 reads can be outstanding.

`gt_tile_buf` is a simple dual-port memory of `MAX_H x MAX_W x MAX_CG`
lines. At the defaults (20x20 pixels x 2 channel groups, 800 x 128 bits)
it holds the largest tile the design targets: 20x20x16 channels, for a 5x5
kernel with 16x16 outputs. Reads return data one cycle after `rd_en`.

## Top level: `gt_top`

`gt_top` instantiates `gt_config`, `gt_store`, `gt_fetch` and `gt_tile_buf`.
Its ports are plain signals:

| group | ports | role |
|---|---|---|
| configuration | `cfg_valid`, `cfg_k`, `cfg_s`, `cfg_d`, `fm_w`, `fm_h`, `gx_n`, `gy_n` | layer set-up; `g0`, `g1` read back the division |
| allocator | `alloc_valid`, `alloc_ptr`, `next_ptr` | base of the layer's storage |
| store | `st_req_*`, `st_done`, `src_rd_en`/`src_y`/`src_x`/`src_cg`/`src_rdata` | store one group from the output buffer |
| fetch | `ft_req_*`, `ft_otx`, `ft_oty`, `ft_tw`, `ft_th`, `ft_cg_lo`, `ft_cg_n`, `ft_done`, `ft_err` | assemble one input tile |
| memory | `wr_*`, `meta_wr_*`, `rd_req_*`/`rd_rsp_*`, `meta_rd_*`/`meta_rsp_*` | line and metadata channels to external memory |
| PE side | `pe_rd_en`, `pe_rd_addr`, `pe_rd_data` | read the tile buffer |
| statistics | `st_n_*`, `ft_n_*` | counters of the last store / fetch |

External memory, the PE array and the output buffer are not part of this
design. They meet it at these ports. The memory channels use valid/ready;
the metadata write and the metadata response are one-cycle strobes.

Default parameters:

| name | value | where |
|---|---|---|
| `WORD_W` | 16 | gt_pkg |
| `LINE_W` | 128 (16 bytes) | gt_pkg |
| `MOD_N` | 8 | gt_pkg |
| `PTR_W` | 28 | gt_pkg |
| `SIZE_W` | 20 | gt_pkg |
| `META_W` | 48 | gt_pkg |
| `COORD_W` | 12 (signed, maps up to 2047 pixels) | gt_pkg |
| `GIDX_W` | 20 | gt_pkg |
| `CG_W` | 8 (up to 2048 channels) | gt_pkg |
| `MAX_H`, `MAX_W`, `MAX_CG` | 20, 20, 2 | gt_top |

After synthesis the top is roughly 860 cells and 1.7 k flip-flops, plus the
102 400-bit tile buffer.

## Verification

Every block has a testbench in `tb/` that checks the block against
independent reference models in `tb/gt_tb_pkg.sv`. The models are a second
implementation of the format, written from the description above.

`tb/gt_mem_model.sv` is a behavioural external memory with:
- a four-cycle read latency;
- in-order responses;
- random back-pressure.

| testbench | what it checks |
|---|---|
| `tb_gt_config` | G, l0, sh for all small (k, s, d) |
| `tb_gt_subtensor_addr` | address, size, raw flag for random records |
| `tb_gt_bitmask_enc`, `tb_gt_bitmask_dec` | coded lines against the reference, both directions, raw and coded, with stalls |
| `tb_gt_tile_buf` | random read/write |
| `tb_gt_store` | the exact memory image (every line and record) for four divisions |
| `tb_gt_fetch` | every pixel of windows, lines read equal the window's subtensor sizes, metadata reads/reuses, error cases |
| `tb_gt_top` | end to end at default parameters; see below |
| `tb_gt_workloads` | layer shapes of common networks; see below |

`tb_gt_top` uses the whole subsystem at its default parameters. It stores a
32x32x16 map, then fetches tiles of both the large (18x18x16, 17x17x16,
20x20x16) and the small (10x18x8, 9x17x8, 12x20x8) tile setups. It covers
3x3/s1, 3x3/s2, 5x5/s1, dilated 3x3 and 1x1 layers. Every pixel read through
the PE port is compared with the map. The testbench also counts each
mechanism and fails if any never happened:
- raw fallback;
- coding;
- metadata reuse;
- halo fetch in the padding;
- memory back-pressure;
- a misaligned window;
- the single-segment division.

`tb_gt_workloads` runs layer shapes of AlexNet CONV2–5, VGG-16 CONV1_2 and
CONV5_3, ResNet-18 CONV2_1, ResNet-50 1x1/s2 and 3x3/s2 downsampling layers,
and a VDSR layer. The large maps are cut to one row of tiles and the first
channels. For each layer it prints the bytes fetched, including metadata,
against the uncompressed windows. The data are synthetic: about 70 % zeros,
plus dense patches. These figures show the mechanism working. They are not a
measurement on real activations.

| layer (input map, kernel/stride) | part simulated | fetched + metadata, of raw window bytes |
|---|---|---|
| AlexNet CONV2, 27x27x96, 5x5/1 | whole | 36 % |
| AlexNet CONV3, 13x13x256, 3x3/1 | whole | 34 % |
| AlexNet CONV4/5, 13x13x384, 3x3/1 | whole | 34 % |
| VGG-16 CONV1_2, 224x224x64, 3x3/1 | 1 tile row, 16 channels | 52 % |
| VGG-16 CONV5_3, 14x14x512, 3x3/1 | whole | 38 % |
| ResNet-18 CONV2_1, 56x56x64, 3x3/1 | 1 tile row | 47 % |
| ResNet-50 1x1/2 on 56x56x256 | 1 tile row, 32 channels | 48 % |
| ResNet-50 3x3/2 on 28x28x256 | 1 tile row, 32 channels | 49 % |
| VDSR, 41x41x64, 3x3/1 | whole | 42 % |

On this data, about 30 % of the words are non-zero, and dense patches are
stored raw. The bytes moved therefore follow the data's density. The
metadata reads are 1 to 2 % of the raw window bytes.

## Simulating with Verilator

Each testbench is a top-level module. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/gt_pkg.sv tb/gt_tb_pkg.sv tb/tb_gt_top.sv --top-module tb_gt_top
    ./obj_dir/Vtb_gt_top

Replace `tb_gt_top` with any other testbench name. Each testbench ends by
printing `TB_RESULT checks=<n> failures=<m>`, and a watchdog ends it with a
failure if it hangs. The full-size run (`tb_gt_top`) takes about a minute
including compilation, and `tb_gt_workloads` takes about ten seconds.
Assertions in the RTL check handshake rules and the size bookkeeping; they
are enabled by `--assert`.

## Where this design departs from or goes beyond the source description

- **Period.** Only period 8 is built. The source also evaluates periods 4
  and 16 as alternatives. Tile setups whose step `s*tw` is not a multiple of
  8 (for instance `tw = 6`) are not supported: their window edges drift
  against the cuts, and every window whose edge misses a cut is flagged as
  misaligned.
- **Unspecified details.** The source names bitmask coding but gives no
  format. The following are therefore this design's own choices:
  - the chunk layout;
  - the raw fallback;
  - the bit order inside the metadata record;
  - the record index formula;
  - the bump allocator;
  - storing the zero padding in the edge groups.
- **Codec speed.** The codec handles one element per cycle. A production
  design would decode a whole pixel per cycle. Only throughput would change,
  not the format.
- **Channels.** Metadata travels on its own read and write channels. A
  system with one memory port would arbitrate these outside the block.
- **Pipelining.** There is one tile buffer and no double buffering; fetches
  and PE reads do not overlap. Stores and fetches handle one request at a
  time each.
- **Outside the design.** External DRAM and the PE array are not modelled
  beyond the testbench memory model. The bandwidth studies of the source are
  not reproduced; the workload testbench uses synthetic data.
- **Channel grouping.** Channel groups are always 8 channels. A layer whose
  channel count is not a multiple of 8 has to be padded by the producer.
