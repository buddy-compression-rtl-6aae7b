# Buddy Compression memory side: RTL

GPU device memory is fast but small, and the user cannot add to it. Buddy
Compression makes it look larger by storing data compressed. Each compressed
allocation takes only a fraction of its size in device memory, set by a *target
compression ratio* chosen per allocation. A 2x target keeps half. Compression
works on 128-byte *memory-entries*. Some entries do not compress down to their
target, so every entry also owns a fixed overflow slot in a larger, slower
*buddy-memory*. That memory is a region carved out of host or peer memory,
reached over a high-bandwidth link such as NVLink2. An entry that compresses well
is served from device memory alone. An entry that does not is served from both.
The key property: every entry has a fixed place in both memories, so a change in
its compressibility never moves any other data, and nothing is re-allocated.

This RTL implements the memory-controller side of that scheme:

| module        | role |
|---------------|------|
| `buddy_pkg`   | shared types: target ratios, the 24-bit page-table extension, request structs |
| `gbbr`        | Global Buddy Base-address Register: base of the buddy carve-out |
| `buddy_xlate` | address translation: device slot, buddy slot, overflow length, metadata key |
| `meta_cache`  | 4KB, 4-way cache of the 4-bit per-entry size codes |
| `buddy_ctrl`  | one memory-controller slice: the read and write sequences |
| `buddy_top`   | 32 slices sharing one GBBR |

The compressor/decompressor (Bit-Plane Compression), the TLB, the L2 cache, the
HBM2 device memory and the link to buddy-memory are not part of the RTL. Their
signals are ports of `buddy_top`.

## 1. How an entry is laid out

A 128-byte entry is compressed into a byte stream of 8 to 128 bytes. The stream
is cut at the page's device allocation:

| target | device bytes per entry | buddy slot per entry |
|--------|------------------------|----------------------|
| 1x     | 128 (4 sectors)        | 0                    |
| 1.33x  | 96 (3 sectors)         | 32                   |
| 2x     | 64 (2 sectors)         | 64                   |
| 4x     | 32 (1 sector)          | 96                   |
| 16x    | 8                      | 120                  |

The 1x–4x targets keep whole 32-byte sectors, the access unit of GPU DRAM, in
device memory. The 16x target is meant for allocations that stay almost
entirely zero: only 8 bytes per entry stay on the GPU.

For entry `e` of a page (`e` = page offset / 128):

    device slot  = frame + e * dev_bytes                         (dev_bytes bytes)
    buddy slot   = GBBR + buddy_ofs * PAGE_BYTES + e * (128 - dev_bytes)
    overflow     = ceil32(size) - dev_bytes   if size > dev_bytes, else nothing

`frame` is the device address of the page's (shrunken) allocation. `buddy_ofs` is
the page's offset into the carve-out. Both come from the TLB entry. The bytes
past `dev_bytes` go to buddy-memory in whole 32-byte units, counted from the
start of the stream. Example, 2x target: a 96-byte stream puts sectors 1–2 on
the GPU and sector 3 in buddy-memory. A 40-byte stream needs nothing from
buddy-memory.

A page that is not compressed, or that has a 1x target, is stored raw: 128 bytes
at `frame + e * 128`, with no metadata. This is how the scheme is switched off
for data that does not need it.

### Page-table extension (`pte_ext_t`, 24 bits)

    [23]    compressed
    [22:20] target   0=1x 1=1.33x 2=2x 3=4x 4=16x
    [19:0]  buddy_ofs, in units of PAGE_BYTES (64KB): 2^20 pages = 64GB of carve-out address range

Only the 24-bit total comes from the source design. The field split is this
RTL's choice.

### Size code (4 bits per entry)

`size = bytes / 8 - 1`, so code 0 means ≤ 8 bytes and code 15 means 128 bytes.
The code is only used to decide whether, and how much, buddy-memory to touch.

## 2. Metadata and its cache

The size codes of all entries of compressed pages are stored in a region of
device memory at `meta_base`: 4 bits per 128 bytes, a 0.4% overhead. The code
of an entry sits at bit `4*key` of that region, where `key = {buddy_ofs, e}`.
Each page has a unique buddy offset, so the key is unique per entry and needs no
extra translation.

Every slice has a `meta_cache`: 4KB, 4 ways, 32-byte lines, so 32 sets of 4
lines. One line holds the codes of 64 neighbouring entries, i.e. 8KB of data.
One miss therefore prefetches the metadata of 63 neighbours. The cache is
write-back and write-allocate, with true LRU.

* Lookup: accept → tag compare → respond. A hit answers 2 cycles after it is
  accepted.
* Miss: pick a victim (an invalid way first, then LRU). If the victim is dirty,
  write it back (posted). Then read the line and install it. The request is then
  served and reported with `rsp_hit = 0`.

## 3. One slice: read and write sequences (`buddy_ctrl`)

Requests come from an L2 slice, one full entry at a time. A slice handles one
request at a time.

**Read, compressed page**
1. Read the whole device slot. This does not wait for the metadata, because the
   metadata only concerns the buddy part.
2. Look up the size code, filling the line from device memory on a miss.
3. If the code says the stream is longer than the device slot, read the overflow
   from buddy-memory. Otherwise buddy-memory is not touched.
4. Return the stream (device bytes first, buddy bytes after them), its size code
   and `compressed = 1`. The decompressor is outside this block.

**Write, compressed page**: the compressor supplies the stream and its size
code. The code is written into the metadata cache, then the device slot, then
the overflow, if any, into the buddy slot. Stale bytes in a buddy slot that is
no longer needed are left in place, since the size code says they are unused.

**Raw page**: one 128-byte device access. The response carries
`compressed = 0` and `size = 15`.

Port protocols: every request port uses valid/ready. Memory writes are posted.
A memory read returns one `rsp_valid` beat, right-aligned, in order. The client
gets one `cl_rsp_valid` pulse per request, for writes too. During step 2 the
metadata cache owns the device port. Assertions check the following:
* read data only arrives while a read is outstanding;
* buddy-memory is only requested for an entry that overflows.

## 4. The top (`buddy_top`)

There are `NUM_SLICES = 32` slices, one per L2 slice and HBM2 channel, and all
of them read one `gbbr`. Each slice keeps its own metadata cache and has its own
device channel port and buddy link port. Program GBBR first (`cfg_gbbr_we`).
`gbbr_valid` reports that it has been written. The carve-out base is kept
page-aligned.

| parameter     | default | origin |
|---------------|---------|--------|
| NUM_SLICES    | 32      | 32 L2 slices / 32 HBM2 channels of the evaluated GPU |
| MC_BYTES      | 4096    | metadata cache per slice |
| MC_WAYS       | 4       | metadata cache ways |
| MC_LINE_BYTES | 32      | metadata cache line (covers 64 entries) |
| PAGE_BYTES    | 65536   | own choice |
| PA_W          | 40      | own choice (package constant) |

## 5. Where this departs from, or goes beyond, the source design

* The source gives two metadata-cache configurations: one 64KB cache split into
  8 slices, and 4KB per slice for 32 slices, with 32-byte entries in one place
  and 128-byte lines in another. This RTL uses 4KB per slice, 32 slices and
  32-byte lines. `MC_LINE_BYTES = 128` is also supported.
* The source only notes that device data and metadata *can* be fetched in
  parallel on a metadata miss. With one channel port per slice, this RTL issues
  the device data read first and the metadata fill right after it.
* The following are this RTL's own choices: the entry layout in the buddy slot,
  the field split of the 24-bit extension, the size-code encoding, the metadata
  key, the page size, the address width, the protocols, and blocking
  one-at-a-time operation.
* The buddy offset advances in whole pages. A page's buddy region therefore
  takes a 64KB step of the carve-out, even though it uses at most 60KB of it.
  The source sizes the carve-out at 3x device memory for a 4x maximum ratio. That holds for the
  1.33x, 2x and 4x targets here, but pages at the 16x target use more carve-out
  than their share. In every case the carve-out used is at most the uncompressed
  size of the compressed pages. If the overall ratio is kept under 4x, which the
  source leaves to its profiler, that is under 4x device memory.
* Not modelled: the compressor and decompressor and their 11-cycle latency; the
  profiler that picks per-allocation targets (software); the read-modify-write
  of partial entries (done before the compressor); and link bandwidth limits.
  In the testbenches, the link's cost appears only as a longer memory latency.

## 6. Capacity against the evaluated workloads

The evaluated footprints run from 1.2MB to 11.1GB. That is at most about
170,000 pages of 64KB, well within the 2^20 pages a 20-bit buddy offset can
name. The largest metadata region is 43MB. The RTL sets no limit on device
capacity or on the compression ratio reached: both depend on the DRAM and on
the data.

## 7. Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench         | what it checks |
|-------------------|----------------|
| `tb_gbbr`         | reset, alignment, hold, write timing |
| `tb_buddy_xlate`  | the slot arithmetic against a table of sectors per target, for every target and size code |
| `tb_meta_cache`   | data, hit flags and write-backs against an LRU reference model; 2-cycle hit latency; 64-entry prefetch |
| `tb_buddy_ctrl`   | random traffic on all page kinds; data, size codes, memory contents at computed addresses, buddy traffic |
| `tb_buddy_top`    | full default size, all 32 slices at once; counts metadata hits, misses and write-backs, buddy reads and writes, 16x fits and overflows, raw pages and back-pressure |

`tb/mem_model.sv` is a behavioural memory (sparse, fixed latency, optional
random back-pressure) standing in for HBM2 and the buddy link.

Example, with plain Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/buddy_pkg.sv rtl/gbbr.sv rtl/buddy_xlate.sv rtl/meta_cache.sv \
      rtl/buddy_ctrl.sv rtl/buddy_top.sv tb/mem_model.sv tb/tb_buddy_top.sv \
      --top-module tb_buddy_top
    ./obj_dir/Vtb_buddy_top

The full-size top test builds in about half a minute and runs in under a second.
