// buddy_xlate: Buddy Compression address translation and sector split.
//
// Combinational. From the page attributes held in the extended TLB entry, the
// entry index inside the page, the Global Buddy Base-address Register (GBBR) and
// the entry's 4-bit compressed-size code it works out which part of a 128-byte
// memory-entry is in device memory and which part is in buddy-memory:
//
//   device part : the first dev_bytes(target) bytes of the compressed stream,
//                 at  frame + entry * dev_bytes
//   buddy part  : the bytes past dev_bytes, rounded up to whole 32B sectors,
//                 at  GBBR + buddy_ofs * PAGE_BYTES + entry * (128 - dev_bytes)
//
// so every entry has a fixed device slot and a fixed buddy slot, and a change in
// its compressibility never moves other data. The metadata key {buddy_ofs,
// entry} names the entry's 4-bit size code in the metadata region.
//
// Following the paper: the GBBR + offset addressing, sector striping, the 2x,
// 1.33x, 4x and 16x targets and that only entries larger than their device
// allocation touch buddy-memory. This design's own choices: buddy slots packed
// at (128 - dev_bytes) per entry, the buddy offset counted in PAGE_BYTES units,
// the page size, and storing pages whose target is 1x (or that are not
// compressed) raw in device memory with no metadata lookup.
//
// Interface: all outputs follow the inputs in the same cycle.
module buddy_xlate
  import buddy_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 65536,
  parameter int unsigned EIDX_W     = $clog2(PAGE_BYTES / ENTRY_BYTES)
) (
  input  logic [PA_W-1:0]            frame,       // device base of the page
  input  logic [EIDX_W-1:0]          entry,       // entry index inside the page
  input  pte_ext_t                   attr,        // extended TLB fields
  input  logic [3:0]                 size,        // compressed size code
  input  logic [PA_W-1:0]            gbbr,        // buddy carve-out base
  output logic                       buddy_en,    // page uses buddy striping
  output logic [PA_W-1:0]            dev_addr,
  output logic [NBYTES_W-1:0]        dev_nbytes,
  output logic                       buddy_need,  // entry overflows its device slot
  output logic [PA_W-1:0]            buddy_addr,
  output logic [NBYTES_W-1:0]        buddy_nbytes,
  output logic [BOFS_W+EIDX_W-1:0]   meta_key     // index of the entry's size code
);

  localparam int unsigned PAGE_SH = $clog2(PAGE_BYTES);

  logic [NBYTES_W:0] devb;      // device bytes per entry
  logic [NBYTES_W:0] slotb;     // buddy bytes per entry
  logic [NBYTES_W:0] szb;       // compressed size in bytes
  logic [NBYTES_W:0] sz_sect;   // compressed size rounded up to sectors

  always_comb begin
    buddy_en = attr.compressed && (attr.target != TGT_1X);
    devb     = buddy_en ? (NBYTES_W+1)'(dev_bytes(attr.target)) : (NBYTES_W+1)'(ENTRY_BYTES);
    slotb    = (NBYTES_W+1)'(ENTRY_BYTES) - devb;
    szb      = (NBYTES_W+1)'(code_bytes(size));
    sz_sect  = (szb + (NBYTES_W+1)'(SECTOR_BYTES - 1)) & ~((NBYTES_W+1)'(SECTOR_BYTES - 1));

    dev_addr   = frame + PA_W'(entry) * PA_W'(devb);
    dev_nbytes = NBYTES_W'(devb);

    buddy_need   = buddy_en && (szb > devb);
    buddy_nbytes = buddy_need ? NBYTES_W'(sz_sect - devb) : '0;
    buddy_addr   = gbbr + (PA_W'(attr.buddy_ofs) << PAGE_SH) + PA_W'(entry) * PA_W'(slotb);

    meta_key = {attr.buddy_ofs, entry};
  end

endmodule
