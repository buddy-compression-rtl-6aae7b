// buddy_pkg: types and constants shared by the Buddy Compression memory-side
// blocks.
//
// A 128-byte memory-entry is the unit of compression. It is striped over 32-byte
// sectors: the first sectors of an entry live in GPU device memory, the rest in a
// fixed slot of the buddy-memory (a carve-out of a larger remote memory reached
// over a high-bandwidth link). The page-table/TLB entry of every page carries a
// 24-bit extension (compressed flag, target compression ratio, buddy-page
// offset); each entry of a compressed page has a 4-bit size code kept in a
// metadata region of device memory.
//
// From the paper: 128B entries, 32B sectors, targets 1x/1.33x/2x/4x and the 16x
// mostly-zero target (8B in device memory), 24 extra bits per page-table entry,
// 4 bits of metadata per entry. This design's own choices: the split of the 24
// bits into 1 + 3 + 20, the target encoding, the size-code encoding (compressed
// size in 8-byte units minus one), the 40-bit physical address and the request
// and response structs.
package buddy_pkg;

  localparam int unsigned ENTRY_BYTES  = 128;  // compression granularity
  localparam int unsigned SECTOR_BYTES = 32;   // device-memory access granularity
  localparam int unsigned META_BITS    = 4;    // metadata per memory-entry
  localparam int unsigned PA_W         = 40;   // physical address width
  localparam int unsigned BOFS_W       = 20;   // buddy-page offset field
  localparam int unsigned LINE_W       = ENTRY_BYTES * 8;  // 1024-bit entry bus
  localparam int unsigned NBYTES_W     = 8;    // byte count 0..128 on memory ports

  // Target compression ratio of a page (how many bytes of each entry stay in
  // device memory): 4, 3, 2 or 1 sectors, or 8 bytes for the mostly-zero case.
  typedef enum logic [2:0] {
    TGT_1X    = 3'd0,   // 128B in device memory
    TGT_1_33X = 3'd1,   //  96B
    TGT_2X    = 3'd2,   //  64B
    TGT_4X    = 3'd3,   //  32B
    TGT_16X   = 3'd4    //   8B
  } target_t;

  // 24-bit page-table/TLB extension.
  typedef struct packed {
    logic              compressed;  // page is stored compressed
    target_t           target;      // target compression ratio
    logic [BOFS_W-1:0] buddy_ofs;   // buddy page offset from GBBR, in pages
  } pte_ext_t;

  // Request from an L2 slice to its memory-controller slice. One full 128B
  // memory-entry per request.
  typedef struct packed {
    logic              we;       // 1: write the entry, 0: read it
    logic [PA_W-1:0]   frame;    // device-memory base of the page (from TLB)
    logic [15:0]       entry;    // entry index inside the page
    pte_ext_t          attr;     // page attributes (from TLB)
    logic [3:0]        size;     // write: compressed size code from compressor
    logic [LINE_W-1:0] wdata;    // write: compressed stream, byte 0 in [7:0]
  } cl_req_t;

  typedef struct packed {
    logic              we;          // response to a write (acknowledge)
    logic              compressed;  // rdata is a compressed stream
    logic [3:0]        size;        // size code of rdata
    logic [LINE_W-1:0] rdata;       // read data, byte 0 in [7:0]
  } cl_rsp_t;

  // Request to a memory (device channel or buddy link). nbytes bytes starting
  // at addr; write data and read data are right-aligned (byte 0 in [7:0]).
  typedef struct packed {
    logic                we;
    logic [PA_W-1:0]     addr;
    logic [NBYTES_W-1:0] nbytes;
    logic [LINE_W-1:0]   wdata;
  } mem_req_t;

  // Bytes of each entry kept in device memory for a target.
  function automatic int unsigned dev_bytes(target_t t);
    case (t)
      TGT_1X:    return 128;
      TGT_1_33X: return 96;
      TGT_2X:    return 64;
      TGT_4X:    return 32;
      TGT_16X:   return 8;
      default:   return 128;
    endcase
  endfunction

  // Compressed size in bytes encoded by a 4-bit size code.
  function automatic int unsigned code_bytes(logic [3:0] c);
    return (int'(c) + 1) * 8;
  endfunction

endpackage
