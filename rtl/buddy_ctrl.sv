// buddy_ctrl: one memory-controller slice with Buddy Compression.
//
// Serves full 128-byte memory-entry requests from one L2 slice. Each request
// carries the page attributes from the extended TLB entry: compressed flag,
// target ratio and buddy-page offset. For a compressed page, the entry's
// compressed stream is split. The first dev_bytes(target) bytes live in the
// page's device allocation. Any overflow lives in the entry's fixed slot in
// buddy-memory, at GBBR + offset (see buddy_xlate). The entry's 4-bit size code
// comes from the slice's metadata cache (meta_cache). Pages that are not
// compressed, or have a 1x target, are read and written raw, 128 bytes in device
// memory, with no metadata.
//
// Read of a compressed entry:
//   1. read the whole device slot. It does not depend on the metadata, which
//      only says whether buddy-memory is needed.
//   2. look up the size code (a miss fills the line from device memory);
//   3. only if the code says the entry is larger than its device slot, read the
//      overflow sectors from buddy-memory over the link;
//   4. return the stream, its size code and the compressed flag. Decompression
//      is done outside this block.
// Write of a compressed entry (the stream and its size code come from the
// compressor, which is outside this block): the size code is written into the
// metadata cache, the device slot is written, and the overflow sectors, if any,
// are written to buddy-memory.
//
// Interfaces: valid/ready requests on the client, device and buddy ports. The
// memory ports are posted for writes. Reads return exactly one rsp_valid beat
// each, in order. The client gets one cl_rsp_valid pulse per request, reads and
// writes alike, and cannot back-pressure it. One request is in flight at a time.
//
// From the paper: the split between device and buddy-memory, GBBR+offset
// addressing, the per-entry size metadata and its cache, reading the device data
// without waiting for the metadata, and touching buddy-memory only for entries
// that did not compress to the target. This design's own choices: blocking
// one-at-a-time operation, the port protocols and full-entry writes. Partial
// writes are merged into full entries before the compressor.
module buddy_ctrl
  import buddy_pkg::*;
#(
  parameter int unsigned PAGE_BYTES    = 65536,
  parameter int unsigned MC_BYTES      = 4096,
  parameter int unsigned MC_WAYS       = 4,
  parameter int unsigned MC_LINE_BYTES = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PA_W-1:0] gbbr,
  input  logic [PA_W-1:0] meta_base,
  // L2 slice side
  input  logic            cl_req_valid,
  output logic            cl_req_ready,
  input  cl_req_t         cl_req,
  output logic            cl_rsp_valid,
  output cl_rsp_t         cl_rsp,
  // device-memory channel
  output logic            dev_req_valid,
  input  logic            dev_req_ready,
  output mem_req_t        dev_req,
  input  logic            dev_rsp_valid,
  input  logic [LINE_W-1:0] dev_rsp_rdata,
  // buddy-memory link
  output logic            bud_req_valid,
  input  logic            bud_req_ready,
  output mem_req_t        bud_req,
  input  logic            bud_rsp_valid,
  input  logic [LINE_W-1:0] bud_rsp_rdata,
  // events
  output logic            ev_meta_hit,
  output logic            ev_meta_miss
);

  localparam int unsigned EIDX_W = $clog2(PAGE_BYTES / ENTRY_BYTES);
  localparam int unsigned KEY_W  = BOFS_W + EIDX_W;
  localparam int unsigned MLB    = MC_LINE_BYTES * 8;

  typedef enum logic [3:0] {
    S_IDLE, S_START, S_DEV, S_DEVW, S_META, S_METAW, S_BUD, S_BUDW, S_RSP
  } state_t;
  state_t state_q;

  cl_req_t          r_req;
  logic [3:0]       r_size;
  logic [LINE_W-1:0] r_data;

  // ---------------------------------------------------------------- translation
  logic                buddy_en, buddy_need;
  logic [PA_W-1:0]     dev_addr, buddy_addr;
  logic [NBYTES_W-1:0] dev_nbytes, buddy_nbytes;
  logic [KEY_W-1:0]    meta_key;

  buddy_xlate #(.PAGE_BYTES(PAGE_BYTES)) u_xlate (
    .frame       (r_req.frame),
    .entry       (r_req.entry[EIDX_W-1:0]),
    .attr        (r_req.attr),
    .size        (r_size),
    .gbbr        (gbbr),
    .buddy_en    (buddy_en),
    .dev_addr    (dev_addr),
    .dev_nbytes  (dev_nbytes),
    .buddy_need  (buddy_need),
    .buddy_addr  (buddy_addr),
    .buddy_nbytes(buddy_nbytes),
    .meta_key    (meta_key)
  );

  // ------------------------------------------------------------- metadata cache
  logic            mc_req_valid, mc_req_ready, mc_rsp_valid, mc_rsp_hit;
  logic [3:0]      mc_rsp_rdata;
  logic            mc_mem_valid, mc_mem_we;
  logic [PA_W-1:0] mc_mem_addr;
  logic [MLB-1:0]  mc_mem_wdata;
  logic            mc_phase;

  assign mc_phase     = (state_q == S_META) || (state_q == S_METAW);
  assign mc_req_valid = (state_q == S_META);

  meta_cache #(
    .CACHE_BYTES(MC_BYTES), .WAYS(MC_WAYS), .LINE_BYTES(MC_LINE_BYTES), .KEY_W(KEY_W)
  ) u_mcache (
    .clk          (clk),
    .rst_n        (rst_n),
    .meta_base    (meta_base),
    .req_valid    (mc_req_valid),
    .req_ready    (mc_req_ready),
    .req_we       (r_req.we),
    .req_key      (meta_key),
    .req_wdata    (r_req.size),
    .rsp_valid    (mc_rsp_valid),
    .rsp_rdata    (mc_rsp_rdata),
    .rsp_hit      (mc_rsp_hit),
    .mem_req_valid(mc_mem_valid),
    .mem_req_ready(mc_phase && dev_req_ready),
    .mem_req_we   (mc_mem_we),
    .mem_req_addr (mc_mem_addr),
    .mem_req_wdata(mc_mem_wdata),
    .mem_rsp_valid(mc_phase && dev_rsp_valid),
    .mem_rsp_rdata(dev_rsp_rdata[MLB-1:0])
  );

  // ----------------------------------------------------------------- data masks
  function automatic logic [LINE_W-1:0] byte_mask(logic [NBYTES_W-1:0] n);
    logic [LINE_W-1:0] m;
    m = '0;
    for (int b = 0; b < ENTRY_BYTES; b++)
      if (b < int'(n)) m[b*8 +: 8] = 8'hFF;
    return m;
  endfunction

  // ------------------------------------------------------------------ ports
  assign cl_req_ready = (state_q == S_IDLE);

  always_comb begin
    dev_req_valid = 1'b0;
    dev_req       = '0;
    if (mc_phase) begin
      dev_req_valid = mc_mem_valid;
      dev_req.we    = mc_mem_we;
      dev_req.addr  = mc_mem_addr;
      dev_req.nbytes = NBYTES_W'(MC_LINE_BYTES);
      dev_req.wdata = LINE_W'(mc_mem_wdata);
    end else if (state_q == S_DEV) begin
      dev_req_valid  = 1'b1;
      dev_req.we     = r_req.we;
      dev_req.addr   = dev_addr;
      dev_req.nbytes = dev_nbytes;
      dev_req.wdata  = r_req.wdata & byte_mask(dev_nbytes);
    end
  end

  always_comb begin
    bud_req_valid  = (state_q == S_BUD) && buddy_need;
    bud_req.we     = r_req.we;
    bud_req.addr   = buddy_addr;
    bud_req.nbytes = buddy_nbytes;
    bud_req.wdata  = (r_req.wdata >> (int'(dev_nbytes) * 8)) & byte_mask(buddy_nbytes);
  end

  // ------------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      r_req        <= '0;
      r_size       <= '0;
      r_data       <= '0;
      cl_rsp_valid <= 1'b0;
      cl_rsp       <= '0;
    end else begin
      cl_rsp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cl_req_valid) begin
          r_req   <= cl_req;
          r_size  <= cl_req.size;
          r_data  <= '0;
          state_q <= S_START;
        end
        S_START: begin
          if (buddy_en && r_req.we) state_q <= S_META;   // size code known: record it
          else                      state_q <= S_DEV;    // reads start on device data
        end
        S_DEV: if (dev_req_ready) begin
          if (!r_req.we)                 state_q <= S_DEVW;
          else if (buddy_en && buddy_need) state_q <= S_BUD;
          else                           state_q <= S_RSP;
        end
        S_DEVW: if (dev_rsp_valid) begin
          r_data  <= dev_rsp_rdata & byte_mask(dev_nbytes);
          state_q <= buddy_en ? S_META : S_RSP;
        end
        S_META: if (mc_req_ready) state_q <= S_METAW;
        S_METAW: if (mc_rsp_valid) begin
          if (r_req.we) begin
            state_q <= S_DEV;
          end else begin
            r_size  <= mc_rsp_rdata;
            state_q <= S_BUD;          // re-decided below once r_size is known
          end
        end
        S_BUD: begin
          if (!buddy_need) state_q <= S_RSP;   // entry fits in its device slot
          else if (bud_req_ready) state_q <= r_req.we ? S_RSP : S_BUDW;
        end
        S_BUDW: if (bud_rsp_valid) begin
          r_data  <= r_data | ((bud_rsp_rdata & byte_mask(buddy_nbytes)) << (int'(dev_nbytes) * 8));
          state_q <= S_RSP;
        end
        S_RSP: begin
          cl_rsp_valid      <= 1'b1;
          cl_rsp.we         <= r_req.we;
          cl_rsp.compressed <= buddy_en;
          cl_rsp.size       <= buddy_en ? r_size : 4'hF;
          cl_rsp.rdata      <= r_req.we ? '0 : r_data;
          state_q           <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // metadata-cache events, one pulse per lookup
  assign ev_meta_hit  = mc_rsp_valid &&  mc_rsp_hit;
  assign ev_meta_miss = mc_rsp_valid && !mc_rsp_hit;

  // ------------------------------------------------------------------ checks
  // Read data only arrives while a read is outstanding.
  a_dev_rsp: assert property (@(posedge clk) disable iff (!rst_n)
                              dev_rsp_valid |-> (state_q == S_DEVW || state_q == S_METAW));
  a_bud_rsp: assert property (@(posedge clk) disable iff (!rst_n)
                              bud_rsp_valid |-> (state_q == S_BUDW));
  // Buddy-memory is only touched for an entry that overflows its device slot.
  a_bud_need: assert property (@(posedge clk) disable iff (!rst_n)
                               bud_req_valid && bud_req_ready |-> buddy_need && buddy_en);

endmodule
