// buddy_top: memory side of a GPU with Buddy Compression.
//
// NUM_SLICES memory-controller slices (buddy_ctrl), one per L2 slice and device
// memory channel, share one Global Buddy Base-address Register (gbbr). Each
// slice has its own metadata cache, its own device-memory channel port and its
// own request port to the buddy-memory link. The L2 slices, the TLBs that
// supply the page attributes, the compressor/decompressor, the device memory
// and the buddy-memory link with its remote memory are outside this module.
// Their signals are the ports below, one array element per slice.
//
// meta_base is the device address of the metadata region: 4 bits per 128-byte
// entry of every compressed page, located by the page's buddy offset. Each
// slice reaches it through its own channel port. GBBR is written over the
// cfg_gbbr_* port before compressed pages are used.
//
// From the paper: one metadata cache of 4KB, 4 ways, per L2 slice; 32 L2 slices
// and 32 device memory channels; a single GBBR. The paper also mentions a "4-way
// 64KB metadata cache, that is split into 8 slices, 1 per DRAM channel"; this
// design follows its final configuration, 4KB per slice with 32 slices. Serving
// each L2 slice from its own channel is this design's own choice.
module buddy_top
  import buddy_pkg::*;
#(
  parameter int unsigned NUM_SLICES    = 32,
  parameter int unsigned PAGE_BYTES    = 65536,
  parameter int unsigned MC_BYTES      = 4096,
  parameter int unsigned MC_WAYS       = 4,
  parameter int unsigned MC_LINE_BYTES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_gbbr_we,
  input  logic [PA_W-1:0]   cfg_gbbr_wdata,
  output logic [PA_W-1:0]   gbbr_base,
  output logic              gbbr_valid,
  input  logic [PA_W-1:0]   meta_base,
  // L2 slices
  input  logic              cl_req_valid [NUM_SLICES],
  output logic              cl_req_ready [NUM_SLICES],
  input  cl_req_t           cl_req       [NUM_SLICES],
  output logic              cl_rsp_valid [NUM_SLICES],
  output cl_rsp_t           cl_rsp       [NUM_SLICES],
  // device-memory channels
  output logic              dev_req_valid [NUM_SLICES],
  input  logic              dev_req_ready [NUM_SLICES],
  output mem_req_t          dev_req       [NUM_SLICES],
  input  logic              dev_rsp_valid [NUM_SLICES],
  input  logic [LINE_W-1:0] dev_rsp_rdata [NUM_SLICES],
  // buddy-memory link
  output logic              bud_req_valid [NUM_SLICES],
  input  logic              bud_req_ready [NUM_SLICES],
  output mem_req_t          bud_req       [NUM_SLICES],
  input  logic              bud_rsp_valid [NUM_SLICES],
  input  logic [LINE_W-1:0] bud_rsp_rdata [NUM_SLICES],
  // events
  output logic              ev_meta_hit  [NUM_SLICES],
  output logic              ev_meta_miss [NUM_SLICES]
);

  gbbr #(.PAGE_BYTES(PAGE_BYTES)) u_gbbr (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_we   (cfg_gbbr_we),
    .cfg_wdata(cfg_gbbr_wdata),
    .base     (gbbr_base),
    .valid    (gbbr_valid)
  );

  for (genvar i = 0; i < NUM_SLICES; i++) begin : g_slice
    buddy_ctrl #(
      .PAGE_BYTES(PAGE_BYTES), .MC_BYTES(MC_BYTES), .MC_WAYS(MC_WAYS),
      .MC_LINE_BYTES(MC_LINE_BYTES)
    ) u_ctrl (
      .clk          (clk),
      .rst_n        (rst_n),
      .gbbr         (gbbr_base),
      .meta_base    (meta_base),
      .cl_req_valid (cl_req_valid[i]),
      .cl_req_ready (cl_req_ready[i]),
      .cl_req       (cl_req[i]),
      .cl_rsp_valid (cl_rsp_valid[i]),
      .cl_rsp       (cl_rsp[i]),
      .dev_req_valid(dev_req_valid[i]),
      .dev_req_ready(dev_req_ready[i]),
      .dev_req      (dev_req[i]),
      .dev_rsp_valid(dev_rsp_valid[i]),
      .dev_rsp_rdata(dev_rsp_rdata[i]),
      .bud_req_valid(bud_req_valid[i]),
      .bud_req_ready(bud_req_ready[i]),
      .bud_req      (bud_req[i]),
      .bud_rsp_valid(bud_rsp_valid[i]),
      .bud_rsp_rdata(bud_rsp_rdata[i]),
      .ev_meta_hit  (ev_meta_hit[i]),
      .ev_meta_miss (ev_meta_miss[i])
    );
  end

endmodule
