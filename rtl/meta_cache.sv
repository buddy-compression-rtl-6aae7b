// meta_cache: set-associative cache of Buddy Compression metadata.
//
// Every 128-byte memory-entry of a compressed page has a 4-bit size code in a
// dedicated metadata region of device memory. Reading that region on every
// access would double the device traffic, so each memory-controller slice keeps
// a small cache of it. One 32-byte cache line holds the codes of 64 neighbouring
// entries, so a miss brings in the metadata of the 63 neighbours as well.
//
// Operation: a request (read or write of one 4-bit code, named by its entry key)
// is accepted when req_ready is high. The next cycle compares the tags of the
// addressed set. On a hit the code is read or written and rsp_valid pulses with
// rsp_hit = 1. On a miss the victim way is chosen (an invalid way first, else the
// least recently used one). A dirty victim is first written back, then the line
// is fetched from meta_base + line_key * LINE_BYTES. The line is installed and
// the request is served with rsp_hit = 0. The cache is write-back and
// write-allocate, with true LRU kept as per-way ages.
//
// Timing: a hit responds two cycles after acceptance. A miss adds the memory
// round trips: one posted write for a dirty victim, and one read.
//
// From the paper: 4 bits per entry, 4KB per slice, 4 ways, 32B lines covering
// 64 entries. The paper gives two line sizes. Its metadata text says "Each
// metadata cache entry is 32B, thereby causing a prefetch of metadata
// corresponding 63 neighboring 128B memory-entries". Its parameter table lists
// "4KB metadata cache per L2 slice, 128B lines, 4 ways". This design follows the
// 32B text; LINE_BYTES can be set to 128. Write-back, write-allocate, LRU and the
// handshake are this design's own choices.
module meta_cache
  import buddy_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 4096,
  parameter int unsigned WAYS        = 4,
  parameter int unsigned LINE_BYTES  = 32,
  parameter int unsigned KEY_W       = 29,
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PA_W-1:0]      meta_base,
  // lookup port
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [KEY_W-1:0]     req_key,
  input  logic [3:0]           req_wdata,
  output logic                 rsp_valid,
  output logic [3:0]           rsp_rdata,
  output logic                 rsp_hit,
  // device-memory port for fills and write-backs
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [PA_W-1:0]      mem_req_addr,
  output logic [LINE_BITS-1:0] mem_req_wdata,
  input  logic                 mem_rsp_valid,
  input  logic [LINE_BITS-1:0] mem_rsp_rdata
);

  localparam int unsigned EPL    = LINE_BITS / META_BITS;          // entries per line
  localparam int unsigned OFF_W  = $clog2(EPL);
  localparam int unsigned SETS   = CACHE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned LKEY_W = KEY_W - OFF_W;
  localparam int unsigned TAG_W  = LKEY_W - SET_W;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned LSH    = $clog2(LINE_BYTES);

  typedef enum logic [2:0] {S_IDLE, S_TAG, S_WB, S_FILL, S_FILLW} state_t;
  state_t state_q;

  logic [LINE_BITS-1:0] data_q  [SETS][WAYS];
  logic [TAG_W-1:0]     tag_q   [SETS][WAYS];
  logic                 valid_q [SETS][WAYS];
  logic                 dirty_q [SETS][WAYS];
  logic [WAY_W-1:0]     age_q   [SETS][WAYS];

  logic             r_we, r_missed;
  logic [KEY_W-1:0] r_key;
  logic [3:0]       r_wdata;
  logic [WAY_W-1:0] r_victim;

  logic [SET_W-1:0] set;
  logic [TAG_W-1:0] tag;
  logic [OFF_W-1:0] off;
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  logic             found_inv;

  assign off = r_key[OFF_W-1:0];
  assign set = SET_W'(r_key[OFF_W +: LKEY_W] % SETS);
  assign tag = TAG_W'(r_key[OFF_W + SET_W +: TAG_W]);

  always_comb begin
    hit       = 1'b0;
    hit_way   = '0;
    victim    = '0;
    found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set][w] && tag_q[set][w] == tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_q[set][w]) begin
        found_inv = 1'b1;
        victim    = WAY_W'(w);
      end
    end
    if (!found_inv) begin
      for (int w = 0; w < WAYS; w++)
        if (age_q[set][w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
    end
  end

  assign req_ready = (state_q == S_IDLE);

  // memory port
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = data_q[set][r_victim];
    if (state_q == S_WB) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = meta_base + (PA_W'({tag_q[set][r_victim], set}) << LSH);
    end else if (state_q == S_FILL) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = meta_base + (PA_W'({tag, set}) << LSH);
    end
  end

  // control, tags and replacement state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      rsp_hit   <= 1'b0;
      r_we      <= 1'b0;
      r_missed  <= 1'b0;
      r_key     <= '0;
      r_wdata   <= '0;
      r_victim  <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          dirty_q[s][w] <= 1'b0;
          age_q[s][w]   <= WAY_W'(w);
        end
    end else begin
      rsp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          r_we     <= req_we;
          r_key    <= req_key;
          r_wdata  <= req_wdata;
          r_missed <= 1'b0;
          state_q  <= S_TAG;
        end
        S_TAG: if (hit) begin
          rsp_valid <= 1'b1;
          rsp_hit   <= !r_missed;
          rsp_rdata <= data_q[set][hit_way][off*META_BITS +: META_BITS];
          if (r_we) dirty_q[set][hit_way] <= 1'b1;
          for (int w = 0; w < WAYS; w++) begin
            if (WAY_W'(w) == hit_way)               age_q[set][w] <= '0;
            else if (age_q[set][w] < age_q[set][hit_way]) age_q[set][w] <= age_q[set][w] + 1'b1;
          end
          state_q <= S_IDLE;
        end else begin
          r_missed <= 1'b1;
          r_victim <= victim;
          state_q  <= (valid_q[set][victim] && dirty_q[set][victim]) ? S_WB : S_FILL;
        end
        S_WB:    if (mem_req_ready) state_q <= S_FILL;
        S_FILL:  if (mem_req_ready) state_q <= S_FILLW;
        S_FILLW: if (mem_rsp_valid) begin
          valid_q[set][r_victim] <= 1'b1;
          dirty_q[set][r_victim] <= 1'b0;
          state_q <= S_TAG;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // line data and tags (no reset: guarded by valid_q)
  always_ff @(posedge clk) begin
    if (state_q == S_FILLW && mem_rsp_valid) begin
      data_q[set][r_victim] <= mem_rsp_rdata;
      tag_q[set][r_victim]  <= tag;
    end else if (state_q == S_TAG && hit && r_we) begin
      data_q[set][hit_way][off*META_BITS +: META_BITS] <= r_wdata;
    end
  end

endmodule
