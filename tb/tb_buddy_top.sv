// tb_buddy_top: end-to-end test of the Buddy Compression memory side at its
// default size (32 slices, 4KB 4-way metadata cache per slice, 64KB pages).
// GBBR is programmed through the configuration port. Then every slice is driven
// at the same time with random full-entry reads and writes over 24 pages of all
// kinds (not compressed, 1x, 1.33x, 2x, 4x, 16x). Each slice has behavioural
// device and buddy memories with random back-pressure; the buddy link is slower
// than the device channel. Every read is checked against a golden copy (data,
// size code, compressed flag). The test counts each mechanism and fails if any
// never happened:
//   metadata hit, metadata miss, metadata write-back, buddy read, buddy write,
//   16x entry held in 8 bytes, 16x overflow, raw page, back-pressure.
// It also checks the per-slice buddy traffic against the golden sizes.
module tb_buddy_top;
  import buddy_pkg::*;
  localparam int unsigned NS = 32;
  localparam int unsigned PAGE_BYTES = 65536;
  localparam int NP = 24;
  localparam int ITERS = 400;
  localparam logic [PA_W-1:0] GBBR_W = 40'h80_0000_1234;       // low bits dropped by gbbr
  localparam logic [PA_W-1:0] GBBR = 40'h80_0000_0000;
  localparam logic [PA_W-1:0] META_BASE = 40'h00_F000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_gbbr_we = 1'b0, gbbr_valid;
  logic [PA_W-1:0] cfg_gbbr_wdata = '0, gbbr_base;
  logic cl_req_valid [NS], cl_req_ready [NS], cl_rsp_valid [NS];
  cl_req_t cl_req [NS];
  cl_rsp_t cl_rsp [NS];
  logic dev_req_valid [NS], dev_req_ready [NS], dev_rsp_valid [NS];
  logic bud_req_valid [NS], bud_req_ready [NS], bud_rsp_valid [NS];
  mem_req_t dev_req [NS], bud_req [NS];
  logic [LINE_W-1:0] dev_rsp_rdata [NS], bud_rsp_rdata [NS];
  logic ev_meta_hit [NS], ev_meta_miss [NS];

  buddy_top dut (
    .clk, .rst_n, .cfg_gbbr_we, .cfg_gbbr_wdata, .gbbr_base, .gbbr_valid, .meta_base(META_BASE),
    .cl_req_valid, .cl_req_ready, .cl_req, .cl_rsp_valid, .cl_rsp,
    .dev_req_valid, .dev_req_ready, .dev_req, .dev_rsp_valid, .dev_rsp_rdata,
    .bud_req_valid, .bud_req_ready, .bud_req, .bud_rsp_valid, .bud_rsp_rdata,
    .ev_meta_hit, .ev_meta_miss);

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endfunction

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_hit = 0, n_miss = 0, n_meta_wb = 0, n_bud_rd = 0, n_bud_wr = 0, n_z16 = 0, n_o16 = 0;
  int n_raw = 0, n_stall = 0, n_done = 0;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NS; i++) begin
      if (ev_meta_hit[i]) n_hit++;
      if (ev_meta_miss[i]) n_miss++;
      if (dev_req_valid[i] && dev_req_ready[i] && dev_req[i].we &&
          dev_req[i].addr >= META_BASE && dev_req[i].addr < META_BASE + 40'h1000_0000) n_meta_wb++;
      if (bud_req_valid[i] && bud_req_ready[i]) begin
        if (bud_req[i].we) n_bud_wr++; else n_bud_rd++;
      end
      if ((dev_req_valid[i] && !dev_req_ready[i]) || (bud_req_valid[i] && !bud_req_ready[i])) n_stall++;
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_s
    mem_model #(.LATENCY(8),  .STALL(1'b1)) u_dev (.clk, .rst_n, .req_valid(dev_req_valid[s]),
      .req_ready(dev_req_ready[s]), .req(dev_req[s]), .rsp_valid(dev_rsp_valid[s]), .rsp_rdata(dev_rsp_rdata[s]));
    mem_model #(.LATENCY(48), .STALL(1'b1)) u_bud (.clk, .rst_n, .req_valid(bud_req_valid[s]),
      .req_ready(bud_req_ready[s]), .req(bud_req[s]), .rsp_valid(bud_rsp_valid[s]), .rsp_rdata(bud_rsp_rdata[s]));

    pte_ext_t attr [NP];
    logic [PA_W-1:0] frame [NP];
    logic [LINE_W-1:0] gold [int];
    logic [3:0] gsize [int];
    int exp_bud_rd = 0, exp_bud_wr = 0;

    function automatic int devb(int p);
      if (!attr[p].compressed) return 128;
      case (attr[p].target) TGT_1_33X: return 96; TGT_2X: return 64; TGT_4X: return 32; TGT_16X: return 8; default: return 128; endcase
    endfunction

    initial begin
      int p, e, key, db;
      bit buddy_page;
      logic [3:0] sz;
      logic [LINE_W-1:0] d, exp_d;
      cl_req_valid[s] = 1'b0;
      cl_req[s] = '0;
      for (int i = 0; i < NP; i++) begin
        attr[i] = '{compressed: (i % 6 != 0), target: target_t'(i % 6 == 0 ? 0 : (i % 6) - 1),
                    buddy_ofs: BOFS_W'(s * NP * 2 + 2 * i + 1)};
        frame[i] = 40'h10_0000_0000 + PA_W'(s * NP + i) * PAGE_BYTES;
      end
      wait (gbbr_valid);
      repeat (2) @(posedge clk);
      for (int it = 0; it < ITERS; it++) begin
        p = $urandom_range(0, NP - 1);
        e = ($urandom_range(0, 9) < 7) ? $urandom_range(0, 63) : $urandom_range(0, 511);
        key = p * 512 + e;
        db = devb(p);
        buddy_page = attr[p].compressed && db != 128;
        if (!buddy_page) n_raw++;
        @(negedge clk);
        if ($urandom_range(0, 1)) begin
          sz = buddy_page ? 4'($urandom) : 4'hF;
          if (buddy_page && $urandom_range(0, 2) == 0) sz = 4'($urandom_range(0, 2));
          d = '0;
          for (int b = 0; b < (int'(sz) + 1) * 8; b++) d[b*8 +: 8] = 8'($urandom);
          if (buddy_page && (int'(sz) + 1) * 8 > db) exp_bud_wr++;
          if (db == 8) begin if (sz == 0) n_z16++; else n_o16++; end
          cl_req[s] = '{we: 1'b1, frame: frame[p], entry: 16'(e), attr: attr[p], size: sz, wdata: d};
          gold[key] = d; gsize[key] = sz;
        end else begin
          exp_d = gold.exists(key) ? gold[key] : '0;
          sz = gsize.exists(key) ? gsize[key] : (buddy_page ? 4'h0 : 4'hF);
          if (buddy_page && (int'(sz) + 1) * 8 > db) exp_bud_rd++;
          cl_req[s] = '{we: 1'b0, frame: frame[p], entry: 16'(e), attr: attr[p], size: 4'h0, wdata: '0};
        end
        cl_req_valid[s] = 1'b1;
        while (!cl_req_ready[s]) @(negedge clk);
        @(posedge clk); #1 cl_req_valid[s] = 1'b0;
        while (!cl_rsp_valid[s]) @(posedge clk);
        #1;
        check(cl_rsp[s].we == cl_req[s].we, "response kind");
        // an overflowing write lands in its buddy slot: GBBR + offset * page + entry * (128 - device bytes)
        if (cl_req[s].we && buddy_page && (int'(sz) + 1) * 8 > db)
          check(u_bud.peek(GBBR + PA_W'(attr[p].buddy_ofs) * PAGE_BYTES + PA_W'(e * (128 - db))) == d[db*8 +: 8],
                $sformatf("slice %0d buddy slot address", s));
        if (!cl_req[s].we) begin
          check(cl_rsp[s].compressed == buddy_page, "compressed flag");
          check(cl_rsp[s].size == (buddy_page ? sz : 4'hF), $sformatf("slice %0d size code", s));
          check(cl_rsp[s].rdata == exp_d, $sformatf("slice %0d p%0d e%0d read data", s, p, e));
        end
      end
      repeat (60) @(posedge clk);
      check(u_bud.n_rd == exp_bud_rd, $sformatf("slice %0d buddy reads %0d exp %0d", s, u_bud.n_rd, exp_bud_rd));
      check(u_bud.n_wr == exp_bud_wr, $sformatf("slice %0d buddy writes %0d exp %0d", s, u_bud.n_wr, exp_bud_wr));
      n_done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!gbbr_valid, "GBBR not valid after reset");
    cfg_gbbr_we = 1'b1; cfg_gbbr_wdata = GBBR_W;
    @(negedge clk);
    cfg_gbbr_we = 1'b0;
    check(gbbr_valid && gbbr_base == GBBR, "GBBR programmed and page aligned");
    wait (n_done == NS);
    repeat (5) @(posedge clk);
    check(n_hit > 0,     "mechanism: metadata cache hit");
    check(n_miss > 0,    "mechanism: metadata cache miss");
    check(n_meta_wb > 0, "mechanism: metadata write-back");
    check(n_bud_rd > 0,  "mechanism: buddy-memory read");
    check(n_bud_wr > 0,  "mechanism: buddy-memory write");
    check(n_z16 > 0,     "mechanism: 16x entry held in 8B");
    check(n_o16 > 0,     "mechanism: 16x entry overflow");
    check(n_raw > 0,     "mechanism: uncompressed / 1x page");
    check(n_stall > 0,   "mechanism: memory back-pressure");
    $display("meta hit=%0d miss=%0d writeback=%0d buddy rd=%0d wr=%0d 16x fit=%0d 16x ovf=%0d raw=%0d stall=%0d",
             n_hit, n_miss, n_meta_wb, n_bud_rd, n_bud_wr, n_z16, n_o16, n_raw, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
