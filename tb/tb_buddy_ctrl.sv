// tb_buddy_ctrl: self-checking test of one memory-controller slice.
// Eight pages cover every case: not compressed, and targets 1x, 1.33x, 2x, 4x,
// 16x. Random full-entry writes (a random compressed stream and size code) and
// reads are issued against behavioural device and buddy memories that apply
// random back-pressure. The testbench keeps a golden copy of every entry and
// checks:
//   - read data, size code and compressed flag;
//   - that buddy-memory is read exactly for entries larger than their device
//     slot;
//   - the bytes in device and buddy memory at addresses worked out here;
//   - that metadata hits and misses both occur.
module tb_buddy_ctrl;
  import buddy_pkg::*;
  localparam int unsigned PAGE_BYTES = 65536;
  localparam logic [PA_W-1:0] GBBR = 40'h80_0000_0000;
  localparam logic [PA_W-1:0] META_BASE = 40'h00_F000_0000;
  localparam int NPAGES = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cl_req_valid = 1'b0, cl_req_ready, cl_rsp_valid;
  cl_req_t cl_req = '0;
  cl_rsp_t cl_rsp;
  logic dev_req_valid, dev_req_ready, dev_rsp_valid, bud_req_valid, bud_req_ready, bud_rsp_valid;
  mem_req_t dev_req, bud_req;
  logic [LINE_W-1:0] dev_rsp_rdata, bud_rsp_rdata;
  logic ev_meta_hit, ev_meta_miss;

  buddy_ctrl #(.PAGE_BYTES(PAGE_BYTES)) dut (
    .clk, .rst_n, .gbbr(GBBR), .meta_base(META_BASE), .cl_req_valid, .cl_req_ready, .cl_req,
    .cl_rsp_valid, .cl_rsp, .dev_req_valid, .dev_req_ready, .dev_req, .dev_rsp_valid, .dev_rsp_rdata,
    .bud_req_valid, .bud_req_ready, .bud_req, .bud_rsp_valid, .bud_rsp_rdata, .ev_meta_hit, .ev_meta_miss);

  mem_model #(.LATENCY(6),  .STALL(1'b1)) u_dev (.clk, .rst_n, .req_valid(dev_req_valid),
    .req_ready(dev_req_ready), .req(dev_req), .rsp_valid(dev_rsp_valid), .rsp_rdata(dev_rsp_rdata));
  mem_model #(.LATENCY(30), .STALL(1'b1)) u_bud (.clk, .rst_n, .req_valid(bud_req_valid),
    .req_ready(bud_req_ready), .req(bud_req), .rsp_valid(bud_rsp_valid), .rsp_rdata(bud_rsp_rdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_hit = 0, n_miss = 0;
  always @(posedge clk) begin
    if (ev_meta_hit) n_hit++;
    if (ev_meta_miss) n_miss++;
  end

  pte_ext_t attr [NPAGES];
  logic [PA_W-1:0] frame [NPAGES];
  logic [LINE_W-1:0] gold [int];
  logic [3:0] gsize [int];

  function automatic int devb(int p);
    if (!attr[p].compressed) return 128;
    case (attr[p].target) TGT_1_33X: return 96; TGT_2X: return 64; TGT_4X: return 32; TGT_16X: return 8; default: return 128; endcase
  endfunction

  task automatic do_req(int p, int e, bit we, logic [3:0] sz, logic [LINE_W-1:0] d);
    @(negedge clk);
    cl_req_valid = 1'b1;
    cl_req = '{we: we, frame: frame[p], entry: 16'(e), attr: attr[p], size: sz, wdata: d};
    while (!cl_req_ready) @(negedge clk);
    @(posedge clk); #1 cl_req_valid = 1'b0;
    while (!cl_rsp_valid) @(posedge clk);
    #1;
  endtask

  initial begin
    int p, e, key, db, nb, bud_rd0, exp_bud_rd, bud_wr0, exp_bud_wr;
    logic [3:0] sz;
    logic [LINE_W-1:0] d, exp_d;
    target_t tl [NPAGES] = '{TGT_1X, TGT_1X, TGT_1_33X, TGT_2X, TGT_4X, TGT_16X, TGT_2X, TGT_4X};
    for (int i = 0; i < NPAGES; i++) begin
      attr[i] = '{compressed: (i != 0), target: tl[i], buddy_ofs: BOFS_W'(i * 3 + 1)};
      frame[i] = 40'h10_0000_0000 + PA_W'(i) * PAGE_BYTES;
    end
    exp_bud_rd = 0; exp_bud_wr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      p = $urandom_range(0, NPAGES - 1);
      e = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 511) : $urandom_range(0, 95);
      key = p * 512 + e;
      db = devb(p);
      if ($urandom_range(0, 1)) begin
        // write: compressor output of size (sz+1)*8 bytes, zero beyond
        sz = attr[p].compressed ? 4'($urandom) : 4'hF;
        if ($urandom_range(0, 2) == 0) sz = 4'($urandom_range(0, 3));
        d = '0;
        for (int b = 0; b < (int'(sz) + 1) * 8; b++) d[b*8 +: 8] = 8'($urandom);
        if (attr[p].compressed && (int'(sz) + 1) * 8 > db && db != 128) exp_bud_wr++;
        do_req(p, e, 1'b1, sz, d);
        check(cl_rsp.we, "write acknowledged");
        gold[key] = d; gsize[key] = sz;
        // device slot and buddy slot contents, addresses computed here
        for (int b = 0; b < db; b++)
          if (u_dev.peek(frame[p] + PA_W'(e * db + b)) != d[b*8 +: 8]) begin
            check(0, $sformatf("device byte p%0d e%0d b%0d", p, e, b)); break;
          end
        nb = ((int'(sz) + 1) * 8 > db) ? ((int'(sz) + 1) * 8 + 31) / 32 * 32 - db : 0;
        if (attr[p].compressed && db != 128)
          for (int b = 0; b < nb; b++)
            if (u_bud.peek(GBBR + PA_W'(attr[p].buddy_ofs) * PAGE_BYTES + PA_W'(e * (128 - db) + b)) != d[(db + b)*8 +: 8]) begin
              check(0, $sformatf("buddy byte p%0d e%0d b%0d", p, e, b)); break;
            end
        checks++;
      end else begin
        exp_d = gold.exists(key) ? gold[key] : '0;
        sz = gsize.exists(key) ? gsize[key] : (attr[p].compressed && db != 128 ? 4'h0 : 4'hF);
        if (attr[p].compressed && db != 128 && (int'(sz) + 1) * 8 > db) exp_bud_rd++;
        do_req(p, e, 1'b0, 4'h0, '0);
        check(!cl_rsp.we, "read response");
        check(cl_rsp.compressed == (attr[p].compressed && db != 128), "compressed flag");
        check(cl_rsp.size == ((attr[p].compressed && db != 128) ? sz : 4'hF),
              $sformatf("size code p%0d e%0d got %h exp %h", p, e, cl_rsp.size, sz));
        check(cl_rsp.rdata == exp_d, $sformatf("read data p%0d e%0d", p, e));
      end
    end
    repeat (5) @(posedge clk);
    check(u_bud.n_rd == exp_bud_rd, $sformatf("buddy reads %0d expected %0d", u_bud.n_rd, exp_bud_rd));
    check(u_bud.n_wr == exp_bud_wr, $sformatf("buddy writes %0d expected %0d", u_bud.n_wr, exp_bud_wr));
    check(n_hit > 0 && n_miss > 0, "metadata hits and misses both seen");
    check(u_dev.n_stall > 0 && u_bud.n_stall > 0, "back-pressure seen on both memories");
    $display("meta hits=%0d misses=%0d buddy rd=%0d wr=%0d", n_hit, n_miss, u_bud.n_rd, u_bud.n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
