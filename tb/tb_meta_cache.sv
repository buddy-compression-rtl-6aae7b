// tb_meta_cache: self-checking test of the metadata cache.
// A random mix of reads and writes of 4-bit size codes is run over a pool of
// lines chosen to collide in a few sets. An independent model (per-set LRU list
// of line keys plus a dirty set, and a golden copy of every code) predicts each
// response's data and hit flag and the number of write-backs. The hit latency
// (2 cycles) and the 63-neighbour prefetch are checked, and at the end the
// metadata region in memory is compared with the golden codes of every line
// that has been written back.
module tb_meta_cache;
  import buddy_pkg::*;
  localparam int unsigned CACHE_BYTES = 4096, WAYS = 4, LINE_BYTES = 32, KEY_W = 29;
  localparam int unsigned SETS = CACHE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned LB = LINE_BYTES * 8;
  localparam logic [PA_W-1:0] META_BASE = 40'h00_4000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid = 1'b0, req_ready, req_we = 1'b0, rsp_valid, rsp_hit;
  logic [KEY_W-1:0] req_key = '0;
  logic [3:0] req_wdata = '0, rsp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [PA_W-1:0] mem_req_addr;
  logic [LB-1:0] mem_req_wdata;
  logic [LINE_W-1:0] mem_rsp_full;
  mem_req_t mreq;

  meta_cache #(.CACHE_BYTES(CACHE_BYTES), .WAYS(WAYS), .LINE_BYTES(LINE_BYTES), .KEY_W(KEY_W)) dut (
    .clk, .rst_n, .meta_base(META_BASE), .req_valid, .req_ready, .req_we, .req_key, .req_wdata,
    .rsp_valid, .rsp_rdata, .rsp_hit, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_wdata, .mem_rsp_valid, .mem_rsp_rdata(mem_rsp_full[LB-1:0]));

  assign mreq = '{we: mem_req_we, addr: mem_req_addr, nbytes: NBYTES_W'(LINE_BYTES), wdata: LINE_W'(mem_req_wdata)};
  mem_model #(.LATENCY(5), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mreq),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_full));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model
  logic [3:0] gold [logic [KEY_W-1:0]];
  longint unsigned lru [SETS][$];       // line keys, most recent first
  bit dirty [longint unsigned];
  bit written_back [longint unsigned];
  int exp_wb = 0, n_wb = 0, n_hit = 0, n_miss = 0;

  function automatic logic [PA_W-1:0] nib_byte(logic [KEY_W-1:0] k);
    return META_BASE + PA_W'((k >> 6) * LINE_BYTES) + PA_W'((k % 64) / 2);
  endfunction
  function automatic logic [3:0] mem_code(logic [KEY_W-1:0] k);
    logic [7:0] b;
    b = u_mem.peek(nib_byte(k));
    return (k % 2 == 1) ? b[7:4] : b[3:0];
  endfunction

  // returns expected hit
  function automatic bit model_access(logic [KEY_W-1:0] k, bit we);
    longint unsigned lk = k >> 6;
    int s = int'(lk % SETS);
    int pos = -1;
    foreach (lru[s][i]) if (lru[s][i] == lk) pos = i;
    if (pos >= 0) begin
      lru[s].delete(pos);
      lru[s].push_front(lk);
    end else begin
      if (lru[s].size() == WAYS) begin
        longint unsigned v = lru[s].pop_back();
        if (dirty.exists(v)) begin exp_wb++; dirty.delete(v); written_back[v] = 1; end
      end
      lru[s].push_front(lk);
    end
    if (we) dirty[lk] = 1;
    return pos >= 0;
  endfunction

  always @(posedge clk) if (mem_req_valid && mem_req_ready && mem_req_we) n_wb++;

  task automatic access(logic [KEY_W-1:0] k, bit we, logic [3:0] wd, output int lat);
    bit exp_hit;
    logic [3:0] exp_d;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_key = k; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 1'b0;
    lat = 1;
    exp_d = gold.exists(k) ? gold[k] : mem_code(k);
    exp_hit = model_access(k, we);
    while (!rsp_valid) begin @(posedge clk); #1 lat++; end
    check(rsp_hit == exp_hit, $sformatf("hit flag key %h exp %0d", k, exp_hit));
    if (!we) check(rsp_rdata == exp_d, $sformatf("read key %h got %h exp %h", k, rsp_rdata, exp_d));
    if (we) gold[k] = wd; else gold[k] = exp_d;
    if (rsp_hit) n_hit++; else n_miss++;
  endtask

  initial begin
    int lat;
    longint unsigned pool [$];
    logic [KEY_W-1:0] k;
    // metadata region starts with random codes
    for (int l = 0; l < 64; l++) begin
      longint unsigned lk;
      lk = (l < 16) ? (3 + (l % 2) * 4 + SETS * (l / 2)) : (l * 977);
      pool.push_back(lk);
      for (int b = 0; b < LINE_BYTES; b++)
        u_mem.poke(META_BASE + PA_W'(lk * LINE_BYTES + b), 8'($urandom));
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // timing: a miss, then a hit two cycles after acceptance
    access(KEY_W'(pool[0] * 64 + 5), 1'b0, 4'h0, lat);
    check(!rsp_hit, "first access misses");
    access(KEY_W'(pool[0] * 64 + 6), 1'b0, 4'h0, lat);
    check(lat == 2, $sformatf("hit latency %0d, expected 2", lat));
    // one miss brings the 63 neighbours
    for (int i = 0; i < 64; i++) begin
      access(KEY_W'(pool[0] * 64 + i), 1'b0, 4'h0, lat);
      check(rsp_hit, "neighbour entry prefetched by the same line");
    end
    // random traffic over colliding lines
    for (int it = 0; it < 3000; it++) begin
      k = KEY_W'(pool[$urandom_range(0, 23)] * 64 + $urandom_range(0, 63));
      access(k, $urandom_range(0, 1), 4'($urandom), lat);
    end
    repeat (10) @(posedge clk);
    check(n_wb == exp_wb, $sformatf("write-backs %0d expected %0d", n_wb, exp_wb));
    check(exp_wb > 0 && n_miss > 0 && n_hit > 0, "hits, misses and write-backs all seen");
    // evicted dirty lines hold the golden codes in memory
    foreach (gold[kk]) if (written_back.exists(kk >> 6) && !dirty.exists(kk >> 6))
      check(mem_code(kk) == gold[kk], $sformatf("written-back code key %h", kk));
    $display("hits=%0d misses=%0d writebacks=%0d", n_hit, n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
