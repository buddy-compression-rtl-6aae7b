// tb_buddy_xlate: self-checking test of the address translation / sector split.
// Every target ratio, every size code and random entries, offsets and bases are
// applied; the expected device and buddy slots are worked out here from a table
// of sector counts per target, independently of the block's arithmetic.
module tb_buddy_xlate;
  import buddy_pkg::*;
  localparam int unsigned PAGE_BYTES = 65536;
  localparam int unsigned EIDX_W = 9;

  logic [PA_W-1:0] frame, gbbr, dev_addr, buddy_addr;
  logic [EIDX_W-1:0] entry;
  pte_ext_t attr;
  logic [3:0] size;
  logic buddy_en, buddy_need;
  logic [NBYTES_W-1:0] dev_nbytes, buddy_nbytes;
  logic [BOFS_W+EIDX_W-1:0] meta_key;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  buddy_xlate #(.PAGE_BYTES(PAGE_BYTES)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // device bytes per entry by target (Fig. 4 sectors; 8B for the 16x target)
  function automatic longint devb_of(int t);
    case (t) 0: return 128; 1: return 96; 2: return 64; 3: return 32; 4: return 8; default: return 128; endcase
  endfunction

  initial begin
    longint e_dev, e_bud, dv, tot, sz;
    for (int it = 0; it < 4000; it++) begin
      frame = {$urandom, $urandom} & 40'hFF_FFFF_0000;
      gbbr  = {$urandom, $urandom} & 40'hFF_FFFF_0000;
      entry = EIDX_W'($urandom);
      attr.compressed = ($urandom_range(0, 7) != 0);
      attr.target = target_t'($urandom_range(0, 4));
      attr.buddy_ofs = BOFS_W'($urandom);
      size = 4'($urandom);
      #1;
      if (!attr.compressed || attr.target == TGT_1X) begin
        check(!buddy_en && !buddy_need && buddy_nbytes == 0, "raw page uses no buddy");
        check(dev_addr == frame + 128 * entry && dev_nbytes == 128, "raw page slot");
      end else begin
        dv  = devb_of(int'(attr.target));
        sz  = 8 * (longint'(size) + 1);
        tot = ((sz + 31) / 32) * 32;
        e_dev = frame + dv * entry;
        e_bud = gbbr + longint'(attr.buddy_ofs) * PAGE_BYTES + (128 - dv) * entry;
        check(buddy_en, "buddy page");
        check(dev_addr == PA_W'(e_dev) && dev_nbytes == NBYTES_W'(dv),
              $sformatf("dev slot t=%0d e=%0d got %h/%0d", attr.target, entry, dev_addr, dev_nbytes));
        check(buddy_addr == PA_W'(e_bud), $sformatf("buddy addr t=%0d got %h exp %h", attr.target, buddy_addr, e_bud));
        check(buddy_need == (sz > dv), $sformatf("buddy_need t=%0d sz=%0d", attr.target, sz));
        check(buddy_nbytes == NBYTES_W'((sz > dv) ? tot - dv : 0),
              $sformatf("buddy bytes t=%0d sz=%0d got %0d", attr.target, sz, buddy_nbytes));
      end
      check(meta_key == {attr.buddy_ofs, entry}, "metadata key");
    end
    // Fig. 4 at target 2x: 4x entry (32B) -> 1 sector, no buddy; 1.33x (96B) -> 1 buddy sector; 1x -> 2 buddy sectors
    attr = '{compressed: 1'b1, target: TGT_2X, buddy_ofs: 20'd3}; entry = 9'd5; frame = 40'h1000_0000; gbbr = 40'h80_0000_0000;
    size = 4'd3;  #1; check(!buddy_need, "Fig.4 4x entry in device only");
    size = 4'd7;  #1; check(!buddy_need, "Fig.4 2x entry in device only");
    size = 4'd11; #1; check(buddy_need && buddy_nbytes == 32 && buddy_addr == 40'h80_0003_0000 + 5*64, "Fig.4 1.33x entry: sector 3 in buddy");
    size = 4'd15; #1; check(buddy_need && buddy_nbytes == 64, "Fig.4 1x entry: sectors 3,4 in buddy");
    attr.target = TGT_16X; size = 4'd0; #1; check(!buddy_need && dev_nbytes == 8, "16x zero entry fits 8B");
    size = 4'd1; #1; check(buddy_need && buddy_nbytes == 24 && buddy_addr == 40'h80_0003_0000 + 5*120, "16x 16B entry overflows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
