// tb_gbbr: self-checking test of the Global Buddy Base-address Register.
// Checks reset value, the valid flag, page alignment of the stored base, that
// the register holds its value while cfg_we is low, and one-cycle write timing.
module tb_gbbr;
  import buddy_pkg::*;
  localparam int unsigned PAGE_BYTES = 65536;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [PA_W-1:0] cfg_wdata = '0, base;
  logic valid;
  int checks = 0, failures = 0;

  gbbr #(.PAGE_BYTES(PAGE_BYTES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PA_W-1:0] v, exp;
    repeat (2) @(posedge clk);
    check(base == '0 && !valid, "reset value");
    rst_n = 1'b1;
    @(posedge clk);
    check(base == '0 && !valid, "after reset");
    for (int i = 0; i < 40; i++) begin
      v = {$urandom, $urandom};
      exp = v & ~PA_W'(PAGE_BYTES - 1);
      @(negedge clk); cfg_we = 1'b1; cfg_wdata = v;
      @(negedge clk); cfg_we = 1'b0; cfg_wdata = ~v;
      check(base == exp && valid, $sformatf("write %h read %h", v, base));
      repeat ($urandom_range(1, 3)) @(negedge clk);
      check(base == exp, "hold without cfg_we");
    end
    rst_n = 1'b0; #1;
    check(base == '0 && !valid, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
