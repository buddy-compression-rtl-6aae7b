// gbbr: Global Buddy Base-address Register.
//
// Holds the physical base address of this GPU's buddy-memory carve-out, the
// physically contiguous region the host sets aside at boot. Every buddy-memory
// address is this base plus an offset taken from the page's TLB entry. The
// register is written once by software over a simple configuration port; the
// low address bits below the page size are forced to zero because the carve-out
// is managed in pages. It resets to zero and to "not programmed"; `valid` tells
// the controller that a base has been written.
//
// The register and its role follow the paper. The configuration port, the page
// alignment and the valid flag are this design's own choices.
//
// Timing: a write (cfg_we high on a clock edge) is visible on `base` in the next
// cycle.
module gbbr
  import buddy_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 65536
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [PA_W-1:0] cfg_wdata,
  output logic [PA_W-1:0] base,
  output logic            valid
);

  localparam int unsigned PAGE_SH = $clog2(PAGE_BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base  <= '0;
      valid <= 1'b0;
    end else if (cfg_we) begin
      base  <= {cfg_wdata[PA_W-1:PAGE_SH], PAGE_SH'(0)};
      valid <= 1'b1;
    end
  end

endmodule
