// mem_model: behavioural model of a memory reached through a mem_req_t port.
// Used for both the GPU device-memory channel and the buddy-memory link. It is
// a simulation model, not synthesizable.
//
// Byte-addressed sparse storage (an associative array). Bytes never written
// read as FILL. A request is accepted when req_ready is high; with STALL set,
// ready drops at random so the requester sees back-pressure. Writes are posted.
// Read data is taken when the request is accepted and comes back on rsp_valid
// LATENCY cycles later, right-aligned, in request order. Counters record the
// requests and bytes served; peek/poke give the testbench direct access.
module mem_model
  import buddy_pkg::*;
#(
  parameter int unsigned LATENCY = 4,
  parameter bit          STALL   = 1'b0,
  parameter logic [7:0]  FILL    = 8'h00
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_rdata
);

  logic [7:0] mem [logic [PA_W-1:0]];
  logic [LINE_W-1:0] q_data [$];
  longint unsigned   q_due  [$];
  longint unsigned   cyc;
  int unsigned n_rd, n_wr, n_rd_bytes, n_wr_bytes, n_stall;

  function automatic logic [7:0] peek(logic [PA_W-1:0] a);
    return mem.exists(a) ? mem[a] : FILL;
  endfunction

  function automatic void poke(logic [PA_W-1:0] a, logic [7:0] d);
    mem[a] = d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; rsp_valid <= 1'b0; rsp_rdata <= '0;
      n_rd <= 0; n_wr <= 0; n_rd_bytes <= 0; n_wr_bytes <= 0; n_stall <= 0;
      q_data.delete(); q_due.delete();
    end else begin
      cyc <= cyc + 1;
      rsp_valid <= 1'b0;
      if (req_valid && !req_ready) n_stall <= n_stall + 1;
      if (req_valid && req_ready) begin
        if (req.nbytes > NBYTES_W'(ENTRY_BYTES))
          $error("mem_model: request of %0d bytes", req.nbytes);
        if (req.we) begin
          for (int b = 0; b < int'(req.nbytes); b++) mem[req.addr + PA_W'(b)] = req.wdata[b*8 +: 8];
          n_wr <= n_wr + 1; n_wr_bytes <= n_wr_bytes + req.nbytes;
        end else begin
          logic [LINE_W-1:0] d;
          d = '0;
          for (int b = 0; b < int'(req.nbytes); b++) d[b*8 +: 8] = peek(req.addr + PA_W'(b));
          q_data.push_back(d);
          q_due.push_back(cyc + LATENCY);
          n_rd <= n_rd + 1; n_rd_bytes <= n_rd_bytes + req.nbytes;
        end
      end
      if (q_due.size() > 0 && q_due[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q_data.pop_front();
        void'(q_due.pop_front());
      end
    end
  end

endmodule
