// bus_controller: shares one external-memory port between a module's read and write
// engines.
//
// Round-robin arbitration between the read requester (port 0) and the write requester
// (port 1): when both request, the one that did not win last time is granted. The granted
// request is forwarded to memory; the requester sees `ready` only when granted and memory is
// ready. Read responses are passed back to the read engine (writes have none). Every
// module of the system has one, as in the system diagram; the round-robin policy is this
// design's choice. Combinational forwarding, one register for the priority.
module bus_controller
  import stdd_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t rd_req,
  output logic     rd_ready,
  output mem_rsp_t rd_rsp,
  input  mem_req_t wr_req,
  output logic     wr_ready,
  output mem_req_t mem_req,
  input  logic     mem_ready,
  input  mem_rsp_t mem_rsp
);
  logic last_wr;    // 1: the write side won last time
  logic gnt_wr;

  always_comb begin
    if (rd_req.valid && wr_req.valid) gnt_wr = !last_wr;
    else gnt_wr = wr_req.valid;
    mem_req  = gnt_wr ? wr_req : rd_req;
    rd_ready = mem_ready && !gnt_wr;
    wr_ready = mem_ready && gnt_wr;
    rd_rsp   = mem_rsp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_wr <= 1'b0;
    else if (mem_req.valid && mem_ready) last_wr <= gnt_wr;
  end
endmodule
