// dma_read: read engine between an FCN module's loaders and its bus controller.
//
// Each request carries an address, a destination tag and a `zero` flag. A zero request
// (padding or a channel beyond the layer's channel count) does not go to memory; it
// returns the value 0. Other requests are issued as single-word memory reads. Results come
// back in request order on rsp_valid / rsp_tag / rsp_data, so the tag tells the receiver
// where to store the word. Up to DEPTH requests may be outstanding; `idle` means none is.
// A tag FIFO and a response FIFO of the same depth keep memory responses and zero results
// in order. The module's existence follows the paper; everything inside is this design's.
module dma_read
  import stdd_pkg::*;
#(
  parameter int TW    = 19,
  parameter int DEPTH = 8,
  localparam int CW   = $clog2(DEPTH+1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [TW-1:0]     req_tag,
  input  logic              req_zero,
  output logic              rsp_valid,
  output logic [TW-1:0]     rsp_tag,
  output logic [15:0]       rsp_data,
  output logic              idle,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp
);
  logic [TW:0]   tq [DEPTH];    // {zero, tag}
  logic [15:0]   dq [DEPTH];
  logic [CW-1:0] tcnt, dcnt;
  logic [$clog2(DEPTH)-1:0] twp, trp, dwp, drp;
  logic push, pop, dpush, dpop, head_zero;

  assign head_zero = tq[trp][TW];
  assign req_ready = (tcnt < CW'(DEPTH)) && (req_zero || mem_ready);
  assign push      = req_valid && req_ready;
  assign mem_req   = '{valid: req_valid && !req_zero && (tcnt < CW'(DEPTH)), we: 1'b0,
                       addr: req_addr, wdata: '0};
  assign dpush     = mem_rsp.valid;
  assign pop       = (tcnt != 0) && (head_zero || dcnt != 0);
  assign dpop      = pop && !head_zero;
  assign rsp_valid = pop;
  assign rsp_tag   = tq[trp][TW-1:0];
  assign rsp_data  = head_zero ? 16'h0000 : dq[drp];
  assign idle      = (tcnt == 0);

  always_ff @(posedge clk) begin
    if (push)  tq[twp] <= {req_zero, req_tag};
    if (dpush) dq[dwp] <= mem_rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcnt <= '0; dcnt <= '0; twp <= '0; trp <= '0; dwp <= '0; drp <= '0;
    end else begin
      if (push)  twp <= twp + 1'b1;
      if (pop)   trp <= trp + 1'b1;
      if (dpush) dwp <= dwp + 1'b1;
      if (dpop)  drp <= drp + 1'b1;
      tcnt <= tcnt + CW'(push) - CW'(pop);
      dcnt <= dcnt + CW'(dpush) - CW'(dpop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp.valid |-> dcnt < CW'(DEPTH))
    else $error("dma_read: response FIFO overflow");
endmodule
