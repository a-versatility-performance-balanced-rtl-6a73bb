// dma_write: drains the FCN output buffer to external memory.
//
// When the output buffer has a committed set (one output pixel, up to LANES channels) it
// writes lanes 0 .. lanes-1 of it, one word per accepted memory request, lane l going to
// addr0 + l*plane (channel-major layout, so consecutive channels of a pixel are one plane
// apart), then frees the set. The per-set start address and lane count come with the set.
// This is the "output loop" address computation and the DMA write of the diagram; the
// details are this design's choice.
module dma_write
  import stdd_pkg::*;
#(
  parameter int LANES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set_valid,
  input  fp16_t             set_data [LANES],
  input  logic [ADDR_W-1:0] set_addr0,
  input  logic [ADDR_W-1:0] set_plane,
  input  logic [$clog2(LANES+1)-1:0] set_lanes,
  output logic              set_release,
  output logic              busy,
  output mem_req_t          mem_req,
  input  logic              mem_ready
);
  localparam int LW = $clog2(LANES+1);
  logic [LW-1:0]     lane;
  logic [ADDR_W-1:0] addr;
  logic              active;

  assign busy        = active;
  assign mem_req     = '{valid: active && lane < set_lanes, we: 1'b1, addr: addr,
                         wdata: set_data[lane[$clog2(LANES)-1:0]]};
  assign set_release = active && (lane >= set_lanes ||
                                  (lane == set_lanes - 1'b1 && mem_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; lane <= '0; addr <= '0;
    end else if (!active) begin
      if (set_valid) begin active <= 1'b1; lane <= '0; addr <= set_addr0; end
    end else if (set_release) begin
      active <= 1'b0;
    end else if (mem_ready) begin
      lane <= lane + 1'b1;
      addr <= addr + set_plane;
    end
  end
endmodule
