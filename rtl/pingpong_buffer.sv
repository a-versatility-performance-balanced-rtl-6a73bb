// pingpong_buffer: channel-parallel buffer with two sets (A and B) used in ping-pong mode.
//
// Used as the input buffer (DEPTH window positions x LANES input channels) and the output
// buffer (one pixel x LANES output channels) of an FCN module. The producer fills the set
// selected by wr_set and commits it with wr_commit; the consumer sees the whole set selected
// by rd_set on rd_data and frees it with rd_release. Sets alternate A, B, A, ... on both
// sides, so the producer can fill one set while the consumer works on the other.
// can_write / can_read tell whether the next set is free / full. Writes are per lane
// (wr_lane_mask) so a DMA can fill one element per cycle and a post-processor a whole
// pixel. Storage is flops with a combinational read of the full set. The two-set
// organisation follows the paper; the flag handshake is this design's choice.
module pingpong_buffer
  import stdd_pkg::*;
#(
  parameter int LANES = 32,
  parameter int DEPTH = 49,
  localparam int DAW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [DAW-1:0] wr_addr,
  input  logic [LANES-1:0] wr_lane_mask,
  input  fp16_t          wr_data [LANES],
  input  logic           wr_commit,
  output logic           can_write,
  output logic           wr_set,
  input  logic           rd_release,
  output logic           can_read,
  output logic           rd_set,
  output fp16_t          rd_data [DEPTH][LANES]
);
  fp16_t mem [2][DEPTH][LANES];
  logic [1:0] full;

  assign can_write = !full[wr_set];
  assign can_read  = full[rd_set];
  assign rd_data   = mem[rd_set];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int l = 0; l < LANES; l++)
        if (wr_lane_mask[l]) mem[wr_set][wr_addr][l] <= wr_data[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_set <= 1'b0; rd_set <= 1'b0;
    end else begin
      if (wr_commit) begin full[wr_set] <= 1'b1; wr_set <= !wr_set; end
      if (rd_release) begin full[rd_set] <= 1'b0; rd_set <= !rd_set; end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> can_write)
    else $error("pingpong_buffer: commit into a full set");
  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> can_read)
    else $error("pingpong_buffer: release of an empty set");
endmodule
