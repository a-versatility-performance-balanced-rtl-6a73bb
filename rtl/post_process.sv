// post_process: the back end of an FCN module, L lanes (one per output channel) wide.
//
// It holds the partial-sum cache, the residual-layer cache, one widened-float adder per lane
// shared by partial-sum accumulation and residual addition, max pooling and the activation.
// Three kinds of request, at most one per cycle (the FCN controller never overlaps them):
//   acc   : psum[acc_addr] = (acc_first ? 0 : psum[acc_addr]) + acc_data. Each point-wise
//           MAC result, or each inverse-Winograd output pixel, of each input-channel group
//           is accumulated here in the 15-bit-mantissa format.
//   drain : reads psum[drain_addr] once every contribution is in and finalises it.
//   pool  : running maximum over a pooling window (pool_first starts it, pool_last ends it
//           and finalises the maximum).
// Finalising: for res op "add" the adder's second operand is switched from the partial-sum
// cache to the residual cache entry res_idx; the sum is truncated to FP16; for res op
// "cache" the FP16 result is also written to the residual cache at res_idx; then ReLU (or,
// in the fusion module, sigmoid) is applied if the layer asks for it. Finalised pixels
// appear on out_data one cycle later with out_valid. The caches are arrays read
// asynchronously. The block set (adder, partial sum cache, res layer cache, max pooling,
// activation, output multiplexer) follows the feature-extraction diagram; the order
// "pool, then residual add" and all sizes are this design's choices. res_lane_off lets a
// pooling layer that works on a narrower channel group add the matching lanes of a cached
// wider conv result; cache writes are never shifted.
module post_process
  import stdd_pkg::*;
#(
  parameter int L          = 64,
  parameter int PSUM_DEPTH = 4096,
  parameter int RES_DEPTH  = 65536,
  parameter bit SIGMOID    = 1'b0,
  localparam int PAW = $clog2(PSUM_DEPTH),
  localparam int RAW = $clog2(RES_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // layer configuration
  input  logic           cfg_relu,
  input  logic           cfg_sigmoid,
  input  res_op_e        cfg_res_op,
  // accumulate
  input  logic           acc_valid,
  input  logic           acc_first,
  input  logic [PAW-1:0] acc_addr,
  input  fpx_t           acc_data [L],
  // drain
  input  logic           drain_valid,
  input  logic [PAW-1:0] drain_addr,
  // pool
  input  logic           pool_valid,
  input  logic           pool_first,
  input  logic           pool_last,
  input  fp16_t          pool_data [L],
  // residual cache index of the pixel being finalised
  input  logic [RAW-1:0] res_idx,
  input  logic [$clog2(L)-1:0] res_lane_off,   // lane i adds residual lane i+off
  // result
  output logic           out_valid,
  output fp16_t          out_data [L]
);
  logic [L*21-1:0] psum_mem [PSUM_DEPTH];
  logic [L*16-1:0] res_mem  [RES_DEPTH];

  fpx_t  add_a [L], add_b [L], add_y [L];
  fp16_t pmax [L];
  fp16_t pool_res [L];
  fp16_t fin [L];
  fp16_t act_sig [L];
  logic  finalize;
  logic  [L*21-1:0] psum_rd;
  logic  [L*16-1:0] res_rd;

  assign psum_rd  = psum_mem[acc_valid ? acc_addr : drain_addr];
  assign res_rd   = res_mem[res_idx];
  assign finalize = drain_valid || (pool_valid && pool_last);

  always_comb begin
    for (int i = 0; i < L; i++) begin
      pool_res[i] = (pool_first || fp16_gt(pool_data[i], pmax[i])) ? pool_data[i] : pmax[i];
      if (acc_valid) begin
        add_a[i] = acc_data[i];
        add_b[i] = acc_first ? fpx_t'('0) : fpx_t'(psum_rd[i*21 +: 21]);
      end else begin
        add_a[i] = pool_valid ? fp16_to_fpx(pool_res[i]) : fpx_t'(psum_rd[i*21 +: 21]);
        add_b[i] = (cfg_res_op == RES_ADD) ? fp16_to_fpx(fp16_t'(res_rd[((i + int'(res_lane_off)) % L)*16 +: 16])) : fpx_t'('0);
      end
    end
  end

  always_comb
    for (int i = 0; i < L; i++) fin[i] = fpx_to_fp16(add_y[i]);

  for (genvar i = 0; i < L; i++) begin : g_lane
    fpx_add u_add (.a(add_a[i]), .b(add_b[i]), .y(add_y[i]));
    if (SIGMOID) begin : g_sig
      sigmoid_fp16 u_sig (.a(fin[i]), .y(act_sig[i]));
    end else begin : g_nosig
      assign act_sig[i] = fin[i];
    end
  end

  always_ff @(posedge clk) begin
    if (acc_valid)
      for (int i = 0; i < L; i++) psum_mem[acc_addr][i*21 +: 21] <= add_y[i];
    if (finalize && cfg_res_op == RES_CACHE)
      for (int i = 0; i < L; i++) res_mem[res_idx][i*16 +: 16] <= fin[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < L; i++) begin out_data[i] <= '0; pmax[i] <= '0; end
    end else begin
      out_valid <= finalize;
      if (pool_valid) pmax <= pool_res;
      if (finalize)
        for (int i = 0; i < L; i++)
          out_data[i] <= (SIGMOID && cfg_sigmoid) ? act_sig[i] :
                         cfg_relu ? fp16_relu(fin[i]) : fin[i];
    end
  end

  // requests never overlap
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({acc_valid, drain_valid, pool_valid}))
    else $error("post_process: overlapping requests");
endmodule
