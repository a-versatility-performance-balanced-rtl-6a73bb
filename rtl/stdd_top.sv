// stdd_top: FPGA side of the scene-text-detection accelerator.
//
// The host (over PCIe) writes layer microcodes into the configuration RAM and control
// information into the register block, then starts modules through the task scheduler.
// Three computing modules work from and to external memory, each through its own memory
// port and bus controller, and can run at the same time:
//   * feature extraction: FCN engine with a 32 x 64 MAC array, 1x1 / 3x3 (Winograd) /
//     7x7 convolution, max pooling, residual cache;
//   * feature fusion: FCN engine with a 16 x 32 MAC array, no 7x7 datapath, sigmoid in
//     place of max pooling;
//   * upsample: 2x enlargement of a feature map.
// The scheduler raises `irq` when every module of the round has finished.
// Ports: host register port (host_*), the host's DMA write path into the configuration RAM
// (cfg_wr_*), the interrupt, and three external-memory ports, index 0 feature extraction,
// 1 feature fusion, 2 upsample (request/ready/in-order read response, one 16-bit word per
// address). The PCIe endpoint and the DDR4 memory are outside this module. Following the
// system diagram; the port protocol is this design's choice.
module stdd_top
  import stdd_pkg::*;
#(
  parameter int CFG_DEPTH     = 1024,
  parameter int FE_M          = 32,
  parameter int FE_N          = 64,
  parameter int FF_M          = 16,
  parameter int FF_N          = 32,
  parameter int PSUM_DEPTH    = 16384,
  parameter int RES_DEPTH     = 65536,
  parameter int UP_WMAX       = 4096,
  localparam int CAW = $clog2(CFG_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           host_wr_en,
  input  logic [3:0]     host_addr,
  input  logic [31:0]    host_wdata,
  output logic [31:0]    host_rdata,
  input  logic           cfg_wr_en,
  input  logic [CAW-1:0] cfg_wr_addr,
  input  logic [255:0]   cfg_wr_data,
  output logic           irq,
  output mem_req_t       mem_req   [3],
  input  logic           mem_ready [3],
  input  mem_rsp_t       mem_rsp   [3]
);
  logic [2:0]  start_req, mod_start, mod_busy, mod_done, round_done, err;
  logic        irq_clear, irq_en;
  logic [15:0] fe_base, fe_count, ff_base, ff_count, up_c;
  logic [ADDR_W-1:0] up_src, up_dst;
  logic [19:0] up_h;
  logic [14:0] up_w;
  logic [CAW-1:0] fe_cfg_addr, ff_cfg_addr;
  logic [255:0]   fe_cfg_data, ff_cfg_data;

  pcie_regs u_regs (
    .clk, .rst_n, .host_wr_en, .host_addr, .host_wdata, .host_rdata,
    .start_req, .irq_clear, .irq_en, .fe_base, .fe_count, .ff_base, .ff_count,
    .up_src, .up_dst, .up_c, .up_h, .up_w,
    .busy(mod_busy), .irq, .round_done, .err);

  task_scheduler u_sched (
    .clk, .rst_n, .start_req, .irq_clear, .irq_en, .mod_busy, .mod_done,
    .mod_start, .round_done, .irq);

  config_ram #(.DEPTH(CFG_DEPTH)) u_cfg (
    .clk, .wr_en(cfg_wr_en), .wr_addr(cfg_wr_addr), .wr_data(cfg_wr_data),
    .rd_addr_a(fe_cfg_addr), .rd_data_a(fe_cfg_data),
    .rd_addr_b(ff_cfg_addr), .rd_data_b(ff_cfg_data));

  fcn_engine #(.M(FE_M), .N(FE_N), .HAS_7X7(1'b1), .SIGMOID(1'b0), .PSUM_DEPTH(PSUM_DEPTH),
               .RES_DEPTH(RES_DEPTH), .CFG_DEPTH(CFG_DEPTH)) u_fe (
    .clk, .rst_n, .start(mod_start[0]), .mc_base(fe_base[CAW-1:0]),
    .mc_count(fe_count[CAW:0]), .busy(mod_busy[0]), .done(mod_done[0]), .error(err[0]),
    .cfg_addr(fe_cfg_addr), .cfg_data(fe_cfg_data),
    .mem_req(mem_req[0]), .mem_ready(mem_ready[0]), .mem_rsp(mem_rsp[0]));

  fcn_engine #(.M(FF_M), .N(FF_N), .HAS_7X7(1'b0), .SIGMOID(1'b1), .PSUM_DEPTH(PSUM_DEPTH),
               .RES_DEPTH(RES_DEPTH), .CFG_DEPTH(CFG_DEPTH)) u_ff (
    .clk, .rst_n, .start(mod_start[1]), .mc_base(ff_base[CAW-1:0]),
    .mc_count(ff_count[CAW:0]), .busy(mod_busy[1]), .done(mod_done[1]), .error(err[1]),
    .cfg_addr(ff_cfg_addr), .cfg_data(ff_cfg_data),
    .mem_req(mem_req[1]), .mem_ready(mem_ready[1]), .mem_rsp(mem_rsp[1]));

  upsample #(.WMAX(UP_WMAX)) u_up (
    .clk, .rst_n, .start(mod_start[2]), .src(up_src), .dst(up_dst), .channels(up_c),
    .height(up_h), .width(up_w), .busy(mod_busy[2]), .done(mod_done[2]),
    .mem_req(mem_req[2]), .mem_ready(mem_ready[2]), .mem_rsp(mem_rsp[2]));
  assign err[2] = 1'b0;
endmodule
