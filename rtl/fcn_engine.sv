// fcn_engine: one microcode-driven FCN module (feature extraction or feature fusion).
//
// The module runs a sequence of layers described by 256-bit microcodes, from external
// memory to external memory. Per layer the microcode interpreter supplies the fields; the
// engine then runs two independent loops over the same iteration space:
//
//   for each output-channel group of N (pooling: channel group of M)
//     for each band of output rows (as many rows as fit the partial-sum cache)
//       for each input-channel group of M
//         [weight loader fills one set of the ping-pong weight buffer]
//         for each output tile of the band (4x4 for Winograd, else one pixel)
//           [input loader fills one set of the ping-pong input buffer with the window]
//           [compute consumes it and accumulates into the partial-sum cache]
//       [drain: finalise every pixel of the band and send it to the output buffer]
//
// The loader runs ahead of compute by one buffer set, so memory reads overlap computation
// (ping-pong input and weight buffers), and a DMA write engine drains a ping-pong output
// buffer in parallel with both.
//
// Datapaths (sharing the one MAC array):
//   * 3x3 stride 1: Winograd F(4x4,3x3). The 6x6xM input window is normalised to BFP as one
//     block, transformed (B^T X B) per channel, multiplied point-wise with the pre-
//     transformed weights (36 MAC-array cycles), inverse transformed (A^T M A) per output
//     channel and the 16 output pixels accumulated one per cycle.
//   * 1x1, 7x7 and strided 3x3: point-wise MAC. Each kernel position's M-vector is
//     normalised to BFP and multiplied with that position's weight slab, one per cycle,
//     each result accumulated in the partial-sum cache.
//   * max pooling (feature extraction only, 2x2 stride 2) in the post-processor.
// MAC results are converted to a float with a 15-bit mantissa, accumulated, and truncated to
// FP16 when a pixel is finalised (accuracy maintenance); residual cache/add, ReLU and (in
// the fusion module) sigmoid are applied then. A layer with res op "cache" keeps its result
// in the on-chip residual cache only and writes nothing to memory.
//
// Memory layout (this design's choice): feature maps channel-major, then row-major, one
// FP16 per 16-bit word. Weights from the microcode's weight address, for each output group,
// each input group, each kernel position (36 Winograd-domain positions for a Winograd
// layer): one exponent word (signed, low 8 bits) then N*M mantissas, n-major. A Winograd
// layer uses the exponent of position 0 for all 36 positions. An image stored transposed
// is handled by reading each kernel transposed when microcode bit "transpose" is set.
//
// Simplifications against the paper: windows are fetched element by element for every
// tile (no row reuse in the input buffer), one 16-bit word per memory access, a single
// clock domain, and the band height is chosen from the partial-sum cache size alone.
// Interface: start/mc_base/mc_count launch a microcode sequence, done pulses at its end;
// cfg_addr/cfg_data is a synchronous read port of the configuration RAM; mem_* is the
// module's external-memory port.
module fcn_engine
  import stdd_pkg::*;
#(
  parameter int M          = 32,
  parameter int N          = 64,
  parameter bit HAS_7X7    = 1'b1,
  parameter bit SIGMOID    = 1'b0,
  parameter int PSUM_DEPTH = 16384,
  parameter int RES_DEPTH  = 65536,
  parameter int CFG_DEPTH  = 1024,
  localparam int CAW  = $clog2(CFG_DEPTH),
  localparam int WSM  = HAS_7X7 ? 7 : 6,
  localparam int WIN  = WSM * WSM,
  localparam int KP   = HAS_7X7 ? 49 : 36,
  localparam int IDXW = $clog2(N*M+1),
  localparam int TAGW = 1 + 6 + IDXW,
  localparam int PAW  = $clog2(PSUM_DEPTH),
  localparam int RAW  = $clog2(RES_DEPTH),
  localparam int MW   = $clog2(M),
  localparam int NLW  = $clog2(N+1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [CAW-1:0] mc_base,
  input  logic [CAW:0]   mc_count,
  output logic           busy,
  output logic           done,
  output logic           error,         // a layer the engine cannot run was skipped
  output logic [CAW-1:0] cfg_addr,
  input  logic [255:0]   cfg_data,
  output mem_req_t       mem_req,
  input  logic           mem_ready,
  input  mem_rsp_t       mem_rsp
);
  // ------------------------------------------------------------------ interpreter
  microcode_t mc;
  logic       mc_valid, mc_done, int_busy, int_done;

  microcode_interpreter #(.DEPTH(CFG_DEPTH)) u_interp (
    .clk, .rst_n, .start, .base(mc_base), .count(mc_count),
    .ram_addr(cfg_addr), .ram_data(cfg_data),
    .layer(mc), .layer_valid(mc_valid), .layer_done(mc_done),
    .busy(int_busy), .done(int_done));

  // ------------------------------------------------------------------ layer config
  logic              k_pool, k_wino, k_sig, k_relu, k_transp;
  res_op_e           k_res;
  logic [2:0]        k_K, k_pad, k_WS, k_TH;
  logic              k_s2;
  logic [19:0]       k_H, k_Ho;
  logic [14:0]       k_W, k_Wo;
  logic [15:0]       k_Cin, k_Cout;
  logic [ADDR_W-1:0] k_in, k_out, k_wa;
  logic [34:0]       k_pin, k_pout;
  logic [15:0]       k_nicg, k_nocg;
  logic [5:0]        k_kpw;
  logic [19:0]       k_BR;

  typedef enum logic [2:0] {E_IDLE, E_WAITL, E_SETUP, E_BAND, E_RUN, E_FINISH} est_e;
  est_e est;
  logic run, l_done, c_done, layer_ok;
  logic u_obuf_can_write;
  logic ob_can_read, dw_busy;

  assign busy = (est != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; run <= 1'b0; mc_done <= 1'b0; done <= 1'b0; error <= 1'b0;
      k_pool <= 0; k_wino <= 0; k_sig <= 0; k_relu <= 0; k_transp <= 0; k_res <= RES_NONE;
      k_K <= 1; k_pad <= 0; k_WS <= 1; k_TH <= 1; k_s2 <= 0; k_H <= 0; k_Ho <= 0; k_W <= 0;
      k_Wo <= 0; k_Cin <= 0; k_Cout <= 0; k_in <= 0; k_out <= 0; k_wa <= 0; k_pin <= 0;
      k_pout <= 0; k_nicg <= 0; k_nocg <= 0; k_kpw <= 1; k_BR <= 0; layer_ok <= 0;
    end else begin
      run <= 1'b0; mc_done <= 1'b0; done <= 1'b0;
      unique case (est)
        E_IDLE: if (start) begin est <= E_WAITL; error <= 1'b0; end
        E_WAITL: begin
          if (int_done) begin est <= E_IDLE; done <= 1'b1; end
          else if (mc_valid && !mc_done) begin
            k_pool   <= (mc.layer_type == LT_POOL) && !SIGMOID;
            k_sig    <= (mc.layer_type == LT_POOL) && SIGMOID;
            k_relu   <= mc.relu;
            k_transp <= mc.transpose;
            k_res    <= mc.res_op;
            k_s2     <= mc.stride2;
            k_H <= mc.height; k_W <= mc.width; k_Cin <= mc.in_ch; k_Cout <= mc.out_ch;
            k_in <= mc.in_addr; k_out <= mc.out_addr; k_wa <= mc.weight_addr;
            unique case (mc.kernel)
              K_1X1:   k_K <= 3'd1;
              K_3X3:   k_K <= 3'd3;
              default: k_K <= 3'd7;
            endcase
            layer_ok <= !(mc.layer_type == LT_UPSAMPLE || mc.layer_type == LT_NULL ||
                          mc.kernel == K_RSV || (mc.kernel == K_7X7 && !HAS_7X7 &&
                          mc.layer_type == LT_CONV) || mc.height == 0 || mc.width == 0);
            if (mc.kernel == K_RSV || (mc.kernel == K_7X7 && !HAS_7X7 && mc.layer_type == LT_CONV))
              error <= 1'b1;
            est <= E_SETUP;
          end
        end
        E_SETUP: begin
          if (!layer_ok) begin mc_done <= 1'b1; est <= E_WAITL; end
          else begin
            k_wino <= !k_pool && k_K == 3'd3 && !k_s2;
            k_pad  <= (k_K - 3'd1) >> 1;
            k_WS   <= k_pool ? 3'd2 : (k_K == 3'd3 && !k_s2) ? 3'd6 : k_K;
            k_TH   <= (!k_pool && k_K == 3'd3 && !k_s2) ? 3'd4 : 3'd1;
            k_kpw  <= (!k_pool && k_K == 3'd3 && !k_s2) ? 6'd36 : 6'(k_K * k_K);
            k_Ho   <= k_pool ? k_H >> 1 : k_s2 ? (k_H + 20'd1) >> 1 : k_H;
            k_Wo   <= k_pool ? k_W >> 1 : k_s2 ? (k_W + 15'd1) >> 1 : k_W;
            k_pin  <= 35'(k_H * k_W);
            k_nicg <= k_pool ? 16'd1 : 16'((32'(k_Cin) + M - 1) / M);
            k_nocg <= k_pool ? 16'((32'(k_Cin) + M - 1) / M) : 16'((32'(k_Cout) + N - 1) / N);
            est    <= E_BAND;
            k_BR   <= '0;
          end
        end
        E_BAND: begin
          // band height: largest multiple of the tile height whose rows fit the cache
          k_pout <= 35'(k_Ho * k_Wo);
          if (k_BR == 0) begin
            k_BR <= 20'(k_TH);
            if (32'(k_TH) * 32'(k_Wo) > PSUM_DEPTH) begin
              error <= 1'b1; mc_done <= 1'b1; est <= E_WAITL;
            end
          end else if (k_pool || k_BR >= k_Ho ||
                       (32'(k_BR) + 32'(k_TH)) * 32'(k_Wo) > PSUM_DEPTH) begin
            if (k_pool) k_BR <= k_Ho;
            run <= 1'b1; est <= E_RUN;
          end else k_BR <= k_BR + 20'(k_TH);
        end
        E_RUN: if (c_done) est <= E_FINISH;
        E_FINISH: if (!ob_can_read && !dw_busy) begin mc_done <= 1'b1; est <= E_WAITL; end
        default: est <= E_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ buffers, DMA, bus
  logic               dr_req_valid, dr_req_ready, dr_req_zero, dr_rsp_valid, dr_idle;
  logic [ADDR_W-1:0]  dr_req_addr;
  logic [TAGW-1:0]    dr_req_tag, dr_rsp_tag;
  logic [15:0]        dr_rsp_data;
  mem_req_t           rd_mreq, wr_mreq;
  mem_rsp_t           rd_mrsp;
  logic               rd_mready, wr_mready;

  dma_read #(.TW(TAGW), .DEPTH(8)) u_dma_rd (
    .clk, .rst_n, .req_valid(dr_req_valid), .req_ready(dr_req_ready), .req_addr(dr_req_addr),
    .req_tag(dr_req_tag), .req_zero(dr_req_zero), .rsp_valid(dr_rsp_valid),
    .rsp_tag(dr_rsp_tag), .rsp_data(dr_rsp_data), .idle(dr_idle),
    .mem_req(rd_mreq), .mem_ready(rd_mready), .mem_rsp(rd_mrsp));

  bus_controller u_bus (
    .clk, .rst_n, .rd_req(rd_mreq), .rd_ready(rd_mready), .rd_rsp(rd_mrsp),
    .wr_req(wr_mreq), .wr_ready(wr_mready), .mem_req, .mem_ready, .mem_rsp);

  // input buffer
  logic  ib_commit, ib_can_write, ib_release, ib_can_read, ib_wset, ib_rset;
  fp16_t ib_wdata [M];
  fp16_t win [WIN][M];
  logic [M-1:0] ib_mask;
  logic  ib_wr;

  always_comb begin
    for (int l = 0; l < M; l++) ib_wdata[l] = fp16_t'(dr_rsp_data);
    ib_mask = '0;
    ib_mask[dr_rsp_tag[MW-1:0]] = 1'b1;
    ib_wr = dr_rsp_valid && !dr_rsp_tag[TAGW-1];
  end

  pingpong_buffer #(.LANES(M), .DEPTH(WIN)) u_ibuf (
    .clk, .rst_n, .wr_en(ib_wr), .wr_addr($clog2(WIN)'(dr_rsp_tag[IDXW +: 6])),
    .wr_lane_mask(ib_mask), .wr_data(ib_wdata), .wr_commit(ib_commit),
    .can_write(ib_can_write), .wr_set(ib_wset), .rd_release(ib_release),
    .can_read(ib_can_read), .rd_set(ib_rset), .rd_data(win));

  // weights buffer
  logic wb_commit, wb_can_write, wb_release, wb_can_read;
  logic [2:0] wb_ky, wb_kx, wb_ksz;
  logic signed [15:0] wts [N][M];
  logic signed [7:0]  wexp;

  weights_buffer #(.M(M), .N(N), .KP(KP)) u_wbuf (
    .clk, .rst_n, .wr_en(dr_rsp_valid && dr_rsp_tag[TAGW-1]),
    .wr_pos($clog2(KP)'(dr_rsp_tag[IDXW +: 6])), .wr_idx(dr_rsp_tag[IDXW-1:0]),
    .wr_data(dr_rsp_data), .wr_commit(wb_commit), .can_write(wb_can_write),
    .rd_release(wb_release), .can_read(wb_can_read), .rd_ky(wb_ky), .rd_kx(wb_kx),
    .ksz(wb_ksz), .transpose(k_transp), .rd_w(wts), .rd_exp(wexp));

  // ------------------------------------------------------------------ loader
  typedef enum logic [2:0] {L_IDLE, L_WWAIT, L_WLOAD, L_WDONE, L_IWAIT, L_ILOAD, L_IDONE} lst_e;
  lst_e lst;
  logic [15:0]        l_ocg, l_icg;
  logic [19:0]        l_by, l_ty;
  logic [14:0]        l_tx;
  logic [5:0]         l_pos;
  logic [IDXW-1:0]    l_idx;
  logic [2:0]         l_wy, l_wx;
  logic [MW-1:0]      l_lane;
  logic [ADDR_W-1:0]  l_wptr, l_wptr_oc;
  logic signed [21:0] l_iy0, l_ix0;
  logic [15:0]        l_cg;
  logic [ADDR_W-1:0]  la_addr;
  logic               la_pad;

  always_comb begin
    if (k_wino) begin
      l_iy0 = $signed({2'b0, l_ty}) - 22'sd1;
      l_ix0 = $signed({7'b0, l_tx}) - 22'sd1;
    end else if (k_pool) begin
      l_iy0 = $signed({1'b0, l_ty, 1'b0});
      l_ix0 = $signed({6'b0, l_tx, 1'b0});
    end else begin
      l_iy0 = (k_s2 ? $signed({1'b0, l_ty, 1'b0}) : $signed({2'b0, l_ty})) - $signed({19'b0, k_pad});
      l_ix0 = (k_s2 ? $signed({6'b0, l_tx, 1'b0}) : $signed({7'b0, l_tx})) - $signed({19'b0, k_pad});
    end
    l_cg = k_pool ? l_ocg : l_icg;
  end

  conv_addr_gen u_in_addr (
    .base(k_in), .plane(k_pin), .h(k_H), .w(k_W), .channels(k_Cin),
    .c(16'(l_cg * M + 32'(l_lane))), .y(l_iy0 + 22'(l_wy)), .x(l_ix0 + 22'(l_wx)),
    .addr(la_addr), .pad(la_pad));

  always_comb begin
    dr_req_valid = 1'b0; dr_req_addr = la_addr; dr_req_zero = la_pad;
    dr_req_tag   = {1'b0, 6'(l_wy * k_WS + l_wx), IDXW'(l_lane)};
    if (lst == L_WLOAD) begin
      dr_req_valid = 1'b1; dr_req_addr = l_wptr; dr_req_zero = 1'b0;
      dr_req_tag   = {1'b1, l_pos, l_idx};
    end else if (lst == L_ILOAD) dr_req_valid = 1'b1;
  end

  assign wb_commit = (lst == L_WDONE) && dr_idle;
  assign ib_commit = (lst == L_IDONE) && dr_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst <= L_IDLE; l_ocg <= 0; l_icg <= 0; l_by <= 0; l_ty <= 0; l_tx <= 0; l_pos <= 0;
      l_idx <= 0; l_wy <= 0; l_wx <= 0; l_lane <= 0; l_wptr <= 0; l_wptr_oc <= 0; l_done <= 0;
    end else begin
      l_done <= 1'b0;
      unique case (lst)
        L_IDLE: if (run) begin
          l_ocg <= 0; l_icg <= 0; l_by <= 0; l_ty <= 0; l_tx <= 0;
          l_wptr <= k_wa; l_wptr_oc <= k_wa;
          lst <= k_pool ? L_IWAIT : L_WWAIT;
        end
        L_WWAIT: if (wb_can_write) begin l_pos <= 0; l_idx <= 0; lst <= L_WLOAD; end
        L_WLOAD: if (dr_req_ready) begin
          l_wptr <= l_wptr + 1'b1;
          if (l_idx == IDXW'(N*M)) begin
            l_idx <= 0;
            l_pos <= l_pos + 1'b1;
            if (l_pos == k_kpw - 1'b1) lst <= L_WDONE;
          end else l_idx <= l_idx + 1'b1;
        end
        L_WDONE: if (dr_idle) lst <= L_IWAIT;
        L_IWAIT: if (ib_can_write) begin l_wy <= 0; l_wx <= 0; l_lane <= 0; lst <= L_ILOAD; end
        L_ILOAD: if (dr_req_ready) begin
          if (l_lane == MW'(M-1)) begin
            l_lane <= 0;
            if (l_wx == k_WS - 1'b1) begin
              l_wx <= 0;
              if (l_wy == k_WS - 1'b1) lst <= L_IDONE;
              else l_wy <= l_wy + 1'b1;
            end else l_wx <= l_wx + 1'b1;
          end else l_lane <= l_lane + 1'b1;
        end
        L_IDONE: if (dr_idle) begin
          lst <= L_IWAIT;
          if (32'(l_tx) + 32'(k_TH) < 32'(k_Wo)) l_tx <= l_tx + 15'(k_TH);
          else begin
            l_tx <= 0;
            if (32'(l_ty) + 32'(k_TH) < 32'(k_by_end(l_by))) l_ty <= l_ty + 20'(k_TH);
            else begin
              // input-channel group finished
              lst <= k_pool ? L_IWAIT : L_WWAIT;
              if (l_icg + 1'b1 < k_nicg) begin
                l_icg <= l_icg + 1'b1; l_ty <= l_by;
              end else begin
                l_icg <= 0;
                if (32'(l_by) + 32'(k_BR) < 32'(k_Ho)) begin
                  l_by <= l_by + k_BR; l_ty <= l_by + k_BR; l_wptr <= l_wptr_oc;
                end else begin
                  l_by <= 0; l_ty <= 0; l_wptr_oc <= l_wptr;
                  if (l_ocg + 1'b1 < k_nocg) l_ocg <= l_ocg + 1'b1;
                  else begin lst <= L_IDLE; l_done <= 1'b1; end
                end
              end
            end
          end
        end
        default: lst <= L_IDLE;
      endcase
    end
  end

  function automatic logic [19:0] k_by_end(logic [19:0] by);
    return (32'(by) + 32'(k_BR) < 32'(k_Ho)) ? by + k_BR : k_Ho;
  endfunction

  // ------------------------------------------------------------------ compute datapath
  // point-wise path normaliser (one kernel position, M channels)
  logic               nd_valid, nd_ovalid;
  fp16_t              nd_in [M];
  logic signed [15:0] nd_mant [M];
  logic [4:0]         nd_exp;
  bfp_normalize #(.N(M)) u_norm_dir (
    .clk, .rst_n, .in_valid(nd_valid), .in_data(nd_in),
    .out_valid(nd_ovalid), .out_mant(nd_mant), .out_exp(nd_exp));

  // Winograd path normaliser (whole 6x6xM window as one block) and input transforms
  logic               nw_valid, nw_ovalid;
  fp16_t              nw_in [36*M];
  logic signed [15:0] nw_mant [36*M];
  logic [4:0]         nw_exp;
  bfp_normalize #(.N(36*M)) u_norm_wino (
    .clk, .rst_n, .in_valid(nw_valid), .in_data(nw_in),
    .out_valid(nw_ovalid), .out_mant(nw_mant), .out_exp(nw_exp));

  always_comb
    for (int p = 0; p < 36; p++)
      for (int m = 0; m < M; m++) nw_in[p*M + m] = win[p][m];

  logic               it_ovalid [M];
  logic signed [23:0] vt [M][6][6];
  for (genvar m = 0; m < M; m++) begin : g_itr
    logic signed [15:0] xt [6][6];
    always_comb
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) xt[i][j] = nw_mant[(i*6 + j)*M + m];
    winograd_input_transform u_it (.clk, .in_valid(nw_ovalid), .x(xt),
                                   .out_valid(it_ovalid[m]), .v(vt[m]));
  end

  // MAC array
  logic               mac_valid, mac_ovalid;
  logic signed [23:0] mac_x [M];
  logic signed [47:0] mac_y [N];
  mac_array #(.M(M), .N(N), .XW(24), .WW(16), .AW(48)) u_mac (
    .clk, .rst_n, .in_valid(mac_valid), .x(mac_x), .w(wts),
    .out_valid(mac_ovalid), .y(mac_y));

  // Winograd-domain result collection and inverse transform
  logic signed [47:0] mt [N][6][6];
  logic               ot_valid;
  logic               ot_ovalid [N];
  logic signed [63:0] yt [N][4][4];
  for (genvar n = 0; n < N; n++) begin : g_otr
    winograd_output_transform u_ot (.clk, .in_valid(ot_valid), .m(mt[n]),
                                    .out_valid(ot_ovalid[n]), .y(yt[n]));
  end

  // FP16 transform, one per output lane
  logic signed [63:0] ft_v [N];
  logic signed [11:0] ft_x;
  fpx_t               ft_y [N];
  for (genvar n = 0; n < N; n++) begin : g_ft
    fp16_transform #(.IW(64)) u_ft (.v(ft_v[n]), .x(ft_x), .y(ft_y[n]));
  end

  // post-process
  logic           pp_acc, pp_first, pp_drain, pp_pool, pp_pfirst, pp_plast, pp_ovalid;
  logic [PAW-1:0] pp_acc_addr, pp_drain_addr;
  logic [RAW-1:0] pp_res_idx;
  logic [$clog2(N)-1:0] pp_res_off;
  fp16_t          pp_pool_data [N];
  fp16_t          pp_out [N];

  post_process #(.L(N), .PSUM_DEPTH(PSUM_DEPTH), .RES_DEPTH(RES_DEPTH), .SIGMOID(SIGMOID)) u_pp (
    .clk, .rst_n, .cfg_relu(k_relu), .cfg_sigmoid(k_sig), .cfg_res_op(k_res),
    .acc_valid(pp_acc), .acc_first(pp_first), .acc_addr(pp_acc_addr), .acc_data(ft_y),
    .drain_valid(pp_drain), .drain_addr(pp_drain_addr),
    .pool_valid(pp_pool), .pool_first(pp_pfirst), .pool_last(pp_plast),
    .pool_data(pp_pool_data), .res_idx(pp_res_idx), .res_lane_off(pp_res_off),
    .out_valid(pp_ovalid), .out_data(pp_out));

  // ------------------------------------------------------------------ compute control
  typedef enum logic [3:0] {C_IDLE, C_WWAIT, C_IWAIT, C_DIR, C_DFLUSH, C_WNORM, C_WWAITN,
                            C_WMAC, C_WOT, C_WOUT, C_POOL, C_NEXT, C_DRAIN, C_ADV} cst_e;
  cst_e cst;
  logic [15:0]  c_ocg, c_icg;
  logic [19:0]  c_by, c_ty, c_dy;
  logic [14:0]  c_tx, c_dx;
  logic [2:0]   c_ky, c_kx;
  logic [5:0]   c_p;
  logic [4:0]   c_j;
  logic [2:0]   c_cnt;
  logic         c_inflight;
  logic [4:0]   w_exp;          // Winograd block exponent
  // point-wise pipeline side band: issue cycle T, MAC input T+2 (stage 1), MAC output T+3 (stage 2)
  logic [3:0]   sb_v;
  logic [2:0]   sb_ky [4], sb_kx [4];
  logic         sb_first [4];
  logic [PAW-1:0] sb_addr [4];
  logic signed [11:0] sb_x3;
  logic [5:0]   wm_p;           // Winograd MAC position at MAC output
  logic         wm_v;
  logic [PAW-1:0] c_paddr;
  logic [19:0]  c_row;
  logic [14:0]  c_col;
  // pending output-set metadata
  logic [ADDR_W-1:0] pend_addr, ob_addr [2];
  logic [NLW-1:0]    pend_lanes, ob_lanes [2];
  logic [34:0]       c_cbase;

  assign c_paddr = PAW'((c_ty - c_by) * k_Wo + 35'(c_tx));
  assign c_cbase = k_pool ? 35'(c_ocg) * M : 35'(c_ocg) * N;

  always_comb begin
    nd_valid = (cst == C_DIR);
    for (int m = 0; m < M; m++) nd_in[m] = win[6'(c_ky * k_WS + c_kx)][m];
    nw_valid = (cst == C_WNORM);
    // MAC input select
    mac_valid = sb_v[1] || (cst == C_WMAC);
    for (int m = 0; m < M; m++)
      mac_x[m] = (cst == C_WMAC) ? vt[m][c_p / 6][c_p % 6] : 24'(nd_mant[m]);
    if (cst == C_WMAC) begin
      wb_ky = 3'(c_p / 6); wb_kx = 3'(c_p % 6); wb_ksz = 3'd6;
    end else if (cst == C_WOUT) begin
      wb_ky = 0; wb_kx = 0; wb_ksz = 3'd6;
    end else begin
      wb_ky = sb_ky[1]; wb_kx = sb_kx[1]; wb_ksz = k_K;
    end
    // FP16 transform input
    c_row = c_ty + 20'(c_j >> 2);
    c_col = c_tx + 15'(c_j[1:0]);
    if (cst == C_WOUT) begin
      for (int n = 0; n < N; n++) ft_v[n] = yt[n][c_j[3:2]][c_j[1:0]];
      ft_x = 12'(w_exp) + 12'(wexp) - 12'sd29;
    end else begin
      for (int n = 0; n < N; n++) ft_v[n] = 64'(mac_y[n]);
      ft_x = sb_x3;
    end
    pp_acc      = (cst == C_WOUT) ? (c_row < k_Ho && c_col < k_Wo) : sb_v[2];
    pp_first    = (cst == C_WOUT) ? (c_icg == 0) : sb_first[2];
    pp_acc_addr = (cst == C_WOUT) ? PAW'((c_row - c_by) * k_Wo + 35'(c_col)) : sb_addr[2];
    // pooling
    pp_pool   = (cst == C_POOL);
    pp_pfirst = (c_p == 0);
    pp_plast  = (c_p == 6'd3);
    for (int n = 0; n < N; n++)
      pp_pool_data[n] = (n < M) ? win[c_p][n % M] : fp16_t'('0);
    pp_drain      = (cst == C_DRAIN) && !c_inflight && u_obuf_can_write;
    pp_drain_addr = PAW'(35'(c_dy) * k_Wo + 35'(c_dx));
    if (k_pool) begin
      pp_res_idx = RAW'((35'(c_ocg) * M / N) * k_pout + 35'(c_ty) * k_Wo + 35'(c_tx));
      pp_res_off = $clog2(N)'((32'(c_ocg) * M) % N);
    end else begin
      pp_res_idx = RAW'(35'(c_ocg) * k_pout + 35'(c_by + c_dy) * k_Wo + 35'(c_dx));
      pp_res_off = '0;
    end
  end

  assign ib_release = (cst == C_DIR && c_ky == k_K - 1'b1 && c_kx == k_K - 1'b1) ||
                      (cst == C_WNORM) || (cst == C_POOL && c_p == 6'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; c_ocg <= 0; c_icg <= 0; c_by <= 0; c_ty <= 0; c_tx <= 0; c_dy <= 0;
      c_dx <= 0; c_ky <= 0; c_kx <= 0; c_p <= 0; c_j <= 0; c_cnt <= 0; c_inflight <= 0;
      c_done <= 0; w_exp <= 0; sb_v <= 0; sb_x3 <= 0; wm_p <= 0; wm_v <= 0; ot_valid <= 0;
      wb_release <= 0; pend_addr <= 0; pend_lanes <= 0;
      for (int i = 0; i < 4; i++) begin
        sb_ky[i] <= 0; sb_kx[i] <= 0; sb_first[i] <= 0; sb_addr[i] <= 0;
      end
      for (int n = 0; n < N; n++)
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++) mt[n][i][j] <= '0;
    end else begin
      c_done <= 1'b0; ot_valid <= 1'b0; wb_release <= 1'b0;
      c_inflight <= 1'b0;
      // point-wise pipeline
      sb_v <= {sb_v[2:0], cst == C_DIR};
      sb_ky[0] <= c_ky; sb_kx[0] <= c_kx; sb_first[0] <= (c_icg == 0 && c_ky == 0 && c_kx == 0);
      sb_addr[0] <= c_paddr;
      for (int i = 1; i < 4; i++) begin
        sb_ky[i] <= sb_ky[i-1]; sb_kx[i] <= sb_kx[i-1];
        sb_first[i] <= sb_first[i-1]; sb_addr[i] <= sb_addr[i-1];
      end
      sb_x3 <= 12'(nd_exp) + 12'(wexp) - 12'sd29;
      // Winograd MAC result collection
      wm_v <= (cst == C_WMAC); wm_p <= c_p;
      if (wm_v)
        for (int n = 0; n < N; n++) mt[n][wm_p / 6][wm_p % 6] <= mac_y[n];
      if (nw_ovalid) w_exp <= nw_exp;

      unique case (cst)
        C_IDLE: if (run) begin
          c_ocg <= 0; c_icg <= 0; c_by <= 0; c_ty <= 0; c_tx <= 0;
          cst <= k_pool ? C_IWAIT : C_WWAIT;
        end
        C_WWAIT: if (wb_can_read) cst <= C_IWAIT;
        C_IWAIT: if (ib_can_read && (!k_pool || u_obuf_can_write)) begin
          c_ky <= 0; c_kx <= 0; c_p <= 0; c_j <= 0; c_cnt <= 0;
          cst <= k_pool ? C_POOL : k_wino ? C_WNORM : C_DIR;
          if (k_pool) begin
            pend_addr  <= k_out + ADDR_W'(c_cbase * k_pout) + ADDR_W'(35'(c_ty) * k_Wo) + ADDR_W'(c_tx);
            pend_lanes <= (k_res == RES_CACHE) ? '0 :
                          (32'(k_Cin) - 32'(c_cbase) >= M) ? NLW'(M) : NLW'(32'(k_Cin) - 32'(c_cbase));
          end
        end
        C_DIR: begin
          if (c_kx == k_K - 1'b1) begin
            c_kx <= 0;
            if (c_ky == k_K - 1'b1) begin cst <= C_DFLUSH; c_cnt <= 0; end
            else c_ky <= c_ky + 1'b1;
          end else c_kx <= c_kx + 1'b1;
        end
        C_DFLUSH: begin
          c_cnt <= c_cnt + 1'b1;
          if (c_cnt == 3'd4) cst <= C_NEXT;
        end
        C_WNORM:  begin cst <= C_WWAITN; c_cnt <= 0; end
        C_WWAITN: begin
          c_cnt <= c_cnt + 1'b1;
          if (c_cnt == 3'd2) begin cst <= C_WMAC; c_p <= 0; end
        end
        C_WMAC: begin
          c_p <= c_p + 1'b1;
          if (c_p == 6'd35) begin cst <= C_WOT; c_cnt <= 0; end
        end
        C_WOT: begin
          // wait for the last MAC result to be collected, then transform
          c_cnt <= c_cnt + 1'b1;
          if (c_cnt == 3'd1) ot_valid <= 1'b1;
          if (c_cnt == 3'd2) begin cst <= C_WOUT; c_j <= 0; end
        end
        C_WOUT: begin
          c_j <= c_j + 1'b1;
          if (c_j == 5'd15) cst <= C_NEXT;
        end
        C_POOL: begin
          c_p <= c_p + 1'b1;
          if (c_p == 6'd3) cst <= C_NEXT;
        end
        C_NEXT: begin
          cst <= C_IWAIT;
          if (32'(c_tx) + 32'(k_TH) < 32'(k_Wo)) c_tx <= c_tx + 15'(k_TH);
          else begin
            c_tx <= 0;
            if (32'(c_ty) + 32'(k_TH) < 32'(k_by_end(c_by))) c_ty <= c_ty + 20'(k_TH);
            else begin
              // input-channel group finished
              if (!k_pool) wb_release <= 1'b1;
              if (!k_pool && c_icg + 1'b1 < k_nicg) begin
                c_icg <= c_icg + 1'b1; c_ty <= c_by; cst <= C_WWAIT;
              end else if (!k_pool) begin
                c_icg <= 0; c_dy <= 0; c_dx <= 0; cst <= C_DRAIN;
              end else cst <= C_ADV;
            end
          end
        end
        C_DRAIN: if (pp_drain) begin
          c_inflight <= 1'b1;
          pend_addr  <= k_out + ADDR_W'(c_cbase * k_pout) + ADDR_W'(35'(c_by + c_dy) * k_Wo) +
                        ADDR_W'(c_dx);
          pend_lanes <= (k_res == RES_CACHE) ? '0 :
                        (32'(k_Cout) - 32'(c_cbase) >= N) ? NLW'(N) : NLW'(32'(k_Cout) - 32'(c_cbase));
          if (32'(c_dx) + 1 < 32'(k_Wo)) c_dx <= c_dx + 1'b1;
          else begin
            c_dx <= 0;
            if (32'(c_by) + 32'(c_dy) + 1 < 32'(k_by_end(c_by))) c_dy <= c_dy + 1'b1;
            else cst <= C_ADV;
          end
        end
        C_ADV: if (!pp_ovalid) begin
          // wait for the last drained pixel to leave the post-processor
          c_ty <= 0;
          if (!k_pool && 32'(c_by) + 32'(k_BR) < 32'(k_Ho)) begin
            c_by <= c_by + k_BR; c_ty <= c_by + k_BR; cst <= C_WWAIT;
          end else begin
            c_by <= 0;
            if (c_ocg + 1'b1 < k_nocg) begin
              c_ocg <= c_ocg + 1'b1; cst <= k_pool ? C_IWAIT : C_WWAIT;
            end else begin
              cst <= C_IDLE; c_done <= 1'b1;
            end
          end
          if (k_pool) c_ty <= 0;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ output buffer + DMA write
  fp16_t ob_data [1][N];
  logic  ob_wset, ob_rset, ob_release;

  pingpong_buffer #(.LANES(N), .DEPTH(1)) u_obuf (
    .clk, .rst_n, .wr_en(pp_ovalid), .wr_addr(1'b0), .wr_lane_mask('1), .wr_data(pp_out),
    .wr_commit(pp_ovalid), .can_write(u_obuf_can_write), .wr_set(ob_wset),
    .rd_release(ob_release), .can_read(ob_can_read), .rd_set(ob_rset), .rd_data(ob_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_addr[0] <= '0; ob_addr[1] <= '0; ob_lanes[0] <= '0; ob_lanes[1] <= '0;
    end else if (pp_ovalid) begin
      ob_addr[ob_wset]  <= pend_addr;
      ob_lanes[ob_wset] <= pend_lanes;
    end
  end

  dma_write #(.LANES(N)) u_dma_wr (
    .clk, .rst_n, .set_valid(ob_can_read), .set_data(ob_data[0]), .set_addr0(ob_addr[ob_rset]),
    .set_plane(ADDR_W'(k_pout)), .set_lanes(ob_lanes[ob_rset]), .set_release(ob_release),
    .busy(dw_busy), .mem_req(wr_mreq), .mem_ready(wr_mready));

  // the post-processor only produces a pixel when an output set is free
  assert property (@(posedge clk) disable iff (!rst_n) pp_ovalid |-> u_obuf_can_write)
    else $error("fcn_engine: output buffer overrun");
endmodule
