// tb_fcn_engine: runs a six-layer microcode program on a reduced engine (M=4 input lanes,
// N=8 output lanes, 32-entry partial-sum cache so that layers are split into row bands)
// against the memory model with random stalls, and compares every output with a
// real-valued reference:
//   L1 1x1 conv + ReLU           (point-wise path, 2 input groups, partial group)
//   L2 3x3 stride-1 conv + ReLU  (Winograd path, 2 bands, edge tiles)
//   L3 3x3 stride-2 conv, res op "cache" (point-wise path, result kept on chip only)
//   L4 2x2 max pool + residual add + ReLU (pooling, cached result added with lane offset)
//   L5 7x7 conv                  (point-wise path, 49 positions)
//   L6 reserved kernel code      (must be skipped and flag an error)
// Cycle counts: Winograd tiles must take 36 MAC-array cycles per input group, point-wise
// layers one MAC-array cycle per kernel position per pixel per input group.
// Mechanisms counted (each must occur): Winograd, point-wise, pooling, residual cache,
// residual add, multi-band layer, input ping-pong stall, memory stall, error flag.
module tb_fcn_engine;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  import tb_conv_pkg::*;
  localparam int M = 4, N = 8;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic start = 0, busy, done, error;
  logic [9:0] mc_base = 0, cfg_addr;
  logic [10:0] mc_count = 0;
  logic [255:0] cfg_data, unused_b;
  logic cfg_we = 0; logic [9:0] cfg_wa = 0; logic [255:0] cfg_wd = 0;
  mem_req_t mem_req; logic mem_ready; mem_rsp_t mem_rsp;

  fcn_engine #(.M(M), .N(N), .HAS_7X7(1'b1), .SIGMOID(1'b0), .PSUM_DEPTH(32), .RES_DEPTH(256),
               .CFG_DEPTH(1024)) dut (.*);
  config_ram #(.DEPTH(1024), .W(256)) u_cfg (.clk, .wr_en(cfg_we), .wr_addr(cfg_wa), .wr_data(cfg_wd),
    .rd_addr_a(cfg_addr), .rd_data_a(cfg_data), .rd_addr_b(10'd0), .rd_data_b(unused_b));
  ext_mem_model #(.LAT(3), .STALL_PCT(15)) mem (.clk, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));

  initial begin #2000000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // mechanism counters
  longint n_wmac = 0, n_dir = 0, n_pool = 0, n_cache = 0, n_add = 0, n_band = 0, n_ibstall = 0,
          n_memstall = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (dut.cst == 4'd7) n_wmac++;
    if (dut.cst == 4'd3) n_dir++;
    if (dut.cst == 4'd10) n_pool++;
    if (dut.pp_drain && dut.k_res == RES_CACHE) n_cache++;
    if ((dut.pp_drain || dut.pp_pool) && dut.k_res == RES_ADD) n_add++;
    if (dut.cst == 4'd13 && !dut.k_pool && 32'(dut.c_by) + 32'(dut.k_BR) < 32'(dut.k_Ho)) n_band++;
    if (dut.lst == 3'd4 && !dut.ib_can_write) n_ibstall++;
    if (mem_req.valid && !mem_ready) n_memstall++;
  end

  localparam longint A_ADR = 'h10000, B_ADR = 'h20000, C_ADR = 'h30000, D_ADR = 'h40000,
                     E_ADR = 'h50000, W_ADR = 'h100000;

  function automatic microcode_t mcode(layer_type_e lt, bit relu, int cin, int cout, int h, int w,
                                       kernel_e k, bit s2, res_op_e r, longint ia, longint oa,
                                       longint wa);
    microcode_t c;
    c = '0;
    c.layer_type = lt; c.relu = relu; c.in_ch = 16'(cin); c.out_ch = 16'(cout);
    c.height = 20'(h); c.width = 15'(w); c.kernel = k; c.stride2 = s2; c.res_op = r;
    c.in_addr = ADDR_W'(ia); c.out_addr = ADDR_W'(oa); c.weight_addr = ADDR_W'(wa);
    return c;
  endfunction

  function automatic void read_map(longint base, int n, output real x []);
    x = new[n];
    foreach (x[i]) x[i] = fp16_real(fp16_t'(mem.read(base + i)));
  endfunction

  function automatic real vmax(real x []);
    real r;
    r = 0.0;
    foreach (x[i]) if (rabs(x[i]) > r) r = rabs(x[i]);
    return r;
  endfunction

  task automatic compare(string nm, longint base, real y [], real mag [], real xmax, bit relu);
    int bad;
    bad = 0;
    foreach (y[i]) begin
      real e, g, tol;
      e = (relu && y[i] < 0) ? 0.0 : y[i];
      g = fp16_real(fp16_t'(mem.read(base + i)));
      tol = mag[i] * xmax * p2(-11) + rabs(e) * p2(-9) + p2(-20);
      checks++;
      if (rabs(g - e) > tol) begin
        failures++; bad++;
        if (bad < 5) $display("%s[%0d]: got %g expected %g (tol %g)", nm, i, g, e, tol);
      end
    end
  endtask

  task automatic put_words(longint base, logic [15:0] words [$]);
    foreach (words[i]) mem.write(base + i, words[i]);
  endtask

  initial begin
    microcode_t prog [6];
    real k1 [], k2 [], k3 [], k5 [];
    logic [15:0] words [$];
    real xa [], xb [], xc [], y [], mag [], y3 [], mag3 [], pb [];
    longint w1, w2, w3, w5;
    // input map A: 6 channels, 6x8
    for (int i = 0; i < 6 * 48; i++) mem.write(A_ADR + i, (i % 11 == 0) ? 16'h0 : rand_fp16(12, 15));
    // weights
    w1 = W_ADR;
    make_weights(8, 6, 1, 1'b0, -5, M, N, 15, k1, words); put_words(w1, words);
    w2 = w1 + words.size();
    make_weights(6, 8, 3, 1'b1, -12, M, N, 3, k2, words); put_words(w2, words);
    w3 = w2 + words.size();
    make_weights(8, 6, 3, 1'b0, -6, M, N, 15, k3, words); put_words(w3, words);
    w5 = w3 + words.size();
    make_weights(5, 3, 7, 1'b0, -8, M, N, 15, k5, words); put_words(w5, words);
    prog[0] = mcode(LT_CONV, 1, 6, 8, 6, 8, K_1X1, 0, RES_NONE,  A_ADR, B_ADR, w1);
    prog[1] = mcode(LT_CONV, 1, 8, 6, 6, 8, K_3X3, 0, RES_NONE,  B_ADR, C_ADR, w2);
    prog[2] = mcode(LT_CONV, 0, 6, 8, 6, 8, K_3X3, 1, RES_CACHE, C_ADR, 0,     w3);
    prog[3] = mcode(LT_POOL, 1, 8, 8, 6, 8, K_1X1, 1, RES_ADD,   B_ADR, D_ADR, 0);
    prog[4] = mcode(LT_CONV, 0, 3, 5, 6, 8, K_7X7, 0, RES_NONE,  A_ADR, E_ADR, w5);
    prog[5] = mcode(LT_CONV, 0, 3, 5, 6, 8, K_RSV, 0, RES_NONE,  A_ADR, E_ADR + 'h8000, w5);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      cfg_we = 1; cfg_wa = 10'(100 + i); cfg_wd = prog[i]; @(negedge clk);
    end
    cfg_we = 0;
    mc_base = 100; mc_count = 6; start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("engine finished in %0d cycles, %0d memory reads, %0d writes", cycles, mem.n_reads, mem.n_writes);
    // L1
    read_map(A_ADR, 6 * 48, xa);
    conv_ref(xa, 6, 6, 8, k1, 8, 1, 0, y, mag); compare("L1", B_ADR, y, mag, vmax(xa), 1);
    // L2 (Winograd)
    read_map(B_ADR, 8 * 48, xb);
    conv_ref(xb, 8, 6, 8, k2, 6, 3, 0, y, mag); compare("L2", C_ADR, y, mag, vmax(xb), 1);
    // L3 + L4: cached stride-2 conv added to the pooled map
    read_map(C_ADR, 6 * 48, xc);
    conv_ref(xc, 6, 6, 8, k3, 8, 3, 1, y3, mag3);
    pool_ref(xb, 8, 6, 8, pb);
    y = new[pb.size()]; mag = new[pb.size()];
    foreach (pb[i]) begin y[i] = pb[i] + y3[i]; mag[i] = mag3[i] * vmax(xc) / vmax(xb) + p2(-3); end
    compare("L4", D_ADR, y, mag, vmax(xb), 1);
    // L5 (7x7 on the first 3 channels of A)
    conv_ref(xa, 3, 6, 8, k5, 5, 7, 0, y, mag); compare("L5", E_ADR, y, mag, vmax(xa), 0);
    // L3 result never written, L6 skipped with an error
    checks++; if (mem.read(0) != 0 || mem.read(E_ADR + 'h8000) != 0) failures++;
    checks++; if (!error) begin failures++; $display("error flag not set"); end
    // cycle counts
    checks++; if (n_wmac != 4 * 2 * 36) begin failures++; $display("Winograd MAC cycles %0d", n_wmac); end
    checks++; if (n_dir != 48 * 2 + 12 * 2 * 9 + 48 * 49) begin failures++; $display("direct MAC cycles %0d", n_dir); end
    checks++; if (n_pool != 12 * 2 * 4) begin failures++; $display("pool cycles %0d", n_pool); end
    // mechanisms
    $display("mech: wino=%0d dir=%0d pool=%0d cache=%0d add=%0d band=%0d ibstall=%0d memstall=%0d",
             n_wmac, n_dir, n_pool, n_cache, n_add, n_band, n_ibstall, n_memstall);
    checks++; if (n_cache == 0) failures++;
    checks++; if (n_add == 0) failures++;
    checks++; if (n_band == 0) failures++;
    checks++; if (n_ibstall == 0) failures++;
    checks++; if (n_memstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
