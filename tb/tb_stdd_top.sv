// tb_stdd_top: end-to-end test of the whole system at its default sizes (32x64 extraction
// array, 16x32 fusion array). Through the register port it downloads microcode, programs
// the three modules and starts them together in one round:
//   extraction: 1x1 conv + ReLU, Winograd 3x3 + ReLU, 3x3 stride-2 conv into the residual
//               cache, 2x2 max pool + residual add + ReLU
//   fusion:     1x1 conv with sigmoid output (the fusion module's sigmoid layer)
//   upsample:   2x nearest-neighbour enlargement of a 2-channel map
// Each module has its own memory model (random stalls). Outputs are compared with
// real-valued references; the interrupt, the round status and the microcode-error flag are
// checked; then a second round runs only the upsampler.
// Mechanisms counted (a failure is counted for any that never occurs): Winograd MAC cycles,
// point-wise MAC cycles, pooling, residual cache, residual add, sigmoid layer, upsample
// writes, modules running concurrently, memory stalls, input ping-pong stalls, interrupt.
module tb_stdd_top;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  import tb_conv_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic host_wr_en = 0; logic [3:0] host_addr = 0; logic [31:0] host_wdata = 0, host_rdata;
  logic cfg_wr_en = 0; logic [9:0] cfg_wr_addr = 0; logic [255:0] cfg_wr_data = 0;
  logic irq;
  mem_req_t mem_req [3]; logic mem_ready [3]; mem_rsp_t mem_rsp [3];

  stdd_top dut (.*);
  ext_mem_model #(.LAT(4), .STALL_PCT(10)) mem_fe (.clk, .req(mem_req[0]), .ready(mem_ready[0]), .rsp(mem_rsp[0]));
  ext_mem_model #(.LAT(4), .STALL_PCT(10)) mem_ff (.clk, .req(mem_req[1]), .ready(mem_ready[1]), .rsp(mem_rsp[1]));
  ext_mem_model #(.LAT(4), .STALL_PCT(10)) mem_up (.clk, .req(mem_req[2]), .ready(mem_ready[2]), .rsp(mem_rsp[2]));

  initial begin #2000000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  longint n_wmac = 0, n_dir = 0, n_pool = 0, n_cache = 0, n_add = 0, n_sig = 0, n_upw = 0,
          n_conc = 0, n_memstall = 0, n_ibstall = 0, n_irq = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_fe.cst == 4'd7) n_wmac++;
    if (dut.u_fe.cst == 4'd3 || dut.u_ff.cst == 4'd3) n_dir++;
    if (dut.u_fe.cst == 4'd10) n_pool++;
    if (dut.u_fe.pp_drain && dut.u_fe.k_res == RES_CACHE) n_cache++;
    if ((dut.u_fe.pp_drain || dut.u_fe.pp_pool) && dut.u_fe.k_res == RES_ADD) n_add++;
    if (dut.u_ff.pp_drain && dut.u_ff.k_sig) n_sig++;
    if (mem_req[2].valid && mem_req[2].we && mem_ready[2]) n_upw++;
    if (int'(dut.u_fe.busy) + int'(dut.u_ff.busy) + int'(dut.u_up.busy) > 1) n_conc++;
    for (int i = 0; i < 3; i++) if (mem_req[i].valid && !mem_ready[i]) n_memstall++;
    if ((dut.u_fe.lst == 3'd4 && !dut.u_fe.ib_can_write) || (dut.u_fe.cst == 4'd2 && !dut.u_fe.ib_can_read)) n_ibstall++;
    if (irq) n_irq++;
  end

  task automatic reg_wr(input int a, input logic [31:0] d);
    @(negedge clk); host_wr_en = 1; host_addr = 4'(a); host_wdata = d;
    @(negedge clk); host_wr_en = 0;
  endtask

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

  function automatic real vmax(real x []);
    real r;
    r = 0.0;
    foreach (x[i]) if (rabs(x[i]) > r) r = rabs(x[i]);
    return r;
  endfunction

  localparam int H = 4, W = 8;
  localparam longint A_ADR = 'h10000, B_ADR = 'h20000, C_ADR = 'h30000, D_ADR = 'h40000,
                     W_ADR = 'h100000, F_IN = 'h1000, F_OUT = 'h2000, U_IN = 'h5000, U_OUT = 'h6000;

  real xa [], xb [], xc [], xf [], y [], mag [], y3 [], mag3 [], pb [];
  real k1 [], k2 [], k3 [], kf [];

  task automatic read_fe(longint base, int n, output real x []);
    x = new[n];
    foreach (x[i]) x[i] = fp16_real(fp16_t'(mem_fe.read(base + i)));
  endtask

  task automatic cmp(string nm, int which, longint base, real yv [], real mg [], real xmax, int act);
    int bad;
    bad = 0;
    foreach (yv[i]) begin
      real e, g, tol;
      e = yv[i];
      if (act == 1 && e < 0) e = 0.0;
      if (act == 2) e = 1.0 / (1.0 + $exp(-e));
      g = fp16_real(fp16_t'(which == 0 ? mem_fe.read(base + i) : mem_ff.read(base + i)));
      tol = (act == 2) ? 0.03 : mg[i] * xmax * p2(-11) + rabs(e) * p2(-9) + p2(-20);
      checks++;
      if (rabs(g - e) > tol) begin
        failures++; bad++;
        if (bad < 5) $display("%s[%0d]: got %g expected %g (tol %g)", nm, i, g, e, tol);
      end
    end
  endtask

  task automatic check_up(int c_n, int h, int w);
    for (int c = 0; c < c_n; c++) for (int yy = 0; yy < 2 * h; yy++) for (int xx = 0; xx < 2 * w; xx++) begin
      checks++;
      if (mem_up.read(U_OUT + (c * 2 * h + yy) * 2 * w + xx) != mem_up.read(U_IN + (c * h + yy / 2) * w + xx / 2))
        begin failures++; $display("up1 %0d %0d %0d", c, yy, xx); end
    end
  endtask

  initial begin
    logic [15:0] words [$];
    microcode_t prog [6];
    longint w1, w2, w3;
    // data
    for (int i = 0; i < 3 * H * W; i++) mem_fe.write(A_ADR + i, rand_fp16(12, 15));
    for (int i = 0; i < 4 * H * W; i++) mem_ff.write(F_IN + i, rand_fp16(12, 15));
    for (int i = 0; i < 2 * 3 * 5; i++) mem_up.write(U_IN + i, 16'(i * 37 + 5));
    w1 = W_ADR;
    make_weights(4, 3, 1, 1'b0, -5, 32, 64, 15, k1, words); foreach (words[i]) mem_fe.write(w1 + i, words[i]);
    w2 = w1 + words.size();
    make_weights(4, 4, 3, 1'b1, -12, 32, 64, 3, k2, words); foreach (words[i]) mem_fe.write(w2 + i, words[i]);
    w3 = w2 + words.size();
    make_weights(4, 4, 3, 1'b0, -6, 32, 64, 15, k3, words); foreach (words[i]) mem_fe.write(w3 + i, words[i]);
    make_weights(2, 4, 1, 1'b0, -4, 16, 32, 15, kf, words); foreach (words[i]) mem_ff.write(W_ADR + i, words[i]);
    prog[0] = mcode(LT_CONV, 1, 3, 4, H, W, K_1X1, 0, RES_NONE,  A_ADR, B_ADR, w1);
    prog[1] = mcode(LT_CONV, 1, 4, 4, H, W, K_3X3, 0, RES_NONE,  B_ADR, C_ADR, w2);
    prog[2] = mcode(LT_CONV, 0, 4, 4, H, W, K_3X3, 1, RES_CACHE, C_ADR, 0,     w3);
    prog[3] = mcode(LT_POOL, 1, 4, 4, H, W, K_1X1, 1, RES_ADD,   B_ADR, D_ADR, 0);
    prog[4] = mcode(LT_POOL, 0, 4, 2, H, W, K_1X1, 0, RES_NONE,  F_IN,  F_OUT, W_ADR);  // fusion: sigmoid layer
    prog[5] = mcode(LT_CONV, 0, 4, 2, H, W, K_7X7, 0, RES_NONE,  F_IN,  F_OUT + 'h100, W_ADR); // fusion: no 7x7 -> error
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); cfg_wr_en = 1; cfg_wr_addr = 10'(i); cfg_wr_data = prog[i];
    end
    @(negedge clk); cfg_wr_en = 0;
    reg_wr(3, 1);                          // interrupt enable
    reg_wr(4, {16'd4, 16'd0});             // extraction: 4 microcodes from 0
    reg_wr(5, {16'd2, 16'd4});             // fusion: 2 microcodes from 4
    reg_wr(6, 32'(U_IN)); reg_wr(7, 0); reg_wr(8, 32'(U_OUT)); reg_wr(9, 0);
    reg_wr(10, 2); reg_wr(11, 3); reg_wr(12, 5);
    reg_wr(0, 3'b111);                     // start all three
    while (!irq) @(negedge clk);
    $display("round 1 finished after %0d cycles", cycles);
    host_addr = 2; #1; checks++; if (host_rdata[2:0] != 3'b111) begin failures++; $display("round %b", host_rdata[2:0]); end
    host_addr = 1; #1; checks++; if (host_rdata[2:0] != 0 || host_rdata[8] != 1 || host_rdata[18:16] != 3'b010) begin
      failures++; $display("status %h", host_rdata); end
    reg_wr(2, 0);
    repeat (2) @(negedge clk);
    checks++; if (irq) begin failures++; $display("interrupt not cleared"); end
    // references
    read_fe(A_ADR, 3 * H * W, xa);
    conv_ref(xa, 3, H, W, k1, 4, 1, 0, y, mag); cmp("L1", 0, B_ADR, y, mag, vmax(xa), 1);
    read_fe(B_ADR, 4 * H * W, xb);
    conv_ref(xb, 4, H, W, k2, 4, 3, 0, y, mag); cmp("L2", 0, C_ADR, y, mag, vmax(xb), 1);
    read_fe(C_ADR, 4 * H * W, xc);
    conv_ref(xc, 4, H, W, k3, 4, 3, 1, y3, mag3);
    pool_ref(xb, 4, H, W, pb);
    y = new[pb.size()]; mag = new[pb.size()];
    foreach (pb[i]) begin y[i] = pb[i] + y3[i]; mag[i] = mag3[i] * vmax(xc) / vmax(xb) + p2(-3); end
    cmp("L4", 0, D_ADR, y, mag, vmax(xb), 1);
    xf = new[4 * H * W];
    foreach (xf[i]) xf[i] = fp16_real(fp16_t'(mem_ff.read(F_IN + i)));
    conv_ref(xf, 4, H, W, kf, 2, 1, 0, y, mag); cmp("FF", 1, F_OUT, y, mag, vmax(xf), 2);
    checks++; if (mem_ff.read(F_OUT + 'h100) != 0) begin failures++; $display("skipped layer wrote"); end
    check_up(2, 3, 5);
    // second round: upsampler only, new size
    reg_wr(10, 1); reg_wr(11, 2); reg_wr(12, 4); reg_wr(8, 32'(U_OUT + 'h1000));
    reg_wr(0, 3'b100);
    while (!irq) @(negedge clk);
    host_addr = 2; #1; checks++; if (host_rdata[2:0] != 3'b100) begin failures++; $display("round 2 %b", host_rdata[2:0]); end
    for (int yy = 0; yy < 4; yy++) for (int xx = 0; xx < 8; xx++) begin
      checks++;
      if (mem_up.read(U_OUT + 'h1000 + yy * 8 + xx) != mem_up.read(U_IN + (yy / 2) * 4 + xx / 2)) begin failures++; $display("up2 %0d %0d", yy, xx); end
    end
    reg_wr(2, 0);
    $display("mech: wino=%0d dir=%0d pool=%0d cache=%0d add=%0d sig=%0d upw=%0d conc=%0d memstall=%0d ibstall=%0d irq=%0d",
             n_wmac, n_dir, n_pool, n_cache, n_add, n_sig, n_upw, n_conc, n_memstall, n_ibstall, n_irq);
    checks++; if (n_wmac == 0) failures++;
    checks++; if (n_dir == 0) failures++;
    checks++; if (n_pool == 0) failures++;
    checks++; if (n_cache == 0) failures++;
    checks++; if (n_add == 0) failures++;
    checks++; if (n_sig == 0) failures++;
    checks++; if (n_upw == 0) failures++;
    checks++; if (n_conc == 0) failures++;
    checks++; if (n_memstall == 0) failures++;
    checks++; if (n_ibstall == 0) failures++;
    checks++; if (n_irq == 0) failures++;
    // Winograd: 2 tiles x 1 input group x 36 cycles
    checks++; if (n_wmac != 2 * 36) begin failures++; $display("Winograd cycles %0d", n_wmac); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
