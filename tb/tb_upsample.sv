// tb_upsample: nearest-neighbour 2x upsampling of a 3-channel 5x7 map stored in the
// memory model (random stalls); every one of the 3x10x14 output words is compared with
// its source pixel, the number of memory reads and writes is checked, and a second run
// with a 1-pixel-wide map covers the edge case.
module tb_upsample;
  import stdd_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic start = 0, busy, done;
  logic [ADDR_W-1:0] src = 0, dst = 0;
  logic [15:0] channels = 0; logic [19:0] height = 0; logic [14:0] width = 0;
  mem_req_t mem_req; logic mem_ready; mem_rsp_t mem_rsp;
  upsample #(.WMAX(64)) dut (.*);
  ext_mem_model #(.LAT(3), .STALL_PCT(20)) mem (.clk, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic run(input int c_n, input int h, input int w, input int s, input int d);
    int r0, w0;
    r0 = mem.n_reads; w0 = mem.n_writes;
    for (int c = 0; c < c_n; c++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
      mem.write(longint'(s + (c * h + y) * w + x), 16'(c * 4096 + y * 64 + x + 1));
    @(negedge clk); src = ADDR_W'(s); dst = ADDR_W'(d); channels = 16'(c_n); height = 20'(h); width = 15'(w);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int c = 0; c < c_n; c++) for (int y = 0; y < 2 * h; y++) for (int x = 0; x < 2 * w; x++) begin
      checks++;
      if (mem.read(longint'(d + (c * 2 * h + y) * 2 * w + x)) != 16'(c * 4096 + (y / 2) * 64 + x / 2 + 1)) failures++;
    end
    checks++; if (mem.n_reads - r0 != c_n * h * w) begin failures++; $display("reads %0d", mem.n_reads - r0); end
    checks++; if (mem.n_writes - w0 != 4 * c_n * h * w) failures++;
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(3, 5, 7, 100, 10000);
    run(2, 3, 1, 500, 20000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
