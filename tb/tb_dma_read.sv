// tb_dma_read: random mix of memory and zero (padding) requests against the memory model
// with random stalls and 3-cycle latency; every response must come back in request order
// with its tag and the right data (0 for zero requests), and zero requests must not reach
// memory.
module tb_dma_read;
  import stdd_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, req_zero = 0, rsp_valid, idle;
  logic [ADDR_W-1:0] req_addr = 0;
  logic [18:0] req_tag = 0, rsp_tag;
  logic [15:0] rsp_data;
  mem_req_t mem_req; logic mem_ready; mem_rsp_t mem_rsp;
  int exp_tag [$]; int exp_data [$]; int nzero = 0;
  dma_read #(.TW(19), .DEPTH(8)) dut (.*);
  ext_mem_model #(.LAT(3), .STALL_PCT(30)) mem (.clk, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(negedge clk) if (rsp_valid) begin
    checks++;
    if (exp_tag.size() == 0) failures++;
    else begin
      int t, d;
      t = exp_tag.pop_front(); d = exp_data.pop_front();
      if (int'(rsp_tag) != t || int'(rsp_data) != d) begin failures++; $display("tag %0d/%0d data %0d/%0d", rsp_tag, t, rsp_data, d); end
    end
  end
  initial begin
    for (int a = 0; a < 256; a++) mem.write(longint'(a + 1000), 16'(a * 7 + 3));
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = $urandom % 256;
      req_valid = 1; req_addr = ADDR_W'(a + 1000); req_tag = 19'(i); req_zero = ($urandom % 4 == 0);
      if (req_zero) nzero++;
      exp_tag.push_back(i); exp_data.push_back(req_zero ? 0 : a * 7 + 3);
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      if ($urandom % 5 == 0) begin req_valid = 0; @(negedge clk); end
    end
    req_valid = 0;
    repeat (40) @(negedge clk);
    checks++; if (exp_tag.size() != 0 || !idle) failures++;
    checks++; if (mem.n_reads != 500 - nzero) begin failures++; $display("reads %0d", mem.n_reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
