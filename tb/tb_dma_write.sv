// tb_dma_write: presents output sets (pixels of up to 8 lanes) with random lane counts,
// start addresses and plane strides; memory (with random stalls) must receive exactly
// lanes words, lane l at addr0 + l*plane, and each set must be released once.
module tb_dma_write;
  import stdd_pkg::*;
  localparam int LANES = 8;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, releases = 0;
  logic set_valid = 0, set_release, busy;
  fp16_t set_data [LANES];
  logic [ADDR_W-1:0] set_addr0 = 0, set_plane = 0;
  logic [3:0] set_lanes = 0;
  mem_req_t mem_req; logic mem_ready; mem_rsp_t mem_rsp;
  dma_write #(.LANES(LANES)) dut (.*);
  ext_mem_model #(.LAT(2), .STALL_PCT(30)) mem (.clk, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (set_release) releases++;
  initial begin
    int total = 0;
    for (int l = 0; l < LANES; l++) set_data[l] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 50; s++) begin
      int r0;
      set_addr0 = ADDR_W'(s * 1000); set_plane = ADDR_W'(1 + $urandom % 50);
      set_lanes = 4'($urandom % (LANES + 1)); total += set_lanes;
      for (int l = 0; l < LANES; l++) set_data[l] = fp16_t'(16'(s * 16 + l + 1));
      set_valid = 1; r0 = releases;
      while (releases == r0) @(negedge clk);
      set_valid = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (l < set_lanes) begin
          if (mem.read(longint'(set_addr0 + l * set_plane)) != 16'(s * 16 + l + 1)) failures++;
        end else if (mem.read(longint'(set_addr0 + l * set_plane)) != 0) failures++;
      end
      @(negedge clk);
    end
    checks++; if (mem.n_writes != total) failures++;
    checks++; if (releases != 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
