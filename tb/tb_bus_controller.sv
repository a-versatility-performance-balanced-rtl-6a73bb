// tb_bus_controller: a reader and a writer request at random; checks that the granted
// request reaches memory, that grants alternate under contention (round robin), that read
// data comes back to the reader, and that every request is eventually served.
module tb_bus_controller;
  import stdd_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, issued = 0, served = 0, contended = 0, nrsp = 0;
  mem_req_t rd_req = '0, wr_req = '0, mem_req;
  logic rd_ready, wr_ready, mem_ready;
  mem_rsp_t rd_rsp, mem_rsp;
  int last_gnt = -1;
  bus_controller dut (.*);
  ext_mem_model #(.LAT(2), .STALL_PCT(25)) mem (.clk, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 64; a++) mem.write(longint'(a), 16'h5a5a);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      logic rd_fire, wr_fire;
      if (i < 550) begin
        if (!rd_req.valid && $urandom % 3 != 0) begin rd_req = '{valid: 1, we: 0, addr: ADDR_W'($urandom % 64), wdata: 0}; issued++; end
        if (!wr_req.valid && $urandom % 3 != 0) begin wr_req = '{valid: 1, we: 1, addr: ADDR_W'(100 + $urandom % 64), wdata: 16'(i)}; issued++; end
      end
      #1;
      rd_fire = rd_req.valid && rd_ready;
      wr_fire = wr_req.valid && wr_ready;
      if (rd_req.valid || wr_req.valid) begin
        checks++;
        if (mem_req != (wr_req.valid && (!rd_req.valid || dut.gnt_wr) ? wr_req : rd_req)) failures++;
        if (rd_fire && wr_fire) failures++;
      end
      if (rd_req.valid && wr_req.valid && (rd_fire || wr_fire)) begin
        contended++;
        checks++;
        if (last_gnt == int'(wr_fire)) failures++;
      end
      if (rd_fire || wr_fire) last_gnt = int'(wr_fire);
      if (rd_rsp.valid) begin nrsp++; checks++; if (rd_rsp.rdata != 16'h5a5a) failures++; end
      @(negedge clk);
      if (rd_fire) begin rd_req.valid = 0; served++; end
      if (wr_fire) begin wr_req.valid = 0; served++; end
    end
    repeat (5) @(negedge clk);
    checks++; if (contended < 20) begin failures++; $display("contended %0d", contended); end
    checks++; if (served != issued) begin failures++; $display("served %0d issued %0d", served, issued); end
    checks++; if (mem.n_reads + mem.n_writes != served) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
