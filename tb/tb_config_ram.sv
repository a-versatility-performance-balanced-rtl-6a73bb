// tb_config_ram: writes random 256-bit microcodes, reads them back through both ports
// and checks the one-cycle read latency.
module tb_config_ram;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0; logic [5:0] wa = 0, ra = 0, rb = 0;
  logic [255:0] wd = '0, da, db;
  logic [255:0] ref_mem [64];
  config_ram #(.DEPTH(64)) dut (.clk, .wr_en, .wr_addr(wa), .wr_data(wd),
    .rd_addr_a(ra), .rd_data_a(da), .rd_addr_b(rb), .rd_data_b(db));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); wr_en = 1; wa = 6'(i);
      wd = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      ref_mem[i] = wd;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 64; i++) begin
      ra = 6'(i); rb = 6'(63 - i);
      @(posedge clk); #1;
      checks += 2;
      if (da !== ref_mem[i]) begin failures++; $display("port a mismatch at %0d", i); end
      if (db !== ref_mem[63-i]) begin failures++; $display("port b mismatch at %0d", 63-i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
