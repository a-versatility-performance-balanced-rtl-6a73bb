// tb_pcie_regs: writes every configuration register with random values and reads it back,
// checks the decoded outputs (microcode base/count, upsample source/destination and
// sizes), the one-cycle start and interrupt-clear pulses and the status word.
module tb_pcie_regs;
  import stdd_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic host_wr_en = 0; logic [3:0] host_addr = 0; logic [31:0] host_wdata = 0, host_rdata;
  logic [2:0] start_req; logic irq_clear, irq_en;
  logic [15:0] fe_base, fe_count, ff_base, ff_count, up_c;
  logic [ADDR_W-1:0] up_src, up_dst; logic [19:0] up_h; logic [14:0] up_w;
  logic [2:0] busy = 3'b101, round_done = 3'b011, err = 3'b010; logic irq = 1;
  pcie_regs dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); host_wr_en = 1; host_addr = 4'(a); host_wdata = d;
    @(negedge clk); host_wr_en = 0;
  endtask
  initial begin
    logic [31:0] v [16];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int a = 3; a < 16; a++) begin v[a] = $urandom; wr(a, v[a]); end
      for (int a = 3; a < 16; a++) begin
        host_addr = 4'(a); #1; checks++; if (host_rdata != v[a]) failures++;
      end
      checks++;
      if (irq_en != v[3][0] || fe_base != v[4][15:0] || fe_count != v[4][31:16] ||
          ff_base != v[5][15:0] || ff_count != v[5][31:16] || up_src != {v[7][1:0], v[6]} ||
          up_dst != {v[9][1:0], v[8]} || up_c != v[10][15:0] || up_h != v[11][19:0] ||
          up_w != v[12][14:0]) failures++;
    end
    host_addr = 1; #1; checks++; if (host_rdata != {13'd0, err, 7'd0, irq, 5'd0, busy}) failures++;
    host_addr = 2; #1; checks++; if (host_rdata != 32'd3) failures++;
    // start pulse
    @(negedge clk); host_wr_en = 1; host_addr = 0; host_wdata = 32'h5;
    @(negedge clk); host_wr_en = 0; checks++; if (start_req != 3'b101) failures++;
    @(negedge clk); checks++; if (start_req != 0) failures++;
    // interrupt clear pulse
    @(negedge clk); host_wr_en = 1; host_addr = 2; host_wdata = 0;
    @(negedge clk); host_wr_en = 0; checks++; if (!irq_clear) failures++;
    @(negedge clk); checks++; if (irq_clear) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
