// tb_pingpong_buffer: a producer fills sets with random data (one lane per write, as a DMA
// does) while a consumer with random delays checks and frees them; checks set alternation,
// the full/empty flags, that the producer is held off when both sets are full, and that a
// set is never overwritten before it is released.
module tb_pingpong_buffer;
  import stdd_pkg::*;
  localparam int LANES = 4, DEPTH = 5;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, blocked = 0;
  logic wr_en = 0, wr_commit = 0, rd_release = 0, can_write, can_read, wr_set, rd_set;
  logic [2:0] wr_addr = 0;
  logic [LANES-1:0] wr_lane_mask = 0;
  fp16_t wr_data [LANES];
  fp16_t rd_data [DEPTH][LANES];
  fp16_t sets [$];
  pingpong_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // producer
  initial begin
    for (int l = 0; l < LANES; l++) wr_data[l] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      fp16_t img [DEPTH][LANES];
      while (!can_write) begin blocked++; @(negedge clk); end
      for (int a = 0; a < DEPTH; a++)
        for (int l = 0; l < LANES; l++) begin
          img[a][l] = fp16_t'($urandom);
          wr_en = 1; wr_addr = 3'(a); wr_lane_mask = '0; wr_lane_mask[l] = 1'b1;
          for (int k = 0; k < LANES; k++) wr_data[k] = (k == l) ? img[a][l] : fp16_t'($urandom);
          @(negedge clk);
        end
      wr_en = 0; wr_commit = 1;
      for (int a = 0; a < DEPTH; a++) for (int l = 0; l < LANES; l++) sets.push_back(img[a][l]);
      @(negedge clk); wr_commit = 0;
    end
  end
  // consumer
  initial begin
    repeat (3) @(negedge clk);
    for (int s = 0; s < 40; s++) begin
      fp16_t img [DEPTH][LANES];
      while (!can_read) @(negedge clk);
      checks++; if (rd_set !== 1'(s % 2)) failures++;
      repeat ($urandom % 40) @(negedge clk);
      for (int a = 0; a < DEPTH; a++) for (int l = 0; l < LANES; l++) img[a][l] = sets.pop_front();
      for (int a = 0; a < DEPTH; a++) for (int l = 0; l < LANES; l++) begin
        checks++; if (rd_data[a][l] !== img[a][l]) failures++;
      end
      rd_release = 1; @(negedge clk); rd_release = 0;
    end
    checks++; if (blocked == 0) begin failures++; $display("producer never blocked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
