// tb_post_process: on a 4-lane post-processor (sigmoid variant) checks
//  * partial-sum accumulation: random FP16-exact contributions accumulated at several
//    addresses, drained and compared with the real sum (tolerance of the widened format);
//  * res op "cache" then "add": a drained result is cached and later added to another;
//  * ReLU and sigmoid on the drained value;
//  * 2x2 max pooling with residual add, including the lane offset into the cache.
module tb_post_process;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 4;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic cfg_relu = 0, cfg_sigmoid = 0;
  res_op_e cfg_res_op = RES_NONE;
  logic acc_valid = 0, acc_first = 0, drain_valid = 0, pool_valid = 0, pool_first = 0, pool_last = 0;
  logic [3:0] acc_addr = 0, drain_addr = 0;
  logic [5:0] res_idx = 0;
  logic [1:0] res_lane_off = 0;
  fpx_t acc_data [L];
  fp16_t pool_data [L];
  logic out_valid;
  fp16_t out_data [L];
  real sums [16][L];
  post_process #(.L(L), .PSUM_DEPTH(16), .RES_DEPTH(64), .SIGMOID(1'b1)) dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic drain(input int a, input int ridx, output real got [L]);
    @(negedge clk); drain_valid = 1; drain_addr = 4'(a); res_idx = 6'(ridx);
    @(negedge clk); drain_valid = 0;
    checks++; if (!out_valid) failures++;
    for (int l = 0; l < L; l++) got[l] = fp16_real(out_data[l]);
  endtask

  initial begin
    real got [L];
    for (int l = 0; l < L; l++) begin acc_data[l] = '0; pool_data[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // accumulation at 4 addresses, 6 contributions each, interleaved
    for (int k = 0; k < 6; k++)
      for (int a = 0; a < 4; a++) begin
        @(negedge clk); acc_valid = 1; acc_first = (k == 0); acc_addr = 4'(a);
        for (int l = 0; l < L; l++) begin
          fp16_t f = rand_fp16(10, 17);
          acc_data[l] = fp16_to_fpx(f);
          sums[a][l] = (k == 0) ? fp16_real(f) : sums[a][l] + fp16_real(f);
        end
      end
    @(negedge clk); acc_valid = 0;
    for (int a = 0; a < 4; a++) begin
      drain(a, 0, got);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (!close(got[l], sums[a][l], p2(-9), 1.0)) begin failures++; $display("sum %0d.%0d got %g exp %g", a, l, got[l], sums[a][l]); end
      end
    end
    // cache address 0's result at res index 5, then add it to address 1's result
    cfg_res_op = RES_CACHE; drain(0, 5, got);
    cfg_res_op = RES_ADD; drain(1, 5, got);
    for (int l = 0; l < L; l++) begin
      checks++; if (!close(got[l], sums[0][l] + sums[1][l], p2(-8), 1.0)) failures++;
    end
    // ReLU
    cfg_res_op = RES_NONE; cfg_relu = 1;
    for (int a = 0; a < 4; a++) begin
      drain(a, 0, got);
      for (int l = 0; l < L; l++) begin
        checks++; if (!close(got[l], sums[a][l] > 0 ? sums[a][l] : 0.0, p2(-9), 1.0)) failures++;
      end
    end
    // sigmoid (PLAN approximation, max error ~0.02)
    cfg_relu = 0; cfg_sigmoid = 1; drain(3, 0, got);
    for (int l = 0; l < L; l++) begin
      real e;
      e = 1.0 / (1.0 + $exp(-fp16_real(real_fp16(sums[3][l]))));
      checks++; if (rabs(got[l] - e) > 0.025) begin failures++; $display("sig %g vs %g", got[l], e); end
    end
    cfg_sigmoid = 0;
    // max pooling of 4 elements, plus residual (cached at index 5) with lane offset 1
    for (int rep = 0; rep < 2; rep++) begin
      real mx [L];
      cfg_res_op = rep ? RES_ADD : RES_NONE; res_idx = 5; res_lane_off = 2'(rep);
      for (int p = 0; p < 4; p++) begin
        @(negedge clk); pool_valid = 1; pool_first = (p == 0); pool_last = (p == 3);
        for (int l = 0; l < L; l++) begin
          pool_data[l] = rand_fp16(12, 16);
          if (p == 0 || fp16_real(pool_data[l]) > mx[l]) mx[l] = fp16_real(pool_data[l]);
        end
      end
      @(negedge clk); pool_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int l = 0; l < L; l++) begin
        real e;
        e = mx[l] + (rep ? fp16_real(real_fp16(sums[0][(l + 1) % L])) : 0.0);
        checks++; if (!close(fp16_real(out_data[l]), e, p2(-8), 1.0)) begin failures++;
          $display("pool %0d lane %0d got %g exp %g", rep, l, fp16_real(out_data[l]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
