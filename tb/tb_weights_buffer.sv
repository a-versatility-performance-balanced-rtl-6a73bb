// tb_weights_buffer: fills both sets of a reduced (M=4, N=3, up to 9 positions) weight
// buffer with random slabs, reads every kernel position plainly and transposed and checks
// mantissas and exponent against the written data; checks the ping-pong flags.
module tb_weights_buffer;
  localparam int M = 4, N = 3, KP = 9;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic wr_en = 0, wr_commit = 0, rd_release = 0, can_write, can_read, transpose = 0;
  logic [3:0] wr_pos = 0; logic [3:0] wr_idx = 0; logic [15:0] wr_data = 0;
  logic [2:0] rd_ky = 0, rd_kx = 0, ksz = 3;
  logic signed [15:0] rd_w [N][M];
  logic signed [7:0] rd_exp;
  logic [15:0] img [2][KP][N*M+1];
  weights_buffer #(.M(M), .N(N), .KP(KP)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      checks++; if (!can_write) failures++;
      for (int p = 0; p < KP; p++) for (int i = 0; i <= N*M; i++) begin
        img[s][p][i] = 16'($urandom);
        wr_en = 1; wr_pos = 4'(p); wr_idx = 4'(i); wr_data = img[s][p][i];
        @(negedge clk);
      end
      wr_en = 0; wr_commit = 1; @(negedge clk); wr_commit = 0;
    end
    checks++; if (can_write) failures++;      // both sets full
    for (int s = 0; s < 2; s++) begin
      checks++; if (!can_read) failures++;
      for (int tr = 0; tr < 2; tr++) begin
        transpose = 1'(tr);
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int p;
          rd_ky = 3'(ky); rd_kx = 3'(kx); #1;
          p = tr ? kx * 3 + ky : ky * 3 + kx;
          checks++; if (rd_exp !== 8'(img[s][p][0])) failures++;
          for (int n = 0; n < N; n++) for (int m = 0; m < M; m++) begin
            checks++; if (rd_w[n][m] !== img[s][p][1 + n*M + m]) failures++;
          end
        end
      end
      @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    end
    checks++; if (can_read || !can_write) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
