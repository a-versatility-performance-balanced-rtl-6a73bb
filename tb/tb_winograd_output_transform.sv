// tb_winograd_output_transform: checks the whole Winograd F(4x4,3x3) identity. A random 6x6
// input tile d and 3x3 kernel g (small integers) are used; U = G g G^T is formed here with
// G scaled by 24 so it stays integer, V = B^T d B, M = U .* V, and the module's A^T M A must
// equal 576 times the direct 3x3 correlation of d with g. Also checks the 1-cycle latency.
module tb_winograd_output_transform;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [47:0] m [6][6];
  logic signed [63:0] y [4][4];
  int bt [6][6] = '{'{4,0,-5,0,1,0}, '{0,-4,-4,1,1,0}, '{0,4,-4,-1,1,0},
                    '{0,-2,-1,2,1,0}, '{0,2,-1,-2,1,0}, '{0,4,0,-5,0,1}};
  int g24 [6][3] = '{'{6,0,0}, '{-4,-4,-4}, '{-4,4,-4}, '{1,2,4}, '{1,-2,4}, '{0,0,24}};
  winograd_output_transform dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 100; t++) begin
      longint d [6][6], g [3][3], u [6][6], tg [6][3], v [6][6], tv [6][6];
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) d[i][j] = longint'($urandom % 201) - 100;
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) g[i][j] = longint'($urandom % 21) - 10;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 3; j++) begin
        tg[i][j] = 0; for (int k = 0; k < 3; k++) tg[i][j] += g24[i][k] * g[k][j]; end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        u[i][j] = 0; for (int k = 0; k < 3; k++) u[i][j] += tg[i][k] * g24[j][k]; end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        tv[i][j] = 0; for (int k = 0; k < 6; k++) tv[i][j] += bt[i][k] * d[k][j]; end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        v[i][j] = 0; for (int k = 0; k < 6; k++) v[i][j] += tv[i][k] * bt[j][k]; end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) m[i][j] = 48'(u[i][j] * v[i][j]);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        longint c; c = 0;
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) c += d[i+a][j+b] * g[a][b];
        checks++;
        if (longint'(y[i][j]) != 576 * c) begin failures++;
          $display("Y[%0d][%0d] %0d vs %0d", i, j, y[i][j], 576*c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
