// tb_winograd_input_transform: checks V = B^T X B on random tiles against a reference
// computed here from the explicit B^T entries, and checks the 1-cycle latency. A tile with
// a single 1 at (2,3) must give V[i][j] = BT[i][2] * BT[j][3].
module tb_winograd_input_transform;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [15:0] x [6][6];
  logic signed [23:0] v [6][6];
  int bt [6][6] = '{'{4,0,-5,0,1,0}, '{0,-4,-4,1,1,0}, '{0,4,-4,-1,1,0},
                    '{0,-2,-1,2,1,0}, '{0,2,-1,-2,1,0}, '{0,4,0,-5,0,1}};
  winograd_input_transform dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 101; t++) begin
      int r [6][6], tmp [6][6];
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
        x[i][j] = (t == 0) ? ((i == 2 && j == 3) ? 16'sd1 : 16'sd0) : 16'($urandom);
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        tmp[i][j] = 0; for (int k = 0; k < 6; k++) tmp[i][j] += bt[i][k] * int'(x[k][j]); end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        r[i][j] = 0; for (int k = 0; k < 6; k++) r[i][j] += tmp[i][k] * bt[j][k]; end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        checks++;
        if (int'(v[i][j]) != r[i][j]) begin failures++; $display("V[%0d][%0d] %0d vs %0d", i, j, v[i][j], r[i][j]); end
        if (t == 0) begin checks++; if (int'(v[i][j]) != bt[i][2] * bt[j][3]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
