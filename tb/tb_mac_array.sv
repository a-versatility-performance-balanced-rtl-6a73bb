// tb_mac_array: random vectors and weight slabs on a reduced 8 x 16 array (and extreme
// values), each output checked against a dot product computed here; 1-cycle latency and
// back-to-back throughput are checked.
module tb_mac_array;
  localparam int M = 8, N = 16;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [23:0] x [M];
  logic signed [15:0] w [N][M];
  logic signed [47:0] y [N];
  longint expq [$];
  mac_array #(.M(M), .N(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(negedge clk) if (out_valid) begin
    longint e [N];
    for (int n = 0; n < N; n++) e[n] = expq.pop_front();
    for (int n = 0; n < N; n++) begin
      checks++; if (longint'(y[n]) != e[n]) begin failures++; $display("y[%0d] %0d vs %0d", n, y[n], e[n]); end
    end
  end
  initial begin
    for (int m = 0; m < M; m++) x[m] = 0;
    for (int n = 0; n < N; n++) for (int m = 0; m < M; m++) w[n][m] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e [N];
      for (int m = 0; m < M; m++) x[m] = (t < 2) ? ((t == 0) ? 24'sh7fffff : -24'sh800000) : 24'($urandom);
      for (int n = 0; n < N; n++) for (int m = 0; m < M; m++)
        w[n][m] = (t < 2) ? -16'sh8000 : 16'($urandom);
      for (int n = 0; n < N; n++) begin
        e[n] = 0; for (int m = 0; m < M; m++) e[n] += longint'(x[m]) * longint'(w[n][m]); end
      for (int n = 0; n < N; n++) expq.push_back(e[n]);
      in_valid = 1;
      @(negedge clk);
      if (t % 7 == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
