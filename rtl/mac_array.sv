// mac_array: M x N multiply-accumulate array working on BFP mantissas.
//
// Each valid cycle takes one M-element input vector x (one value per input channel) and an
// N x M weight slab w, and produces for every output channel n the dot product
// sum_m w[n][m] * x[m]. In the Winograd path one cycle handles one of the 36 transformed
// tile positions; in the point-wise path (1x1 and 7x7 kernels, strided 3x3) one kernel
// position. The M-wide sum models the cascaded DSP column of a supertile. The result is
// registered: latency 1 cycle, throughput one vector per cycle. Defaults M = 32 and N = 64
// are the feature-extraction array size; the fusion array is instantiated with 16 x 32.
// Input widths (24-bit data to hold Winograd-transformed values, 16-bit weights) and the
// 48-bit result width are this design's choices; the single clock (the paper runs the DSP
// array at twice the interface clock) is also a simplification.
module mac_array #(
  parameter int M  = 32,
  parameter int N  = 64,
  parameter int XW = 24,
  parameter int WW = 16,
  parameter int AW = 48
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [XW-1:0] x [M],
  input  logic signed [WW-1:0] w [N][M],
  output logic                 out_valid,
  output logic signed [AW-1:0] y [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < N; n++) y[n] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int n = 0; n < N; n++) begin
          logic signed [AW-1:0] s;
          s = '0;
          for (int m = 0; m < M; m++) s += AW'(x[m] * w[n][m]);
          y[n] <= s;
        end
    end
  end
endmodule
