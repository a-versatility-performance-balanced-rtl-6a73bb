// winograd_output_transform: Y = A^T M A, turning the 6x6 point-wise MAC results of one
// output channel into its 4x4 output tile (Winograd F(4x4,3x3)).
//
// The entries of A^T are 0, +-1, +-2, +-4, +-8, so this is shifts and adds. Both passes are
// combinational, the result is registered (latency 1). Entries grow by at most 19*19, so
// the output is 9 bits wider than the input is enough; 64 bits are used. Matrix values are
// the standard ones, not printed in the paper.
module winograd_output_transform
  import stdd_pkg::*;
#(
  parameter int IW = 48,
  parameter int OW = 64
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] m [6][6],
  output logic                 out_valid,
  output logic signed [OW-1:0] y [4][4]
);
  logic signed [OW-1:0] t [4][6];
  logic signed [OW-1:0] yc [4][4];

  always_comb begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 6; j++) begin
        t[i][j] = '0;
        for (int k = 0; k < 6; k++) t[i][j] += OW'(AT[i][k]) * OW'(m[k][j]);
      end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        yc[i][j] = '0;
        for (int k = 0; k < 6; k++) yc[i][j] += t[i][k] * OW'(AT[j][k]);
      end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    if (in_valid) y <= yc;
  end
endmodule
