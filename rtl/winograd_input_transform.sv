// winograd_input_transform: V = B^T X B for one 6x6 tile of Winograd F(4x4,3x3).
//
// X is a 6x6 tile of 16-bit BFP mantissas of one input channel; V is the transformed tile
// fed point-wise to the MAC array. The transform matrix entries are small constants
// (0, +-1, +-2, +-4, +-5), so the products are shifts and adds. The row pass B^T X is
// computed first, then the column pass; both are combinational and the result is
// registered (latency 1). Entries of V grow by at most 100x, so 24-bit outputs are exact.
// The equation and tile size follow the paper; the matrix values are the standard ones,
// not printed in the paper.
module winograd_input_transform
  import stdd_pkg::*;
#(
  parameter int IW = 16,
  parameter int OW = 24
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] x [6][6],
  output logic                 out_valid,
  output logic signed [OW-1:0] v [6][6]
);
  logic signed [OW-1:0] t [6][6];
  logic signed [OW-1:0] vc [6][6];

  always_comb begin
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        t[i][j] = '0;
        for (int k = 0; k < 6; k++) t[i][j] += OW'(BT[i][k]) * OW'(x[k][j]);
      end
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        vc[i][j] = '0;
        for (int k = 0; k < 6; k++) vc[i][j] += t[i][k] * OW'(BT[j][k]);
      end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    if (in_valid) v <= vc;
  end
endmodule
