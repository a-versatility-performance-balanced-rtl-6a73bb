// weights_buffer: ping-pong store of pre-normalised weights for the MAC array.
//
// One set holds a weight slab group: for each kernel position (up to KP: 49 for a 7x7
// kernel, 36 for the Winograd-domain 6x6 tile) one exponent word followed by N x M 16-bit
// BFP weight mantissas (index 1 + n*M + m). While the MAC array reads one set, the DMA fills
// the other, hiding the weight transfer behind computation. The read side selects a kernel
// position by (ky, kx) for a kernel side ksz; with `transpose` set it reads (kx, ky)
// instead, which is how the weights of a transposed image are transposed. Reads are
// combinational, writes one word per cycle. The ping-pong weight memory and the transpose
// path follow the paper; the layout is this design's choice (weight value = mant * 2^exp,
// exp signed 8-bit).
module weights_buffer #(
  parameter int M  = 32,
  parameter int N  = 64,
  parameter int KP = 49,
  localparam int PW = $clog2(KP),
  localparam int IW = $clog2(N*M+1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [PW-1:0]       wr_pos,
  input  logic [IW-1:0]       wr_idx,
  input  logic [15:0]         wr_data,
  input  logic                wr_commit,
  output logic                can_write,
  input  logic                rd_release,
  output logic                can_read,
  input  logic [2:0]          rd_ky,
  input  logic [2:0]          rd_kx,
  input  logic [2:0]          ksz,
  input  logic                transpose,
  output logic signed [15:0]  rd_w [N][M],
  output logic signed [7:0]   rd_exp
);
  logic [15:0] mem [2][KP][N*M+1];
  logic [1:0]  full;
  logic        wr_set, rd_set;
  logic [PW-1:0] pos;

  assign can_write = !full[wr_set];
  assign can_read  = full[rd_set];

  always_comb begin
    pos = transpose ? PW'(rd_kx * ksz + rd_ky) : PW'(rd_ky * ksz + rd_kx);
    rd_exp = 8'(mem[rd_set][pos][0]);
    for (int n = 0; n < N; n++)
      for (int m = 0; m < M; m++) rd_w[n][m] = mem[rd_set][pos][1 + n*M + m];
  end

  always_ff @(posedge clk)
    if (wr_en) mem[wr_set][wr_pos][wr_idx] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_set <= 1'b0; rd_set <= 1'b0;
    end else begin
      if (wr_commit) begin full[wr_set] <= 1'b1; wr_set <= !wr_set; end
      if (rd_release) begin full[rd_set] <= 1'b0; rd_set <= !rd_set; end
    end
  end
endmodule
