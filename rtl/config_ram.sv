// config_ram: on-chip RAM that holds the layer microcodes ("Config RAM" / "Configure OP RAM").
//
// The host writes microcodes into it through its DMA path during initialisation; the
// feature-extraction and feature-fusion modules each read their own microcode sequence
// through a dedicated read port. Both read ports are synchronous: data appears one clock
// after the address. Each entry is one 256-bit microcode, the width of the AXI data bus.
// The depth is not given by the paper; 1024 entries is this design's choice. Writes and
// reads to the same entry in the same cycle return the old contents.
module config_ram #(
  parameter int DEPTH = 1024,
  parameter int W     = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr_a,
  output logic [W-1:0]  rd_data_a,
  input  logic [AW-1:0] rd_addr_b,
  output logic [W-1:0]  rd_data_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data_a <= mem[rd_addr_a];
    rd_data_b <= mem[rd_addr_b];
  end
endmodule
