// pcie_regs: the host-visible register block reached over PCIe.
//
// Holds the control information and parameters that the host writes before invoking the
// modules, and the status it reads back. 32-bit registers, word addresses:
//   0 CTRL      write: bit0 start feature extraction, bit1 start feature fusion,
//               bit2 start upsample (one-cycle pulses, reads 0)
//   1 STATUS    read: [2:0] module busy, [8] interrupt line, [18:16] module error
//   2 IRQ       read: [2:0] modules finished in the last round; any write clears the
//               interrupt
//   3 IRQ_EN    bit0 enables the interrupt line
//   4 FE_MC     [15:0] first microcode index, [31:16] number of layers (feature extraction)
//   5 FF_MC     same for feature fusion
//   6 UP_SRC    upsample source address [31:0]; 7: bits [33:32]
//   8 UP_DST    upsample destination address [31:0]; 9: bits [33:32]
//  10 UP_C      upsample channels; 11 UP_H height; 12 UP_W width
// The register map is this design's choice; the paper only says the register is shared by
// the host and the FPGA and holds control information. Writes take effect at the clock
// edge, reads are combinational.
module pcie_regs
  import stdd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_wr_en,
  input  logic [3:0]        host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  // to the scheduler and modules
  output logic [2:0]        start_req,
  output logic              irq_clear,
  output logic              irq_en,
  output logic [15:0]       fe_base, fe_count, ff_base, ff_count,
  output logic [ADDR_W-1:0] up_src, up_dst,
  output logic [15:0]       up_c,
  output logic [19:0]       up_h,
  output logic [14:0]       up_w,
  // status from the FPGA side
  input  logic [2:0]        busy,
  input  logic              irq,
  input  logic [2:0]        round_done,
  input  logic [2:0]        err
);
  logic [31:0] r [16];

  assign irq_en   = r[3][0];
  assign fe_base  = r[4][15:0];  assign fe_count = r[4][31:16];
  assign ff_base  = r[5][15:0];  assign ff_count = r[5][31:16];
  assign up_src   = {r[7][1:0], r[6]};
  assign up_dst   = {r[9][1:0], r[8]};
  assign up_c     = r[10][15:0];
  assign up_h     = r[11][19:0];
  assign up_w     = r[12][14:0];

  always_comb begin
    unique case (host_addr)
      4'd0:    host_rdata = '0;
      4'd1:    host_rdata = {13'd0, err, 7'd0, irq, 5'd0, busy};
      4'd2:    host_rdata = {29'd0, round_done};
      default: host_rdata = r[host_addr];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) r[i] <= '0;
      start_req <= '0; irq_clear <= 1'b0;
    end else begin
      start_req <= '0; irq_clear <= 1'b0;
      if (host_wr_en) begin
        unique case (host_addr)
          4'd0:    start_req <= host_wdata[2:0];
          4'd1:    ;
          4'd2:    irq_clear <= 1'b1;
          default: r[host_addr] <= host_wdata;
        endcase
      end
    end
  end
endmodule
