// upsample: the stand-alone 2x upsampling module of the feature-fusion path.
//
// It enlarges a C x H x W feature map in external memory to C x 2H x 2W at another
// address, so it can run at the same time as the two FCN modules on other data. The paper
// names the module and its 2x role in the fusion network but not the interpolation; this
// design uses nearest-neighbour replication: out(c, 2y+i, 2x+j) = in(c, y, x). Because
// every output is a copy of one input, none of the zero-inserted positions of an
// upsampling-by-padding scheme is ever computed. Operation, one input row at a time: the W
// words of row (c, y) are read into a line buffer (up to WMAX words), then both output rows
// 2y and 2y+1 (2W words each) are written. Reads and writes share the module's memory port
// through a bus controller. Layout: channel-major, row-major, one FP16 per word, as for the
// FCN modules. start/busy/done as for the other modules; the parameters come from host
// registers.
module upsample
  import stdd_pkg::*;
#(
  parameter int WMAX = 4096,
  localparam int XW  = $clog2(WMAX+1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src,
  input  logic [ADDR_W-1:0] dst,
  input  logic [15:0]       channels,
  input  logic [19:0]       height,
  input  logic [14:0]       width,
  output logic              busy,
  output logic              done,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp
);
  typedef enum logic [1:0] {U_IDLE, U_READ, U_WRITE} ust_e;
  ust_e st;
  logic [15:0]       c;
  logic [19:0]       y;
  logic [XW-1:0]     rx, rcnt;     // read issue / receive counters
  logic [XW:0]       wx;           // output column 0 .. 2W-1
  logic              wr2;          // second output row
  logic [ADDR_W-1:0] raddr, waddr;
  fp16_t             line [WMAX];
  mem_req_t          rd_req, wr_req;
  logic              rd_ready, wr_ready;
  mem_rsp_t          rd_rsp;

  assign busy   = (st != U_IDLE);
  assign rd_req = '{valid: st == U_READ && rx < XW'(width), we: 1'b0, addr: raddr, wdata: '0};
  assign wr_req = '{valid: st == U_WRITE, we: 1'b1, addr: waddr,
                    wdata: line[wx[XW:1]]};

  bus_controller u_bus (.clk, .rst_n, .rd_req, .rd_ready, .rd_rsp, .wr_req, .wr_ready,
                        .mem_req, .mem_ready, .mem_rsp);

  always_ff @(posedge clk)
    if (rd_rsp.valid) line[rcnt] <= fp16_t'(rd_rsp.rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; c <= 0; y <= 0; rx <= 0; rcnt <= 0; wx <= 0; wr2 <= 0;
      raddr <= 0; waddr <= 0; done <= 0;
    end else begin
      done <= 1'b0;
      unique case (st)
        U_IDLE: if (start) begin
          c <= 0; y <= 0; rx <= 0; rcnt <= 0; raddr <= src; waddr <= dst;
          if (channels == 0 || height == 0 || width == 0) done <= 1'b1;
          else st <= U_READ;
        end
        U_READ: begin
          if (rd_req.valid && rd_ready) begin rx <= rx + 1'b1; raddr <= raddr + 1'b1; end
          if (rd_rsp.valid) begin
            rcnt <= rcnt + 1'b1;
            if (rcnt == XW'(width) - 1'b1) begin st <= U_WRITE; wx <= 0; wr2 <= 0; end
          end
        end
        U_WRITE: if (wr_ready) begin
          waddr <= waddr + 1'b1;
          if (wx == {width, 1'b0} - 1'b1) begin
            wx <= 0;
            if (!wr2) wr2 <= 1'b1;
            else begin
              rx <= 0; rcnt <= 0; st <= U_READ;
              if (y == height - 1'b1) begin
                y <= 0;
                if (c == channels - 1'b1) begin st <= U_IDLE; done <= 1'b1; end
                else c <= c + 1'b1;
              end else y <= y + 1'b1;
            end
          end else wx <= wx + 1'b1;
        end
        default: st <= U_IDLE;
      endcase
    end
  end
endmodule
