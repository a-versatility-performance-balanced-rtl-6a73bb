// ext_mem_model: behavioural model of one external-memory port (stands in for the DDR4
// memory and its controller in simulation; not synthesizable, not part of the design).
// 16-bit words, sparse storage, unwritten words read 0. A request is accepted when
// req.valid and ready are high; `ready` drops at random (STALL_PCT percent of cycles).
// Read data returns LAT cycles after acceptance, in order. Counts reads and writes.
module ext_mem_model
  import stdd_pkg::*;
#(
  parameter int LAT       = 3,
  parameter int STALL_PCT = 20
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);
  logic [15:0] mem [longint];
  logic [15:0] pipe_d [LAT];
  logic        pipe_v [LAT];
  int          n_reads = 0, n_writes = 0, n_stalls = 0;

  initial begin
    ready = 1'b1;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rsp = '{valid: pipe_v[LAT-1], rdata: pipe_d[LAT-1]};

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= 1'b0;
    if (req.valid && ready) begin
      if (req.we) begin
        mem[longint'(req.addr)] = req.wdata;
        n_writes++;
      end else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= mem.exists(longint'(req.addr)) ? mem[longint'(req.addr)] : 16'h0;
        n_reads++;
      end
    end
    if (req.valid && !ready) n_stalls++;
    ready <= (($urandom % 100) >= STALL_PCT);
  end

  function automatic void write(longint a, logic [15:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [15:0] read(longint a);
    return mem.exists(a) ? mem[a] : 16'h0;
  endfunction
endmodule
