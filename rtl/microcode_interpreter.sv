// microcode_interpreter: walks a sequence of layer microcodes and hands them to an FCN module.
//
// On `start` it reads `count` consecutive microcodes from the configuration RAM beginning at
// `base`. Each one is decoded into its fields (the microcode_t struct of stdd_pkg) and
// presented on `layer` with `layer_valid` held high until the FCN module pulses
// `layer_done`; then the next one is fetched. After the last layer `done` pulses for one
// cycle. The RAM read port is synchronous (one-cycle latency), so a layer becomes valid two
// cycles after the previous one finishes. The field split follows the published microcode
// format; the handshake and the sequencing by base/count are this design's choice.
module microcode_interpreter
  import stdd_pkg::*;
#(
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [AW:0]   count,
  output logic [AW-1:0] ram_addr,
  input  logic [255:0]  ram_data,
  output microcode_t    layer,
  output logic          layer_valid,
  input  logic          layer_done,
  output logic          busy,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_LATCH, S_HOLD} state_e;
  state_e        st;
  logic [AW:0]   left;

  assign busy = (st != S_IDLE);
  assign layer_valid = (st == S_HOLD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; left <= '0; ram_addr <= '0; layer <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          ram_addr <= base;
          left     <= count;
          st       <= (count == '0) ? S_IDLE : S_READ;
          done     <= (count == '0);
        end
        S_READ:  st <= S_LATCH;            // RAM output valid next cycle
        S_LATCH: begin
          layer <= microcode_t'(ram_data);
          st    <= S_HOLD;
        end
        S_HOLD: if (layer_done) begin
          left     <= left - 1'b1;
          ram_addr <= ram_addr + 1'b1;
          if (left == 1) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_READ;
        end
      endcase
    end
  end
endmodule
