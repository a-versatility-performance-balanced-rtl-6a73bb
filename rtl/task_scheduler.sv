// task_scheduler: starts the three computing modules and signals the end of a round.
//
// A host start request names any subset of {feature extraction, feature fusion, upsample}.
// Each requested module is started as soon as it is idle (a request for a busy module waits
// for it), so the three can run at the same time on different inputs. The modules started
// since the last interrupt form a round; when all of them have finished, the interrupt
// line rises (if enabled) and stays high until the host clears it, and round_done shows
// which modules took part. The behaviour "arrange the modules' operation and interrupt the
// CPU when the round is finished" is the paper's; queueing and the round rule are this
// design's choice.
module task_scheduler (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] start_req,
  input  logic       irq_clear,
  input  logic       irq_en,
  input  logic [2:0] mod_busy,
  input  logic [2:0] mod_done,
  output logic [2:0] mod_start,
  output logic [2:0] round_done,
  output logic       irq
);
  logic [2:0] pending, running, members;
  logic       irq_q;

  assign irq = irq_q && irq_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; running <= '0; members <= '0; mod_start <= '0;
      round_done <= '0; irq_q <= 1'b0;
    end else begin
      mod_start <= '0;
      for (int i = 0; i < 3; i++) begin
        if (start_req[i]) pending[i] <= 1'b1;
        if (pending[i] && !running[i] && !mod_busy[i] && !mod_start[i]) begin
          mod_start[i] <= 1'b1;
          running[i]   <= 1'b1;
          members[i]   <= 1'b1;
          pending[i]   <= start_req[i];
        end
        if (mod_done[i] && running[i] && !mod_start[i]) running[i] <= 1'b0;
      end
      if (members != 0 && pending == 0 && running == 0 && start_req == 0) begin
        irq_q      <= 1'b1;
        round_done <= members;
        members    <= '0;
      end
      if (irq_clear) irq_q <= 1'b0;
    end
  end
endmodule
