// tb_task_scheduler: three model modules with random run times. Checks that a requested
// idle module starts, that a request for a busy module waits until it has finished, that
// modules run concurrently, and that the interrupt rises exactly once per round, only
// after every member has finished, is masked by irq_en and is cleared by the host.
module tb_task_scheduler;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, overlap = 0, queued = 0;
  logic [2:0] start_req = 0, mod_busy = 0, mod_done = 0, mod_start, round_done;
  logic irq_clear = 0, irq_en = 1, irq;
  int remain [3] = '{0, 0, 0};
  int starts [3] = '{0, 0, 0};
  task_scheduler dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // model modules
  always @(posedge clk) begin
    mod_done <= 0;
    for (int i = 0; i < 3; i++) begin
      if (mod_start[i]) begin
        if (mod_busy[i]) failures++;
        mod_busy[i] <= 1; remain[i] <= 5 + $urandom % 30; starts[i]++;
      end else if (mod_busy[i]) begin
        if (remain[i] == 0) begin mod_busy[i] <= 0; mod_done[i] <= 1; end
        else remain[i] <= remain[i] - 1;
      end
    end
    if ($countones(mod_busy) > 1) overlap++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      logic [2:0] set;
      int s0 [3];
      set = 3'($urandom % 7 + 1);
      s0 = starts;
      @(negedge clk); start_req = set; @(negedge clk); start_req = 0;
      // second request for a module while it runs: must be queued, not lost
      if (round % 3 == 0) begin
        repeat (3) @(negedge clk);
        start_req = set & mod_busy;
        if (start_req != 0) queued++;
        @(negedge clk); start_req = 0;
      end
      while (!irq) begin
        @(negedge clk);
        checks++; if (irq && mod_busy != 0) failures++;
      end
      checks++;
      for (int i = 0; i < 3; i++) if (set[i] && starts[i] == s0[i]) failures++;
      checks++; if ((round_done & set) != set) failures++;
      @(negedge clk); irq_clear = 1; @(negedge clk); irq_clear = 0;
      checks++; if (irq) failures++;
    end
    // masked interrupt
    irq_en = 0;
    @(negedge clk); start_req = 3'b001; @(negedge clk); start_req = 0;
    repeat (60) @(negedge clk);
    checks++; if (irq || !dut.irq_q) failures++;
    irq_en = 1; #1; checks++; if (!irq) failures++;
    checks++; if (overlap == 0) failures++;
    checks++; if (queued == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
