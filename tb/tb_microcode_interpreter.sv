// tb_microcode_interpreter: loads the residual-bottleneck microcode example (four layers)
// into a RAM model, runs the interpreter over it and checks every decoded field, the
// layer handshake and the final done pulse.
module tb_microcode_interpreter;
  import stdd_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic start = 0, layer_valid, layer_done = 0, busy, done;
  logic [5:0] base = 6'd10, ram_addr;
  logic [6:0] count = 7'd4;
  logic [255:0] ram [64];
  logic [255:0] ram_data;
  microcode_t layer, exp_l [4];
  always_ff @(posedge clk) ram_data <= ram[ram_addr];
  microcode_interpreter #(.DEPTH(64)) dut (.clk, .rst_n, .start, .base, .count, .ram_addr,
    .ram_data, .layer, .layer_valid, .layer_done, .busy, .done);
  function automatic microcode_t mk(int lt, int relu, int ic, int oc, int h, int w, int k,
                                    int s, int r, longint ia, longint oa);
    microcode_t m = '0;
    m.layer_type = layer_type_e'(lt); m.relu = 1'(relu); m.in_ch = 16'(ic); m.out_ch = 16'(oc);
    m.height = 20'(h); m.width = 15'(w); m.kernel = kernel_e'(k); m.stride2 = 1'(s);
    m.res_op = res_op_e'(r); m.in_addr = 34'(ia); m.out_addr = 34'(oa);
    return m;
  endfunction
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    exp_l[0] = mk(0, 1, 512, 128, 256, 256, 0, 0, 0, 'h0000, 'h1000);
    exp_l[1] = mk(0, 1, 128, 128, 256, 256, 1, 1, 0, 'h1000, 'h2000);
    exp_l[2] = mk(0, 0, 128, 512, 128, 128, 1, 0, 1, 'h2000, 'h0);
    exp_l[3] = mk(1, 1, 512, 512, 256, 256, 0, 1, 2, 'h0000, 'h3000);
    for (int i = 0; i < 64; i++) ram[i] = '0;
    for (int i = 0; i < 4; i++) ram[10 + i] = exp_l[i];
    // the layer type field sits in the two lowest bits
    checks++; if (ram[13][1:0] !== 2'd1) failures++;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 4; i++) begin
      int t = 0;
      while (!layer_valid && t < 100) begin @(negedge clk); t++; end
      checks++; if (layer !== exp_l[i]) begin failures++; $display("layer %0d mismatch", i); end
      checks++; if (layer.res_op !== exp_l[i].res_op || layer.kernel !== exp_l[i].kernel) failures++;
      repeat ($urandom % 4) @(negedge clk);
      checks++; if (!layer_valid) failures++;   // held until acknowledged
      layer_done = 1; @(negedge clk); layer_done = 0;
    end
    repeat (4) @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int n_done = 0;
  always @(posedge clk) if (done) n_done++;
  final begin end
endmodule
