// tb_bfp_normalize: random FP16 blocks (mixed exponents, zeros, both signs) are normalised;
// each output mantissa and the shared exponent are compared with an independent model
// (max exponent, then significand*16 >> distance), and the 2-cycle latency is checked.
module tb_bfp_normalize;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 8;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  fp16_t in_data [N];
  logic signed [15:0] out_mant [N];
  logic [4:0] out_exp;
  bfp_normalize #(.N(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      fp16_t blk [N];
      int emax, lat;
      emax = 0;
      for (int i = 0; i < N; i++) begin
        blk[i] = rand_fp16(1, 30);
        if ($urandom % 8 == 0) blk[i] = '0;
        if (blk[i].e > emax) emax = blk[i].e;
      end
      @(negedge clk); in_valid = 1; in_data = blk;
      @(negedge clk); in_valid = 0;
      lat = 1;
      while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++; if (lat != 2) begin failures++; $display("latency %0d", lat); end
      checks++; if (int'(out_exp) != emax) failures++;
      for (int i = 0; i < N; i++) begin
        int sig, expm;
        sig = (blk[i].e == 0) ? 0 : ((1024 + int'(blk[i].m)) * 16) >>> (emax - int'(blk[i].e));
        expm = blk[i].s ? -sig : sig;
        checks++;
        if (int'(out_mant[i]) != expm) begin failures++;
          $display("mant %0d: got %0d exp %0d", i, out_mant[i], expm); end
        // value check: mant * 2^(E-29) within 2^(E-29) of the input
        checks++;
        if (rabs(real'(out_mant[i]) * p2(emax - 29) - fp16_real(blk[i])) > p2(emax - 29) * 1.01)
          failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
