// tb_fp16_transform: random signed integers with random scales are converted; the result
// must equal the real value truncated to a 15-bit mantissa (relative error below 2^-15,
// never above the true magnitude), zero stays zero, underflow flushes and overflow
// saturates.
module tb_fp16_transform;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic signed [63:0] v;
  logic signed [11:0] x;
  fpx_t y;
  fp16_transform #(.IW(64)) dut (.*);
  initial begin
    for (int t = 0; t < 3000; t++) begin
      real rv, ry;
      int sh;
      sh = $urandom % 40;
      v = (64'($urandom) << 16 | 64'($urandom)) >>> sh;
      if ($urandom % 2) v = -v;
      x = 12'(-int'($urandom % 50) - 5);
      #1;
      rv = real'(v) * p2(int'(x));
      ry = fpx_real(y);
      checks++;
      if (rabs(rv) >= p2(-14) && rabs(rv) < 65000.0) begin
        if (!(rabs(ry) <= rabs(rv) * (1.0 + 1e-12) && rabs(rv - ry) <= rabs(rv) * p2(-15) * 1.01 &&
              (ry == 0.0 || (ry < 0) == (rv < 0)))) begin
          failures++; $display("v=%0d x=%0d got %g exp %g", v, x, ry, rv); end
      end else if (rabs(rv) < p2(-15)) begin
        if (y !== '0) failures++;
      end
    end
    v = 0; x = 0; #1; checks++; if (y !== '0) failures++;
    v = 64'sd1 <<< 40; x = 0; #1; checks++; if (y.e !== 5'd30 || y.m !== '1) failures++;
    v = -64'sd3; x = -30; #1; checks++; if (y !== '0) failures++;
    v = 64'sd1; x = 0; #1; checks++; if (y !== fpx_t'({1'b0, 5'd15, 15'd0})) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
