// tb_fpx_add: random pairs of widened floats (same and opposite signs, near-cancelling
// pairs, zeros) are added; the result must be within 2 units of the 15-bit mantissa of the
// exact real sum, and exact for x + 0 and x + (-x).
module tb_fpx_add;
  import stdd_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  fpx_t a, b, y;
  fpx_add dut (.*);
  function automatic fpx_t rnd();
    fpx_t r;
    r.s = 1'($urandom); r.e = 5'(2 + $urandom % 27); r.m = 15'($urandom);
    return r;
  endfunction
  initial begin
    for (int t = 0; t < 5000; t++) begin
      real ra, rb, ry, rs;
      a = rnd(); b = rnd();
      if (t % 5 == 0) begin b.e = a.e; b.s = !a.s; end
      if (t % 7 == 0) b.e = a.e - 5'(($urandom % 3));
      #1;
      ra = fpx_real(a); rb = fpx_real(b); ry = fpx_real(y); rs = ra + rb;
      checks++;
      if (rabs(rs) >= p2(-13) && rabs(rs) < 60000.0) begin
        // truncating alignment may lose up to one unit of the larger operand
        real ulp;
        ulp = p2(int'(a.e > b.e ? a.e : b.e) - 30);
        if (rabs(ry - rs) > 2.0 * ulp) begin failures++; $display("%g + %g = %g got %g", ra, rb, rs, ry); end
      end
    end
    a = rnd(); b = '0; #1; checks++; if (y !== a) failures++;
    b = a; b.s = !a.s; #1; checks++; if (y !== '0) failures++;
    a = '0; b = rnd(); #1; checks++; if (y !== b) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
