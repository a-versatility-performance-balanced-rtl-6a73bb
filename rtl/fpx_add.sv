// fpx_add: adder for the widened float format (1 sign, 5 exponent, 15 mantissa bits).
//
// This is the post-process adder that accumulates partial sums and adds residual
// branches. The operand with the larger magnitude keeps its exponent, the other
// significand is shifted right to align (bits shifted out are dropped), the significands
// are added or subtracted and the result is renormalised by a leading-one search.
// Truncation throughout; results below the smallest normal flush to zero, overflow
// saturates. Combinational. The format follows the 10-to-15-bit mantissa widening of the
// accuracy-maintenance scheme; the adder structure is this design's choice.
module fpx_add
  import stdd_pkg::*;
(
  input  fpx_t a,
  input  fpx_t b,
  output fpx_t y
);
  fpx_t        hi, lo;
  logic [4:0]  d;
  logic [16:0] sa, sb, s;
  int          p;
  int          e;

  always_comb begin
    if ({a.e, a.m} >= {b.e, b.m}) begin hi = a; lo = b; end
    else begin hi = b; lo = a; end
    d  = hi.e - lo.e;
    sa = {1'b0, 1'b1, hi.m};
    sb = {1'b0, 1'b1, lo.m} >> d;
    s  = (hi.s == lo.s) ? sa + sb : sa - sb;
    p  = 0;
    for (int i = 0; i < 17; i++) if (s[i]) p = i;
    e  = int'(hi.e) + p - 15;
    y.s = hi.s;
    y.e = 5'(e);
    y.m = 15'((s << (16 - p)) >> 1);
    if (lo.e == 5'd0) y = hi;
    else if (s == '0 || e < 1) y = '0;
    else if (e > 30) begin y.e = 5'd30; y.m = '1; end
    if (hi.e == 5'd0) y = '0;
  end
endmodule
