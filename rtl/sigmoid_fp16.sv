// sigmoid_fp16: FP16 sigmoid used by the feature-fusion module in place of max pooling.
//
// The paper names the function only. This design uses the piecewise-linear PLAN
// approximation (Amin, Curtis, Hayes-Gill 1997): for |x| >= 5 the result is 1; for
// 2.375 <= |x| < 5, |x|/32 + 0.84375; for 1 <= |x| < 2.375, |x|/8 + 0.625; below 1,
// |x|/4 + 0.5; negative inputs give 1 - f(|x|). |x| is converted to fixed point with 12
// fraction bits, the segment is evaluated with shifts and adds, and the Q.12 result is
// converted back to FP16 (truncated). Combinational. Maximum error of the approximation is
// about 0.019.
module sigmoid_fp16
  import stdd_pkg::*;
(
  input  fp16_t a,
  output fp16_t y
);
  logic [27:0] fx;      // |a| in Q16.12
  logic [12:0] f;       // f(|a|) in Q1.12, 0.5 .. 1.0
  logic [12:0] r;
  int          p;

  always_comb begin
    // significand 1.m = (1024+m) * 2^(e-25); in Q.12 shift by e-13
    if (a.e == 5'd0) fx = '0;
    else if (a.e >= 5'd13) fx = 28'({1'b1, a.m}) << (a.e - 5'd13);
    else fx = 28'({1'b1, a.m}) >> (5'd13 - a.e);
    if (fx >= 28'd20480)      f = 13'd4096;                          // >= 5
    else if (fx >= 28'd9728)  f = 13'((fx >> 5) + 28'd3456);        // >= 2.375
    else if (fx >= 28'd4096)  f = 13'((fx >> 3) + 28'd2560);        // >= 1
    else                      f = 13'((fx >> 2) + 28'd2048);
    r = (a.s && a.e != 5'd0) ? 13'd4096 - f : f;
    p = 0;
    for (int i = 0; i < 13; i++) if (r[i]) p = i;
    y.s = 1'b0;
    y.e = 5'(p - 12 + 15);
    y.m = 10'(({r, 10'd0} << (12 - p)) >> 12);
    if (r == '0) y = '0;
  end
endmodule
