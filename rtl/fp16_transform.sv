// fp16_transform: converts a fixed-point result with a power-of-two scale to the widened
// float used for accumulation ("FP16 transform" in the quantisation stage after the MAC).
//
// Input value = v * 2^x, v a signed IW-bit integer (a MAC or inverse-Winograd result) and x
// a signed exponent (block exponents of data and weights combined). The leading one of |v|
// is located, the 15 bits below it become the mantissa (truncated, no rounding) and the
// biased exponent is position + x + 15. Results below the smallest normal flush to zero,
// results above the largest finite value saturate. Purely combinational. The 15-bit
// mantissa is the widened accumulation format of the accuracy-maintenance scheme; the
// conversion details are this design's choice.
module fp16_transform
  import stdd_pkg::*;
#(
  parameter int IW = 64
) (
  input  logic signed [IW-1:0] v,
  input  logic signed [11:0]   x,
  output fpx_t                 y
);
  logic [IW-1:0] mag;
  int            p;
  int            eb;
  logic [IW+14:0] norm;

  always_comb begin
    mag = v[IW-1] ? IW'(-v) : IW'(v);
    p = 0;
    for (int i = 0; i < IW; i++) if (mag[i]) p = i;
    eb = p + int'(x) + 15;
    // place the leading one at bit IW+14, then take the next 15 bits
    norm = {mag, 15'd0} << (IW - 1 - p);
    y.s = v[IW-1];
    y.e = 5'(eb);
    y.m = norm[IW+13 -: 15];
    if (mag == '0 || eb < 1) y = '0;
    else if (eb > 30) begin y.e = 5'd30; y.m = '1; end
  end
endmodule
