// stdd_pkg: types and constants shared by the scene-text-detection FCN accelerator.
//
// * microcode_t: the 256-bit per-layer microcode. Field order and widths follow the
//   published format (layer type 2, transpose&relu 2, input channel 16, output channel 16,
//   height 20, width 15, kernel size 2, stride 1, res op 2, input addr 34, output addr 34,
//   reserved 112). The bit positions are this design's choice: the fields are packed from
//   bit 0 upwards in that order, so layer type sits in bits [1:0].
// * Field encodings taken from the worked residual-bottleneck example: layer type 0 = conv,
//   1 = pooling; kernel 0 = 1x1, 1 = 3x3; stride 0 = 1, 1 = 2; res op 0 none, 1 cache the
//   result, 2 add the cached result. Own choices: layer type 2 = upsample, 3 = null;
//   kernel 2 = 7x7; transpose&relu bit 0 = ReLU, bit 1 = transposed image. The weight
//   address, which the format does not carry, is kept in the low 34 reserved bits.
// * fp16_t (1/5/10) is the storage format. fpx_t (1/5/15) is the widened format used while
//   partial sums are accumulated; results are truncated back to FP16 at the end.
//   Subnormals are flushed to zero, infinities and NaNs are not produced (results saturate).
// * BFP mantissas are 16-bit signed: the 11-bit significand (hidden 1 + 10 fraction bits)
//   placed in bits [14:4] and shifted right by the distance to the block's maximum
//   exponent, so a BFP value is mant * 2^(E-29) with E the block (biased) exponent.
// * Winograd F(4x4,3x3) transform matrices B^T (6x6) and A^T (4x6) are the standard
//   minimal-filtering ones (Lavin & Gray); G is applied offline to the weights.
package stdd_pkg;

  localparam int ADDR_W = 34;
  localparam int MC_W   = 256;

  typedef enum logic [1:0] {LT_CONV = 2'd0, LT_POOL = 2'd1, LT_UPSAMPLE = 2'd2, LT_NULL = 2'd3} layer_type_e;
  typedef enum logic [1:0] {K_1X1 = 2'd0, K_3X3 = 2'd1, K_7X7 = 2'd2, K_RSV = 2'd3} kernel_e;
  typedef enum logic [1:0] {RES_NONE = 2'd0, RES_CACHE = 2'd1, RES_ADD = 2'd2, RES_RSV = 2'd3} res_op_e;

  typedef struct packed {
    logic [77:0]       reserved_hi;
    logic [ADDR_W-1:0] weight_addr;   // low 34 bits of the 112-bit reserved field
    logic [ADDR_W-1:0] out_addr;
    logic [ADDR_W-1:0] in_addr;
    res_op_e           res_op;
    logic              stride2;
    kernel_e           kernel;
    logic [14:0]       width;
    logic [19:0]       height;
    logic [15:0]       out_ch;
    logic [15:0]       in_ch;
    logic              transpose;     // transpose&relu bit 1
    logic              relu;          // transpose&relu bit 0
    layer_type_e       layer_type;
  } microcode_t;

  typedef struct packed {
    logic       s;
    logic [4:0] e;
    logic [9:0] m;
  } fp16_t;

  typedef struct packed {
    logic        s;
    logic [4:0]  e;
    logic [14:0] m;
  } fpx_t;

  localparam int BFP_W = 16;   // BFP mantissa width (signed)

  // External-memory port of one module (one 16-bit word per address). A request is taken
  // when valid and the memory's ready are both high; read data returns in request order.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [15:0]       wdata;
  } mem_req_t;

  typedef struct packed {
    logic        valid;
    logic [15:0] rdata;
  } mem_rsp_t;

  // Winograd F(4x4,3x3) input transform B^T and output transform A^T.
  localparam int BT [6][6] = '{
    '{4,  0, -5,  0, 1, 0},
    '{0, -4, -4,  1, 1, 0},
    '{0,  4, -4, -1, 1, 0},
    '{0, -2, -1,  2, 1, 0},
    '{0,  2, -1, -2, 1, 0},
    '{0,  4,  0, -5, 0, 1}};
  localparam int AT [4][6] = '{
    '{1, 1,  1, 1,  1, 0},
    '{0, 1, -1, 2, -2, 0},
    '{0, 1,  1, 4,  4, 0},
    '{0, 1, -1, 8, -8, 1}};

  // FP16 -> widened float (exact).
  function automatic fpx_t fp16_to_fpx(fp16_t a);
    fpx_t r;
    r.s = a.s;
    r.e = a.e;
    r.m = (a.e == 5'd0) ? 15'd0 : {a.m, 5'd0};
    if (a.e == 5'd0) r.s = 1'b0;
    return r;
  endfunction

  // Widened float -> FP16 by truncating the mantissa to 10 bits.
  function automatic fp16_t fpx_to_fp16(fpx_t a);
    fp16_t r;
    r.s = a.s;
    r.e = a.e;
    r.m = a.m[14:5];
    return r;
  endfunction

  // a > b for FP16 values (zero has e == 0).
  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    logic [14:0] ma, mb;
    ma = (a.e == 5'd0) ? 15'd0 : {a.e, a.m};
    mb = (b.e == 5'd0) ? 15'd0 : {b.e, b.m};
    if (ma == 15'd0 && mb == 15'd0) return 1'b0;
    if (ma == 15'd0) return b.s;
    if (mb == 15'd0) return !a.s;
    if (a.s != b.s) return b.s;
    return a.s ? (ma < mb) : (ma > mb);
  endfunction

  // ReLU on FP16.
  function automatic fp16_t fp16_relu(fp16_t a);
    return (a.s || a.e == 5'd0) ? 16'h0000 : a;
  endfunction

endpackage
