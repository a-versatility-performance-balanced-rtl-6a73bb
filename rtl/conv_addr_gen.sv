// conv_addr_gen: external-memory address of one feature-map element.
//
// Feature maps are stored channel by channel, each channel row by row, one FP16 value per
// word: element (c, y, x) of a map at `base` with height h and width w is at
// base + c*h*w + y*w + x. Coordinates are signed so a convolution window can reach over the
// border: such an element, or a channel at or beyond `channels`, is flagged `pad` and reads
// as zero without touching memory (zero padding). Used for input-window loads and output
// writes; plane = h*w is supplied precomputed. Combinational. The row-wise layout keeps the
// storage structure of the image unchanged, as the paper's row-wise segmentation requires;
// the exact formula is this design's choice.
module conv_addr_gen
  import stdd_pkg::*;
(
  input  logic [ADDR_W-1:0] base,
  input  logic [34:0]       plane,
  input  logic [19:0]       h,
  input  logic [14:0]       w,
  input  logic [15:0]       channels,
  input  logic [15:0]       c,
  input  logic signed [21:0] y,
  input  logic signed [21:0] x,
  output logic [ADDR_W-1:0] addr,
  output logic              pad
);
  always_comb begin
    pad  = (y < 0) || (x < 0) || (y >= $signed({2'b0, h})) || (x >= $signed({7'b0, w})) ||
           (c >= channels);
    addr = base + ADDR_W'(c * plane) + ADDR_W'($unsigned(y) * w) + ADDR_W'($unsigned(x));
  end
endmodule
