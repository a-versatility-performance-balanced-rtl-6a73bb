// tb_conv_addr_gen: random coordinates inside and outside a feature map; the address must
// be base + c*h*w + y*w + x inside and the pad flag set exactly when outside or when the
// channel is beyond the channel count.
module tb_conv_addr_gen;
  import stdd_pkg::*;
  int checks = 0, failures = 0;
  logic [ADDR_W-1:0] base, addr;
  logic [34:0] plane;
  logic [19:0] h; logic [14:0] w; logic [15:0] channels, c;
  logic signed [21:0] y, x;
  logic pad;
  conv_addr_gen dut (.*);
  initial begin
    for (int t = 0; t < 5000; t++) begin
      longint ea; bit ep;
      base = ADDR_W'($urandom); h = 20'(1 + $urandom % 300); w = 15'(1 + $urandom % 4096);
      channels = 16'(1 + $urandom % 600); c = 16'($urandom % 700);
      y = 22'(int'($urandom % (h + 8)) - 4); x = 22'(int'($urandom % (w + 8)) - 4);
      plane = 35'(h * w);
      #1;
      ep = (y < 0) || (x < 0) || (y >= int'(h)) || (x >= int'(w)) || (c >= channels);
      ea = longint'(base) + longint'(c) * longint'(h) * longint'(w) + longint'(y) * longint'(w) + longint'(x);
      checks++; if (pad !== ep) failures++;
      if (!ep) begin checks++; if (longint'(addr) != (ea & ((64'd1 << ADDR_W) - 1))) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
