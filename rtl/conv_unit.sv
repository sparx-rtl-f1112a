// Convolution addressing (im2col) for a 3x3, stride-1, zero-padded layer.
//
// For output pixel pix (row-major in an H x H map, H = 32 for the CIFAR-10
// variant and 28 for MNIST) and reduction index k = (ci*3 + ky)*3 + kx, the
// operand is input[ci][y+ky-1][x+kx-1] of the input bank (layout
// [c][y][x], from byte base).  Outside the map, or for pix >= H*H, pad is set
// and the operand must be taken as 0.  The paper names a CONV unit; the
// kernel size, padding and layout are this design's choice.  Combinational,
// divisions are by constants only.
module conv_unit #(
  parameter int unsigned AW = 12
) (
  input  logic          cifar,
  input  logic [AW-1:0] base,
  input  logic [11:0]   pix,
  input  logic [11:0]   k,
  output logic [AW-1:0] addr,
  output logic          pad
);
  logic [5:0]  h, y, x, ci, ky, kx;
  logic [3:0]  r;
  logic signed [7:0] iy, ix;
  logic [11:0] npix;

  always_comb begin
    h    = cifar ? 6'd32 : 6'd28;
    npix = cifar ? 12'd1024 : 12'd784;
    y    = cifar ? 6'(pix >> 5) : 6'(pix / 12'd28);
    x    = cifar ? 6'(pix & 12'h1f) : 6'(pix % 12'd28);
    ci   = 6'(k / 12'd9);
    r    = 4'(k % 12'd9);
    ky   = 6'(r / 4'd3);
    kx   = 6'(r % 4'd3);
    iy   = $signed({2'b0, y}) + $signed({2'b0, ky}) - 8'sd1;
    ix   = $signed({2'b0, x}) + $signed({2'b0, kx}) - 8'sd1;
    pad  = (pix >= npix) || iy < 0 || ix < 0 || iy >= $signed({2'b0, h}) || ix >= $signed({2'b0, h});
    addr = base + AW'(32'(ci) * 32'(npix)) + AW'(32'(iy[5:0]) * 32'(h)) + AW'(ix[5:0]);
  end
endmodule
