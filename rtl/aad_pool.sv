// 2x2 AAD pooling of one window.
//
// win = {a, b, c, d}: a, b the top row and c, d the bottom row of the
// window (win[0] = a).  Two AAD cells reduce the rows, a third reduces their
// results; each cell returns (x + y + |x - y|) / 2, so the output is the
// window maximum.  The paper draws a pooling block of AAD cells for 2x2
// windows of 8-bit values; the three-cell tree is this design's arrangement.
// Combinational.
module aad_pool #(
  parameter int unsigned W = 8
) (
  input  logic signed [3:0][W-1:0] win,
  output logic signed [W-1:0]      y
);
  logic signed [W-1:0] top, bot;
  logic        [W-1:0] unused0, unused1, unused2;

  aad_unit #(.W(W)) u_top (.i0(win[0]), .i1(win[1]), .absdiff(unused0), .y(top));
  aad_unit #(.W(W)) u_bot (.i0(win[2]), .i1(win[3]), .absdiff(unused1), .y(bot));
  aad_unit #(.W(W)) u_out (.i0(top),    .i1(bot),    .absdiff(unused2), .y(y));
endmodule
