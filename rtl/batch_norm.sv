// Folded batch normalisation of one accumulator value.
//
// y = sat16(((acc * scale) >>> SHIFT) + bias), with a signed 16-bit scale
// and bias per output channel read from the bias bank.  The paper only names
// a batch-norm unit; this fixed-point affine form and the SHIFT of 8 are
// this design's choice.  Combinational.
module batch_norm #(
  parameter int unsigned W     = 16,
  parameter int unsigned SHIFT = 8
) (
  input  logic signed [W-1:0] acc,
  input  logic signed [W-1:0] scale,
  input  logic signed [W-1:0] bias,
  output logic signed [W-1:0] y
);
  localparam logic signed [2*W:0] YMAX = (2*W+1)'((1 << (W-1)) - 1);
  localparam logic signed [2*W:0] YMIN = -(2*W+1)'(1 << (W-1));
  logic signed [2*W-1:0] prod;
  logic signed [2*W:0]   s;

  always_comb begin
    prod = (2*W)'(acc) * (2*W)'(scale);
    s    = (2*W+1)'(prod >>> SHIFT) + (2*W+1)'(bias);
    if (s > YMAX)      y = YMAX[W-1:0];
    else if (s < YMIN) y = YMIN[W-1:0];
    else               y = s[W-1:0];
  end
endmodule
