// ReLU activation with requantisation to a signed OUT_W-bit activation.
//
// y = 0 for x < 0, x for 0 <= x <= 2^(OUT_W-1)-1, and 2^(OUT_W-1)-1 above.
// The paper names the ReLU unit and 8-bit activations; the clipping is this
// design's choice.  Combinational.
module relu #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 8
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  localparam logic signed [IN_W-1:0] MAXV = IN_W'((1 << (OUT_W-1)) - 1);
  always_comb begin
    if (x < 0)         y = '0;
    else if (x > MAXV) y = MAXV[OUT_W-1:0];
    else               y = x[OUT_W-1:0];
  end
endmodule
