// AAD cell: the two-input element of the AAD pooling unit.
//
// The subtraction-absolute (SA) path forms d = I0 - I1, a threshold at 0
// gives its sign (+1 / -1), and multiplying d by that sign yields |d|; the
// divider halves it (absdiff = |d|/2, the SA output).  The cell result adds
// the pair to it: y = (I0 + I1 + |I0 - I1|) / 2, which equals max(I0, I1),
// so a tree of these cells pools like a max pool without a comparator-driven
// multiplexer.  The subtract / threshold / multiply / divide chain is the
// one drawn in the paper; the divisor (2) and the combination with the pair
// sum are this design's reading of "AAD", which the paper does not spell out.
// Signed W-bit operands, combinational.
module aad_unit #(
  parameter int unsigned W = 8
) (
  input  logic signed [W-1:0] i0,
  input  logic signed [W-1:0] i1,
  output logic        [W-1:0] absdiff,
  output logic signed [W-1:0] y
);
  logic signed [W:0]   d, sgn, mag;
  logic signed [W+1:0] tot;

  always_comb begin
    d   = (W+1)'(i0) - (W+1)'(i1);          // subtractor
    sgn = (d < 0) ? -(W+1)'(1) : (W+1)'(1); // threshold '0'
    mag = (W+1)'(d * sgn);                  // |d|
    absdiff = W'(mag >>> 1);                // divide by 2
    tot = (W+2)'(i0) + (W+2)'(i1) + (W+2)'(mag);
    y   = W'(tot >>> 1);
  end
endmodule
