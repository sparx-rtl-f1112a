// Approximate logarithmic multiplier: first term P(0) of the Iterative
// Logarithmic Multiplier (ILM).
//
// Each operand N is split into its leading power of two and a residue,
// N = 2^k + r.  A leading-one detector finds 2^k, a priority encoder turns it
// into k, and an XOR of N with 2^k gives r = N - 2^k.  Then
//   P(0) = 2^(k1+k2) + r1*2^k2 + r2*2^k1
// using a decoder for 2^(k1+k2), two left barrel shifters and adders.  The
// term r1*r2 that an exact product would also contain is dropped, so the
// result never exceeds the exact product.  The structure is the one drawn in
// the paper; no correction iterations are built (only P(0) is shown there),
// and an operand of 0 forces the product to 0 (this design's choice, since a
// leading-one detector has nothing to find).
//
// Purely combinational, unsigned W x W -> 2W.
module ilm_mult #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0]   n1,
  input  logic [W-1:0]   n2,
  output logic [2*W-1:0] p
);
  localparam int unsigned KW = $clog2(W);

  logic [W-1:0]  lod1, lod2;     // one-hot leading one
  logic [KW-1:0] k1, k2;         // priority encoder outputs
  logic [W-1:0]  r1, r2;         // residues N - 2^k
  logic [2*W-1:0] pow, sh1, sh2;

  always_comb begin
    lod1 = '0; lod2 = '0; k1 = '0; k2 = '0;
    for (int i = 0; i < int'(W); i++) begin
      if (n1[i]) begin lod1 = W'(1) << i; k1 = KW'(i); end
      if (n2[i]) begin lod2 = W'(1) << i; k2 = KW'(i); end
    end
    r1  = n1 ^ lod1;
    r2  = n2 ^ lod2;
    pow = (2*W)'(1) << ({1'b0, k1} + {1'b0, k2}); // decoder
    sh1 = (2*W)'(r1) << k2;                // (N1-2^k1)*2^k2
    sh2 = (2*W)'(r2) << k1;                // (N2-2^k2)*2^k1
    p   = (n1 == '0 || n2 == '0) ? '0 : pow + sh1 + sh2;
  end
endmodule
