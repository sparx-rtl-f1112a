// Exact signed multiplier, radix-4 (modified) Booth.
//
// The multiplier b is recoded into W/2 digits in {-2,-1,0,1,2}, each digit
// taken from three overlapping bits b[2i+1], b[2i], b[2i-1].  Each digit
// selects 0, +-a or +-2a as a partial product, shifted by 2i, and the partial
// products are summed.  This is the exact datapath used when the mode bit
// b = 0; the paper names a radix-4 Booth MAC as its accurate design, and the
// recoding shown here is the standard one.  Combinational, signed W x W -> 2W,
// W even.
module booth_mult #(
  parameter int unsigned W = 8
) (
  input  logic signed [W-1:0]   a,
  input  logic signed [W-1:0]   b,
  output logic signed [2*W-1:0] p
);
  logic [W:0]            bx;     // b with an appended 0 below the LSB
  logic signed [2*W-1:0] ax, pp, acc;
  logic [2:0]            trip;

  always_comb begin
    bx  = {b, 1'b0};
    ax  = (2*W)'(a);
    acc = '0;
    for (int i = 0; i < int'(W/2); i++) begin
      trip = bx[2*i +: 3];
      unique case (trip)
        3'b001, 3'b010: pp = ax;
        3'b011:         pp = ax <<< 1;
        3'b100:         pp = -(ax <<< 1);
        3'b101, 3'b110: pp = -ax;
        default:        pp = '0;
      endcase
      acc = acc + (pp <<< (2*i));
    end
    p = acc;
  end
endmodule
