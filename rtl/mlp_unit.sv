// Fully-connected (MLP) weight addressing for one tile of the systolic array.
//
// The FC weights are stored as [k][n] (NOUT outputs per feature) from BASE
// in the weight bank.  For feature k and a tile whose first output is n0,
// row r of the array needs weight W[k][n0+r] at BASE + k*NOUT + n0 + r;
// rows with n0+r >= NOUT are flagged invalid and fed 0.  The paper names an
// MLP unit; the single FC layer and this layout are this design's choice.
// Combinational.
module mlp_unit #(
  parameter int unsigned N    = 8,
  parameter int unsigned NOUT = 10,
  parameter int unsigned BASE = 256,
  parameter int unsigned AW   = 15
) (
  input  logic [11:0]            k,
  input  logic [3:0]             n0,
  output logic [N-1:0][AW-1:0]   waddr,
  output logic [N-1:0]           wvalid
);
  always_comb begin
    for (int r = 0; r < int'(N); r++) begin
      waddr[r]  = AW'(BASE + 32'(k) * NOUT + 32'(n0) + r);
      wvalid[r] = (32'(n0) + r) < NOUT;
    end
  end
endmodule
