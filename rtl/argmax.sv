// Argmax over NCLS signed class scores.
//
// Scans the scores from index 0 upward and keeps the first strictly larger
// value, so ties resolve to the lowest index.  The 4-bit index is the class
// result that the privacy logic may perturb.  The paper names an argmax
// unit; the tie rule is this design's choice.  Combinational.
module argmax #(
  parameter int unsigned NCLS = 10,
  parameter int unsigned W    = 16
) (
  input  logic signed [NCLS-1:0][W-1:0] scores,
  output logic        [3:0]             idx
);
  logic signed [W-1:0] best;
  always_comb begin
    best = $signed(scores[0]);
    idx  = '0;
    for (int i = 1; i < int'(NCLS); i++) begin
      if ($signed(scores[i]) > best) begin
        best = $signed(scores[i]);
        idx  = 4'(i);
      end
    end
  end
endmodule
