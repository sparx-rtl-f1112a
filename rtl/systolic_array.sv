// N x N output-stationary systolic array of MAC processing elements.
//
// Row r receives a weight stream (output channel r) at its left edge and
// column c receives an input stream (output pixel c) at its top edge.  The
// caller presents, per cycle, one aligned k-step: w_vec[r] = W[k][r] and
// x_vec[c] = X[c][k] together with valid (and clr on the first step of a
// tile).  Skew registers inside the array delay row r by r cycles and column
// c by c cycles, so that PE(r,c) meets W[k][r] and X[c][k] in the same cycle
// and accumulates sum_k W[k][r]*X[c][k] in acc[r][c].  The valid/clr flags
// travel with the weights.
//
// Timing: the contribution of a step presented in cycle t is in acc[r][c]
// at the end of cycle t + r + c + 2 (r or c skew stages, c or r PE operand
// registers on the way, the PE's own operand register, then its
// accumulator); the whole array has settled LATENCY = 2N cycles after the
// cycle of the last step.  The 8x8 size follows the paper;
// the output-stationary dataflow and the internal skew are this design's
// choice.
module systolic_array #(
  parameter int unsigned N     = 8,
  parameter int unsigned W     = 8,
  parameter int unsigned ACC_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          approx,
  input  logic                          valid,
  input  logic                          clr,
  input  logic signed [N-1:0][W-1:0]    w_vec,
  input  logic signed [N-1:0][W-1:0]    x_vec,
  output logic signed [N-1:0][N-1:0][ACC_W-1:0] acc
);
  localparam int unsigned LATENCY = 2*N;

  // skew lines: row r delayed by r, column c delayed by c
  logic signed [N-1:0][N-1:0][W-1:0] wsk, xsk;
  logic        [N-1:0][N-1:0]        vsk, csk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsk <= '0; xsk <= '0; vsk <= '0; csk <= '0;
    end else begin
      for (int i = 0; i < int'(N); i++) begin
        wsk[i][0] <= w_vec[i];
        xsk[i][0] <= x_vec[i];
        vsk[i][0] <= valid;
        csk[i][0] <= clr;
        for (int d = 1; d < int'(N); d++) begin
          wsk[i][d] <= wsk[i][d-1];
          xsk[i][d] <= xsk[i][d-1];
          vsk[i][d] <= vsk[i][d-1];
          csk[i][d] <= csk[i][d-1];
        end
      end
    end
  end

  // edge operands: index 0 is the undelayed input, index d>0 the skew stage d-1
  logic signed [N-1:0][W-1:0] w_edge, x_edge;
  logic        [N-1:0]        v_edge, c_edge;
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      if (i == 0) begin
        w_edge[i] = w_vec[i]; x_edge[i] = x_vec[i]; v_edge[i] = valid; c_edge[i] = clr;
      end else begin
        w_edge[i] = wsk[i][i-1]; x_edge[i] = xsk[i][i-1];
        v_edge[i] = vsk[i][i-1]; c_edge[i] = csk[i][i-1];
      end
    end
  end

  // horizontal (weight, valid, clr) and vertical (input) links
  logic signed [N-1:0][N:0][W-1:0] wh;
  logic        [N-1:0][N:0]        vh, ch;
  logic signed [N:0][N-1:0][W-1:0] xv;

  for (genvar r = 0; r < N; r++) begin : g_row
    assign wh[r][0] = w_edge[r];
    assign vh[r][0] = v_edge[r];
    assign ch[r][0] = c_edge[r];
  end
  for (genvar c = 0; c < N; c++) begin : g_colin
    assign xv[0][c] = x_edge[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < N; c++) begin : g_c
      mac_pe #(.W(W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .approx,
        .valid_in (vh[r][c]),   .clr_in (ch[r][c]),
        .w_in     (wh[r][c]),   .x_in   (xv[r][c]),
        .valid_out(vh[r][c+1]), .clr_out(ch[r][c+1]),
        .w_out    (wh[r][c+1]), .x_out  (xv[r+1][c]),
        .mac_out  (acc[r][c])
      );
    end
  end
endmodule
