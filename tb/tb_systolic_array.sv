// Test of the 8x8 systolic array: random K-step matrix products in exact and
// approximate mode compared with a reference C[r][c] = sum_k W[k][r]*X[c][k]
// after the documented latency of 2N cycles, and a check that the last
// step has not yet reached PE(N-1,N-1) one cycle earlier.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_systolic_array;
  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic rst_n, approx, valid, clr;
  logic signed [N-1:0][7:0] w_vec, x_vec;
  logic signed [N-1:0][N-1:0][15:0] acc;

  systolic_array #(.N(N), .W(8), .ACC_W(16)) dut (.*);

  function automatic int lead_pow(int v);
    int q = 1;
    while (q * 2 <= v) q = q * 2;
    return q;
  endfunction
  function automatic int ref_prod(int w, int x, bit ap);
    int aw, ax, m;
    if (!ap) return w * x;
    aw = (w < 0) ? -w : w;
    ax = (x < 0) ? -x : x;
    if (aw == 0 || ax == 0) m = 0;
    else m = aw * ax - (aw - lead_pow(aw)) * (ax - lead_pow(ax));
    return ((w < 0) != (x < 0)) ? -m : m;
  endfunction

  int wm [64][N];
  int xm [N][64];
  int cref [N][N];

  initial begin
    rst_n = 0; approx = 0; valid = 0; clr = 0; w_vec = '0; x_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int K;
      K = 5 + trial * 9;
      approx = 1'(trial % 2);
      for (int k = 0; k < K; k++) begin
        for (int i = 0; i < N; i++) begin
          wm[k][i] = $urandom_range(0, 30) - 15;
          xm[i][k] = $urandom_range(0, 127);
        end
      end
      // the last step must change every accumulator
      for (int i = 0; i < N; i++) begin wm[K-1][i] = 3; xm[i][K-1] = 5; end
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          cref[r][c] = 0;
          for (int k = 0; k < K; k++) cref[r][c] += ref_prod(wm[k][r], xm[c][k], approx);
        end
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        valid = 1; clr = (k == 0);
        for (int i = 0; i < N; i++) begin w_vec[i] = 8'(wm[k][i]); x_vec[i] = 8'(xm[i][k]); end
      end
      @(negedge clk);
      valid = 0; clr = 0; w_vec = '0; x_vec = '0;
      // the last step was presented in the previous cycle; 2N-1 cycles later
      // PE(N-1,N-1) does not yet hold it, 2N cycles later it does
      repeat (2*N - 2) @(negedge clk);
      `CHECK(int'($signed(acc[N-1][N-1])) != cref[N-1][N-1], "PE(N-1,N-1) done too early")
      `CHECK_EQ(int'($signed(acc[0][0])), cref[0][0], "PE(0,0) done")
      @(negedge clk);
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          `CHECK_EQ(int'($signed(acc[r][c])), cref[r][c], $sformatf("trial %0d acc[%0d][%0d]", trial, r, c))
    end
    `FINISH
  end
endmodule
