// Random test of argmax, including ties (lowest index wins).
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_argmax;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [9:0][15:0] scores;
  logic [3:0] idx;
  argmax #(.NCLS(10), .W(16)) dut (.scores, .idx);

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int best, bi;
      for (int i = 0; i < 10; i++)
        scores[i] = (t % 3 == 0) ? 16'($urandom_range(0, 3)) - 16'sd2 : 16'($urandom);
      #1;
      best = int'($signed(scores[0])); bi = 0;
      for (int i = 1; i < 10; i++) if (int'($signed(scores[i])) > best) begin best = int'($signed(scores[i])); bi = i; end
      `CHECK_EQ(int'(idx), bi, "argmax")
    end
    `FINISH
  end
endmodule
