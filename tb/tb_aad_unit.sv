// Exhaustive test of the AAD cell: y must be the larger operand and absdiff
// half the absolute difference (rounded down).
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_aad_unit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [7:0] i0, i1, y;
  logic [7:0] absdiff;
  aad_unit #(.W(8)) dut (.i0, .i1, .absdiff, .y);

  initial begin
    for (int a = -128; a < 128; a++) begin
      for (int b = -128; b < 128; b++) begin
        int d;
        i0 = 8'(a); i1 = 8'(b);
        #1;
        d = (a > b) ? a - b : b - a;
        `CHECK_EQ(int'(y), (a > b ? a : b), $sformatf("aad max %0d %0d", a, b))
        `CHECK_EQ(int'(absdiff), (d / 2) & 255, $sformatf("aad absdiff %0d %0d", a, b))
      end
    end
    `FINISH
  end
endmodule
