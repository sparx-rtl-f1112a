// Exhaustive test of ReLU with clipping to the signed 8-bit range.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_relu;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [15:0] x;
  logic signed [7:0] y;
  relu #(.IN_W(16), .OUT_W(8)) dut (.x, .y);

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x = 16'(v);
      #1;
      `CHECK_EQ(int'(y), (v < 0) ? 0 : (v > 127 ? 127 : v), "relu")
    end
    `FINISH
  end
endmodule
