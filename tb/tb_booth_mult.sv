// Exhaustive test of the radix-4 Booth multiplier against the signed product.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_booth_mult;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [7:0] a, b;
  logic signed [15:0] p;
  booth_mult #(.W(8)) dut (.a, .b, .p);

  initial begin
    for (int i = -128; i < 128; i++) begin
      for (int j = -128; j < 128; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        `CHECK_EQ(int'(p), i * j, $sformatf("booth %0d*%0d", i, j))
      end
    end
    `FINISH
  end
endmodule
