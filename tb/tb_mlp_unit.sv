// Test of the FC weight addressing: address k*10 + n0 + r + 256 and the row
// valid flags for both output tiles.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_mlp_unit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic [11:0] k;
  logic [3:0] n0;
  logic [7:0][14:0] waddr;
  logic [7:0] wvalid;
  mlp_unit #(.N(8), .NOUT(10), .BASE(256), .AW(15)) dut (.*);

  initial begin
    for (int t = 0; t < 2048; t++) begin
      k = 12'(t); n0 = (t % 2) ? 4'd8 : 4'd0;
      #1;
      for (int r = 0; r < 8; r++) begin
        `CHECK_EQ(int'(waddr[r]), (256 + t * 10 + int'(n0) + r) % 32768, "waddr")
        `CHECK_EQ(wvalid[r], 1'(int'(n0) + r < 10), "wvalid")
      end
    end
    `FINISH
  end
endmodule
