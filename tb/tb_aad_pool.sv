// Random test of the 2x2 AAD pool: the result must be the window maximum.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_aad_pool;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [3:0][7:0] win;
  logic signed [7:0] y;
  aad_pool #(.W(8)) dut (.win, .y);

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int m;
      for (int i = 0; i < 4; i++) win[i] = 8'($urandom);
      if (t < 4) begin win = '0; win[t] = 8'sd5; end
      #1;
      m = -1000;
      for (int i = 0; i < 4; i++) if (int'($signed(win[i])) > m) m = int'($signed(win[i]));
      `CHECK_EQ(int'(y), m, "pool max")
    end
    `FINISH
  end
endmodule
