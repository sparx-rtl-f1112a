// Random test of the batch-norm unit against a wide-integer model with
// saturation to 16 bits.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_batch_norm;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic signed [15:0] acc, scale, bias, y;
  batch_norm #(.W(16), .SHIFT(8)) dut (.acc, .scale, .bias, .y);

  initial begin
    for (int t = 0; t < 20000; t++) begin
      longint e;
      acc = 16'($urandom); scale = 16'($urandom); bias = 16'($urandom);
      if (t % 2 == 0) begin acc = 16'($urandom_range(0, 2000)) - 16'sd1000; scale = 16'($urandom_range(0, 255)); end
      #1;
      e = ((longint'(acc) * longint'(scale)) >>> 8) + longint'(bias);
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      `CHECK_EQ(longint'(y), e, "bn")
    end
    `FINISH
  end
endmodule
