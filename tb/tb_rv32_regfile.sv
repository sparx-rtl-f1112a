// Test of the register file: random writes and reads on both ports against a
// shadow copy, x0 hard-wired to zero, write-through on a same-cycle read.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_regfile;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic rst_n, we;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  rv32_regfile dut (.*);
  logic [31:0] shadow [32];

  initial begin
    rst_n = 0; we = 0; ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      we = 1'($urandom_range(0, 1)); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = (t % 4 == 0) ? wa : 5'($urandom);
      #1;
      `CHECK_EQ(rd1, (ra1 == 0) ? 32'd0 : (we && wa == ra1) ? wd : shadow[ra1], "rd1")
      `CHECK_EQ(rd2, (ra2 == 0) ? 32'd0 : (we && wa == ra2) ? wd : shadow[ra2], "rd2")
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
    end
    `FINISH
  end
endmodule
