// Test of the noise injector: the LFSR sequence against x^4+x^3+1 from the
// seed 4'h9 (period 15, never zero), and sec_res = result ^ noise loaded only
// while inject_noise is high.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_lfsr_noise;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(10000)

  logic rst_n, inject_noise;
  logic [3:0] result, noise, sec_res;
  lfsr_noise #(.W(4), .SEED(4'h9)) dut (.*);

  initial begin
    logic [3:0] q, exp_res;
    int seen;
    rst_n = 0; inject_noise = 0; result = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    q = 4'h9; exp_res = 0; seen = 0;
    for (int t = 0; t < 200; t++) begin
      `CHECK_EQ(noise, q, "lfsr state")
      `CHECK(noise != 0, "lfsr never zero")
      if (t > 0 && q == 4'h9) seen++;
      inject_noise = ($urandom_range(0, 2) == 0);
      result = 4'($urandom);
      @(posedge clk);
      if (inject_noise) exp_res = result ^ q;
      q = {q[2:0], q[3] ^ q[2]};
      @(negedge clk);
      `CHECK_EQ(sec_res, exp_res, "sec_res")
    end
    `CHECK_EQ(seen, 13, "period 15 (seed seen 13 more times in 200 steps)")
    `FINISH
  end
endmodule
