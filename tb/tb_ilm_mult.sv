// Exhaustive test of the ILM approximate multiplier: for every pair of 8-bit
// operands the result must equal the exact product minus the dropped term
// (N1 - 2^k1) * (N2 - 2^k2), and 0 when an operand is 0.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_ilm_mult;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic [7:0] n1, n2;
  logic [15:0] p;
  ilm_mult #(.W(8)) dut (.n1, .n2, .p);

  function automatic int lead_pow(int v);
    int q = 1;
    while (q * 2 <= v) q = q * 2;
    return q;
  endfunction

  initial begin
    for (int a = 0; a < 256; a++) begin
      for (int b = 0; b < 256; b++) begin
        int expv;
        n1 = 8'(a); n2 = 8'(b);
        #1;
        if (a == 0 || b == 0) expv = 0;
        else expv = a * b - (a - lead_pow(a)) * (b - lead_pow(b));
        `CHECK_EQ(int'(p), expv, $sformatf("ilm %0d*%0d", a, b))
      end
    end
    // spot values worked out by hand: 3*3 -> 8, 7*5 -> 32, 128*128 -> 16384
    n1 = 3; n2 = 3; #1; `CHECK_EQ(p, 16'd8, "3*3")
    n1 = 7; n2 = 5; #1; `CHECK_EQ(p, 16'd32, "7*5")
    n1 = 128; n2 = 128; #1; `CHECK_EQ(p, 16'd16384, "128*128")
    `FINISH
  end
endmodule
