// Test of the branch unit: all six conditions on random and equal operands.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_branch_unit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic [2:0] funct3;
  logic [31:0] op1, op2;
  logic taken;
  rv32_branch_unit dut (.*);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      bit e;
      op1 = $urandom; op2 = (t % 4 == 0) ? op1 : (t % 4 == 1) ? ~op1 : $urandom;
      for (int f = 0; f < 8; f++) begin
        funct3 = 3'(f); #1;
        case (f)
          0: e = op1 == op2;
          1: e = op1 != op2;
          4: e = $signed(op1) < $signed(op2);
          5: e = $signed(op1) >= $signed(op2);
          6: e = op1 < op2;
          7: e = op1 >= op2;
          default: e = 0;
        endcase
        `CHECK_EQ(taken, e, $sformatf("funct3 %0d", f))
      end
    end
    `FINISH
  end
endmodule
