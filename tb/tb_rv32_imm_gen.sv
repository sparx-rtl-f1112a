// Test of immediate generation: random immediates are encoded into I, S, B,
// U and J instructions by the assembler functions and must come back out.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_imm_gen;
  import tb_rv32_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic [31:0] instr, imm;
  rv32_imm_gen dut (.*);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int i12, i13, i21, u20;
      i12 = $urandom_range(0, 4095) - 2048;
      i13 = ($urandom_range(0, 4095) - 2048) * 2;
      i21 = ($urandom_range(0, 1048575) - 524288) * 2;
      u20 = $urandom_range(0, 1048575);
      instr = addi(1, 2, i12); #1; `CHECK_EQ(imm, 32'(i12), "I")
      instr = lw(1, 2, i12);   #1; `CHECK_EQ(imm, 32'(i12), "I load")
      instr = sw(1, 2, i12);   #1; `CHECK_EQ(imm, 32'(i12), "S")
      instr = beq(1, 2, i13);  #1; `CHECK_EQ(imm, 32'(i13), "B")
      instr = lui(3, u20);     #1; `CHECK_EQ(imm, 32'(u20) << 12, "U")
      instr = auipc(3, u20);   #1; `CHECK_EQ(imm, 32'(u20) << 12, "U auipc")
      instr = jal(1, i21);     #1; `CHECK_EQ(imm, 32'(i21), "J")
      instr = sparx(1, 2, 5, 10, 6, 9); #1; `CHECK_EQ(imm, 32'hfffffa69, "sparx fields")
    end
    `FINISH
  end
endmodule
