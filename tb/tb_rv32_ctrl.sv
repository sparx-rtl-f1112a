// Test of the decoder on one instruction of each class: write enable,
// memory access, jump/branch kind, operand selection, ALU operation,
// write-back source, the accelerator opcode, halt and an illegal opcode.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_ctrl;
  import rv32_pkg::*;
  import tb_rv32_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic [31:0] instr;
  ctrl_t ctrl;
  rv32_ctrl dut (.*);

  initial begin
    instr = add(1, 2, 3); #1;
    `CHECK(ctrl.reg_write && !ctrl.op2_imm && ctrl.alu_op == ALU_ADD && ctrl.use_rs2, "add")
    instr = sub(1, 2, 3); #1;  `CHECK_EQ(ctrl.alu_op, ALU_SUB, "sub")
    instr = mul(1, 2, 3); #1;  `CHECK_EQ(ctrl.alu_op, ALU_MUL, "mul")
    instr = div(1, 2, 3); #1;  `CHECK_EQ(ctrl.alu_op, ALU_DIV, "div")
    instr = rem(1, 2, 3); #1;  `CHECK_EQ(ctrl.alu_op, ALU_REM, "rem")
    instr = srai(1, 2, 3); #1; `CHECK(ctrl.alu_op == ALU_SRA && ctrl.op2_imm, "srai")
    instr = slli(1, 2, 3); #1; `CHECK_EQ(ctrl.alu_op, ALU_SLL, "slli")
    instr = andi(1, 2, 3); #1; `CHECK_EQ(ctrl.alu_op, ALU_AND, "andi")
    instr = lw(1, 2, 4); #1;
    `CHECK(ctrl.mem_read && ctrl.reg_write && ctrl.wb_sel == WB_MEM && ctrl.op2_imm, "lw")
    instr = sw(1, 2, 4); #1;
    `CHECK(ctrl.mem_write && !ctrl.reg_write && ctrl.use_rs2, "sw")
    instr = beq(1, 2, 8); #1;  `CHECK(ctrl.branch && !ctrl.reg_write, "beq")
    instr = jal(1, 8); #1;     `CHECK(ctrl.jal && ctrl.wb_sel == WB_PC4 && ctrl.reg_write, "jal")
    instr = jalr(1, 2, 0); #1; `CHECK(ctrl.jalr && ctrl.use_rs1 && ctrl.wb_sel == WB_PC4, "jalr")
    instr = lui(1, 5); #1;     `CHECK(ctrl.alu_op == ALU_PASSB && ctrl.op2_imm && ctrl.reg_write, "lui")
    instr = auipc(1, 5); #1;   `CHECK(ctrl.op1_pc && ctrl.op2_imm && ctrl.alu_op == ALU_ADD, "auipc")
    instr = sparx(5, 6, 3, 1, 2, 3); #1;
    `CHECK(ctrl.accl && ctrl.reg_write && ctrl.use_rs1 && ctrl.wb_sel == WB_ACC && !ctrl.mem_read, "sparx")
    instr = ebreak(); #1;      `CHECK(ctrl.halt && !ctrl.reg_write, "ebreak")
    instr = 32'h0000_007f; #1; `CHECK(ctrl.illegal && !ctrl.reg_write && !ctrl.mem_write, "illegal")
    instr = 32'h0000_2063; #1; `CHECK(ctrl.illegal && !ctrl.branch, "illegal branch funct3")
    `FINISH
  end
endmodule
