// Test of the compressed-instruction expander.  Every RV32C form is built
// with random registers and immediates by the compressed encoders of the
// test assembler and must expand to the 32-bit instruction the assembler
// builds for the same operation.  Reserved and illegal encodings must raise
// illegal and give the all-zero word.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_rvc_expand;
  import tb_rv32_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic [15:0] cinstr;
  logic [31:0] instr;
  logic        illegal;
  rv32_rvc_expand dut (.*);

  task automatic t(logic [15:0] c, logic [31:0] e, string name);
    cinstr = c; #1;
    `CHECK_EQ(instr, e, name)
    `CHECK_EQ(illegal, 1'b0, {name, " legal"})
  endtask
  task automatic bad(logic [15:0] c, string name);
    cinstr = c; #1;
    `CHECK(illegal && instr == 32'd0, name)
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int rp, rq, r, r2, i6, nz6, sh, u;
      rp = $urandom_range(8, 15); rq = $urandom_range(8, 15);
      r  = $urandom_range(1, 31); r2 = $urandom_range(1, 31);
      i6 = $urandom_range(0, 63) - 32; sh = $urandom_range(1, 31);
      nz6 = (i6 == 0) ? 1 : i6;
      u = 4 * $urandom_range(1, 255);
      t(c_addi4spn(rp, u), addi(rp, 2, u), "c.addi4spn");
      u = 4 * $urandom_range(0, 31);
      t(c_lw(rp, rq, u), lw(rp, rq, u), "c.lw");
      t(c_sw(rp, rq, u), sw(rp, rq, u), "c.sw");
      t(c_addi(r, i6), addi(r, r, i6), "c.addi");
      t(c_li(r, i6), addi(r, 0, i6), "c.li");
      if (r != 2) t(c_lui(r, nz6), lui(r, nz6 & 'hfffff), "c.lui");
      u = 16 * ($urandom_range(0, 63) - 32); if (u == 0) u = 16;
      t(c_addi16sp(u), addi(2, 2, u), "c.addi16sp");
      u = 2 * ($urandom_range(0, 2047) - 1024);
      t(c_jal(u), jal(1, u), "c.jal");
      t(c_j(u), jal(0, u), "c.j");
      t(c_srli(rp, sh), srli(rp, rp, sh), "c.srli");
      t(c_srai(rp, sh), srai(rp, rp, sh), "c.srai");
      t(c_andi(rp, i6), andi(rp, rp, i6), "c.andi");
      t(c_alu(0, rp, rq), sub(rp, rp, rq), "c.sub");
      t(c_alu(1, rp, rq), xor_r(rp, rp, rq), "c.xor");
      t(c_alu(2, rp, rq), or_r(rp, rp, rq), "c.or");
      t(c_alu(3, rp, rq), and_r(rp, rp, rq), "c.and");
      u = 2 * ($urandom_range(0, 255) - 128);
      t(c_beqz(rp, u), beq(rp, 0, u), "c.beqz");
      t(c_bnez(rp, u), bne(rp, 0, u), "c.bnez");
      t(c_slli(r, sh), slli(r, r, sh), "c.slli");
      u = 4 * $urandom_range(0, 63);
      t(c_lwsp(r, u), lw(r, 2, u), "c.lwsp");
      t(c_swsp(r2, u), sw(r2, 2, u), "c.swsp");
      t(c_jr(r), jalr(0, r, 0), "c.jr");
      t(c_jalr(r), jalr(1, r, 0), "c.jalr");
      t(c_mv(r, r2), add(r, 0, r2), "c.mv");
      t(c_add(r, r2), add(r, r, r2), "c.add");
    end
    t(c_ebreak(), ebreak(), "c.ebreak");
    t(16'h0001, addi(0, 0, 0), "c.nop");
    bad(16'h0000, "all-zero halfword");
    bad(c_addi4spn(8, 0), "c.addi4spn with zero immediate");
    bad(c_lui(5, 0), "c.lui with zero immediate");
    bad(c_addi16sp(0), "c.addi16sp with zero immediate");
    bad(c_lwsp(0, 8), "c.lwsp to x0");
    bad(c_jr(0), "c.jr x0");
    bad(c_srli(8, 3) | 16'h1000, "c.srli shamt[5]");
    bad(c_slli(3, 3) | 16'h1000, "c.slli shamt[5]");
    bad(16'h2000, "c.fld (quadrant 0, funct3 001)");
    bad(16'h6002, "c.flwsp (quadrant 2, funct3 011)");
    bad(16'h0013, "not a compressed instruction");
    `FINISH
  end
endmodule
