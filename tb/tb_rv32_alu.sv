// Random and corner-case test of the RV32IM ALU against 64-bit reference
// arithmetic, including division by zero and signed overflow.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_alu;
  import rv32_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  alu_op_e op;
  logic [31:0] a, b, y;
  rv32_alu dut (.*);

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx, sz; longint unsigned ux, uz;
    sx = longint'($signed(x)); sz = longint'($signed(z)); ux = {32'b0, x}; uz = {32'b0, z};
    case (o)
      ALU_ADD: return x + z;
      ALU_SUB: return x - z;
      ALU_SLL: return x << z[4:0];
      ALU_SLT: return (sx < sz) ? 1 : 0;
      ALU_SLTU: return (ux < uz) ? 1 : 0;
      ALU_XOR: return x ^ z;
      ALU_SRL: return x >> z[4:0];
      ALU_SRA: return 32'(sx >>> z[4:0]);
      ALU_OR: return x | z;
      ALU_AND: return x & z;
      ALU_PASSB: return z;
      ALU_MUL: return 32'(sx * sz);
      ALU_MULH: return 32'((sx * sz) >>> 32);
      ALU_MULHSU: return 32'((sx * longint'(uz)) >>> 32);
      ALU_MULHU: return 32'((ux * uz) >> 32);
      ALU_DIV: return (z == 0) ? 32'hffffffff : 32'(sx / sz);
      ALU_DIVU: return (z == 0) ? 32'hffffffff : 32'(ux / uz);
      ALU_REM: return (z == 0) ? x : 32'(sx % sz);
      ALU_REMU: return (z == 0) ? x : 32'(ux % uz);
      default: return 0;
    endcase
  endfunction

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffffffff, 32'h80000000, 32'h7fffffff, 32'h12345678};
    for (int o = 0; o <= int'(ALU_REMU); o++) begin
      op = alu_op_e'(o);
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) begin
          a = corner[i]; b = corner[j]; #1;
          `CHECK_EQ(y, model(op, a, b), $sformatf("%s corner", op.name()))
        end
      for (int t = 0; t < 2000; t++) begin
        a = $urandom; b = (t % 5 == 0) ? 32'($urandom_range(0, 9)) : $urandom; #1;
        `CHECK_EQ(y, model(op, a, b), $sformatf("%s random", op.name()))
      end
    end
    `FINISH
  end
endmodule
