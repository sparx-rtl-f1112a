// Instruction decoder ("Ctrl") of the RV32IMC pipeline; compressed forms
// reach it already expanded to their 32-bit equivalents.
//
// Maps an instruction word to the control bundle ctrl_t: register write,
// memory read/write, branch / jump kind, operand selection, ALU operation
// and write-back source.  Opcode 7'b1111011 decodes as the accelerator
// instruction (accl = 1, result written to rd from the accelerator, rs1
// read); ECALL and EBREAK decode as halt.  FENCE is a no-op.  Anything else
// is flagged illegal and executes as a no-op.  Combinational.  The RV32IM
// encodings are the standard ones; halt-on-ECALL/EBREAK is this design's
// simplification (no CSRs or traps).
module rv32_ctrl
  import rv32_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc, f7;
  logic [2:0] f3;
  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];

  always_comb begin
    ctrl = '0;
    ctrl.alu_op = ALU_ADD;
    ctrl.wb_sel = WB_ALU;
    unique case (opc)
      OP_LUI:   begin ctrl.reg_write = 1; ctrl.op2_imm = 1; ctrl.alu_op = ALU_PASSB; end
      OP_AUIPC: begin ctrl.reg_write = 1; ctrl.op1_pc = 1; ctrl.op2_imm = 1; end
      OP_JAL:   begin ctrl.reg_write = 1; ctrl.jal = 1; ctrl.wb_sel = WB_PC4; end
      OP_JALR:  begin ctrl.reg_write = 1; ctrl.jalr = 1; ctrl.use_rs1 = 1; ctrl.wb_sel = WB_PC4; end
      OP_BRANCH: begin
        ctrl.branch = 1; ctrl.use_rs1 = 1; ctrl.use_rs2 = 1;
        ctrl.illegal = (f3 == 3'b010) || (f3 == 3'b011);
      end
      OP_LOAD: begin
        ctrl.reg_write = 1; ctrl.mem_read = 1; ctrl.use_rs1 = 1; ctrl.op2_imm = 1;
        ctrl.wb_sel = WB_MEM;
        ctrl.illegal = !(f3 inside {3'b000, 3'b001, 3'b010, 3'b100, 3'b101});
      end
      OP_STORE: begin
        ctrl.mem_write = 1; ctrl.use_rs1 = 1; ctrl.use_rs2 = 1; ctrl.op2_imm = 1;
        ctrl.illegal = !(f3 inside {3'b000, 3'b001, 3'b010});
      end
      OP_IMM: begin
        ctrl.reg_write = 1; ctrl.use_rs1 = 1; ctrl.op2_imm = 1;
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          3'b001: ctrl.alu_op = ALU_SLL;
          default: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
        endcase
      end
      OP_REG: begin
        ctrl.reg_write = 1; ctrl.use_rs1 = 1; ctrl.use_rs2 = 1;
        if (f7 == 7'b0000001) begin
          unique case (f3)
            3'b000: ctrl.alu_op = ALU_MUL;
            3'b001: ctrl.alu_op = ALU_MULH;
            3'b010: ctrl.alu_op = ALU_MULHSU;
            3'b011: ctrl.alu_op = ALU_MULHU;
            3'b100: ctrl.alu_op = ALU_DIV;
            3'b101: ctrl.alu_op = ALU_DIVU;
            3'b110: ctrl.alu_op = ALU_REM;
            default: ctrl.alu_op = ALU_REMU;
          endcase
        end else begin
          unique case (f3)
            3'b000: ctrl.alu_op = instr[30] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl.alu_op = ALU_SLL;
            3'b010: ctrl.alu_op = ALU_SLT;
            3'b011: ctrl.alu_op = ALU_SLTU;
            3'b100: ctrl.alu_op = ALU_XOR;
            3'b101: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl.alu_op = ALU_OR;
            default: ctrl.alu_op = ALU_AND;
          endcase
        end
      end
      OP_ACCEL:  begin ctrl.reg_write = 1; ctrl.accl = 1; ctrl.use_rs1 = 1; ctrl.wb_sel = WB_ACC; end
      OP_FENCE:  ;
      OP_SYSTEM: ctrl.halt = (f3 == 3'b000);
      default:   ctrl.illegal = 1;
    endcase
    if (ctrl.illegal) begin
      ctrl.reg_write = 0; ctrl.mem_read = 0; ctrl.mem_write = 0; ctrl.branch = 0;
    end
  end
endmodule
