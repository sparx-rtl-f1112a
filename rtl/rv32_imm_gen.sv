// Immediate generation: extracts and sign-extends the I, S, B, U or J
// immediate selected by the opcode (the "InstrType").  Opcodes with no
// immediate, including the accelerator instruction, give the I-type field
// (for the accelerator this is imm[11:0] = key, challenge, signature).
// Standard RISC-V formats; combinational.
module rv32_imm_gen
  import rv32_pkg::*;
(
  input  logic [31:0] instr,
  output logic [31:0] imm
);
  always_comb begin
    unique case (instr[6:0])
      OP_STORE:        imm = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      OP_BRANCH:       imm = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
      OP_LUI, OP_AUIPC: imm = {instr[31:12], 12'b0};
      OP_JAL:          imm = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};
      default:         imm = {{20{instr[31]}}, instr[31:20]};
    endcase
  end
endmodule
