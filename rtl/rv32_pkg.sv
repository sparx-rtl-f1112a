// Shared types of the RV32IMC pipeline: opcodes, ALU operations, the decoded
// control bundle carried down the pipeline, and the pipeline-register
// structs.  Encodings are those of the RISC-V base ISA and M extension
// (compressed instructions are expanded to these in fetch), plus
// the accelerator opcode 7'b1111011 (custom-3).
package rv32_pkg;

  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;
  localparam logic [6:0] OP_ACCEL  = 7'b1111011;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_PASSB,
    ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU, ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU
  } alu_op_e;

  typedef enum logic [1:0] { WB_ALU, WB_MEM, WB_PC4, WB_ACC } wb_sel_e;

  typedef struct packed {
    logic    reg_write;
    logic    mem_read;
    logic    mem_write;
    logic    branch;
    logic    jal;
    logic    jalr;
    logic    op1_pc;       // operand 1 is the PC (AUIPC)
    logic    op2_imm;      // operand 2 is the immediate
    logic    use_rs1;
    logic    use_rs2;
    logic    accl;         // custom accelerator instruction
    logic    halt;         // ECALL / EBREAK
    logic    illegal;
    alu_op_e alu_op;
    wb_sel_e wb_sel;
  } ctrl_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;        // expanded when compressed
    logic        is_c;         // fetched as a 16-bit instruction
  } if_id_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic [31:0] pc;
    logic [31:0] instr;
    logic [31:0] rs1v;
    logic [31:0] rs2v;
    logic [31:0] imm;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [2:0]  funct3;
    logic        is_c;
  } id_ex_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic [31:0] result;
    logic [31:0] store_data;
    logic [4:0]  rd;
    logic [2:0]  funct3;
  } ex_mem_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic [31:0] wb_data;
    logic [4:0]  rd;
  } mem_wb_t;

endpackage
