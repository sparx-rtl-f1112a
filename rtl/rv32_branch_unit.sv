// Branch unit: evaluates the condition of BEQ, BNE, BLT, BGE, BLTU and BGEU
// (selected by funct3) on two operands.  Standard RISC-V semantics;
// combinational.  In this pipeline it is used in EX on forwarded operands.
module rv32_branch_unit (
  input  logic [2:0]  funct3,
  input  logic [31:0] op1,
  input  logic [31:0] op2,
  output logic        taken
);
  always_comb begin
    unique case (funct3)
      3'b000:  taken = (op1 == op2);
      3'b001:  taken = (op1 != op2);
      3'b100:  taken = ($signed(op1) <  $signed(op2));
      3'b101:  taken = ($signed(op1) >= $signed(op2));
      3'b110:  taken = (op1 <  op2);
      3'b111:  taken = (op1 >= op2);
      default: taken = 1'b0;
    endcase
  end
endmodule
