// ALU of the RV32IMC pipeline: the RV32I integer operations and the M
// extension (MUL, MULH, MULHSU, MULHU, DIV, DIVU, REM, REMU), all
// combinational and single-cycle.  Division by zero and signed overflow give
// the results the RISC-V specification prescribes (quotient all ones /
// remainder = dividend; -2^31 / -1 = -2^31 with remainder 0).  The
// single-cycle multiply/divide is this design's simplification.
module rv32_alu
  import rv32_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [63:0] pss, psu;
  logic        [63:0] puu;
  logic               ovf;

  always_comb begin
    pss = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
    psu = $signed({{32{a[31]}}, a}) * $signed({32'b0, b});
    puu = {32'b0, a} * {32'b0, b};
    ovf = (a == 32'h8000_0000) && (b == 32'hffff_ffff);
    unique case (op)
      ALU_ADD:    y = a + b;
      ALU_SUB:    y = a - b;
      ALU_SLL:    y = a << b[4:0];
      ALU_SLT:    y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:   y = {31'b0, a < b};
      ALU_XOR:    y = a ^ b;
      ALU_SRL:    y = a >> b[4:0];
      ALU_SRA:    y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:     y = a | b;
      ALU_AND:    y = a & b;
      ALU_PASSB:  y = b;
      ALU_MUL:    y = puu[31:0];
      ALU_MULH:   y = pss[63:32];
      ALU_MULHSU: y = psu[63:32];
      ALU_MULHU:  y = puu[63:32];
      ALU_DIV:    y = (b == 0) ? 32'hffff_ffff : ovf ? a : 32'($signed(a) / $signed(b));
      ALU_DIVU:   y = (b == 0) ? 32'hffff_ffff : a / b;
      ALU_REM:    y = (b == 0) ? a : ovf ? 32'd0 : 32'($signed(a) % $signed(b));
      ALU_REMU:   y = (b == 0) ? a : a % b;
      default:    y = '0;
    endcase
  end
endmodule
