// Expander for the RV32C compressed instruction set.
//
// A 16-bit instruction (any halfword whose two low bits are not 11) is
// rewritten into the 32-bit RV32I instruction it stands for, so that the rest
// of the pipeline decodes only full-size instructions.  The registers x8..x15
// of the three-bit fields (rd', rs1', rs2') are widened to five bits and the
// scattered immediate bits are gathered and placed in the 32-bit formats.
// Covered: C.ADDI4SPN, C.LW, C.SW, C.NOP/C.ADDI, C.JAL, C.LI, C.ADDI16SP,
// C.LUI, C.SRLI, C.SRAI, C.ANDI, C.SUB, C.XOR, C.OR, C.AND, C.J, C.BEQZ,
// C.BNEZ, C.SLLI, C.LWSP, C.JR, C.MV, C.EBREAK, C.JALR, C.ADD, C.SWSP.
// Floating-point forms, reserved encodings and the all-zero halfword raise
// illegal and produce the all-zero word, which the decoder also rejects.
//
// Interface: cinstr is the halfword, instr the expansion, illegal a flag.
// Purely combinational.  The processor is RV32IMC in the paper; the
// expansion follows the standard compressed-instruction encoding, and doing
// it in fetch (rather than decoding 16-bit forms directly) is this design's
// choice.
module rv32_rvc_expand
  import rv32_pkg::*;
(
  input  logic [15:0] cinstr,
  output logic [31:0] instr,
  output logic        illegal
);
  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                        logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, OP_REG};
  endfunction
  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1);
    return {imm[11:5], rs2, rs1, 3'b010, imm[4:0], OP_STORE};
  endfunction
  function automatic logic [31:0] enc_b(logic [12:0] imm, logic [4:0] rs1, logic [2:0] f3);
    return {imm[12], imm[10:5], 5'd0, rs1, f3, imm[4:1], imm[11], OP_BRANCH};
  endfunction
  function automatic logic [31:0] enc_j(logic [20:0] imm, logic [4:0] rd);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd, OP_JAL};
  endfunction

  logic [4:0]  rd, rs2, rdp, rs1p, rs2p;
  logic [2:0]  f3;
  logic [11:0] imm6, lw_off, lwsp_off, swsp_off, a4spn, a16sp;
  logic [20:0] joff;
  logic [12:0] boff;

  always_comb begin
    f3    = cinstr[15:13];
    rd    = cinstr[11:7];
    rs2   = cinstr[6:2];
    rdp   = {2'b01, cinstr[4:2]};
    rs1p  = {2'b01, cinstr[9:7]};
    rs2p  = {2'b01, cinstr[4:2]};
    imm6     = {{7{cinstr[12]}}, cinstr[6:2]};
    lw_off   = {5'd0, cinstr[5], cinstr[12:10], cinstr[6], 2'b00};
    lwsp_off = {4'd0, cinstr[3:2], cinstr[12], cinstr[6:4], 2'b00};
    swsp_off = {4'd0, cinstr[8:7], cinstr[12:9], 2'b00};
    a4spn    = {2'd0, cinstr[10:7], cinstr[12:11], cinstr[5], cinstr[6], 2'b00};
    a16sp    = {{3{cinstr[12]}}, cinstr[4:3], cinstr[5], cinstr[2], cinstr[6], 4'b0000};
    joff     = {{10{cinstr[12]}}, cinstr[8], cinstr[10:9], cinstr[6], cinstr[7], cinstr[2],
                cinstr[11], cinstr[5:3], 1'b0};
    boff     = {{5{cinstr[12]}}, cinstr[6:5], cinstr[2], cinstr[11:10], cinstr[4:3], 1'b0};

    instr   = '0;
    illegal = 1'b0;
    unique case (cinstr[1:0])
      2'b00: unique case (f3)
        3'b000: begin                                   // C.ADDI4SPN
          instr   = enc_i(a4spn, 5'd2, 3'b000, rdp, OP_IMM);
          illegal = (a4spn == '0);
        end
        3'b010: instr = enc_i(lw_off, rs1p, 3'b010, rdp, OP_LOAD);   // C.LW
        3'b110: instr = enc_s(lw_off, rs2p, rs1p);                   // C.SW
        default: illegal = 1'b1;
      endcase
      2'b01: unique case (f3)
        3'b000: instr = enc_i(imm6, rd, 3'b000, rd, OP_IMM);         // C.ADDI / C.NOP
        3'b001: instr = enc_j(joff, 5'd1);                           // C.JAL
        3'b010: instr = enc_i(imm6, 5'd0, 3'b000, rd, OP_IMM);       // C.LI
        3'b011: begin
          if (rd == 5'd2) begin                                      // C.ADDI16SP
            instr   = enc_i(a16sp, 5'd2, 3'b000, 5'd2, OP_IMM);
            illegal = (a16sp == '0);
          end else begin                                             // C.LUI
            instr   = {{15{cinstr[12]}}, cinstr[6:2], rd, OP_LUI};
            illegal = (imm6 == '0);
          end
        end
        3'b100: unique case (cinstr[11:10])
          2'b00: begin                                               // C.SRLI
            instr   = enc_i({7'b0000000, rs2}, rs1p, 3'b101, rs1p, OP_IMM);
            illegal = cinstr[12];
          end
          2'b01: begin                                               // C.SRAI
            instr   = enc_i({7'b0100000, rs2}, rs1p, 3'b101, rs1p, OP_IMM);
            illegal = cinstr[12];
          end
          2'b10: instr = enc_i(imm6, rs1p, 3'b111, rs1p, OP_IMM);    // C.ANDI
          default: begin
            unique case (cinstr[6:5])
              2'b00:   instr = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p);  // C.SUB
              2'b01:   instr = enc_r(7'b0000000, rs2p, rs1p, 3'b100, rs1p);  // C.XOR
              2'b10:   instr = enc_r(7'b0000000, rs2p, rs1p, 3'b110, rs1p);  // C.OR
              default: instr = enc_r(7'b0000000, rs2p, rs1p, 3'b111, rs1p);  // C.AND
            endcase
            illegal = cinstr[12];
          end
        endcase
        3'b101: instr = enc_j(joff, 5'd0);                           // C.J
        3'b110: instr = enc_b(boff, rs1p, 3'b000);                   // C.BEQZ
        default: instr = enc_b(boff, rs1p, 3'b001);                  // C.BNEZ
      endcase
      2'b10: unique case (f3)
        3'b000: begin                                                // C.SLLI
          instr   = enc_i({7'b0000000, rs2}, rd, 3'b001, rd, OP_IMM);
          illegal = cinstr[12];
        end
        3'b010: begin                                                // C.LWSP
          instr   = enc_i(lwsp_off, 5'd2, 3'b010, rd, OP_LOAD);
          illegal = (rd == 5'd0);
        end
        3'b100: begin
          if (!cinstr[12]) begin
            if (rs2 == 5'd0) begin                                   // C.JR
              instr   = enc_i(12'd0, rd, 3'b000, 5'd0, OP_JALR);
              illegal = (rd == 5'd0);
            end else begin                                           // C.MV
              instr = enc_r(7'b0000000, rs2, 5'd0, 3'b000, rd);
            end
          end else begin
            if (rs2 == 5'd0 && rd == 5'd0) instr = 32'h0010_0073;    // C.EBREAK
            else if (rs2 == 5'd0) instr = enc_i(12'd0, rd, 3'b000, 5'd1, OP_JALR);  // C.JALR
            else instr = enc_r(7'b0000000, rs2, rd, 3'b000, rd);     // C.ADD
          end
        end
        3'b110: instr = enc_s(swsp_off, rs2, 5'd2);                  // C.SWSP
        default: illegal = 1'b1;
      endcase
      default: illegal = 1'b1;                                       // not compressed
    endcase
    if (cinstr == 16'h0000) illegal = 1'b1;
    if (illegal) instr = '0;
  end
endmodule
