// Small RV32IMC instruction encoder for the processor testbenches.
// Register numbers are plain ints; immediates are in bytes.  The c_*
// functions build 16-bit compressed instructions from the standard RVC
// field layouts; rdp / rs1p / rs2p are full register numbers 8..15.
package tb_rv32_asm_pkg;
  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int imm, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] u_type(int imm20, int rd, int opc);
    return {20'(imm20), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] j_type(int imm, int rd);
    logic [20:0] i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub (int rd, int rs1, int rs2); return r_type(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mul (int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] div (int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] rem (int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh); return i_type(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh); return i_type(1024 + sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_type(imm, rs1, 7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return i_type(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lb  (int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lhu (int rd, int rs1, int imm); return i_type(imm, rs1, 5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] sh  (int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 1); endfunction
  function automatic logic [31:0] beq (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] lui (int rd, int imm20); return u_type(imm20, rd, 7'b0110111); endfunction
  function automatic logic [31:0] auipc(int rd, int imm20); return u_type(imm20, rd, 7'b0010111); endfunction
  function automatic logic [31:0] jal (int rd, int off); return j_type(off, rd); endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
  // SPARX instruction: func3 = abc, imm[11:0] = {key, challenge, signature}
  function automatic logic [31:0] sparx(int rd, int rs1, int abc, int key, int chal, int sig);
    return {4'(key), 4'(chal), 4'(sig), 5'(rs1), 3'(abc), 5'(rd), 7'b1111011};
  endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int sh); return i_type(sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xor_r(int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_r (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] and_r(int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 7, rd, 7'b0110011); endfunction

  // ---- compressed forms ----
  function automatic logic [15:0] c_addi4spn(int rdp, int imm);
    logic [9:0] i = 10'(imm);
    return {3'b000, i[5:4], i[9:6], i[2], i[3], 3'(rdp), 2'b00};
  endfunction
  function automatic logic [15:0] c_lw(int rdp, int rs1p, int imm);
    logic [6:0] i = 7'(imm);
    return {3'b010, i[5:3], 3'(rs1p), i[2], i[6], 3'(rdp), 2'b00};
  endfunction
  function automatic logic [15:0] c_sw(int rs2p, int rs1p, int imm);
    logic [6:0] i = 7'(imm);
    return {3'b110, i[5:3], 3'(rs1p), i[2], i[6], 3'(rs2p), 2'b00};
  endfunction
  function automatic logic [15:0] c_addi(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b000, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_li(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b010, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_lui(int rd, int imm6);
    logic [5:0] i = 6'(imm6);
    return {3'b011, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_addi16sp(int imm);
    logic [9:0] i = 10'(imm);
    return {3'b011, i[9], 5'd2, i[4], i[6], i[8:7], i[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_jfmt(logic [2:0] f3, int off);
    logic [11:0] o = 12'(off);
    return {f3, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_jal(int off); return c_jfmt(3'b001, off); endfunction
  function automatic logic [15:0] c_j(int off);   return c_jfmt(3'b101, off); endfunction
  function automatic logic [15:0] c_shift(int f2, int rdp, int sh);
    return {3'b100, 1'b0, 2'(f2), 3'(rdp), 5'(sh), 2'b01};
  endfunction
  function automatic logic [15:0] c_srli(int rdp, int sh); return c_shift(0, rdp, sh); endfunction
  function automatic logic [15:0] c_srai(int rdp, int sh); return c_shift(1, rdp, sh); endfunction
  function automatic logic [15:0] c_andi(int rdp, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b100, i[5], 2'b10, 3'(rdp), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_alu(int f2, int rdp, int rs2p);
    return {3'b100, 1'b0, 2'b11, 3'(rdp), 2'(f2), 3'(rs2p), 2'b01};
  endfunction
  function automatic logic [15:0] c_bfmt(logic [2:0] f3, int rs1p, int off);
    logic [8:0] o = 9'(off);
    return {f3, o[8], o[4:3], 3'(rs1p), o[7:6], o[2:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_beqz(int rs1p, int off); return c_bfmt(3'b110, rs1p, off); endfunction
  function automatic logic [15:0] c_bnez(int rs1p, int off); return c_bfmt(3'b111, rs1p, off); endfunction
  function automatic logic [15:0] c_slli(int rd, int sh);
    return {3'b000, 1'b0, 5'(rd), 5'(sh), 2'b10};
  endfunction
  function automatic logic [15:0] c_lwsp(int rd, int imm);
    logic [7:0] i = 8'(imm);
    return {3'b010, i[5], 5'(rd), i[4:2], i[7:6], 2'b10};
  endfunction
  function automatic logic [15:0] c_swsp(int rs2, int imm);
    logic [7:0] i = 8'(imm);
    return {3'b110, i[5:2], i[7:6], 5'(rs2), 2'b10};
  endfunction
  function automatic logic [15:0] c_jr(int rs1);          return {3'b100, 1'b0, 5'(rs1), 5'd0, 2'b10}; endfunction
  function automatic logic [15:0] c_mv(int rd, int rs2);  return {3'b100, 1'b0, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_jalr(int rs1);        return {3'b100, 1'b1, 5'(rs1), 5'd0, 2'b10}; endfunction
  function automatic logic [15:0] c_add(int rd, int rs2); return {3'b100, 1'b1, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_ebreak();             return 16'h9002; endfunction
endpackage
