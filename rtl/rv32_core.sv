// Five-stage RV32IMC pipeline (IF, ID, EX, MEM, WB) with the SPARX
// accelerator instruction executed in EX.
//
// IF   reads the word holding the PC and the word after it (imem_addr,
//      imem_addr_next), so that an instruction starting at any halfword is
//      available in one cycle.  A halfword whose low bits are not 11 is a
//      compressed instruction: rv32_rvc_expand turns it into its 32-bit
//      form and the next PC is PC+2; otherwise it is PC+4.  On a taken
//      branch or a jump resolved in EX the next PC is the target (the two
//      younger instructions are flushed).
// ID   decodes (rv32_ctrl), reads the register file (write-through from WB)
//      and builds the immediate.
// EX   selects operands with forwarding from EX/MEM ("from EX") and MEM/WB
//      ("from WB"), runs the ALU and the branch unit, and for the
//      accelerator opcode raises acc_req with the instruction and the
//      forwarded rs1.  While acc_req is high and acc_done low the core stalls
//      PC, IF/ID and ID/EX and sends a bubble into MEM; in the acc_done cycle
//      acc_result goes down the normal write-back path to rd (the
//      "accl_instr" multiplexer).
// MEM  accesses dmem (asynchronous read, byte enables on write); loads are
//      sign- or zero-extended by funct3.
// WB   writes the register file.
// A load followed by a dependent instruction stalls one cycle.  ECALL or
// EBREAK reaching EX stops fetching and raises halted once older
// instructions have drained.  en = 0 freezes the whole pipeline.
//
// JAL / JALR link to PC+2 after a compressed jump and PC+4 otherwise.
//
// The stages, pipeline registers, forwarding sources, the accelerator
// multiplexer in EX, the stall and the RV32IMC instruction set follow the
// paper's datapath figure and text.  CSRs and traps are not built; branches
// resolve in EX rather than in decode; expanding compressed instructions in
// fetch from two memory words is this design's choice.
// The expander's illegal flag goes unused: an illegal
// halfword expands to the all-zero word, which the decoder flags illegal
// and runs as a no-op.
// Only the low half of the second fetch word is ever needed.
module rv32_core
  import rv32_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  // instruction memory
  output logic [31:0] imem_addr,       // word holding the PC
  input  logic [31:0] imem_rdata,
  output logic [31:0] imem_addr_next,  // the following word
  input  logic [31:0] imem_rdata_next,
  // data memory
  output logic [31:0] dmem_addr,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  // accelerator
  output logic        acc_req,
  output logic [31:0] acc_instr,
  output logic [31:0] acc_rs1,
  input  logic        acc_done,
  input  logic [31:0] acc_result,
  // status
  output logic        halted,
  output logic [31:0] retired
);
  logic [31:0] pc;
  if_id_t  if_id;
  id_ex_t  id_ex;
  ex_mem_t ex_mem;
  mem_wb_t mem_wb;
  logic    stop_fetch;

  // ---------------- ID ----------------
  ctrl_t       id_ctrl;
  logic [31:0] id_rs1v, id_rs2v, id_imm;
  logic [4:0]  id_rs1, id_rs2, id_rd;
  assign id_rs1 = if_id.instr[19:15];
  assign id_rs2 = if_id.instr[24:20];
  assign id_rd  = if_id.instr[11:7];

  rv32_ctrl    u_ctrl (.instr(if_id.instr), .ctrl(id_ctrl));
  rv32_imm_gen u_imm  (.instr(if_id.instr), .imm(id_imm));
  rv32_regfile u_rf (
    .clk, .rst_n, .ra1(id_rs1), .ra2(id_rs2), .rd1(id_rs1v), .rd2(id_rs2v),
    .we(mem_wb.valid && mem_wb.reg_write && en), .wa(mem_wb.rd), .wd(mem_wb.wb_data));

  // ---------------- EX ----------------
  logic [31:0] fwd_a, fwd_b, op1, op2, alu_y, ex_result, target;
  logic        br_taken, redirect, acc_stall;

  always_comb begin
    fwd_a = id_ex.rs1v;
    if (ex_mem.valid && ex_mem.ctrl.reg_write && ex_mem.rd != 0 && ex_mem.rd == id_ex.rs1)
      fwd_a = ex_mem.result;
    else if (mem_wb.valid && mem_wb.reg_write && mem_wb.rd != 0 && mem_wb.rd == id_ex.rs1)
      fwd_a = mem_wb.wb_data;
    fwd_b = id_ex.rs2v;
    if (ex_mem.valid && ex_mem.ctrl.reg_write && ex_mem.rd != 0 && ex_mem.rd == id_ex.rs2)
      fwd_b = ex_mem.result;
    else if (mem_wb.valid && mem_wb.reg_write && mem_wb.rd != 0 && mem_wb.rd == id_ex.rs2)
      fwd_b = mem_wb.wb_data;
    op1 = id_ex.ctrl.op1_pc ? id_ex.pc : fwd_a;
    op2 = id_ex.ctrl.op2_imm ? id_ex.imm : fwd_b;
  end

  rv32_alu         u_alu (.op(id_ex.ctrl.alu_op), .a(op1), .b(op2), .y(alu_y));
  rv32_branch_unit u_bru (.funct3(id_ex.funct3), .op1(fwd_a), .op2(fwd_b), .taken(br_taken));

  always_comb begin
    target   = id_ex.ctrl.jalr ? ((fwd_a + id_ex.imm) & ~32'd1) : (id_ex.pc + id_ex.imm);
    redirect = id_ex.valid && ((id_ex.ctrl.branch && br_taken) || id_ex.ctrl.jal || id_ex.ctrl.jalr);
    unique case (id_ex.ctrl.wb_sel)
      WB_PC4:  ex_result = id_ex.pc + (id_ex.is_c ? 32'd2 : 32'd4);
      WB_ACC:  ex_result = acc_result;
      default: ex_result = alu_y;
    endcase
    acc_req   = id_ex.valid && id_ex.ctrl.accl;
    acc_instr = id_ex.instr;
    acc_rs1   = fwd_a;
    acc_stall = acc_req && !acc_done;
  end

  // ---------------- hazards ----------------
  logic load_use, ex_halt;
  assign load_use = id_ex.valid && id_ex.ctrl.mem_read && id_ex.rd != 0 && if_id.valid &&
                    ((id_ctrl.use_rs1 && id_rs1 == id_ex.rd) || (id_ctrl.use_rs2 && id_rs2 == id_ex.rd));
  assign ex_halt  = id_ex.valid && id_ex.ctrl.halt;

  // ---------------- MEM ----------------
  logic [31:0] ld_word, ld_val, mem_wb_data;
  logic [1:0]  boff;
  always_comb begin
    boff       = ex_mem.result[1:0];
    dmem_addr  = {ex_mem.result[31:2], 2'b00};
    dmem_we    = ex_mem.valid && ex_mem.ctrl.mem_write && en;
    dmem_wdata = ex_mem.store_data << (8 * boff);
    unique case (ex_mem.funct3[1:0])
      2'b00:   dmem_be = 4'b0001 << boff;
      2'b01:   dmem_be = 4'b0011 << boff;
      default: dmem_be = 4'b1111;
    endcase
    ld_word = dmem_rdata >> (8 * boff);
    unique case (ex_mem.funct3)
      3'b000:  ld_val = {{24{ld_word[7]}},  ld_word[7:0]};
      3'b001:  ld_val = {{16{ld_word[15]}}, ld_word[15:0]};
      3'b100:  ld_val = {24'b0, ld_word[7:0]};
      3'b101:  ld_val = {16'b0, ld_word[15:0]};
      default: ld_val = dmem_rdata;
    endcase
    mem_wb_data = ex_mem.ctrl.mem_read ? ld_val : ex_mem.result;
  end

  // ---------------- IF ----------------
  logic [31:0] fetch_raw, fetch_instr, c_instr;
  logic        fetch_c, c_illegal;
  assign imem_addr      = {pc[31:2], 2'b00};
  assign imem_addr_next = {pc[31:2], 2'b00} + 32'd4;
  assign fetch_raw      = pc[1] ? {imem_rdata_next[15:0], imem_rdata[31:16]} : imem_rdata;
  assign fetch_c        = (fetch_raw[1:0] != 2'b11);
  rv32_rvc_expand u_rvc (.cinstr(fetch_raw[15:0]), .instr(c_instr), .illegal(c_illegal));
  assign fetch_instr    = fetch_c ? c_instr : fetch_raw;

  // ---------------- pipeline registers ----------------

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= RESET_PC;
      if_id <= '0; id_ex <= '0; ex_mem <= '0; mem_wb <= '0;
      stop_fetch <= 1'b0;
      retired <= '0;
    end else if (en) begin
      // WB
      mem_wb.valid     <= ex_mem.valid;
      mem_wb.reg_write <= ex_mem.ctrl.reg_write;
      mem_wb.wb_data   <= mem_wb_data;
      mem_wb.rd        <= ex_mem.rd;
      if (mem_wb.valid) retired <= retired + 1;

      // MEM
      if (acc_stall || ex_halt) begin
        ex_mem <= '0;
      end else begin
        ex_mem.valid      <= id_ex.valid;
        ex_mem.ctrl       <= id_ex.ctrl;
        ex_mem.result     <= ex_result;
        ex_mem.store_data <= fwd_b;
        ex_mem.rd         <= id_ex.rd;
        ex_mem.funct3     <= id_ex.funct3;
      end

      if (ex_halt) begin
        stop_fetch <= 1'b1;
        id_ex <= '0;
        if_id <= '0;
      end else if (acc_stall) begin
        // keep the held instruction's operands current while older ones retire
        id_ex.rs1v <= fwd_a;
        id_ex.rs2v <= fwd_b;
      end else begin
        // EX
        if (redirect || load_use || !if_id.valid || stop_fetch) begin
          id_ex <= '0;
        end else begin
          id_ex.valid  <= 1'b1;
          id_ex.ctrl   <= id_ctrl;
          id_ex.pc     <= if_id.pc;
          id_ex.instr  <= if_id.instr;
          id_ex.rs1v   <= id_rs1v;
          id_ex.rs2v   <= id_rs2v;
          id_ex.imm    <= id_imm;
          id_ex.rs1    <= id_rs1;
          id_ex.rs2    <= id_rs2;
          id_ex.rd     <= id_rd;
          id_ex.funct3 <= if_id.instr[14:12];
          id_ex.is_c   <= if_id.is_c;
        end
        // IF / ID and PC
        if (redirect) begin
          pc    <= target;
          if_id <= '0;
        end else if (!load_use && !stop_fetch) begin
          pc          <= pc + (fetch_c ? 32'd2 : 32'd4);
          if_id.valid <= 1'b1;
          if_id.pc    <= pc;
          if_id.instr <= fetch_instr;
          if_id.is_c  <= fetch_c;
        end else if (stop_fetch) begin
          if_id <= '0;
        end
      end
    end
  end

  assign halted = stop_fetch && !id_ex.valid && !ex_mem.valid && !mem_wb.valid;
endmodule
