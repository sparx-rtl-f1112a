// Program-level test of the five-stage core with behavioural instruction and
// data memories and a behavioural accelerator.
//
// The program exercises forwarding from both later stages, a load-use stall,
// a counted loop (taken and not-taken branches), JAL/JALR call and return
// with flushed fall-through instructions, MUL/DIV/REM, byte and halfword
// stores and loads, AUIPC, two back-to-back accelerator instructions and one
// whose result is used by the next instruction, and EBREAK.  The
// accelerator model answers each request after a random 0..15 cycle delay
// with rs1 + {func3, imm12}.  Checked: the data memory after halt, the
// retired count, that each request is held exactly until done and that
// nothing after EBREAK executes.  Load-use stalls, accelerator stalls,
// redirects and forwards are counted and must each occur.
//
// A second program, run after a reset, mixes compressed and 32-bit
// instructions: 32-bit instructions at halfword-aligned addresses (one
// spanning two memory words), a compressed load-use pair, a C.BNEZ loop, a
// C.JAL call whose link must be PC+2 and a C.JR return, a C.J over an
// instruction, C.SRAI, an accelerator instruction at a halfword address and
// C.EBREAK.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_rv32_core;
  import tb_rv32_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(20000)

  logic        rst_n, en;
  logic [31:0] imem_addr, imem_rdata, imem_addr_next, imem_rdata_next, dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_we;
  logic [3:0]  dmem_be;
  logic        acc_req, acc_done;
  logic [31:0] acc_instr, acc_rs1, acc_result;
  logic        halted;
  logic [31:0] retired;

  rv32_core dut (.*);

  logic [31:0] imem [64];
  logic [31:0] dmem [64];
  assign imem_rdata = imem[imem_addr[7:2]];
  assign imem_rdata_next = imem[imem_addr_next[7:2]];
  assign dmem_rdata = dmem[dmem_addr[7:2]];
  always_ff @(posedge clk)
    if (dmem_we)
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) dmem[dmem_addr[7:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];

  // accelerator model
  int acc_cnt = 0, acc_lat = 0, acc_reqs = 0, acc_stalls = 0;
  function automatic logic [31:0] acc_f(logic [31:0] ins, logic [31:0] r);
    return r + {17'b0, ins[14:12], ins[31:20]};
  endfunction
  assign acc_done   = acc_req && (acc_cnt == acc_lat);
  assign acc_result = acc_f(acc_instr, acc_rs1);
  always_ff @(posedge clk) begin
    if (acc_req && en) begin
      if (acc_done) begin
        acc_cnt <= 0;
        acc_lat <= $urandom_range(0, 15);
        acc_reqs <= acc_reqs + 1;
      end else begin
        acc_cnt <= acc_cnt + 1;
        acc_stalls <= acc_stalls + 1;
      end
    end
  end
  // the held request may not change while stalled
  logic [31:0] held_instr;
  logic        was_stalled = 0;
  always_ff @(posedge clk) begin
    was_stalled <= acc_req && !acc_done && en;
    held_instr  <= acc_instr;
    if (was_stalled && rst_n) `CHECK(acc_req && acc_instr == held_instr, "request dropped or changed while stalled")
  end

  int n_load_use = 0, n_redirect = 0, n_fwd_ex = 0, n_fwd_wb = 0, n_comp = 0, n_misaligned = 0;
  always_ff @(posedge clk) if (rst_n && en) begin
    if (dut.if_id.valid && dut.if_id.is_c) n_comp <= n_comp + 1;
    if (dut.if_id.valid && !dut.if_id.is_c && dut.if_id.pc[1]) n_misaligned <= n_misaligned + 1;
    if (dut.load_use && !dut.acc_stall) n_load_use <= n_load_use + 1;
    if (dut.redirect && !dut.acc_stall) n_redirect <= n_redirect + 1;
    if (dut.id_ex.valid && dut.ex_mem.valid && dut.ex_mem.ctrl.reg_write && dut.ex_mem.rd != 0 &&
        (dut.ex_mem.rd == dut.id_ex.rs1 || dut.ex_mem.rd == dut.id_ex.rs2)) n_fwd_ex <= n_fwd_ex + 1;
    if (dut.id_ex.valid && dut.mem_wb.valid && dut.mem_wb.reg_write && dut.mem_wb.rd != 0 &&
        (dut.mem_wb.rd == dut.id_ex.rs1 || dut.mem_wb.rd == dut.id_ex.rs2)) n_fwd_wb <= n_fwd_wb + 1;
  end

  initial begin
    int p = 0;
    for (int i = 0; i < 64; i++) begin imem[i] = addi(0, 0, 0); dmem[i] = 0; end
    imem[0]  = addi(1, 0, 5);
    imem[1]  = addi(2, 0, 7);
    imem[2]  = add(3, 1, 2);           // 12
    imem[3]  = sub(4, 3, 1);           // 7
    imem[4]  = mul(5, 3, 4);           // 84
    imem[5]  = sw(5, 0, 0);
    imem[6]  = lw(6, 0, 0);
    imem[7]  = addi(7, 6, 1);          // 85, load-use
    imem[8]  = sw(7, 0, 4);
    imem[9]  = addi(8, 0, 0);
    imem[10] = addi(9, 0, 10);
    imem[11] = add(8, 8, 9);           // loop
    imem[12] = addi(9, 9, -1);
    imem[13] = bne(9, 0, -8);
    imem[14] = sw(8, 0, 8);            // 55
    imem[15] = jal(1, 20);             // -> 20
    imem[16] = sw(10, 0, 12);          // 99
    imem[17] = jal(0, 20);             // -> 22
    imem[18] = addi(11, 0, 1);         // skipped
    imem[19] = addi(11, 0, 2);         // skipped
    imem[20] = addi(10, 0, 99);
    imem[21] = jalr(0, 1, 0);          // -> 16
    imem[22] = addi(12, 0, -3);
    imem[23] = div(13, 5, 12);         // -28
    imem[24] = rem(14, 7, 12);         // 1
    imem[25] = sw(13, 0, 16);
    imem[26] = sw(14, 0, 20);
    imem[27] = addi(15, 0, 'h123);
    imem[28] = sparx(16, 15, 3, 'hA, 6, 9);
    imem[29] = addi(17, 16, 1);        // uses accelerator result
    imem[30] = sw(17, 0, 24);
    imem[31] = sw(11, 0, 28);          // 0
    imem[32] = addi(18, 0, 'h40);
    imem[33] = sb(7, 18, 1);
    imem[34] = lb(19, 18, 1);          // 85
    imem[35] = sh(12, 18, 2);
    imem[36] = lw(20, 18, 0);          // 0xfffd5500
    imem[37] = lhu(21, 18, 2);         // 0xfffd
    imem[38] = sw(21, 0, 32);          // load-use on store data
    imem[39] = sw(20, 0, 36);
    imem[40] = sw(19, 0, 40);
    imem[41] = sparx(22, 21, 0, 1, 2, 3);
    imem[42] = sparx(23, 22, 7, 4, 5, 6);
    imem[43] = sw(23, 0, 44);
    imem[44] = auipc(24, 1);           // 176 + 4096
    imem[45] = sw(24, 0, 48);
    imem[46] = ebreak();
    imem[47] = addi(25, 0, 1);
    imem[48] = sw(25, 0, 52);
    imem[49] = sw(25, 0, 0);

    rst_n = 0; en = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    `CHECK_EQ(imem_addr, 32'd0, "PC frozen while en is low")
    `CHECK_EQ(retired, 32'd0, "nothing retires while en is low")
    @(negedge clk); en = 1;
    while (!halted) @(posedge clk);
    repeat (3) @(posedge clk);

    `CHECK_EQ(dmem[0],  32'd84, "mul / store forwarding")
    `CHECK_EQ(dmem[1],  32'd85, "load-use")
    `CHECK_EQ(dmem[2],  32'd55, "loop sum")
    `CHECK_EQ(dmem[3],  32'd99, "call / return")
    `CHECK_EQ(dmem[4],  32'hffffffe4, "div")
    `CHECK_EQ(dmem[5],  32'd1, "rem")
    `CHECK_EQ(dmem[6],  acc_f(sparx(16, 15, 3, 'hA, 6, 9), 32'h123) + 1, "accelerator result forwarded")
    `CHECK_EQ(dmem[7],  32'd0, "flushed instructions did not execute")
    `CHECK_EQ(dmem[8],  32'h0000fffd, "lhu")
    `CHECK_EQ(dmem[9],  32'hfffd5500, "sb / sh / lw")
    `CHECK_EQ(dmem[10], 32'd85, "lb")
    `CHECK_EQ(dmem[11], acc_f(sparx(23, 22, 7, 4, 5, 6), acc_f(sparx(22, 21, 0, 1, 2, 3), 32'hfffd)),
              "back-to-back accelerator")
    `CHECK_EQ(dmem[12], 32'd4272, "auipc")
    `CHECK_EQ(dmem[13], 32'd0, "nothing after ebreak")
    `CHECK_EQ(retired, 32'd71, "retired instruction count")
    `CHECK_EQ(acc_reqs, 3, "accelerator requests")
    `CHECK(n_load_use >= 2, "load-use stall happened")
    `CHECK(acc_stalls > 0, "accelerator stall happened")
    `CHECK(n_redirect >= 12, "branch / jump redirects happened")
    `CHECK(n_fwd_ex > 0, "forward from EX/MEM happened")
    `CHECK(n_fwd_wb > 0, "forward from MEM/WB happened")
    $display("mechanisms: load_use=%0d acc_stall=%0d redirect=%0d fwd_ex=%0d fwd_wb=%0d",
             n_load_use, acc_stalls, n_redirect, n_fwd_ex, n_fwd_wb);

    // ---------------- second program: compressed instructions ----------------
    begin
      logic [15:0] h [128];
      int hp, loop, jal_pos, ret_pos, j_pos, after, f_pos;
      hp = 0;
      for (int i = 0; i < 128; i++) h[i] = 16'h0001;   // c.nop
      h[hp++] = c_li(8, 5);
      h[hp++] = c_li(9, -3);
      {h[hp+1], h[hp]} = add(10, 8, 9); hp += 2;      // aligned 32-bit
      h[hp++] = c_addi(10, 7);                        // 9
      {h[hp+1], h[hp]} = addi(11, 0, 100); hp += 2;   // 32-bit across two words
      h[hp++] = c_mv(12, 11);
      h[hp++] = c_add(12, 10);                        // 109
      h[hp++] = c_li(14, 16);
      h[hp++] = c_slli(14, 2);                        // 64
      h[hp++] = c_sw(12, 14, 0);
      h[hp++] = c_lw(15, 14, 0);
      h[hp++] = c_addi(15, 1);                        // 110, load-use
      h[hp++] = c_sw(15, 14, 4);
      h[hp++] = c_li(9, 4);
      h[hp++] = c_li(8, 0);
      loop = hp;
      h[hp++] = c_addi(8, 3);
      h[hp++] = c_addi(9, -1);
      h[hp] = c_bnez(9, (loop - hp) * 2); hp++;
      h[hp++] = c_sw(8, 14, 8);                       // 12
      jal_pos = hp++;
      ret_pos = hp;
      h[hp++] = c_sw(10, 14, 12);                     // 21
      h[hp++] = c_mv(11, 1);
      h[hp++] = c_sw(11, 14, 16);                     // link
      j_pos = hp++;
      h[hp++] = c_li(13, 1);                          // skipped
      after = hp;
      h[hp++] = c_sw(13, 14, 20);                     // 0
      h[hp++] = c_li(12, -32);
      h[hp++] = c_srai(12, 2);
      h[hp++] = c_sw(12, 14, 24);                     // -8
      {h[hp+1], h[hp]} = sparx(9, 15, 5, 1, 2, 3); hp += 2;
      h[hp++] = c_sw(9, 14, 28);
      h[hp++] = c_ebreak();
      h[hp++] = c_li(13, 7);
      h[hp++] = c_sw(13, 14, 20);
      f_pos = hp;
      h[hp++] = c_li(10, 21);
      h[hp++] = c_jr(1);
      h[jal_pos] = c_jal((f_pos - jal_pos) * 2);
      h[j_pos]   = c_j((after - j_pos) * 2);
      for (int i = 0; i < 64; i++) begin imem[i] = {h[2*i+1], h[2*i]}; dmem[i] = 0; end

      @(negedge clk); rst_n = 0; en = 0;
      @(negedge clk); rst_n = 1; en = 1;
      while (!halted) @(posedge clk);
      repeat (3) @(posedge clk);
      `CHECK_EQ(dmem[16], 32'd109, "compressed arithmetic, misaligned 32-bit")
      `CHECK_EQ(dmem[17], 32'd110, "compressed load-use")
      `CHECK_EQ(dmem[18], 32'd12, "C.BNEZ loop")
      `CHECK_EQ(dmem[19], 32'd21, "C.JAL / C.JR")
      `CHECK_EQ(dmem[20], 32'(ret_pos * 2), "C.JAL links PC+2")
      `CHECK_EQ(dmem[21], 32'd0, "C.J skipped, nothing after C.EBREAK")
      `CHECK_EQ(dmem[22], 32'hfffffff8, "C.SRAI")
      `CHECK_EQ(dmem[23], acc_f(sparx(9, 15, 5, 1, 2, 3), 32'd110), "accelerator at a halfword address")
      `CHECK_EQ(retired, 32'd41, "retired, second program")
      `CHECK(n_comp > 0, "compressed instructions executed")
      `CHECK(n_misaligned > 0, "32-bit instruction at a halfword address executed")
    end
    `FINISH
  end
endmodule
