// End-to-end test of the SoC at its default sizes.
//
// While the core is held (en = 0) the test loads a program into the
// instruction RAM and random images, weights and batch-norm / FC parameters
// into the accelerator banks over AXI-Lite (the same values go to the
// reference model).  The program then runs seven accelerator instructions:
// MNIST exact, CIFAR-10 exact, MNIST approximate, a secure approximate
// CIFAR-10 request with the right key and signature, one with a wrong key,
// one whose input base comes from a load (load-use stall into the
// accelerator operand) and one issued while invalid_axi_id is high.  Results
// go to data RAM and the class to the LED register; a branch on the sign of
// the denied result skips one instruction, and the LED value is formed by
// two compressed instructions.
//
// Checked: every result, and the class scores (logits) of the four granted
// inference modes, against the reference model (class XOR the model
// LFSR noise for the secure request, the denial word for refused ones), the
// data RAM and LED contents after halt, the accelerator latency of each
// request, the last-result register read back over AXI-Lite and the retired
// count.  Each mechanism is counted and must occur: accelerator stall,
// load-use stall, branch redirect, denial, invalid-ID denial, granted
// authentication, privacy noise, approximate mode, exact mode, MNIST /
// CIFAR-10 mode switch, LED write, compressed instruction.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_sparx_soc;
  import tb_sparx_ref_pkg::*;
  import tb_rv32_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(2000000)

  logic        rst_n, en, imem_we, halted, acc_busy, invalid_axi_id;
  logic [31:0] imem_waddr, imem_wdata, retired;
  logic [7:0]  led;
  logic [19:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0]  s_bresp, s_rresp;

  sparx_soc dut (.*);

  `include "tb_axi_tasks.svh"

  // model of the accelerator's noise LFSR and its value two cycles back
  logic [3:0] q, q1, q2;
  always @(posedge clk) if (rst_n) begin q2 <= q1; q1 <= q; q <= {q[2:0], q[3] ^ q[2]}; end

  // monitor of accelerator requests, sampled between clock edges
  logic [31:0] r_instr [8], r_rs1 [8], r_res [8];
  logic [3:0]  r_noise [8];
  int          r_cyc [8];
  int          r_logits [8][10];   // accelerator logits at each completion
  int n_done = 0, cyc = 0, n_acc_stall = 0, n_load_use = 0, n_redirect = 0, n_led = 0, n_comp = 0;
  int n_switch = 0, last_c = -1;
  assign invalid_axi_id = (n_done == 6);
  always @(negedge clk) if (rst_n && en) begin
    if (dut.acc_req) begin
      cyc++;
      if (!dut.acc_done) n_acc_stall++;
      else if (n_done < 8) begin
        r_instr[n_done] = dut.acc_instr; r_rs1[n_done] = dut.acc_rs1;
        for (int j = 0; j < 10; j++) r_logits[n_done][j] = int'($signed(dut.u_accel.logits[j]));
        r_res[n_done] = dut.acc_result; r_noise[n_done] = q2; r_cyc[n_done] = cyc - 1;
        if (last_c >= 0 && last_c != int'(dut.acc_instr[12])) n_switch++;
        last_c = int'(dut.acc_instr[12]);
        n_done++; cyc = 0;
      end
    end
    if (dut.u_core.load_use && !dut.u_core.acc_stall) n_load_use++;
    if (dut.u_core.redirect && !dut.u_core.acc_stall) n_redirect++;
    if (dut.led_we) n_led++;
    if (dut.u_core.if_id.valid && dut.u_core.if_id.is_c && !dut.u_core.acc_stall) n_comp++;
  end

  function automatic int conv_lat(bit cf);
    int h, kc, np;
    h = cf ? 32 : 28; kc = cf ? 27 : 9; np = cf ? 2048 : 1568;
    return (h * h / 8) * (kc + 16 + 64) + np + 2 * (np + 17) + 3;
  endfunction

  localparam logic [3:0] KEY = 4'hA, CHAL = 4'h6, SIG = (4'h6 >> 1) ^ 4'hA;

  initial begin
    logic [31:0] prog [32];
    logic [31:0] rd;
    int c_mn, c_cf, c_mn_ap, c_cf_ap, c_mn_1024;
    int l_mn [10], l_cf [10], l_mn_ap [10], l_cf_ap [10];
    int n_approx_diff;
    int n_deny, n_inv, n_grant, n_priv, n_approx, n_exact;

    prog[0]  = addi(1, 0, 0);
    prog[1]  = sparx(10, 1, 3'b000, 0, 0, 0);           // MNIST exact
    prog[2]  = sw(10, 0, 0);
    prog[3]  = lui(2, 'h80000);                         // LED address
    prog[4]  = sb(10, 2, 0);
    prog[5]  = sparx(11, 1, 3'b001, 0, 0, 0);           // CIFAR-10 exact
    prog[6]  = sw(11, 0, 4);
    prog[7]  = sparx(12, 1, 3'b010, 0, 0, 0);           // MNIST approximate
    prog[8]  = sw(12, 0, 8);
    prog[9]  = sparx(13, 1, 3'b111, KEY, CHAL, SIG);    // secure approximate CIFAR-10
    prog[10] = sw(13, 0, 12);
    prog[11] = sparx(14, 1, 3'b100, 4'hB, CHAL, (4'h6 >> 1) ^ 4'hB);  // wrong key
    prog[12] = sw(14, 0, 16);
    prog[13] = blt(14, 0, 8);                           // denied -> negative -> skip
    prog[14] = addi(15, 0, 1);
    prog[15] = sw(15, 0, 20);
    prog[16] = addi(3, 0, 1024);
    prog[17] = sw(3, 0, 24);
    prog[18] = lw(4, 0, 24);
    prog[19] = sparx(16, 4, 3'b000, 0, 0, 0);           // base from a load
    prog[20] = sw(16, 0, 28);
    prog[21] = sparx(17, 1, 3'b001, 0, 0, 0);           // with invalid_axi_id
    prog[22] = sw(17, 0, 32);
    prog[23] = {c_add(5, 11), c_mv(5, 10)};            // two compressed instructions
    prog[24] = sb(5, 2, 0);
    prog[25] = ebreak();
    for (int i = 26; i < 32; i++) prog[i] = addi(6, 6, 1);

    rst_n = 0; en = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    s_awaddr = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0; s_wdata = 0;
    q = 4'h9; q1 = 0; q2 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 32'(i * 4); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    for (int i = 0; i < 16; i++) dut.u_dmem.mem[i] = 32'h5a5a_5a5a;
    load_network(6);
    c_mn      = infer(0, 0, 0);  l_mn    = logits;
    c_cf      = infer(0, 1, 0);  l_cf    = logits;
    c_mn_ap   = infer(1, 0, 0);  l_mn_ap = logits;
    c_cf_ap   = infer(1, 1, 0);  l_cf_ap = logits;
    c_mn_1024 = infer(0, 0, 1024);
    $display("reference classes: mnist=%0d cifar=%0d mnist_approx=%0d cifar_approx=%0d mnist@1024=%0d",
             c_mn, c_cf, c_mn_ap, c_cf_ap, c_mn_1024);

    @(negedge clk); en = 1;
    while (!halted) @(posedge clk);
    repeat (2) @(posedge clk);

    `CHECK_EQ(n_done, 7, "accelerator requests completed")
    `CHECK_EQ(r_res[0], 32'(c_mn), "MNIST exact class")
    `CHECK_EQ(r_res[1], 32'(c_cf), "CIFAR-10 exact class")
    `CHECK_EQ(r_res[2], 32'(c_mn_ap), "MNIST approximate class")
    `CHECK_EQ(r_res[3], 32'(4'(c_cf_ap) ^ r_noise[3]), "secure CIFAR-10 class with noise")
    // the logits show the arithmetic mode even where the class agrees
    n_approx_diff = 0;
    for (int j = 0; j < 10; j++) begin
      `CHECK_EQ(r_logits[0][j], l_mn[j], "MNIST exact logit")
      `CHECK_EQ(r_logits[1][j], l_cf[j], "CIFAR-10 exact logit")
      `CHECK_EQ(r_logits[2][j], l_mn_ap[j], "MNIST approximate logit")
      `CHECK_EQ(r_logits[3][j], l_cf_ap[j], "CIFAR-10 approximate logit")
      if (l_mn[j] != l_mn_ap[j]) n_approx_diff++;
    end
    `CHECK_EQ(r_res[4], 32'h8000_0000, "wrong key denied")
    `CHECK_EQ(r_rs1[5], 32'd1024, "accelerator operand from a load")
    `CHECK_EQ(r_res[5], 32'(c_mn_1024), "image at base 1024")
    `CHECK_EQ(r_res[6], 32'h8000_0000, "invalid AXI ID denied")
    // latency of each request: cycles after the one in which it was accepted
    `CHECK_EQ(r_cyc[0], conv_lat(0), "MNIST latency")
    `CHECK_EQ(r_cyc[1], conv_lat(1), "CIFAR-10 latency")
    `CHECK_EQ(r_cyc[2], conv_lat(0), "MNIST approximate latency")
    `CHECK_EQ(r_cyc[3], conv_lat(1) + 2, "secure CIFAR-10 latency")
    `CHECK_EQ(r_cyc[4], 3, "denial latency")
    `CHECK_EQ(r_cyc[6], 1, "invalid-ID denial latency")
    // what the program stored
    `CHECK_EQ(dut.u_dmem.mem[0], r_res[0], "stored MNIST")
    `CHECK_EQ(dut.u_dmem.mem[1], r_res[1], "stored CIFAR-10")
    `CHECK_EQ(dut.u_dmem.mem[2], r_res[2], "stored approximate")
    `CHECK_EQ(dut.u_dmem.mem[3], r_res[3], "stored secure")
    `CHECK_EQ(dut.u_dmem.mem[4], 32'h8000_0000, "stored denial")
    `CHECK_EQ(dut.u_dmem.mem[5], 32'd0, "branch on denial skipped an instruction")
    `CHECK_EQ(dut.u_dmem.mem[6], 32'd1024, "stored base")
    `CHECK_EQ(dut.u_dmem.mem[7], r_res[5], "stored second image")
    `CHECK_EQ(dut.u_dmem.mem[8], 32'h8000_0000, "stored invalid-ID denial")
    `CHECK_EQ(led, 8'(c_mn + c_cf), "LED")
    `CHECK_EQ(retired, 32'd25, "retired")
    `CHECK_EQ(acc_busy, 1'b0, "accelerator idle")
    axi_read(20'hC0008, rd);
    `CHECK_EQ(rd, 32'h8000_0000, "last result register")

    n_deny = 0; n_inv = 0; n_grant = 0; n_priv = 0; n_approx = 0; n_exact = 0;
    for (int i = 0; i < n_done; i++) begin
      if (r_res[i][31]) n_deny++;
      if (r_res[i][31] && r_cyc[i] == 1) n_inv++;
      if (r_instr[i][14] && !r_res[i][31]) begin n_grant++; n_priv += (r_noise[i] != 0); end
      if (r_instr[i][13] && !r_res[i][31]) n_approx++;
      if (!r_instr[i][13] && !r_res[i][31]) n_exact++;
    end
    $display("mechanisms: acc_stall=%0d load_use=%0d redirect=%0d deny=%0d invalid_id=%0d grant=%0d privacy=%0d approx=%0d (logits changed %0d) exact=%0d switch=%0d led=%0d compressed=%0d",
             n_acc_stall, n_load_use, n_redirect, n_deny, n_inv, n_grant, n_priv, n_approx, n_approx_diff, n_exact, n_switch, n_led, n_comp);
    `CHECK(n_acc_stall > 0, "accelerator stall occurred")
    `CHECK(n_load_use > 0, "load-use stall occurred")
    `CHECK(n_redirect > 0, "branch redirect occurred")
    `CHECK(n_deny > 0, "denial occurred")
    `CHECK(n_inv > 0, "invalid-ID denial occurred")
    `CHECK(n_grant > 0, "granted authentication occurred")
    `CHECK(n_priv > 0, "privacy noise occurred")
    `CHECK(n_approx > 0 && n_approx_diff > 0, "approximate mode occurred and changed the logits")
    `CHECK(n_exact > 0, "exact mode occurred")
    `CHECK(n_switch > 0, "MNIST / CIFAR-10 switch occurred")
    `CHECK(n_led > 0, "LED write occurred")
    `CHECK(n_comp > 0, "compressed instruction executed")
    `FINISH
  end
endmodule
