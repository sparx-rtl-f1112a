// End-to-end test of the accelerator on its own: the banks are loaded over
// AXI-Lite with random images and weights, then one custom instruction per
// mode is issued.  Each class result is compared with the reference model
// (exact and approximate arithmetic, MNIST and CIFAR-10 shapes); in the
// privacy modes the expected result is the class XOR the LFSR noise of the
// argmax cycle, tracked by a model LFSR.  Also checked: the latency from
// request to done, denial for a wrong key, a wrong signature and an invalid
// AXI ID, and the key / last-result registers read back over AXI-Lite.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_sparx_accel;
  import sparx_pkg::*;
  import tb_sparx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(2000000)

  logic rst_n, req, invalid_axi_id, busy, done;
  logic [31:0] instr, rs1, result;
  logic [19:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;

  sparx_accel dut (.*);

  `include "tb_axi_tasks.svh"

  // model LFSR and its values one and two cycles back
  logic [3:0] q, q1, q2;
  always @(posedge clk) if (rst_n) begin q2 <= q1; q1 <= q; q <= {q[2:0], q[3] ^ q[2]}; end

  function automatic logic [31:0] mk_instr(logic [2:0] abc, logic [3:0] key, logic [3:0] chal, logic [3:0] sig);
    return {key, chal, sig, 5'd1, abc, 5'd10, 7'b1111011};
  endfunction

  task automatic issue(input logic [31:0] ins, input int base, input bit bad_id,
                       output logic [31:0] res, output int cyc, output logic [3:0] noise);
    @(negedge clk);
    instr = ins; rs1 = 32'(base); req = 1; invalid_axi_id = bad_id; cyc = 1;
    @(negedge clk);
    while (!done) begin @(negedge clk); cyc++; end
    res = result; noise = q2;
    @(negedge clk); req = 0; invalid_axi_id = 0;
  endtask

  initial begin
    logic [31:0] res, rd;
    logic [3:0] noise;
    int cyc;
    rst_n = 0; req = 0; instr = 0; rs1 = 0; invalid_axi_id = 0;
    s_awaddr = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0; s_wdata = 0;
    q = 4'h9; q1 = 0; q2 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    load_network(6);
    axi_read(20'hC0000, rd);
    `CHECK_EQ(rd[3:0], 4'hA, "device key readable")
    // a = 0 modes: plain class, checked against the model
    for (int m = 0; m < 4; m++) begin
      int expc, h, kc, np;
      bit ap, cf;
      ap = 1'(m >> 1); cf = 1'(m & 1);
      issue(mk_instr(3'(m), 4'h0, 4'h0, 4'h0), 0, 0, res, cyc, noise);
      expc = tb_sparx_ref_pkg::infer(ap, cf, 0);
      `CHECK_EQ(res, 32'(expc), $sformatf("class mode b=%0d c=%0d", ap, cf))
      h = cf ? 32 : 28; kc = cf ? 27 : 9; np = cf ? 2048 : 1568;
      `CHECK_EQ(cyc, (h * h / 8) * (kc + 16 + 64) + np + 2 * (np + 17) + 3, "latency")
    end
    // secure modes with the right key and signature ((chal>>1)^key)
    for (int m = 4; m < 8; m++) begin
      int expc;
      issue(mk_instr(3'(m), 4'hA, 4'h6, 4'h3 ^ 4'hA), 0, 0, res, cyc, noise);
      expc = tb_sparx_ref_pkg::infer(1'((m >> 1) & 1), 1'(m & 1), 0);
      `CHECK_EQ(res, 32'(4'(expc) ^ noise), $sformatf("secure class mode %0d", m))
    end
    // second image at another base address (MNIST uses 784 bytes)
    issue(mk_instr(3'b000, 0, 0, 0), 1024, 0, res, cyc, noise);
    `CHECK_EQ(res, 32'(tb_sparx_ref_pkg::infer(0, 0, 1024)), "image at base 1024")
    // denials
    issue(mk_instr(3'b100, 4'hB, 4'h6, 4'h3 ^ 4'hB), 0, 0, res, cyc, noise);
    `CHECK_EQ(res, 32'h8000_0000, "wrong key denied")
    `CHECK_EQ(cyc, 3, "deny latency")
    issue(mk_instr(3'b110, 4'hA, 4'h6, 4'h0), 0, 0, res, cyc, noise);
    `CHECK_EQ(res, 32'h8000_0000, "wrong signature denied")
    issue(mk_instr(3'b001, 0, 0, 0), 0, 1, res, cyc, noise);
    `CHECK_EQ(res, 32'h8000_0000, "invalid AXI ID denied")
    axi_read(20'hC0008, rd);
    `CHECK_EQ(rd, 32'h8000_0000, "last result register")
    // rewrite the device key; the old key must now fail, the new one pass
    axi_write(20'hC0000, 32'h3);
    issue(mk_instr(3'b100, 4'hA, 4'h6, 4'h3 ^ 4'hA), 0, 0, res, cyc, noise);
    `CHECK_EQ(res, 32'h8000_0000, "old key denied")
    issue(mk_instr(3'b100, 4'h3, 4'h6, 4'h3 ^ 4'h3), 0, 0, res, cyc, noise);
    `CHECK_EQ(res, 32'(4'(tb_sparx_ref_pkg::infer(0, 0, 0)) ^ noise), "new key granted")
    `CHECK_EQ(busy, 1'b0, "idle at end")
    `FINISH
  end
endmodule
