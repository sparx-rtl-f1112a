// Test of the byte-writable RAM: random byte-enable writes and reads on both
// read ports against a shadow array; reads are combinational and a write
// lands on the clock.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_soc_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  localparam int W = 64;
  logic [3:0]  we;
  logic [31:0] addr, wdata, rdata, addr2, rdata2;
  soc_ram #(.WORDS(W)) dut (.*);
  logic [31:0] shadow [W];

  initial begin
    we = 4'hf; addr2 = 0;
    for (int i = 0; i < W; i++) begin
      @(negedge clk); addr = i * 4; wdata = $urandom; shadow[i] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      we = 4'($urandom); addr = {$urandom_range(0, W - 1), 2'($urandom)}; wdata = $urandom;
      addr2 = (t % 3 == 0) ? addr : {$urandom_range(0, W - 1), 2'b00};
      #1 `CHECK_EQ(rdata, shadow[addr[7:2]], "read before write")
      `CHECK_EQ(rdata2, shadow[addr2[7:2]], "second port before write")
      @(posedge clk);
      for (int b = 0; b < 4; b++) if (we[b]) shadow[addr[7:2]][8*b +: 8] = wdata[8*b +: 8];
      #1 `CHECK_EQ(rdata, shadow[addr[7:2]], "read after write")
      `CHECK_EQ(rdata2, shadow[addr2[7:2]], "second port after write")
    end
    `FINISH
  end
endmodule
