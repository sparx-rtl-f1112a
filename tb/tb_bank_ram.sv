// Test of the multi-port bank: random writes, then every read port reading
// random addresses checked against a shadow copy; a read of a location in the
// cycle it is written returns the old value.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_bank_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  localparam int D = 256, NRD = 3;
  logic we;
  logic [7:0] waddr, wdata;
  logic [NRD-1:0][7:0] raddr, rdata;
  bank_ram #(.DW(8), .DEPTH(D), .NRD(NRD)) dut (.*);

  logic [7:0] shadow [D];

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = 8'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) raddr[p] = 8'($urandom);
      we = (t % 3 == 0); waddr = raddr[0]; wdata = 8'($urandom);
      #1;
      for (int p = 0; p < NRD; p++) `CHECK_EQ(rdata[p], shadow[raddr[p]], "read")
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    `FINISH
  end
endmodule
