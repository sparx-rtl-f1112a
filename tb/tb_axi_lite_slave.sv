// Test of the AXI-Lite slave against a memory behind its register bus:
// random writes and reads with random valid/ready timing on the master side,
// read data checked against a shadow copy, every write producing exactly one
// bus write and one OKAY response.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_axi_lite_slave;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(200000)

  logic rst_n;
  logic [19:0] s_awaddr, s_araddr, bus_waddr, bus_raddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready, bus_we;
  logic [31:0] s_wdata, s_rdata, bus_wdata, bus_rdata;
  logic [1:0] s_bresp, s_rresp;
  axi_lite_slave #(.AW(20), .DW(32)) dut (.*);

  logic [31:0] mem [256];
  logic [31:0] shadow [256];
  always_ff @(posedge clk) if (bus_we) mem[bus_waddr[9:2]] <= bus_wdata;
  assign bus_rdata = mem[bus_raddr[9:2]];

  int n_we;
  always @(posedge clk) if (bus_we) n_we++;

  task automatic axi_write(input int a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = 20'(a * 4); s_wdata = d;
    // address and data may arrive in either order
    if ($urandom_range(0, 1)) s_awvalid = 1; else s_wvalid = 1;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    `CHECK_EQ(s_bresp, 2'b00, "bresp")
    @(posedge clk); @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input int a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = 20'(a * 4); s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    `CHECK_EQ(s_rvalid, 1'b1, "rvalid held until rready")
    s_rready = 1;
    d = s_rdata;
    @(posedge clk); @(negedge clk); s_rready = 0;
    `CHECK_EQ(s_rvalid, 1'b0, "rvalid dropped")
  endtask

  initial begin
    rst_n = 0; s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; n_we = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      shadow[i] = $urandom;
      axi_write(i, shadow[i]);
    end
    `CHECK_EQ(n_we, 256, "one bus write per AXI write")
    for (int t = 0; t < 500; t++) begin
      int a;
      logic [31:0] d;
      a = $urandom_range(0, 255);
      if ($urandom_range(0, 1)) begin
        shadow[a] = $urandom; axi_write(a, shadow[a]);
      end else begin
        axi_read(a, d);
        `CHECK_EQ(d, shadow[a], "read data")
      end
    end
    `FINISH
  end
endmodule
