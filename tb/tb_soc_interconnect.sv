// Test of the data-side interconnect: addresses with bit 31 clear go to the
// RAM with their byte enables, addresses with bit 31 set to the LED register
// (written only when byte lane 0 is enabled), and reads return the selected
// target.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_soc_interconnect;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic [31:0] cpu_addr, cpu_wdata, cpu_rdata, ram_addr, ram_wdata, ram_rdata;
  logic        cpu_we, led_we;
  logic [3:0]  cpu_be, ram_we;
  logic [7:0]  led_wdata, led_rdata;
  soc_interconnect dut (.*);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      bit p;
      cpu_addr = $urandom; cpu_we = 1'($urandom); cpu_be = 4'($urandom); cpu_wdata = $urandom;
      ram_rdata = $urandom; led_rdata = 8'($urandom);
      p = cpu_addr[31];
      #1;
      `CHECK_EQ(ram_we, (cpu_we && !p) ? cpu_be : 4'b0, "ram we")
      `CHECK_EQ(ram_addr, cpu_addr, "ram addr")
      `CHECK_EQ(ram_wdata, cpu_wdata, "ram wdata")
      `CHECK_EQ(led_we, cpu_we && p && cpu_be[0], "led we")
      `CHECK_EQ(led_wdata, cpu_wdata[7:0], "led wdata")
      `CHECK_EQ(cpu_rdata, p ? {24'b0, led_rdata} : ram_rdata, "read mux")
    end
    `FINISH
  end
endmodule
