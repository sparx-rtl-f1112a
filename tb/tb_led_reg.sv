// Test of the LED register: reset value, load on write enable, hold otherwise.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_led_reg;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic rst_n, we;
  logic [7:0] wdata, led, expect_led;
  led_reg #(.W(8)) dut (.*);

  initial begin
    rst_n = 0; we = 0; wdata = 8'hff;
    @(posedge clk); #1 `CHECK_EQ(led, 8'h00, "reset value")
    @(negedge clk); rst_n = 1; expect_led = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk); we = 1'($urandom); wdata = 8'($urandom);
      @(posedge clk); if (we) expect_led = wdata;
      #1 `CHECK_EQ(led, expect_led, "led")
    end
    `FINISH
  end
endmodule
