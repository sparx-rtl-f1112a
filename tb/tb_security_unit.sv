// Test of the security and privacy logic: device key reset value and
// rewrite, grant for correct and wrong key/signature, and the class result
// passed through unchanged (privacy off) or XORed with the LFSR noise
// (privacy on), the noise being tracked by a model LFSR started at reset.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_security_unit;
  import sparx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic rst_n, key_we, verify, grant, privacy, result_valid, out_valid;
  logic [3:0] key_wdata, device_key, result, out;
  auth_fields_t fields;
  security_unit #(.DEVICE_KEY(4'hA)) dut (.*);

  logic [3:0] q;       // model LFSR, stepped every posedge after reset
  always @(posedge clk) if (rst_n) q <= {q[2:0], q[3] ^ q[2]};

  task automatic do_verify(input logic [3:0] k, input logic [3:0] c, input logic [3:0] s, input bit exp);
    @(negedge clk);
    fields = '{key: k, challenge: c, signature: s};
    verify = 1;
    @(negedge clk);
    verify = 0;
    `CHECK_EQ(grant, exp, $sformatf("grant key %0h chal %0h sig %0h", k, c, s))
  endtask

  initial begin
    rst_n = 0; key_we = 0; key_wdata = 0; verify = 0; privacy = 0; result_valid = 0; result = 0;
    fields = '0; q = 4'h9;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    `CHECK_EQ(device_key, 4'hA, "reset key")
    do_verify(4'hA, 4'h6, 4'h3 ^ 4'hA, 1);   // (6>>1)^A = 9
    do_verify(4'hB, 4'h6, 4'h9, 0);          // wrong key
    do_verify(4'hA, 4'h6, 4'h8, 0);          // wrong signature
    @(negedge clk); key_we = 1; key_wdata = 4'h5;
    @(negedge clk); key_we = 0;
    `CHECK_EQ(device_key, 4'h5, "key rewritten")
    do_verify(4'h5, 4'hF, 4'h7 ^ 4'h5, 1);
    for (int t = 0; t < 200; t++) begin
      logic [3:0] expv;
      @(negedge clk);
      privacy = 1'($urandom_range(0, 1));
      result = 4'($urandom_range(0, 9));
      result_valid = 1;
      expv = privacy ? (result ^ q) : result;
      @(negedge clk);
      result_valid = 0;
      `CHECK_EQ(out_valid, 1'b1, "out_valid")
      `CHECK_EQ(out, expv, $sformatf("out privacy=%0d", privacy))
      @(negedge clk);
      `CHECK_EQ(out_valid, 1'b0, "out_valid pulse")
    end
    `FINISH
  end
endmodule
