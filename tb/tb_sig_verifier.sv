// Exhaustive test of the signature verifier over key, user key, challenge
// and signature values (sampled), including that a wrong key after a
// successful verification withdraws the grant.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_sig_verifier;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(200000)

  logic rst_n, verify, sign_valid, grant;
  logic [3:0] user_key, key, challenge, signature;
  sig_verifier #(.W(4), .SHIFT(1)) dut (.*);

  initial begin
    rst_n = 0; verify = 0; user_key = 0; key = 0; challenge = 0; signature = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    `CHECK_EQ(grant, 1'b0, "no grant after reset")
    for (int kk = 0; kk < 16; kk++)
      for (int ch = 0; ch < 16; ch++)
        for (int sg = 0; sg < 16; sg++) begin
          int uk;
          bit eg;
          uk = ((sg + ch) % 3 == 0) ? (kk ^ 5) : kk;
          key = 4'(kk); user_key = 4'(uk); challenge = 4'(ch); signature = 4'(sg);
          verify = 1;
          @(negedge clk);
          verify = 0;
          eg = (uk == kk) && ((((ch >> 1) ^ kk) & 15) == sg);
          `CHECK_EQ(grant, eg, $sformatf("grant k%0d uk%0d c%0d s%0d", kk, uk, ch, sg))
          // without a new strobe the outputs hold
          user_key = ~user_key;
          @(negedge clk);
          `CHECK_EQ(grant, eg, "grant held")
        end
    `FINISH
  end
endmodule
