// Exhaustive test of the im2col addressing for both model variants: every
// output pixel and reduction index is checked against coordinates computed
// in the testbench (padding flag, and the address when inside the map).
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_conv_unit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(1000000)

  logic cifar, pad;
  logic [11:0] base, pix, k, addr;
  conv_unit #(.AW(12)) dut (.*);

  initial begin
    for (int m = 0; m < 2; m++) begin
      int h, cin;
      cifar = 1'(m);
      h = m ? 32 : 28;
      cin = m ? 3 : 1;
      base = m ? 12'd0 : 12'd100;
      for (int p = 0; p < h * h + 8; p += (p < 64 ? 1 : 7)) begin
        for (int kk = 0; kk < cin * 9; kk++) begin
          int y, x, ci, ky, kx, iy, ix;
          bit epad;
          pix = 12'(p); k = 12'(kk);
          #1;
          y = p / h; x = p % h; ci = kk / 9; ky = (kk % 9) / 3; kx = kk % 3;
          iy = y + ky - 1; ix = x + kx - 1;
          epad = (p >= h * h) || iy < 0 || ix < 0 || iy >= h || ix >= h;
          `CHECK_EQ(pad, epad, $sformatf("pad m%0d p%0d k%0d", m, p, kk))
          if (!epad) `CHECK_EQ(int'(addr), (int'(base) + ci * h * h + iy * h + ix) % 4096, "addr")
        end
      end
    end
    `FINISH
  end
endmodule
