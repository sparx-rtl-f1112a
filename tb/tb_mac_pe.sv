// Test of the MAC processing element: random signed operand streams in
// exact and approximate mode against a reference accumulator, the one-cycle
// forwarding of weight and input, the accumulate timing (product of the
// pair presented in cycle t visible after cycle t+1), the clear flag, and
// saturation at the 16-bit limits.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_mac_pe;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(100000)

  logic rst_n, approx, valid_in, clr_in, valid_out, clr_out;
  logic signed [7:0] w_in, x_in, w_out, x_out;
  logic signed [15:0] mac_out;

  mac_pe #(.W(8), .ACC_W(16)) dut (.*);

  function automatic int lead_pow(int v);
    int q = 1;
    while (q * 2 <= v) q = q * 2;
    return q;
  endfunction

  // reference product: exact, or sign * (|w||x| - residue product)
  function automatic int ref_prod(int w, int x, bit ap);
    int aw, ax, m;
    if (!ap) return w * x;
    aw = (w < 0) ? -w : w;
    ax = (x < 0) ? -x : x;
    if (aw == 0 || ax == 0) m = 0;
    else m = aw * ax - (aw - lead_pow(aw)) * (ax - lead_pow(ax));
    return ((w < 0) != (x < 0)) ? -m : m;
  endfunction

  function automatic int sat16(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    int acc_ref;
    rst_n = 0; approx = 0; valid_in = 0; clr_in = 0; w_in = 0; x_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      approx = 1'(mode);
      acc_ref = 0;
      for (int t = 0; t < 400; t++) begin
        int w, x;
        w = $urandom_range(0, 255) - 128;
        x = $urandom_range(0, 255) - 128;
        @(negedge clk);
        w_in = 8'(w); x_in = 8'(x); valid_in = (t % 7 != 3); clr_in = (t % 50 == 0);
        @(negedge clk);   // registered: forwarded copies visible now
        `CHECK_EQ(w_out, 8'(w), "w forwarded")
        `CHECK_EQ(x_out, 8'(x), "x forwarded")
        `CHECK_EQ(valid_out, valid_in, "valid forwarded")
        if (valid_in) acc_ref = sat16((clr_in ? 0 : acc_ref) + ref_prod(w, x, approx));
        valid_in = 0; clr_in = 0;
        @(negedge clk);
        `CHECK_EQ(int'(mac_out), acc_ref, $sformatf("acc mode %0d t %0d", mode, t))
      end
    end
    // saturation: repeated 127*127 (exact) must stop at 32767
    approx = 0;
    for (int t = 0; t < 5; t++) begin
      @(negedge clk); w_in = 127; x_in = 127; valid_in = 1; clr_in = (t == 0);
    end
    @(negedge clk); valid_in = 0; clr_in = 0;
    @(negedge clk); @(negedge clk);
    `CHECK_EQ(int'(mac_out), 32767, "positive saturation")
    for (int t = 0; t < 5; t++) begin
      @(negedge clk); w_in = -128; x_in = 127; valid_in = 1; clr_in = (t == 0);
    end
    @(negedge clk); valid_in = 0; clr_in = 0;
    @(negedge clk); @(negedge clk);
    `CHECK_EQ(int'(mac_out), -32768, "negative saturation")
    `FINISH
  end
endmodule
