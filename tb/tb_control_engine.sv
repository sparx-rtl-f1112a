// Test of the control engine's schedule for each mode: the number of cycles
// from start to done against the documented formula, the number of
// activation writes, pool writes, FC captures and result strobes, the
// verify strobe in the secure modes, and denial for a failed signature and
// for an invalid AXI ID.  grant and the privacy output are modelled here.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_control_engine;
  import sparx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(400000)

  logic rst_n, start, invalid_id, grant, sec_out_valid;
  mode_t mode, mode_r;
  auth_fields_t fields, fields_r;
  logic [11:0] base, base_r, k, pix0;
  ce_state_e state;
  logic busy, verify, arr_valid, arr_clr, fc_phase, act_we, pool_we, fc_capture, result_valid, done, denied;
  logic [3:0] n0;
  logic [2:0] drain_r, drain_c;
  logic [12:0] act_waddr;
  logic [3:0][12:0] pool_raddr;
  logic [10:0] pool_waddr;

  control_engine #(.N(8)) dut (.*);

  // environment: grant one cycle after verify, privacy output one cycle after result_valid
  bit grant_ok;
  always_ff @(posedge clk) begin
    if (verify) grant <= grant_ok;
    sec_out_valid <= result_valid;
  end

  int n_act, n_pool, n_fc, n_res, n_ver, n_feed, n_clr;
  logic [8191:0] act_seen;
  always @(posedge clk) begin
    if (act_we) begin n_act++; if (act_seen[act_waddr]) n_act += 100000; act_seen[act_waddr] = 1; end
    n_pool += int'(pool_we); n_fc += int'(fc_capture); n_res += int'(result_valid);
    n_ver += int'(verify); n_feed += int'(arr_valid); n_clr += int'(arr_clr);
  end

  task automatic run(input mode_t m, input bit ok, input bit bad_id, output int cycles, output bit was_denied);
    @(negedge clk);
    n_act = 0; n_pool = 0; n_fc = 0; n_res = 0; n_ver = 0; n_feed = 0; n_clr = 0; act_seen = '0;
    mode = m; grant_ok = ok; invalid_id = bad_id; start = 1; cycles = 0;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    was_denied = denied;
    @(negedge clk);
    `CHECK_EQ(busy, 1'b0, "idle after done")
  endtask

  initial begin
    rst_n = 0; start = 0; invalid_id = 0; grant = 0; sec_out_valid = 0; mode = '0; fields = '0; base = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int mm = 0; mm < 8; mm++) begin
      int cyc, h, kc, np, tiles, expc;
      bit dn;
      mode_t m;
      m = mode_t'(3'(mm));
      run(m, 1, 0, cyc, dn);
      h = m.cifar ? 32 : 28; kc = m.cifar ? 27 : 9; np = m.cifar ? 2048 : 1568;
      tiles = h * h / 8;
      expc = (m.privacy ? 2 : 0) + tiles * (kc + 16 + 64) + np + 2 * (np + 16 + 1) + 3;
      `CHECK_EQ(cyc, expc, $sformatf("cycles mode %0d", mm))
      `CHECK_EQ(dn, 1'b0, "not denied")
      `CHECK_EQ(n_act, h * h * 8, "activation writes, each address once")
      `CHECK_EQ(n_pool, np, "pool writes")
      `CHECK_EQ(n_fc, 2, "fc tiles")
      `CHECK_EQ(n_res, 1, "one result")
      `CHECK_EQ(n_ver, int'(m.privacy), "verify strobe in secure modes")
      `CHECK_EQ(n_feed, tiles * kc + 2 * np, "feed cycles")
      `CHECK_EQ(n_clr, tiles + 2, "clear per tile")
    end
    begin
      int cyc; bit dn;
      run(mode_t'(3'b100), 0, 0, cyc, dn);
      `CHECK_EQ(dn, 1'b1, "denied on failed signature")
      `CHECK_EQ(cyc, 3, "deny latency")
      `CHECK_EQ(n_feed, 0, "nothing computed when denied")
      run(mode_t'(3'b001), 1, 1, cyc, dn);
      `CHECK_EQ(dn, 1'b1, "denied on invalid id")
      `CHECK_EQ(cyc, 1, "invalid id latency")
    end
    `FINISH
  end
endmodule
