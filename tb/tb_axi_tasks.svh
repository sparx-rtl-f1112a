// AXI-Lite master tasks shared by the accelerator and SoC testbenches.
// Expects the s_* signals and clk in the including module.
task automatic axi_write(input logic [19:0] addr, input logic [31:0] data);
  @(negedge clk);
  s_awaddr = addr; s_wdata = data; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
  do @(posedge clk); while (!(s_awready && s_wready));
  @(negedge clk); s_awvalid = 0; s_wvalid = 0;
  while (!s_bvalid) @(negedge clk);
  @(posedge clk); #1 s_bready = 0;
endtask

task automatic axi_read(input logic [19:0] addr, output logic [31:0] data);
  @(negedge clk);
  s_araddr = addr; s_arvalid = 1; s_rready = 1;
  do @(posedge clk); while (!s_arready);
  @(negedge clk); s_arvalid = 0;
  while (!s_rvalid) @(negedge clk);
  data = s_rdata;
  @(posedge clk); #1 s_rready = 0;
endtask

// Fill the banks with random data, mirror it into the reference model.
task automatic load_network(input int seed_scale);
  for (int i = 0; i < 3072; i++) begin
    tb_sparx_ref_pkg::img[i] = byte'($urandom_range(0, 100));
    axi_write(20'(i * 4), 32'(tb_sparx_ref_pkg::img[i]));
  end
  for (int i = 0; i < 216; i++) begin
    tb_sparx_ref_pkg::cw[i] = byte'($urandom_range(0, 16) - 8);
    axi_write(20'h40000 | 20'(i * 4), 32'(tb_sparx_ref_pkg::cw[i]));
  end
  for (int i = 0; i < 20480; i++) begin
    tb_sparx_ref_pkg::fw[i] = byte'($urandom_range(0, 8) - 4);
    axi_write(20'h40000 | 20'((256 + i) * 4), 32'(tb_sparx_ref_pkg::fw[i]));
  end
  for (int i = 0; i < 8; i++) begin
    tb_sparx_ref_pkg::scale[i] = shortint'($urandom_range(1, seed_scale));
    tb_sparx_ref_pkg::bias[i]  = shortint'($urandom_range(0, 20) - 10);
    axi_write(20'h80000 | 20'(i * 4), 32'(tb_sparx_ref_pkg::scale[i]));
    axi_write(20'h80000 | 20'((8 + i) * 4), 32'(tb_sparx_ref_pkg::bias[i]));
  end
  for (int i = 0; i < 10; i++) begin
    tb_sparx_ref_pkg::fb[i] = shortint'($urandom_range(0, 400) - 200);
    axi_write(20'h80000 | 20'((16 + i) * 4), 32'(tb_sparx_ref_pkg::fb[i]));
  end
endtask
