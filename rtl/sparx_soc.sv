// SPARX SoC: an RV32IMC five-stage processor with the secure approximate CNN
// accelerator in its execute stage.
//
// The core fetches from a 16 KiB instruction RAM (loaded through the imem_*
// port while en is low) and reaches a 16 KiB data RAM and the LED register
// through the interconnect.  The accelerator instruction (opcode 1111011)
// stalls the core until the accelerator returns its result to rd.  The host
// loads the accelerator's input, weight and bias banks and its device key
// through the AXI-Lite port (the path by which the board's flash / I/O bus
// would feed it).  invalid_axi_id, driven by the system, makes the
// accelerator refuse requests.  The block set follows the paper; the port
// list and memory sizes are this design's choices.
module sparx_soc (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  // program load
  input  logic        imem_we,
  input  logic [31:0] imem_waddr,
  input  logic [31:0] imem_wdata,
  // status
  output logic [7:0]  led,
  output logic        halted,
  output logic [31:0] retired,
  output logic        acc_busy,
  input  logic        invalid_axi_id,
  // AXI-Lite host port of the accelerator
  input  logic [19:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [19:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready
);
  logic [31:0] imem_addr, imem_rdata, imem_addr_next, imem_rdata_next;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_we;
  logic [3:0]  dmem_be;
  logic        acc_req, acc_done;
  logic [31:0] acc_instr, acc_rs1, acc_result;

  rv32_core u_core (
    .clk, .rst_n, .en,
    .imem_addr, .imem_rdata, .imem_addr_next, .imem_rdata_next,
    .dmem_addr, .dmem_we, .dmem_be, .dmem_wdata, .dmem_rdata,
    .acc_req, .acc_instr, .acc_rs1, .acc_done, .acc_result,
    .halted, .retired);

  soc_ram #(.WORDS(4096)) u_imem (
    .clk, .we(imem_we ? 4'hf : 4'h0), .addr(imem_we ? imem_waddr : imem_addr),
    .wdata(imem_wdata), .rdata(imem_rdata), .addr2(imem_addr_next), .rdata2(imem_rdata_next));

  logic [31:0] dmem_unused;  // second read port of the data RAM is not needed
  logic [3:0]  ram_we;
  logic [31:0] ram_addr, ram_wdata, ram_rdata;
  logic        led_we;
  logic [7:0]  led_wdata;

  soc_interconnect u_xbar (
    .cpu_addr(dmem_addr), .cpu_we(dmem_we), .cpu_be(dmem_be), .cpu_wdata(dmem_wdata),
    .cpu_rdata(dmem_rdata),
    .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .led_we, .led_wdata, .led_rdata(led));

  soc_ram #(.WORDS(4096)) u_dmem (
    .clk, .we(ram_we), .addr(ram_addr), .wdata(ram_wdata), .rdata(ram_rdata),
    .addr2(32'd0), .rdata2(dmem_unused));

  led_reg #(.W(8)) u_led (.clk, .rst_n, .we(led_we), .wdata(led_wdata), .led);

  sparx_accel u_accel (
    .clk, .rst_n,
    .req(acc_req), .instr(acc_instr), .rs1(acc_rs1), .invalid_axi_id,
    .busy(acc_busy), .done(acc_done), .result(acc_result),
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready);
endmodule
