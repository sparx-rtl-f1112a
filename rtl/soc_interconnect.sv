// Data-side interconnect of the SoC: decodes the processor's data accesses.
//
// Address bit 31 selects the peripheral space: 0 goes to the data RAM,
// 1 to the LED register (any word there).  Writes are steered by byte
// enables; reads return RAM data or the LED value zero-extended.
// Combinational.  The paper only names the interconnect; this map is this
// design's choice.
module soc_interconnect (
  input  logic [31:0] cpu_addr,
  input  logic        cpu_we,
  input  logic [3:0]  cpu_be,
  input  logic [31:0] cpu_wdata,
  output logic [31:0] cpu_rdata,
  output logic [3:0]  ram_we,
  output logic [31:0] ram_addr,
  output logic [31:0] ram_wdata,
  input  logic [31:0] ram_rdata,
  output logic        led_we,
  output logic [7:0]  led_wdata,
  input  logic [7:0]  led_rdata
);
  logic periph;
  always_comb begin
    periph    = cpu_addr[31];
    ram_addr  = cpu_addr;
    ram_wdata = cpu_wdata;
    ram_we    = (cpu_we && !periph) ? cpu_be : 4'b0000;
    led_we    = cpu_we && periph && cpu_be[0];
    led_wdata = cpu_wdata[7:0];
    cpu_rdata = periph ? {24'd0, led_rdata} : ram_rdata;
  end
endmodule
