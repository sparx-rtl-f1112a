// On-chip data bank: DEPTH words of DW bits, one synchronous write port and
// NRD asynchronous read ports.
//
// Used for the weight, input and bias banks and the activation and pooled
// buffers of the accelerator.  The systolic array needs up to eight operands
// a cycle, which is why the bank offers several read ports; on an FPGA this
// maps to distributed RAM or replicated block RAM.  The paper specifies
// dedicated on-chip memories for these data; port count, depth and read
// timing are this design's choice.  Contents are not reset.
module bank_ram #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [DW-1:0]           wdata,
  input  logic [NRD-1:0][AW-1:0]  raddr,
  output logic [NRD-1:0][DW-1:0]  rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < int'(NRD); i++) rdata[i] = mem[raddr[i]];
  end
endmodule
