// Word-organised on-chip RAM used as instruction memory and data memory.
//
// WORDS x 32 bits, word-addressed by addr[31:2] (upper bits beyond the
// depth are ignored).  Reads are asynchronous; writes happen on the clock
// edge for each byte lane whose byte enable is set.  A second read port
// (addr2 / rdata2) lets the instruction fetch see the word after the PC's,
// which an instruction starting on a halfword boundary needs; the data
// memory leaves it unused.  Contents are not reset.  Size, ports and read
// timing are this design's choices.
module soc_ram #(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic        clk,
  input  logic [3:0]  we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic [31:0] addr2,
  output logic [31:0] rdata2
);
  logic [31:0] mem [WORDS];
  logic [AW-1:0] idx;
  assign idx = addr[AW+1:2];

  always_ff @(posedge clk) begin
    for (int b = 0; b < 4; b++)
      if (we[b]) mem[idx][8*b +: 8] <= wdata[8*b +: 8];
  end

  assign rdata  = mem[idx];
  assign rdata2 = mem[addr2[AW+1:2]];
endmodule
