// AXI4-Lite slave that turns host transactions into single-cycle register
// bus accesses.
//
// A write is accepted in the cycle both AWVALID and WVALID are high and no
// response is pending (AWREADY and WREADY are raised together in that
// cycle); the same cycle produces a one-cycle bus_we with bus_waddr /
// bus_wdata, and BVALID (OKAY) follows and is held until BREADY.  A read is
// accepted when ARVALID is high and no read data is pending; bus_raddr is
// the AR address in that cycle and the asynchronous bus_rdata is captured
// into RDATA, with RVALID held until RREADY.  Strobes are ignored (each
// access moves one whole entry); the response is always OKAY.  The paper
// shows the five AXI-Lite channels; this minimal slave is this design's own.
// All flops reset asynchronously; rst_n also disables the handshake
// assertions, which lint reports as a synchronous use of the reset.
module axi_lite_slave #(
  parameter int unsigned AW = 20,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [DW-1:0] s_wdata,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [DW-1:0] s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic          bus_we,
  output logic [AW-1:0] bus_waddr,
  output logic [DW-1:0] bus_wdata,
  output logic [AW-1:0] bus_raddr,
  input  logic [DW-1:0] bus_rdata
);
  logic wr_fire, rd_fire;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign bus_we    = wr_fire;
  assign bus_waddr = s_awaddr;
  assign bus_wdata = s_wdata;

  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign bus_raddr = s_araddr;

  assign s_bresp = 2'b00;
  assign s_rresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (wr_fire)                 s_bvalid <= 1'b1;
      else if (s_bready)           s_bvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rdata  <= bus_rdata;
      end else if (s_rready)       s_rvalid <= 1'b0;
    end
  end

  // Handshake rules on the slave's outputs: a response stays valid until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
