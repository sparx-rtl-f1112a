// Output LED register: a memory-mapped 8-bit register whose bits drive the
// board LEDs.  Written when we is high; reset to 0.  The paper shows an
// output LED block on the interconnect; its width is this design's choice.
module led_reg #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [W-1:0] wdata,
  output logic [W-1:0] led
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  led <= '0;
    else if (we) led <= wdata;
  end
endmodule
