// Noise injector of the privacy engine: a free-running 4-bit LFSR and the
// output register that applies Y_priv = Y_cnn XOR N_lfsr.
//
// The LFSR shifts left every clock with feedback q[3] ^ q[2] (polynomial
// x^4 + x^3 + 1, period 15) from the non-zero SEED.  Its state is the 4-bit
// noise word.  When inject_noise is high the register sec_res takes
// result ^ noise (the noise of that same cycle).  The LFSR width, the XOR
// injection and the enable-gated output register follow the paper; the
// taps, the seed and stepping every clock are this design's choices.
module lfsr_noise #(
  parameter int unsigned   W    = 4,
  parameter logic [W-1:0]  SEED = 4'h9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inject_noise,
  input  logic [W-1:0] result,
  output logic [W-1:0] noise,
  output logic [W-1:0] sec_res
);
  logic [W-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= SEED;
      sec_res <= '0;
    end else begin
      q <= {q[W-2:0], q[W-1] ^ q[W-2]};
      if (inject_noise) sec_res <= result ^ q;
    end
  end

  assign noise = q;
endmodule
