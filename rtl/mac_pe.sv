// MAC processing element of the systolic array.
//
// The weight (from the left) and the input (from above) are each held in a
// register and forwarded from there to the right-hand and lower neighbours,
// so operands move one PE per cycle.  The registered pair is multiplied by
// either the exact radix-4 Booth multiplier (approx = 0) or the ILM
// approximate logarithmic multiplier (approx = 1).  The ILM works on
// magnitudes; the sign (XOR of the operand signs) is applied afterwards.
// The product is narrowed to ACC_W bits with saturation (first "bit
// quantisation" stage) and added to the accumulator, the add saturating at
// ACC_W bits (second stage).  A clear flag that travels with the operands
// restarts the accumulation with the current product.
//
// Timing: operands presented in cycle t are registered at the end of t; the
// accumulator includes their product at the end of t+1.  valid_out, clr_out,
// w_out and x_out are the registered copies (one cycle of delay per PE).
// Structure, widths and the exact/approximate switch follow the paper; the
// signed sign-magnitude handling, the saturation and the clear flag are this
// design's choices.
module mac_pe #(
  parameter int unsigned W     = 8,
  parameter int unsigned ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    approx,
  input  logic                    valid_in,
  input  logic                    clr_in,
  input  logic signed [W-1:0]     w_in,
  input  logic signed [W-1:0]     x_in,
  output logic                    valid_out,
  output logic                    clr_out,
  output logic signed [W-1:0]     w_out,
  output logic signed [W-1:0]     x_out,
  output logic signed [ACC_W-1:0] mac_out
);
  localparam logic signed [ACC_W:0] ACC_MAX = (ACC_W+1)'((1 << (ACC_W-1)) - 1);
  localparam logic signed [ACC_W:0] ACC_MIN = -(ACC_W+1)'(1 << (ACC_W-1));

  logic signed [W-1:0]     w_r, x_r;
  logic                    v_r, c_r;
  logic signed [ACC_W-1:0] acc_r;

  // exact path
  logic signed [2*W-1:0] p_exact;
  booth_mult #(.W(W)) u_booth (.a(w_r), .b(x_r), .p(p_exact));

  // approximate path on magnitudes
  logic [W-1:0]          mag_w, mag_x;
  logic [2*W-1:0]        p_mag;
  logic signed [2*W:0]   p_approx;
  assign mag_w = w_r[W-1] ? W'(-w_r) : W'(w_r);
  assign mag_x = x_r[W-1] ? W'(-x_r) : W'(x_r);
  ilm_mult #(.W(W)) u_ilm (.n1(mag_w), .n2(mag_x), .p(p_mag));
  assign p_approx = (w_r[W-1] ^ x_r[W-1]) ? -$signed({1'b0, p_mag}) : $signed({1'b0, p_mag});

  // bit quantisation of the product, then saturating accumulate
  logic signed [2*W:0]   prod;
  logic signed [ACC_W:0] prod_q, acc_in, sum;
  logic signed [ACC_W-1:0] sum_q;

  function automatic logic signed [ACC_W:0] sat_wide(input logic signed [2*W:0] v);
    if (v > (2*W+1)'(ACC_MAX))      return ACC_MAX;
    else if (v < (2*W+1)'(ACC_MIN)) return ACC_MIN;
    else                            return (ACC_W+1)'(v);
  endfunction

  always_comb begin
    prod   = approx ? p_approx : (2*W+1)'(p_exact);
    prod_q = sat_wide(prod);
    acc_in = c_r ? '0 : (ACC_W+1)'(acc_r);
    sum    = acc_in + prod_q;
    if (sum > ACC_MAX)      sum_q = ACC_MAX[ACC_W-1:0];
    else if (sum < ACC_MIN) sum_q = ACC_MIN[ACC_W-1:0];
    else                    sum_q = sum[ACC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_r <= '0; x_r <= '0; v_r <= 1'b0; c_r <= 1'b0; acc_r <= '0;
    end else begin
      w_r <= w_in;
      x_r <= x_in;
      v_r <= valid_in;
      c_r <= clr_in;
      if (v_r) acc_r <= sum_q;
    end
  end

  assign w_out     = w_r;
  assign x_out     = x_r;
  assign valid_out = v_r;
  assign clr_out   = c_r;
  assign mac_out   = acc_r;
endmodule
