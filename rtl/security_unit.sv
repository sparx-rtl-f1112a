// Security and privacy logic of the accelerator.
//
// Holds the 4-bit device key (reset to DEVICE_KEY, rewritable by the host
// through key_we), runs the signature verifier on a verify strobe with the
// key / challenge / signature fields of the instruction, and passes the
// 4-bit class result through the noise injector when the privacy bit is set.
// result_valid is a one-cycle strobe; out and out_valid follow one cycle
// later: out = result ^ noise when privacy = 1, out = result otherwise.
// grant is valid the cycle after verify.  The split into verifier, noise
// injector and privacy routing follows the paper; the key register and its
// reset value are this design's choice.
// The verifier's sign_valid and the bare noise word are not needed here:
// grant already includes sign_valid, and sec_res already includes the noise.
module security_unit
  import sparx_pkg::*;
#(
  parameter logic [3:0] DEVICE_KEY = 4'hA
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_we,
  input  logic [3:0]   key_wdata,
  output logic [3:0]   device_key,
  input  logic         verify,
  input  auth_fields_t fields,
  output logic         grant,
  input  logic         privacy,
  input  logic         result_valid,
  input  logic [3:0]   result,
  output logic         out_valid,
  output logic [3:0]   out
);
  logic       sign_valid;
  logic [3:0] noise, sec_res, plain_r;
  logic       priv_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      device_key <= DEVICE_KEY;
      plain_r    <= '0;
      priv_r     <= 1'b0;
      out_valid  <= 1'b0;
    end else begin
      if (key_we) device_key <= key_wdata;
      out_valid <= result_valid;
      if (result_valid) begin
        plain_r <= result;
        priv_r  <= privacy;
      end
    end
  end

  sig_verifier #(.W(4), .SHIFT(1)) u_ver (
    .clk, .rst_n, .verify,
    .user_key (fields.key), .key(device_key),
    .challenge(fields.challenge), .signature(fields.signature),
    .sign_valid, .grant
  );

  lfsr_noise #(.W(4), .SEED(4'h9)) u_noise (
    .clk, .rst_n,
    .inject_noise(result_valid & privacy),
    .result, .noise, .sec_res
  );

  assign out = priv_r ? sec_res : plain_r;
endmodule
