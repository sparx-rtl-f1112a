// Challenge-response signature verifier.
//
// On a verify strobe the user key from the instruction is compared with the
// device key.  When they match (the clock enable of the sign_valid flop),
// sign_valid takes the result of comparing the signature with the one the
// device regenerates, (challenge >> SHIFT) ^ key.  Because an enable-only
// flop would keep a previous success after a wrong key, a second flop
// (key_ok) records the key comparison of the same strobe, and access is
// granted only when both hold.  Outputs are valid the cycle after verify.
// Key, challenge and signature widths (4 bits), the comparators, the shift
// and XOR and the enabled flop follow the paper; the shift amount (1) and
// the key_ok flop are this design's choice.
module sig_verifier #(
  parameter int unsigned W     = 4,
  parameter int unsigned SHIFT = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         verify,
  input  logic [W-1:0] user_key,
  input  logic [W-1:0] key,
  input  logic [W-1:0] challenge,
  input  logic [W-1:0] signature,
  output logic         sign_valid,
  output logic         grant
);
  logic key_eq, sig_eq, key_ok;

  assign key_eq = (user_key == key);
  assign sig_eq = (((challenge >> SHIFT) ^ key) == signature);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sign_valid <= 1'b0;
      key_ok     <= 1'b0;
    end else if (verify) begin
      key_ok <= key_eq;
      if (key_eq) sign_valid <= sig_eq;
    end
  end

  assign grant = key_ok & sign_valid;
endmodule
