// noise_removal_aes: the "Noise Removal AES" stage of the receiver.
//
// The received hard decisions Y are XORed with the current error pattern
// (all zeros for the first attempt) to remove the guessed noise, and the
// result is decrypted by the AES-128 core. start, busy and done have the
// core's timing (done sampled 13 cycles after start). The XOR followed by
// the AES core is as drawn in the paper's receiver diagram; y and err must
// be stable in the cycle start is asserted only.
module noise_removal_aes
  import aes_grand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  round_keys_t round_keys,
  input  logic        start,
  input  block_t      y,      // received hard decisions
  input  block_t      err,    // guessed error pattern
  output logic        busy,
  output logic        done,
  output block_t      pt      // decryption of y ^ err
);

  block_t cleaned;
  assign cleaned = y ^ err;

  aes_decrypt_core u_core (
    .clk, .rst_n, .round_keys, .start,
    .din (cleaned), .busy, .done, .dout (pt)
  );

endmodule
