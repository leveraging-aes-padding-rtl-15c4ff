// aes_key_expand: AES-128 key schedule for the receiver's decryption core.
//
// On a key_load pulse the cipher key is taken as round key 0 and the ten
// further round keys are computed one per clock cycle (FIPS-197 expansion,
// RotWord/SubWord/Rcon on the last word of the previous round key) and kept
// in registers, so that the decryption core can read them in reverse order
// at no cost. key_ready rises NROUNDS cycles after key_load and stays high
// until the next key_load. The paper names AES-128 but not how the round keys
// are supplied; precomputing and storing them once per key is this design's
// choice, since one key serves many decryptions and guesses.
module aes_key_expand
  import aes_grand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        key_load,    // pulse: take key and start expansion
  input  block_t      key,
  output round_keys_t round_keys,  // [r] = round key r, valid while key_ready
  output logic        key_ready
);

  logic [3:0] round_q;   // next round key to compute (1..10), 0 = idle
  round_keys_t rk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      round_q   <= '0;
      rk_q      <= '0;
      key_ready <= 1'b0;
    end else if (key_load) begin
      rk_q[0]   <= key;
      round_q   <= 4'd1;
      key_ready <= 1'b0;
    end else if (round_q != 0) begin
      rk_q[round_q] <= next_round_key(rk_q[round_q-1], 32'(round_q));
      if (round_q == 4'(NROUNDS)) begin
        round_q   <= '0;
        key_ready <= 1'b1;
      end else begin
        round_q <= round_q + 4'd1;
      end
    end
  end

  assign round_keys = rk_q;

endmodule
