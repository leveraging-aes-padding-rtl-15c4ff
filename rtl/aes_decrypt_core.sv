// aes_decrypt_core: iterative AES-128 decryption, one round per clock cycle.
//
// A block accepted with start passes through an input register, the initial
// AddRoundKey with round key 10, ten inverse rounds (InvShiftRows,
// InvSubBytes, AddRoundKey and, except in the last round, InvMixColumns) and
// an output register. done is a one-cycle pulse with dout valid; dout holds
// its value until the next result. If start is sampled at clock edge t, done
// is sampled high at edge t+13: 13 cycles "including data input and output",
// which at 100 MHz is the 130 ns decryption latency the paper reports. The
// paper gives the latency and the choice of AES-128; the one-round-per-cycle
// datapath is this design's reading of the area it quotes for the AES
// (15.3 kGE), which leaves no room for an unrolled cipher. start is ignored
// while busy.
module aes_decrypt_core
  import aes_grand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  round_keys_t round_keys,
  input  logic        start,
  input  block_t      din,     // ciphertext
  output logic        busy,
  output logic        done,    // pulse: dout valid
  output block_t      dout     // plaintext
);

  typedef enum logic [1:0] {S_IDLE, S_ARK, S_ROUND, S_OUT} state_e;

  state_e     state_q;
  logic [3:0] round_q;   // round key index used by the current inverse round
  block_t     s_q;
  block_t     t, round_out;

  // one inverse round
  always_comb begin
    t         = inv_sub_bytes(inv_shift_rows(s_q)) ^ round_keys[round_q];
    round_out = (round_q == 0) ? t : inv_mix_columns(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      round_q <= '0;
      s_q     <= '0;
      dout    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          s_q     <= din;                      // input register
          state_q <= S_ARK;
        end
        S_ARK: begin
          s_q     <= s_q ^ round_keys[NROUNDS];
          round_q <= 4'(NROUNDS - 1);
          state_q <= S_ROUND;
        end
        S_ROUND: begin
          s_q <= round_out;
          if (round_q == 0) state_q <= S_OUT;
          else              round_q <= round_q - 4'd1;
        end
        S_OUT: begin
          dout    <= s_q;                      // output register
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

endmodule
