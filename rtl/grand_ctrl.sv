// grand_ctrl: sequencer of the joint ORBGRAND decoding and AES decryption.
//
// Per block it carries out the four steps of the decoding process:
//   1. fetch: pop one block (hard decisions Y, LLR magnitudes) from the
//      input FIFOs and start the error pattern generator on its LLRs;
//   2. in the same cycle start decrypting Y as received; check its padding
//      when the result arrives;
//   3. on a padding mismatch ("Right Padding?" = NO) take the next error
//      pattern, XOR it onto Y and decrypt again;
//   4. repeat until the padding is right ("YES"): the plaintext Y' goes to
//      the output FIFOs.
// While a decryption runs, the next error pattern is already requested from
// the generator (prefetch), so a failed padding check starts the next
// decryption in the same cycle: one guess costs one decryption (13 cycles).
// When a block is finished the next one is fetched in the same cycle, so
// blocks that need no correction leave one every 13 cycles, each 13 cycles
// after its fetch (130 ns at 100 MHz, the paper's latency at high SNR; its
// goodput figures, k bits per 130 ns, assume this rate). If the output
// FIFOs are full the finished block is held (S_HOLD) until there is room.
// If the generator runs out of patterns (logistic weight above its limit)
// the block is abandoned and written out with the fail flag set and the
// plaintext of the uncorrected Y.
//
// status = {fail, guesses[14:0]}, guesses being the number of decryptions
// spent on the block (1 = no correction needed), saturating. The decode
// loop follows the paper; the prefetch, the back-to-back fetch, the
// abandonment rule and the status word are this design's choices.
module grand_ctrl
  import aes_grand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        key_ready,
  // input FIFOs
  input  logic        in_empty,
  input  block_t      in_y,
  output logic        in_pop,
  // noise removal AES
  output logic        aes_start,
  output block_t      aes_y,
  output block_t      aes_err,
  input  logic        aes_done,
  input  block_t      aes_pt,
  input  logic        pad_ok,
  // error pattern generator
  output logic        epg_load,
  output logic        epg_enable,
  input  logic        epg_ready,
  input  logic        epg_err_valid,
  input  block_t      epg_err,
  input  logic        epg_exhausted,
  // output FIFOs
  input  logic        out_full,
  output logic        out_push,
  output block_t      out_pt,
  output logic [15:0] out_status
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_WAITPAT, S_HOLD} state_e;

  state_e      state_q;
  block_t      y_q, err_next_q, first_pt_q, hold_pt_q;
  logic [15:0] hold_status_q;
  logic        have_next_q, req_pending_q;
  logic [14:0] guesses_q;

  logic        start_retry, finish, fetch, can_fetch;
  block_t      res_pt;
  logic [15:0] res_status;

  assign can_fetch = key_ready && !in_empty;

  always_comb begin
    start_retry = 1'b0;
    finish      = 1'b0;
    res_pt      = aes_pt;
    res_status  = {1'b0, guesses_q};
    unique case (state_q)
      S_WAIT: if (aes_done) begin
        if (pad_ok) begin
          finish = 1'b1;                    // right padding: Y' out
        end else if (have_next_q) begin
          start_retry = 1'b1;
        end else if (epg_exhausted && !req_pending_q) begin
          finish     = 1'b1;                // abandoned: plaintext of the uncorrected Y
          res_pt     = (guesses_q == 15'd1) ? aes_pt : first_pt_q;
          res_status = {1'b1, guesses_q};
        end
      end
      S_WAITPAT: begin
        if (have_next_q) begin
          start_retry = 1'b1;
        end else if (epg_exhausted && !req_pending_q) begin
          finish     = 1'b1;
          res_pt     = first_pt_q;
          res_status = {1'b1, guesses_q};
        end
      end
      default: ;
    endcase

    out_push   = 1'b0;
    out_pt     = res_pt;
    out_status = res_status;
    if (state_q == S_HOLD) begin
      out_push   = !out_full;
      out_pt     = hold_pt_q;
      out_status = hold_status_q;
    end else if (finish) begin
      out_push   = !out_full;
    end

    // fetch when idle, or in the cycle a block leaves
    fetch = can_fetch && ((state_q == S_IDLE) || out_push);
    in_pop   = fetch;
    epg_load = fetch;

    aes_start = fetch || start_retry;
    aes_y     = fetch ? in_y : y_q;         // first decryption straight from the FIFO
    aes_err   = start_retry ? err_next_q : '0;
  end

  // prefetch of the next error pattern while a block is in progress; never
  // in a fetch cycle, where it would be answered for the old block
  assign epg_enable = (state_q == S_WAIT || state_q == S_WAITPAT) && !fetch &&
                      !have_next_q && !req_pending_q && epg_ready && !epg_exhausted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      y_q           <= '0;
      err_next_q    <= '0;
      first_pt_q    <= '0;
      hold_pt_q     <= '0;
      hold_status_q <= '0;
      have_next_q   <= 1'b0;
      req_pending_q <= 1'b0;
      guesses_q     <= '0;
    end else begin
      if (epg_enable) req_pending_q <= 1'b1;
      if (epg_err_valid) begin
        req_pending_q <= 1'b0;
        have_next_q   <= 1'b1;
        err_next_q    <= epg_err;
      end
      if (start_retry) begin
        have_next_q <= 1'b0;
        if (guesses_q != '1) guesses_q <= guesses_q + 1'b1;
        state_q <= S_WAIT;
      end
      if (state_q == S_WAIT && aes_done && guesses_q == 15'd1) first_pt_q <= aes_pt;
      if (state_q == S_WAIT && aes_done && !pad_ok && !start_retry && !finish)
        state_q <= S_WAITPAT;

      if (finish && out_full) begin
        hold_pt_q     <= res_pt;
        hold_status_q <= res_status;
        state_q       <= S_HOLD;
      end else if (out_push && !fetch) begin
        state_q <= S_IDLE;
      end

      if (fetch) begin
        y_q           <= in_y;
        have_next_q   <= 1'b0;
        req_pending_q <= 1'b0;
        guesses_q     <= 15'd1;
        state_q       <= S_WAIT;
      end
    end
  end

  a_push_not_full: assert property (@(posedge clk) disable iff (!rst_n) out_push |-> !out_full)
    else $error("grand_ctrl: push into a full output FIFO");
  a_no_stale_request: assert property (@(posedge clk) disable iff (!rst_n) epg_load |-> !epg_enable)
    else $error("grand_ctrl: pattern requested in a fetch cycle");

endmodule
