// padding_check: the padding test that replaces a syndrome check.
//
// The transmitter pads a k-bit payload with n-k known bits before
// encryption, payload first. After a candidate has been decrypted, the last
// pad_len bits of the plaintext (bits [pad_len-1:0], i.e. the end of byte
// 15) must equal the low pad_len bits of the known padding sequence; pad_ok
// says whether they do. PAD_BITS is the longest padding the check can hold;
// pad_len (0..PAD_BITS, larger values act as PAD_BITS) selects the length in
// use, so one receiver serves both padding lengths the paper evaluates
// (12 and 8 bits). Purely combinational, so a decision is available in the
// cycle the decryption result appears. The paper gives no padding content
// (its two figures show different example bits), so the sequence is an
// input; the run-time length is this design's choice.
module padding_check
  import aes_grand_pkg::*;
#(
  parameter int unsigned PAD_BITS = 12,
  localparam int unsigned LEN_W   = $clog2(PAD_BITS + 1)
) (
  input  block_t              pt,
  input  logic [PAD_BITS-1:0] pad_value,
  input  logic [LEN_W-1:0]    pad_len,
  output logic                pad_ok
);

  logic [PAD_BITS-1:0] mismatch;

  always_comb begin
    for (int i = 0; i < PAD_BITS; i++)
      mismatch[i] = (pt[i] != pad_value[i]) && (LEN_W'(i) < pad_len);
  end

  assign pad_ok = (mismatch == '0);

endmodule
