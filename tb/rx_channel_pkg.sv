// rx_channel_pkg: transmitter and channel models for the receiver
// testbenches.
//
// A block is built as the transmitter does it: a random k-bit payload
// followed by the padding sequence, encrypted with AES-128 (behavioural
// model). It is then sent over one of these channels, giving the hard
// decisions Y and the LLR magnitudes the receiver takes in:
//   CH_CLEAN   no errors, all bits fairly reliable;
//   CH_FLIPS   nflip bits flipped and marked unreliable (magnitude 0..3),
//              a few correct bits marked unreliable as well;
//   CH_STRONG  nflip bits flipped but marked reliable, beyond what a small
//              logistic-weight limit can reach;
//   CH_AWGN    BPSK over AWGN at a given Eb/N0 (energy per payload bit), LLR
//              2r/sigma^2 quantised to MAG_W bits with 4 steps per unit.
// The SPI frame is {Y[127:0], mag[127], ..., mag[0]}.
package rx_channel_pkg;
  import aes_ref_pkg::*;

  localparam int N = 128;
  localparam int MAG_W = 6;
  localparam int FRAME_W = N + N * MAG_W;

  typedef enum int {CH_CLEAN, CH_FLIPS, CH_STRONG, CH_AWGN} channel_e;

  typedef struct {
    logic [127:0]       payload_block;   // plaintext: payload and padding
    logic [127:0]       ct;
    logic [127:0]       y;
    logic [N-1:0][MAG_W-1:0] mag;
    int                 nerr;            // bits in error
    channel_e           ch;
  } tx_block_t;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  function automatic tx_block_t make_block(input logic [127:0] key, input int pad_bits,
                                           input logic [15:0] pad_value, input channel_e ch,
                                           input int nflip, input real ebn0_db);
    tx_block_t b;
    logic [127:0] p;
    int idx;
    real rate, sigma, r, llr, q;
    p = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < pad_bits; i++) p[i] = pad_value[i];
    b.payload_block = p;
    b.ct = aes128_encrypt(key, p);
    b.y = b.ct;
    b.nerr = 0;
    b.ch = ch;
    for (int i = 0; i < N; i++) b.mag[i] = MAG_W'($urandom_range(63, 20));
    case (ch)
      CH_FLIPS, CH_STRONG: begin
        for (int f = 0; f < nflip; f++) begin
          do idx = $urandom_range(N - 1, 0); while (b.y[idx] != b.ct[idx]);
          b.y[idx] = ~b.y[idx];
          b.mag[idx] = (ch == CH_FLIPS) ? MAG_W'($urandom_range(3, 0)) : MAG_W'($urandom_range(63, 50));
        end
        if (ch == CH_FLIPS)
          for (int f = 0; f < 3; f++) begin
            idx = $urandom_range(N - 1, 0);
            if (b.y[idx] == b.ct[idx]) b.mag[idx] = MAG_W'($urandom_range(6, 2));
          end
      end
      CH_AWGN: begin
        rate  = real'(N - pad_bits) / real'(N);
        sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
        for (int i = 0; i < N; i++) begin
          r   = (b.ct[i] ? -1.0 : 1.0) + sigma * gauss();
          llr = 2.0 * r / (sigma * sigma);
          b.y[i] = (r < 0.0);
          q = (llr < 0.0 ? -llr : llr) * 4.0;
          b.mag[i] = (q >= 63.0) ? MAG_W'(63) : MAG_W'(int'($floor(q)));
        end
      end
      default: ;
    endcase
    for (int i = 0; i < N; i++) if (b.y[i] != b.ct[i]) b.nerr++;
    return b;
  endfunction

  function automatic logic [FRAME_W-1:0] frame_of(input tx_block_t b);
    return {b.y, b.mag};
  endfunction

endpackage
