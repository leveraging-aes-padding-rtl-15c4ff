// aes_ref_pkg: behavioural AES-128 encryption model for the testbenches.
//
// Stands in for the transmitter of the padded-AES link: it pads nothing
// itself, it only encrypts a 128-bit block with a 128-bit key (FIPS-197).
// It is written independently of the receiver RTL: the S-box is built by
// searching for the multiplicative inverse instead of exponentiating, and
// the cipher runs forward (SubBytes, ShiftRows, MixColumns, AddRoundKey)
// on a byte array rather than on the packed state.
package aes_ref_pkg;

  typedef logic [7:0] bytes16_t [16];

  function automatic logic [7:0] ref_xtime(input logic [7:0] b);
    return b[7] ? ((b << 1) ^ 8'h1b) : (b << 1);
  endfunction

  function automatic logic [7:0] ref_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r;
    logic [7:0] x;
    r = 0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= x;
      x = ref_xtime(x);
    end
    return r;
  endfunction

  function automatic logic [7:0] ref_sbox(input logic [7:0] a);
    logic [7:0] inv, s;
    inv = 0;
    for (int c = 1; c < 256; c++) if (ref_mul(a, 8'(c)) == 8'h01) inv = 8'(c);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  function automatic bytes16_t to_bytes(input logic [127:0] v);
    bytes16_t b;
    for (int i = 0; i < 16; i++) b[i] = v[127-8*i -: 8];
    return b;
  endfunction

  function automatic logic [127:0] from_bytes(input bytes16_t b);
    logic [127:0] v;
    for (int i = 0; i < 16; i++) v[127-8*i -: 8] = b[i];
    return v;
  endfunction

  // AES-128 encryption of pt under key
  function automatic logic [127:0] aes128_encrypt(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] sb [256];
    logic [7:0] w [176];
    bytes16_t   s, t;
    logic [7:0] rc, tmp0, a0, a1, a2, a3;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(8'(i));
    for (int i = 0; i < 16; i++) w[i] = key[127-8*i -: 8];
    rc = 8'h01;
    for (int i = 16; i < 176; i += 4) begin
      logic [7:0] t0, t1, t2, t3;
      t0 = w[i-4]; t1 = w[i-3]; t2 = w[i-2]; t3 = w[i-1];
      if (i % 16 == 0) begin
        tmp0 = t0;
        t0 = sb[t1] ^ rc; t1 = sb[t2]; t2 = sb[t3]; t3 = sb[tmp0];
        rc = ref_xtime(rc);
      end
      w[i] = w[i-16] ^ t0; w[i+1] = w[i-15] ^ t1; w[i+2] = w[i-14] ^ t2; w[i+3] = w[i-13] ^ t3;
    end
    s = to_bytes(pt);
    for (int i = 0; i < 16; i++) s[i] ^= w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sb[s[i]];
      for (int c = 0; c < 4; c++)                 // ShiftRows: row r moves left by r
        for (int rr = 0; rr < 4; rr++) t[4*c + rr] = s[4*((c + rr) % 4) + rr];
      s = t;
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          a0 = s[4*c]; a1 = s[4*c+1]; a2 = s[4*c+2]; a3 = s[4*c+3];
          s[4*c]   = ref_mul(a0, 2) ^ ref_mul(a1, 3) ^ a2 ^ a3;
          s[4*c+1] = a0 ^ ref_mul(a1, 2) ^ ref_mul(a2, 3) ^ a3;
          s[4*c+2] = a0 ^ a1 ^ ref_mul(a2, 2) ^ ref_mul(a3, 3);
          s[4*c+3] = ref_mul(a0, 3) ^ a1 ^ a2 ^ ref_mul(a3, 2);
        end
      for (int i = 0; i < 16; i++) s[i] ^= w[16*r + i];
    end
    return from_bytes(s);
  endfunction

endpackage
