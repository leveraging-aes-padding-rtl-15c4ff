// aes_grand_pkg: constants, types and AES arithmetic shared by the joint
// ORBGRAND + AES-128 receiver.
//
// The block is 128 bits (AES block size). Bytes are numbered the AES way:
// byte 0 is bits [127:120], and the 4x4 state is filled column by column
// (bytes 0..3 form column 0). The S-box and inverse S-box are not typed in
// as tables; they are computed at elaboration time from their definition
// (multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1, followed by the
// affine map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 8'h63).
package aes_grand_pkg;

  localparam int unsigned BLOCK_W = 128;   // AES block / codeword length n
  localparam int unsigned NROUNDS = 10;    // AES-128

  typedef logic [BLOCK_W-1:0] block_t;
  typedef logic [NROUNDS:0][BLOCK_W-1:0] round_keys_t;  // [r] = round key r

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = 8'h00;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] b, input int unsigned s);
    return (b << s) | (b >> (8 - s));
  endfunction

  // Forward S-box entry computed from its definition.
  function automatic logic [7:0] sbox_calc(input logic [7:0] x);
    logic [7:0] inv, t;
    inv = 8'h00;
    if (x != 8'h00) begin
      // x^254 = x^-1 in GF(2^8)
      inv = 8'h01;
      t   = x;
      for (int i = 0; i < 8; i++) begin
        if (((8'd254 >> i) & 8'd1) != 8'd0) inv = gmul(inv, t);
        t = gmul(t, t);
      end
    end
    return inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
  endfunction

  typedef logic [255:0][7:0] byte_table_t;

  function automatic byte_table_t gen_sbox();
    byte_table_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  function automatic byte_table_t gen_inv_sbox();
    byte_table_t t, f;
    f = gen_sbox();
    t = '0;
    for (int i = 0; i < 256; i++) t[f[i]] = 8'(i);
    return t;
  endfunction

  localparam byte_table_t SBOX     = gen_sbox();
  localparam byte_table_t INV_SBOX = gen_inv_sbox();

  // ------------------------------------------------------- state byte access
  function automatic logic [7:0] get_byte(input block_t s, input int unsigned i);
    return s[BLOCK_W-1-8*i -: 8];
  endfunction

  // ------------------------------------------------------ inverse round steps
  function automatic block_t inv_shift_rows(input block_t s);
    block_t o;
    // byte at (row r, column c) is index 4c+r; InvShiftRows moves it to column c+r
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[BLOCK_W-1-8*(4*((c + r) % 4) + r) -: 8] = get_byte(s, 4*c + r);
    return o;
  endfunction

  function automatic block_t inv_sub_bytes(input block_t s);
    block_t o;
    for (int i = 0; i < 16; i++) o[BLOCK_W-1-8*i -: 8] = INV_SBOX[get_byte(s, i)];
    return o;
  endfunction

  function automatic block_t inv_mix_columns(input block_t s);
    block_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);
      a1 = get_byte(s, 4*c + 1);
      a2 = get_byte(s, 4*c + 2);
      a3 = get_byte(s, 4*c + 3);
      o[BLOCK_W-1-8*(4*c)   -: 8] = gmul(a0, 8'h0e) ^ gmul(a1, 8'h0b) ^ gmul(a2, 8'h0d) ^ gmul(a3, 8'h09);
      o[BLOCK_W-1-8*(4*c+1) -: 8] = gmul(a0, 8'h09) ^ gmul(a1, 8'h0e) ^ gmul(a2, 8'h0b) ^ gmul(a3, 8'h0d);
      o[BLOCK_W-1-8*(4*c+2) -: 8] = gmul(a0, 8'h0d) ^ gmul(a1, 8'h09) ^ gmul(a2, 8'h0e) ^ gmul(a3, 8'h0b);
      o[BLOCK_W-1-8*(4*c+3) -: 8] = gmul(a0, 8'h0b) ^ gmul(a1, 8'h0d) ^ gmul(a2, 8'h09) ^ gmul(a3, 8'h0e);
    end
    return o;
  endfunction

  // ------------------------------------------------------------ key schedule
  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  // Round constant of round r (1..10): x^(r-1) in GF(2^8).
  function automatic logic [7:0] rcon(input int unsigned r);
    logic [7:0] v;
    v = 8'h01;
    for (int i = 1; i < 16; i++) if (i < r) v = xtime(v);
    return v;
  endfunction

  // Round key r from round key r-1.
  function automatic block_t next_round_key(input block_t k, input int unsigned r);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = sub_word({w3[23:0], w3[31:24]}) ^ {rcon(r), 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
