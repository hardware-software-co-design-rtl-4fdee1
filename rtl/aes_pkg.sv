// aes_pkg -- types, constants and round functions shared by the AES-128
// encryption and decryption datapaths of the image-encryption co-processor.
//
// A 128-bit block is held as a packed vector whose most significant byte is
// AES byte 0, i.e. the order in which the bytes are written in FIPS-197 and in
// the usual hex test vectors. Byte i sits in row i%4, column i/4 of the AES
// state. The S-box and its inverse are not typed in as tables: they are
// computed at elaboration time from their definition (multiplicative inverse
// in GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the affine map with constant
// 0x63), so synthesis sees two 256-entry constant ROMs.
//
// The functions are purely combinational. Each round function and each key
// schedule step is one clock cycle of work in the iterative cores. The cipher
// itself is standard AES-128; the byte ordering and the choice of computing
// the tables are this implementation's own.
package aes_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [31:0]  word_t;
  typedef logic [127:0] block_t;
  // 256 entries packed into one vector, entry k in bits [8k+7:8k].
  typedef logic [255:0][7:0] sbox_t;

  // Block cipher mode of operation: ECB encrypts each block on its own, CTR
  // encrypts a counter and XORs the result (key stream) with the data.
  typedef enum logic {
    MODE_ECB = 1'b0,
    MODE_CTR = 1'b1
  } mode_e;

  localparam int unsigned NR          = 10;  // rounds of AES-128
  localparam byte_t       RCON_FIRST  = 8'h01;  // round constant of round 1
  localparam byte_t       RCON_LAST   = 8'h36;  // round constant of round 10

  // ---------------------------------------------------------------- GF(2^8)
  function automatic byte_t xtime(byte_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // Inverse of xtime, used to step the round constant backwards.
  function automatic byte_t inv_xtime(byte_t b);
    return b[0] ? (8'h80 | ((b ^ 8'h1b) >> 1)) : (b >> 1);
  endfunction

  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // a^254, which is a^-1 for a != 0 and 0 for a == 0.
  function automatic byte_t gf_inv(byte_t a);
    byte_t r, sq;
    r  = 8'h01;
    sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, sq);  // bits 1..7 of 254 are set
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  function automatic byte_t rotl8(byte_t b, int unsigned n);
    return byte_t'((b << n) | (b >> (8 - n)));
  endfunction

  function automatic sbox_t gen_sbox();
    sbox_t t;
    byte_t v;
    for (int i = 0; i < 256; i++) begin
      v    = gf_inv(byte_t'(i));
      t[i] = v ^ rotl8(v, 1) ^ rotl8(v, 2) ^ rotl8(v, 3) ^ rotl8(v, 4) ^ 8'h63;
    end
    return t;
  endfunction

  function automatic sbox_t gen_inv_sbox();
    sbox_t s, t;
    s = gen_sbox();
    t = '0;
    for (int i = 0; i < 256; i++) t[s[i]] = byte_t'(i);
    return t;
  endfunction

  localparam sbox_t SBOX     = gen_sbox();
  localparam sbox_t INV_SBOX = gen_inv_sbox();

  // ---------------------------------------------------------- byte access
  function automatic byte_t get_byte(block_t b, int unsigned i);
    return b[127-8*i -: 8];
  endfunction

  // ----------------------------------------------------------- round steps
  function automatic block_t sub_bytes(block_t s);
    block_t r;
    for (int i = 0; i < 16; i++) r[127-8*i -: 8] = SBOX[s[127-8*i -: 8]];
    return r;
  endfunction

  function automatic block_t inv_sub_bytes(block_t s);
    block_t r;
    for (int i = 0; i < 16; i++) r[127-8*i -: 8] = INV_SBOX[s[127-8*i -: 8]];
    return r;
  endfunction

  // Row r is rotated left by r positions: out(r,c) = in(r,(c+r) mod 4).
  function automatic block_t shift_rows(block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127-8*(row+4*c) -: 8] = s[127-8*(row+4*((c+row)%4)) -: 8];
    return r;
  endfunction

  // out(r,c) = in(r,(c-r) mod 4).
  function automatic block_t inv_shift_rows(block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127-8*(row+4*c) -: 8] = s[127-8*(row+4*((c+4-row)%4)) -: 8];
    return r;
  endfunction

  function automatic word_t mix_column(word_t w);
    byte_t a0, a1, a2, a3;
    {a0, a1, a2, a3} = w;
    return {xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3,
            a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3,
            a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3,
            xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3)};
  endfunction

  function automatic word_t inv_mix_column(word_t w);
    byte_t a0, a1, a2, a3;
    {a0, a1, a2, a3} = w;
    return {gf_mul(a0, 8'h0e) ^ gf_mul(a1, 8'h0b) ^ gf_mul(a2, 8'h0d) ^ gf_mul(a3, 8'h09),
            gf_mul(a0, 8'h09) ^ gf_mul(a1, 8'h0e) ^ gf_mul(a2, 8'h0b) ^ gf_mul(a3, 8'h0d),
            gf_mul(a0, 8'h0d) ^ gf_mul(a1, 8'h09) ^ gf_mul(a2, 8'h0e) ^ gf_mul(a3, 8'h0b),
            gf_mul(a0, 8'h0b) ^ gf_mul(a1, 8'h0d) ^ gf_mul(a2, 8'h09) ^ gf_mul(a3, 8'h0e)};
  endfunction

  function automatic block_t mix_columns(block_t s);
    block_t r;
    for (int c = 0; c < 4; c++) r[127-32*c -: 32] = mix_column(s[127-32*c -: 32]);
    return r;
  endfunction

  function automatic block_t inv_mix_columns(block_t s);
    block_t r;
    for (int c = 0; c < 4; c++) r[127-32*c -: 32] = inv_mix_column(s[127-32*c -: 32]);
    return r;
  endfunction

  // One encryption round; the last round (10) omits MixColumns.
  function automatic block_t enc_round(block_t s, block_t rk, logic last);
    block_t t;
    t = shift_rows(sub_bytes(s));
    if (!last) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // One round of the inverse cipher; the last one omits InvMixColumns.
  function automatic block_t dec_round(block_t s, block_t rk, logic last);
    block_t t;
    t = inv_sub_bytes(inv_shift_rows(s)) ^ rk;
    if (!last) t = inv_mix_columns(t);
    return t;
  endfunction

  // ---------------------------------------------------------- key schedule
  function automatic word_t sub_rot_word(word_t w);
    return {SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]], SBOX[w[31:24]]};
  endfunction

  // Round key r from round key r-1, using the round constant of round r.
  function automatic block_t key_step(block_t k, byte_t rcon);
    word_t w0, w1, w2, w3;
    {w0, w1, w2, w3} = k;
    w0 = w0 ^ sub_rot_word(w3) ^ {rcon, 24'h0};
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Round key r-1 from round key r (rcon is the round constant of round r).
  function automatic block_t inv_key_step(block_t k, byte_t rcon);
    word_t w0, w1, w2, w3;
    {w0, w1, w2, w3} = k;
    w3 = w3 ^ w2;
    w2 = w2 ^ w1;
    w1 = w1 ^ w0;
    w0 = w0 ^ sub_rot_word(w3) ^ {rcon, 24'h0};
    return {w0, w1, w2, w3};
  endfunction

endpackage
