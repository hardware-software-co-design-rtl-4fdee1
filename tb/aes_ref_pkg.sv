// aes_ref_pkg -- software reference model of AES-128 used by the testbenches.
//
// Written independently of the RTL datapath: GF(2^8) products go through
// log/antilog tables built from the generator 3, the S-box is built from those
// tables, the state is a byte array indexed [row][column], and all eleven
// round keys are expanded up front as 44 words. Block and key order is the
// FIPS-197 one (first byte in the most significant position). Also provides
// the CTR-mode counter increment and a byte-level block helper.
package aes_ref_pkg;

  typedef logic [127:0] blk_t;
  typedef logic [7:0]   u8;

  u8  exp_t [0:255];
  int log_t [0:255];
  u8  sb    [0:255];
  u8  isb   [0:255];
  bit ready = 0;

  function automatic void init();
    u8 x;
    if (ready) return;
    x = 8'h01;
    for (int i = 0; i < 255; i++) begin
      exp_t[i] = x;
      log_t[x] = i;
      // multiply by 3 = x ^ 2x
      x = x ^ ((x << 1) ^ ((x & 8'h80) != 0 ? 8'h1b : 8'h00));
    end
    exp_t[255] = exp_t[0];
    for (int i = 0; i < 256; i++) begin
      u8 inv, s;
      inv = (i == 0) ? 8'h00 : exp_t[(255 - log_t[i]) % 255];
      s = 8'h63;
      for (int b = 0; b < 8; b++)
        s[b] = s[b] ^ inv[b] ^ inv[(b+4)%8] ^ inv[(b+5)%8] ^ inv[(b+6)%8] ^ inv[(b+7)%8];
      sb[i]  = s;
      isb[s] = u8'(i);
    end
    ready = 1;
  endfunction

  function automatic u8 mul(u8 a, u8 b);
    if (a == 0 || b == 0) return 8'h00;
    return exp_t[(log_t[a] + log_t[b]) % 255];
  endfunction

  typedef u8 state_t [4][4];

  function automatic state_t to_state(blk_t b);
    state_t s;
    for (int i = 0; i < 16; i++) s[i%4][i/4] = b[127-8*i -: 8];
    return s;
  endfunction

  function automatic blk_t from_state(state_t s);
    blk_t b;
    for (int i = 0; i < 16; i++) b[127-8*i -: 8] = s[i%4][i/4];
    return b;
  endfunction

  typedef logic [31:0] w_t;
  typedef w_t sched_t [44];

  function automatic sched_t expand(blk_t key);
    sched_t w;
    u8 rc;
    init();
    rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      w_t t;
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {sb[t[23:16]], sb[t[15:8]], sb[t[7:0]], sb[t[31:24]]} ^ {rc, 24'h0};
        rc = mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
    return w;
  endfunction

  function automatic void add_rk(ref state_t s, input sched_t w, input int r);
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        s[row][c] ^= w[4*r+c][31-8*row -: 8];
  endfunction

  function automatic blk_t encrypt(blk_t key, blk_t pt);
    sched_t w;
    state_t s, t;
    w = expand(key);
    s = to_state(pt);
    add_rk(s, w, 0);
    for (int r = 1; r <= 10; r++) begin
      for (int row = 0; row < 4; row++)
        for (int c = 0; c < 4; c++) t[row][c] = sb[s[row][(c+row)%4]];
      s = t;
      if (r != 10)
        for (int c = 0; c < 4; c++)
          for (int row = 0; row < 4; row++)
            s[row][c] = mul(t[row][c], 2) ^ mul(t[(row+1)%4][c], 3)
                        ^ t[(row+2)%4][c] ^ t[(row+3)%4][c];
      add_rk(s, w, r);
    end
    return from_state(s);
  endfunction

  function automatic blk_t decrypt(blk_t key, blk_t ct);
    sched_t w;
    state_t s, t;
    w = expand(key);
    s = to_state(ct);
    for (int r = 10; r >= 1; r--) begin
      add_rk(s, w, r);
      if (r != 10) begin
        t = s;
        for (int c = 0; c < 4; c++)
          for (int row = 0; row < 4; row++)
            s[row][c] = mul(t[row][c], 14) ^ mul(t[(row+1)%4][c], 11)
                        ^ mul(t[(row+2)%4][c], 13) ^ mul(t[(row+3)%4][c], 9);
      end
      for (int row = 0; row < 4; row++)
        for (int c = 0; c < 4; c++) t[row][(c+row)%4] = isb[s[row][c]];
      s = t;
    end
    add_rk(s, w, 0);
    return from_state(s);
  endfunction

  function automatic blk_t rand_blk();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
