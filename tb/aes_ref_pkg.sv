// aes_ref_pkg: straightforward AES-128 reference model for the testbenches.
//
// Written independently of the RTL: the S-box inverse is found by search,
// decryption is the standard inverse cipher (not the equivalent inverse
// cipher the hardware uses), and the state is handled as a byte array
// st[0..15] in FIPS-197 input order (st[4c+r] = s(r,c), st[0] = MSB).
package aes_ref_pkg;

  typedef logic [7:0] u8;

  function automatic u8 mul(u8 a, u8 b);
    u8 p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return p;
  endfunction

  u8  sb_tab [256];
  u8  isb_tab [256];
  bit tab_ready = 0;

  function automatic u8 sb_calc(u8 x);
    u8 inv = 0;
    u8 y;
    for (int c = 1; c < 256; c++) if (mul(x, u8'(c)) == 8'h01) inv = u8'(c);
    y = 8'h63;
    for (int i = 0; i < 8; i++)
      y[i] = y[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return y;
  endfunction

  function automatic void build_tables();
    for (int c = 0; c < 256; c++) begin
      sb_tab[c] = sb_calc(u8'(c));
      isb_tab[sb_tab[c]] = u8'(c);
    end
    tab_ready = 1;
  endfunction

  function automatic u8 sb(u8 x);
    if (!tab_ready) build_tables();
    return sb_tab[x];
  endfunction

  function automatic u8 isb(u8 x);
    if (!tab_ready) build_tables();
    return isb_tab[x];
  endfunction

  typedef logic [127:0] blk_t;
  typedef blk_t keys_t [11];

  function automatic keys_t expand(blk_t key);
    keys_t k;
    logic [31:0] w [44];
    u8 rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])} ^ {rc, 24'h0};
        rc = mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) k[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return k;
  endfunction

  function automatic u8 gb(blk_t s, int i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic blk_t encrypt(blk_t key, blk_t pt);
    keys_t k = expand(key);
    blk_t s = pt ^ k[0];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      blk_t t;
      for (int i = 0; i < 16; i++) t[127-8*i -: 8] = sb(gb(s, i));
      s = t;
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++) t[127-8*(4*c+r) -: 8] = gb(s, 4*((c+r)%4)+r);
      s = t;
      if (rnd != 10) begin
        for (int c = 0; c < 4; c++) begin
          u8 a0 = gb(s,4*c), a1 = gb(s,4*c+1), a2 = gb(s,4*c+2), a3 = gb(s,4*c+3);
          t[127-8*(4*c+0) -: 8] = mul(a0,2) ^ mul(a1,3) ^ a2 ^ a3;
          t[127-8*(4*c+1) -: 8] = a0 ^ mul(a1,2) ^ mul(a2,3) ^ a3;
          t[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ mul(a2,2) ^ mul(a3,3);
          t[127-8*(4*c+3) -: 8] = mul(a0,3) ^ a1 ^ a2 ^ mul(a3,2);
        end
        s = t;
      end
      s = s ^ k[rnd];
    end
    return s;
  endfunction

  function automatic blk_t inv_mix(blk_t s);
    blk_t t;
    for (int c = 0; c < 4; c++) begin
      u8 a0 = gb(s,4*c), a1 = gb(s,4*c+1), a2 = gb(s,4*c+2), a3 = gb(s,4*c+3);
      t[127-8*(4*c+0) -: 8] = mul(a0,14) ^ mul(a1,11) ^ mul(a2,13) ^ mul(a3,9);
      t[127-8*(4*c+1) -: 8] = mul(a0,9) ^ mul(a1,14) ^ mul(a2,11) ^ mul(a3,13);
      t[127-8*(4*c+2) -: 8] = mul(a0,13) ^ mul(a1,9) ^ mul(a2,14) ^ mul(a3,11);
      t[127-8*(4*c+3) -: 8] = mul(a0,11) ^ mul(a1,13) ^ mul(a2,9) ^ mul(a3,14);
    end
    return t;
  endfunction

  function automatic blk_t mix(blk_t s);
    blk_t t;
    for (int c = 0; c < 4; c++) begin
      u8 a0 = gb(s,4*c), a1 = gb(s,4*c+1), a2 = gb(s,4*c+2), a3 = gb(s,4*c+3);
      t[127-8*(4*c+0) -: 8] = mul(a0,2) ^ mul(a1,3) ^ a2 ^ a3;
      t[127-8*(4*c+1) -: 8] = a0 ^ mul(a1,2) ^ mul(a2,3) ^ a3;
      t[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ mul(a2,2) ^ mul(a3,3);
      t[127-8*(4*c+3) -: 8] = mul(a0,3) ^ a1 ^ a2 ^ mul(a3,2);
    end
    return t;
  endfunction

  // Standard inverse cipher (FIPS-197 section 5.3).
  function automatic blk_t decrypt(blk_t key, blk_t ct);
    keys_t k = expand(key);
    blk_t s = ct ^ k[10];
    for (int rnd = 9; rnd >= 0; rnd--) begin
      blk_t t;
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++) t[127-8*(4*((c+r)%4)+r) -: 8] = gb(s, 4*c+r);
      s = t;
      for (int i = 0; i < 16; i++) t[127-8*i -: 8] = isb(gb(s, i));
      s = t ^ k[rnd];
      if (rnd != 0) s = inv_mix(s);
    end
    return s;
  endfunction

endpackage
