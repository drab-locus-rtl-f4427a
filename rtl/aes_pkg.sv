// aes_pkg: types, constants and GF(2^8) helpers shared by the DRAB-LOCUS
// AES-128 core.
//
// The cipher state is a 128-bit vector in column-major order: byte s(r,c)
// (row r, column c) sits at bits [127-8*(4*c+r) -: 8], so s(0,0) is the most
// significant byte, as in the FIPS-197 byte sequence in0..in15.
//
// The block mode is one bit: 0 encrypts, 1 decrypts. Every look-up table in
// the core is addressed with the mode bit prepended to the data byte (or round
// number), so the encryption half of a table is the low half and the
// decryption half the high half.
//
// The S-box and the GF(2^8) products are computed by functions here, at
// elaboration time, so the ROM contents need no data files: the S-box is the
// multiplicative inverse x^254 followed by the FIPS-197 affine map.
package aes_pkg;

  typedef logic [127:0] state_t;
  typedef logic [7:0]   byte_t;

  typedef enum logic {
    MODE_ENC = 1'b0,
    MODE_DEC = 1'b1
  } mode_e;

  // Pipeline structure (see README): 12 stages in the round loop,
  // 9 passes through it, a 113-cycle completion tracker, 115-cycle latency.
  localparam int unsigned LOOP_STAGES  = 12;
  localparam int unsigned ROUND_PASSES = 9;
  localparam int unsigned NUM_ROUNDS   = 10;
  localparam int unsigned TRACK_LEN    = 113;
  localparam int unsigned LATENCY      = 115;

  // Stage numbers inside the loop (value = register stage that holds the
  // result, counting from the loop entry).
  localparam int unsigned ST_SB  = 2;   // sub bytes: BRAM read + output reg
  localparam int unsigned ST_SR  = 3;   // shift rows: fabric flip-flops
  localparam int unsigned ST_MC  = 9;   // mix columns: 2 BRAM + 4 DSP stages
  localparam int unsigned ST_ARK = 12;  // add round key: 2 input + 1 output reg

  function automatic byte_t xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t p = '0;
    byte_t x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // Multiplicative inverse as a^254 (square-and-multiply); 0 maps to 0.
  function automatic byte_t gf_inv(byte_t a);
    byte_t r = 8'h01;
    byte_t s = a;
    byte_t e = 8'd254;
    for (int i = 0; i < 8; i++) begin
      if (e[i]) r = gf_mul(r, s);
      s = gf_mul(s, s);
    end
    return r;
  endfunction

  function automatic byte_t rotl8(byte_t a, int unsigned n);
    return byte_t'((a << n) | (a >> (8 - n)));
  endfunction

  function automatic byte_t sbox(byte_t a);
    byte_t b = gf_inv(a);
    return b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
  endfunction

  function automatic byte_t inv_sbox(byte_t a);
    byte_t b = rotl8(a, 1) ^ rotl8(a, 3) ^ rotl8(a, 6) ^ 8'h05;
    return gf_inv(b);
  endfunction

  // Byte s(r,c) of a state.
  function automatic byte_t get_byte(state_t s, int unsigned r, int unsigned c);
    return s[127 - 8 * (4 * c + r) -: 8];
  endfunction

  // Round constant for round i (1..10): x^(i-1) in GF(2^8).
  function automatic byte_t rcon(logic [3:0] i);
    byte_t r = 8'h01;
    for (int k = 1; k < 10; k++) if (4'(k) < i) r = xtime(r);
    return r;
  endfunction

endpackage
