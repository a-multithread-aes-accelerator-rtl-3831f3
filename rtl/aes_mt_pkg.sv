// aes_mt_pkg -- types, constants and AES step functions shared by the
// multithread tagged-dataflow AES accelerator.
//
// State convention (FIPS-197): a 128-bit block holds bytes b0..b15 with b0 in
// bits [127:120]; byte bk is state element s[r][c] with k = r + 4*c, so the
// state is stored column by column. Round keys use the same layout.
//
// The S-box is not pasted in as a table: gen_sbox() computes it from its
// definition (multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1,
// followed by the affine map b ^ rotl1(b) ^ rotl2(b) ^ rotl3(b) ^ rotl4(b) ^ 0x63),
// using exp/log tables over the generator 0x03. SBOX is a constant elaborated
// from it, so each S-box lookup becomes a 256-entry ROM.
//
// AES_128 / AES_256 are the configuration IDs written into the per-thread
// configuration registers; the paper does not give their encoding, the values
// here are this design's choice.
package aes_mt_pkg;

  typedef logic [127:0] block_t;
  typedef logic [255:0] key256_t;
  typedef logic [7:0]   byte_t;

  typedef enum logic {
    AES_128 = 1'b0,
    AES_256 = 1'b1
  } conf_id_e;

  localparam int unsigned NR_128 = 10;  // AES-128 rounds
  localparam int unsigned NR_256 = 14;  // AES-256 rounds

  // Multiply by x in GF(2^8).
  function automatic byte_t xtime(input byte_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] sb;
    logic [255:0][7:0] exp_t;
    logic [255:0][7:0] log_t;
    byte_t p, inv, s;
    p = 8'h01;
    exp_t = '0;
    log_t = '0;
    for (int i = 0; i < 255; i++) begin
      exp_t[i] = p;
      log_t[p] = 8'(i);
      p = p ^ xtime(p);  // p * 0x03
    end
    for (int x = 0; x < 256; x++) begin
      if (x == 0) inv = 8'h00;
      else inv = exp_t[(255 - int'(log_t[x])) % 255];
      s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      sb[x] = s;
    end
    return sb;
  endfunction

  localparam logic [255:0][7:0] SBOX = gen_sbox();

  function automatic byte_t sbox(input byte_t b);
    return SBOX[b];
  endfunction

  function automatic block_t sub_bytes(input block_t s);
    block_t o;
    for (int k = 0; k < 16; k++) o[127-8*k -: 8] = SBOX[s[127-8*k -: 8]];
    return o;
  endfunction

  // Row r is rotated left by r positions: s'[r][c] = s[r][(c+r) mod 4].
  function automatic block_t shift_rows(input block_t s);
    block_t o;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        o[127-8*(r+4*c) -: 8] = s[127-8*(r+4*((c+r)%4)) -: 8];
    return o;
  endfunction

  function automatic logic [31:0] mix_column(input logic [31:0] col);
    byte_t a0, a1, a2, a3;
    {a0, a1, a2, a3} = col;
    return {xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3,
            a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3,
            a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3,
            xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3)};
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    for (int c = 0; c < 4; c++) o[127-32*c -: 32] = mix_column(s[127-32*c -: 32]);
    return o;
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  function automatic logic [31:0] rot_word(input logic [31:0] w);
    return {w[23:0], w[31:24]};
  endfunction

  // Rcon[i] = x^(i-1) in GF(2^8), i >= 1.
  function automatic byte_t rcon(input int unsigned i);
    byte_t r;
    r = 8'h01;
    for (int unsigned j = 1; j < i; j++) r = xtime(r);
    return r;
  endfunction

  // AES-128 key schedule step: round key i-1 -> round key i (Nk = 4).
  function automatic block_t expand128(input block_t k, input byte_t rc);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = sub_word(rot_word(w3)) ^ {rc, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // AES-256 key schedule step (Nk = 8): from the window {rk[i-2], rk[i-1]}
  // compute rk[i]. Even i: RotWord+SubWord+Rcon[i/2]; odd i: SubWord only.
  function automatic block_t expand256(input key256_t win, input int unsigned i);
    logic [31:0] w0, w1, w2, w3, w7, t;
    {w0, w1, w2, w3} = win[255:128];
    w7 = win[31:0];
    t  = (i % 2 == 0) ? (sub_word(rot_word(w7)) ^ {rcon(i / 2), 24'h0}) : sub_word(w7);
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
