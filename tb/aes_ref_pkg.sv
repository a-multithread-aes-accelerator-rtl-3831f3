// aes_ref_pkg -- reference AES-128/AES-256 encryption for the testbenches.
//
// Written independently of the design's aes_mt_pkg: the S-box is found by
// searching for each byte's multiplicative inverse with a bitwise GF(2^8)
// multiply, the key schedule is the textbook word-array expansion, and the
// round is computed on a 4x4 byte matrix. State layout follows FIPS-197
// (first byte in the most significant bits, column-major state).
package aes_ref_pkg;

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa, bb;
    p = 0; aa = a; bb = b;
    for (int i = 0; i < 8; i++) begin
      if (bb[0]) p ^= aa;
      aa = aa[7] ? ((aa << 1) ^ 8'h1b) : (aa << 1);
      bb = bb >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] ref_sbox(input logic [7:0] x);
    logic [7:0] inv, s;
    inv = 0;
    for (int y = 1; y < 256; y++) if (gmul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  logic [7:0] sbox_tab [256];
  bit         sbox_ready = 0;

  function automatic void init_sbox();
    if (!sbox_ready) begin
      for (int x = 0; x < 256; x++) sbox_tab[x] = ref_sbox(8'(x));
      sbox_ready = 1;
    end
  endfunction

  function automatic logic [7:0] sb(input logic [7:0] x);
    init_sbox();
    return sbox_tab[x];
  endfunction

  typedef logic [7:0] mat_t [4][4];

  function automatic mat_t to_mat(input logic [127:0] b);
    mat_t m;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) m[r][c] = b[127 - 8*(4*c + r) -: 8];
    return m;
  endfunction

  function automatic logic [127:0] from_mat(input mat_t m);
    logic [127:0] b;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) b[127 - 8*(4*c + r) -: 8] = m[r][c];
    return b;
  endfunction

  function automatic logic [127:0] r_subbytes(input logic [127:0] b);
    mat_t m = to_mat(b);
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) m[r][c] = sb(m[r][c]);
    return from_mat(m);
  endfunction

  function automatic logic [127:0] r_shiftrows(input logic [127:0] b);
    mat_t m = to_mat(b), o;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) o[r][c] = m[r][(c + r) % 4];
    return from_mat(o);
  endfunction

  function automatic logic [127:0] r_mixcolumns(input logic [127:0] b);
    mat_t m = to_mat(b), o;
    logic [7:0] mx [4][4] = '{'{2,3,1,1}, '{1,2,3,1}, '{1,1,2,3}, '{3,1,1,2}};
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) begin
        o[r][c] = 0;
        for (int k = 0; k < 4; k++) o[r][c] ^= gmul(mx[r][k], m[k][c]);
      end
    return from_mat(o);
  endfunction

  function automatic logic [127:0] r_round(input logic [127:0] s, input logic [127:0] k);
    return r_mixcolumns(r_shiftrows(r_subbytes(s))) ^ k;
  endfunction

  // Round keys rk[0..nr] for a key of nk words (4 or 8), key left-aligned in 256 bits.
  typedef logic [127:0] rk_t [15];

  function automatic rk_t key_schedule(input logic [255:0] key, input int nk);
    logic [31:0] w [60];
    logic [31:0] t;
    logic [7:0]  rc;
    rk_t rk;
    int nr = nk + 6;
    for (int i = 0; i < nk; i++) w[i] = key[255 - 32*i -: 32];
    rc = 8'h01;
    for (int i = nk; i < 4*(nr+1); i++) begin
      t = w[i-1];
      if (i % nk == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])} ^ {rc, 24'h0};
        rc = gmul(rc, 8'h02);
      end else if (nk > 6 && i % nk == 4) begin
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])};
      end
      w[i] = w[i-nk] ^ t;
    end
    for (int r = 0; r <= nr; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    for (int r = nr + 1; r < 15; r++) rk[r] = '0;
    return rk;
  endfunction

  function automatic logic [127:0] encrypt(input logic [127:0] pt, input logic [255:0] key, input int nk);
    rk_t rk = key_schedule(key, nk);
    int nr = nk + 6;
    logic [127:0] s = pt ^ rk[0];
    for (int r = 1; r < nr; r++) s = r_round(s, rk[r]);
    return r_shiftrows(r_subbytes(s)) ^ rk[nr];
  endfunction

  function automatic logic [127:0] encrypt128(input logic [127:0] pt, input logic [127:0] key);
    return encrypt(pt, {key, 128'h0}, 4);
  endfunction

  function automatic logic [127:0] encrypt256(input logic [127:0] pt, input logic [255:0] key);
    return encrypt(pt, key, 8);
  endfunction

endpackage
