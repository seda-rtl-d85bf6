// aes_ref_pkg: behavioural reference model for the testbenches.
//
// A plain software-style AES-128 (FIPS-197) written independently of the RTL:
// the S-box is built by searching for each byte's inverse in GF(2^8) instead
// of exponentiation, state is handled as a 4x4 byte matrix, and the key
// schedule works on the 44-word array of the standard. On top of it the
// package models SeDA's per-segment pads, block encryption and the CBC-MAC
// that the MAC unit uses.
package aes_ref_pkg;

  typedef logic [127:0] blk_t;
  typedef logic [7:0]   mat_t [4][4];   // [row][col]

  function automatic logic [7:0] mul(logic [7:0] a, logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11b << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] sb(logic [7:0] x);
    logic [7:0] inv, s;
    inv = 8'h00;
    for (int y = 1; y < 256; y++) if (mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  function automatic void expand(input blk_t key, output blk_t rk [11]);
    logic [31:0] w [44];
    logic [31:0] t;
    logic [7:0]  rc;
    rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])};
        t[31:24] ^= rc;
        rc = mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  function automatic void to_mat(input blk_t b, output mat_t m);
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) m[r][c] = b[127 - 8*(4*c+r) -: 8];
  endfunction

  function automatic blk_t from_mat(input mat_t m);
    blk_t b;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) b[127 - 8*(4*c+r) -: 8] = m[r][c];
    return b;
  endfunction

  function automatic blk_t encrypt(blk_t key, blk_t pt);
    blk_t rk [11];
    mat_t m, t;
    expand(key, rk);
    to_mat(pt ^ rk[0], m);
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) m[r][c] = sb(m[r][c]);
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][c] = m[r][(c+r)%4];
      if (rnd != 10) begin
        for (int c = 0; c < 4; c++)
          for (int r = 0; r < 4; r++)
            m[r][c] = mul(8'h02, t[r][c]) ^ mul(8'h03, t[(r+1)%4][c]) ^ t[(r+2)%4][c] ^ t[(r+3)%4][c];
      end else m = t;
      to_mat(from_mat(m) ^ rk[rnd], m);
    end
    return from_mat(m);
  endfunction

  // Pad of segment j: AES_Ke(ctr) ^ k_{j+1} of Ke for j < 10,
  // ^ k_{j-9} of (Ke ^ ctr) for j >= 10.
  function automatic blk_t seg_pad(blk_t key, blk_t ctr, int j);
    blk_t rk [11];
    blk_t otp;
    otp = encrypt(key, ctr);
    if (j < 10) begin
      expand(key, rk);
      return otp ^ rk[j+1];
    end
    expand(key ^ ctr, rk);
    return otp ^ rk[j-9];
  endfunction

  // CBC-MAC (zero IV) over nseg segments then the location record; upper 64 bits.
  function automatic logic [63:0] cbc_mac(blk_t key, logic [20*128-1:0] data, int nseg, blk_t meta);
    blk_t ch;
    ch = '0;
    for (int j = 0; j < nseg; j++) ch = encrypt(key, ch ^ data[j*128 +: 128]);
    ch = encrypt(key, ch ^ meta);
    return ch[127:64];
  endfunction

  function automatic blk_t rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
