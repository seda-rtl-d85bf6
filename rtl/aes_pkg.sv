// aes_pkg: AES-128 round functions (FIPS-197) used by the AES engine and by
// the key expansion.
//
// Byte order: byte 0 of a 128-bit state is bits [127:120]; column c holds
// bytes 4c..4c+3. The S-box is not typed in as a table: it is computed at
// elaboration as the affine transform of the multiplicative inverse in
// GF(2^8) (inverse = a^254), which is its definition.
package aes_pkg;

  typedef logic [127:0]        state_t;
  typedef logic [10:0][127:0]  rkeys_t;   // round keys k0..k10, rk[i] = k_i

  function automatic logic [7:0] xtime(logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    logic [7:0] aa;
    p  = 8'h00;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  // a^254 = a^-1 in GF(2^8), and 0 for a = 0.
  function automatic logic [7:0] ginv(logic [7:0] a);
    logic [7:0] r;
    logic [7:0] base;
    r    = 8'h01;
    base = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, base);   // 254 = 8'b1111_1110
      base = gmul(base, base);
    end
    return r;
  endfunction

  function automatic logic [7:0] rotl8(logic [7:0] b, int unsigned n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic logic [255:0][7:0] sbox_table();
    logic [255:0][7:0] t;
    logic [7:0] v;
    for (int i = 0; i < 256; i++) begin
      v = ginv(8'(i));
      t[i] = v ^ rotl8(v, 1) ^ rotl8(v, 2) ^ rotl8(v, 3) ^ rotl8(v, 4) ^ 8'h63;
    end
    return t;
  endfunction

  localparam logic [255:0][7:0] SBOX = sbox_table();

  function automatic logic [7:0] sbox(logic [7:0] b);
    return SBOX[b];
  endfunction

  function automatic logic [7:0] get_byte(state_t s, int unsigned i);
    return s[127-8*i -: 8];
  endfunction

  function automatic state_t sub_bytes(state_t s);
    state_t r;
    for (int i = 0; i < 16; i++) r[127-8*i -: 8] = sbox(get_byte(s, i));
    return r;
  endfunction

  function automatic state_t shift_rows(state_t s);
    state_t r;
    for (int c = 0; c < 4; c++)
      for (int rw = 0; rw < 4; rw++)
        r[127-8*(rw+4*c) -: 8] = get_byte(s, rw + 4*((c + rw) % 4));
    return r;
  endfunction

  function automatic state_t mix_columns(state_t s);
    state_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);
      a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2);
      a3 = get_byte(s, 4*c+3);
      r[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  // One cipher round; the final round skips MixColumns.
  function automatic state_t aes_round(state_t s, state_t rk, logic final_round);
    state_t t;
    t = shift_rows(sub_bytes(s));
    if (!final_round) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // Key schedule step: round key k_{i} from k_{i-1}, rcon = Rcon[i].
  function automatic state_t next_round_key(state_t k, logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96];
    w1 = k[95:64];
    w2 = k[63:32];
    w3 = k[31:0];
    t  = {sbox(w3[23:16]), sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    t  = t ^ {rcon, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
