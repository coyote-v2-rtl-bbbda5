// aes_pkg: AES-128 round functions (FIPS-197) for the encryption pipeline.
// A 128-bit block holds bytes b0..b15 with b0 in bits [127:120]; byte
// r + 4c is row r, column c of the AES state. The S-box is not stored as a
// table: it is computed at elaboration from its definition, the
// multiplicative inverse in GF(2^8) (modulo x^8+x^4+x^3+x+1) followed by the
// affine map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] a, input int n);
    return 8'((a << n) | (a >> (8 - n)));
  endfunction

  function automatic logic [2047:0] gen_sbox();
    logic [2047:0] t;
    logic [7:0] inv, sq, b;
    for (int x = 0; x < 256; x++) begin
      // x^254 = x^-1 (and 0 maps to 0)
      inv = 8'h01;
      sq  = 8'(x);
      for (int e = 0; e < 8; e++) begin
        if (e != 0) inv = gf_mul(inv, sq);   // 254 = 0b11111110
        sq = gf_mul(sq, sq);
      end
      b = inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
      t[8*x +: 8] = b;
    end
    return t;
  endfunction

  localparam logic [2047:0] SBOX = gen_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] a);
    return SBOX[8*a +: 8];
  endfunction

  function automatic logic [7:0] byte_of(input logic [127:0] s, input int i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic logic [127:0] sub_shift(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*c) -: 8] = sbox(byte_of(s, r + 4*((c + r) % 4)));
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = byte_of(s, 4*c); a1 = byte_of(s, 4*c+1); a2 = byte_of(s, 4*c+2); a3 = byte_of(s, 4*c+3);
      o[127 - 8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127 - 8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127 - 8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127 - 8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // One encryption round; the tenth round omits MixColumns.
  function automatic logic [127:0] aes_round(input logic [127:0] s, input logic [127:0] rk,
                                             input logic final_round);
    logic [127:0] t;
    t = sub_shift(s);
    if (!final_round) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // Next AES-128 round key from the previous one and the round constant.
  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
