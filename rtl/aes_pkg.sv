// aes_pkg: AES-128 arithmetic used by the Half-Gate unit's fixed-key hash.
//
// The S-box is not stored as a pasted table: gen_sbox() computes it at
// elaboration time from its definition (multiplicative inverse in GF(2^8)
// modulo x^8+x^4+x^3+x+1, followed by the AES affine map), and SBOX is the
// resulting constant. The round functions follow FIPS-197. Byte 0 of a block
// is its most significant byte, so block 128'h00112233... has byte 0 = 8'h00.
package aes_pkg;

  typedef logic [127:0] block_t;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // a^254 = a^-1 (and 0 -> 0)
  function automatic logic [7:0] gf_inv(input logic [7:0] a);
    logic [7:0] r, sq;
    r  = 8'h01;
    sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, sq);   // exponent bits 1..7 of 254 are set
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] b, s;
    b = gf_inv(a);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam logic [255:0][7:0] SBOX = gen_sbox();

  function automatic logic [7:0] get_byte(input block_t x, input int i);
    return x[127-8*i -: 8];
  endfunction

  function automatic block_t sub_shift(input block_t s);
    block_t o;
    // ShiftRows: output byte (r + 4c) comes from input byte (r + 4((c+r) mod 4))
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*c) -: 8] = SBOX[get_byte(s, r + 4*((c+r)%4))];
    return o;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);   a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // Round keys 0..10 of an AES-128 key.
  function automatic logic [10:0][127:0] expand_key(input block_t key);
    logic [43:0][31:0] w;
    logic [31:0] t;
    logic [7:0]  rcon;
    logic [10:0][127:0] rk;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    rcon = 8'h01;
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {SBOX[t[23:16]], SBOX[t[15:8]], SBOX[t[7:0]], SBOX[t[31:24]]} ^ {rcon, 24'h0};
        rcon = xtime(rcon);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return rk;
  endfunction

endpackage
