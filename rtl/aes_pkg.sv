// aes_pkg: AES-128 round functions used by the unrolled encryption core.
//
// A 128-bit state holds the 16 AES bytes with byte 0 in bits [127:120] (the
// FIPS-197 order); byte r + 4c is row r, column c. The S-box is not stored as a
// typed-in table: it is computed at elaboration time from its definition (the
// multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1, followed by the affine
// map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63), and synthesis
// turns each lookup into a 256-entry ROM.
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] b, input int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  // x^254 = x^-1 in GF(2^8) (0 maps to 0), then the affine map
  function automatic logic [7:0] sbox_calc(input logic [7:0] x);
    logic [7:0] inv, sq;
    inv = 8'h01;
    sq  = x;
    for (int i = 1; i < 8; i++) begin   // 254 = 0b11111110
      sq  = gf_mul(sq, sq);
      inv = gf_mul(inv, sq);
    end
    return inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
  endfunction

  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam logic [255:0][7:0] SBOX = gen_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return SBOX[x];
  endfunction

  function automatic logic [7:0] get_byte(input logic [127:0] s, input int i);
    return s[127 - 8*i -: 8];
  endfunction

  // SubBytes followed by ShiftRows: out[r+4c] = S(in[r + 4((c+r) mod 4)])
  function automatic logic [127:0] sub_shift(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*c) -: 8] = sbox(get_byte(s, r + 4*((c + r) % 4)));
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);
      a1 = get_byte(s, 4*c + 1);
      a2 = get_byte(s, 4*c + 2);
      a3 = get_byte(s, 4*c + 3);
      o[127 - 8*(4*c)     -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127 - 8*(4*c + 1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127 - 8*(4*c + 2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127 - 8*(4*c + 3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // SubWord(RotWord(w)) ^ {rcon, 0, 0, 0}
  function automatic logic [31:0] key_g(input logic [31:0] w, input logic [7:0] rcon);
    return {sbox(w[23:16]) ^ rcon, sbox(w[15:8]), sbox(w[7:0]), sbox(w[31:24])};
  endfunction

  // round constant of round r (1..10): x^(r-1) in GF(2^8)
  function automatic logic [7:0] rcon(input int r);
    logic [7:0] c;
    c = 8'h01;
    for (int i = 1; i < r; i++) c = xtime(c);
    return c;
  endfunction

endpackage
