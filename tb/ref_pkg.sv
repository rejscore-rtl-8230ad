// ref_pkg: golden models for the RejSCore testbenches, written independently of
// the RTL: AES-128 on byte arrays (S-box found by searching for the inverse),
// AES-CTR byte generation with the RejSCore counter block, and QR-UOV RejSamp
// (Algorithm 2: masking, then replacement of rejected head elements by the next
// valid tail elements, 0 once the tail is used up).
package ref_pkg;

  typedef byte unsigned u8;

  function automatic u8 mul(u8 a, u8 b);
    u8 r = 0;
    for (int i = 0; i < 8; i++) begin
      if (b & 1) r ^= a;
      a = (a & 8'h80) ? ((a << 1) ^ 8'h1b) : (a << 1);
      b = b >> 1;
    end
    return r;
  endfunction

  function automatic u8 sb(u8 x);
    u8 inv = 0, s;
    for (int y = 1; y < 256; y++) if (x != 0 && mul(x, u8'(y)) == 1) inv = u8'(y);
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= u8'((inv << i) | (inv >> (8 - i)));
    return s ^ 8'h63;
  endfunction

  u8 SB [256];
  bit sb_ready = 0;

  function automatic void init();
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) SB[i] = sb(u8'(i));
      sb_ready = 1;
    end
  endfunction

  // key, block: 16 bytes each, byte 0 first
  function automatic void encrypt(input u8 key [16], input u8 inb [16], output u8 outb [16]);
    u8 w [176];
    u8 st [16], t [16];
    u8 rc = 1;
    init();
    for (int i = 0; i < 16; i++) w[i] = key[i];
    for (int i = 16; i < 176; i += 4) begin
      u8 a0 = w[i-4], a1 = w[i-3], a2 = w[i-2], a3 = w[i-1];
      if (i % 16 == 0) begin
        u8 tmp = a0;
        a0 = SB[a1] ^ rc; a1 = SB[a2]; a2 = SB[a3]; a3 = SB[tmp];
        rc = mul(rc, 2);
      end
      w[i] = w[i-16] ^ a0; w[i+1] = w[i-15] ^ a1; w[i+2] = w[i-14] ^ a2; w[i+3] = w[i-13] ^ a3;
    end
    for (int i = 0; i < 16; i++) st[i] = inb[i] ^ w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) t[i] = SB[st[(i + 4 * (i % 4)) % 16]];
      for (int c = 0; c < 4; c++) begin
        u8 x0 = t[4*c], x1 = t[4*c+1], x2 = t[4*c+2], x3 = t[4*c+3];
        if (r < 10) begin
          st[4*c]   = mul(x0,2) ^ mul(x1,3) ^ x2 ^ x3;
          st[4*c+1] = x0 ^ mul(x1,2) ^ mul(x2,3) ^ x3;
          st[4*c+2] = x0 ^ x1 ^ mul(x2,2) ^ mul(x3,3);
          st[4*c+3] = mul(x0,3) ^ x1 ^ x2 ^ mul(x3,2);
        end else begin
          st[4*c] = x0; st[4*c+1] = x1; st[4*c+2] = x2; st[4*c+3] = x3;
        end
      end
      for (int i = 0; i < 16; i++) st[i] ^= w[16*r + i];
    end
    outb = st;
  endfunction

  // nbytes bytes of AES-128-CTR: block k = nonce(8 bytes, big-endian) ||
  // big-endian 64-bit (iv << 48) + k
  function automatic void ctr_bytes(input u8 key [16], input longint unsigned nonce,
                                    input shortint unsigned iv, input int nbytes,
                                    ref u8 out []);
    u8 inb [16], ob [16];
    longint unsigned c = longint'(iv) << 48;
    out = new[nbytes];
    for (int k = 0; k * 16 < nbytes; k++) begin
      for (int i = 0; i < 8; i++) inb[i] = u8'(nonce >> (56 - 8*i));
      for (int i = 0; i < 8; i++) inb[8+i] = u8'(c >> (56 - 8*i));
      encrypt(key, inb, ob);
      for (int i = 0; i < 16; i++) if (16*k + i < nbytes) out[16*k + i] = ob[i];
      c++;
    end
  endfunction

  // QR-UOV RejSamp, Algorithm 2, 1-based indices as written there
  function automatic void rejsamp(input int q, input int tau, input int nout,
                                  ref u8 r [], ref u8 v []);
    int k;
    u8 vv [];
    vv = new[tau + 2];
    for (int j = 1; j <= tau; j++) vv[j] = r[j-1] & u8'(q);
    k = nout + 1;
    while (k < tau + 1 && vv[k] == q) k++;
    for (int j = 1; j <= nout; j++) begin
      if (vv[j] == q) begin
        if (k < tau + 1) begin
          vv[j] = vv[k];
          k++;
          while (k < tau + 1 && vv[k] == q) k++;
        end else begin
          vv[j] = 0;
        end
      end
    end
    v = new[nout];
    for (int j = 0; j < nout; j++) v[j] = vv[j+1];
  endfunction

endpackage
