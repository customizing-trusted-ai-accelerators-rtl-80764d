// gcm_ref_pkg: host-side reference model of AES-256-GCM for the testbenches.
//
// This plays the part of the host program: it encrypts pieces, computes their
// tags and computes the MAC over the register state. It is written
// independently of the RTL: the S-box is found by searching for the
// multiplicative inverse, the state is a byte array, and the GF(2^128)
// product is a carry-less multiply of bit-reversed operands followed by
// reduction, rather than the shift-and-add of the hardware. Testbenches check
// it against published NIST vectors before trusting it.
package gcm_ref_pkg;

  typedef logic [127:0] blk_t;
  typedef logic [7:0]   bytes16_t [16];
  typedef logic [127:0] rk_t [15];

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11b << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] x);
    logic [7:0] inv, b;
    inv = 8'h00;
    for (int y = 1; y < 256; y++) if (gmul(x, 8'(y)) == 8'h01) inv = 8'(y);
    b = inv;
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]} ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  // lazily built table
  logic [7:0] sb [256];
  bit         sb_ok = 0;
  function automatic void build();
    if (!sb_ok) begin
      for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
      sb_ok = 1;
    end
  endfunction

  function automatic rk_t expand(input logic [255:0] key);
    logic [31:0] w [60];
    logic [31:0] t;
    logic [7:0]  rc;
    rk_t rk;
    build();
    rc = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = 8; i < 60; i++) begin
      t = w[i-1];
      if (i % 8 == 0) begin
        t = {sb[t[23:16]], sb[t[15:8]], sb[t[7:0]], sb[t[31:24]]} ^ {rc, 24'h0};
        rc = gmul(rc, 8'h02);
      end else if (i % 8 == 4) begin
        t = {sb[t[31:24]], sb[t[23:16]], sb[t[15:8]], sb[t[7:0]]};
      end
      w[i] = w[i-8] ^ t;
    end
    for (int r = 0; r < 15; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return rk;
  endfunction

  function automatic blk_t aes(input rk_t rk, input blk_t pt);
    bytes16_t s, t;
    blk_t     x;
    build();
    x = pt ^ rk[0];
    for (int r = 1; r <= 14; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sb[x[127 - 8*i -: 8]];
      // ShiftRows: byte i = row i%4, column i/4
      for (int c = 0; c < 4; c++)
        for (int rr = 0; rr < 4; rr++) t[4*c + rr] = s[4*((c + rr) % 4) + rr];
      if (r != 14)
        for (int c = 0; c < 4; c++) begin
          s[4*c+0] = gmul(t[4*c], 2) ^ gmul(t[4*c+1], 3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c] ^ gmul(t[4*c+1], 2) ^ gmul(t[4*c+2], 3) ^ t[4*c+3];
          s[4*c+2] = t[4*c] ^ t[4*c+1] ^ gmul(t[4*c+2], 2) ^ gmul(t[4*c+3], 3);
          s[4*c+3] = gmul(t[4*c], 3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul(t[4*c+3], 2);
        end
      else s = t;
      for (int i = 0; i < 16; i++) x[127 - 8*i -: 8] = s[i];
      x ^= rk[r];
    end
    return x;
  endfunction

  function automatic blk_t bitrev(input blk_t a);
    blk_t r;
    for (int i = 0; i < 128; i++) r[i] = a[127 - i];
    return r;
  endfunction

  // GF(2^128) product in GCM convention via carry-less multiply + reduction.
  function automatic blk_t gf_mul(input blk_t x, input blk_t y);
    logic [254:0] p;
    blk_t a, b;
    a = bitrev(x);
    b = bitrev(y);
    p = '0;
    for (int i = 0; i < 128; i++) if (b[i]) p ^= 255'(a) << i;
    for (int i = 254; i >= 128; i--)
      if (p[i]) p ^= (255'(1) << i) ^ (255'(8'h87) << (i - 128));
    return bitrev(p[127:0]);
  endfunction

  // GCM tag over associated data a[] and ciphertext c[] (whole blocks).
  function automatic blk_t ghash(input blk_t h, input blk_t a [], input blk_t c []);
    blk_t y;
    y = '0;
    foreach (a[i]) y = gf_mul(y ^ a[i], h);
    foreach (c[i]) y = gf_mul(y ^ c[i], h);
    y = gf_mul(y ^ {64'(a.size() * 128), 64'(c.size() * 128)}, h);
    return y;
  endfunction

  // Encrypt p[] in place into c[], return tag.
  function automatic blk_t gcm_enc(input logic [255:0] key, input logic [95:0] iv,
                                   input blk_t a [], input blk_t p [], output blk_t c []);
    rk_t  rk;
    blk_t h;
    rk = expand(key);
    h  = aes(rk, '0);
    c  = new[p.size()];
    foreach (p[i]) c[i] = p[i] ^ aes(rk, {iv, 32'(i + 2)});
    return ghash(h, a, c) ^ aes(rk, {iv, 32'd1});
  endfunction

endpackage
