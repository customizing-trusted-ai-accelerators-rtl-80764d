// secvta_pkg: types, constants and pure functions shared by the security layer
// of the secured tensor accelerator.
//
// It holds the AES S-box (computed at elaboration from its definition: the
// multiplicative inverse in GF(2^8) followed by the affine map, so no table
// file is needed), the GF(2^8) helpers used by MixColumns, the memory-channel
// structs used between the accelerator's DMA side, the security interface and
// DRAM, and the MMIO address map.
//
// Choices of this design (the paper fixes none of them): 128-bit data beats
// (one AES block per beat), 32-bit byte addresses, 32-bit MMIO words, and the
// register-map offsets below.
package secvta_pkg;

  localparam int unsigned BLK_W  = 128;  // one AES block per data beat
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned LEN_W  = 16;   // request length in 128-bit beats
  localparam int unsigned WORD_W = 32;   // MMIO word

  typedef logic [BLK_W-1:0]  blk_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [95:0]       iv_t;       // GCM 96-bit nonce

  // A DMA request, on both the accelerator side and the DRAM side.
  typedef struct packed {
    logic  write;
    addr_t addr;   // byte address, 16-byte aligned
    len_t  len;    // number of 128-bit beats
  } mem_req_t;

  // MMIO access from the host (through its untrusted driver).
  typedef struct packed {
    logic  write;
    logic [15:0] addr;   // byte offset
    word_t wdata;
  } mmio_req_t;

  // ---------------------------------------------------------------------------
  // MMIO map (byte offsets).
  // 0x000..0x02C : protected register state, REG_WORDS words. Words 0..7 are
  //                the accelerator core's own registers, 8 = DATA_BASE,
  //                9 = META_BASE, 10..11 reserved.
  // 0x100        : STATUS (read)      0x104..0x10C : NONCE words 0..2
  // 0x110..0x11C : MAC words 0..3 ; writing MAC word 3 starts verification
  // 0x200        : crypto-engine command   0x204 : crypto-engine status
  // 0x1000 + sel*0x100 + 4*w : big-number operand sel, word w
  // ---------------------------------------------------------------------------
  localparam int unsigned REG_WORDS   = 12;
  localparam int unsigned VTA_REGS    = 8;
  localparam int unsigned REG_BLOCKS  = REG_WORDS * WORD_W / BLK_W;  // 3
  localparam logic [15:0] A_STATUS    = 16'h0100;
  localparam logic [15:0] A_NONCE0    = 16'h0104;
  localparam logic [15:0] A_MAC0      = 16'h0110;
  localparam logic [15:0] A_MAC3      = 16'h011C;
  localparam logic [15:0] A_CE_CMD    = 16'h0200;
  localparam logic [15:0] A_CE_STAT   = 16'h0204;
  localparam logic [15:0] A_BIGNUM    = 16'h1000;

  // Crypto-engine commands.
  typedef enum logic [2:0] {
    CE_NOP       = 3'd0,
    CE_SIGN      = 3'd1,  // RES = MSG^d mod n with the endorsement key
    CE_DH_GEN    = 3'd2,  // A <- TRNG ; RES = G^A mod P
    CE_DH_FINISH = 3'd3   // X = MSG^d mod n ; Z = X^A mod P ; K = KDF(Z)
  } ce_cmd_e;

  // Big-number operand selectors.
  localparam int unsigned BN_MSG = 0;
  localparam int unsigned BN_P   = 1;
  localparam int unsigned BN_G   = 2;
  localparam int unsigned BN_RES = 3;

  // ---------------------------------------------------------------------------
  // AES helpers
  // ---------------------------------------------------------------------------
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // S-box by definition: inverse (x^254) then affine transform with 0x63.
  function automatic logic [7:0] sbox_calc(input logic [7:0] x);
    logic [7:0] inv, sq, r;
    inv = 8'h01;
    sq  = x;
    for (int i = 0; i < 8; i++) begin   // x^254 = x^(2+4+...+128)
      if (i != 0) inv = gf8_mul(inv, sq);
      sq = gf8_mul(sq, sq);
    end
    if (x == 8'h00) inv = 8'h00;
    for (int i = 0; i < 8; i++)
      r[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return r ^ 8'h63;
  endfunction

  typedef logic [7:0] sbox_tab_t [256];

  function automatic sbox_tab_t sbox_gen();
    sbox_tab_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam sbox_tab_t SBOX = sbox_gen();

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  // State layout: byte 0 of the block is bits [127:120]; column c is bytes
  // 4c..4c+3 (FIPS-197 ordering).
  function automatic blk_t sub_shift(input blk_t s);
    blk_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(4*c + r) -: 8] = SBOX[s[127 - 8*(4*((c + r) % 4) + r) -: 8]];
    return o;
  endfunction

  function automatic blk_t mix_columns(input blk_t s);
    blk_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[127 - 32*c -: 8];
      a1 = s[119 - 32*c -: 8];
      a2 = s[111 - 32*c -: 8];
      a3 = s[103 - 32*c -: 8];
      o[127 - 32*c -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[119 - 32*c -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[111 - 32*c -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[103 - 32*c -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // GCM counter increment on the low 32 bits.
  function automatic blk_t inc32(input blk_t b, input logic [31:0] n);
    return {b[127:32], b[31:0] + n};
  endfunction

endpackage
