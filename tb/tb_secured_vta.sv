// tb_secured_vta: end-to-end test of the secured accelerator top at its
// default (full) size: 2 KB pieces, 2 KB buffer, 2048-bit public-key engine.
//
// The testbench plays the remote user with the host CPU, the DRAM and the
// accelerator core's DMA master. Everything goes through the top's ports:
//  1. attestation: the host asks for a signature over a challenge and checks
//     it with the public endorsement key;
//  2. key exchange (Diffie-Hellman over a test prime, the host's half sent
//     encrypted under the endorsement key); the host derives the same session
//     key and uses it for everything that follows;
//  3. the hash key H = AES_K(0) is computed after the key is installed;
//  4. register protection: a wrong MAC is refused, a correct one commits the
//     registers to the core, a replayed nonce is refused;
//  5. an authenticated read spanning three 2 KB pieces returns the plaintext;
//  6. an authenticated write of one piece lands in DRAM as GCM ciphertext with
//     a valid tag;
//  7. a misaligned write is refused;
//  8. a tampered piece stops the read with the integrity flag.
// Each mechanism is counted when it is seen to happen; any mechanism with a
// count of zero at the end is a failure. The endorsement key and the prime are
// 256-bit test values held in the 2048-bit fields (upper bits zero), which
// keeps the testbench's own reference arithmetic small; the hardware still
// runs full 2048-bit exponentiations (about 25 million cycles in total).
module tb_secured_vta;
  import gcm_ref_pkg::*;
  import secvta_pkg::*;

  localparam int HW  = 256;                  // width of the test key material
  localparam int W   = 2048;                 // engine width (top default)
  localparam int PB  = 128;                  // blocks per 2 KB piece (top default)
  localparam int PBY = PB * 16;
  localparam logic [HW-1:0] N = 256'h90f0a30cc9138faf04215d58a6f0aadc22b80bb4d8c866e26102659af191f36b;
  localparam logic [HW-1:0] D = 256'h584270c7845a6910864f5aec751bf0ae98a3aa103e73cccbecacd5bc58209401;
  localparam logic [HW-1:0] E = 256'd65537;
  localparam logic [HW-1:0] P = 256'hc2b38755cd37880e16ac4191a26aa0ae044f1574f037afc644d82a531289bafb;
  localparam logic [31:0] DBASE = 32'h0010_0000;
  localparam logic [31:0] MBASE = 32'h0080_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic host_valid; mmio_req_t host_req; word_t host_rdata;
  logic dram_req_valid, dram_req_ready; mem_req_t dram_req;
  logic dram_rd_valid; blk_t dram_rd_data;
  logic dram_wr_valid; blk_t dram_wr_data;
  logic vta_reg_we; logic [2:0] vta_reg_addr; word_t vta_reg_wdata; logic vta_done;
  logic vta_req_valid, vta_req_ready; mem_req_t vta_req;
  logic vta_rd_valid; blk_t vta_rd_data;
  logic vta_wr_valid, vta_wr_ready; blk_t vta_wr_data;
  logic [W-1:0] fuse_ek_n, fuse_ek_d;
  logic integrity_err, regs_verified;

  secured_vta dut (.*);

  assign fuse_ek_n = W'(N);
  assign fuse_ek_d = W'(D);
  assign vta_done  = 1'b0;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters
  typedef enum int {M_SIGN, M_KEYX, M_HKEY, M_MAC_OK, M_MAC_BAD, M_REPLAY,
                    M_READ, M_WRITE, M_MISALIGN, M_TAMPER, M_NUM} mech_e;
  int seen [M_NUM];
  string mname [M_NUM] = '{"attestation signature", "key exchange", "hash key",
                           "register MAC accepted", "register MAC refused",
                           "replayed nonce refused", "multi-piece authenticated read",
                           "authenticated write", "misaligned write refused",
                           "integrity failure"};

  task automatic finish();
    for (int i = 0; i < int'(M_NUM); i++) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL mechanism never seen: %s", mname[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    $display("FAIL watchdog");
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- DRAM ----------------
  blk_t        mem [int unsigned];
  int unsigned rdq [$];
  int unsigned wr_ptr;
  assign dram_req_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && dram_req_ready) begin
      if (dram_req.write) wr_ptr = dram_req.addr >> 4;
      else for (int i = 0; i < int'(dram_req.len); i++) rdq.push_back((dram_req.addr >> 4) + i);
    end
    if (dram_wr_valid) begin mem[wr_ptr] = dram_wr_data; wr_ptr++; end
  end
  always @(negedge clk) begin
    dram_rd_valid <= 1'b0;
    if (rdq.size() != 0 && ($urandom % 3) != 0) begin
      automatic int unsigned a = rdq.pop_front();
      dram_rd_valid <= 1'b1;
      dram_rd_data  <= mem.exists(a) ? mem[a] : '0;
    end
  end

  // ---------------- core side ----------------
  blk_t rdata_q [$];
  always @(posedge clk) if (rst_n && vta_rd_valid) rdata_q.push_back(vta_rd_data);
  word_t reg_seen [8];
  int    reg_cnt = 0;
  always @(posedge clk) if (rst_n && vta_reg_we) begin
    reg_seen[vta_reg_addr] = vta_reg_wdata;
    reg_cnt++;
  end

  // ---------------- host helpers ----------------
  task automatic host_wr(input logic [15:0] a, input word_t d);
    @(negedge clk); host_valid = 1; host_req = '{write: 1'b1, addr: a, wdata: d};
    @(negedge clk); host_valid = 0;
  endtask
  task automatic host_rd(input logic [15:0] a, output word_t d);
    @(negedge clk); host_valid = 1; host_req = '{write: 1'b0, addr: a, wdata: '0};
    #1 d = host_rdata;
    @(negedge clk); host_valid = 0;
  endtask
  task automatic wait_idle();
    word_t s;
    do host_rd(A_STATUS, s); while (s[7]);
  endtask
  task automatic bn_write(input int sel, input logic [HW-1:0] v);
    for (int i = 0; i < W / 32; i++)
      host_wr(A_BIGNUM + 16'(sel * 256 + 4 * i), (i < HW / 32) ? v[32*i +: 32] : 32'h0);
  endtask
  task automatic bn_read(input int sel, output logic [W-1:0] v);
    for (int i = 0; i < W / 32; i++) begin
      word_t d;
      host_rd(A_BIGNUM + 16'(sel * 256 + 4 * i), d);
      v[32*i +: 32] = d;
    end
  endtask
  task automatic ce_command(input ce_cmd_e c);
    word_t s;
    host_wr(A_CE_CMD, 32'(c));
    do begin
      repeat (1000) @(negedge clk);
      host_rd(A_CE_STAT, s);
    end while (s[0]);
  endtask

  function automatic logic [HW-1:0] pw(input logic [HW-1:0] b, input logic [HW-1:0] e,
                                       input logic [HW-1:0] m);
    logic [2*HW-1:0] r, bb;
    r = 1; bb = (2*HW)'(b) % (2*HW)'(m);
    for (int i = HW - 1; i >= 0; i--) begin
      r = (r * r) % (2*HW)'(m);
      if (e[i]) r = (r * bb) % (2*HW)'(m);
    end
    return r[HW-1:0];
  endfunction

  task automatic core_req(input logic w, input logic [31:0] a, input int len);
    @(negedge clk); vta_req_valid = 1; vta_req = '{write: w, addr: a, len: len_t'(len)};
    while (!vta_req_ready) @(negedge clk);
    @(negedge clk); vta_req_valid = 0;
  endtask
  task automatic core_wr(input blk_t d);
    vta_wr_valid = 1; vta_wr_data = d;
    while (!vta_wr_ready) @(negedge clk);
    @(negedge clk); vta_wr_valid = 0;
  endtask

  word_t regs [REG_WORDS];
  function automatic blk_t reg_mac(input logic [255:0] k, input iv_t n);
    blk_t a [] = new[REG_BLOCKS];
    blk_t p [], c [];
    for (int b = 0; b < int'(REG_BLOCKS); b++)
      a[b] = {regs[4*b], regs[4*b+1], regs[4*b+2], regs[4*b+3]};
    p = new[0];
    return gcm_enc(k, n, a, p, c);
  endfunction
  task automatic send_regs(input iv_t n, input blk_t mac);
    for (int i = 0; i < int'(REG_WORDS); i++) host_wr(16'(4*i), regs[i]);
    for (int i = 0; i < 3; i++) host_wr(A_NONCE0 + 16'(4*i), n[95 - 32*i -: 32]);
    for (int i = 0; i < 4; i++) host_wr(A_MAC0 + 16'(4*i), mac[127 - 32*i -: 32]);
    repeat (2) @(negedge clk);
    wait_idle();
  endtask

  blk_t plain [3][PB];

  initial begin
    word_t s;
    logic [W-1:0] v;
    logic [HW-1:0] m, ga, b, gb, z;
    logic [255:0] key;
    blk_t mac, tag;
    blk_t p [], c [], a0 [];
    host_valid = 0; host_req = '0; vta_req_valid = 0; vta_req = '0;
    vta_wr_valid = 0; vta_wr_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. attestation signature over a challenge
    m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % N;
    bn_write(BN_MSG, m);
    ce_command(CE_SIGN);
    bn_read(BN_RES, v);
    chk(v[W-1:HW] == '0 && pw(v[HW-1:0], E, N) == m, "signature verifies");
    if (pw(v[HW-1:0], E, N) == m) seen[M_SIGN]++;

    // 2. key exchange
    bn_write(BN_P, P);
    bn_write(BN_G, 256'd2);
    ce_command(CE_DH_GEN);
    bn_read(BN_RES, v);
    ga = v[HW-1:0];
    chk(v[W-1:HW] == '0 && ga > 1 && ga < P, "g^A in range");
    do begin
      b  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      gb = pw(256'd2, b, P);
    end while (gb >= N);
    bn_write(BN_MSG, pw(gb, E, N));
    ce_command(CE_DH_FINISH);
    host_rd(A_CE_STAT, s);
    chk(s[2:1] == 2'b11 && !s[3], "session key installed");
    z   = pw(ga, b, P);
    key = z;                        // XOR fold of z: only the low 256 bits are non-zero
    if (s[2:1] == 2'b11) seen[M_KEYX]++;

    // 3. hash key
    do host_rd(A_STATUS, s); while (!s[1]);
    seen[M_HKEY]++;

    // 4. register protection
    regs[0] = 32'h1;
    for (int i = 1; i < 8; i++) regs[i] = $urandom;
    regs[8] = DBASE; regs[9] = MBASE; regs[10] = 0; regs[11] = 0;
    mac = reg_mac(key, 96'd10);
    send_regs(96'd10, ~mac);
    host_rd(A_STATUS, s);
    chk(s[2] && !s[0] && reg_cnt == 0, "wrong MAC refused");
    if (s[2] && reg_cnt == 0) seen[M_MAC_BAD]++;
    send_regs(96'd10, mac);
    host_rd(A_STATUS, s);
    begin
      automatic bit ok = s[0] && regs_verified && reg_cnt == 8;
      for (int i = 0; i < 8; i++) if (reg_seen[i] != regs[i]) ok = 0;
      chk(ok, "registers committed under the exchanged key");
      if (ok) seen[M_MAC_OK]++;
    end
    reg_cnt = 0;
    send_regs(96'd10, mac);
    host_rd(A_STATUS, s);
    chk(s[4] && reg_cnt == 0, "replay refused");
    if (s[4] && reg_cnt == 0) seen[M_REPLAY]++;

    // 5. host encrypts three pieces; core reads across all three
    for (int i = 0; i < 3; i++) begin
      p = new[PB]; a0 = new[0];
      foreach (p[j]) begin p[j] = {$urandom, $urandom, $urandom, $urandom}; plain[i][j] = p[j]; end
      tag = gcm_enc(key, {32'h0, 32'h5eed, 32'(i)}, a0, p, c);
      foreach (c[j]) mem[(DBASE >> 4) + i * PB + j] = c[j];
      mem[(MBASE >> 4) + 2 * i]     = {32'h0, 32'h5eed, 32'(i), 32'h0};
      mem[(MBASE >> 4) + 2 * i + 1] = tag;
    end
    rdata_q.delete();
    core_req(1'b0, DBASE + 100 * 16, 2 * PB + 10);
    wait_idle();
    begin
      automatic bit ok = rdata_q.size() == 2 * PB + 10;
      for (int k = 0; k < 2 * PB + 10 && ok; k++) begin
        automatic int g = 100 + k;
        if (rdata_q[k] != plain[g / PB][g % PB]) ok = 0;
      end
      chk(ok, "three-piece read returns the plaintext");
      if (ok) seen[M_READ]++;
    end

    // 6. core writes one piece
    begin
      blk_t wp [], ex [];
      iv_t n;
      automatic bit ok = 1;
      wp = new[PB];
      core_req(1'b1, DBASE + 3 * PBY, PB);
      foreach (wp[j]) begin wp[j] = {$urandom, $urandom, $urandom, $urandom}; core_wr(wp[j]); end
      wait_idle();
      n = mem[(MBASE >> 4) + 2 * 3][127:32];
      a0 = new[0];
      tag = gcm_enc(key, n, a0, wp, ex);
      for (int j = 0; j < PB; j++) if (mem[(DBASE >> 4) + 3 * PB + j] != ex[j]) ok = 0;
      if (mem[(MBASE >> 4) + 2 * 3 + 1] != tag) ok = 0;
      chk(ok, "written piece is GCM ciphertext with a valid tag");
      if (ok) seen[M_WRITE]++;
    end

    // 7. misaligned write
    core_req(1'b1, DBASE + 16, PB);
    for (int j = 0; j < PB; j++) core_wr('0);
    wait_idle();
    host_rd(A_STATUS, s);
    chk(s[5], "misaligned write flagged");
    if (s[5]) seen[M_MISALIGN]++;

    // 8. tampered ciphertext
    mem[(DBASE >> 4) + PB + 77] ^= 128'h8000;
    rdata_q.delete();
    core_req(1'b0, DBASE + PBY, 4);
    repeat (8 * (PB + 1) + 400) @(negedge clk);
    chk(integrity_err && rdata_q.size() == 0, "tampered piece refused");
    if (integrity_err && rdata_q.size() == 0) seen[M_TAMPER]++;

    finish();
  end
endmodule
