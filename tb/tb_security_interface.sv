// tb_security_interface: self-checking test of the security interface
// (control logic + piece buffer) with an AES core and a GFM unit beside it.
//
// Runs with pieces of 8 blocks (128 bytes) in an 8-block buffer. The
// testbench is the host program and the DRAM:
//  * register protection: a correctly MACed register state is committed to
//    the core (register 7 first, 0 last); a wrong MAC and a replayed nonce
//    commit nothing and raise their flags;
//  * authenticated reads: the host encrypts 5 pieces with AES-GCM; a core read
//    that starts mid-piece and spans three pieces must return the plaintext,
//    and the first block may not appear before the whole piece is hashed
//    (8 cycles per block) and its keystream produced (29 cycles);
//  * authenticated writes: two pieces written by the core must land in DRAM
//    as GCM ciphertext with a fresh accelerator nonce (top bit 1) and a valid
//    tag, and read back as the same plaintext;
//  * a misaligned write is dropped with the write-error flag;
//  * a ciphertext bit flipped in DRAM stops the read with the integrity
//    flag, and no block of it reaches the core.
// DRAM answers with random gaps between read beats.
module tb_security_interface;
  import gcm_ref_pkg::*;
  import secvta_pkg::*;

  localparam int PB  = 8;                 // blocks per piece
  localparam int PBY = PB * 16;           // bytes per piece
  localparam logic [31:0] DBASE = 32'h0001_0000;
  localparam logic [31:0] MBASE = 32'h0008_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // DUT ports
  logic mmio_valid; mmio_req_t mmio_req; word_t mmio_rdata;
  logic vta_reg_we; logic [2:0] vta_reg_addr; word_t vta_reg_wdata; logic vta_done;
  logic vta_req_valid, vta_req_ready; mem_req_t vta_req;
  logic vta_rd_valid; blk_t vta_rd_data;
  logic vta_wr_valid, vta_wr_ready; blk_t vta_wr_data;
  logic dram_req_valid, dram_req_ready; mem_req_t dram_req;
  logic dram_rd_valid; blk_t dram_rd_data;
  logic dram_wr_valid; blk_t dram_wr_data;
  logic ce_cmd_we; ce_cmd_e ce_cmd; word_t ce_status;
  logic bn_we; logic [1:0] bn_sel; logic [2:0] bn_widx; word_t bn_wdata, bn_rdata;
  logic aes_key_ready, session_valid, aes_in_valid, aes_out_valid;
  blk_t aes_in_blk, aes_out_blk;
  logic [5:0] aes_in_tag, aes_out_tag;
  logic gfm_start, gfm_busy, gfm_done; blk_t gfm_x, gfm_y, gfm_z;
  logic integrity_err, regs_verified;

  security_interface #(.PIECE_BLOCKS(PB), .BUF_BLOCKS(PB), .BN_WORDS(8)) dut (.*);

  logic aes_key_load; logic [255:0] key;
  aes256_pipe #(.TAG_W(6)) u_aes (.clk, .rst_n, .key_load(aes_key_load), .key,
    .key_ready(aes_key_ready), .in_valid(aes_in_valid), .in_blk(aes_in_blk),
    .in_tag(aes_in_tag), .out_valid(aes_out_valid), .out_blk(aes_out_blk),
    .out_tag(aes_out_tag));
  gfm_mul u_gfm (.clk, .rst_n, .start(gfm_start), .x(gfm_x), .y(gfm_y),
    .busy(gfm_busy), .done(gfm_done), .z(gfm_z));

  assign ce_status = 32'h0;
  assign bn_rdata  = 32'h0;
  assign vta_done  = 1'b0;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- DRAM model ----------------
  blk_t        mem [int unsigned];
  int unsigned rdq [$];
  int unsigned wr_ptr;
  assign dram_req_ready = 1'b1;
  always @(posedge clk) begin
    if (dram_req_valid && dram_req_ready) begin
      if (dram_req.write) wr_ptr = dram_req.addr >> 4;
      else for (int i = 0; i < int'(dram_req.len); i++) rdq.push_back((dram_req.addr >> 4) + i);
    end
    if (dram_wr_valid) begin mem[wr_ptr] = dram_wr_data; wr_ptr++; end
  end
  always @(negedge clk) begin
    dram_rd_valid <= 1'b0;
    if (rdq.size() != 0 && ($urandom % 4) != 0) begin
      int unsigned a;
      a = rdq.pop_front();
      dram_rd_valid <= 1'b1;
      dram_rd_data  <= mem.exists(a) ? mem[a] : '0;
    end
  end

  // ---------------- core side ----------------
  blk_t rdata_q [$];
  longint first_rd_cyc;
  always @(posedge clk) if (rst_n && vta_rd_valid) begin
    if (rdata_q.size() == 0) first_rd_cyc = cyc;
    rdata_q.push_back(vta_rd_data);
  end
  word_t       reg_seen [8];
  int          reg_order [$];
  always @(posedge clk) if (rst_n && vta_reg_we) begin
    reg_seen[vta_reg_addr] = vta_reg_wdata;
    reg_order.push_back(int'(vta_reg_addr));
  end

  task automatic host_wr(input logic [15:0] a, input word_t d);
    @(negedge clk); mmio_valid = 1; mmio_req = '{write: 1'b1, addr: a, wdata: d};
    @(negedge clk); mmio_valid = 0;
  endtask
  task automatic host_rd(input logic [15:0] a, output word_t d);
    @(negedge clk); mmio_valid = 1; mmio_req = '{write: 1'b0, addr: a, wdata: '0};
    #1 d = mmio_rdata;
    @(negedge clk); mmio_valid = 0;
  endtask

  task automatic core_req(input logic w, input logic [31:0] a, input int len, output longint t);
    @(negedge clk); vta_req_valid = 1; vta_req = '{write: w, addr: a, len: len_t'(len)};
    while (!vta_req_ready) @(negedge clk);
    t = cyc;
    @(negedge clk); vta_req_valid = 0;
  endtask
  task automatic core_wr(input blk_t d);
    vta_wr_valid = 1; vta_wr_data = d;
    while (!vta_wr_ready) @(negedge clk);
    @(negedge clk); vta_wr_valid = 0;
  endtask
  task automatic wait_idle();
    word_t s;
    do host_rd(A_STATUS, s); while (s[7]);
  endtask

  // register state and MAC
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

  blk_t plain [5][PB];

  initial begin
    word_t s;
    blk_t mac, tag;
    longint t0;
    blk_t p [], c [], a0 [];
    mmio_valid = 0; mmio_req = '0; vta_req_valid = 0; vta_req = '0;
    vta_wr_valid = 0; vta_wr_data = '0; aes_key_load = 0; session_valid = 0;
    key = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); aes_key_load = 1; @(negedge clk); aes_key_load = 0; session_valid = 1;
    do host_rd(A_STATUS, s); while (!s[1]);
    chk(1, "hash key ready");

    // ---------------- register protection ----------------
    regs[0] = 32'h1;
    for (int i = 1; i < 8; i++) regs[i] = $urandom;
    regs[8] = DBASE; regs[9] = MBASE; regs[10] = 0; regs[11] = 0;
    mac = reg_mac(key, 96'd5);
    send_regs(96'd5, mac ^ 128'h1);                    // wrong MAC
    host_rd(A_STATUS, s);
    chk(s[2] && !s[0] && reg_order.size() == 0, "wrong MAC rejected");
    send_regs(96'd5, mac);                             // correct
    host_rd(A_STATUS, s);
    chk(s[0] && !s[2] && regs_verified, "good MAC accepted");
    chk(reg_order.size() == 8 && reg_order[0] == 7 && reg_order[7] == 0, "commit order");
    begin
      automatic bit ok = 1;
      for (int i = 0; i < 8; i++) if (reg_seen[i] != regs[i]) ok = 0;
      chk(ok, "committed values");
    end
    reg_order.delete();
    send_regs(96'd5, mac);                             // replay
    host_rd(A_STATUS, s);
    chk(s[2] && s[4] && reg_order.size() == 0, "replayed nonce rejected");
    send_regs(96'd6, reg_mac(key, 96'd6));
    host_rd(A_STATUS, s);
    chk(s[0] && reg_order.size() == 8, "fresh nonce accepted");

    // ---------------- host encrypts 5 pieces ----------------
    for (int i = 0; i < 5; i++) begin
      p = new[PB]; a0 = new[0];
      foreach (p[j]) begin p[j] = {$urandom, $urandom, $urandom, $urandom}; plain[i][j] = p[j]; end
      tag = gcm_enc(key, {32'h0, 32'h1234, 32'(i)}, a0, p, c);
      foreach (c[j]) mem[(DBASE >> 4) + i * PB + j] = c[j];
      mem[(MBASE >> 4) + 2 * i]     = {32'h0, 32'h1234, 32'(i), 32'h0};
      mem[(MBASE >> 4) + 2 * i + 1] = tag;
    end

    // ---------------- read spanning three pieces ----------------
    rdata_q.delete();
    core_req(1'b0, DBASE + 3 * 16, 2 * PB + 2, t0);
    wait_idle();
    chk(rdata_q.size() == 2 * PB + 2, "read length");
    begin
      automatic bit ok = 1;
      for (int k = 0; k < 2 * PB + 2; k++) begin
        automatic int g = 3 + k;
        if (rdata_q[k] != plain[g / PB][g % PB]) ok = 0;
      end
      chk(ok, "read plaintext");
    end
    chk(first_rd_cyc - t0 >= 8 * (PB + 1) + 29, "data held until the tag is checked");

    // ---------------- write two pieces ----------------
    begin
      blk_t wp [2][PB];
      core_req(1'b1, DBASE + 5 * PBY, 2 * PB, t0);
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < PB; j++) begin
          wp[i][j] = {$urandom, $urandom, $urandom, $urandom};
          core_wr(wp[i][j]);
        end
      wait_idle();
      for (int i = 0; i < 2; i++) begin
        iv_t n;
        blk_t cc [], pp [], ex [];
        automatic bit ok = 1;
        n = mem[(MBASE >> 4) + 2 * (5 + i)][127:32];
        chk(n[95] == 1'b1, "accelerator nonce space");
        pp = new[PB]; a0 = new[0];
        for (int j = 0; j < PB; j++) pp[j] = wp[i][j];
        tag = gcm_enc(key, n, a0, pp, ex);
        for (int j = 0; j < PB; j++) if (mem[(DBASE >> 4) + (5 + i) * PB + j] != ex[j]) ok = 0;
        chk(ok, "written ciphertext");
        chk(mem[(MBASE >> 4) + 2 * (5 + i) + 1] == tag, "written tag");
      end
      rdata_q.delete();
      core_req(1'b0, DBASE + 5 * PBY, 2 * PB, t0);
      wait_idle();
      begin
        automatic bit ok = rdata_q.size() == 2 * PB;
        for (int k = 0; k < 2 * PB && ok; k++) if (rdata_q[k] != wp[k / PB][k % PB]) ok = 0;
        chk(ok, "write/read round trip");
      end
    end

    // ---------------- misaligned write ----------------
    core_req(1'b1, DBASE + 16, PB, t0);
    for (int j = 0; j < PB; j++) core_wr('0);
    wait_idle();
    host_rd(A_STATUS, s);
    chk(s[5], "misaligned write flagged");

    // ---------------- tampered ciphertext ----------------
    mem[(DBASE >> 4) + 1 * PB + 2] ^= 128'h1;
    rdata_q.delete();
    core_req(1'b0, DBASE + PBY, 1, t0);
    repeat (8 * (PB + 1) + 100) @(negedge clk);
    chk(integrity_err && rdata_q.size() == 0, "tampered piece refused");
    chk(!vta_req_ready, "no further requests after an integrity failure");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
