// tb_workload_stream: weight-streaming workload through the security
// interface at its default size (2 KB pieces, 2 KB buffer).
//
// A fully connected layer reads each weight once, so its run time under
// protection is set by how fast authenticated pieces can be streamed. This
// testbench stores NP pieces of host-encrypted weights (a 48 KB slice of an
// FC layer) in a DRAM model that answers one beat per cycle with no gaps,
// has the core read them in one request, and then has the core write
// NW pieces of results. It checks every plaintext block and every written
// ciphertext block and tag, and measures the cycles per piece:
//  * read: at least 8*(PB+1) cycles of GHASH per piece (8 per block plus the
//    length block) and at most that plus PB output cycles plus 64 cycles of
//    metadata fetch and AES latency;
//  * write: the same bound.
// It prints the measured cost and what it implies for the FC1 and FC2
// weight volumes (18,432 and 8,192 pieces for int8 9216x4096 and 4096x4096
// weights; the layer shapes are assumed, not given).
// AES and GFM units sit beside the interface as in the crypto engine.
module tb_workload_stream;
  import gcm_ref_pkg::*;
  import secvta_pkg::*;

  localparam int PB  = 128;
  localparam int PBY = PB * 16;
  localparam int NP  = 24;               // pieces read
  localparam int NW  = 4;                // pieces written
  localparam logic [31:0] DBASE = 32'h0100_0000;
  localparam logic [31:0] MBASE = 32'h0800_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic mmio_valid; mmio_req_t mmio_req; word_t mmio_rdata;
  logic vta_reg_we; logic [2:0] vta_reg_addr; word_t vta_reg_wdata; logic vta_done;
  logic vta_req_valid, vta_req_ready; mem_req_t vta_req;
  logic vta_rd_valid; blk_t vta_rd_data;
  logic vta_wr_valid, vta_wr_ready; blk_t vta_wr_data;
  logic dram_req_valid, dram_req_ready; mem_req_t dram_req;
  logic dram_rd_valid; blk_t dram_rd_data;
  logic dram_wr_valid; blk_t dram_wr_data;
  logic ce_cmd_we; ce_cmd_e ce_cmd; word_t ce_status;
  logic bn_we; logic [1:0] bn_sel; logic [5:0] bn_widx; word_t bn_wdata, bn_rdata;
  logic aes_key_ready, session_valid, aes_in_valid, aes_out_valid;
  blk_t aes_in_blk, aes_out_blk;
  logic [9:0] aes_in_tag, aes_out_tag;
  logic gfm_start, gfm_busy, gfm_done; blk_t gfm_x, gfm_y, gfm_z;
  logic integrity_err, regs_verified;

  security_interface dut (.*);

  logic aes_key_load; logic [255:0] key;
  aes256_pipe #(.TAG_W(10)) u_aes (.clk, .rst_n, .key_load(aes_key_load), .key,
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
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // DRAM: one beat per cycle, no gaps
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
    if (rdq.size() != 0) begin
      automatic int unsigned a = rdq.pop_front();
      dram_rd_valid <= 1'b1;
      dram_rd_data  <= mem.exists(a) ? mem[a] : '0;
    end
  end

  blk_t   rdata_q [$];
  longint last_rd_cyc;
  always @(posedge clk) if (rst_n && vta_rd_valid) begin
    rdata_q.push_back(vta_rd_data);
    last_rd_cyc = cyc;
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
  task automatic wait_idle();
    word_t s;
    do host_rd(A_STATUS, s); while (s[7]);
  endtask
  task automatic core_req(input logic w, input logic [31:0] a, input int len, output longint t);
    @(negedge clk); vta_req_valid = 1; vta_req = '{write: w, addr: a, len: len_t'(len)};
    while (!vta_req_ready) @(negedge clk);
    t = cyc;
    @(negedge clk); vta_req_valid = 0;
  endtask

  blk_t plain [NP][PB];
  word_t regs [REG_WORDS];

  initial begin
    word_t s;
    blk_t mac, tag;
    longint t0, t1;
    real per_rd, per_wr;
    blk_t p [], c [], a0 [], ra [], rc [];
    mmio_valid = 0; mmio_req = '0; vta_req_valid = 0; vta_req = '0;
    vta_wr_valid = 0; vta_wr_data = '0; aes_key_load = 0; session_valid = 0;
    key = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); aes_key_load = 1; @(negedge clk); aes_key_load = 0; session_valid = 1;
    do host_rd(A_STATUS, s); while (!s[1]);

    // register state: bases of the data and metadata areas
    foreach (regs[i]) regs[i] = '0;
    regs[8] = DBASE; regs[9] = MBASE;
    ra = new[REG_BLOCKS];
    for (int b = 0; b < int'(REG_BLOCKS); b++)
      ra[b] = {regs[4*b], regs[4*b+1], regs[4*b+2], regs[4*b+3]};
    p = new[0];
    mac = gcm_enc(key, 96'd1, ra, p, rc);
    for (int i = 0; i < int'(REG_WORDS); i++) host_wr(16'(4*i), regs[i]);
    for (int i = 0; i < 3; i++) host_wr(A_NONCE0 + 16'(4*i), i == 2 ? 32'd1 : 32'd0);
    for (int i = 0; i < 4; i++) host_wr(A_MAC0 + 16'(4*i), mac[127 - 32*i -: 32]);
    wait_idle();
    host_rd(A_STATUS, s);
    chk(s[0], "register state accepted");

    // host encrypts NP pieces of weights
    for (int i = 0; i < NP; i++) begin
      p = new[PB]; a0 = new[0];
      foreach (p[j]) begin p[j] = {$urandom, $urandom, $urandom, $urandom}; plain[i][j] = p[j]; end
      tag = gcm_enc(key, {32'h0, 32'hfc, 32'(i)}, a0, p, c);
      foreach (c[j]) mem[(DBASE >> 4) + i * PB + j] = c[j];
      mem[(MBASE >> 4) + 2 * i]     = {32'h0, 32'hfc, 32'(i), 32'h0};
      mem[(MBASE >> 4) + 2 * i + 1] = tag;
    end

    // stream them
    rdata_q.delete();
    core_req(1'b0, DBASE, NP * PB, t0);
    wait_idle();
    begin
      automatic bit ok = rdata_q.size() == NP * PB;
      for (int k = 0; k < NP * PB && ok; k++) if (rdata_q[k] != plain[k / PB][k % PB]) ok = 0;
      chk(ok, "streamed weights decrypt correctly");
    end
    per_rd = real'(last_rd_cyc - t0) / NP;
    chk(per_rd >= 8.0 * (PB + 1), "read cost at least the GHASH bound");
    chk(per_rd <= 8.0 * (PB + 1) + PB + 64, "read cost within the expected overhead");

    // write NW pieces of results
    begin
      blk_t wp [NW][PB];
      core_req(1'b1, DBASE + NP * PBY, NW * PB, t0);
      for (int i = 0; i < NW; i++)
        for (int j = 0; j < PB; j++) begin
          wp[i][j] = {$urandom, $urandom, $urandom, $urandom};
          vta_wr_valid = 1; vta_wr_data = wp[i][j];
          while (!vta_wr_ready) @(negedge clk);
          @(negedge clk); vta_wr_valid = 0;
        end
      wait_idle();
      t1 = cyc;
      for (int i = 0; i < NW; i++) begin
        iv_t n;
        blk_t pp [], ex [];
        automatic bit ok = 1;
        n = mem[(MBASE >> 4) + 2 * (NP + i)][127:32];
        pp = new[PB]; a0 = new[0];
        for (int j = 0; j < PB; j++) pp[j] = wp[i][j];
        tag = gcm_enc(key, n, a0, pp, ex);
        for (int j = 0; j < PB; j++) if (mem[(DBASE >> 4) + (NP + i) * PB + j] != ex[j]) ok = 0;
        if (mem[(MBASE >> 4) + 2 * (NP + i) + 1] != tag) ok = 0;
        chk(ok, "written result piece");
      end
    end
    per_wr = real'(t1 - t0) / NW;
    chk(per_wr <= 8.0 * (PB + 1) + 2 * PB + 64, "write cost within the expected overhead");

    $display("read  %0.1f cycles per 2 KB piece (GHASH bound %0d)", per_rd, 8 * (PB + 1));
    $display("write %0.1f cycles per 2 KB piece", per_wr);
    $display("FC1 weights, 18432 pieces: about %0.1f M cycles of authenticated streaming", per_rd * 18432 / 1.0e6);
    $display("FC2 weights,  8192 pieces: about %0.1f M cycles of authenticated streaming", per_rd * 8192 / 1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
