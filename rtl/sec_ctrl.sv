// sec_ctrl: control logic of the security interface.
//
// It enforces three rules between the accelerator core and the untrusted
// world (host driver, buses, off-chip DRAM):
//  * Reads. Code and data in DRAM are AES-GCM ciphertext, cut into pieces of
//    PIECE_BLOCKS 16-byte blocks (s = 2 KB by default), each with its own
//    32-byte metadata record {nonce(96) || 0(32), tag(128)} in a separate
//    metadata area. For a core read, the piece holding the address is
//    fetched whole into the buffer while GHASH runs over it; the tag
//    E_K(J0) ^ GHASH is compared with the stored one, and only if they match
//    are the requested blocks decrypted (ciphertext ^ AES(nonce || k+2)) and
//    handed to the core. A read that spans pieces repeats this per piece.
//  * Writes. Results from the core are taken a whole piece at a time,
//    encrypted in counter mode under a fresh nonce (top bit 1, then a write
//    counter, so it never meets a host nonce, whose top bit is 0), tagged,
//    and written back with their metadata record.
//  * Registers. Host MMIO writes to the protected register state (the core's
//    8 registers plus DATA_BASE and META_BASE) land in shadow registers only.
//    The host then writes a 96-bit nonce and a 128-bit MAC; writing the last
//    MAC word snapshots the state and checks MAC = GMAC_K(nonce, state) and
//    nonce > last accepted nonce. On success the snapshot is written into the
//    core's MMIO interface (register 7 first, register 0 - control, whose bit
//    0 launches the core - last) and the bases take effect; otherwise
//    nothing reaches the core and a status flag is raised.
//
// GHASH runs on the (non-pipelined) GFM unit: the next block is prefetched
// while a product is in flight, so the hash advances one block every 8 cycles.
// AES runs pipelined: after J0 one counter block enters per cycle.
//
// Timing and handshakes: requests on both sides use valid/ready; read data
// beats (DRAM to here, here to core) and write beats to DRAM carry valid only
// and must be taken when offered; core write beats use valid/ready. MMIO read
// data is combinational on mmio_rdata.
//
// A failed tag comparison stops the read: the integrity error flag is set, no
// data of that request reaches the core, and no further core request is
// accepted until reset. A write whose address is not
// piece-aligned or whose length is not a whole number of pieces is drained
// and dropped with the write-error flag set.
//
// From the paper: per-piece authenticated encryption in counter mode
// (AES-GCM), decryption on demand, metadata (nonces and GMACs) in a separate
// DRAM buffer, MAC plus nonce over the whole register state written to a
// specific register. This design's choices: the metadata layout, the piece
// size, GMAC without associated data per piece, the nonce comparison rule, the
// register replay order, the error behaviour and all handshakes.
module sec_ctrl
  import secvta_pkg::*;
#(
  parameter int unsigned PIECE_BLOCKS = 128,           // s = 2 KB
  parameter int unsigned BUF_BLOCKS   = 128,           // 2 KB buffer
  parameter int unsigned BN_WORDS     = 64,            // words of a big number
  localparam int unsigned IW    = $clog2(PIECE_BLOCKS) + 1,
  localparam int unsigned BAW   = $clog2(BUF_BLOCKS),
  localparam int unsigned TAG_W = IW + 2,
  localparam int unsigned BNW   = $clog2(BN_WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host MMIO
  input  logic             mmio_valid,
  input  mmio_req_t        mmio_req,
  output word_t            mmio_rdata,
  // core's MMIO interface
  output logic             vta_reg_we,
  output logic [2:0]       vta_reg_addr,
  output word_t            vta_reg_wdata,
  input  logic             vta_done,
  // core's DMA interface
  input  logic             vta_req_valid,
  output logic             vta_req_ready,
  input  mem_req_t         vta_req,
  output logic             vta_rd_valid,
  output blk_t             vta_rd_data,
  input  logic             vta_wr_valid,
  output logic             vta_wr_ready,
  input  blk_t             vta_wr_data,
  // DRAM
  output logic             dram_req_valid,
  input  logic             dram_req_ready,
  output mem_req_t         dram_req,
  input  logic             dram_rd_valid,
  input  blk_t             dram_rd_data,
  output logic             dram_wr_valid,
  output blk_t             dram_wr_data,
  // crypto engine: commands and big numbers
  output logic             ce_cmd_we,
  output ce_cmd_e          ce_cmd,
  input  word_t            ce_status,
  output logic             bn_we,
  output logic [1:0]       bn_sel,
  output logic [BNW-1:0]   bn_widx,
  output word_t            bn_wdata,
  input  word_t            bn_rdata,
  // crypto engine: AES
  input  logic             aes_key_ready,
  input  logic             session_valid,
  output logic             aes_in_valid,
  output blk_t             aes_in_blk,
  output logic [TAG_W-1:0] aes_in_tag,
  input  logic             aes_out_valid,
  input  blk_t             aes_out_blk,
  input  logic [TAG_W-1:0] aes_out_tag,
  // crypto engine: GFM
  output logic             gfm_start,
  output blk_t             gfm_x,
  output blk_t             gfm_y,
  input  logic             gfm_busy,
  input  logic             gfm_done,
  input  blk_t             gfm_z,
  // buffer
  output logic             buf_we,
  output logic [BAW-1:0]   buf_waddr,
  output blk_t             buf_wdata,
  output logic             buf_re_a,
  output logic [BAW-1:0]   buf_raddr_a,
  input  blk_t             buf_rdata_a,
  output logic             buf_re_b,
  output logic [BAW-1:0]   buf_raddr_b,
  input  blk_t             buf_rdata_b,
  // status
  output logic             integrity_err,
  output logic             regs_verified
);

  localparam int unsigned PB_LOG = $clog2(PIECE_BLOCKS * 16);  // bytes per piece
  localparam logic [1:0] K_H = 2'd0, K_J0 = 2'd1, K_CTR = 2'd2;
  localparam blk_t LEN_DATA = {64'd0, 64'(PIECE_BLOCKS * 128)};
  localparam blk_t LEN_REGS = {64'(REG_WORDS * 32), 64'd0};

  // ------------------------------------------------------------------
  // MMIO registers
  // ------------------------------------------------------------------
  word_t shadow [REG_WORDS];
  word_t snap   [REG_WORDS];
  iv_t   nonce_r, last_nonce;
  blk_t  mac_r;
  logic  verify_req, mac_fail, replay_err, wr_err;
  addr_t data_base, meta_base;

  logic mm_wr, mm_rd;
  logic [1:0] nonce_sel;   // NONCE word 0..2 at 0x104..0x10C
  assign nonce_sel = mmio_req.addr[3:2] - 2'd1;
  assign mm_wr = mmio_valid &&  mmio_req.write;
  assign mm_rd = mmio_valid && !mmio_req.write;

  assign ce_cmd_we = mm_wr && mmio_req.addr == A_CE_CMD;
  assign ce_cmd    = ce_cmd_e'(mmio_req.wdata[2:0]);
  assign bn_we     = mm_wr && mmio_req.addr[15:12] == A_BIGNUM[15:12];
  assign bn_sel    = mmio_req.addr[9:8];
  assign bn_widx   = mmio_req.addr[BNW+1:2];
  assign bn_wdata  = mmio_req.wdata;

  // ------------------------------------------------------------------
  // main state
  // ------------------------------------------------------------------
  typedef enum logic [4:0] {
    M_IDLE, M_H, M_RV, M_COMMIT,
    R_MREQ, R_META, R_FREQ, R_FETCH, R_CHECK, R_OUT,
    W_IN, W_ENC, W_DREQ, W_DATA, W_MREQ, W_META, W_DRAIN
  } mstate_e;
  mstate_e st;

  logic  h_valid;
  blk_t  h_r, ej0;
  logic  ej0_valid;
  iv_t   op_nonce;
  blk_t  op_tag;
  addr_t cur_addr;
  len_t  remaining;
  logic [IW-1:0] blk_first, n_out, out_cnt, wcnt, enc_cnt, wb_idx;
  logic [IW-1:0] beat;
  logic [3:0]    commit_idx;
  logic [94:0]   wr_ctr;

  // piece arithmetic for cur_addr
  addr_t off, piece_base, meta_addr;
  logic [ADDR_W-1:0] pidx;
  always_comb begin
    off        = cur_addr - data_base;
    pidx       = off >> PB_LOG;
    piece_base = data_base + (pidx << PB_LOG);
    meta_addr  = meta_base + (pidx << 5);
  end

  // ------------------------------------------------------------------
  // AES issue: J0 first, then counter blocks ai_idx .. ai_end-1
  // ------------------------------------------------------------------
  logic          ai_run, ai_j0, ai_h;
  logic [IW-1:0] ai_idx, ai_end;

  always_comb begin
    aes_in_valid = 1'b0;
    aes_in_blk   = '0;
    aes_in_tag   = '0;
    if (ai_h) begin
      aes_in_valid = 1'b1;
      aes_in_tag   = {K_H, IW'(0)};
    end else if (ai_run && aes_key_ready) begin
      if (ai_j0) begin
        aes_in_valid = 1'b1;
        aes_in_blk   = {op_nonce, 32'd1};
        aes_in_tag   = {K_J0, IW'(0)};
      end else if (ai_idx < ai_end) begin
        aes_in_valid = 1'b1;
        aes_in_blk   = {op_nonce, 32'(ai_idx) + 32'd2};
        aes_in_tag   = {K_CTR, ai_idx};
      end
    end
  end

  // keystream output: read the buffer at the tagged index, combine next cycle
  logic          ks_v;
  blk_t          ks_blk;
  logic [BAW-1:0] ks_idx;
  logic          ctr_out;
  assign ctr_out = aes_out_valid && aes_out_tag[TAG_W-1 -: 2] == K_CTR;

  // ------------------------------------------------------------------
  // GHASH: acc = (acc ^ X_i) * H over gh_total blocks, the last one being
  // the length block. Next block is prefetched into gh_data.
  // ------------------------------------------------------------------
  logic          gh_run, gh_src_regs, gh_have, gh_rdp, gh_inflt, gh_fin;
  logic [IW-1:0] gh_fetch, gh_done_cnt, gh_total, gh_avail;
  blk_t          gh_data, gh_acc, gh_len;
  logic          gh_go;
  blk_t          regblk [REG_BLOCKS];

  always_comb
    for (int b = 0; b < int'(REG_BLOCKS); b++)
      regblk[b] = {snap[4*b], snap[4*b+1], snap[4*b+2], snap[4*b+3]};

  assign gh_go     = gh_run && gh_have && (!gh_inflt || gfm_done);
  assign gfm_start = gh_go;
  assign gfm_x     = (gfm_done ? gfm_z : gh_acc) ^ gh_data;
  assign gfm_y     = h_r;

  logic gh_fetch_data;   // a data block (not the length block) is next
  assign gh_fetch_data = gh_fetch < gh_total - 1'b1;

  // ------------------------------------------------------------------
  // buffer port use
  // ------------------------------------------------------------------
  always_comb begin
    buf_we      = 1'b0;
    buf_waddr   = '0;
    buf_wdata   = '0;
    buf_re_a    = 1'b0;
    buf_raddr_a = BAW'(gh_fetch);
    buf_re_b    = 1'b0;
    buf_raddr_b = '0;
    // GHASH prefetch from the buffer
    if (gh_run && !gh_src_regs && !gh_have && !gh_rdp && gh_fetch_data &&
        gh_fetch < gh_avail)
      buf_re_a = 1'b1;
    // writes
    if (st == R_FETCH && dram_rd_valid) begin
      buf_we = 1'b1; buf_waddr = BAW'(wcnt); buf_wdata = dram_rd_data;
    end else if (st == W_IN && vta_wr_valid) begin
      buf_we = 1'b1; buf_waddr = BAW'(wcnt); buf_wdata = vta_wr_data;
    end else if (st == W_ENC && ks_v) begin
      buf_we = 1'b1; buf_waddr = ks_idx; buf_wdata = buf_rdata_b ^ ks_blk;
    end
    // data-side reads
    if (ctr_out) begin
      buf_re_b = 1'b1; buf_raddr_b = BAW'(aes_out_tag[IW-1:0]);
    end else if (st == W_DATA && wb_idx < IW'(PIECE_BLOCKS)) begin
      buf_re_b = 1'b1; buf_raddr_b = BAW'(wb_idx);
    end
  end

  // ------------------------------------------------------------------
  // outputs to core and DRAM
  // ------------------------------------------------------------------
  logic wb_v;   // a write-back beat read from the buffer is due
  always_comb begin
    vta_rd_valid  = (st == R_OUT) && ks_v;
    vta_rd_data   = buf_rdata_b ^ ks_blk;
    vta_wr_ready  = (st == W_IN) || (st == W_DRAIN);
    vta_req_ready = (st == M_IDLE) && h_valid && !verify_req && !integrity_err;
    dram_req_valid = (st == R_MREQ) || (st == R_FREQ) || (st == W_DREQ) || (st == W_MREQ);
    dram_req.write = (st == W_DREQ) || (st == W_MREQ);
    dram_req.addr  = (st == R_FREQ || st == W_DREQ) ? piece_base : meta_addr;
    dram_req.len   = (st == R_FREQ || st == W_DREQ) ? len_t'(PIECE_BLOCKS) : len_t'(2);
    dram_wr_valid  = wb_v || (st == W_META);
    dram_wr_data   = (st == W_META) ? ((beat == '0) ? {op_nonce, 32'd0} : op_tag)
                                    : buf_rdata_b;
  end

  // ------------------------------------------------------------------
  // sequential part
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE;
      for (int i = 0; i < int'(REG_WORDS); i++) begin
        shadow[i] <= '0;
        snap[i]   <= '0;
      end
      nonce_r <= '0; last_nonce <= '0; mac_r <= '0;
      verify_req <= 1'b0; mac_fail <= 1'b0; replay_err <= 1'b0; wr_err <= 1'b0;
      regs_verified <= 1'b0; integrity_err <= 1'b0;
      data_base <= '0; meta_base <= '0;
      h_valid <= 1'b0; h_r <= '0; ej0 <= '0; ej0_valid <= 1'b0;
      op_nonce <= '0; op_tag <= '0;
      cur_addr <= '0; remaining <= '0;
      blk_first <= '0; n_out <= '0; out_cnt <= '0; wcnt <= '0; enc_cnt <= '0;
      wb_idx <= '0; wb_v <= 1'b0; beat <= '0; commit_idx <= '0; wr_ctr <= '0;
      ai_run <= 1'b0; ai_j0 <= 1'b0; ai_h <= 1'b0; ai_idx <= '0; ai_end <= '0;
      ks_v <= 1'b0; ks_blk <= '0; ks_idx <= '0;
      gh_run <= 1'b0; gh_src_regs <= 1'b0; gh_have <= 1'b0; gh_rdp <= 1'b0;
      gh_inflt <= 1'b0; gh_fin <= 1'b0; gh_fetch <= '0; gh_done_cnt <= '0;
      gh_total <= '0; gh_avail <= '0; gh_data <= '0; gh_acc <= '0; gh_len <= '0;
      vta_reg_we <= 1'b0; vta_reg_addr <= '0; vta_reg_wdata <= '0;
    end else begin
      vta_reg_we <= 1'b0;
      ai_h       <= 1'b0;

      // ---------------- MMIO writes ----------------
      if (mm_wr) begin
        if (mmio_req.addr < 16'(REG_WORDS * 4)) begin
          shadow[mmio_req.addr[5:2]] <= mmio_req.wdata;
          regs_verified <= 1'b0;
        end else if (mmio_req.addr >= A_NONCE0 && mmio_req.addr < A_MAC0)
          nonce_r[95 - 32*nonce_sel -: 32] <= mmio_req.wdata;
        else if (mmio_req.addr >= A_MAC0 && mmio_req.addr <= A_MAC3) begin
          mac_r[127 - 32*mmio_req.addr[3:2] -: 32] <= mmio_req.wdata;
          if (mmio_req.addr == A_MAC3) verify_req <= 1'b1;
        end
      end

      // ---------------- session key change: recompute H ----------------
      if (!aes_key_ready || !session_valid) h_valid <= 1'b0;

      // ---------------- AES issue bookkeeping ----------------
      if (aes_in_valid && !ai_h) begin
        if (ai_j0) ai_j0 <= 1'b0;
        else       ai_idx <= ai_idx + 1'b1;
      end

      // ---------------- AES results ----------------
      ks_v <= ctr_out;
      ks_blk <= aes_out_blk;
      ks_idx <= aes_out_tag[BAW-1:0];
      if (aes_out_valid && aes_out_tag[TAG_W-1 -: 2] == K_H) begin
        h_r <= aes_out_blk; h_valid <= 1'b1;
      end
      if (aes_out_valid && aes_out_tag[TAG_W-1 -: 2] == K_J0) begin
        ej0 <= aes_out_blk; ej0_valid <= 1'b1;
      end

      // ---------------- GHASH ----------------
      if (gh_run) begin
        if (gh_rdp) begin
          gh_rdp <= 1'b0; gh_have <= 1'b1; gh_data <= buf_rdata_a;
        end else if (!gh_have && gh_fetch < gh_total) begin
          if (!gh_fetch_data) begin
            gh_have <= 1'b1; gh_data <= gh_len; gh_fetch <= gh_fetch + 1'b1;
          end else if (gh_src_regs) begin
            gh_have <= 1'b1; gh_data <= regblk[gh_fetch[1:0]]; gh_fetch <= gh_fetch + 1'b1;
          end else if (gh_fetch < gh_avail) begin
            gh_rdp <= 1'b1; gh_fetch <= gh_fetch + 1'b1;
          end
        end
        if (gfm_done) begin
          gh_acc <= gfm_z;
          gh_done_cnt <= gh_done_cnt + 1'b1;
          if (gh_done_cnt == gh_total - 1'b1) begin
            gh_fin <= 1'b1; gh_run <= 1'b0; gh_inflt <= 1'b0;
          end else gh_inflt <= gh_go;
        end else if (gh_go) gh_inflt <= 1'b1;
        if (gh_go) gh_have <= 1'b0;
      end

      // ---------------- main FSM ----------------
      unique case (st)
        M_IDLE: begin
          if (session_valid && aes_key_ready && !h_valid && !ai_h) begin
            ai_h <= 1'b1;
            st   <= M_H;
          end else if (verify_req && h_valid) begin
            verify_req <= 1'b0;
            for (int i = 0; i < int'(REG_WORDS); i++) snap[i] <= shadow[i];
            op_nonce <= nonce_r;
            ai_run <= 1'b1; ai_j0 <= 1'b1; ai_idx <= '0; ai_end <= '0;
            ej0_valid <= 1'b0;
            gh_run <= 1'b1; gh_src_regs <= 1'b1; gh_have <= 1'b0; gh_rdp <= 1'b0;
            gh_inflt <= 1'b0; gh_fin <= 1'b0; gh_fetch <= '0; gh_done_cnt <= '0;
            gh_total <= IW'(REG_BLOCKS + 1); gh_acc <= '0; gh_len <= LEN_REGS;
            st <= M_RV;
          end else if (vta_req_valid && vta_req_ready) begin
            cur_addr  <= vta_req.addr;
            remaining <= vta_req.len;
            if (vta_req.len == '0) begin
              if (vta_req.write) wr_err <= 1'b1;
            end else if (vta_req.write) begin
              if (vta_req.addr[PB_LOG-1:0] != '0 ||
                  (vta_req.len % len_t'(PIECE_BLOCKS)) != '0) begin
                wr_err <= 1'b1;
                st <= W_DRAIN;
              end else begin
                wcnt <= '0;
                st <= W_IN;
              end
            end else begin
              st <= R_MREQ;
            end
          end
        end

        M_H: if (h_valid) st <= M_IDLE;

        M_RV: if (gh_fin && ej0_valid) begin
          ai_run <= 1'b0;
          if ((gh_acc ^ ej0) == mac_r && op_nonce > last_nonce) begin
            last_nonce <= op_nonce;
            mac_fail   <= 1'b0;
            replay_err <= 1'b0;
            data_base  <= snap[VTA_REGS];
            meta_base  <= snap[VTA_REGS + 1];
            commit_idx <= 4'(VTA_REGS - 1);
            st <= M_COMMIT;
          end else begin
            mac_fail   <= 1'b1;
            replay_err <= ((gh_acc ^ ej0) == mac_r);
            st <= M_IDLE;
          end
        end

        M_COMMIT: begin
          vta_reg_we    <= 1'b1;
          vta_reg_addr  <= commit_idx[2:0];
          vta_reg_wdata <= snap[commit_idx];
          if (commit_idx == '0) begin
            regs_verified <= 1'b1;
            st <= M_IDLE;
          end
          commit_idx <= commit_idx - 1'b1;
        end

        // ----------------------- reads -----------------------
        R_MREQ: if (dram_req_ready) begin beat <= '0; st <= R_META; end

        R_META: if (dram_rd_valid) begin
          beat <= beat + 1'b1;
          if (beat == '0) op_nonce <= dram_rd_data[127:32];
          else begin
            op_tag <= dram_rd_data;
            st <= R_FREQ;
          end
        end

        R_FREQ: if (dram_req_ready) begin
          wcnt <= '0;
          blk_first <= IW'(off[PB_LOG-1:4]);
          if (32'(remaining) < 32'(PIECE_BLOCKS) - 32'(off[PB_LOG-1:4]))
            n_out <= IW'(remaining);
          else
            n_out <= IW'(PIECE_BLOCKS) - IW'(off[PB_LOG-1:4]);
          ai_run <= 1'b1; ai_j0 <= 1'b1; ai_idx <= '0; ai_end <= '0;
          ej0_valid <= 1'b0;
          gh_run <= 1'b1; gh_src_regs <= 1'b0; gh_have <= 1'b0; gh_rdp <= 1'b0;
          gh_inflt <= 1'b0; gh_fin <= 1'b0; gh_fetch <= '0; gh_done_cnt <= '0;
          gh_total <= IW'(PIECE_BLOCKS + 1); gh_acc <= '0; gh_len <= LEN_DATA;
          gh_avail <= '0;
          st <= R_FETCH;
        end

        R_FETCH: begin
          if (dram_rd_valid) begin
            wcnt <= wcnt + 1'b1;
            gh_avail <= wcnt + 1'b1;
          end
          if (gh_fin && ej0_valid) st <= R_CHECK;
        end

        R_CHECK: begin
          if ((gh_acc ^ ej0) == op_tag) begin
            ai_idx  <= blk_first;
            ai_end  <= blk_first + n_out;
            out_cnt <= '0;
            st <= R_OUT;
          end else begin
            integrity_err <= 1'b1;
            ai_run <= 1'b0;
            st <= M_IDLE;
          end
        end

        R_OUT: if (ks_v) begin
          out_cnt <= out_cnt + 1'b1;
          if (out_cnt == n_out - 1'b1) begin
            ai_run    <= 1'b0;
            cur_addr  <= cur_addr + (ADDR_W'(n_out) << 4);
            remaining <= remaining - len_t'(n_out);
            st <= (remaining == len_t'(n_out)) ? M_IDLE : R_MREQ;
          end
        end

        // ----------------------- writes -----------------------
        W_IN: if (vta_wr_valid) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == IW'(PIECE_BLOCKS - 1)) begin
            op_nonce <= {1'b1, wr_ctr};
            wr_ctr   <= wr_ctr + 1'b1;
            ai_run <= 1'b1; ai_j0 <= 1'b1; ai_idx <= '0; ai_end <= IW'(PIECE_BLOCKS);
            ej0_valid <= 1'b0; enc_cnt <= '0;
            gh_run <= 1'b1; gh_src_regs <= 1'b0; gh_have <= 1'b0; gh_rdp <= 1'b0;
            gh_inflt <= 1'b0; gh_fin <= 1'b0; gh_fetch <= '0; gh_done_cnt <= '0;
            gh_total <= IW'(PIECE_BLOCKS + 1); gh_acc <= '0; gh_len <= LEN_DATA;
            gh_avail <= '0;
            st <= W_ENC;
          end
        end

        W_ENC: begin
          if (ks_v) begin
            enc_cnt  <= enc_cnt + 1'b1;
            gh_avail <= enc_cnt + 1'b1;
          end
          if (gh_fin && ej0_valid) begin
            ai_run <= 1'b0;
            op_tag <= gh_acc ^ ej0;
            st <= W_DREQ;
          end
        end

        W_DREQ: if (dram_req_ready) begin wb_idx <= '0; wb_v <= 1'b0; st <= W_DATA; end

        W_DATA: begin
          wb_v <= (wb_idx < IW'(PIECE_BLOCKS));
          if (wb_idx < IW'(PIECE_BLOCKS)) wb_idx <= wb_idx + 1'b1;
          else st <= W_MREQ;
        end

        W_MREQ: begin
          wb_v <= 1'b0;
          if (dram_req_ready) begin beat <= '0; st <= W_META; end
        end

        W_META: begin
          beat <= beat + 1'b1;
          if (beat != '0) begin
            cur_addr  <= cur_addr + ADDR_W'(PIECE_BLOCKS * 16);
            remaining <= remaining - len_t'(PIECE_BLOCKS);
            wcnt <= '0;
            st <= (remaining == len_t'(PIECE_BLOCKS)) ? M_IDLE : W_IN;
          end
        end

        W_DRAIN: if (vta_wr_valid) begin
          remaining <= remaining - 1'b1;
          if (remaining == len_t'(1)) st <= M_IDLE;
        end

        default: st <= M_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // MMIO reads
  // ------------------------------------------------------------------
  always_comb begin
    mmio_rdata = '0;
    if (mm_rd) begin
      if (mmio_req.addr < 16'(REG_WORDS * 4))
        mmio_rdata = shadow[mmio_req.addr[5:2]];
      else if (mmio_req.addr == A_STATUS)
        mmio_rdata = {24'h0, (st != M_IDLE), vta_done, wr_err, replay_err,
                      integrity_err, mac_fail, h_valid, regs_verified};
      else if (mmio_req.addr >= A_NONCE0 && mmio_req.addr < A_MAC0)
        mmio_rdata = nonce_r[95 - 32*nonce_sel -: 32];
      else if (mmio_req.addr == A_CE_STAT)
        mmio_rdata = ce_status;
      else if (mmio_req.addr[15:12] == A_BIGNUM[15:12])
        mmio_rdata = bn_rdata;
    end
  end

  // ------------------------------------------------------------------
  // protocol rules
  // ------------------------------------------------------------------
  assert property (@(posedge clk) disable iff (!rst_n) gfm_start |-> (!gfm_busy))
    else $error("sec_ctrl: GFM started while busy");
  assert property (@(posedge clk) disable iff (!rst_n)
                   vta_rd_valid |-> !integrity_err)
    else $error("sec_ctrl: data released after an integrity failure");

  if (PIECE_BLOCKS > BUF_BLOCKS) begin : g_bad_piece
    $error("sec_ctrl: a piece must fit in the buffer");
  end

endmodule
