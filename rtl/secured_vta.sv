// secured_vta: the security layer of a trusted tensor accelerator (top).
//
// The accelerator core itself, with its MMIO and DMA interfaces, is an
// unmodified third-party design and is not part of this RTL: its register
// write port and its DMA channels are ports of this module. Around it this
// top puts the two added blocks: the security interface (control logic plus
// 2 KB buffer) on the path between the core and the host/DRAM, and the crypto
// engine (AES-256, GFM, RSA, TRNG, KDF, key storage) it uses.
//
// Ports, grouped by what they connect to:
//   host_*  : 32-bit MMIO from the host CPU (through its untrusted driver);
//             rdata is combinational for a read request.
//   dram_*  : the untrusted off-chip DRAM; requests valid/ready, data beats
//             of 128 bits, valid only.
//   vta_*   : the core's MMIO interface (register writes, done flag) and DMA
//             interface (requests valid/ready, read beats valid only, write
//             beats valid/ready).
//   fuse_*  : the endorsement key pair burned in at manufacture.
//   integrity_err / regs_verified : status, also readable over MMIO.
//
// Timing: AES 29 cycles latency, one block per cycle; GHASH 8 cycles per
// 128-bit block; a piece read costs about 8*(s/16+1) cycles of hashing before
// its first block is released.
//
// Notes on tool reports: rst_n is an asynchronous reset for every flop and
// is also sampled synchronously by the protocol assertions (disable iff), so
// lint reports it as both; that is intended. Some output bits are constant
// by construction: a DRAM request is either a whole piece or one 32-byte
// metadata record, so most bits of dram_req.len never change.
//
// From the paper: the block structure (security interface and crypto engine
// between core and host/DRAM), the 2 KB buffer, AES-256 with 29-cycle
// latency, GFM with 8 cycles per block. This design's choices: all widths,
// handshakes, the register map and the 2048-bit public-key width.
module secured_vta
  import secvta_pkg::*;
#(
  parameter int unsigned PIECE_BLOCKS = 128,    // piece size s = 2 KB
  parameter int unsigned BUF_BLOCKS   = 128,    // 2 KB buffer
  parameter int unsigned W            = 2048    // RSA / DH operand width
) (
  input  logic         clk,
  input  logic         rst_n,
  // host MMIO
  input  logic         host_valid,
  input  mmio_req_t    host_req,
  output word_t        host_rdata,
  // DRAM
  output logic         dram_req_valid,
  input  logic         dram_req_ready,
  output mem_req_t     dram_req,
  input  logic         dram_rd_valid,
  input  blk_t         dram_rd_data,
  output logic         dram_wr_valid,
  output blk_t         dram_wr_data,
  // core MMIO interface
  output logic         vta_reg_we,
  output logic [2:0]   vta_reg_addr,
  output word_t        vta_reg_wdata,
  input  logic         vta_done,
  // core DMA interface
  input  logic         vta_req_valid,
  output logic         vta_req_ready,
  input  mem_req_t     vta_req,
  output logic         vta_rd_valid,
  output blk_t         vta_rd_data,
  input  logic         vta_wr_valid,
  output logic         vta_wr_ready,
  input  blk_t         vta_wr_data,
  // endorsement key fuses
  input  logic [W-1:0] fuse_ek_n,
  input  logic [W-1:0] fuse_ek_d,
  // status
  output logic         integrity_err,
  output logic         regs_verified
);
  localparam int unsigned IW       = $clog2(PIECE_BLOCKS) + 1;
  localparam int unsigned TAG_W    = IW + 2;
  localparam int unsigned BN_WORDS = W / 32;
  localparam int unsigned BNW      = $clog2(BN_WORDS);

  logic             ce_cmd_we, bn_we;
  ce_cmd_e          ce_cmd;
  word_t            ce_status, bn_wdata, bn_rdata;
  logic [1:0]       bn_sel;
  logic [BNW-1:0]   bn_widx;
  logic             aes_key_ready, session_valid;
  logic             aes_in_valid, aes_out_valid;
  blk_t             aes_in_blk, aes_out_blk;
  logic [TAG_W-1:0] aes_in_tag, aes_out_tag;
  logic             gfm_start, gfm_busy, gfm_done;
  blk_t             gfm_x, gfm_y, gfm_z;

  security_interface #(.PIECE_BLOCKS(PIECE_BLOCKS), .BUF_BLOCKS(BUF_BLOCKS),
                       .BN_WORDS(BN_WORDS)) u_si (
    .clk, .rst_n,
    .mmio_valid(host_valid), .mmio_req(host_req), .mmio_rdata(host_rdata),
    .vta_reg_we, .vta_reg_addr, .vta_reg_wdata, .vta_done,
    .vta_req_valid, .vta_req_ready, .vta_req, .vta_rd_valid, .vta_rd_data,
    .vta_wr_valid, .vta_wr_ready, .vta_wr_data,
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_rd_valid, .dram_rd_data,
    .dram_wr_valid, .dram_wr_data,
    .ce_cmd_we, .ce_cmd, .ce_status, .bn_we, .bn_sel, .bn_widx, .bn_wdata, .bn_rdata,
    .aes_key_ready, .session_valid, .aes_in_valid, .aes_in_blk, .aes_in_tag,
    .aes_out_valid, .aes_out_blk, .aes_out_tag,
    .gfm_start, .gfm_x, .gfm_y, .gfm_busy, .gfm_done, .gfm_z,
    .integrity_err, .regs_verified
  );

  crypto_engine #(.W(W), .TAG_W(TAG_W)) u_ce (
    .clk, .rst_n, .fuse_ek_n, .fuse_ek_d,
    .cmd_we(ce_cmd_we), .cmd(ce_cmd), .status(ce_status),
    .bn_we, .bn_sel, .bn_widx, .bn_wdata, .bn_rdata,
    .aes_key_ready, .session_valid, .aes_in_valid, .aes_in_blk, .aes_in_tag,
    .aes_out_valid, .aes_out_blk, .aes_out_tag,
    .gfm_start, .gfm_x, .gfm_y, .gfm_busy, .gfm_done, .gfm_z
  );

  if (W > 2048) begin : g_bad_w
    $error("secured_vta: the MMIO big-number window holds at most 2048 bits");
  end
endmodule
