// security_interface: the security interface of the secured accelerator.
//
// It stands between the accelerator core's MMIO and DMA interfaces on one
// side and the host CPU and DRAM on the other, and holds the control logic
// (sec_ctrl) and the 2 KB piece buffer (sec_buffer). All traffic between the
// core and the outside passes through it: DMA reads are fetched as whole
// pieces, authenticated and decrypted before the core sees them; DMA writes
// are encrypted and tagged before they reach DRAM; MMIO register writes reach
// the core only after their MAC and nonce have been checked. The AES and GFM
// units it uses live in the crypto engine and are reached through ports.
//
// Interface and timing: as sec_ctrl; the buffer adds no latency beyond its
// one-cycle synchronous read, which sec_ctrl already accounts for.
//
// From the paper: a security interface made of control logic and a 2 KB
// buffer, between the core's MMIO/DMA interfaces and host CPU/DRAM, talking to
// the crypto engine. The split into these ports is this design's choice.
module security_interface
  import secvta_pkg::*;
#(
  parameter int unsigned PIECE_BLOCKS = 128,
  parameter int unsigned BUF_BLOCKS   = 128,
  parameter int unsigned BN_WORDS     = 64,
  localparam int unsigned IW    = $clog2(PIECE_BLOCKS) + 1,
  localparam int unsigned TAG_W = IW + 2,
  localparam int unsigned BNW   = $clog2(BN_WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mmio_valid,
  input  mmio_req_t        mmio_req,
  output word_t            mmio_rdata,
  output logic             vta_reg_we,
  output logic [2:0]       vta_reg_addr,
  output word_t            vta_reg_wdata,
  input  logic             vta_done,
  input  logic             vta_req_valid,
  output logic             vta_req_ready,
  input  mem_req_t         vta_req,
  output logic             vta_rd_valid,
  output blk_t             vta_rd_data,
  input  logic             vta_wr_valid,
  output logic             vta_wr_ready,
  input  blk_t             vta_wr_data,
  output logic             dram_req_valid,
  input  logic             dram_req_ready,
  output mem_req_t         dram_req,
  input  logic             dram_rd_valid,
  input  blk_t             dram_rd_data,
  output logic             dram_wr_valid,
  output blk_t             dram_wr_data,
  output logic             ce_cmd_we,
  output ce_cmd_e          ce_cmd,
  input  word_t            ce_status,
  output logic             bn_we,
  output logic [1:0]       bn_sel,
  output logic [BNW-1:0]   bn_widx,
  output word_t            bn_wdata,
  input  word_t            bn_rdata,
  input  logic             aes_key_ready,
  input  logic             session_valid,
  output logic             aes_in_valid,
  output blk_t             aes_in_blk,
  output logic [TAG_W-1:0] aes_in_tag,
  input  logic             aes_out_valid,
  input  blk_t             aes_out_blk,
  input  logic [TAG_W-1:0] aes_out_tag,
  output logic             gfm_start,
  output blk_t             gfm_x,
  output blk_t             gfm_y,
  input  logic             gfm_busy,
  input  logic             gfm_done,
  input  blk_t             gfm_z,
  output logic             integrity_err,
  output logic             regs_verified
);
  localparam int unsigned BAW = $clog2(BUF_BLOCKS);

  logic           buf_we, buf_re_a, buf_re_b;
  logic [BAW-1:0] buf_waddr, buf_raddr_a, buf_raddr_b;
  blk_t           buf_wdata, buf_rdata_a, buf_rdata_b;

  sec_ctrl #(.PIECE_BLOCKS(PIECE_BLOCKS), .BUF_BLOCKS(BUF_BLOCKS), .BN_WORDS(BN_WORDS)) u_ctrl (
    .clk, .rst_n,
    .mmio_valid, .mmio_req, .mmio_rdata,
    .vta_reg_we, .vta_reg_addr, .vta_reg_wdata, .vta_done,
    .vta_req_valid, .vta_req_ready, .vta_req, .vta_rd_valid, .vta_rd_data,
    .vta_wr_valid, .vta_wr_ready, .vta_wr_data,
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_rd_valid, .dram_rd_data,
    .dram_wr_valid, .dram_wr_data,
    .ce_cmd_we, .ce_cmd, .ce_status, .bn_we, .bn_sel, .bn_widx, .bn_wdata, .bn_rdata,
    .aes_key_ready, .session_valid, .aes_in_valid, .aes_in_blk, .aes_in_tag,
    .aes_out_valid, .aes_out_blk, .aes_out_tag,
    .gfm_start, .gfm_x, .gfm_y, .gfm_busy, .gfm_done, .gfm_z,
    .buf_we, .buf_waddr, .buf_wdata, .buf_re_a, .buf_raddr_a, .buf_rdata_a,
    .buf_re_b, .buf_raddr_b, .buf_rdata_b,
    .integrity_err, .regs_verified
  );

  sec_buffer #(.DEPTH(BUF_BLOCKS)) u_buf (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata),
    .re_a(buf_re_a), .raddr_a(buf_raddr_a), .rdata_a(buf_rdata_a),
    .re_b(buf_re_b), .raddr_b(buf_raddr_b), .rdata_b(buf_rdata_b)
  );
endmodule
