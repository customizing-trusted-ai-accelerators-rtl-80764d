// sec_buffer: the security interface's on-chip piece buffer.
//
// DEPTH words of 128 bits (2 KB by default), one write port and two
// synchronous read ports. One read port feeds the GHASH (authentication)
// path, the other the data path (CTR XOR, or streaming to DRAM), so both can
// walk the same piece at their own pace while DRAM data or freshly encrypted
// blocks are written. Read data appears one cycle after the address; a read
// of the address written in the same cycle returns the old contents.
//
// From the paper: a 2 KB on-chip buffer in the security interface. The port
// structure is this design's choice; in silicon it would be an SRAM macro
// (for example two copies of a 1R1W array).
module sec_buffer
  import secvta_pkg::*;
#(
  parameter int unsigned DEPTH = 128,   // 128 x 16 B = 2 KB
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  blk_t          wdata,
  input  logic          re_a,
  input  logic [AW-1:0] raddr_a,
  output blk_t          rdata_a,
  input  logic          re_b,
  input  logic [AW-1:0] raddr_b,
  output blk_t          rdata_b
);
  blk_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule
