// gfm_mul: GF(2^128) multiplier in the GCM bit convention (the GFM block).
//
// Computes z = x * y in GF(2^128) with the GCM polynomial
// x^128 + x^7 + x^2 + x + 1 and GCM's reflected bit order (bit 127 of the
// vector is the coefficient of x^0). It is the shift-and-add algorithm of
// NIST SP 800-38D, processing 16 bits of x per clock edge, the first slice
// on the edge that takes start, so a product takes exactly 8 cycles: start is
// taken when busy is low, done and z are valid in the 8th cycle after the
// start cycle (z holds until the next start), and a new start may be given
// in that same cycle, so back-to-back products run one per 8 cycles. It is not pipelined: a
// new start is ignored while busy.
//
// From the paper: a GFM unit that needs 8 clock cycles per 128-bit block and
// is not pipelined. This design's choice: 16 bits of x per cycle to meet
// those 8 cycles.
module gfm_mul
  import secvta_pkg::*;
#(
  parameter int unsigned CYCLES = 8   // 128 must divide evenly
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  blk_t x,
  input  blk_t y,
  output logic busy,
  output logic done,
  output blk_t z
);

  localparam int unsigned BITS = BLK_W / CYCLES;
  localparam blk_t R = {8'he1, 120'h0};

  blk_t xs, v, acc;
  logic [$clog2(CYCLES+1)-1:0] cnt;

  // one 16-bit slice of the product; on the start cycle it works on the
  // inputs directly, so the 8 slices end 8 cycles after start
  blk_t cur_x, cur_v, cur_acc, nxt_acc, nxt_v;
  always_comb begin
    cur_x   = busy ? xs  : x;
    cur_v   = busy ? v   : y;
    cur_acc = busy ? acc : '0;
    nxt_acc = cur_acc;
    nxt_v   = cur_v;
    for (int i = 0; i < BITS; i++) begin
      if (cur_x[BLK_W-1-i]) nxt_acc ^= nxt_v;
      nxt_v = nxt_v[0] ? ((nxt_v >> 1) ^ R) : (nxt_v >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      xs   <= '0;
      v    <= '0;
      acc  <= '0;
      z    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          xs   <= x << BITS;
          v    <= nxt_v;
          acc  <= nxt_acc;
          cnt  <= ($bits(cnt))'(1);
        end
      end else begin
        acc <= nxt_acc;
        v   <= nxt_v;
        xs  <= xs << BITS;
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(CYCLES - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          z    <= nxt_acc;
        end
      end
    end
  end

endmodule
