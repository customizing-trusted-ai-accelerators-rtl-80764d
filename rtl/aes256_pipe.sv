// aes256_pipe: fully pipelined AES-256 encryption core.
//
// The security layer only ever runs AES in the forward direction: counter
// mode encrypts and decrypts by XOR with AES(counter), and the GCM hash key
// H = AES(0) and the tag mask AES(J0) are forward encryptions too.
//
// How it works: when key_load is pulsed the 256-bit key is expanded, one
// 32-bit schedule word per cycle (52 cycles), into 15 round-key registers;
// key_ready is low meanwhile and in_valid must be held low. The data path is
// 29 register stages: the initial AddRoundKey, then two stages per round
// (SubBytes+ShiftRows, then MixColumns+AddRoundKey; round 14 skips
// MixColumns). One block can enter every cycle and leaves exactly 29 cycles
// later with its sideband tag, so the latency is 29 and the throughput one
// block per clock.
//
// From the paper: AES-256, pipelined, 29 clock cycles per 128-bit block.
// This design's choices: the iterative key expansion into stored round keys
// (the session key changes only at key exchange), the split of the 29 cycles
// into 1 + 14x2 stages, and the sideband tag.
module aes256_pipe
  import secvta_pkg::*;
#(
  parameter int unsigned TAG_W   = 8,
  parameter int unsigned LATENCY = 29   // fixed by the stage structure
) (
  input  logic             clk,
  input  logic             rst_n,
  // key
  input  logic             key_load,
  input  logic [255:0]     key,
  output logic             key_ready,
  // data in
  input  logic             in_valid,
  input  blk_t             in_blk,
  input  logic [TAG_W-1:0] in_tag,
  // data out
  output logic             out_valid,
  output blk_t             out_blk,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned NR = 14;

  // ---------------- key expansion ----------------
  logic [31:0] w [60];
  logic [5:0]  widx;
  logic        kbusy;
  logic [7:0]  rcon;
  logic [31:0] temp, wnew;

  always_comb begin
    temp = w[widx - 6'd1];
    if (widx[2:0] == 3'd0)
      temp = sub_word({temp[23:0], temp[31:24]}) ^ {rcon, 24'h0};
    else if (widx[2:0] == 3'd4)
      temp = sub_word(temp);
    wnew = w[widx - 6'd8] ^ temp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kbusy <= 1'b0;
      widx  <= 6'd8;
      rcon  <= 8'h01;
      for (int i = 0; i < 60; i++) w[i] <= '0;
    end else if (key_load) begin
      kbusy <= 1'b1;
      widx  <= 6'd8;
      rcon  <= 8'h01;
      for (int i = 0; i < 8; i++) w[i] <= key[255 - 32*i -: 32];
    end else if (kbusy) begin
      w[widx] <= wnew;
      if (widx[2:0] == 3'd0) rcon <= xtime(rcon);
      if (widx == 6'd59) kbusy <= 1'b0;
      widx <= widx + 6'd1;
    end
  end

  assign key_ready = !kbusy && !key_load;

  blk_t rk [NR+1];
  always_comb
    for (int r = 0; r <= NR; r++)
      rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};

  // ---------------- data pipeline ----------------
  localparam int unsigned NST = 2*NR + 1;   // 29 stages
  blk_t             st  [NST];
  logic             vld [NST];
  logic [TAG_W-1:0] tg  [NST];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NST; i++) begin
        vld[i] <= 1'b0;
        st[i]  <= '0;
        tg[i]  <= '0;
      end
    end else begin
      vld[0] <= in_valid;
      st[0]  <= in_blk ^ rk[0];
      tg[0]  <= in_tag;
      for (int r = 1; r <= NR; r++) begin
        vld[2*r-1] <= vld[2*r-2];
        tg[2*r-1]  <= tg[2*r-2];
        st[2*r-1]  <= sub_shift(st[2*r-2]);
        vld[2*r]   <= vld[2*r-1];
        tg[2*r]    <= tg[2*r-1];
        st[2*r]    <= ((r == NR) ? st[2*r-1] : mix_columns(st[2*r-1])) ^ rk[r];
      end
    end
  end

  assign out_valid = vld[NST-1];
  assign out_blk   = st[NST-1];
  assign out_tag   = tg[NST-1];

  // A block must not enter while the round keys are being rebuilt.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> key_ready)
    else $error("aes256_pipe: input while key expansion is running");

  if (LATENCY != NST) begin : g_bad_latency
    $error("aes256_pipe: LATENCY must be %0d", NST);
  end

endmodule
