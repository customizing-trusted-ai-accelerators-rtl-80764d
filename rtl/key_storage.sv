// key_storage: secret-key registers of the crypto engine.
//
// Holds the secrets that never leave the accelerator: the Diffie-Hellman
// secret A of the current key exchange and the derived 256-bit session key K.
// The endorsement private key arrives on the fuse inputs and is only passed
// on to the RSA engine, never to a readable register.
//
// Rules it enforces: K can be written only while no session key is held
// (k_valid low), so a second key exchange cannot silently replace a live key;
// clear (a new session) erases A and K. A is written from the TRNG, word by
// word, and erased by a_clear once the shared secret has been formed, so it
// is truly ephemeral.
//
// Interface timing: all writes take effect at the next clock edge.
// From the paper: a key storage unit in the crypto engine; EK_pri burned in
// at manufacture; K shared only by host program and accelerator. The write-
// once rule and the clearing of A are this design's choices.
module key_storage #(
  parameter int unsigned W = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,          // start of a new session
  // endorsement key from the fuses
  input  logic [W-1:0] fuse_ek_n,
  input  logic [W-1:0] fuse_ek_d,
  output logic [W-1:0] ek_n,
  output logic [W-1:0] ek_d,
  // DH secret A, written 32 bits at a time
  input  logic         a_we,
  input  logic [$clog2(W/32)-1:0] a_widx,
  input  logic [31:0]  a_wdata,
  input  logic         a_clear,
  output logic [W-1:0] a_val,
  // session key
  input  logic         k_we,
  input  logic [255:0] k_wdata,
  output logic [255:0] k_val,
  output logic         k_valid
);

  assign ek_n = fuse_ek_n;
  assign ek_d = fuse_ek_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_val   <= '0;
      k_val   <= '0;
      k_valid <= 1'b0;
    end else begin
      if (clear) begin
        a_val   <= '0;
        k_val   <= '0;
        k_valid <= 1'b0;
      end else begin
        if (a_clear) a_val <= '0;
        else if (a_we) a_val[32*a_widx +: 32] <= a_wdata;
        if (k_we && !k_valid) begin
          k_val   <= k_wdata;
          k_valid <= 1'b1;
        end
      end
    end
  end

endmodule
