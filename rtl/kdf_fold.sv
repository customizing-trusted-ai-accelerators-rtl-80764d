// kdf_fold: key-derivation function turning the Diffie-Hellman shared secret
// into the 256-bit session key K.
//
// The W-bit secret Z is cut into 256-bit chunks, Z = Z_{n-1} || ... || Z_0,
// and K = Z_0 ^ Z_1 ^ ... ^ Z_{n-1}, one chunk per clock (W/256 cycles).
// start loads Z; done pulses with key valid.
//
// From the paper: a KDF block derives K from g^AB mod p. The paper does not
// name the function; the XOR fold is the simplest derivation that uses every
// bit of the secret. It is not a cryptographic hash, and a hash-based KDF
// (for instance HKDF) would be the usual choice in a product.
module kdf_fold #(
  parameter int unsigned W = 2048   // multiple of 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] secret,
  output logic         done,
  output logic [255:0] key
);
  localparam int unsigned N = W / 256;

  logic [W-1:0]   z;
  logic [255:0]   acc;
  logic [$clog2(N+1)-1:0] cnt;
  logic           busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z    <= '0;
      acc  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      key  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          z    <= secret;
          acc  <= '0;
          cnt  <= '0;
          busy <= 1'b1;
        end
      end else begin
        acc <= acc ^ z[255:0];
        z   <= z >> 256;
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(N - 1)) begin
          key  <= acc ^ z[255:0];
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end

  if (W % 256 != 0) begin : g_bad_w
    $error("kdf_fold: W must be a multiple of 256");
  end
endmodule
