// modexp: modular exponentiation engine (the RSA block of the crypto engine).
//
// result = base^exp mod modulus, for any W-bit base and exponent and an odd
// or even modulus greater than 1. The same engine serves every public-key
// step of trust establishment: RSA signing and decryption with the
// endorsement key, and both Diffie-Hellman powers g^A mod p and (g^B)^A mod p.
//
// How it works: modular products are formed by interleaved (bit-serial,
// most-significant bit first) multiplication: P <- 2P mod N, then P <- P + b
// mod N if the multiplier bit is set; one bit per clock, so a product takes W
// cycles. The base is first reduced mod N as base*1. Exponentiation is
// left-to-right square-and-multiply over all W exponent bits, so a run takes
// (1 + W + popcount(exp)) * W cycles plus a few control cycles.
//
// Interface: start (with operands stable) when busy is low; done pulses for
// one cycle with result valid; result holds until the next start.
//
// From the paper: an RSA unit in the crypto engine, RSA signatures with the
// endorsement/attestation keys, and Diffie-Hellman over a prime p. This
// design's choices: the width (2048 bits, not given), the bit-serial
// multiplier and square-and-multiply.
module modexp #(
  parameter int unsigned W = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] base,
  input  logic [W-1:0] exp,
  input  logic [W-1:0] modulus,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] result
);

  typedef enum logic [2:0] {S_IDLE, S_RED, S_SQR, S_MUL, S_NEXT, S_DONE} state_e;
  state_e st;

  logic [W-1:0] n_r, e_r, b_r, r_r;
  logic [$clog2(W+1)-1:0] ebit;      // exponent bit index being processed

  // interleaved multiplier
  logic [W-1:0] mm_a, mm_b;
  logic [W-1:0] mm_p;
  logic [$clog2(W+1)-1:0] mm_i;

  logic [W+1:0] p2, p2r, p3;
  logic [W-1:0] p3r;
  always_comb begin
    p2  = {1'b0, mm_p, 1'b0};   // mm_p < N always
    p2r = (p2 >= {2'b00, n_r}) ? p2 - {2'b00, n_r} : p2;
    p3  = mm_a[W-1] ? p2r + {2'b00, mm_b} : p2r;
    p3r = W'((p3 >= {2'b00, n_r}) ? p3 - {2'b00, n_r} : p3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      busy   <= 1'b0;
      done   <= 1'b0;
      n_r    <= '0;
      e_r    <= '0;
      b_r    <= '0;
      r_r    <= '0;
      result <= '0;
      ebit   <= '0;
      mm_a   <= '0;
      mm_b   <= '0;
      mm_p   <= '0;
      mm_i   <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1;
          n_r  <= modulus;
          e_r  <= exp;
          r_r  <= W'(1);
          ebit <= '0;
          // reduce the base: base * 1 mod N
          mm_a <= base;
          mm_b <= W'(1);
          mm_p <= '0;
          mm_i <= '0;
          st   <= S_RED;
        end
        S_RED, S_SQR, S_MUL: begin
          mm_p <= p3r[W-1:0];
          mm_a <= mm_a << 1;
          mm_i <= mm_i + 1'b1;
          if (mm_i == ($bits(mm_i))'(W - 1)) begin
            if (st == S_RED) begin
              b_r <= p3r[W-1:0];
              // first squaring of R = 1
              mm_a <= r_r;
              mm_b <= r_r;
              mm_p <= '0;
              mm_i <= '0;
              st   <= S_SQR;
            end else if (st == S_SQR && e_r[W-1]) begin
              r_r  <= p3r[W-1:0];
              mm_a <= p3r[W-1:0];
              mm_b <= b_r;
              mm_p <= '0;
              mm_i <= '0;
              st   <= S_MUL;
            end else begin
              r_r <= p3r[W-1:0];
              st  <= S_NEXT;
            end
          end
        end
        S_NEXT: begin
          e_r  <= e_r << 1;
          ebit <= ebit + 1'b1;
          if (ebit == ($bits(ebit))'(W - 1)) begin
            st <= S_DONE;
          end else begin
            mm_a <= r_r;
            mm_b <= r_r;
            mm_p <= '0;
            mm_i <= '0;
            st   <= S_SQR;
          end
        end
        S_DONE: begin
          result <= r_r;
          done   <= 1'b1;
          busy   <= 1'b0;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
