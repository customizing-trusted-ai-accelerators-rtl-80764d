// trng_model: behavioural stand-in for the true random number generator.
//
// A real TRNG samples a physical noise source (ring-oscillator jitter or
// similar). That cannot be written as logic, so this model puts a
// free-running 64-bit xorshift generator in its place. The generator steps
// every clock from reset, so the value a consumer receives depends on when it
// asks, as with a sampled noise source. It is synthesizable so that the whole
// design can be sized, but it is NOT a source of entropy: a product must
// replace it with a certified TRNG macro of the same interface.
//
// Interface and timing: while en is high the model delivers a new 32-bit word
// every RATE cycles, flagged by valid for one cycle (the first one RATE
// cycles after en rises); while en is low nothing is delivered.
//
// From the paper: the crypto engine holds a TRNG, used here for the
// Diffie-Hellman secret A. The word width, rate, seed and generator are this
// model's choices.
module trng_model #(
  parameter int unsigned  RATE = 4,
  parameter logic [63:0]  SEED = 64'h9e37_79b9_7f4a_7c15   // must be non-zero
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic        valid,
  output logic [31:0] data
);
  localparam int unsigned CW = $clog2(RATE + 1);

  logic [CW-1:0] cnt;
  logic [63:0]   s, s1, s2, s3;

  always_comb begin
    s1 = s  ^ (s  << 13);
    s2 = s1 ^ (s1 >> 7);
    s3 = s2 ^ (s2 << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      valid <= 1'b0;
      data  <= '0;
      s     <= SEED;
    end else begin
      s     <= s3;
      valid <= 1'b0;
      if (en) begin
        if (cnt >= CW'(RATE - 1)) begin
          cnt   <= '0;
          valid <= 1'b1;
          data  <= s[63:32] ^ s[31:0];
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else begin
        cnt <= '0;
      end
    end
  end

  if (SEED == 64'h0) begin : g_bad_seed
    $error("trng_model: SEED must be non-zero");
  end
endmodule
