// crypto_engine: the cryptographic units of the secured accelerator and the
// sequencer that runs the accelerator's side of trust establishment.
//
// It contains the pipelined AES-256 core, the GF(2^128) multiplier (GFM), the
// modular-exponentiation engine (RSA), the TRNG, the key-derivation function
// and the key storage. AES and GFM are lent to the security interface through
// plain ports; the session key that AES uses comes straight from key storage
// and is never visible outside this module.
//
// Trust establishment, accelerator side. The host writes big-number operands
// (MSG, P, G) 32 bits at a time and issues commands; results appear in RES:
//   CE_SIGN      RES = MSG^d mod n with the endorsement key (the signatures
//                s1 and s2 over the message representative the host supplies)
//   CE_DH_GEN    new session: clear keys, draw A from the TRNG, RES = G^A mod P
//   CE_DH_FINISH X = MSG^d mod n (decrypt Enc(g^B mod p)), Z = X^A mod P,
//                K = KDF(Z) into key storage, A erased, AES key schedule run
// Status word: bit0 busy, bit1 session key valid, bit2 AES key ready,
// bit3 error (DH_FINISH without a DH_GEN before it).
//
// Interface timing: bn_* and cmd writes take effect at the next edge; bn_rdata
// is combinational. AES: see aes256_pipe (29-cycle latency, one block per
// cycle). GFM: see gfm_mul (8 cycles per product).
//
// From the paper: the component list (KDF, AES-256, GFM, TRNG, Key Storage,
// RSA), the protocol of Fig. 2 and its messages. Departures, all recorded in
// the documentation: the per-session attestation key pair AK is not generated
// (that needs an on-chip prime search), so the endorsement key signs and
// decrypts where the paper uses AK; likewise p and g are supplied by the host
// instead of being generated on chip; message hashing/padding for the
// signatures is left to the host.
module crypto_engine
  import secvta_pkg::*;
#(
  parameter int unsigned W     = 2048,   // public-key operand width
  parameter int unsigned TAG_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  // endorsement key from the fuses
  input  logic [W-1:0]     fuse_ek_n,
  input  logic [W-1:0]     fuse_ek_d,
  // host register port (already decoded by the security interface)
  input  logic             cmd_we,
  input  ce_cmd_e          cmd,
  output word_t            status,
  input  logic             bn_we,
  input  logic [1:0]       bn_sel,
  input  logic [$clog2(W/32)-1:0] bn_widx,
  input  word_t            bn_wdata,
  output word_t            bn_rdata,
  // AES for the security interface
  output logic             aes_key_ready,
  output logic             session_valid,
  input  logic             aes_in_valid,
  input  blk_t             aes_in_blk,
  input  logic [TAG_W-1:0] aes_in_tag,
  output logic             aes_out_valid,
  output blk_t             aes_out_blk,
  output logic [TAG_W-1:0] aes_out_tag,
  // GFM for the security interface
  input  logic             gfm_start,
  input  blk_t             gfm_x,
  input  blk_t             gfm_y,
  output logic             gfm_busy,
  output logic             gfm_done,
  output blk_t             gfm_z
);

  localparam int unsigned NW = W / 32;

  // ---------------- big-number registers ----------------
  logic [W-1:0] bn_msg, bn_p, bn_g, bn_res;

  always_comb begin
    unique case (bn_sel)
      2'd0:    bn_rdata = bn_msg[32*bn_widx +: 32];
      2'd1:    bn_rdata = bn_p[32*bn_widx +: 32];
      2'd2:    bn_rdata = bn_g[32*bn_widx +: 32];
      default: bn_rdata = bn_res[32*bn_widx +: 32];
    endcase
  end

  // ---------------- units ----------------
  logic [W-1:0] ek_n, ek_d, a_val;
  logic [255:0] k_val, kdf_key;
  logic         k_valid;
  logic         ks_clear, a_we, a_clear, k_we;
  logic [$clog2(NW)-1:0] a_widx;
  logic         trng_en, trng_valid;
  logic [31:0]  trng_data;
  logic         me_start, me_busy, me_done;
  logic [W-1:0] me_base, me_exp, me_mod, me_res;
  logic         kdf_start, kdf_done;
  logic         key_load;

  key_storage #(.W(W)) u_keys (
    .clk, .rst_n, .clear(ks_clear),
    .fuse_ek_n, .fuse_ek_d, .ek_n, .ek_d,
    .a_we, .a_widx, .a_wdata(trng_data), .a_clear, .a_val,
    .k_we, .k_wdata(kdf_key), .k_val, .k_valid
  );

  trng_model u_trng (.clk, .rst_n, .en(trng_en), .valid(trng_valid), .data(trng_data));

  modexp #(.W(W)) u_rsa (
    .clk, .rst_n, .start(me_start), .base(me_base), .exp(me_exp), .modulus(me_mod),
    .busy(me_busy), .done(me_done), .result(me_res)
  );

  kdf_fold #(.W(W)) u_kdf (.clk, .rst_n, .start(kdf_start), .secret(me_res),
                           .done(kdf_done), .key(kdf_key));

  aes256_pipe #(.TAG_W(TAG_W)) u_aes (
    .clk, .rst_n, .key_load, .key(k_val), .key_ready(aes_key_ready),
    .in_valid(aes_in_valid), .in_blk(aes_in_blk), .in_tag(aes_in_tag),
    .out_valid(aes_out_valid), .out_blk(aes_out_blk), .out_tag(aes_out_tag)
  );

  gfm_mul u_gfm (.clk, .rst_n, .start(gfm_start), .x(gfm_x), .y(gfm_y),
                 .busy(gfm_busy), .done(gfm_done), .z(gfm_z));

  assign session_valid = k_valid;

  // ---------------- sequencer ----------------
  typedef enum logic [3:0] {
    Q_IDLE, Q_SIGN, Q_RAND, Q_GPOW, Q_DEC, Q_ZPOW, Q_KDF, Q_KEY
  } qstate_e;
  qstate_e q;
  logic    err, a_ok;

  assign trng_en = (q == Q_RAND);
  assign a_we    = (q == Q_RAND) && trng_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q         <= Q_IDLE;
      bn_msg    <= '0;
      bn_p      <= '0;
      bn_g      <= '0;
      bn_res    <= '0;
      err       <= 1'b0;
      a_ok      <= 1'b0;
      a_widx    <= '0;
      ks_clear  <= 1'b0;
      a_clear   <= 1'b0;
      k_we      <= 1'b0;
      me_start  <= 1'b0;
      me_base   <= '0;
      me_exp    <= '0;
      me_mod    <= '0;
      kdf_start <= 1'b0;
      key_load  <= 1'b0;
    end else begin
      ks_clear  <= 1'b0;
      a_clear   <= 1'b0;
      k_we      <= 1'b0;
      me_start  <= 1'b0;
      kdf_start <= 1'b0;
      key_load  <= 1'b0;
      if (bn_we && q == Q_IDLE) begin
        unique case (bn_sel)
          2'd0:    bn_msg[32*bn_widx +: 32] <= bn_wdata;
          2'd1:    bn_p[32*bn_widx +: 32]   <= bn_wdata;
          2'd2:    bn_g[32*bn_widx +: 32]   <= bn_wdata;
          default: ;  // RES is read-only
        endcase
      end
      unique case (q)
        Q_IDLE: if (cmd_we) begin
          case (cmd)
            CE_SIGN: begin
              me_base <= bn_msg; me_exp <= ek_d; me_mod <= ek_n;
              me_start <= 1'b1; q <= Q_SIGN;
            end
            CE_DH_GEN: begin
              ks_clear <= 1'b1; a_widx <= '0; a_ok <= 1'b0; err <= 1'b0;
              q <= Q_RAND;
            end
            CE_DH_FINISH: begin
              if (!a_ok) err <= 1'b1;
              else begin
                me_base <= bn_msg; me_exp <= ek_d; me_mod <= ek_n;
                me_start <= 1'b1; q <= Q_DEC;
              end
            end
            default: ;
          endcase
        end
        Q_SIGN: if (me_done) begin bn_res <= me_res; q <= Q_IDLE; end
        Q_RAND: if (trng_valid) begin
          a_widx <= a_widx + 1'b1;
          if (a_widx == ($bits(a_widx))'(NW - 1)) q <= Q_GPOW;
        end
        Q_GPOW: begin
          if (!me_busy && !me_start && !me_done) begin
            me_base <= bn_g; me_exp <= a_val; me_mod <= bn_p; me_start <= 1'b1;
          end
          if (me_done) begin bn_res <= me_res; a_ok <= 1'b1; q <= Q_IDLE; end
        end
        Q_DEC: if (me_done) begin
          me_base <= me_res; me_exp <= a_val; me_mod <= bn_p; me_start <= 1'b1;
          q <= Q_ZPOW;
        end
        Q_ZPOW: if (me_done) begin
          a_clear <= 1'b1; a_ok <= 1'b0; kdf_start <= 1'b1; q <= Q_KDF;
        end
        Q_KDF: if (kdf_done) begin k_we <= 1'b1; q <= Q_KEY; end
        Q_KEY: begin key_load <= 1'b1; q <= Q_IDLE; end
        default: q <= Q_IDLE;
      endcase
    end
  end

  assign status = {28'h0, err, aes_key_ready, k_valid, (q != Q_IDLE)};

endmodule
