// tb_crypto_engine: self-checking test of the crypto engine at W = 256.
//
// Acts as the host program of the key exchange, with a 256-bit test RSA
// endorsement key (n, e = 65537, d) and a 256-bit test prime P, G = 2:
//  1. CE_SIGN: the signature must verify (s^e mod n == message) and equal the
//     reference s = m^d mod n.
//  2. CE_DH_FINISH before CE_DH_GEN must raise the error bit.
//  3. CE_DH_GEN returns g^A mod P; the host picks B, sends
//     Enc(EK_pub, g^B mod P); after CE_DH_FINISH the engine holds
//     K = KDF((g^A)^B mod P). The host derives K itself and checks that the
//     engine's AES, which uses K, encrypts the zero block to AES_K(0).
//  4. One GFM product through the engine's ports.
// All references are computed in the testbench (wide-integer arithmetic and
// the gcm_ref_pkg model).
module tb_crypto_engine;
  import gcm_ref_pkg::*;
  import secvta_pkg::*;
  localparam int W = 256;
  localparam logic [W-1:0] N = 256'h90f0a30cc9138faf04215d58a6f0aadc22b80bb4d8c866e26102659af191f36b;
  localparam logic [W-1:0] D = 256'h584270c7845a6910864f5aec751bf0ae98a3aa103e73cccbecacd5bc58209401;
  localparam logic [W-1:0] E = 256'd65537;
  localparam logic [W-1:0] P = 256'hc2b38755cd37880e16ac4191a26aa0ae044f1574f037afc644d82a531289bafb;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] fuse_ek_n, fuse_ek_d;
  logic cmd_we, bn_we;
  ce_cmd_e cmd;
  word_t status, bn_wdata, bn_rdata;
  logic [1:0] bn_sel;
  logic [2:0] bn_widx;
  logic aes_key_ready, session_valid, aes_in_valid, aes_out_valid;
  blk_t aes_in_blk, aes_out_blk;
  logic [9:0] aes_in_tag, aes_out_tag;
  logic gfm_start, gfm_busy, gfm_done;
  blk_t gfm_x, gfm_y, gfm_z;
  int checks = 0, failures = 0;

  crypto_engine #(.W(W), .TAG_W(10)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] pw(input logic [W-1:0] b, input logic [W-1:0] e,
                                      input logic [W-1:0] m);
    logic [2*W-1:0] r, bb;
    r = 1; bb = (2*W)'(b) % (2*W)'(m);
    for (int i = W - 1; i >= 0; i--) begin
      r = (r * r) % (2*W)'(m);
      if (e[i]) r = (r * bb) % (2*W)'(m);
    end
    return r[W-1:0];
  endfunction

  task automatic bn_write(input int sel, input logic [W-1:0] v);
    for (int i = 0; i < W / 32; i++) begin
      @(negedge clk); bn_we = 1; bn_sel = 2'(sel); bn_widx = 3'(i); bn_wdata = v[32*i +: 32];
    end
    @(negedge clk); bn_we = 0;
  endtask

  task automatic bn_read(input int sel, output logic [W-1:0] v);
    for (int i = 0; i < W / 32; i++) begin
      bn_sel = 2'(sel); bn_widx = 3'(i); #1; v[32*i +: 32] = bn_rdata;
    end
  endtask

  task automatic command(input ce_cmd_e c);
    @(negedge clk); cmd_we = 1; cmd = c;
    @(negedge clk); cmd_we = 0;
    while (status[0]) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] m, s, ga, b, gb, z;
    rk_t rk;
    fuse_ek_n = N; fuse_ek_d = D;
    cmd_we = 0; cmd = CE_NOP; bn_we = 0; bn_sel = 0; bn_widx = 0; bn_wdata = 0;
    aes_in_valid = 0; aes_in_blk = 0; aes_in_tag = 0; gfm_start = 0; gfm_x = 0; gfm_y = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. signature
    m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % N;
    bn_write(BN_MSG, m);
    command(CE_SIGN);
    bn_read(BN_RES, s);
    chk(s == pw(m, D, N), "signature value");
    chk(pw(s, E, N) == m, "signature verifies with EK_pub");
    // 2. finish without gen
    command(CE_DH_FINISH);
    chk(status[3] == 1'b1, "error flag on DH_FINISH without DH_GEN");
    chk(!session_valid, "no key yet");
    // 3. key exchange
    bn_write(BN_P, P);
    bn_write(BN_G, 256'd2);
    command(CE_DH_GEN);
    chk(status[3] == 1'b0, "error cleared");
    bn_read(BN_RES, ga);
    chk(ga != 0 && ga < P, "g^A in range");
    // the test RSA modulus is smaller than P, so pick B with g^B < n
    do begin
      b  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      gb = pw(256'd2, b, P);
    end while (gb >= N);
    bn_write(BN_MSG, pw(gb, E, N));       // Enc(EK_pub, g^B mod p)
    command(CE_DH_FINISH);
    z = pw(ga, b, P);                     // host side shared secret
    while (!aes_key_ready) @(negedge clk);
    chk(session_valid && status[1] && status[2], "session key valid");
    rk = expand(z);                       // KDF at W = 256 is the identity fold
    @(negedge clk); aes_in_valid = 1; aes_in_blk = '0; aes_in_tag = 10'h155;
    @(negedge clk); aes_in_valid = 0;
    while (!aes_out_valid) @(negedge clk);
    chk(aes_out_blk == aes(rk, '0) && aes_out_tag == 10'h155, "AES under the exchanged key");
    // 4. GFM through the engine
    @(negedge clk); gfm_start = 1; gfm_x = {4{$urandom}}; gfm_y = {4{$urandom}};
    @(negedge clk); gfm_start = 0;
    while (!gfm_done) @(negedge clk);
    chk(gfm_z == gf_mul(gfm_x, gfm_y), "GFM product");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
