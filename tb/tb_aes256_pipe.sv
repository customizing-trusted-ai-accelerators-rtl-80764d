// tb_aes256_pipe: self-checking test of the pipelined AES-256 core.
//
// Checks published vectors (FIPS-197 C.3; AES-256 with the all-zero key on
// the blocks 0, J0 = 0..01 and 0..02 from the NIST GCM test cases 13/14),
// then 64 random blocks issued back to back under a random key against the
// reference model of gcm_ref_pkg. Also checks that every result leaves
// exactly 29 cycles after its block entered and that a new block is taken
// every cycle.
module tb_aes256_pipe;
  import gcm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         key_load, key_ready, in_valid, out_valid;
  logic [255:0] key;
  logic [127:0] in_blk, out_blk;
  logic [7:0]   in_tag, out_tag;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  aes256_pipe #(.TAG_W(8)) dut (.*);

  logic [127:0] expq [$];
  longint       tq [$];
  always @(posedge clk) begin
    if (in_valid) tq.push_back(cyc);
    if (out_valid) begin
      checks += 2;
      if (expq.size() == 0) begin failures += 2; $display("unexpected output"); end
      else begin
        logic [127:0] e; longint t0;
        e = expq.pop_front(); t0 = tq.pop_front();
        if (out_blk !== e) begin failures++; $display("data mismatch %h exp %h", out_blk, e); end
        if (cyc - t0 != 29) begin failures++; $display("latency %0d", cyc - t0); end
      end
    end
  end

  task automatic load(input logic [255:0] k);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0;
    wait (key_ready); @(negedge clk);
  endtask

  task automatic send(input logic [127:0] b, input logic [127:0] e);
    in_valid = 1; in_blk = b; in_tag = 8'(expq.size()); expq.push_back(e);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rk_t rk;
    logic [255:0] k;
    key_load = 0; in_valid = 0; key = '0; in_blk = '0; in_tag = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // reference model sanity against FIPS-197
    rk = expand(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f);
    checks++;
    if (aes(rk, 128'h00112233445566778899aabbccddeeff) !== 128'h8ea2b7ca516745bfeafc49904b496089) begin
      failures++; $display("reference model wrong");
    end
    load(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f);
    send(128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089);
    repeat (40) @(negedge clk);
    load('0);
    send(128'h0, 128'hdc95c078a2408989ad48a21492842087);
    send(128'h1, 128'h530f8afbc74536b9a963b4f1c4cb738b);
    send(128'h2, 128'hcea7403d4d606b6e074ec5d3baf39d18);
    repeat (40) @(negedge clk);
    // back-to-back random traffic
    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    load(k);
    rk = expand(k);
    for (int i = 0; i < 64; i++) begin
      logic [127:0] b;
      b = {$urandom, $urandom, $urandom, $urandom};
      in_valid = 1; in_blk = b; in_tag = 8'(i); expq.push_back(aes(rk, b));
      @(negedge clk);
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
