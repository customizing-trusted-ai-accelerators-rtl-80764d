// tb_kdf_fold: self-checking test of the key-derivation fold.
// At W = 1024 the derived key must equal the XOR of the four 256-bit chunks
// of the secret, computed here independently; done comes W/256 + 1 cycles
// after start (one load cycle, then one chunk per cycle).
module tb_kdf_fold;
  localparam int W = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  logic [W-1:0] secret;
  logic [255:0] key, e;
  int checks = 0, failures = 0;

  kdf_fold #(.W(W)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    start = 0; secret = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < W / 32; i++) secret[32*i +: 32] = $urandom;
      e = secret[255:0] ^ secret[511:256] ^ secret[767:512] ^ secret[1023:768];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; n = 1;
      while (!done) begin @(negedge clk); n++; end
      checks += 2;
      if (key !== e) begin failures++; $display("key mismatch"); end
      if (n != W / 256 + 1) begin failures++; $display("cycles %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
