// tb_gfm_mul: self-checking test of the GF(2^128) multiplier.
//
// Random and corner operands are multiplied and compared with the reference
// model (carry-less multiply of bit-reversed operands, then reduction), and
// with one published value: the GHASH of the single block
// 0388dace60b6a392f328c2b971b2fe78 under H = 66e94bd4ef8a2c3b884cfa59ca342b2e
// (NIST GCM test case 2) is checked through two products. Every product must
// take exactly 8 cycles from start to done.
module tb_gfm_mul;
  import gcm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [127:0] x, y, z;
  int checks = 0, failures = 0;

  gfm_mul dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic mul(input logic [127:0] a, input logic [127:0] b, output logic [127:0] r);
    int n;
    @(negedge clk); x = a; y = b; start = 1;
    @(negedge clk); start = 0; n = 1;
    while (!done) begin @(negedge clk); n++; end
    r = z;
    checks++;
    if (n != 8) begin failures++; $display("latency %0d", n); end
  endtask

  initial begin
    logic [127:0] a, b, r, r2;
    start = 0; x = '0; y = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // published GHASH value (test case 2: len block = 0..0 || 128)
    mul(128'h0388dace60b6a392f328c2b971b2fe78, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e, r);
    mul(r ^ 128'h80, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e, r2);
    checks++;
    if (r2 !== 128'hf38cbb1ad69223dcc3457ae5b6b0f885)
      begin failures++; $display("GHASH mismatch %h", r2); end
    for (int i = 0; i < 200; i++) begin
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      if (i == 0) a = 128'h8000_0000_0000_0000_0000_0000_0000_0000;  // the unit element
      if (i == 1) b = '0;
      mul(a, b, r);
      checks++;
      if (r !== gf_mul(a, b)) begin failures++; $display("mismatch %h*%h=%h", a, b, r); end
      if (i == 0 && r !== b) begin failures++; $display("unit element broken"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
