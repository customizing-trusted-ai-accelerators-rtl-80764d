// tb_modexp: self-checking test of the modular-exponentiation engine.
//
// Runs at W = 64 bits. Results are compared with a reference computed in
// the testbench with 128-bit integer arithmetic (square-and-multiply with
// the % operator). Covers random operands, a base larger than the modulus,
// exponents 0 and 1, and a textbook RSA round trip (n = 3233, e = 17,
// d = 2753). The cycle count of each run must be (1 + W + popcount(exp))*W
// plus the control overhead of W + 2 cycles.
module tb_modexp;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [W-1:0] base, exp, modulus, result;
  int checks = 0, failures = 0;

  modexp #(.W(W)) dut (.*);

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [W-1:0] ref_pow(input logic [W-1:0] b, input logic [W-1:0] e,
                                           input logic [W-1:0] m);
    logic [2*W-1:0] r, bb;
    r  = 1;
    bb = (2*W)'(b) % (2*W)'(m);
    for (int i = W - 1; i >= 0; i--) begin
      r = (r * r) % (2*W)'(m);
      if (e[i]) r = (r * bb) % (2*W)'(m);
    end
    return r[W-1:0];
  endfunction

  task automatic run(input logic [W-1:0] b, input logic [W-1:0] e, input logic [W-1:0] m);
    int n;
    @(negedge clk); base = b; exp = e; modulus = m; start = 1;
    @(negedge clk); start = 0; n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks += 2;
    if (result !== ref_pow(b, e, m)) begin
      failures++; $display("%h^%h mod %h = %h, expected %h", b, e, m, result, ref_pow(b, e, m));
    end
    if (n != (1 + W + $countones(e)) * W + W + 2) begin
      failures++; $display("cycles %0d", n);
    end
  endtask

  initial begin
    logic [W-1:0] c;
    start = 0; base = '0; exp = '0; modulus = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(64'd65, 64'd17, 64'd3233);            // 65^17 mod 3233 = 2790
    c = result;
    checks++; if (c != 64'd2790) begin failures++; $display("RSA encrypt %0d", c); end
    run(c, 64'd2753, 64'd3233);               // decrypts back to 65
    checks++; if (result != 64'd65) begin failures++; $display("RSA decrypt %0d", result); end
    run(64'hffff_ffff_ffff_ffff, 64'd5, 64'd1000003);
    run(64'd12345, 64'd0, 64'd1000003);
    run(64'd12345, 64'd1, 64'd1000003);
    for (int i = 0; i < 12; i++)
      run({$urandom, $urandom}, {$urandom, $urandom}, {$urandom | 32'h8000_0000, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
