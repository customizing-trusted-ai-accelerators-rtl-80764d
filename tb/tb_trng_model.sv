// tb_trng_model: checks the TRNG model's delivery rate (one word every RATE
// cycles while enabled, none while disabled) and that the words vary.
module tb_trng_model;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, valid;
  logic [31:0] data;
  int checks = 0, failures = 0;

  trng_model #(.RATE(4)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n; logic [31:0] first; bit differ;
    en = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    n = 0; repeat (40) begin @(negedge clk); if (valid) n++; end
    checks++; if (n != 0) begin failures++; $display("output while disabled"); end
    en = 1; n = 0; differ = 0;
    repeat (400) begin
      @(negedge clk);
      if (valid) begin
        if (n == 0) first = data; else if (data != first) differ = 1;
        n++;
      end
    end
    checks += 2;
    if (n < 99 || n > 100) begin failures++; $display("rate %0d", n); end
    if (!differ) begin failures++; $display("constant output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
