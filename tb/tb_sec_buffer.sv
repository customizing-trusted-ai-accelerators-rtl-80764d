// tb_sec_buffer: checks the 2 KB piece buffer: every word written can be read
// back on both read ports one cycle after the address, independently.
module tb_sec_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re_a, re_b;
  logic [6:0] waddr, raddr_a, raddr_b;
  logic [127:0] wdata, rdata_a, rdata_b;
  logic [127:0] model [128];
  int checks = 0, failures = 0;

  sec_buffer #(.DEPTH(128)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re_a = 0; re_b = 0; waddr = 0; raddr_a = 0; raddr_b = 0; wdata = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 128; i++) begin
      re_a = 1; re_b = 1; raddr_a = 7'(i); raddr_b = 7'(127 - i);
      @(negedge clk);
      checks += 2;
      if (rdata_a !== model[i])       begin failures++; $display("port a %0d", i); end
      if (rdata_b !== model[127 - i]) begin failures++; $display("port b %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
