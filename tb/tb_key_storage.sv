// tb_key_storage: self-checking test of the key-storage registers.
// Checks the fuse pass-through to the RSA side, word writes of the DH secret
// and its erasure, the write-once rule of the session key and session clear.
module tb_key_storage;
  localparam int W = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, a_we, a_clear, k_we, k_valid;
  logic [W-1:0] fuse_ek_n, fuse_ek_d, ek_n, ek_d, a_val, a_exp;
  logic [2:0] a_widx;
  logic [31:0] a_wdata;
  logic [255:0] k_wdata, k_val;
  int checks = 0, failures = 0;

  key_storage #(.W(W)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [255:0] k1, k2;
    clear = 0; a_we = 0; a_clear = 0; k_we = 0; a_widx = 0; a_wdata = 0; k_wdata = 0;
    fuse_ek_n = {8{32'h1234_5678}}; fuse_ek_d = {8{32'h9abc_def0}};
    repeat (3) @(negedge clk); rst_n = 1;
    chk(ek_n == fuse_ek_n && ek_d == fuse_ek_d, "fuse key");
    chk(!k_valid && a_val == '0, "reset state");
    a_exp = '0;
    for (int i = 0; i < 8; i++) begin
      a_we = 1; a_widx = 3'(i); a_wdata = $urandom; a_exp[32*i +: 32] = a_wdata;
      @(negedge clk);
    end
    a_we = 0;
    chk(a_val == a_exp, "A written");
    k1 = {8{$urandom}}; k2 = ~k1;
    k_we = 1; k_wdata = k1; @(negedge clk); k_we = 0;
    chk(k_valid && k_val == k1, "K written");
    k_we = 1; k_wdata = k2; @(negedge clk); k_we = 0;
    chk(k_val == k1, "K write-once");
    a_clear = 1; @(negedge clk); a_clear = 0;
    chk(a_val == '0 && k_valid, "A erased, K kept");
    clear = 1; @(negedge clk); clear = 0;
    chk(!k_valid && k_val == '0, "session cleared");
    k_we = 1; k_wdata = k2; @(negedge clk); k_we = 0;
    chk(k_valid && k_val == k2, "new session key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
