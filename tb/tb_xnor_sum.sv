// tb_xnor_sum: exhaustive corner cases and random vectors for the XNOR-popcount unit,
// compared with a bit-by-bit count of agreeing positions (+1 each, -1 otherwise).
module tb_xnor_sum;
  logic [15:0] img, wgt;
  logic en;
  logic signed [5:0] res;
  int checks = 0, failures = 0;

  xnor_sum dut (.*);

  task automatic check(input logic [15:0] a, input logic [15:0] b, input logic e);
    int exp;
    exp = 0;
    img = a; wgt = b; en = e;
    #1;
    if (e) for (int i = 0; i < 16; i++) exp += (a[i] == b[i]) ? 1 : -1;
    checks++;
    if (int'(res) != exp) begin
      failures++;
      $display("MISMATCH img=%h wgt=%h en=%b got %0d expected %0d", a, b, e, res, exp);
    end
  endtask

  initial begin
    check(16'h0000, 16'h0000, 1);   // +16
    check(16'hffff, 16'h0000, 1);   // -16
    check(16'hffff, 16'hffff, 1);
    check(16'h00ff, 16'h0000, 1);   // 0
    check(16'h1234, 16'h5678, 0);   // disabled
    for (int i = 0; i < 2000; i++) check(16'($urandom), 16'($urandom), 1'($urandom_range(0, 7) != 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
