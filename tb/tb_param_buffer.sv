// tb_param_buffer: fills the 512-line parameter buffer, then reads random lines while
// writing others in the same cycle, against an array model.
module tb_param_buffer;
  logic clk = 0, we = 0, re = 0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [512];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  param_buffer dut (.*);

  initial begin
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); we = 1; waddr = 9'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] exp;
      @(negedge clk);
      re = 1; raddr = 9'($urandom);
      we = 1'($urandom); waddr = 9'($urandom); wdata = $urandom;
      if (waddr == raddr) we = 0;
      exp = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== exp) begin failures++; $display("MISMATCH %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
