// tb_row_bank: random simultaneous reads and writes on the two-port row bank,
// checked against an array model (synchronous read, old data on a same-address
// collision).
module tb_row_bank;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [256];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  row_bank #(.DEPTH(256), .W(16)) dut (.*);

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] exp;
      @(negedge clk);
      re = 1; raddr = 8'($urandom);
      we = 1'($urandom); waddr = ($urandom_range(0, 3) == 0) ? raddr : 8'($urandom); wdata = 16'($urandom);
      exp = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== exp) begin failures++; $display("MISMATCH addr %0d got %h exp %h", raddr, rdata, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
