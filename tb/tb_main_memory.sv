// tb_main_memory: writes both image memories over their full depth (with random
// half-word enables) and reads them back through both ports against an array model;
// also checks that a write in one memory leaves the other untouched.
module tb_main_memory;
  import xnorbin_pkg::*;
  logic clk = 0;
  logic [1:0] re = '0, we = '0;
  logic [1:0][1:0] be = '0;
  logic [1:0][LINE_AW-1:0] addr = '0;
  logic [1:0][MEM_W-1:0] wdata = '0, rdata;
  logic [31:0] m1 [MEM1_DEPTH];
  logic [31:0] m2 [MEM2_DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  main_memory dut (.*);

  initial begin
    for (int i = 0; i < MEM2_DEPTH; i++) begin
      @(negedge clk);
      we = 2'b11; be = '{2'b11, 2'b11};
      addr[1] = LINE_AW'(i); wdata[1] = $urandom; m2[i] = wdata[1];
      addr[0] = LINE_AW'(i % MEM1_DEPTH); wdata[0] = $urandom; m1[i % MEM1_DEPTH] = wdata[0];
    end
    // partial writes
    for (int i = 0; i < 500; i++) begin
      int a;
      logic [31:0] d;
      @(negedge clk);
      a = $urandom_range(0, MEM1_DEPTH - 1); d = $urandom;
      we = 2'b01; be[0] = 2'($urandom); addr[0] = LINE_AW'(a); wdata[0] = d;
      if (be[0][0]) m1[a][15:0] = d[15:0];
      if (be[0][1]) m1[a][31:16] = d[31:16];
    end
    @(negedge clk); we = '0;
    for (int i = 0; i < 3000; i++) begin
      int a1, a2;
      @(negedge clk);
      a1 = $urandom_range(0, MEM1_DEPTH - 1); a2 = $urandom_range(0, MEM2_DEPTH - 1);
      re = 2'b11; addr[0] = LINE_AW'(a1); addr[1] = LINE_AW'(a2);
      @(posedge clk); #1;
      checks += 2;
      if (rdata[0] !== m1[a1]) begin failures++; $display("MISMATCH mem1 %0d", a1); end
      if (rdata[1] !== m2[a2]) begin failures++; $display("MISMATCH mem2 %0d", a2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
