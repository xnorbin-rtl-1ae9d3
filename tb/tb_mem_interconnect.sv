// tb_mem_interconnect: random traffic on the IO, source and sink ports for both
// memory roles; checks which memory each request reaches and that read data returns
// to the port that asked one cycle later. IO requests are only made to the memory
// the core does not use, as the interconnect requires.
module tb_mem_interconnect;
  import xnorbin_pkg::*;
  logic clk = 0, rst_n = 0, role = 0;
  logic io_sel = 0, io_re = 0, io_we = 0;
  logic [LINE_AW-1:0] io_addr = '0, src_addr = '0, snk_addr = '0;
  logic [MEM_W-1:0] io_wdata = '0, io_rdata, src_rdata, snk_wdata = '0, snk_rdata;
  logic src_re = 0, snk_re = 0, snk_we = 0;
  logic [1:0] snk_be = '0;
  logic [1:0] m_re, m_we;
  logic [1:0][1:0] m_be;
  logic [1:0][LINE_AW-1:0] m_addr;
  logic [1:0][MEM_W-1:0] m_wdata, m_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mem_interconnect dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("MISMATCH %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      int s, k;
      @(negedge clk);
      role = 1'($urandom);
      s = int'(role); k = 1 - s;   // source / sink memory index
      io_re = 0; io_we = 0; src_re = 0; snk_re = 0; snk_we = 0;
      src_addr = LINE_AW'($urandom); snk_addr = LINE_AW'($urandom); io_addr = LINE_AW'($urandom);
      snk_wdata = $urandom; io_wdata = $urandom; snk_be = 2'($urandom);
      case ($urandom_range(0, 2))
        0: begin src_re = 1; snk_re = 1'($urandom); snk_we = !snk_re; end
        1: begin io_sel = 1'(k); io_re = 1'($urandom); io_we = !io_re; src_re = 1; end
        default: begin io_sel = 1'(s); io_re = 1'($urandom); io_we = !io_re; snk_re = 1; end
      endcase
      m_rdata[0] = $urandom; m_rdata[1] = $urandom;
      #1;
      if (io_re || io_we) begin
        chk(m_addr[io_sel] == io_addr && m_we[io_sel] == io_we && m_re[io_sel] == io_re, "io routing");
        if (io_we) chk(m_wdata[io_sel] == io_wdata && m_be[io_sel] == 2'b11, "io write data");
      end
      if (src_re) chk(m_re[s] && m_addr[s] == src_addr && !m_we[s], "source routing");
      if (snk_re || snk_we) begin
        chk(m_addr[k] == snk_addr && m_re[k] == snk_re && m_we[k] == snk_we, "sink routing");
        if (snk_we) chk(m_wdata[k] == snk_wdata && m_be[k] == snk_be, "sink write data");
      end
      @(posedge clk); #1;
      // the memories answer now; read data must follow the previous cycle's selects
      m_rdata[0] = $urandom; m_rdata[1] = $urandom;
      #1;
      chk(src_rdata == m_rdata[s], "source read data");
      chk(snk_rdata == m_rdata[k], "sink read data");
      if (io_re) chk(io_rdata == m_rdata[io_sel], "io read data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
