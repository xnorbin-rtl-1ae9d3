// tb_io_ctrl: drives the pin protocol. Writes random lines to Mem1, Mem2 and the
// parameter buffer and checks each resulting write (target, address, data); issues a
// start and checks the start pulse, the descriptor pointer and io_done around a
// core_done pulse; reads lines back from a memory model and checks the nibble stream.
module tb_io_ctrl;
  import xnorbin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] io_din = '0;
  logic io_valid = 0, io_cmd = 0;
  logic [3:0] io_dout;
  logic io_dvalid, io_done;
  logic m_sel, m_re, m_we, p_we, start;
  logic [LINE_AW-1:0] m_addr;
  logic [MEM_W-1:0] m_wdata, m_rdata, p_wdata;
  logic [PARAM_AW-1:0] p_addr, cfg_ptr;
  logic core_done = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  io_ctrl dut (.*);

  // memory models written by the DUT
  logic [31:0] mem [2][64];
  logic [31:0] prm [64];
  always @(posedge clk) begin
    if (m_we) mem[m_sel][m_addr[5:0]] <= m_wdata;
    if (m_re) m_rdata <= mem[m_sel][m_addr[5:0]];
    if (p_we) prm[p_addr[5:0]] <= p_wdata;
  end
  int nstart = 0;
  always @(posedge clk) if (rst_n && start) nstart++;

  task automatic send(input logic c, input logic [15:0] d);
    @(negedge clk); io_valid = 1; io_cmd = c; io_din = d;
    @(negedge clk); io_valid = 0; io_cmd = 0;
  endtask

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("MISMATCH %s", msg); end
  endtask

  logic [31:0] ref_m [2][64];
  logic [31:0] ref_p [64];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      send(1'b1, {2'(t), 14'd8});
      for (int i = 8; i < 24; i++) begin
        logic [31:0] v;
        v = $urandom;
        if (t < 2) ref_m[t][i] = v; else ref_p[i] = v;
        send(1'b0, v[15:0]);
        send(1'b0, v[31:16]);
      end
    end
    @(negedge clk);
    for (int i = 8; i < 24; i++) begin
      chk(mem[0][i] == ref_m[0][i], $sformatf("mem1 line %0d", i));
      chk(mem[1][i] == ref_m[1][i], $sformatf("mem2 line %0d", i));
      chk(prm[i] == ref_p[i], $sformatf("param line %0d", i));
    end
    // start
    send(1'b1, {2'd3, 1'b0, 4'd0, 9'd40});
    @(negedge clk);
    chk(nstart == 1 && cfg_ptr == 9'd40, "start pulse and pointer");
    chk(io_done == 0, "done low while running");
    @(negedge clk); core_done = 1; @(negedge clk); core_done = 0;
    chk(io_done == 1, "done after the core finished");
    // read back 5 lines of Mem2 from line 10
    send(1'b1, {2'd3, 1'b1, 1'b1, 12'd0});
    send(1'b0, 16'd10);
    send(1'b0, 16'd5);
    for (int i = 0; i < 5; i++) begin
      logic [31:0] v;
      for (int k = 0; k < 8; k++) begin
        do @(posedge clk); while (!io_dvalid);
        v[4*k +: 4] = io_dout;
      end
      chk(v == ref_m[1][10 + i], $sformatf("read back line %0d: %h vs %h", 10 + i, v, ref_m[1][10 + i]));
    end
    repeat (20) @(posedge clk);
    chk(!io_dvalid, "stream ends after the requested lines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
