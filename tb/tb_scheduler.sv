// tb_scheduler: runs the scheduler on two layer descriptors with a parameter-buffer
// model and a DMA model that answers each command after a random delay. It records
// the commands with their loop indices and every sweep, and compares the trace with
// the loop nest worked out in the testbench. Each sweep must read the banks at
// addresses 0..W-1 on consecutive cycles, shift one cycle later, tag columns
// 0..W-K in order and use rotation r mod 7. The memory role must toggle per layer
// and done must pulse once at the end.
module tb_scheduler;
  import xnorbin_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [PARAM_AW-1:0] cfg_ptr = 9'd16;
  logic busy, done, prm_re, cmd_valid, first, role, rb_re, img_shift, tag_valid;
  logic [PARAM_AW-1:0] prm_addr;
  logic [MEM_W-1:0] prm_rdata;
  dma_cmd_e cmd;
  layer_desc_t desc;
  logic [15:0] og, s, y, r;
  logic [3:0] l;
  logic [2:0] rot;
  logic [7:0] rb_raddr, tag_col;
  logic dma_done = 0;
  logic [31:0] n_sweeps;
  logic [15:0] n_layers;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  scheduler dut (.*);

  // parameter buffer model
  logic [31:0] prm [PARAM_DEPTH];
  always @(posedge clk) if (prm_re) prm_rdata <= prm[prm_addr];

  localparam int NL = 2;
  int LW[NL] = '{10, 5}, LH[NL] = '{10, 4}, LK[NL] = '{3, 2}, LNS[NL] = '{2, 1}, LNOG[NL] = '{2, 1}, LP[NL] = '{1, 0};

  string got[$], exp[$];

  // DMA model
  initial forever begin
    @(posedge clk);
    if (rst_n && cmd_valid) begin
      case (cmd)
        CMD_LOAD_ROW: got.push_back($sformatf("row og%0d s%0d y%0d", og, s, y));
        CMD_LOAD_WGT: got.push_back($sformatf("wgt og%0d s%0d r%0d l%0d first%0d", og, s, r, l, first));
        CMD_BINARIZE: got.push_back($sformatf("bin og%0d", og));
        CMD_POOL:     got.push_back($sformatf("pool og%0d", og));
        default:      got.push_back("bad");
      endcase
      repeat ($urandom_range(1, 5)) @(posedge clk);
      dma_done <= 1;
      @(posedge clk);
      dma_done <= 0;
    end
  end

  // sweep monitor
  int sw_rd = 0, sw_sh = 0, sw_tag = 0, lay = 0, ndone = 0, roles = 0;
  logic rb_re_q = 0, role_q = 0;
  always @(posedge clk) if (rst_n) begin
    rb_re_q <= rb_re;
    role_q <= role;
    if (role != role_q) roles++;
    if (done) ndone++;
    if (rb_re) begin
      checks++;
      if (int'(rb_raddr) != sw_rd) begin failures++; $display("bank read address %0d expected %0d", rb_raddr, sw_rd); end
      sw_rd++;
    end
    if (img_shift) begin
      checks += 2;
      if (!rb_re_q) begin failures++; $display("shift without a read in the previous cycle"); end
      if (int'(rot) != int'(r) % 7) begin failures++; $display("rotation %0d for row %0d", rot, r); end
      sw_sh++;
    end
    if (tag_valid) begin
      checks++;
      if (int'(tag_col) != sw_tag) begin failures++; $display("tag column %0d expected %0d", tag_col, sw_tag); end
      sw_tag++;
    end
    if (rb_re_q && !rb_re) begin
      got.push_back($sformatf("sweep reads%0d tags%0d", sw_rd, sw_tag));
    end
    if (!rb_re && !img_shift) begin sw_rd = 0; sw_tag = 0; end
  end

  initial begin
    for (int i = 0; i < PARAM_DEPTH; i++) prm[i] = '0;
    for (int n = 0; n < NL; n++) begin
      int b;
      b = 16 + n * DESC_LINES;
      prm[b+0] = {16'(LH[n]), 16'(LW[n])};
      prm[b+1] = {16'(LNS[n]), 10'd0, (n == NL-1) ? 1'b1 : 1'b0, 1'(LP[n]), 4'(LK[n])};
      prm[b+2] = {16'd0, 16'(LNOG[n])};
      // the expected trace
      for (int g = 0; g < LNOG[n]; g++) begin
        for (int sl = 0; sl < LNS[n]; sl++)
          for (int rr = 0; rr <= LH[n] - LK[n]; rr++) begin
            if (rr == 0) for (int yy = 0; yy < LK[n]; yy++) exp.push_back($sformatf("row og%0d s%0d y%0d", g, sl, yy));
            else exp.push_back($sformatf("row og%0d s%0d y%0d", g, sl, rr + LK[n] - 1));
            for (int ll = 0; ll < 16; ll++) begin
              exp.push_back($sformatf("wgt og%0d s%0d r%0d l%0d first%0d", g, sl, rr, ll, sl == 0));
              exp.push_back($sformatf("sweep reads%0d tags%0d", LW[n], LW[n] - LK[n] + 1));
            end
          end
        exp.push_back($sformatf("bin og%0d", g));
        if (LP[n] != 0) exp.push_back($sformatf("pool og%0d", g));
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    do @(posedge clk); while (busy);
    repeat (3) @(posedge clk);
    checks++;
    if (got.size() != exp.size()) begin failures++; $display("trace length %0d expected %0d", got.size(), exp.size()); end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        if (failures < 10) $display("trace %0d: got '%s' expected '%s'", i, got[i], exp[i]);
      end
    end
    checks += 3;
    if (roles != NL) begin failures++; $display("role toggled %0d times", roles); end
    if (ndone != 1) begin failures++; $display("done pulsed %0d times", ndone); end
    if (int'(n_sweeps) != (exp.size() > 0 ? 16 * (2 * 2 * 8 + 1 * 1 * 3) : 0)) begin failures++; $display("n_sweeps %0d", n_sweeps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
