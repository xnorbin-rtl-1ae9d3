// tb_dma: exercises every DMA function against memory models held in the testbench.
// Layer: 7 x 5 input, 3 x 3 kernel (5 x 3 output, odd width), 2 slices, 2 groups.
//   1. CMD_LOAD_ROW: the row-bank writes (bank y mod 7, address x, data) and the
//      cycle count (W words in W + 2 cycles).
//   2. CMD_LOAD_WGT: the K*K weight words, their order and their target BPU.
//   3. accumulation: two back-to-back cluster output streams (first slice, then a later
//      slice) at one value per cycle; the partial sums in the sink memory must be
//      their sum, and the other maps untouched.
//   4. CMD_BINARIZE: thresholded, packed output words for random partial sums (the
//      layer pools, so group 1 is staged at the group-0 position).
//   5. CMD_POOL: 2 x 2 OR pooling of the binary output just written.
module tb_dma;
  import xnorbin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, first = 1, busy, done;
  dma_cmd_e cmd = CMD_NONE;
  layer_desc_t desc;
  logic [15:0] og = '0, s = '0, y = '0, r = '0;
  logic [3:0] l = '0;
  logic src_re, snk_re, snk_we, prm_re, rb_we, wgt_valid;
  logic [1:0] snk_be;
  logic [LINE_AW-1:0] src_addr, snk_addr;
  logic [MEM_W-1:0] src_rdata, snk_wdata, snk_rdata, prm_rdata;
  logic [PARAM_AW-1:0] prm_addr;
  logic [2:0] rb_bank, wgt_bpu;
  logic [7:0] rb_addr;
  word_t rb_wdata, wgt_data;
  logic cl_valid = 0;
  logic [7:0] cl_col = '0;
  logic signed [15:0] cl_out = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dma dut (.*);

  // memory models (one-cycle read latency, half-word enables)
  logic [31:0] srcm [1024];
  logic [31:0] snkm [1024];
  logic [31:0] prm [PARAM_DEPTH];
  always @(posedge clk) begin
    if (src_re) src_rdata <= srcm[src_addr[9:0]];
    if (snk_we) begin
      if (snk_be[0]) snkm[snk_addr[9:0]][15:0] <= snk_wdata[15:0];
      if (snk_be[1]) snkm[snk_addr[9:0]][31:16] <= snk_wdata[31:16];
    end else if (snk_re) snk_rdata <= snkm[snk_addr[9:0]];
    if (prm_re) prm_rdata <= prm[prm_addr];
  end

  function automatic word_t hget(ref logic [31:0] m [1024], input int h);
    return (h % 2) ? m[h/2][31:16] : m[h/2][15:0];
  endfunction
  function automatic word_t pget(input int h);
    return (h % 2) ? prm[h/2][31:16] : prm[h/2][15:0];
  endfunction

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("MISMATCH %s", msg); end
  endtask

  task automatic issue(input dma_cmd_e c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask

  // monitors
  int nrb = 0, nwg = 0, cyc = 0;
  word_t rbq[$]; int rbaddr[$], rbbank[$];
  word_t wq[$]; int wb[$];
  always @(posedge clk) begin
    cyc++;
    if (rst_n && rb_we) begin rbq.push_back(rb_wdata); rbaddr.push_back(rb_addr); rbbank.push_back(rb_bank); end
    if (rst_n && wgt_valid) begin wq.push_back(wgt_data); wb.push_back(wgt_bpu); end
  end

  localparam int W = 7, H = 5, K = 3, NS = 2, OW = 5, OH = 3;

  initial begin
    int t0;
    for (int i = 0; i < 1024; i++) begin srcm[i] = $urandom; snkm[i] = $urandom; end
    for (int i = 0; i < PARAM_DEPTH; i++) prm[i] = $urandom;
    desc = '0;
    desc.w = 16'(W); desc.h = 16'(H); desc.k = 4'(K); desc.ns = 16'(NS); desc.nog = 16'd2; desc.pool = 1'b1;
    desc.in_base = 16'd3; desc.wgt_base = 16'd11; desc.thr_base = 16'd700;
    desc.psum_base = 16'd100; desc.out_base = 16'd1001; desc.pool_base = 16'd1200;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. row load
    s = 16'd1; y = 16'd4;
    issue(CMD_LOAD_ROW);
    t0 = cyc;
    do @(posedge clk); while (!done);
    chk(cyc - t0 <= W + 3, $sformatf("row load took %0d cycles", cyc - t0));
    @(posedge clk);
    chk(rbq.size() == W, "row word count");
    for (int x = 0; x < W && x < rbq.size(); x++) begin
      chk(rbq[x] == hget(srcm, 3 + (1 * H + 4) * W + x) && rbaddr[x] == x && rbbank[x] == 4,
          $sformatf("row word %0d", x));
    end

    // 2. weight load, map 16*1+5, slice 1
    og = 16'd1; l = 4'd5; s = 16'd1;
    issue(CMD_LOAD_WGT);
    do @(posedge clk); while (!done);
    @(posedge clk);
    chk(wq.size() == K * K, "weight word count");
    for (int i = 0; i < K * K && i < wq.size(); i++)
      chk(wq[i] == pget(11 + ((21 * NS + 1) * K + i / K) * K + i % K) && wb[i] == i / K,
          $sformatf("weight word %0d", i));

    // 3. accumulation of two slices for map 3, row 2
    begin
      int v0 [OW], v1 [OW];
      logic [31:0] snap [1024];
      l = 4'd3; r = 16'd2;
      snap = snkm;
      for (int pass = 0; pass < 2; pass++) begin
        @(negedge clk); first = (pass == 0);
        for (int c = 0; c < OW; c++) begin
          @(negedge clk);
          cl_valid = 1; cl_col = 8'(c);
          cl_out = 16'($urandom_range(0, 400) - 200);
          if (pass == 0) v0[c] = int'(cl_out); else v1[c] = int'(cl_out);
        end
        @(negedge clk); cl_valid = 0;
        repeat (4) @(posedge clk);
      end
      for (int c = 0; c < OW; c++) begin
        int h;
        h = (100 + (3 * OH + 2) * ((OW + 1) / 2)) * 2 + c;
        chk(int'(signed'(hget(snkm, h))) == v0[c] + v1[c], $sformatf("psum col %0d", c));
      end
      // nothing else in the partial-sum area changed
      for (int i = 0; i < 1024; i++)
        if (i < 100 + (3 * OH + 2) * 3 || i > 100 + (3 * OH + 2) * 3 + 2)
          if (snkm[i] != snap[i]) begin chk(0, $sformatf("stray write line %0d", i)); break; end
    end

    // 4. binarize group 1 from random partial sums
    og = 16'd1; first = 0;
    for (int i = 100; i < 100 + 16 * OH * 3; i++) snkm[i] = {16'($urandom_range(0, 200) - 100), 16'($urandom_range(0, 200) - 100)};
    for (int i = 0; i < 32; i++) prm[350 + i/2][16*(i%2) +: 16] = 16'($urandom_range(0, 100) - 50);
    issue(CMD_BINARIZE);
    do @(posedge clk); while (!done);
    @(posedge clk);
    for (int rr = 0; rr < OH; rr++)
      for (int c = 0; c < OW; c++) begin
        word_t e;
        for (int m = 0; m < 16; m++) begin
          int ps, th;
          ps = int'(signed'(hget(snkm, (100 + (m * OH + rr) * 3) * 2 + c)));
          th = int'(signed'(pget(700 + 16 + m)));
          e[m] = (ps >= th);
        end
        chk(hget(snkm, 1001 + (0 * OH + rr) * OW + c) == e, $sformatf("binary r%0d c%0d", rr, c));
      end

    // 5. pool group 1
    issue(CMD_POOL);
    do @(posedge clk); while (!done);
    @(posedge clk);
    for (int pc = 0; pc < OW / 2; pc++) begin
      word_t e;
      e = '0;
      for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
        e |= hget(snkm, 1001 + (0 * OH + dy) * OW + 2 * pc + dx);
      chk(hget(snkm, 1200 + (1 * (OH / 2) + 0) * (OW / 2) + pc) == e, $sformatf("pool c%0d", pc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
