// tb_xnorbin: end-to-end test of the accelerator through its pins.
//
// Builds a three-layer binary network with random weights, thresholds and input maps,
// loads it through the IO interface, starts the accelerator, reads the results back
// nibble by nibble and compares them with a behavioural model of the same layers
// (bipolar XNOR-popcount convolution, accumulation over 16-map slices, threshold
// re-binarization, 2 x 2 OR pooling).
//   layer 0: 9 x 10 input, 32 maps (2 slices), 3 x 3 kernel, 32 output maps (2 groups),
//            7 x 8 output (odd width, 8 rows so the row-bank ring wraps), pooled to 3 x 4
//   layer 1: 3 x 4 input, 32 maps, 2 x 2 kernel, 16 output maps -> 2 x 3
//   layer 2: 2 x 3 input, 16 maps, 2 x 2 kernel, 16 output maps -> 1 x 2 (last)
// It also counts how often each mechanism ran (row-bank rotation wrap, read-add-write
// of later slices, trailing odd column, pooling, memory role swap, one output per
// cycle during a sweep) and fails if one never did.
module tb_xnorbin;
  import xnorbin_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [15:0] io_din = '0;
  logic io_valid = 0, io_cmd = 0;
  logic [3:0] io_dout;
  logic io_dvalid, io_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xnorbin dut (.*);

  // ------------------------------------------------------------ network
  localparam int NL = 3;
  int L_W[NL]    = '{9, 3, 2};
  int L_H[NL]    = '{10, 4, 3};
  int L_K[NL]    = '{3, 2, 2};
  int L_NS[NL]   = '{2, 2, 1};
  int L_NOG[NL]  = '{2, 1, 1};
  int L_POOL[NL] = '{1, 0, 0};
  int L_WGT[NL]  = '{64, 672, 816};
  int L_THR[NL]  = '{640, 800, 880};
  int L_IN[NL]   = '{0, 1300, 400};
  int L_OUT[NL]  = '{1100, 400, 4400};
  int L_PSUM[NL] = '{0, 0, 2000};
  int L_PB[NL]   = '{1300, 0, 0};

  logic [31:0] prm_img [PARAM_DEPTH];
  logic [31:0] mem1_img [MEM1_DEPTH];
  // model feature maps: fm[layer][slice][y][x] (layer 0 input, then outputs)
  word_t fm_in  [NL][2][10][10];
  word_t fm_out [NL][2][10][10];   // binarized output per group
  word_t fm_pool[2][10][10];
  word_t wgt [NL][32][2][7][7];
  logic signed [15:0] thr [NL][32];


  task automatic set_prm_half(input int h, input word_t v);
    if (h % 2 == 0) prm_img[h/2][15:0] = v; else prm_img[h/2][31:16] = v;
  endtask

  task automatic build();
    for (int i = 0; i < PARAM_DEPTH; i++) prm_img[i] = '0;
    for (int i = 0; i < MEM1_DEPTH; i++) mem1_img[i] = '0;
    for (int n = 0; n < NL; n++) begin
      int b = n * DESC_LINES;
      prm_img[b+0] = {16'(L_H[n]), 16'(L_W[n])};
      prm_img[b+1] = {16'(L_NS[n]), 10'd0, (n == NL-1) ? 1'b1 : 1'b0, 1'(L_POOL[n]), 4'(L_K[n])};
      prm_img[b+2] = {16'(L_WGT[n]), 16'(L_NOG[n])};
      prm_img[b+3] = {16'(L_IN[n]), 16'(L_THR[n])};
      prm_img[b+4] = {16'(L_PSUM[n]), 16'(L_OUT[n])};
      prm_img[b+5] = {16'd0, 16'(L_PB[n])};
      for (int m = 0; m < 16 * L_NOG[n]; m++) begin
        for (int s = 0; s < L_NS[n]; s++)
          for (int ky = 0; ky < L_K[n]; ky++)
            for (int kx = 0; kx < L_K[n]; kx++) begin
              wgt[n][m][s][ky][kx] = word_t'($urandom);
              set_prm_half(L_WGT[n] + ((m * L_NS[n] + s) * L_K[n] + ky) * L_K[n] + kx,
                           wgt[n][m][s][ky][kx]);
            end
        thr[n][m] = 16'(int'($urandom_range(0, 8)) - 4);
        set_prm_half(L_THR[n] + m, thr[n][m]);
      end
    end
    for (int s = 0; s < L_NS[0]; s++)
      for (int y = 0; y < L_H[0]; y++)
        for (int x = 0; x < L_W[0]; x++) begin
          int h = L_IN[0] + (s * L_H[0] + y) * L_W[0] + x;
          fm_in[0][s][y][x] = word_t'($urandom);
          if (h % 2 == 0) mem1_img[h/2][15:0] = fm_in[0][s][y][x];
          else            mem1_img[h/2][31:16] = fm_in[0][s][y][x];
        end
  endtask

  // behavioural model of one layer
  task automatic model(input int n);
    int ow = L_W[n] - L_K[n] + 1, oh = L_H[n] - L_K[n] + 1;
    for (int g = 0; g < L_NOG[n]; g++)
      for (int r = 0; r < oh; r++)
        for (int c = 0; c < ow; c++) begin
          word_t bits = '0;
          for (int ml = 0; ml < 16; ml++) begin
            int acc = 0;
            int m = g * 16 + ml;
            for (int s = 0; s < L_NS[n]; s++)
              for (int ky = 0; ky < L_K[n]; ky++)
                for (int kx = 0; kx < L_K[n]; kx++)
                  acc += bipolar_dot(fm_in[n][s][r+ky][c+kx], wgt[n][m][s][ky][kx]);
            bits[ml] = (acc >= int'(thr[n][m]));
          end
          fm_out[n][g][r][c] = bits;
        end
    if (L_POOL[n] != 0)
      for (int g = 0; g < L_NOG[n]; g++)
        for (int r = 0; r < oh / 2; r++)
          for (int c = 0; c < ow / 2; c++)
            fm_pool[g][r][c] = fm_out[n][g][2*r][2*c] | fm_out[n][g][2*r][2*c+1]
                             | fm_out[n][g][2*r+1][2*c] | fm_out[n][g][2*r+1][2*c+1];
    if (n + 1 < NL)
      for (int g = 0; g < L_NOG[n]; g++)
        for (int r = 0; r < L_H[n+1]; r++)
          for (int c = 0; c < L_W[n+1]; c++)
            fm_in[n+1][g][r][c] = (L_POOL[n] != 0) ? fm_pool[g][r][c] : fm_out[n][g][r][c];
  endtask

  // ------------------------------------------------------------ pin protocol
  task automatic send(input logic cmd, input logic [15:0] d);
    @(posedge clk); io_valid <= 1'b1; io_cmd <= cmd; io_din <= d;
    @(posedge clk); io_valid <= 1'b0; io_cmd <= 1'b0;
  endtask

  task automatic load(input int op, input int lines);
    send(1'b1, {2'(op), 14'd0});
    for (int i = 0; i < lines; i++) begin
      logic [31:0] v = (op == 2) ? prm_img[i] : mem1_img[i];
      send(1'b0, v[15:0]);
      send(1'b0, v[31:16]);
    end
  endtask

  task automatic read_lines(input int mem, input int line0, input int cnt, ref logic [31:0] buf_q []);
    send(1'b1, {2'd3, 1'b1, 1'(mem), 12'd0});
    send(1'b0, 16'(line0));
    send(1'b0, 16'(cnt));
    for (int i = 0; i < cnt; i++) begin
      logic [31:0] v = '0;
      for (int k = 0; k < 8; k++) begin
        do @(posedge clk); while (!io_dvalid);
        v[4*k +: 4] = io_dout;
      end
      buf_q[i] = v;
    end
  endtask

  function automatic word_t half_from(input logic [31:0] b [], input int base_line, input int h);
    logic [31:0] v = b[h/2 - base_line];
    return (h % 2) ? v[31:16] : v[15:0];
  endfunction

  task automatic check_word(input string what, input word_t got, input word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int ev_rot_wrap = 0, ev_rmw = 0, ev_tail = 0, ev_pool = 0, ev_swap = 0, ev_full_rate = 0;
  int run_len = 0;
  logic role_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sch.img_shift && dut.rot == 3'd0 && dut.r != 16'd0) ev_rot_wrap++;
    if (dut.u_dma.pair_done && !dut.first) ev_rmw++;
    if (dut.u_dma.tail_q) ev_tail++;
    if (dut.u_dma.st == dut.u_dma.S_PWR) ev_pool++;
    role_q <= dut.role;
    if (dut.role != role_q) ev_swap++;
    // one cluster result per cycle once the window is full
    if (dut.cl_valid) run_len++;
    else begin
      if (run_len == L_W[0] - L_K[0] + 1) ev_full_rate++;
      run_len = 0;
    end
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rb [];
    build();
    for (int n = 0; n < NL; n++) model(n);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    load(2, 448);
    load(0, 100);
    send(1'b1, {2'd3, 14'd0});
    do @(posedge clk); while (!io_done);
    $display("run finished at %0t", $time);
    for (int n = 0; n < NL; n++) begin
      int ow, oh, mem, h0, nh;
      ow = L_W[n] - L_K[n] + 1; oh = L_H[n] - L_K[n] + 1;
      mem = (n % 2 == 0) ? 1 : 0;   // sink memory of layer n
      h0 = L_OUT[n]; nh = L_NOG[n] * oh * ow;
      // a pooling layer stages each group's unpooled map at the group-0 place: the last
      // group is what remains there
      rb = new[nh / 2 + 2];
      read_lines(mem, h0 / 2, nh / 2 + 1, rb);
      for (int g = 0; g < L_NOG[n]; g++)
        if (L_POOL[n] == 0 || g == L_NOG[n] - 1)
        for (int r = 0; r < oh; r++)
          for (int c = 0; c < ow; c++)
            check_word($sformatf("layer %0d out g%0d r%0d c%0d", n, g, r, c),
                       half_from(rb, h0 / 2, h0 + (((L_POOL[n] != 0) ? 0 : g) * oh + r) * ow + c), fm_out[n][g][r][c]);
      if (L_POOL[n] != 0) begin
        h0 = L_PB[n]; nh = L_NOG[n] * (oh / 2) * (ow / 2);
        rb = new[nh / 2 + 2];
        read_lines(mem, h0 / 2, nh / 2 + 1, rb);
        for (int g = 0; g < L_NOG[n]; g++)
          for (int r = 0; r < oh / 2; r++)
            for (int c = 0; c < ow / 2; c++)
              check_word($sformatf("layer %0d pool g%0d r%0d c%0d", n, g, r, c),
                         half_from(rb, h0 / 2, h0 + (g * (oh / 2) + r) * (ow / 2) + c), fm_pool[g][r][c]);
      end
    end

    $display("events: rot_wrap=%0d rmw=%0d tail=%0d pool=%0d swap=%0d full_rate_sweeps=%0d",
             ev_rot_wrap, ev_rmw, ev_tail, ev_pool, ev_swap, ev_full_rate);
    checks += 6;
    if (ev_rot_wrap == 0) begin failures++; $display("never: row-bank rotation wrap"); end
    if (ev_rmw == 0)      begin failures++; $display("never: read-add-write"); end
    if (ev_tail == 0)     begin failures++; $display("never: trailing odd column"); end
    if (ev_pool == 0)     begin failures++; $display("never: pooling"); end
    if (ev_swap < 3)      begin failures++; $display("never: memory role swap per layer"); end
    if (ev_full_rate == 0) begin failures++; $display("never: one output per cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
