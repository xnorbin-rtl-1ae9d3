// tb_bpu_cluster: for kernel sizes 1..7 loads a random K x K kernel into the weight
// CSRs, streams K random image rows through the cluster one column per cycle without
// gaps and checks (a) every output against a direct 2D bipolar convolution, (b) that
// results leave at one per cycle with the tagged column, and (c) the pipeline latency
// of 3 clock edges from the completing shift.
module tb_bpu_cluster;
  import xnorbin_pkg::*;
  localparam int WID = 30;
  logic clk = 0, rst_n = 0;
  logic [3:0] k = 4'd7;
  logic img_shift = 0;
  word_t [6:0] img_in = '0;
  logic [6:0] wgt_shift = '0;
  word_t wgt_in = '0;
  logic tag_valid = 0;
  logic [7:0] tag_col = '0;
  logic out_valid;
  logic [7:0] out_col;
  logic signed [15:0] out;
  int checks = 0, failures = 0;
  word_t w [7][7];
  word_t img [7][WID];
  int kk;
  int shift_cyc [WID];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  bpu_cluster dut (.*);

  // checker: every valid output must match the model and arrive 3 edges after its shift
  int expect_col = 0;
  always @(posedge clk) if (out_valid) begin
    int exp;
    exp = 0;
    for (int ky = 0; ky < kk; ky++)
      for (int kx = 0; kx < kk; kx++)
        exp += bipolar_dot(img[ky][int'(out_col) + kx], w[ky][kx]);
    checks += 3;
    if (int'(out) != exp) begin failures++; $display("MISMATCH k=%0d col=%0d got %0d exp %0d", kk, out_col, out, exp); end
    if (int'(out_col) != expect_col) begin failures++; $display("column order: got %0d exp %0d", out_col, expect_col); end
    if (cyc - shift_cyc[int'(out_col) + kk - 1] != 3) begin failures++; $display("latency %0d", cyc - shift_cyc[int'(out_col) + kk - 1]); end
    expect_col++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n <= 7; n++) begin
      kk = n; k = 4'(n); expect_col = 0;
      for (int ky = 0; ky < n; ky++)
        for (int kx = 0; kx < n; kx++) begin
          w[ky][kx] = word_t'($urandom);
          @(negedge clk); wgt_shift = 7'(1 << ky); wgt_in = w[ky][kx];
        end
      @(negedge clk); wgt_shift = '0;
      for (int y = 0; y < 7; y++) for (int x = 0; x < WID; x++) img[y][x] = word_t'($urandom);
      for (int x = 0; x < WID; x++) begin
        @(negedge clk);
        img_shift = 1;
        for (int y = 0; y < 7; y++) img_in[y] = img[y][x];
        tag_valid = (x >= n - 1);
        tag_col = 8'(x - n + 1);
        shift_cyc[x] = cyc + 1;
      end
      @(negedge clk); img_shift = 0; tag_valid = 0;
      repeat (5) @(posedge clk);
      checks++;
      if (expect_col != WID - n + 1) begin failures++; $display("k=%0d: %0d outputs, expected %0d", n, expect_col, WID - n + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
