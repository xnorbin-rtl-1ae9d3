// tb_bpu: loads K weights into a BPU, slides a random image row through it and checks
// every row sum (one per cycle, one cycle after the shift) against a direct 1D
// bipolar convolution, for kernel widths 1..7.
module tb_bpu;
  import xnorbin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] k = 4'd7;
  logic img_shift = 0, wgt_shift = 0;
  word_t img_in = '0, wgt_in = '0;
  logic signed [7:0] row_sum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  bpu dut (.*);

  initial begin
    word_t w [7];
    word_t row [40];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int kk = 1; kk <= 7; kk++) begin
      k = 4'(kk);
      for (int j = 0; j < kk; j++) begin
        w[j] = word_t'($urandom);
        @(negedge clk); wgt_shift = 1; wgt_in = w[j];
      end
      @(negedge clk); wgt_shift = 0;
      for (int x = 0; x < 40; x++) row[x] = word_t'($urandom);
      for (int x = 0; x < 40; x++) begin
        @(negedge clk); img_shift = 1; img_in = row[x];
        @(posedge clk); #1 img_shift = 0;
        @(posedge clk); #1;
        if (x >= kk - 1) begin
          int exp;
          exp = 0;
          for (int j = 0; j < kk; j++) exp += bipolar_dot(row[x - kk + 1 + j], w[j]);
          checks++;
          if (int'(row_sum) != exp) begin
            failures++;
            $display("MISMATCH k=%0d x=%0d got %0d expected %0d", kk, x, row_sum, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
