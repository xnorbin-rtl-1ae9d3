// tb_compute_unit: random partial-sum pairs, new cluster results and thresholds;
// checks the 16-bit wrapping accumulation (and its bypass for the first slice) and
// the threshold comparison against integer arithmetic.
module tb_compute_unit;
  logic [31:0] psum_line, acc_line;
  logic signed [15:0] new_lo, new_hi, bin_psum, bin_thr;
  logic first, bin_bit;
  int checks = 0, failures = 0;

  compute_unit dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int lo, hi;
      psum_line = $urandom; new_lo = 16'($urandom_range(0, 224) - 112); new_hi = 16'($urandom_range(0, 224) - 112);
      first = 1'($urandom);
      bin_psum = 16'($urandom_range(0, 400) - 200); bin_thr = 16'($urandom_range(0, 400) - 200);
      if (i % 10 == 0) bin_thr = bin_psum;
      #1;
      lo = (first ? 0 : int'(signed'(psum_line[15:0]))) + int'(new_lo);
      hi = (first ? 0 : int'(signed'(psum_line[31:16]))) + int'(new_hi);
      checks += 3;
      if (acc_line[15:0] !== 16'(lo)) begin failures++; $display("MISMATCH lo"); end
      if (acc_line[31:16] !== 16'(hi)) begin failures++; $display("MISMATCH hi"); end
      if (bin_bit !== (int'(bin_psum) >= int'(bin_thr))) begin failures++; $display("MISMATCH bit %0d %0d", bin_psum, bin_thr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
