// tb_crossbar: checks the rotated bank-to-BPU mapping (BPU i sees bank (i+rot) mod 7)
// for every rotation and the one-hot steering of weight words.
module tb_crossbar;
  import xnorbin_pkg::*;
  word_t [6:0] bank_rdata, bpu_img;
  logic [2:0] rot = '0, wgt_bpu = '0;
  logic wgt_valid = 0;
  word_t wgt_data = '0, bpu_wgt;
  logic [6:0] bpu_wgt_shift;
  int checks = 0, failures = 0;

  crossbar #(.N(7)) dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int b = 0; b < 7; b++) bank_rdata[b] = word_t'($urandom);
      rot = 3'($urandom_range(0, 6));
      wgt_valid = 1'($urandom); wgt_bpu = 3'($urandom_range(0, 6)); wgt_data = word_t'($urandom);
      #1;
      for (int i = 0; i < 7; i++) begin
        checks += 2;
        if (bpu_img[i] !== bank_rdata[(i + int'(rot)) % 7]) begin failures++; $display("MISMATCH img bpu %0d rot %0d", i, rot); end
        if (bpu_wgt_shift[i] !== (wgt_valid && int'(wgt_bpu) == i)) begin failures++; $display("MISMATCH wgt shift %0d", i); end
      end
      checks++;
      if (bpu_wgt !== wgt_data) begin failures++; $display("MISMATCH wgt data"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
