// tb_csr: shifts random words into the controlled shift register with random shift
// enables and compares all parallel outputs with a queue model every cycle.
module tb_csr;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [15:0] din = '0;
  logic [6:0][15:0] q;
  logic [15:0] model [7];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  csr #(.DEPTH(7), .W(16)) dut (.*);

  initial begin
    for (int j = 0; j < 7; j++) model[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      shift = 1'($urandom_range(0, 3) != 0);
      din = 16'($urandom);
      @(posedge clk);
      if (shift) begin
        for (int j = 6; j > 0; j--) model[j] = model[j-1];
        model[0] = din;
      end
      #1;
      for (int j = 0; j < 7; j++) begin
        checks++;
        if (q[j] !== model[j]) begin
          failures++;
          $display("MISMATCH slot %0d got %h expected %h", j, q[j], model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
