// csr: controlled shift register, the working memory of a BPU.
//
// Holds DEPTH words of W bits. When shift is high a new word enters slot 0 and every
// word moves one slot up (slot DEPTH-1 drops out); otherwise the contents hold. All
// slots are read in parallel. After K shifts, slot j holds the word shifted in j
// shifts ago, so slot 0 is the newest column of the convolution window.
// Depth 7 and width 16 follow the published figures; the shift direction is this
// design's choice. Contents are cleared by reset.
module csr #(
  parameter int unsigned DEPTH = 7,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     shift,
  input  logic [W-1:0]             din,
  output logic [DEPTH-1:0][W-1:0]  q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else if (shift) q <= {q[DEPTH-2:0], din};
  end
endmodule
