// row_bank: one row bank, a two-port register file that buffers one image row of a
// 16-map input slice (one 16-bit word per pixel).
//
// One write port (filled by the DMA) and one read port (read by the convolution
// sweep) work in the same cycle. The read is synchronous: rdata shows the word at
// raddr one clock after re_i. A read and a write to the same address in one cycle
// return the old word. 256 x 16 bit follows the published memory table; the
// register file is written here as a plain array and is not reset.
module row_bank #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
