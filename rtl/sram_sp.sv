// sram_sp: single-port SRAM, one read or write per cycle, 32-bit lines with a write
// enable per 16-bit half.
//
// Stands for a single-port SRAM macro; written as an array so it simulates and
// synthesises to a memory. A read returns the line one clock after re (synchronous
// read); a write updates the halves selected by be. Contents are not reset.
module sram_sp #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic                     we,
  input  logic [1:0]               be,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      if (be[0]) mem[addr][W/2-1:0] <= wdata[W/2-1:0];
      if (be[1]) mem[addr][W-1:W/2] <= wdata[W-1:W/2];
    end else if (re) begin
      rdata <= mem[addr];
    end
  end
endmodule
