// main_memory: the two image memories that hold feature maps and partial sums.
//
// Img Mem1 (4096 x 32 bit, 128 kbit) and Img Mem2 (8192 x 32 bit, 256 kbit) are
// single-port SRAMs. During a layer one is the data source (input feature maps) and
// the other the data sink (partial sums and output maps); the roles are assigned by
// mem_interconnect. Each port: re / we / 2-bit half enable / line address /
// 32-bit data, read data one clock after re. Sizes follow the published memory
// table; line addresses are LINE_AW bits wide and Mem1 ignores the top bit.
module main_memory
  import xnorbin_pkg::*;
#(
  parameter int unsigned DEPTH1 = MEM1_DEPTH,
  parameter int unsigned DEPTH2 = MEM2_DEPTH
) (
  input  logic               clk,
  input  logic [1:0]         re,
  input  logic [1:0]         we,
  input  logic [1:0][1:0]    be,
  input  logic [1:0][LINE_AW-1:0] addr,
  input  logic [1:0][MEM_W-1:0]   wdata,
  output logic [1:0][MEM_W-1:0]   rdata
);
  sram_sp #(.DEPTH(DEPTH1), .W(MEM_W)) u_mem1 (
    .clk, .re(re[0]), .we(we[0]), .be(be[0]),
    .addr(addr[0][$clog2(DEPTH1)-1:0]), .wdata(wdata[0]), .rdata(rdata[0]));
  sram_sp #(.DEPTH(DEPTH2), .W(MEM_W)) u_mem2 (
    .clk, .re(re[1]), .we(we[1]), .be(be[1]),
    .addr(addr[1][$clog2(DEPTH2)-1:0]), .wdata(wdata[1]), .rdata(rdata[1]));
endmodule
