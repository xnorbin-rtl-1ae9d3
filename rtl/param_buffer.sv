// param_buffer: two-port register file (512 x 32 bit, 16 kbit) holding the binary
// weights, the per-output-map thresholds and the layer descriptors.
//
// The write port is filled from the IO interface; the read port is shared by the
// scheduler (descriptors) and the DMA (weights, thresholds). Read data appears one
// clock after re. Size and port count follow the published memory table. Contents
// are not reset.
module param_buffer
  import xnorbin_pkg::*;
#(
  parameter int unsigned DEPTH = PARAM_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [MEM_W-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [MEM_W-1:0]         rdata
);
  logic [MEM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
