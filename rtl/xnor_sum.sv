// xnor_sum: one XNOR-and-popcount unit.
//
// Computes the bipolar dot product of a 16-bit packed feature-map vector (16 maps at
// one pixel) with a 16-bit weight vector: bits are +1 (1) / -1 (0), the XNOR gives the
// sign of each product and a popcount adder counts the +1 products. The result is
// returned as the signed sum 2*popcount - 16 in the 6-bit width of the published
// block diagram; a disabled unit (kernel narrower than 7) returns 0.
// Purely combinational; the BPU registers its row sum.
module xnor_sum
  import xnorbin_pkg::*;
#(
  parameter int unsigned VEC_W = VEC,
  parameter int unsigned RES_W = XS_W
) (
  input  logic [VEC_W-1:0]        img,
  input  logic [VEC_W-1:0]        wgt,
  input  logic                    en,
  output logic signed [RES_W-1:0] res
);
  logic [VEC_W-1:0]       prod;
  logic [$clog2(VEC_W+1)-1:0] pc;

  always_comb begin
    prod = ~(img ^ wgt);
    pc   = '0;
    for (int i = 0; i < VEC_W; i++) pc += {{($clog2(VEC_W+1)-1){1'b0}}, prod[i]};
    res  = en ? RES_W'(2 * int'(pc) - int'(VEC_W)) : '0;
  end
endmodule
