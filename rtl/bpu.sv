// bpu: Basic Processing Unit, one kernel row of the convolution.
//
// An image CSR and a weight CSR (7 x 16 bit each) feed 7 xnor_sum units, unit j
// pairing image slot j with weight slot j. Their signed 6-bit results are added into
// an 8-bit signed row sum: one output of a 1D convolution along an image row per
// cycle. Units j >= k are disabled so kernels narrower than 7 are supported.
// The image CSR shifts one pixel word per cycle while the window slides; the weight
// CSR is loaded by K shifts before a sweep and then holds.
// Timing: the row sum is registered (the pipeline stage of the cluster), so it
// reflects the CSR contents one clock earlier. The structure follows the published
// block diagram; placing the register at the row sum is this design's choice.
module bpu
  import xnorbin_pkg::*;
#(
  parameter int unsigned N_XS  = KMAX,
  parameter int unsigned SUM_W = BPU_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              k,         // active kernel width, 1..N_XS
  input  logic                    img_shift,
  input  word_t                   img_in,
  input  logic                    wgt_shift,
  input  word_t                   wgt_in,
  output logic signed [SUM_W-1:0] row_sum
);
  word_t [N_XS-1:0] img_q, wgt_q;
  logic signed [XS_W-1:0] xs [N_XS];
  logic signed [SUM_W-1:0] sum_c;

  csr #(.DEPTH(N_XS), .W(VEC)) u_img (.clk, .rst_n, .shift(img_shift), .din(img_in), .q(img_q));
  csr #(.DEPTH(N_XS), .W(VEC)) u_wgt (.clk, .rst_n, .shift(wgt_shift), .din(wgt_in), .q(wgt_q));

  for (genvar j = 0; j < N_XS; j++) begin : g_xs
    xnor_sum u_xs (.img(img_q[j]), .wgt(wgt_q[j]), .en(j < int'(k)), .res(xs[j]));
  end

  always_comb begin
    sum_c = '0;
    for (int j = 0; j < N_XS; j++) sum_c += SUM_W'(xs[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_sum <= '0;
    else        row_sum <= sum_c;
  end
endmodule
