// crossbar: connects the row banks and the weight stream to the BPU cluster.
//
// Image path: the row banks form a ring; input row y lives in bank y mod N. For
// output row r, BPU i (kernel row i) needs input row r+i, so BPU i is connected to
// bank (i + rot) mod N with rot = r mod N. Moving the window down one row only
// advances rot, so the K-1 rows already buffered are reused without copying.
// Weight path: a weight word from the DMA is steered to the weight CSR of the BPU
// selected by wgt_bpu (one-hot shift enable).
// Purely combinational. The published design names a crossbar between rotated row
// banks and CSRs; the modulo mapping is this design's.
module crossbar
  import xnorbin_pkg::*;
#(
  parameter int unsigned N = KMAX
) (
  input  word_t [N-1:0]           bank_rdata,
  input  logic [$clog2(N)-1:0]    rot,
  output word_t [N-1:0]           bpu_img,
  input  logic                    wgt_valid,
  input  logic [$clog2(N)-1:0]    wgt_bpu,
  input  word_t                   wgt_data,
  output logic [N-1:0]            bpu_wgt_shift,
  output word_t                   bpu_wgt
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int unsigned b;
      b = (i + int'(rot)) % N;
      bpu_img[i] = bank_rdata[b];
      bpu_wgt_shift[i] = wgt_valid && (int'(wgt_bpu) == i);
    end
    bpu_wgt = wgt_data;
  end
endmodule
